// bfp_normalize: converts a block of N FP16 values to block floating point (BFP).
//
// Following the normalisation algorithm, the block's largest exponent is found and every
// significand is shifted right by its distance to that exponent, so the whole block shares
// one exponent and the mantissas can be fed to fixed-point multipliers. Structure as in the
// normalisation-module diagram: stage 1 finds the maximum exponent while the data is held in
// a delay register, stage 2 performs the shifts. Latency is 2 cycles, one block per cycle.
// Output mantissas are 16-bit signed: the 11-bit significand (hidden one included) sits in
// bits [14:4], leaving 4 low bits that keep the bits shifted out (the widened mantissa
// used for accuracy maintenance); bits below those are truncated. A zero or subnormal input
// gives mantissa 0. A BFP value is mant * 2^(exp - 29).
module bfp_normalize
  import stdd_pkg::*;
#(
  parameter int N = 32
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               in_valid,
  input  fp16_t              in_data [N],
  output logic               out_valid,
  output logic signed [15:0] out_mant [N],
  output logic [4:0]         out_exp
);
  fp16_t      d1 [N];
  logic [4:0] emax1;
  logic       v1;
  logic [4:0] emax_c;

  always_comb begin
    emax_c = '0;
    for (int i = 0; i < N; i++)
      if (in_data[i].e > emax_c) emax_c = in_data[i].e;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v1 <= 1'b0; out_valid <= 1'b0; emax1 <= '0; out_exp <= '0;
      for (int i = 0; i < N; i++) begin d1[i] <= '0; out_mant[i] <= '0; end
    end else begin
      v1 <= in_valid;
      if (in_valid) begin
        emax1 <= emax_c;
        d1    <= in_data;
      end
      out_valid <= v1;
      if (v1) begin
        out_exp <= emax1;
        for (int i = 0; i < N; i++) begin
          logic [14:0] sig;
          logic [4:0]  shamt;
          sig  = (d1[i].e == 5'd0) ? 15'd0 : {1'b1, d1[i].m, 4'b0000};
          shamt = emax1 - d1[i].e;
          sig  = sig >> shamt;
          out_mant[i] <= d1[i].s ? -$signed({1'b0, sig}) : $signed({1'b0, sig});
        end
      end
    end
  end
endmodule
