// tb_conv_pkg: reference models shared by the engine and system testbenches.
//   * make_weights: random integer kernels and their memory image in the engine's weight
//     layout (per output group, input group, kernel position: exponent word, then N*M
//     mantissas n-major); for 3x3 stride-1 layers the stored kernels are the Winograd-domain
//     kernels (24G) g (24G)^T, so the effective spatial kernel is g*576*2^wexp exactly;
//   * conv_ref / pool_ref: real-valued convolution (zero padding, stride 1 or 2) and 2x2
//     max pooling on channel-major, row-major maps, with a magnitude sum per output used to
//     bound the rounding error of the 16-bit block floating point datapath.
package tb_conv_pkg;
  localparam int G24 [6][3] = '{'{6, 0, 0}, '{-4, -4, -4}, '{-4, 4, -4},
                                '{1, 2, 4}, '{1, -2, 4}, '{0, 0, 24}};

  // g: [o][c][ky][kx] integers, returns the memory words and the effective real kernels
  function automatic void make_weights(input int cout, input int cin, input int k,
                                       input bit wino, input int wexp, input int m_w,
                                       input int n_w, input int gmax,
                                       output real keff [], ref logic [15:0] words [$]);
    int g [];
    int kp, nocg, nicg;
    real sc;
    g = new[cout * cin * k * k];
    keff = new[cout * cin * k * k];
    sc = (wino ? 576.0 : 1.0) * (2.0 ** wexp);
    foreach (g[i]) begin
      g[i] = int'($urandom % (2 * gmax + 1)) - gmax;
      keff[i] = real'(g[i]) * sc;
    end
    kp = wino ? 36 : k * k;
    nocg = (cout + n_w - 1) / n_w;
    nicg = (cin + m_w - 1) / m_w;
    words.delete();
    for (int ocg = 0; ocg < nocg; ocg++)
      for (int icg = 0; icg < nicg; icg++)
        for (int p = 0; p < kp; p++) begin
          words.push_back(16'(wexp));
          for (int n = 0; n < n_w; n++)
            for (int m = 0; m < m_w; m++) begin
              int o, c, v;
              o = ocg * n_w + n; c = icg * m_w + m; v = 0;
              if (o < cout && c < cin) begin
                if (!wino) v = g[((o * cin + c) * k + p / k) * k + p % k];
                else begin
                  int i, j;
                  i = p / 6; j = p % 6;
                  for (int a = 0; a < 3; a++)
                    for (int b = 0; b < 3; b++)
                      v += G24[i][a] * g[((o * cin + c) * 3 + a) * 3 + b] * G24[j][b];
                end
              end
              words.push_back(16'(v));
            end
        end
  endfunction

  function automatic void conv_ref(input real x [], input int cin, input int h, input int w,
                                   input real keff [], input int cout, input int k,
                                   input bit s2, output real y [], output real mag []);
    int ho, wo, pad;
    ho = s2 ? (h + 1) / 2 : h;
    wo = s2 ? (w + 1) / 2 : w;
    pad = (k - 1) / 2;
    y = new[cout * ho * wo];
    mag = new[cout * ho * wo];
    for (int o = 0; o < cout; o++)
      for (int oy = 0; oy < ho; oy++)
        for (int ox = 0; ox < wo; ox++) begin
          real acc, mg;
          acc = 0.0; mg = 0.0;
          for (int c = 0; c < cin; c++)
            for (int ky = 0; ky < k; ky++)
              for (int kx = 0; kx < k; kx++) begin
                int iy, ix;
                iy = (s2 ? 2 * oy : oy) - pad + ky;
                ix = (s2 ? 2 * ox : ox) - pad + kx;
                if (iy >= 0 && iy < h && ix >= 0 && ix < w) begin
                  real t, wv;
                  wv = keff[((o * cin + c) * k + ky) * k + kx];
                  t = wv * x[(c * h + iy) * w + ix];
                  acc += t;
                  mg += (wv < 0 ? -wv : wv);
                end
              end
          y[(o * ho + oy) * wo + ox] = acc;
          mag[(o * ho + oy) * wo + ox] = mg;
        end
  endfunction

  function automatic void pool_ref(input real x [], input int c_n, input int h, input int w,
                                   output real y []);
    y = new[c_n * (h / 2) * (w / 2)];
    for (int c = 0; c < c_n; c++)
      for (int oy = 0; oy < h / 2; oy++)
        for (int ox = 0; ox < w / 2; ox++) begin
          real mx;
          mx = x[(c * h + 2 * oy) * w + 2 * ox];
          for (int d = 1; d < 4; d++)
            if (x[(c * h + 2 * oy + d / 2) * w + 2 * ox + d % 2] > mx)
              mx = x[(c * h + 2 * oy + d / 2) * w + 2 * ox + d % 2];
          y[(c * (h / 2) + oy) * (w / 2) + ox] = mx;
        end
  endfunction
endpackage
