// tb_util_pkg: helpers shared by the testbenches: FP16 / widened-float conversions to and
// from real numbers, random FP16 generation and a tolerance check.
package tb_util_pkg;
  import stdd_pkg::*;

  function automatic real p2(int e);
    real r = 1.0;
    if (e >= 0) for (int i = 0; i < e; i++) r = r * 2.0;
    else for (int i = 0; i < -e; i++) r = r / 2.0;
    return r;
  endfunction

  function automatic real fp16_real(fp16_t a);
    real r;
    if (a.e == 0) return 0.0;
    r = real'(1024 + int'(a.m)) * p2(int'(a.e) - 25);
    return a.s ? -r : r;
  endfunction

  function automatic real fpx_real(fpx_t a);
    real r;
    if (a.e == 0) return 0.0;
    r = real'(32768 + int'(a.m)) * p2(int'(a.e) - 30);
    return a.s ? -r : r;
  endfunction

  // nearest-below FP16 of a real (truncation toward zero), flush tiny values to zero
  function automatic fp16_t real_fp16(real v);
    fp16_t r;
    real   a;
    int    e;
    r = '0;
    a = (v < 0) ? -v : v;
    if (a < p2(-14)) return r;
    e = 15;
    while (a >= 2.0 && e < 30) begin a = a / 2.0; e++; end
    while (a < 1.0) begin a = a * 2.0; e--; end
    if (a >= 2.0) a = 1.999;
    r.s = (v < 0);
    r.e = 5'(e);
    r.m = 10'($rtoi((a - 1.0) * 1024.0));
    return r;
  endfunction

  // random FP16 with biased exponent in [elo, ehi]
  function automatic fp16_t rand_fp16(int elo, int ehi);
    fp16_t r;
    r.s = 1'($urandom);
    r.e = 5'(elo + ($urandom % (ehi - elo + 1)));
    r.m = 10'($urandom);
    return r;
  endfunction

  function automatic real rabs(real v);
    return (v < 0) ? -v : v;
  endfunction

  // |got - exp| <= rel * max(|exp|, floor)
  function automatic bit close(real got, real expv, real rel, real floor);
    real m = rabs(expv) > floor ? rabs(expv) : floor;
    return rabs(got - expv) <= rel * m;
  endfunction
endpackage
