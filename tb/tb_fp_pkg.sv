// tb_fp_pkg -- testbench helpers: exact conversion of FP16/FP32 bit patterns
// to real numbers (independent of the design's FP functions) and a tolerance
// check scaled by the magnitude of the terms that were summed.
package tb_fp_pkg;

  function automatic real pow2(int e);
    real r;
    r = 1.0;
    if (e >= 0) for (int i = 0; i < e; i++) r = r * 2.0;
    else        for (int i = 0; i < -e; i++) r = r / 2.0;
    return r;
  endfunction

  function automatic real f16_to_real(logic [15:0] h);
    int e;
    real m;
    e = int'(h[14:10]);
    if (e == 0) return 0.0;
    m = int'(h[9:0]);
    m = 1.0 + m / 1024.0;
    m = m * pow2(e - 15);
    return h[15] ? -m : m;
  endfunction

  function automatic real f32_to_real(logic [31:0] f);
    int e;
    real m;
    e = int'(f[30:23]);
    if (e == 0) return 0.0;
    m = int'(f[22:0]);
    m = 1.0 + m / 8388608.0;
    m = m * pow2(e - 127);
    return f[31] ? -m : m;
  endfunction

  function automatic real rabs(real x);
    return (x < 0.0) ? -x : x;
  endfunction

  // |got - exp| within rel * scale (+ a tiny absolute floor)
  function automatic bit close(real got, real exp_v, real scale, real rel);
    return rabs(got - exp_v) <= rel * scale + 1.0e-30;
  endfunction

  // Random normal FP16 with biased exponent in [elo, ehi].
  function automatic logic [15:0] rand_f16(int elo, int ehi);
    logic [15:0] h;
    h[15]    = 1'($urandom);
    h[14:10] = 5'($urandom_range(elo, ehi));
    h[9:0]   = 10'($urandom);
    return h;
  endfunction

endpackage
