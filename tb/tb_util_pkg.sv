// tb_util_pkg: number conversions used by the testbenches to build stimuli
// and work out expected values without the design's own arithmetic.
package tb_util_pkg;
  // integer (|v| < 2^8) -> bfloat16, exact
  function automatic logic [15:0] int2bf(int v);
    int a, p;
    logic s;
    logic [15:0] r;
    if (v == 0) return 16'h0000;
    s = (v < 0);
    a = s ? -v : v;
    p = 0;
    for (int i = 0; i < 31; i++) if ((a >> i) & 1) p = i;
    r[15] = s;
    r[14:7] = 8'(127 + p);
    r[6:0] = 7'((a << 7 >> p) & 8'h7f);
    return r;
  endfunction

  // fp32 bit pattern -> real
  function automatic real fp2real(logic [31:0] f);
    real m;
    int e;
    if (f[30:23] == 0) return 0.0;
    m = 1.0 + real'(f[22:0]) / 8388608.0;
    e = int'(f[30:23]) - 127;
    if (e >= 0) for (int i = 0; i < e; i++) m = m * 2.0;
    else        for (int i = 0; i < -e; i++) m = m / 2.0;
    return f[31] ? -m : m;
  endfunction

  function automatic real bf2real(logic [15:0] b);
    return fp2real({b, 16'h0});
  endfunction
endpackage
