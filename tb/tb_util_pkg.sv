// tb_util_pkg: helpers shared by the PINTA testbenches: FP32 bit pattern to
// real conversion and a tolerance compare. Independent of the design's own
// floating-point functions.
package tb_util_pkg;

  function automatic real pow2(int e);
    real r;
    r = 1.0;
    if (e >= 0) for (int k = 0; k < e; k++) r = r * 2.0;
    else        for (int k = 0; k < -e; k++) r = r * 0.5;
    return r;
  endfunction

  function automatic real fp2r(logic [31:0] f);
    int  e;
    real m;
    e = int'(f[30:23]);
    if (e == 0) return 0.0;
    m = 1.0 + real'(f[22:0]) / 8388608.0;
    m = m * pow2(e - 127);
    return f[31] ? -m : m;
  endfunction

  function automatic real rabs(real x);
    return (x < 0.0) ? -x : x;
  endfunction

  // |got - exp| <= rel * scale + abs_tol
  function automatic bit close(real got, real expv, real scale, real rel, real abs_tol);
    return rabs(got - expv) <= rel * scale + abs_tol;
  endfunction

  // Random FP32 with unbiased exponent in [elo, ehi].
  function automatic logic [31:0] rand_fp(int elo, int ehi);
    logic [31:0] f;
    f[31]    = 1'($urandom);
    f[30:23] = 8'(127 + elo + int'($urandom_range(ehi - elo)));
    f[22:0]  = 23'($urandom);
    return f;
  endfunction

  // Value of a signed slice-decomposed container of precision p (0,1,2).
  function automatic int elem_val(logic [11:0] m, int p);
    int b;
    b = 4 * (p + 1);
    if (b == 12) return int'($signed(m));
    if (b == 8)  return int'($signed(m[7:0]));
    return int'($signed(m[3:0]));
  endfunction

endpackage
