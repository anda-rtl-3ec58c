// tb_util_pkg: reference helpers for the testbenches, written independently of
// the RTL: IEEE half-precision values are decoded with real arithmetic.
package tb_util_pkg;

  function automatic real pow2(input int e);
    real r;
    r = 1.0;
    if (e >= 0) for (int i = 0; i < e; i++) r = r * 2.0;
    else        for (int i = 0; i < -e; i++) r = r / 2.0;
    return r;
  endfunction

  // normal numbers and zero only (subnormals read as zero)
  function automatic real half_to_real(input logic [15:0] h);
    real m;
    if (h[14:10] == 0) return 0.0;
    m = 1.0 + real'(h[9:0]) / 1024.0;
    m = m * pow2(int'(h[14:10]) - 15);
    return h[15] ? -m : m;
  endfunction

  function automatic real fabs(input real x);
    return (x < 0.0) ? -x : x;
  endfunction

  // random normal FP16 with exponent field in [elo, ehi]
  function automatic logic [15:0] rand_half(input int elo, input int ehi);
    logic [4:0] e;
    e = 5'(elo + int'($urandom_range(ehi - elo)));
    return {1'($urandom_range(1)), e, 10'($urandom)};
  endfunction

endpackage
