// tb_fp_pkg: reference single-precision arithmetic for the testbenches.
//
// The simulator's real type is IEEE double. An fp32 sum or product of two
// single-precision numbers, computed in double and rounded once more to
// single with round-to-nearest-even, equals the correctly rounded single
// result, so these helpers give an independent reference for the RTL units.
// Results below the normal range are flushed to zero, as the RTL does.
package tb_fp_pkg;

  function automatic real f2r(logic [31:0] f);
    logic [63:0] d;
    if (f[30:23] == 8'd0) return 0.0;
    d = {f[31], 11'(f[30:23]) + 11'd896, f[22:0], 29'd0};
    return $bitstoreal(d);
  endfunction

  function automatic logic [31:0] r2f(real r);
    logic [63:0] d;
    int          e;
    logic [24:0] m;
    logic        g, st;
    d = $realtobits(r);
    if (d[62:0] == 63'd0) return {d[63], 31'd0};
    e  = int'(d[62:52]) - 1023 + 127;
    m  = {2'b01, d[51:29]};
    g  = d[28];
    st = |d[27:0];
    if (g && (st || m[0])) m = m + 25'd1;
    if (m[24]) begin
      m = m >> 1;
      e = e + 1;
    end
    if (e <= 0)   return {d[63], 31'd0};
    if (e >= 255) return {d[63], 8'hff, 23'd0};
    return {d[63], 8'(e), m[22:0]};
  endfunction

  function automatic logic [31:0] fadd(logic [31:0] a, logic [31:0] b);
    return r2f(f2r(a) + f2r(b));
  endfunction

  function automatic logic [31:0] fmul(logic [31:0] a, logic [31:0] b);
    return r2f(f2r(a) * f2r(b));
  endfunction

  // One SOR site update in the operation order the RTL uses:
  // (1-w)*old + (w*((up+down)+(left+right) + (h*h)*rho)) * 0.25
  function automatic logic [31:0] sor_site(logic [31:0] up, logic [31:0] down,
                                           logic [31:0] left, logic [31:0] right,
                                           logic [31:0] old, logic [31:0] rho,
                                           logic [31:0] w, logic [31:0] h);
    logic [31:0] s4, t, a, b;
    s4 = fadd(fadd(up, down), fadd(left, right));
    t  = fadd(s4, fmul(fmul(h, h), rho));
    a  = fmul(fadd(32'h3f800000, {~w[31], w[30:0]}), old);
    b  = fmul(fmul(w, t), 32'h3e800000);
    return fadd(a, b);
  endfunction

  // Random single-precision value with magnitude in [2^lo_e, 2^hi_e), for
  // test data that stays far from overflow and the subnormal range.
  function automatic logic [31:0] rnd_val(int lo_e, int hi_e);
    return {1'($urandom), 8'(127 + lo_e + int'($urandom_range(0, hi_e - lo_e - 1))),
            23'($urandom)};
  endfunction

endpackage
