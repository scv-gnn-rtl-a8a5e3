// fp_ref_pkg: testbench reference arithmetic for binary32, computed through
// the simulator's double-precision reals. s2d widens exactly; d2s rounds to
// nearest even and flushes results below the normal range to zero, as the
// hardware does. Exact when the double result is exact, which the testbenches
// ensure by keeping operand exponents close together.
package fp_ref_pkg;
  function automatic real s2d(logic [31:0] x);
    if (x[30:23] == 8'd0) return $bitstoreal({x[31], 63'd0});
    return $bitstoreal({x[31], 11'(x[30:23]) + 11'd896, x[22:0], 29'd0});
  endfunction
  function automatic logic [31:0] d2s(real r);
    logic [63:0] d;
    int          e;
    logic [31:0] v;
    d = $realtobits(r);
    if (d[62:0] == 63'd0) return {d[63], 31'd0};
    e = int'(d[62:52]) - 896;
    if (e <= 0) return {d[63], 31'd0};
    if (e >= 255) return {d[63], 8'hff, 23'd0};
    v = {1'b0, 8'(e), d[51:29]};
    if (d[28] && ((|d[27:0]) || d[29])) v = v + 1;
    return {d[63], v[30:0]};
  endfunction
  function automatic logic [31:0] fadd(logic [31:0] x, logic [31:0] y);
    return d2s(s2d(x) + s2d(y));
  endfunction
  function automatic logic [31:0] fmul(logic [31:0] x, logic [31:0] y);
    return d2s(s2d(x) * s2d(y));
  endfunction
  function automatic logic [31:0] fneg(logic [31:0] x);
    return {~x[31], x[30:0]};
  endfunction
  // random normal value with exponent field in [124, 131]
  function automatic logic [31:0] rnd_val();
    return {1'($urandom), 8'(124 + $urandom_range(0, 7)), 23'($urandom)};
  endfunction
endpackage
