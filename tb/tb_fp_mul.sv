// tb_fp_mul: checks fp_mul against the simulator's own real arithmetic.
// Operands are random normals with products far from overflow and underflow;
// the double-precision product of two singles is exact, so rounding it to
// single precision gives the correctly rounded result. Directed cases cover
// zeros, infinities, NaN, overflow and rounding. A second random set uses
// one operand with only three mantissa bits, so that exact halfway products
// (ties, which must round to even) occur often.
module tb_fp_mul;
  logic [31:0] a, b, y;
  int checks = 0, failures = 0;
  fp_mul dut (.a(a), .b(b), .y(y));

  function automatic logic [31:0] rnd_fp(int unsigned e0);
    return {1'($urandom), 8'(e0), 23'($urandom)};
  endfunction

  task automatic check(logic [31:0] x, logic [31:0] z, logic [31:0] exp_y);
    a = x; b = z; #1;
    checks++;
    if (y !== exp_y) begin
      failures++;
      if (failures < 10) $display("FAIL %h * %h = %h expected %h", x, z, y, exp_y);
    end
  endtask

  // single -> double is exact for normals and zero
  function automatic real s2d(logic [31:0] x);
    if (x[30:23] == 8'd0) return $bitstoreal({x[31], 63'd0});
    return $bitstoreal({x[31], 11'(x[30:23]) + 11'd896, x[22:0], 29'd0});
  endfunction
  // double -> single, round to nearest even, flush tiny results to zero
  function automatic logic [31:0] d2s(real r);
    logic [63:0] d;
    int          e;
    logic [31:0] v;
    d = $realtobits(r);
    if (d[62:0] == 63'd0) return {d[63], 31'd0};
    if (d[62:52] == 11'h7ff) return (d[51:0] != 0) ? 32'h7fc00000 : {d[63], 8'hff, 23'd0};
    e = int'(d[62:52]) - 896;
    if (e <= 0) return {d[63], 31'd0};
    if (e >= 255) return {d[63], 8'hff, 23'd0};
    v = {1'b0, 8'(e), d[51:29]};
    if (d[28] && ((|d[27:0]) || d[29])) v = v + 1;
    if (v[30:23] == 8'hff) v[22:0] = 0;
    return {d[63], v[30:0]};
  endfunction

  function automatic logic [31:0] ref_mul(logic [31:0] x, logic [31:0] z);
    return d2s(s2d(x) * s2d(z));
  endfunction

  initial begin
    #100000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    int unsigned e0;
    logic [31:0] x, z;
    check(32'h3f800000, 32'h3f800000, 32'h3f800000);  // 1*1
    check(32'h40000000, 32'hc0400000, 32'hc0c00000);  // 2*-3
    check(32'h00000000, 32'h40490fdb, 32'h00000000);  // 0*pi
    check(32'h7f800000, 32'h00000000, 32'h7fc00000);  // inf*0
    check(32'h7f000000, 32'h7f000000, 32'h7f800000);  // overflow
    check(32'h3f800001, 32'h3f800001, 32'h3f800002);  // rounding
    for (int i = 0; i < 20000; i++) begin
      e0 = 80 + $urandom_range(0, 90);
      x = rnd_fp(e0);
      z = rnd_fp(254 - e0 + $urandom_range(0, 40) - 20);
      check(x, z, ref_mul(x, z));
    end
    for (int i = 0; i < 4000; i++) begin
      x = rnd_fp(100 + $urandom_range(0, 50));
      z = {1'($urandom), 8'(127 + $urandom_range(0, 3)), 3'($urandom), 20'd0};
      check(x, z, ref_mul(x, z));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
