// tb_fp_add: checks fp_add against the simulator's own real arithmetic.
// Operands are random normals whose exponents differ by at most 20, so the
// double-precision sum is exact and rounding it to single precision gives
// the correctly rounded binary32 result; directed cases cover cancellation,
// rounding carry, zeros, infinities and NaN.
module tb_fp_add;
  logic [31:0] a, b, y;
  int checks = 0, failures = 0;
  fp_add dut (.a(a), .b(b), .y(y));

  function automatic logic [31:0] rnd_fp(int unsigned e0);
    return {1'($urandom), 8'(e0), 23'($urandom)};
  endfunction

  task automatic check(logic [31:0] x, logic [31:0] z, logic [31:0] exp_y);
    a = x; b = z; #1;
    checks++;
    if (y !== exp_y) begin
      failures++;
      if (failures < 10) $display("FAIL %h + %h = %h expected %h", x, z, y, exp_y);
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

  function automatic logic [31:0] ref_add(logic [31:0] x, logic [31:0] z);
    return d2s(s2d(x) + s2d(z));
  endfunction

  initial begin
    #100000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    int unsigned e0;
    logic [31:0] x, z;
    check(32'h3f800000, 32'h3f800000, 32'h40000000);  // 1+1
    check(32'h3f800000, 32'hbf800000, 32'h00000000);  // 1-1
    check(32'h3f800000, 32'h33800000, 32'h3f800000);  // 1 + 2^-24: tie to even
    check(32'h3f800001, 32'h33800000, 32'h3f800002);  // tie rounds up to even
    check(32'h3fffffff, 32'h34000000, 32'h40000000);  // rounding carry
    check(32'h00000000, 32'h40490fdb, 32'h40490fdb);  // 0 + pi
    check(32'h7f800000, 32'h3f800000, 32'h7f800000);  // inf
    check(32'h7f800000, 32'hff800000, 32'h7fc00000);  // inf - inf
    check(32'h7f7fffff, 32'h7f7fffff, 32'h7f800000);  // overflow
    for (int i = 0; i < 20000; i++) begin
      e0 = 60 + $urandom_range(0, 130);
      x = rnd_fp(e0);
      z = rnd_fp(e0 + $urandom_range(0, 20) - 10);
      if (i % 4 == 0) z = {~x[31], x[30:23], 23'($urandom) & 23'h00000f ^ x[22:0]};  // near cancellation
      check(x, z, ref_add(x, z));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
