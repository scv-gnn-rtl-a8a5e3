// fp_mul: combinational IEEE-754 binary32 multiplier, the multiplier of each PE.
//
// The 24x24-bit mantissa product is normalised (it has its leading one in bit
// 47 or 46), rounded to nearest, ties to even, and the exponents are added.
// The paper names only "a floating-point multiplier"; the format, the rounding
// and flushing of subnormal inputs and results to zero are this design's
// choices. Infinities and NaNs propagate (NaN result 0x7fc00000; 0 x inf is NaN).
// Interface: y = a * b, no clock, no latency.
module fp_mul (
  input  logic [31:0] a,
  input  logic [31:0] b,
  output logic [31:0] y
);
  always_comb begin
    logic        s, rnd, st;
    logic [7:0]  ea, eb;
    logic [23:0] ma, mb;
    logic [47:0] p;
    logic [24:0] mr;
    logic [9:0]  e;
    logic [23:0] keep;
    logic        g;
    ea = a[30:23]; eb = b[30:23];
    ma = (ea == 8'd0) ? 24'd0 : {1'b1, a[22:0]};
    mb = (eb == 8'd0) ? 24'd0 : {1'b1, b[22:0]};
    s  = a[31] ^ b[31];
    p  = 48'd0; mr = 25'd0; e = 10'd0; keep = 24'd0; g = 1'b0; st = 1'b0; rnd = 1'b0;
    if ((ea == 8'hff && a[22:0] != 0) || (eb == 8'hff && b[22:0] != 0))
      y = 32'h7fc0_0000;
    else if (ea == 8'hff || eb == 8'hff)
      y = (ma == 24'd0 || mb == 24'd0) ? 32'h7fc0_0000 : {s, 8'hff, 23'd0};
    else if (ma == 24'd0 || mb == 24'd0)
      y = {s, 31'd0};
    else begin
      p = ma * mb;
      e = {2'b00, ea} + {2'b00, eb} - 10'd127;
      if (p[47]) begin
        keep = p[47:24]; g = p[23]; st = |p[22:0]; e = e + 10'd1;
      end else begin
        keep = p[46:23]; g = p[22]; st = |p[21:0];
      end
      rnd = g & (st | keep[0]);
      mr  = {1'b0, keep} + {24'd0, rnd};
      if (mr[24]) begin
        mr = mr >> 1;
        e  = e + 10'd1;
      end
      if (e[9] || e == 10'd0)
        y = {s, 31'd0};
      else if (e >= 10'd255)
        y = {s, 8'hff, 23'd0};
      else
        y = {s, e[7:0], mr[22:0]};
    end
  end
endmodule
