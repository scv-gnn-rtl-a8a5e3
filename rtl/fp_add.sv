// fp_add: combinational IEEE-754 binary32 adder, the adder of each PE.
//
// The larger-magnitude operand is kept, the smaller one is shifted right onto
// three extra bits (guard, round, sticky), the mantissas are added or
// subtracted, the sum is renormalised and rounded to nearest, ties to even.
// The paper names only "a floating-point adder"; the format, the rounding and
// flushing of subnormal inputs and results to zero are this design's choices.
// Infinities and NaNs propagate (a NaN result is the quiet NaN 0x7fc00000).
// Interface: y = a + b, no clock, no latency.
module fp_add (
  input  logic [31:0] a,
  input  logic [31:0] b,
  output logic [31:0] y
);
  always_comb begin
    logic        sa, sb, sx, sy;
    logic [7:0]  ea, eb, ex, ey;
    logic [23:0] ma, mb, mx, my;
    logic [26:0] big, sml;
    logic [27:0] sum;
    logic [26:0] nrm;
    logic [4:0]  lz;
    logic [9:0]  e;
    logic [8:0]  d;
    logic        rnd;
    logic [24:0] mr;
    sa = a[31]; ea = a[30:23]; ma = (ea == 8'd0) ? 24'd0 : {1'b1, a[22:0]};
    sb = b[31]; eb = b[30:23]; mb = (eb == 8'd0) ? 24'd0 : {1'b1, b[22:0]};
    y = 32'd0; lz = 5'd0; nrm = 27'd0; mr = 25'd0; rnd = 1'b0;
    sx = 1'b0; sy = 1'b0; ex = 8'd0; ey = 8'd0; mx = 24'd0; my = 24'd0;
    d = 9'd0; big = 27'd0; sml = 27'd0; sum = 28'd0; e = 10'd0;
    if (ea == 8'hff || eb == 8'hff) begin
      if ((ea == 8'hff && a[22:0] != 0) || (eb == 8'hff && b[22:0] != 0) ||
          (ea == 8'hff && eb == 8'hff && sa != sb))
        y = 32'h7fc0_0000;
      else
        y = (ea == 8'hff) ? {sa, 8'hff, 23'd0} : {sb, 8'hff, 23'd0};
    end else begin
      // order by magnitude (subnormals already read as zero)
      if ({ea, ma} >= {eb, mb}) begin
        sx = sa; ex = ea; mx = ma; sy = sb; ey = eb; my = mb;
      end else begin
        sx = sb; ex = eb; mx = mb; sy = sa; ey = ea; my = ma;
      end
      if (my == 24'd0) ey = ex;              // zero operand: no shift
      d     = {1'b0, ex} - {1'b0, ey};
      big   = {mx, 3'b000};
      if (d >= 9'd27)
        sml = {26'd0, |my};
      else begin
        sml = {my, 3'b000} >> d;
        sml[0] = sml[0] | |({my, 3'b000} & ~({27{1'b1}} << d));
      end
      sum = (sx == sy) ? {1'b0, big} + {1'b0, sml} : {1'b0, big} - {1'b0, sml};
      e   = {2'b00, ex};
      if (sum == 28'd0) begin
        y = 32'd0;                          // exact cancellation gives +0
      end else begin
        if (sum[27]) begin
          nrm = sum[27:1] | {26'd0, sum[0]};
          e   = e + 10'd1;
        end else begin
          for (int i = 0; i <= 26; i++)
            if (sum[i]) lz = 5'(26 - i);    // highest set bit wins
          nrm = sum[26:0] << lz;
          e   = e - {5'd0, lz};
        end
        rnd = nrm[2] & (nrm[3] | nrm[1] | nrm[0]);
        mr  = {1'b0, nrm[26:3]} + {24'd0, rnd};
        if (mr[24]) begin
          mr = mr >> 1;
          e  = e + 10'd1;
        end
        if (e[9] || e == 10'd0)
          y = {sx, 31'd0};                  // underflow: flush to zero
        else if (e >= 10'd255)
          y = {sx, 8'hff, 23'd0};
        else
          y = {sx, e[7:0], mr[22:0]};
      end
    end
  end
endmodule
