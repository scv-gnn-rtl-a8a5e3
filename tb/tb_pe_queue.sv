// tb_pe_queue: writes random entries from a fast clock and pops/retires them
// from a slow, unrelated clock. Checks order and contents, that a slot stays
// occupied (full, pend_valid) until its entry is retired, and that pend_c of
// the pending slots equals the C addresses of the entries not yet retired
// once the pointers have settled.
module tb_pe_queue;
  import scv_pkg::*;
  localparam int D = 4;
  logic clk_w = 0, clk_r = 0, rst_n = 0;
  logic push = 0, full, pop = 0, retire = 0, empty;
  q_entry_t din, dout;
  logic [D-1:0] pend_valid; logic [D-1:0][ADDR_W-1:0] pend_c; logic [$clog2(D):0] count_w;
  q_entry_t sent [$], popped [$];
  int checks = 0, failures = 0, n_full = 0;
  pe_queue #(.DEPTH(D)) dut (.clk_w, .rst_w_n(rst_n), .push, .din, .full, .pend_valid, .pend_c, .count_w,
                             .clk_r, .rst_r_n(rst_n), .pop, .retire, .empty, .dout);
  always #3 clk_w = ~clk_w;
  always #7 clk_r = ~clk_r;
  initial begin
    repeat (200000) @(posedge clk_w);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  task automatic chk(logic c, string m);
    checks++; if (!c) begin failures++; if (failures < 10) $display("FAIL %s", m); end
  endtask
  // writer
  initial begin
    din = '0;
    repeat (3) @(posedge clk_w); rst_n = 1;
    for (int n = 0; n < 400; n++) begin
      @(negedge clk_w);
      din = q_entry_t'({$urandom, $urandom, $urandom});
      push = 1;
      do @(posedge clk_w); while (full);
      sent.push_back(din);
      #0;
      @(negedge clk_w); push = 0;
      if (full) n_full++;
      repeat ($urandom_range(0, 3)) @(negedge clk_w);
    end
  end
  // reader: pop, then retire later, in order
  initial begin
    int got = 0;
    @(posedge rst_n);
    while (got < 400) begin
      @(negedge clk_r);
      pop = 0; retire = 0;
      if (!empty && $urandom_range(0, 2) != 0) begin
        chk(sent.size() > 0 && dout == sent[0], "pop order/content");
        popped.push_back(sent.pop_front());
        pop = 1; got++;
      end
      if (popped.size() > 0 && $urandom_range(0, 2) == 0 && !(pop && popped.size() == 1)) begin
        retire = 1; void'(popped.pop_front());
      end
    end
    @(negedge clk_r); pop = 0; retire = 0;
    // settle with some entries popped but not retired
    repeat (6) @(negedge clk_r);
    begin
      int np = 0;
      for (int i = 0; i < D; i++) np += pend_valid[i];
      chk(np == popped.size(), $sformatf("pending count %0d vs %0d", np, popped.size()));
      foreach (popped[k]) begin
        logic f;
        f = 0;
        for (int i = 0; i < D; i++) if (pend_valid[i] && pend_c[i] == popped[k].c.addr) f = 1;
        chk(f, "unretired entry not visible as pending");
      end
    end
    while (popped.size() > 0) begin
      @(negedge clk_r); retire = 1; void'(popped.pop_front());
    end
    @(negedge clk_r); retire = 0;
    repeat (6) @(negedge clk_r);
    chk(pend_valid == '0 && count_w == 0 && empty, "queue empty at end");
    chk(n_full > 0, "queue never filled");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
