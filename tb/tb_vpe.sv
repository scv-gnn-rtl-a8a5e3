// tb_vpe: one vector engine of 2 PEs against a memory model that refuses
// grants at random. Entries are random vector Multiply-adds and adds on a few
// output rows (so hazards one and two entries apart are frequent), marked the
// way the arbiter marks them (MAC / FWD_1 / FWD_2). The final memory must equal
// in-order execution of the same operations. A second run with every grant
// given checks the rate of one entry per cycle and the three-cycle latency
// from pop to write.
module tb_vpe;
  import scv_pkg::*;
  import fp_ref_pkg::*;
  localparam int NPE = 2, RW = 4, W = NPE * 32, ROWS = 16;
  logic clk = 0, rst_n = 0;
  logic q_empty, q_pop, q_retire;
  q_entry_t q_dout;
  logic a_req, b_req, c_req, a_gnt, b_gnt, c_gnt, w_req, w_gnt;
  logic [RW-1:0] a_row, b_row, c_row, w_row;
  logic [W-1:0] a_data, b_data, c_data, w_data;
  logic busy, ev_issue, ev_stall, ev_mac, ev_fwd2;
  vpe #(.NPE(NPE), .RW(RW)) dut (.*);
  always #5 clk = ~clk;

  logic [W-1:0] mem [ROWS], ref_mem [ROWS];
  q_entry_t q [$];
  int checks = 0, failures = 0, n_stall = 0, n_mac = 0, n_fwd2 = 0, n_fwd1 = 0, retired = 0;
  int grant_pct = 60;
  int t_pop, t_write;

  initial begin
    repeat (200000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  task automatic chk(logic c, string m);
    checks++; if (!c) begin failures++; if (failures < 10) $display("FAIL %s", m); end
  endtask

  assign q_empty = q.size() == 0;
  assign q_dout  = q_empty ? '0 : q[0];
  always_comb begin
    a_gnt = a_req && ($urandom_range(0, 99) < grant_pct);
    b_gnt = b_req && ($urandom_range(0, 99) < grant_pct);
    c_gnt = c_req && ($urandom_range(0, 99) < grant_pct);
    w_gnt = w_req && ($urandom_range(0, 99) < grant_pct);
  end
  // memory model: reads return the row one cycle after the grant, read-first
  always_ff @(posedge clk) begin
    if (a_gnt) a_data <= mem[a_row];
    if (b_gnt) b_data <= mem[b_row];
    if (c_gnt) c_data <= mem[c_row];
    if (w_gnt) mem[w_row] <= w_data;
    pop_d <= q_pop;
    if (ev_stall) n_stall++;
    if (ev_mac) n_mac++;
    if (ev_fwd2) n_fwd2++;
    if (q_retire && rst_n) retired++;
  end

  logic pop_d = 0;
  always @(negedge clk) if (pop_d) begin void'(q.pop_front()); pop_d = 0; end

  // build a program and its in-order reference result
  task automatic build(int n, output int total);
    int p1, p2; logic m_ok; logic [31:0] mm [NPE];
    q_entry_t e;
    p1 = -1; p2 = -1; m_ok = 0;
    foreach (mm[i]) mm[i] = 0;
    total = 0;
    for (int k = 0; k < n; k++) begin
      logic [31:0] av, bv [NPE], cv [NPE], r [NPE];
      int c;
      e = '0;
      c = $urandom_range(8, 10);
      e.cmd = '{mem_mode: 1'b0, op: ($urandom_range(0, 3) == 0) ? OP_ADD : OP_MADD};
      e.a = '{vec: 1'b0, addr: ADDR_W'($urandom_range(0, 2 * NPE - 1))};  // rows 0..1, scalar
      e.b = '{vec: 1'b1, addr: ADDR_W'($urandom_range(2, 3) * NPE)};
      e.c = '{vec: 1'b1, addr: ADDR_W'(c * NPE)};
      // arbiter marking rules
      if (p1 == c) begin
        if (e.cmd.op == OP_MADD && m_ok) begin e.cmd.op = OP_MAC; end
        else e.fwd = FWD_1;
        if (e.cmd.op == OP_MAC) n_fwd1 += 0; else n_fwd1++;
      end else if (p2 == c) e.fwd = FWD_2;
      p2 = p1; p1 = c; m_ok = 1;
      // reference (sequential semantics)
      av = ref_mem[e.a.addr / NPE][32 * (e.a.addr % NPE) +: 32];
      for (int i = 0; i < NPE; i++) begin
        bv[i] = ref_mem[e.b.addr / NPE][32*i +: 32];
        cv[i] = ref_mem[c][32*i +: 32];
        r[i] = (e.cmd.op == OP_ADD) ? fadd(av, cv[i]) : fadd(fmul(av, bv[i]), cv[i]);
        ref_mem[c][32*i +: 32] = r[i];
      end
      q.push_back(e);
      total++;
    end
  endtask

  initial begin
    int total;
    for (int r = 0; r < ROWS; r++) begin
      for (int i = 0; i < NPE; i++) mem[r][32*i +: 32] = rnd_val();
      ref_mem[r] = mem[r];
    end
    a_data = 0; b_data = 0; c_data = 0;
    repeat (2) @(posedge clk); rst_n = 1;
    // --- run 1: random grants ---
    @(negedge clk);
    build(600, total);
    while (retired < total) @(posedge clk);
    @(negedge clk);
    for (int r = 0; r < ROWS; r++) chk(mem[r] === ref_mem[r], $sformatf("row %0d got %h exp %h", r, mem[r], ref_mem[r]));
    chk(n_stall > 0, "no stall seen");
    chk(n_mac > 0, "no MAC executed");
    chk(n_fwd2 > 0, "no FWD_2 executed");
    chk(n_fwd1 > 0, "no FWD_1 entry");
    // --- run 2: full grants: 1 entry / cycle, pop-to-write 2 cycles ---
    grant_pct = 100;
    retired = 0;
    @(negedge clk);
    build(50, total);
    @(posedge clk); t_pop = $time;
    while (!w_req) @(negedge clk);
    chk(($time - t_pop) / 10 <= 2, $sformatf("first write request %0d cycles after first pop", ($time - t_pop) / 10));
    while (retired < total) @(posedge clk);
    chk(($time - t_pop) / 10 <= total + 3, $sformatf("50 entries took %0d cycles", ($time - t_pop) / 10));
    @(negedge clk);
    for (int r = 0; r < ROWS; r++) chk(mem[r] === ref_mem[r], $sformatf("run 2 row %0d", r));
    chk(!busy, "busy after draining");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
