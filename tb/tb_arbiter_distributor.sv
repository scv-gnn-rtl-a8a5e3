// tb_arbiter_distributor: directed scenarios for the distribution rules with
// the queues modelled in the testbench (their fill level and pending output
// addresses). Each scenario presents one entry and checks the queue chosen and
// the command/forwarding written.
module tb_arbiter_distributor;
  import scv_pkg::*;
  localparam int NQ = 4, D = 4;
  logic clk = 0, rst_n = 0;
  logic in_valid = 0, in_ready, in_pin = 0;
  logic [1:0] in_pin_q = 0;
  q_entry_t in_entry, out_entry;
  logic [NQ-1:0] push, q_full;
  logic [NQ-1:0][$clog2(D):0] q_count;
  logic [NQ-1:0][D-1:0] pend_valid; logic [NQ-1:0][D-1:0][ADDR_W-1:0] pend_c;
  logic ev_redirect, ev_wait, ev_mac, ev_fwd1, ev_fwd2;
  int checks = 0, failures = 0;
  arbiter_distributor #(.NQ(NQ), .DEPTH(D)) dut (.*);
  always #5 clk = ~clk;
  initial begin
    repeat (10000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  task automatic chk(logic c, string m);
    checks++; if (!c) begin failures++; $display("FAIL %s", m); end
  endtask
  function automatic q_entry_t mk(pe_op_e op, int c, logic mm = 0);
    q_entry_t e = '0;
    e.cmd = '{mem_mode: mm, op: op};
    e.a = '{vec: 1'b0, addr: 16'd5}; e.b = '{vec: 1'b1, addr: 16'd64}; e.c = '{vec: 1'b1, addr: ADDR_W'(c)};
    return e;
  endfunction
  // present one entry; expect it in queue q with command op and forwarding f
  task automatic place(q_entry_t e, int q, pe_op_e op, fwd_e f, string m, logic pin = 0, int pq = 0);
    @(negedge clk); in_entry = e; in_valid = 1; in_pin = pin; in_pin_q = 2'(pq);
    #1;
    chk(in_ready, {m, ": accepted"});
    chk(push == (4'b1 << q), $sformatf("%s: queue %b expected %0d", m, push, q));
    chk(out_entry.cmd.op == op && out_entry.fwd == f, $sformatf("%s: op %s fwd %s", m, out_entry.cmd.op.name(), out_entry.fwd.name()));
    @(posedge clk); #1; in_valid = 0; in_pin = 0;
  endtask
  initial begin
    q_full = 0; q_count = 0; pend_valid = 0; pend_c = 0; in_entry = '0;
    repeat (2) @(posedge clk); rst_n = 1;
    // greedy: fewest entries
    q_count = {3'd2, 3'd1, 3'd0, 3'd3};
    place(mk(OP_MADD, 100), 1, OP_MADD, FWD_NONE, "least filled queue");
    // same output next in that queue -> MAC (in-place accumulation)
    q_count = {3'd0, 3'd0, 3'd2, 3'd0};
    pend_valid[1][0] = 1; pend_c[1][0] = 100;
    place(mk(OP_MADD, 100), 1, OP_MAC, FWD_NONE, "RAW redirect + MAC");
    // different output, then the first one again two entries back -> FWD_2
    pend_valid[1][1] = 1; pend_c[1][1] = 200;
    place(mk(OP_MADD, 200), 1, OP_MADD, FWD_NONE, "second output, redirected");
    place(mk(OP_MADD, 100), 1, OP_MADD, FWD_2, "forward two back");
    // vector add after a same-output entry -> FWD_1
    place(mk(OP_ADD, 100), 1, OP_ADD, FWD_1, "FWD_1 for non-MADD");
    // memory-mode MADD does not leave r in M: next MADD takes FWD_1
    place(mk(OP_MADD, 100, 1), 1, OP_MADD, FWD_1, "memory-mode madd");
    place(mk(OP_MADD, 100), 1, OP_MADD, FWD_1, "no MAC after memory mode");
    // pinned entry
    pend_valid = 0; q_count = {3'd1, 3'd0, 3'd2, 3'd0};
    place(mk(OP_MADD, 300), 3, OP_MADD, FWD_NONE, "pinned", 1, 3);
    // pinned elsewhere while pending in queue 3 -> wait
    pend_valid[3][0] = 1; pend_c[3][0] = 300;
    @(negedge clk); in_entry = mk(OP_MADD, 300); in_valid = 1; in_pin = 1; in_pin_q = 0;
    #1; chk(!in_ready && push == 0 && ev_wait, "pinned to another queue waits");
    // full target -> wait
    in_pin = 0; q_full[3] = 1;
    #1; chk(!in_ready && push == 0, "full target waits");
    q_full[3] = 0;
    #1; chk(in_ready && push == 4'b1000 && out_entry.cmd.op == OP_MAC && ev_redirect, "released after full");
    @(posedge clk); #1; in_valid = 0;
    // stale history: address 300 pushed to queue 0, then back to 3 -> no MAC on 3's old M
    pend_valid = 0; q_count = {3'd3, 3'd3, 3'd3, 3'd0};
    place(mk(OP_MADD, 300), 0, OP_MADD, FWD_NONE, "moved to queue 0");
    q_count = {3'd0, 3'd3, 3'd3, 3'd3};
    place(mk(OP_MADD, 300), 3, OP_MADD, FWD_NONE, "stale history not used");
    // a drained queue does not use its history
    q_count = {3'd0, 3'd3, 3'd3, 3'd3};
    place(mk(OP_MADD, 300), 3, OP_MADD, FWD_NONE, "drained queue: no MAC");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
