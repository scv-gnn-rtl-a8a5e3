// graph_processor: the SCV graph processor, top level.
//
// A stream of sparse work (SCV column vectors for aggregation, non-zeros of
// H for combination, or raw vector commands) enters the command/address
// generator, which turns each non-zero into a PE command with local A, B and
// C addresses. The arbiter and distributor, with the RAW checks, places each
// command into one of N_VPE PE queues. Each vector engine (VPE) of N_PE PEs
// pops its queue, reads its operands from the banked local shared memory
// (A: adjacency values / H, B: Z or W rows, C: partial sums), computes, and
// writes the result back to the C address through its output buffer. The
// bank-conflict controllers of the three memories stall engines that find no
// free port.
// Two clocks: clk_a for the generator, arbiter and queue write side; clk for
// the queue read side, the engines and the memories. The host port loads and
// unloads whole rows of one memory (h_sel: 0 = A, 1 = B, 2 = C); it has
// priority over the engines. Rows: A and B hold 256, C 1024 rows of N_PE
// words at the default sizes (64 kB, 64 kB, 256 kB).
// The event counters (clk domain for engine events, clk_a domain for arbiter
// events) count how often each mechanism acted:
//   0 issued entries  1 bank-conflict stalls  2 multiply-accumulates executed
//   3 FWD_2 forwards executed  4 MAC conversions  5 FWD_1 marks  6 FWD_2 marks
//   7 cross-queue redirects  8 arbiter waits
// From the paper: the block structure, the queue-per-VPE organisation, the
// sizes (8 VPEs of 64 PEs, depth 16, vector height 512, 64/64/256 kB) and
// the hazard rules. This design's own: the stream encoding, the host port in
// place of the cache/DRAM hierarchy, and the counters. The host port may only
// be used while busy is low.
module graph_processor
  import scv_pkg::*;
#(
  parameter int unsigned NPE    = N_PE,
  parameter int unsigned NVPE   = N_VPE,
  parameter int unsigned DEPTH  = QDEPTH,
  parameter int unsigned VECH   = VEC_H,
  parameter int unsigned A_ROWS = A_WORDS / N_PE,
  parameter int unsigned B_ROWS = B_WORDS / N_PE,
  parameter int unsigned C_ROWS = C_WORDS / N_PE,
  localparam int unsigned W     = NPE * 32,
  localparam int unsigned RW    = $clog2(C_ROWS),
  localparam int unsigned ARW   = $clog2(A_ROWS),
  localparam int unsigned BRW   = $clog2(B_ROWS),
  localparam int unsigned CW    = $clog2(DEPTH) + 1,
  localparam int unsigned QW    = (NVPE > 1) ? $clog2(NVPE) : 1
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              clk_a,
  input  logic              rst_a_n,
  // configuration (clk_a domain)
  input  logic [ADDR_W-1:0] a_base,
  input  logic [ADDR_W-1:0] b_base_row,
  input  logic [ADDR_W-1:0] c_base_row,
  // sparse data stream (clk_a domain)
  input  logic              s_valid,
  output logic              s_ready,
  input  stream_el_t        s_el,
  // host port (clk domain)
  input  logic [1:0]        h_sel,
  input  logic              h_re,
  input  logic              h_we,
  input  logic [RW-1:0]     h_row,
  input  logic [W-1:0]      h_wdata,
  output logic [W-1:0]      h_rdata,
  // status
  output logic              busy,      // clk domain: some engine has work
  output logic              a_busy,    // clk_a domain: work not yet retired
  output logic [8:0][31:0]  counters
);
  // ---------------- command/address generation ----------------
  logic     g_valid, g_ready, g_pin;
  q_entry_t g_entry;
  logic [QW-1:0] g_pin_q;

  cmd_addr_gen #(.NQ(NVPE), .NPE(NPE), .VECH(VECH), .A_WDS(A_ROWS * NPE),
                 .B_ROWS(B_ROWS), .C_ROWS(C_ROWS)) u_gen (
    .clk(clk_a), .rst_n(rst_a_n), .a_base, .b_base_row, .c_base_row,
    .s_valid, .s_ready, .s_el,
    .o_valid(g_valid), .o_ready(g_ready), .o_entry(g_entry), .o_pin(g_pin), .o_pin_q(g_pin_q));

  // ---------------- arbiter and distributor ----------------
  logic [NVPE-1:0]                        push, q_full, q_empty, q_pop, q_retire;
  logic [NVPE-1:0][CW-1:0]                q_count;
  logic [NVPE-1:0][DEPTH-1:0]             pend_valid;
  logic [NVPE-1:0][DEPTH-1:0][ADDR_W-1:0] pend_c;
  q_entry_t                               a_entry;
  q_entry_t [NVPE-1:0]                    q_dout;
  logic ev_redirect, ev_wait, ev_cmac, ev_cfwd1, ev_cfwd2;

  arbiter_distributor #(.NQ(NVPE), .DEPTH(DEPTH)) u_arb (
    .clk(clk_a), .rst_n(rst_a_n),
    .in_valid(g_valid), .in_ready(g_ready), .in_entry(g_entry), .in_pin(g_pin), .in_pin_q(g_pin_q),
    .push, .out_entry(a_entry), .q_full, .q_count, .pend_valid, .pend_c,
    .ev_redirect, .ev_wait, .ev_mac(ev_cmac), .ev_fwd1(ev_cfwd1), .ev_fwd2(ev_cfwd2));

  // ---------------- queues and engines ----------------
  logic [NVPE-1:0]         a_req, b_req, c_req, a_gnt, b_gnt, c_gnt, w_req, w_gnt;
  logic [NVPE-1:0][RW-1:0] a_row, b_row, c_row, w_row;
  logic [NVPE-1:0][W-1:0]  a_data, b_data, c_data, w_data;
  logic [NVPE-1:0]         v_busy, ev_issue, ev_stall, ev_mac, ev_fwd2;
  logic [NVPE-1:0][ARW-1:0] a_row_n;
  logic [NVPE-1:0][BRW-1:0] b_row_n;

  for (genvar v = 0; v < int'(NVPE); v++) begin : g_vpe
    pe_queue #(.DEPTH(DEPTH)) u_q (
      .clk_w(clk_a), .rst_w_n(rst_a_n), .push(push[v]), .din(a_entry), .full(q_full[v]),
      .pend_valid(pend_valid[v]), .pend_c(pend_c[v]), .count_w(q_count[v]),
      .clk_r(clk), .rst_r_n(rst_n), .pop(q_pop[v]), .retire(q_retire[v]),
      .empty(q_empty[v]), .dout(q_dout[v]));

    vpe #(.NPE(NPE), .RW(RW)) u_vpe (
      .clk, .rst_n, .q_empty(q_empty[v]), .q_dout(q_dout[v]), .q_pop(q_pop[v]), .q_retire(q_retire[v]),
      .a_req(a_req[v]), .b_req(b_req[v]), .c_req(c_req[v]),
      .a_row(a_row[v]), .b_row(b_row[v]), .c_row(c_row[v]),
      .a_gnt(a_gnt[v]), .b_gnt(b_gnt[v]), .c_gnt(c_gnt[v]),
      .a_data(a_data[v]), .b_data(b_data[v]), .c_data(c_data[v]),
      .w_req(w_req[v]), .w_row(w_row[v]), .w_data(w_data[v]), .w_gnt(w_gnt[v]),
      .busy(v_busy[v]), .ev_issue(ev_issue[v]), .ev_stall(ev_stall[v]),
      .ev_mac(ev_mac[v]), .ev_fwd2(ev_fwd2[v]));

    assign a_row_n[v] = ARW'(a_row[v]);
    assign b_row_n[v] = BRW'(b_row[v]);
  end

  // ---------------- banked local shared memory ----------------
  localparam int unsigned NB_AB = (NVPE + 3) / 4;   // four read ports per bank
  localparam int unsigned NB_C  = (NVPE + 1) / 2;   // two reads + two writes per bank
  logic [W-1:0] h_rdata_a, h_rdata_b, h_rdata_c;
  logic [NVPE-1:0] unused_wg_a, unused_wg_b;
  logic [1:0] h_sel_q;

  mem_region #(.N_REQ(NVPE), .ROWS(A_ROWS), .NB(NB_AB), .NR(4), .NW(1), .W(W)) u_mem_a (
    .clk, .rst_n, .rd_req(a_req), .rd_row(a_row_n), .rd_gnt(a_gnt), .rd_data(a_data),
    .wr_req('0), .wr_row('0), .wr_data('0), .wr_gnt(unused_wg_a),
    .h_re(h_re && h_sel == 2'd0), .h_we(h_we && h_sel == 2'd0), .h_row(ARW'(h_row)),
    .h_wdata, .h_rdata(h_rdata_a), .conflict());

  mem_region #(.N_REQ(NVPE), .ROWS(B_ROWS), .NB(NB_AB), .NR(4), .NW(1), .W(W)) u_mem_b (
    .clk, .rst_n, .rd_req(b_req), .rd_row(b_row_n), .rd_gnt(b_gnt), .rd_data(b_data),
    .wr_req('0), .wr_row('0), .wr_data('0), .wr_gnt(unused_wg_b),
    .h_re(h_re && h_sel == 2'd1), .h_we(h_we && h_sel == 2'd1), .h_row(BRW'(h_row)),
    .h_wdata, .h_rdata(h_rdata_b), .conflict());

  mem_region #(.N_REQ(NVPE), .ROWS(C_ROWS), .NB(NB_C), .NR(2), .NW(2), .W(W)) u_mem_c (
    .clk, .rst_n, .rd_req(c_req), .rd_row(c_row), .rd_gnt(c_gnt), .rd_data(c_data),
    .wr_req(w_req), .wr_row(w_row), .wr_data(w_data), .wr_gnt(w_gnt),
    .h_re(h_re && h_sel == 2'd2), .h_we(h_we && h_sel == 2'd2), .h_row(h_row),
    .h_wdata, .h_rdata(h_rdata_c), .conflict());

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) h_sel_q <= '0;
    else        h_sel_q <= h_sel;
  assign h_rdata = (h_sel_q == 2'd0) ? h_rdata_a : (h_sel_q == 2'd1) ? h_rdata_b : h_rdata_c;

  // ---------------- status and counters ----------------
  assign busy = |v_busy;
  always_comb begin
    a_busy = g_valid;
    for (int v = 0; v < int'(NVPE); v++) a_busy = a_busy || q_count[v] != 0;
  end

  logic [3:0][31:0] cnt_e;
  logic [4:0][31:0] cnt_a;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cnt_e <= '0;
    end else begin
      cnt_e[0] <= cnt_e[0] + 32'($countones(ev_issue));
      cnt_e[1] <= cnt_e[1] + 32'($countones(ev_stall));
      cnt_e[2] <= cnt_e[2] + 32'($countones(ev_mac));
      cnt_e[3] <= cnt_e[3] + 32'($countones(ev_fwd2));
    end
  end
  always_ff @(posedge clk_a or negedge rst_a_n) begin
    if (!rst_a_n) begin
      cnt_a <= '0;
    end else begin
      cnt_a[0] <= cnt_a[0] + 32'(ev_cmac);
      cnt_a[1] <= cnt_a[1] + 32'(ev_cfwd1);
      cnt_a[2] <= cnt_a[2] + 32'(ev_cfwd2);
      cnt_a[3] <= cnt_a[3] + 32'(ev_redirect);
      cnt_a[4] <= cnt_a[4] + 32'(ev_wait);
    end
  end
  assign counters = {cnt_a, cnt_e};
endmodule
