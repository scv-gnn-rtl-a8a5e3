// arbiter_distributor: places each translated entry into one of the NQ PE
// queues, in the arbiter clock domain.
//
// Order of decisions, following the paper:
//  1. Cross-queue RAW check: if the entry's output address is still pending in
//     a queue, the entry goes to that queue (if it is pinned to another queue,
//     or the queue is full, it waits).
//  2. Otherwise it goes to its pinned queue (combination rows are pinned to a
//     VPE), or greedily to the queue with the fewest pending entries (lowest
//     index on ties); a full target makes it wait.
//  3. In-queue hazards: if the previous entry of that queue has the same output
//     address, a vector Multiply-add becomes a Multiply-accumulate on M
//     ("in-place accumulation"); other operations that read c take it from the
//     previous result (FWD_1, this design's addition). If the entry two back
//     has the same address, c is forwarded from the output buffer (FWD_2).
//     Both apply only while the queue still holds unretired entries; a
//     drained queue's results are in memory.
// One entry per arbiter clock; to keep all queues full the arbiter clock must
// be about NQ times the engine clock, or the stream must be bursty. The
// fewest-entries rule and the one-per-cycle rate are this design's choices.
// Handshake: in_valid/in_ready; push[q] writes out_entry into queue q.
module arbiter_distributor
  import scv_pkg::*;
#(
  parameter int unsigned NQ    = 8,
  parameter int unsigned DEPTH = 16,
  localparam int unsigned QW   = (NQ > 1) ? $clog2(NQ) : 1,
  localparam int unsigned CW   = $clog2(DEPTH) + 1
) (
  input  logic                                  clk,
  input  logic                                  rst_n,
  input  logic                                  in_valid,
  output logic                                  in_ready,
  input  q_entry_t                              in_entry,
  input  logic                                  in_pin,
  input  logic [QW-1:0]                         in_pin_q,
  // queues
  output logic [NQ-1:0]                         push,
  output q_entry_t                              out_entry,
  input  logic [NQ-1:0]                         q_full,
  input  logic [NQ-1:0][CW-1:0]                 q_count,
  input  logic [NQ-1:0][DEPTH-1:0]              pend_valid,
  input  logic [NQ-1:0][DEPTH-1:0][ADDR_W-1:0]  pend_c,
  // events
  output logic                                  ev_redirect, // sent to a queue because of a pending RAW
  output logic                                  ev_wait,     // entry held back
  output logic                                  ev_mac,      // converted to multiply-accumulate
  output logic                                  ev_fwd1,
  output logic                                  ev_fwd2
);
  logic [NQ-1:0]             last1_v, last2_v, last1_m;
  logic [NQ-1:0][ADDR_W-1:0] last1_c, last2_c;
  logic [NQ-1:0]             hit, dist1, dist2;

  raw_check #(.NQ(NQ), .DEPTH(DEPTH)) u_raw (
    .c_addr(in_entry.c.addr), .pend_valid, .pend_c,
    .last1_v, .last1_c, .last2_v, .last2_c, .hit, .dist1, .dist2);

  logic [QW-1:0] tgt;
  logic          any_hit, ok;

  always_comb begin
    int unsigned best;
    any_hit = |hit;
    tgt = '0; best = DEPTH + 1;
    for (int q = NQ - 1; q >= 0; q--)
      if (hit[q]) tgt = QW'(q);
    if (!any_hit) begin
      if (in_pin)
        tgt = in_pin_q;
      else
        for (int q = 0; q < int'(NQ); q++)
          if (!q_full[q] && int'(q_count[q]) < int'(best)) begin
            best = int'(q_count[q]); tgt = QW'(q);
          end
    end
    ok = in_valid && !q_full[tgt] && !(any_hit && in_pin && in_pin_q != tgt);
    in_ready = ok;

    out_entry = in_entry;
    out_entry.fwd = FWD_NONE;
    ev_mac = 1'b0; ev_fwd1 = 1'b0; ev_fwd2 = 1'b0;
    // once a queue has drained its results are in memory (and the host may
    // have rewritten them), so its history is no longer used
    if (dist1[tgt] && q_count[tgt] != 0) begin
      if (!in_entry.cmd.mem_mode && in_entry.cmd.op == OP_MADD && last1_m[tgt]) begin
        out_entry.cmd = '{mem_mode: 1'b0, op: OP_MAC};
        ev_mac = ok;
      end else if (uses_c(in_entry.cmd)) begin
        out_entry.fwd = FWD_1;
        ev_fwd1 = ok;
      end
    end else if (dist2[tgt] && q_count[tgt] != 0 && uses_c(in_entry.cmd)) begin
      out_entry.fwd = FWD_2;
      ev_fwd2 = ok;
    end
    push = '0;
    push[tgt] = ok;
    ev_redirect = ok && any_hit;
    ev_wait = in_valid && !ok;
  end

  // history of the last two entries pushed into each queue
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      last1_v <= '0; last2_v <= '0; last1_m <= '0; last1_c <= '0; last2_c <= '0;
    end else if (ok) begin
      // a result of this address held in another queue's history is now stale
      for (int q = 0; q < int'(NQ); q++) begin
        if (last1_c[q] == out_entry.c.addr) last1_v[q] <= 1'b0;
        if (last2_c[q] == out_entry.c.addr) last2_v[q] <= 1'b0;
      end
      last2_v[tgt] <= last1_v[tgt];

      last2_c[tgt] <= last1_c[tgt];
      last1_v[tgt] <= writes_r(out_entry.cmd);
      last1_c[tgt] <= out_entry.c.addr;
      // does the PE leave this entry's result in M?
      last1_m[tgt] <= (out_entry.cmd.op inside {OP_MAC, OP_ACC}) ||
                      (!out_entry.cmd.mem_mode && !(out_entry.cmd.op inside {OP_LOAD, OP_UNLOAD}));
    end
  end
endmodule
