// vpe: vector processing engine, N_PE processing elements driven by one
// broadcast command, with its issue logic and output buffer.
//
// Pipeline, one entry per cycle at best:
//   R  the oldest queue entry asks the A, B and C memories for the rows it
//      needs (A/B/C in scalar mode read one word and broadcast it to all PEs,
//      in vector mode N_PE words, one per PE). It is popped only when every
//      request is granted (otherwise the engine stalls on a bank conflict).
//   X  the rows arrive; all PEs execute the command; results go to the
//      output buffer (BR) and to a two-deep result history.
//   W  the head of BR asks for a C write port and retires when granted
//      (entries that write nothing retire at once).
// Hazard rules, from the paper: a result can be read back from memory only
// three entries later. One entry later the arbiter has turned the operation
// into a multiply-accumulate on M (or, this design's addition for operations
// that cannot be turned into one, marked FWD_1); two entries later it marks
// FWD_2 and c is taken from the result history, bypassing the memory. So that
// "three entries later" holds even when writes wait for a port, an entry may
// issue only while at most two older entries are still unwritten; BR is three
// deep. The BR depth, this issue rule and the stall counters are this
// design's choices.
module vpe
  import scv_pkg::*;
#(
  parameter int unsigned NPE = 64,
  parameter int unsigned RW  = 10,       // row address width of the C memory
  localparam int unsigned W  = NPE * 32,
  localparam int unsigned LW = (NPE > 1) ? $clog2(NPE) : 1
) (
  input  logic          clk,
  input  logic          rst_n,
  // queue
  input  logic          q_empty,
  input  q_entry_t      q_dout,
  output logic          q_pop,
  output logic          q_retire,
  // memory reads (row addresses; data one cycle after the grant)
  output logic          a_req, b_req, c_req,
  output logic [RW-1:0] a_row, b_row, c_row,
  input  logic          a_gnt, b_gnt, c_gnt,
  input  logic [W-1:0]  a_data, b_data, c_data,
  // memory write
  output logic          w_req,
  output logic [RW-1:0] w_row,
  output logic [W-1:0]  w_data,
  input  logic          w_gnt,
  // status and event pulses
  output logic          busy,
  output logic          ev_issue,
  output logic          ev_stall,
  output logic          ev_mac,
  output logic          ev_fwd2
);
  // ---------------- R stage ----------------
  q_entry_t e;
  logic     room, want_a, want_b, want_c, issue;
  logic [1:0] br_cnt;
  logic     xv;

  assign e      = q_dout;
  assign room   = (int'(xv) + int'(br_cnt)) <= 2;
  assign want_a = uses_a(e.cmd);
  assign want_b = uses_b(e.cmd);
  assign want_c = uses_c(e.cmd) && e.fwd == FWD_NONE;
  assign a_req  = !q_empty && room && want_a;
  assign b_req  = !q_empty && room && want_b;
  assign c_req  = !q_empty && room && want_c;
  assign a_row  = RW'(e.a.addr / ADDR_W'(NPE));
  assign b_row  = RW'(e.b.addr / ADDR_W'(NPE));
  assign c_row  = RW'(e.c.addr / ADDR_W'(NPE));
  assign issue  = !q_empty && room && (!want_a || a_gnt) && (!want_b || b_gnt) && (!want_c || c_gnt);
  assign q_pop  = issue;
  assign ev_issue = issue;
  assign ev_stall = !q_empty && room && !issue;

  // ---------------- X stage ----------------
  q_entry_t x;
  logic [NPE-1:0][31:0] hist0, hist1, r, av, bv, cv;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      xv <= 1'b0;
      x  <= '0;
    end else begin
      xv <= issue;
      if (issue) x <= e;
    end
  end

  always_comb begin
    for (int i = 0; i < int'(NPE); i++) begin
      av[i] = x.a.vec ? a_data[i*32 +: 32] : a_data[32*int'(LW'(x.a.addr)) +: 32];
      bv[i] = x.b.vec ? b_data[i*32 +: 32] : b_data[32*int'(LW'(x.b.addr)) +: 32];
      unique case (x.fwd)
        FWD_1:   cv[i] = hist0[i];
        FWD_2:   cv[i] = hist1[i];
        default: cv[i] = x.c.vec ? c_data[i*32 +: 32] : c_data[32*int'(LW'(x.c.addr)) +: 32];
      endcase
    end
  end

  for (genvar i = 0; i < int'(NPE); i++) begin : g_pe
    pe u_pe (.clk, .rst_n, .en(xv), .cmd(x.cmd), .a(av[i]), .b(bv[i]), .c(cv[i]), .r(r[i]), .m());
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      hist0 <= '0; hist1 <= '0;
    end else if (xv) begin
      hist0 <= r;
      hist1 <= hist0;
    end
  end
  assign ev_mac  = xv && x.cmd.op == OP_MAC;
  assign ev_fwd2 = xv && x.fwd == FWD_2;

  // ---------------- output buffer (BR) and W stage ----------------
  typedef struct packed {
    logic          wr;
    logic [RW-1:0] row;
    logic [W-1:0]  data;
  } br_t;
  br_t       br [3];
  logic [1:0] br_rd, br_wr;
  logic      br_pop;

  assign w_req   = br_cnt != 0 && br[br_rd].wr;
  assign w_row   = br[br_rd].row;
  assign w_data  = br[br_rd].data;
  assign br_pop  = br_cnt != 0 && (!br[br_rd].wr || w_gnt);
  assign q_retire = br_pop;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      br_rd <= '0; br_wr <= '0; br_cnt <= '0;
      for (int k = 0; k < 3; k++) br[k] <= '0;
    end else begin
      if (xv) begin
        br[br_wr] <= '{wr: writes_r(x.cmd), row: RW'(x.c.addr / ADDR_W'(NPE)), data: r};
        br_wr <= (br_wr == 2'd2) ? 2'd0 : br_wr + 2'd1;
      end
      if (br_pop) br_rd <= (br_rd == 2'd2) ? 2'd0 : br_rd + 2'd1;
      br_cnt <= br_cnt + 2'(xv) - 2'(br_pop);
    end
  end

  assign busy = !q_empty || xv || br_cnt != 0;

  a_br_room: assert property (@(posedge clk) disable iff (!rst_n) !(xv && br_cnt == 2'd3 && !br_pop));
endmodule
