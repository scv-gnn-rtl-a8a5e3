// pe_queue: the queue in front of one vector engine.
//
// It holds the four internal queues of the paper (command, A address, B
// address, C address) as one record per slot, moved in lock step. It is an
// asynchronous FIFO: the arbiter writes it in its own (faster) clock domain,
// the vector engine reads it in the engine clock domain, and the pointers
// cross as Gray codes through two-flop synchronisers.
// A slot is freed only when the engine retires the entry (its result has been
// written to memory), not when it is popped. The write side therefore sees
// every entry whose output may still be unwritten, and exposes the C address
// of each such slot (pend_valid / pend_c) for the RAW-hazard check. The
// synchroniser delay only makes the check more cautious. Freeing on retire
// and exposing the slots are this design's choices; the depth (16) is the
// paper's.
// Write side: push when !full, entry on din. Read side: dout is the oldest
// unpopped entry when !empty; pop takes it; retire frees the oldest popped one.
module pe_queue
  import scv_pkg::*;
#(
  parameter int unsigned DEPTH = 16,
  localparam int unsigned AW   = $clog2(DEPTH)
) (
  // arbiter (write) side
  input  logic                     clk_w,
  input  logic                     rst_w_n,
  input  logic                     push,
  input  q_entry_t                 din,
  output logic                     full,
  output logic [DEPTH-1:0]         pend_valid,
  output logic [DEPTH-1:0][ADDR_W-1:0] pend_c,
  output logic [AW:0]              count_w,
  // vector engine (read) side
  input  logic                     clk_r,
  input  logic                     rst_r_n,
  input  logic                     pop,
  input  logic                     retire,
  output logic                     empty,
  output q_entry_t                 dout
);
  q_entry_t mem [DEPTH];

  logic [AW:0] wr_bin, wr_gray, rd_bin, ret_bin, ret_gray;
  logic [AW:0] ret_gray_s1, ret_gray_s2, wr_gray_s1, wr_gray_s2;
  logic [AW:0] ret_bin_w, wr_bin_r;

  function automatic logic [AW:0] bin2gray(logic [AW:0] b);
    return b ^ (b >> 1);
  endfunction
  function automatic logic [AW:0] gray2bin(logic [AW:0] g);
    logic [AW:0] b;
    for (int i = AW; i >= 0; i--) b[i] = (i == AW) ? g[i] : (b[i+1] ^ g[i]);
    return b;
  endfunction

  // ---------------- write domain ----------------
  always_ff @(posedge clk_w or negedge rst_w_n) begin
    if (!rst_w_n) begin
      wr_bin <= '0; wr_gray <= '0; ret_gray_s1 <= '0; ret_gray_s2 <= '0;
    end else begin
      ret_gray_s1 <= ret_gray;
      ret_gray_s2 <= ret_gray_s1;
      if (push && !full) begin
        wr_bin  <= wr_bin + 1'b1;
        wr_gray <= bin2gray(wr_bin + 1'b1);
      end
    end
  end
  always_ff @(posedge clk_w) begin
    if (push && !full) mem[wr_bin[AW-1:0]] <= din;
  end

  assign ret_bin_w = gray2bin(ret_gray_s2);
  assign count_w   = wr_bin - ret_bin_w;
  assign full      = (count_w == (AW+1)'(DEPTH));

  always_comb begin
    for (int i = 0; i < int'(DEPTH); i++) begin
      pend_valid[i] = (AW'(i) - ret_bin_w[AW-1:0]) < count_w[AW-1:0] || full;
      pend_c[i]     = mem[i].c.addr;
    end
  end

  // ---------------- read domain ----------------
  always_ff @(posedge clk_r or negedge rst_r_n) begin
    if (!rst_r_n) begin
      rd_bin <= '0; ret_bin <= '0; ret_gray <= '0; wr_gray_s1 <= '0; wr_gray_s2 <= '0;
    end else begin
      wr_gray_s1 <= wr_gray;
      wr_gray_s2 <= wr_gray_s1;
      if (pop && !empty) rd_bin <= rd_bin + 1'b1;
      if (retire) begin
        ret_bin  <= ret_bin + 1'b1;
        ret_gray <= bin2gray(ret_bin + 1'b1);
      end
    end
  end
  assign wr_bin_r = gray2bin(wr_gray_s2);
  assign empty    = (wr_bin_r == rd_bin);
  assign dout     = mem[rd_bin[AW-1:0]];

  // retire only what has been popped
  a_retire: assert property (@(posedge clk_r) disable iff (!rst_r_n) retire |-> (ret_bin != rd_bin));
endmodule
