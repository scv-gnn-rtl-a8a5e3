// raw_check: read-after-write hazard detection for one incoming entry.
//
// Compares the output (C) address of the entry the arbiter is about to place
// against
//   * every slot of every PE queue that may still hold an unwritten result
//     (cross-queue hazard: the entry must go to that same queue), and
//   * the last and second-to-last entries pushed into each queue (in-queue
//     hazards one and two entries apart, resolved by accumulation on M and by
//     forwarding from the output buffer).
// Purely combinational; the addresses compared are whole word addresses.
module raw_check
  import scv_pkg::*;
#(
  parameter int unsigned NQ    = 8,
  parameter int unsigned DEPTH = 16
) (
  input  logic [ADDR_W-1:0]                     c_addr,
  input  logic [NQ-1:0][DEPTH-1:0]              pend_valid,
  input  logic [NQ-1:0][DEPTH-1:0][ADDR_W-1:0]  pend_c,
  input  logic [NQ-1:0]                         last1_v,
  input  logic [NQ-1:0][ADDR_W-1:0]             last1_c,
  input  logic [NQ-1:0]                         last2_v,
  input  logic [NQ-1:0][ADDR_W-1:0]             last2_c,
  output logic [NQ-1:0]                         hit,    // pending in queue q
  output logic [NQ-1:0]                         dist1,  // same as last entry of q
  output logic [NQ-1:0]                         dist2   // same as entry before that
);
  always_comb begin
    for (int q = 0; q < int'(NQ); q++) begin
      hit[q] = 1'b0;
      for (int s = 0; s < int'(DEPTH); s++)
        if (pend_valid[q][s] && pend_c[q][s] == c_addr) hit[q] = 1'b1;
      dist1[q] = last1_v[q] && last1_c[q] == c_addr;
      dist2[q] = last2_v[q] && last2_c[q] == c_addr;
    end
  end
endmodule
