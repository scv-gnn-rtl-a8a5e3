// sram_mp: one bank of multi-port SRAM with NR read ports and NW write ports.
//
// Written as a plain array so that it simulates and synthesises anywhere; in
// silicon it stands for a four-port SRAM macro (the paper builds its local
// memory from such macros). Reads are synchronous: the row addressed in cycle
// t appears on rdata in cycle t+1. A read and a write of the same row in the
// same cycle return the old contents (read-first). If two write ports write
// the same row in one cycle, the higher-numbered port wins. The memory is
// cleared at reset, which also makes simulation start from known contents.
module sram_mp #(
  parameter int unsigned DEPTH = 256,
  parameter int unsigned W     = 2048,
  parameter int unsigned NR    = 4,
  parameter int unsigned NW    = 1,
  localparam int unsigned AW   = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic [NR-1:0]         re,
  input  logic [NR-1:0][AW-1:0] raddr,
  output logic [NR-1:0][W-1:0]  rdata,
  input  logic [NW-1:0]         we,
  input  logic [NW-1:0][AW-1:0] waddr,
  input  logic [NW-1:0][W-1:0]  wdata
);
  logic [W-1:0] mem [DEPTH];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < int'(DEPTH); i++) mem[i] <= '0;
      rdata <= '0;
    end else begin
      for (int p = 0; p < int'(NR); p++)
        if (re[p]) rdata[p] <= mem[raddr[p]];
      for (int p = 0; p < int'(NW); p++)
        if (we[p]) mem[waddr[p]] <= wdata[p];
    end
  end
endmodule
