// mem_region: one of the three dedicated local memories (A, B or C) with its
// bank-conflict controller.
//
// Rows of N_PE words are spread over NB banks by the low bits of the row
// number (bank = row mod NB); each bank is a multi-port SRAM with NR read and
// NW write ports. Every cycle the controller hands out the ports of each bank
// to the requesting VPEs in a rotating priority order. Two reads of the same
// row share one port (limited broadcast). A request that finds no free port
// is not granted; the VPE stalls and asks again next cycle. The host port
// (loading and unloading the memory) is always served first and uses port 0
// of the bank it addresses; the A and B memories use their write port only for
// it. Banking by the low row bits, rotating priority and the host port are
// this design's choices; the port counts per bank follow the paper (four reads
// for A and B, two reads and two writes for C).
// Timing: grants are combinational in the request cycle; read data arrives on
// rd_data in the next cycle, selected by the registered bank/port choice.
module mem_region #(
  parameter int unsigned N_REQ = 8,
  parameter int unsigned ROWS  = 1024,
  parameter int unsigned NB    = 4,
  parameter int unsigned NR    = 2,
  parameter int unsigned NW    = 2,
  parameter int unsigned W     = 2048,
  localparam int unsigned RW   = $clog2(ROWS),
  localparam int unsigned BW   = (NB > 1) ? $clog2(NB) : 1,
  localparam int unsigned DW   = (ROWS / NB > 1) ? $clog2(ROWS / NB) : 1,
  localparam int unsigned PW   = (NR > 1) ? $clog2(NR) : 1
) (
  input  logic                     clk,
  input  logic                     rst_n,
  // VPE read requests
  input  logic [N_REQ-1:0]         rd_req,
  input  logic [N_REQ-1:0][RW-1:0] rd_row,
  output logic [N_REQ-1:0]         rd_gnt,
  output logic [N_REQ-1:0][W-1:0]  rd_data,
  // VPE write requests
  input  logic [N_REQ-1:0]         wr_req,
  input  logic [N_REQ-1:0][RW-1:0] wr_row,
  input  logic [N_REQ-1:0][W-1:0]  wr_data,
  output logic [N_REQ-1:0]         wr_gnt,
  // host port
  input  logic                     h_re,
  input  logic                     h_we,
  input  logic [RW-1:0]            h_row,
  input  logic [W-1:0]             h_wdata,
  output logic [W-1:0]             h_rdata,
  // statistics: requests refused this cycle
  output logic [N_REQ-1:0]         conflict
);
  logic [NB-1:0][NR-1:0]         b_re;
  logic [NB-1:0][NR-1:0][DW-1:0] b_raddr;
  logic [NB-1:0][NR-1:0][W-1:0]  b_rdata;
  logic [NB-1:0][NW-1:0]         b_we;
  logic [NB-1:0][NW-1:0][DW-1:0] b_waddr;
  logic [NB-1:0][NW-1:0][W-1:0]  b_wdata;

  logic [N_REQ-1:0][BW-1:0] sel_bank, sel_bank_q;
  logic [N_REQ-1:0][PW-1:0] sel_port, sel_port_q;
  logic [BW-1:0]            h_bank_q;
  logic [$clog2(N_REQ+1)-1:0] prio;

  function automatic logic [BW-1:0] bank_of(logic [RW-1:0] row);
    return (NB > 1) ? BW'(row % NB) : '0;
  endfunction
  function automatic logic [DW-1:0] idx_of(logic [RW-1:0] row);
    return DW'(row / NB);
  endfunction

  // All array writes below use loop constants as indices (bank b, port p),
  // so the allocator is a plain priority network.
  always_comb begin
    int unsigned nr_used [NB];
    int unsigned nw_used [NB];
    int unsigned v;
    logic        shared, got;
    shared = 1'b0; got = 1'b0; v = 0;
    b_re = '0; b_raddr = '0; b_we = '0; b_waddr = '0; b_wdata = '0;
    rd_gnt = '0; wr_gnt = '0; sel_bank = '0; sel_port = '0;
    for (int b = 0; b < int'(NB); b++) begin
      nr_used[b] = 0; nw_used[b] = 0;
      // host first, on port 0 of its bank
      if (h_re && bank_of(h_row) == BW'(b)) begin
        b_re[b][0] = 1'b1;
        b_raddr[b][0] = idx_of(h_row);
        nr_used[b] = 1;
      end
      if (h_we && bank_of(h_row) == BW'(b)) begin
        b_we[b][0] = 1'b1;
        b_waddr[b][0] = idx_of(h_row);
        b_wdata[b][0] = h_wdata;
        nw_used[b] = 1;
      end
    end
    for (int i = 0; i < int'(N_REQ); i++) begin
      v = (int'(prio) + i) % N_REQ;
      for (int b = 0; b < int'(NB); b++) begin
        if (rd_req[v] && bank_of(rd_row[v]) == BW'(b)) begin
          sel_bank[v] = BW'(b);
          // share a port already reading the same row (not the host's)
          shared = 1'b0;
          for (int p = 0; p < int'(NR); p++)
            if (p < int'(nr_used[b]) && !shared && b_raddr[b][p] == idx_of(rd_row[v]) &&
                !(h_re && p == 0)) begin
              shared = 1'b1;
              rd_gnt[v] = 1'b1;
              sel_port[v] = PW'(p);
            end
          // otherwise take the next free port
          got = 1'b0;
          for (int p = 0; p < int'(NR); p++)
            if (!shared && !got && p == int'(nr_used[b])) begin
              got = 1'b1;
              rd_gnt[v] = 1'b1;
              sel_port[v] = PW'(p);
              b_re[b][p] = 1'b1;
              b_raddr[b][p] = idx_of(rd_row[v]);
            end
          if (got) nr_used[b] = nr_used[b] + 1;
        end
        if (wr_req[v] && bank_of(wr_row[v]) == BW'(b)) begin
          got = 1'b0;
          for (int p = 0; p < int'(NW); p++)
            if (!got && p == int'(nw_used[b])) begin
              got = 1'b1;
              wr_gnt[v] = 1'b1;
              b_we[b][p] = 1'b1;
              b_waddr[b][p] = idx_of(wr_row[v]);
              b_wdata[b][p] = wr_data[v];
            end
          if (got) nw_used[b] = nw_used[b] + 1;
        end
      end
    end
  end

  assign conflict = (rd_req & ~rd_gnt) | (wr_req & ~wr_gnt);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      prio <= '0; sel_bank_q <= '0; sel_port_q <= '0; h_bank_q <= '0;
    end else begin
      prio <= (int'(prio) == int'(N_REQ) - 1) ? '0 : prio + 1'b1;
      sel_bank_q <= sel_bank;
      sel_port_q <= sel_port;
      h_bank_q <= bank_of(h_row);
    end
  end

  always_comb begin
    for (int v = 0; v < int'(N_REQ); v++) rd_data[v] = b_rdata[sel_bank_q[v]][sel_port_q[v]];
    h_rdata = b_rdata[h_bank_q][0];
  end

  for (genvar b = 0; b < int'(NB); b++) begin : g_bank
    sram_mp #(.DEPTH(ROWS / NB), .W(W), .NR(NR), .NW(NW)) u_sram (
      .clk, .rst_n, .re(b_re[b]), .raddr(b_raddr[b]), .rdata(b_rdata[b]),
      .we(b_we[b]), .waddr(b_waddr[b]), .wdata(b_wdata[b]));
  end
endmodule
