// tb_sram_mp: random traffic on a 2-read / 2-write bank, checked against an
// array model: read data one cycle later, read-first on a same-cycle write,
// higher write port wins on a same-row double write.
module tb_sram_mp;
  localparam int DEPTH = 16, W = 40, NR = 2, NW = 2;
  logic clk = 0, rst_n = 0;
  logic [NR-1:0] re; logic [NR-1:0][3:0] raddr; logic [NR-1:0][W-1:0] rdata;
  logic [NW-1:0] we; logic [NW-1:0][3:0] waddr; logic [NW-1:0][W-1:0] wdata;
  logic [W-1:0] model [DEPTH];
  logic [W-1:0] exp_d [NR];
  logic         exp_v [NR];
  int checks = 0, failures = 0;
  sram_mp #(.DEPTH(DEPTH), .W(W), .NR(NR), .NW(NW)) dut (.*);
  always #5 clk = ~clk;
  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    re = 0; we = 0; raddr = 0; waddr = 0; wdata = 0;
    foreach (model[i]) model[i] = '0;
    foreach (exp_v[i]) exp_v[i] = 0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int cyc = 0; cyc < 3000; cyc++) begin
      @(negedge clk);
      // check last cycle's reads
      for (int p = 0; p < NR; p++) if (exp_v[p]) begin
        checks++;
        if (rdata[p] !== exp_d[p]) begin failures++; $display("FAIL port %0d got %h exp %h", p, rdata[p], exp_d[p]); end
      end
      for (int p = 0; p < NR; p++) begin
        re[p] = 1'($urandom); raddr[p] = 4'($urandom);
        exp_v[p] = re[p]; exp_d[p] = model[raddr[p]];
      end
      for (int p = 0; p < NW; p++) begin
        we[p] = 1'($urandom); waddr[p] = (cyc % 7 == 0) ? 4'd3 : 4'($urandom); wdata[p] = {8'($urandom), 32'($urandom)};
      end
      for (int p = 0; p < NW; p++) if (we[p]) model[waddr[p]] = wdata[p];
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
