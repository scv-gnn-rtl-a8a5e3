// tb_mem_region: a C-style region (4 requesters, 2 banks of 2 read + 2 write
// ports) under random traffic. Checks: granted reads return the model's row a
// cycle later; per bank no more distinct rows are read and no more writes are
// granted than there are ports; requests that fit are never refused; same-row
// reads share a port (broadcast); every requester is eventually granted; the
// host port is always served.
module tb_mem_region;
  localparam int NQ = 4, ROWS = 16, NB = 2, NR = 2, NW = 2, W = 64;
  logic clk = 0, rst_n = 0;
  logic [NQ-1:0] rd_req, rd_gnt, wr_req, wr_gnt, conflict;
  logic [NQ-1:0][3:0] rd_row, wr_row;
  logic [NQ-1:0][W-1:0] rd_data, wr_data;
  logic h_re = 0, h_we = 0; logic [3:0] h_row = 0; logic [W-1:0] h_wdata = 0, h_rdata;
  logic [W-1:0] model [ROWS];
  logic [W-1:0] exp_d [NQ];
  logic exp_v [NQ];
  logic [W-1:0] exp_h; logic exp_hv;
  int checks = 0, failures = 0, bcast = 0, refused = 0;
  int wait_cnt [NQ];
  mem_region #(.N_REQ(NQ), .ROWS(ROWS), .NB(NB), .NR(NR), .NW(NW), .W(W)) dut (.*);
  always #5 clk = ~clk;
  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  task automatic chk(logic cond, string msg);
    checks++;
    if (!cond) begin failures++; if (failures < 10) $display("FAIL %s", msg); end
  endtask
  initial begin
    rd_req = 0; wr_req = 0; rd_row = 0; wr_row = 0; wr_data = 0;
    foreach (model[i]) model[i] = '0;
    foreach (exp_v[i]) begin exp_v[i] = 0; wait_cnt[i] = 0; end
    exp_hv = 0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int cyc = 0; cyc < 4000; cyc++) begin
      @(negedge clk);
      for (int v = 0; v < NQ; v++) if (exp_v[v]) chk(rd_data[v] === exp_d[v], $sformatf("read data v%0d", v));
      if (exp_hv) chk(h_rdata === exp_h, "host read data");
      // new requests
      for (int v = 0; v < NQ; v++) begin
        rd_req[v] = ($urandom_range(0, 99) < 70); rd_row[v] = 4'($urandom_range(0, 5));
        wr_req[v] = ($urandom_range(0, 99) < 40); wr_row[v] = 4'(6 + v + 4 * $urandom_range(0, 1));  // engines never write one row together
        wr_data[v] = {32'($urandom), 32'($urandom)};
      end
      h_re = (cyc % 13 == 0); h_we = (cyc % 17 == 5); h_row = 4'($urandom); h_wdata = {32'($urandom), 32'($urandom)};
      #1;
      // port limits per bank
      for (int b = 0; b < NB; b++) begin
        int rows_used [$]; int nw;
        rows_used.delete();
        nw = (h_we && h_row % NB == b) ? 1 : 0;
        if (h_re && h_row % NB == b) rows_used.push_back(-1);
        for (int v = 0; v < NQ; v++) begin
          if (rd_gnt[v] && rd_row[v] % NB == b) begin
            int f[$];
            f = rows_used.find_index(x) with (x == int'(rd_row[v]));
            if (f.size() == 0) rows_used.push_back(rd_row[v]); else bcast++;
          end
          if (wr_gnt[v] && wr_row[v] % NB == b) nw++;
        end
        chk(rows_used.size() <= NR, $sformatf("read ports exceeded bank %0d rows %p req %b gnt %b rr %p h_re %b hrow %0d", b, rows_used, rd_req, rd_gnt, rd_row, h_re, h_row));
        chk(nw <= NW, "write ports exceeded");
      end
      // a request alone in its bank is always granted
      for (int v = 0; v < NQ; v++) begin
        int others;
        others = 0;
        for (int u = 0; u < NQ; u++) if (u != v && rd_req[u] && rd_row[u] % NB == rd_row[v] % NB) others++;
        if (rd_req[v] && others == 0 && !(h_re && h_row % NB == rd_row[v] % NB)) chk(rd_gnt[v], "lone read refused");
        if (rd_req[v] && !rd_gnt[v]) begin refused++; wait_cnt[v]++; chk(wait_cnt[v] < NQ + 2, "read starved"); end
        else wait_cnt[v] = 0;
        chk(conflict[v] == ((rd_req[v] && !rd_gnt[v]) || (wr_req[v] && !wr_gnt[v])), "conflict flag");
      end
      for (int v = 0; v < NQ; v++) begin
        exp_v[v] = rd_req[v] && rd_gnt[v]; exp_d[v] = model[rd_row[v]];
      end
      exp_hv = h_re; exp_h = model[h_row];
      @(posedge clk);
      if (h_we) model[h_row] = h_wdata;
      for (int v = 0; v < NQ; v++) if (wr_req[v] && wr_gnt[v]) model[wr_row[v]] = wr_data[v];  // engine ports follow the host's port 0
      // keep requests stable until the edge has been taken
    end
    chk(bcast > 0, "broadcast never happened");
    chk(refused > 0, "no conflict ever happened");
    $display("broadcasts %0d, refused reads %0d", bcast, refused);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
