// tb_raw_check: random pending slots and histories, compared with a loop
// model of the three outputs. Addresses are drawn from a small set so that
// matches are frequent.
module tb_raw_check;
  import scv_pkg::*;
  localparam int NQ = 4, D = 4;
  logic [ADDR_W-1:0] c_addr;
  logic [NQ-1:0][D-1:0] pend_valid; logic [NQ-1:0][D-1:0][ADDR_W-1:0] pend_c;
  logic [NQ-1:0] last1_v, last2_v, hit, dist1, dist2;
  logic [NQ-1:0][ADDR_W-1:0] last1_c, last2_c;
  int checks = 0, failures = 0, nhit = 0;
  raw_check #(.NQ(NQ), .DEPTH(D)) dut (.*);
  initial begin
    #1000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    for (int n = 0; n < 5000; n++) begin
      c_addr = ADDR_W'($urandom_range(0, 7));
      for (int q = 0; q < NQ; q++) begin
        for (int s = 0; s < D; s++) begin
          pend_valid[q][s] = 1'($urandom); pend_c[q][s] = ADDR_W'($urandom_range(0, 15));
        end
        last1_v[q] = 1'($urandom); last1_c[q] = ADDR_W'($urandom_range(0, 7));
        last2_v[q] = 1'($urandom); last2_c[q] = ADDR_W'($urandom_range(0, 7));
      end
      #1;
      for (int q = 0; q < NQ; q++) begin
        logic h;
        h = 0;
        for (int s = 0; s < D; s++) if (pend_valid[q][s] && pend_c[q][s] == c_addr) h = 1;
        nhit += h;
        checks += 3;
        if (hit[q] !== h) failures++;
        if (dist1[q] !== (last1_v[q] && last1_c[q] == c_addr)) failures++;
        if (dist2[q] !== (last2_v[q] && last2_c[q] == c_addr)) failures++;
      end
    end
    checks++; if (nhit == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
