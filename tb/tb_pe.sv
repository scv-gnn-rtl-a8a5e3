// tb_pe: drives random PE commands in both modes and compares r and M with a
// reference model of the operation table built on fp_ref_pkg arithmetic.
module tb_pe;
  import scv_pkg::*;
  import fp_ref_pkg::*;
  logic clk = 0, rst_n = 0, en = 0;
  pe_cmd_t cmd;
  logic [31:0] a, b, c, r, m;
  logic [31:0] mm;          // model of M
  logic [31:0] er, em;
  int checks = 0, failures = 0;
  int seen[16];

  pe dut (.clk, .rst_n, .en, .cmd, .a, .b, .c, .r, .m);
  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    mm = 0;
    cmd = '{mem_mode: 1'b0, op: OP_LOAD}; a = 0; b = 0; c = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 5000; i++) begin
      @(negedge clk);
      cmd.mem_mode = 1'($urandom);
      cmd.op = pe_op_e'($urandom_range(0, 7));
      a = rnd_val(); b = rnd_val(); c = rnd_val();
      en = 1'b1;
      em = mm;
      unique case (cmd.op)
        OP_LOAD:   begin er = b; em = b; end
        OP_UNLOAD: er = mm;
        OP_ADD:    er = fadd(a, cmd.mem_mode ? mm : c);
        OP_SUB:    er = fadd(a, fneg(cmd.mem_mode ? mm : c));
        OP_MUL:    er = fmul(a, cmd.mem_mode ? mm : b);
        OP_MAC:    begin er = fadd(fmul(a, b), mm); em = er; end
        OP_ACC:    begin er = fadd(a, mm); em = er; end
        OP_MADD:   er = fadd(fmul(a, cmd.mem_mode ? mm : b), c);
      endcase
      if (!cmd.mem_mode && !(cmd.op inside {OP_UNLOAD, OP_LOAD})) em = er;
      #1;
      checks++;
      seen[{cmd.mem_mode, cmd.op}]++;
      if (r !== er) begin
        failures++;
        if (failures < 10) $display("FAIL r: cmd=%b a=%h b=%h c=%h M=%h r=%h exp %h", cmd, a, b, c, mm, r, er);
      end
      @(posedge clk); #1;
      mm = em;
      checks++;
      if (m !== em) begin
        failures++;
        if (failures < 10) $display("FAIL M: cmd=%b got %h exp %h", cmd, m, em);
      end
      // with en low, M must hold
      if (i % 50 == 0) begin
        @(negedge clk); en = 0; cmd.op = OP_LOAD; b = rnd_val();
        @(posedge clk); #1; checks++;
        if (m !== mm) begin failures++; $display("FAIL M changed while idle"); end
      end
    end
    foreach (seen[k]) if (seen[k] == 0) begin failures++; $display("FAIL command %0d never drawn", k); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
