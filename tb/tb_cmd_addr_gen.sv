// tb_cmd_addr_gen: random aggregation vectors, combination non-zeros and raw
// commands through the generator with a randomly stalling consumer; every
// emitted entry is compared with the entry computed here from the element
// definitions (addresses wrap modulo the memory sizes).
module tb_cmd_addr_gen;
  import scv_pkg::*;
  localparam int NQ = 4, NPE = 4, VECH = 8, AW = 64, BR = 16, CR = 32;
  logic clk = 0, rst_n = 0;
  logic [ADDR_W-1:0] a_base = 7, b_base_row = 3, c_base_row = 5;
  logic s_valid = 0, s_ready, o_valid, o_ready, o_pin;
  stream_el_t s_el;
  q_entry_t o_entry;
  logic [1:0] o_pin_q;
  typedef struct packed { q_entry_t e; logic pin; logic [1:0] pq; } exp_t;
  exp_t expq [$];
  int checks = 0, failures = 0, n_out = 0;
  cmd_addr_gen #(.NQ(NQ), .NPE(NPE), .VECH(VECH), .A_WDS(AW), .B_ROWS(BR), .C_ROWS(CR)) dut (.*);
  always #5 clk = ~clk;
  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  always_ff @(posedge clk) o_ready <= ($urandom_range(0, 3) != 0);
  always @(posedge clk) if (rst_n && o_valid && o_ready) begin
    checks++; n_out++;
    if (expq.size() == 0 || {o_entry, o_pin, o_pin_q} !== expq[0]) begin
      failures++;
      if (failures < 10) $display("FAIL entry %0d: got %h exp %h", n_out, {o_entry, o_pin, o_pin_q}, expq.size() ? expq[0] : '0);
    end
    if (expq.size()) void'(expq.pop_front());
  end
  task automatic send(stream_el_t el);
    @(negedge clk); s_el = el; s_valid = 1;
    do @(posedge clk); while (!s_ready);
    #1 s_valid = 0;
  endtask
  initial begin
    stream_el_t el; exp_t x;
    int rb, col, vp;
    s_el = '0; o_ready = 0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int n = 0; n < 300; n++) begin
      int sel;
      sel = $urandom_range(0, 2);
      case (sel)
        0: begin // one SCV vector
          rb = $urandom_range(0, 9); col = $urandom_range(0, 40); vp = $urandom_range(0, 100);
          el = '0; el.kind = EL_AGG_HDR; el.f0 = rb; el.f1 = col; el.f2 = vp; send(el);
          for (int k = 0; k < VECH; k++) if ($urandom_range(0, 1)) begin
            el = '0; el.kind = EL_AGG_NZ; el.f0 = k;
            x = '0; x.e.cmd = '{mem_mode: 1'b0, op: OP_MADD};
            x.e.a = '{vec: 1'b0, addr: ADDR_W'((7 + vp) % AW)};
            x.e.b = '{vec: 1'b1, addr: ADDR_W'(((3 + col) % BR) * NPE)};
            x.e.c = '{vec: 1'b1, addr: ADDR_W'(((5 + rb * VECH + k) % CR) * NPE)};
            expq.push_back(x); send(el); vp++;
          end
        end
        1: begin
          el = '0; el.kind = EL_CMB_NZ; el.f0 = $urandom_range(0, 7); el.f1 = $urandom_range(0, 20); el.f2 = $urandom_range(0, 63);
          x = '0; x.e.cmd = '{mem_mode: 1'b0, op: OP_MADD};
          x.e.a = '{vec: 1'b0, addr: ADDR_W'(el.f2)};
          x.e.b = '{vec: 1'b1, addr: ADDR_W'(((3 + el.f1) % BR) * NPE)};
          x.e.c = '{vec: 1'b1, addr: ADDR_W'(((5 + el.f0) % CR) * NPE)};
          x.pin = 1; x.pq = 2'(el.f0 % NQ);
          expq.push_back(x); send(el);
        end
        default: begin
          el = '0; el.kind = EL_RAW;
          el.f0 = {8'($urandom_range(0, 3)), 15'd0, 1'($urandom), 1'b0, 4'($urandom), 3'($urandom)};
          el.f1 = $urandom_range(0, 999); el.f2 = $urandom_range(0, 999); el.f3 = $urandom_range(0, 999);
          x = '0; x.e.cmd = pe_cmd_t'(el.f0[6:3]);
          x.e.a = '{vec: el.f0[2], addr: ADDR_W'(el.f1)};
          x.e.b = '{vec: el.f0[1], addr: ADDR_W'(el.f2)};
          x.e.c = '{vec: el.f0[0], addr: ADDR_W'(el.f3)};
          x.pin = el.f0[8]; x.pq = 2'(el.f0[31:24]);
          expq.push_back(x); send(el);
        end
      endcase
    end
    repeat (20) @(posedge clk);
    checks++; if (expq.size() != 0) begin failures++; $display("FAIL %0d entries missing", expq.size()); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
