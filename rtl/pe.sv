// pe: one floating-point processing element of a vector engine.
//
// Three operand ports a, b, c, a result port r, one local register M, one
// multiplier and one adder, with multiplexers choosing what each of them
// sees. The 4-bit command is {mem_mode, op}; the operations and their
// vector-mode / memory-mode forms follow the paper's operation table:
//   LOAD   M = b                 UNLOAD r = M
//   ADD    r = a + c | a + M     SUB    r = a - c | a - M
//   MUL    r = a * b | a * M     MAC    r = M = a * b + M
//   ACC    r = M = a + M         MADD   r = a * b + c | a * M + c
// r is combinational from the inputs and M; M changes at the clock edge when
// en is high. One choice is this design's own: in vector mode every operation
// except UNLOAD also leaves its result in M (the table leaves M alone there).
// This lets the arbiter turn the next same-output operation of a queue into a
// MAC that accumulates on M ("in-place accumulation") without changing the
// entry already queued. Memory-mode operations never write M except MAC/ACC,
// so a value loaded with LOAD survives them.
module pe
  import scv_pkg::*;
(
  input  logic          clk,
  input  logic          rst_n,
  input  logic          en,
  input  pe_cmd_t       cmd,
  input  logic [31:0]   a,
  input  logic [31:0]   b,
  input  logic [31:0]   c,
  output logic [31:0]   r,
  output logic [31:0]   m
);
  logic [31:0] mul_b, mul_y, add_x, add_y, add_z;

  // multiplier: a times b, or a times M in memory mode (MAC always uses b)
  assign mul_b = (cmd.mem_mode && cmd.op != OP_MAC) ? m : b;
  fp_mul u_mul (.a(a), .b(mul_b), .y(mul_y));

  // adder operands
  always_comb begin
    unique case (cmd.op)
      OP_MAC:  begin add_x = mul_y; add_z = m; end
      OP_MADD: begin add_x = mul_y; add_z = c; end
      OP_ACC:  begin add_x = a;     add_z = m; end
      OP_SUB:  begin add_x = a;     add_z = cmd.mem_mode ? {~m[31], m[30:0]} : {~c[31], c[30:0]}; end
      default: begin add_x = a;     add_z = cmd.mem_mode ? m : c; end
    endcase
  end
  fp_add u_add (.a(add_x), .b(add_z), .y(add_y));

  always_comb begin
    unique case (cmd.op)
      OP_LOAD:   r = b;
      OP_UNLOAD: r = m;
      OP_MUL:    r = mul_y;
      default:   r = add_y;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)
      m <= '0;
    else if (en) begin
      if (cmd.op == OP_LOAD)
        m <= b;
      else if (cmd.op inside {OP_MAC, OP_ACC})
        m <= r;
      else if (!cmd.mem_mode && cmd.op != OP_UNLOAD)
        m <= r;
    end
  end
endmodule
