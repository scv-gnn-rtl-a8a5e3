// cmd_addr_gen: command and address generation for the incoming sparse
// stream (arbiter clock domain).
//
// Turns each stream element into one PE command with local word addresses:
//  * EL_AGG_HDR opens one SCV column vector: f0 = row block (vector index down
//    the column), f1 = column j (so the row of Z it multiplies), f2 = the
//    vector's blk ptr (index of its first value in the values array).
//  * EL_AGG_NZ (f0 = blk id, the row inside the vector) becomes
//        PS[row] = A_val * Z[j] + PS[row]      (vector Multiply-add)
//    with a = the next value (scalar, A memory, a_base + blk ptr + n),
//    b = Z row j (vector, B memory), c = PS row rb*VEC_H + blk id (C memory).
//  * EL_CMB_NZ (f0 = output row i, f1 = k, f2 = A address of H(i,k)) becomes
//        Z[i] = H(i,k) * W[k] + Z[i], pinned to queue i mod NQ, as in the
//    paper's output-stationary combination.
//  * EL_RAW carries a general vector command: f0 = {pin_q[7:0], 15'b0, pin, 1'b0,
//    cmd[3:0], a.vec, b.vec, c.vec}, f1/f2/f3 = a/b/c word addresses.
// Rows wrap modulo the memory sizes: the PS and Z tiles that the stream
// touches must have been loaded into the local memories beforehand (the paper
// loads PS once per set of rows and prefetches Z rows). The element encoding,
// the base registers and the wrap are this design's choices.
// One element per cycle; valid/ready on both sides, output registered.
module cmd_addr_gen
  import scv_pkg::*;
#(
  parameter int unsigned NQ     = 8,
  parameter int unsigned NPE    = 64,
  parameter int unsigned VECH   = 512,
  parameter int unsigned A_WDS  = 16384,
  parameter int unsigned B_ROWS = 256,
  parameter int unsigned C_ROWS = 1024,
  localparam int unsigned QW    = (NQ > 1) ? $clog2(NQ) : 1
) (
  input  logic              clk,
  input  logic              rst_n,
  // configuration
  input  logic [ADDR_W-1:0] a_base,      // word address of values[0]
  input  logic [ADDR_W-1:0] b_base_row,  // B row holding Z row 0 (or W row 0)
  input  logic [ADDR_W-1:0] c_base_row,  // C row holding PS row 0 (or output row 0)
  // stream in
  input  logic              s_valid,
  output logic              s_ready,
  input  stream_el_t        s_el,
  // to the arbiter
  output logic              o_valid,
  input  logic              o_ready,
  output q_entry_t          o_entry,
  output logic              o_pin,
  output logic [QW-1:0]     o_pin_q
);
  logic [31:0] rb, col, vptr;
  logic        emit;
  q_entry_t    ne;
  logic        npin;
  logic [QW-1:0] npin_q;

  function automatic logic [ADDR_W-1:0] c_word(logic [31:0] row);
    return ADDR_W'(((32'(c_base_row) + row) % C_ROWS) * NPE);
  endfunction
  function automatic logic [ADDR_W-1:0] b_word(logic [31:0] row);
    return ADDR_W'(((32'(b_base_row) + row) % B_ROWS) * NPE);
  endfunction

  assign s_ready = !o_valid || o_ready;

  always_comb begin
    ne = '0; npin = 1'b0; npin_q = '0; emit = 1'b0;
    ne.cmd = '{mem_mode: 1'b0, op: OP_MADD};
    unique case (s_el.kind)
      EL_AGG_HDR: emit = 1'b0;
      EL_AGG_NZ: begin
        emit = 1'b1;
        ne.a = '{vec: 1'b0, addr: ADDR_W'((32'(a_base) + vptr) % A_WDS)};
        ne.b = '{vec: 1'b1, addr: b_word(col)};
        ne.c = '{vec: 1'b1, addr: c_word(rb * VECH + s_el.f0)};
      end
      EL_CMB_NZ: begin
        emit = 1'b1;
        ne.a = '{vec: 1'b0, addr: ADDR_W'(s_el.f2)};
        ne.b = '{vec: 1'b1, addr: b_word(s_el.f1)};
        ne.c = '{vec: 1'b1, addr: c_word(s_el.f0)};
        npin = 1'b1;
        npin_q = QW'(s_el.f0 % NQ);
      end
      default: begin  // EL_RAW
        emit = 1'b1;
        ne.cmd = pe_cmd_t'(s_el.f0[6:3]);
        ne.a = '{vec: s_el.f0[2], addr: ADDR_W'(s_el.f1)};
        ne.b = '{vec: s_el.f0[1], addr: ADDR_W'(s_el.f2)};
        ne.c = '{vec: s_el.f0[0], addr: ADDR_W'(s_el.f3)};
        npin = s_el.f0[8];
        npin_q = QW'(s_el.f0[31:24]);
      end
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rb <= '0; col <= '0; vptr <= '0;
      o_valid <= 1'b0; o_entry <= '0; o_pin <= 1'b0; o_pin_q <= '0;
    end else begin
      if (o_valid && o_ready) o_valid <= 1'b0;
      if (s_valid && s_ready) begin
        if (s_el.kind == EL_AGG_HDR) begin
          rb <= s_el.f0; col <= s_el.f1; vptr <= s_el.f2;
        end
        if (s_el.kind == EL_AGG_NZ) vptr <= vptr + 1;
        if (emit) begin
          o_valid <= 1'b1; o_entry <= ne; o_pin <= npin; o_pin_q <= npin_q;
        end
      end
    end
  end
endmodule
