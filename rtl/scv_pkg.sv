// scv_pkg: sizes, the PE command encoding and the queue/stream record types
// shared by every block of the SCV graph processor.
//
// Sizes follow the evaluated configuration: 8 vector engines (VPEs) of 64 PEs,
// queue depth 16, SCV column-vector height 512, a 4-bit PE command, and local
// memories of 64 kB (A), 64 kB (B) and 256 kB (C). The number format is this
// design's choice: IEEE-754 binary32. The local memories are organised as rows
// of N_PE words; a local address is a word address, row = addr / N_PE.
package scv_pkg;

  parameter int unsigned FP_W   = 32;
  parameter int unsigned N_PE   = 64;
  parameter int unsigned N_VPE  = 8;
  parameter int unsigned QDEPTH = 16;
  parameter int unsigned VEC_H  = 512;
  parameter int unsigned CMD_W  = 4;
  parameter int unsigned ADDR_W = 16;   // local word address (C needs 64 Ki words)

  // memory sizes in words (4-byte floats)
  parameter int unsigned A_WORDS = 64 * 1024 / 4;
  parameter int unsigned B_WORDS = 64 * 1024 / 4;
  parameter int unsigned C_WORDS = 256 * 1024 / 4;

  // PE operations, from the PE operation table; bit 3 of the command selects
  // memory mode (1) or vector mode (0).
  typedef enum logic [2:0] {
    OP_LOAD   = 3'd0,  // M = b
    OP_UNLOAD = 3'd1,  // r = M
    OP_ADD    = 3'd2,  // r = a + c        | r = a + M
    OP_SUB    = 3'd3,  // r = a - c        | r = a - M
    OP_MUL    = 3'd4,  // r = a * b        | r = a * M
    OP_MAC    = 3'd5,  // r = M = a * b + M
    OP_ACC    = 3'd6,  // r = M = a + M
    OP_MADD   = 3'd7   // r = a * b + c    | r = a * M + c
  } pe_op_e;

  typedef struct packed {
    logic   mem_mode;
    pe_op_e op;
  } pe_cmd_t;

  // one operand address held in the A, B or C queue
  typedef struct packed {
    logic              vec;    // 1: N_PE consecutive words, 0: one word broadcast
    logic [ADDR_W-1:0] addr;
  } opnd_t;

  // where the c operand comes from
  typedef enum logic [1:0] {
    FWD_NONE = 2'd0,   // read from the C memory
    FWD_1    = 2'd1,   // result of the previous entry of this queue
    FWD_2    = 2'd2    // result two entries back (output-buffer forwarding)
  } fwd_e;

  // one entry of a PE queue: the four internal queues move in lock step
  typedef struct packed {
    pe_cmd_t cmd;
    opnd_t   a;
    opnd_t   b;
    opnd_t   c;      // source of c and destination of r
    fwd_e    fwd;
  } q_entry_t;

  // which operands an operation reads, and whether it writes r to memory
  function automatic logic uses_a(pe_cmd_t c);
    return c.op inside {OP_ADD, OP_SUB, OP_MUL, OP_MAC, OP_ACC, OP_MADD};
  endfunction
  function automatic logic uses_b(pe_cmd_t c);
    return (c.op inside {OP_LOAD, OP_MAC}) ||
           (!c.mem_mode && (c.op inside {OP_MUL, OP_MADD}));
  endfunction
  function automatic logic uses_c(pe_cmd_t c);
    return (c.op == OP_MADD) || (!c.mem_mode && (c.op inside {OP_ADD, OP_SUB}));
  endfunction
  function automatic logic writes_r(pe_cmd_t c);
    return c.op != OP_LOAD;
  endfunction

  // input stream elements
  typedef enum logic [1:0] {
    EL_AGG_HDR = 2'd0,  // SCV vector header: row block and column of the vector
    EL_AGG_NZ  = 2'd1,  // SCV non-zero: blk id (row inside the vector)
    EL_CMB_NZ  = 2'd2,  // combination non-zero: H(row,k) at a given A address
    EL_RAW     = 2'd3   // general vector command with explicit addresses
  } el_kind_e;

  typedef struct packed {
    el_kind_e    kind;
    logic [31:0] f0;   // HDR: row block   | NZ: blk id | CMB: output row | RAW: {cmd, a.vec, b.vec, c.vec}
    logic [31:0] f1;   // HDR: column (Z row)           | CMB: k (W row)  | RAW: a addr
    logic [31:0] f2;   //                               | CMB: A address  | RAW: b addr
    logic [31:0] f3;   //                                                 | RAW: c addr
  } stream_el_t;

endpackage
