// pim_pkg: types and constants shared by the PIM pseudo-channel.
//
// Geometry (one HBM3 pseudo-channel, PIM enabled):
//   16 banks per pseudo-channel, one PIM unit per even/odd bank pair (8 units),
//   1024-byte row buffer = 32 columns of one 256-bit (32-byte) DRAM word,
//   256-bit SIMD word = 16 lanes of FP16, 16 PIM registers per unit.
// These numbers follow the paper's evaluated configuration. The row count per bank is not
// given there; 16384 rows (16 MiB per bank) is this design's choice, typical of HBM3.
//
// Timing is counted in cycles of a 1.2 GHz controller clock (0.833 ns), the HBM-PIM memory
// clock. tRP = 15 ns -> 18, tRAS = 33 ns -> 40, tCCDL = 3.33 ns -> 4 cycles are the paper's
// values rounded up. Single-bank commands and normal reads/writes issue at twice the rate of
// multi-bank PIM commands, so tCCDS = 2. tRCD (activate to column command) is not given and
// is taken as 18 cycles (15 ns).
//
// Command encoding (this design's own; the paper names the operations but not their format):
//   op          RD / WR        normal single-bank read / write of one 32-byte column
//               LOAD           reg[dst] = bank word
//               STORE          bank word = reg[src_a]
//               ADD/MUL/MAC    reg[dst] = A + B / A * B / reg[dst] + A * B
//   multi_bank  1: broadcast to all banks of one parity (odd selects even or odd banks)
//               0: only bank 'bank'
//   a_bank      operand A is the addressed bank word (1) or reg[src_a] (0)
//   b_sel       operand B is reg[src_b], a scalar in data[15:0] broadcast to all lanes,
//               or the full 256-bit data-bus word
// Lint note: compiled alone, the package reports its constants as unused; the modules use them.
package pim_pkg;

  localparam int NUM_BANKS  = 16;
  localparam int NUM_UNITS  = NUM_BANKS / 2;
  localparam int LANES      = 16;
  localparam int WORD_W     = 256;
  localparam int NUM_REGS   = 16;
  localparam int NUM_COLS   = 32;
  localparam int ROW_W      = 14;   // row address bits (16384 rows)
  localparam int BANK_W     = 4;
  localparam int COL_W      = 5;
  localparam int REG_W      = 4;

  localparam int T_RP   = 18;
  localparam int T_RAS  = 40;
  localparam int T_RCD  = 18;
  localparam int T_CCDL = 4;
  localparam int T_CCDS = 2;

  typedef logic [WORD_W-1:0] word_t;

  typedef enum logic [2:0] {
    OP_RD    = 3'd0,
    OP_WR    = 3'd1,
    OP_LOAD  = 3'd2,
    OP_STORE = 3'd3,
    OP_ADD   = 3'd4,
    OP_MUL   = 3'd5,
    OP_MAC   = 3'd6
  } pim_op_e;

  typedef enum logic [1:0] {
    B_REG    = 2'd0,
    B_SCALAR = 2'd1,
    B_VECTOR = 2'd2
  } bsel_e;

  typedef enum logic [1:0] {
    ALU_PASS = 2'd0,
    ALU_ADD  = 2'd1,
    ALU_MUL  = 2'd2,
    ALU_MAC  = 2'd3
  } alu_op_e;

  typedef struct packed {
    pim_op_e            op;
    logic               multi_bank;
    logic               odd;
    logic [BANK_W-1:0]  bank;
    logic [ROW_W-1:0]   row;
    logic [COL_W-1:0]   col;
    logic               a_bank;
    logic [REG_W-1:0]   src_a;
    logic [REG_W-1:0]   src_b;
    logic [REG_W-1:0]   dst;
    bsel_e              b_sel;
    word_t              data;
  } pim_cmd_t;

  // push-primitive update: add 'value' to the FP16 element at (bank,row,col,lane)
  typedef struct packed {
    logic [BANK_W-1:0]  bank;
    logic [ROW_W-1:0]   row;
    logic [COL_W-1:0]   col;
    logic [3:0]         lane;
    logic [15:0]        value;
  } push_upd_t;

  function automatic logic is_pim_op(input pim_op_e op);
    return (op != OP_RD) && (op != OP_WR);
  endfunction

  // banks a command addresses
  function automatic logic [NUM_BANKS-1:0] target_mask(input pim_cmd_t c);
    logic [NUM_BANKS-1:0] m;
    for (int b = 0; b < NUM_BANKS; b++)
      m[b] = c.multi_bank ? (b[0] == c.odd) : (c.bank == BANK_W'(b));
    return m;
  endfunction

  // does the command read the addressed bank word?
  function automatic logic reads_bank(input pim_cmd_t c);
    return (c.op == OP_RD) || (c.op == OP_LOAD) ||
           (((c.op == OP_ADD) || (c.op == OP_MUL) || (c.op == OP_MAC)) && c.a_bank);
  endfunction

  function automatic logic writes_bank(input pim_cmd_t c);
    return (c.op == OP_WR) || (c.op == OP_STORE);
  endfunction

  // does the command touch the bank array at all (needs its row open)?
  function automatic logic needs_row(input pim_cmd_t c);
    return reads_bank(c) || writes_bank(c);
  endfunction

endpackage
