// rasa_pkg: types and constants shared by the RASA matrix engine.
//
// The engine follows an AMX-like register model: eight tile registers of
// 16 rows x 64 bytes. A row of an A tile holds 32 BF16 values, i.e. 16 pairs
// (K = 2j, 2j+1); a row of a B tile holds, for each of the 16 output columns,
// the pair B[2j][n], B[2j+1][n] (the BF16 pair layout of AMX); a row of a C
// tile holds 16 FP32 values. With double-multiplier PEs each PE consumes one
// such pair, so a 16x16 PE array covers a full 16x32x16 tile multiply.
package rasa_pkg;

  // Architectural sizes (paper: 8 tile registers, 16 rows of 64B each)
  localparam int unsigned NREG      = 8;
  localparam int unsigned TROWS     = 16;
  localparam int unsigned ROW_BITS  = 512;
  localparam int unsigned REG_AW    = $clog2(NREG);
  localparam int unsigned ROW_AW    = $clog2(TROWS);
  // Array sizes (paper: 16x16 PEs when double multipliers are used)
  localparam int unsigned ARR_ROWS  = 16;
  localparam int unsigned ARR_COLS  = 16;
  localparam int unsigned ADDR_W    = 48;

  typedef logic [15:0] bf16_t;
  typedef logic [31:0] fp32_t;

  // A operand travelling east: an element pair plus a valid bit and the
  // weight buffer the pair must be multiplied with.
  typedef struct packed {
    logic  valid;
    logic  sel;
    bf16_t a1;   // odd K element
    bf16_t a0;   // even K element
  } a_lane_t;

  // The two partial sums travelling south (double-multiplier PE).
  typedef struct packed {
    fp32_t s1;
    fp32_t s0;
  } psum_t;

  // One weight-link item travelling south: a weight pair addressed to one
  // PE row and one of its two weight buffers.
  typedef struct packed {
    logic              valid;
    logic [ROW_AW-1:0] row;
    logic              sel;
    bf16_t             w1;
    bf16_t             w0;
  } w_link_t;

  typedef enum logic [1:0] {
    OP_TL = 2'd0,   // rasa_tl  treg, [addr]     : memory -> tile register
    OP_TS = 2'd1,   // rasa_ts  [addr], treg     : tile register -> memory
    OP_MM = 2'd2    // rasa_mm  tC, tA, tB       : C += A x B
  } rasa_op_e;

  typedef struct packed {
    rasa_op_e          op;
    logic [REG_AW-1:0] rd;     // tl: destination, ts: source, mm: C
    logic [REG_AW-1:0] rs1;    // mm: A
    logic [REG_AW-1:0] rs2;    // mm: B
    logic [ADDR_W-1:0] addr;   // tl/ts: address of row 0
    logic [31:0]       stride; // tl/ts: bytes between rows
  } rasa_instr_t;

endpackage
