// palute_pkg: types and constants shared by the LUT-based processing-in-memory design.
//
// The design stores precomputed lookup tables (LUTs) inside the DRAM array and replaces the
// multiply-accumulate of a low-bit GEMM by table lookups. A weight pair (w1, w2) of two signed
// 4-bit weights indexes a table that holds w1*x1 + w2*x2 for a fixed activation pair (x1, x2).
//
// Half-table encoding (this design's own concrete choice of the sign-symmetry trick):
//   a pair with w1 < 0 is folded onto (-w1, -w2) and the looked-up value is negated.
//   Stored entries therefore have w1c in 0..8 and w2c in -8..8, kept at
//   row offset  w1c * HT_W2_SPAN + (w2c + 8),  HT_W2_SPAN = 17,  153 rows in all.
// Unary tables (GELU, ReLU) keep the full 16 entries, row offset x + 8.
package palute_pkg;

  // Operand precision (W4A4).
  localparam int unsigned WBITS = 4;
  localparam int unsigned ABITS = 4;

  // Half-table geometry for segment length b = 2.
  localparam int unsigned HT_W1_SPAN = 9;   // w1c = 0..8
  localparam int unsigned HT_W2_SPAN = 17;  // w2c = -8..8
  localparam int unsigned HT_ROWS    = HT_W1_SPAN * HT_W2_SPAN;  // 153
  localparam int unsigned UN_ROWS    = 16;  // unary table, x = -8..7

  // Query mode of a MAT.
  typedef enum logic {
    QM_GEMM  = 1'b0,  // half-table GEMM lookup, index = {w1, w2}
    QM_UNARY = 1'b1   // full unary table, index = x
  } qmode_e;

  // Unary function selector.
  typedef enum logic {
    UF_RELU = 1'b0,
    UF_GELU = 1'b1
  } ufunc_e;

  // Commands of the scheduling flow, as seen by a bank and by the host interface.
  typedef enum logic [2:0] {
    OP_WRITE_ROW = 3'd0,  // store a row (weights / KV cache / indices) into one MAT
    OP_READ_ROW  = 3'd1,  // read a row back (KV cache read)
    OP_GEN_GEMM  = 3'd2,  // generate a GEMM half-table and write it into one MAT
    OP_GEN_UNARY = 3'd3,  // generate a unary-function table and write it into one MAT
    OP_QUERY     = 3'd4,  // in-DRAM lookup in every selected MAT, results into accumulator
    OP_READ_ACC  = 3'd5,  // read one accumulator lane
    OP_CLEAR_ACC = 3'd6   // clear all accumulator lanes
  } op_e;

  // Command word. Field widths cover the default chip; modules use the low bits they need.
  typedef struct packed {
    op_e         op;
    logic        bcast;       // send to every bank of the chip
    logic [7:0]  chan;        // channel number
    logic [7:0]  bank;        // bank number inside the channel
    logic [15:0] mat;         // MAT number inside the bank
    logic        all_mats;    // OP_QUERY / OP_GEN_*: every MAT of the bank
    logic [15:0] row;         // row for WRITE/READ_ROW, index row for QUERY, LUT base for GEN
    logic [15:0] lut_base;    // LUT region base row for QUERY
    qmode_e      mode;        // QUERY mode
    logic        accumulate;  // QUERY: add into accumulator (1) or overwrite (0)
    logic [15:0] lane;        // READ_ACC lane
    logic signed [ABITS-1:0] x1;  // GEN_GEMM activation pair
    logic signed [ABITS-1:0] x2;
    ufunc_e      func;        // GEN_UNARY function
    logic [7:0]  scale;       // GEN_UNARY input scale, unsigned Q4.4
  } cmd_t;

  // Half-table row offset of an already folded pair.
  function automatic int unsigned ht_offset(int unsigned w1c, int w2c);
    return w1c * HT_W2_SPAN + unsigned'(w2c + 8);
  endfunction

endpackage
