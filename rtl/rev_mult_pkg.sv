// rev_mult_pkg: sizes shared by the reversible 8x8 Wallace tree multiplier.
//
// The multiplier is built only from reversible gates: 3x3 Fredkin gates form the
// partial products and 4x4 TSG gates form every adder and compressor. Each
// reversible gate has as many outputs as inputs; the outputs that no later gate
// uses are "garbage" and are carried to the top-level garbage port so that the
// netlist keeps every gate output. The constants below give the operand width
// of the multiplier (8x8, as in the published block diagram) and the garbage width of
// each stage, counted from the gate-level structure (2 per Fredkin gate, 2 per
// TSG adder, 4 per 4:2 compressor, plus the carry out of the final adder).
// These garbage totals are this design's own count; the published design gives
// garbage counts only for the full adder (2) and the 4:2 compressor (4).
package rev_mult_pkg;

  // Operand width: the multiplier is 8x8 -> 16-bit product.
  localparam int unsigned N  = 8;
  localparam int unsigned PW = 2 * N;

  // Width of the final ripple-carry adder (block 32): product bits P3..P15.
  localparam int unsigned ADD_W = 13;

  // Garbage outputs per building block.
  localparam int unsigned G_FREDKIN = 2;   // A'B and A
  localparam int unsigned G_ADDER   = 2;   // TSG outputs P and Q
  localparam int unsigned G_COMP    = 4;   // g1..g4 of the 4:2 compressor

  // Garbage per four-row group of stage 1: 1 HA + 2 FA + 6 compressors.
  localparam int unsigned G_GROUP4  = 3 * G_ADDER + 6 * G_COMP;          // 30
  // Garbage per stage.
  localparam int unsigned G_PP      = G_FREDKIN * N * N;                 // 128
  localparam int unsigned G_ST1     = 2 * G_GROUP4;                      // 60
  localparam int unsigned G_ST2     = 8 * G_ADDER + 5 * G_COMP;          // 36
  localparam int unsigned G_ST3     = ADD_W * G_ADDER + 1;               // 27
  localparam int unsigned G_TOTAL   = G_PP + G_ST1 + G_ST2 + G_ST3;      // 251

  // Partial-product matrix: pp[j][i] = x[i] & y[j] (row j, weight i + j).
  typedef logic [N-1:0][N-1:0] pp_t;

endpackage
