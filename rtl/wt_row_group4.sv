// wt_row_group4: stage-1 reduction of four adjacent partial-product rows.
//
// Rows row[0..3] hold x * y[r..r+3]; bit row[k][i] has relative weight i + k
// (relative to the group's lowest weight r). The group reduces the columns of
// relative weight 1..9 with nine reversible blocks, numbered as in the
// published block diagram (blocks 1..9 for rows 0..3, 10..18 for rows 4..7):
//   block 1    half adder  : row0[1], row1[0]                    (weight 1)
//   block 2    full adder  : row0[2], row1[1], row2[0]           (weight 2)
//   block k    4:2 compr.  : row0[k], row1[k-1], row2[k-2], row3[k-3],
//                            cin = cout of block k-1 (0 for k=3)  (k = 3..7)
//   block 8    4:2 compr.  : 0, row1[7], row2[6], row3[5], cin = cout7
//   block 9    full adder  : cout8, row2[7], row3[6]             (weight 9)
// Block k yields s[k] at relative weight k and c[k] at weight k + 1; for the
// compressors c[k] is the "carry" output, and cout goes on to the next block.
// row0[0] (weight 0) and row3[7] (weight 10) are not reduced here and are
// passed on as lo and hi. Garbage: 2 per adder, 4 per compressor, 30 in all.
// Combinational.
module wt_row_group4
  import rev_mult_pkg::*;
(
  input  logic [3:0][N-1:0]     row,
  output logic [9:1]            s,
  output logic [9:1]            c,
  output logic                  lo,
  output logic                  hi,
  output logic [G_GROUP4-1:0]   garbage
);

  logic [8:2] co;   // cout of compressor block k; co[2] is the 0 carry-in of block 3

  assign lo    = row[0][0];
  assign hi    = row[3][7];
  assign co[2] = 1'b0;

  // Block 1: half adder.
  tsg_half_adder u_b1 (
    .a (row[0][1]), .b (row[1][0]),
    .sum (s[1]), .carry (c[1]), .garbage (garbage[1:0])
  );

  // Block 2: full adder.
  tsg_full_adder u_b2 (
    .a (row[0][2]), .b (row[1][1]), .cin (row[2][0]),
    .sum (s[2]), .cout (c[2]), .garbage (garbage[3:2])
  );

  // Blocks 3..8: chain of 4:2 compressors.
  for (genvar k = 3; k <= 8; k++) begin : g_comp
    logic i1;
    if (k < 8) begin : g_i1
      assign i1 = row[0][k];
    end else begin : g_i1_zero
      assign i1 = 1'b0;
    end
    rev_compressor_4_2 u_c (
      .i1 (i1), .i2 (row[1][k-1]), .i3 (row[2][k-2]), .i4 (row[3][k-3]),
      .cin (co[k-1]),
      .sum (s[k]), .carry (c[k]), .cout (co[k]),
      .garbage (garbage[4 + G_COMP*(k-3) +: G_COMP])
    );
  end

  // Block 9: full adder absorbing the last compressor's cout.
  tsg_full_adder u_b9 (
    .a (co[8]), .b (row[2][7]), .cin (row[3][6]),
    .sum (s[9]), .cout (c[9]), .garbage (garbage[29:28])
  );

endmodule
