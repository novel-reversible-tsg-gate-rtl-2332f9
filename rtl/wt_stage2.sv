// wt_stage2: second Wallace-tree stage of the 8x8 reversible multiplier.
//
// Reduces the stage-1 sums and carries (and the three partial products that
// bypassed stage 1) to two bits per weight, with blocks 19..31 of the
// published block diagram (W = weight):
//   19 HA  S2, C1                 (W2)   -> s19 is product bit P2
//   20 HA  S3, C2                 (W3)
//   21 FA  S4, C3, x0y4           (W4)
//   22 FA  S5, C4, S10            (W5)
//   23 4:2 S6, C5, S11, C10       (W6)   cin = 0
//   24 4:2 S7, C6, S12, C11       (W7)   cin = cout23
//   25 4:2 S8, C7, S13, C12       (W8)   cin = cout24
//   26 4:2 S9, C8, S14, C13       (W9)   cin = cout25
//   27 4:2 x7y3, C9, S15, C14     (W10)  cin = cout26
//   28 FA  cout27, S16, C15       (W11)
//   29 HA  S17, C16               (W12)
//   30 HA  S18, C17               (W13)
//   31 HA  x7y7, C18              (W14)
// Block k (19..31) gives s[k] at weight k - 17 and c[k] at weight k - 16.
// Garbage: 36 bits, in block order (2 per adder, 4 per compressor).
// Combinational.
module wt_stage2
  import rev_mult_pkg::*;
(
  input  logic [18:2]        s1,     // S1 is product bit P1 and is not used here
  input  logic [18:1]        c1,
  input  logic               x7y3,
  input  logic               x0y4,
  input  logic               x7y7,
  output logic [31:19]       s,
  output logic [31:19]       c,
  output logic [G_ST2-1:0]   garbage
);

  logic [27:22] co;   // compressor couts; co[22] is the 0 carry-in of block 23

  assign co[22] = 1'b0;

  tsg_half_adder u_b19 (.a (s1[2]), .b (c1[1]), .sum (s[19]), .carry (c[19]), .garbage (garbage[1:0]));
  tsg_half_adder u_b20 (.a (s1[3]), .b (c1[2]), .sum (s[20]), .carry (c[20]), .garbage (garbage[3:2]));
  tsg_full_adder u_b21 (.a (s1[4]), .b (c1[3]), .cin (x0y4),   .sum (s[21]), .cout (c[21]), .garbage (garbage[5:4]));
  tsg_full_adder u_b22 (.a (s1[5]), .b (c1[4]), .cin (s1[10]), .sum (s[22]), .cout (c[22]), .garbage (garbage[7:6]));

  // Blocks 23..27: chain of 4:2 compressors, weights 6..10.
  for (genvar k = 23; k <= 27; k++) begin : g_comp
    logic i1;
    if (k < 27) begin : g_i1
      assign i1 = s1[k-17];          // S6..S9
    end else begin : g_i1_pp
      assign i1 = x7y3;
    end
    rev_compressor_4_2 u_c (
      .i1 (i1), .i2 (c1[k-18]), .i3 (s1[k-12]), .i4 (c1[k-13]),
      .cin (co[k-1]),
      .sum (s[k]), .carry (c[k]), .cout (co[k]),
      .garbage (garbage[8 + G_COMP*(k-23) +: G_COMP])
    );
  end

  tsg_full_adder u_b28 (.a (co[27]), .b (s1[16]), .cin (c1[15]), .sum (s[28]), .cout (c[28]), .garbage (garbage[29:28]));
  tsg_half_adder u_b29 (.a (s1[17]), .b (c1[16]), .sum (s[29]), .carry (c[29]), .garbage (garbage[31:30]));
  tsg_half_adder u_b30 (.a (s1[18]), .b (c1[17]), .sum (s[30]), .carry (c[30]), .garbage (garbage[33:32]));
  tsg_half_adder u_b31 (.a (x7y7),   .b (c1[18]), .sum (s[31]), .carry (c[31]), .garbage (garbage[35:34]));

endmodule
