// wt_stage1: first Wallace-tree stage of the 8x8 reversible multiplier.
//
// The eight partial-product rows are taken four at a time. Rows 0..3 go to one
// wt_row_group4 (blocks 1..9 of the published block diagram) and rows 4..7 to a
// second one (blocks 10..18), whose weights are 4 higher. Outputs use the
// diagram's block numbers: s[k], c[k] for k = 1..18, with
//   weight(s[k]) = k      and weight(c[k]) = k + 1      for k = 1..9
//   weight(s[k]) = k - 5  and weight(c[k]) = k - 4      for k = 10..18
// Four bits bypass the stage: x0y0 (weight 0, becomes P0), x7y3 (weight 10),
// x0y4 (weight 4) and x7y7 (weight 14). Garbage: 60 bits, group 0 in the low
// half. Combinational.
module wt_stage1
  import rev_mult_pkg::*;
(
  input  pp_t                 pp,
  output logic [18:1]         s,
  output logic [18:1]         c,
  output logic                x0y0,
  output logic                x7y3,
  output logic                x0y4,
  output logic                x7y7,
  output logic [G_ST1-1:0]    garbage
);

  wt_row_group4 u_grp0 (
    .row (pp[3:0]),
    .s (s[9:1]), .c (c[9:1]),
    .lo (x0y0), .hi (x7y3),
    .garbage (garbage[G_GROUP4-1:0])
  );

  wt_row_group4 u_grp1 (
    .row (pp[7:4]),
    .s (s[18:10]), .c (c[18:10]),
    .lo (x0y4), .hi (x7y7),
    .garbage (garbage[2*G_GROUP4-1:G_GROUP4])
  );

endmodule
