// rev_wallace_mult8: reversible 8x8 Wallace-tree multiplier (top level).
//
// p = x * y, built only from reversible gates and purely combinational:
//   1. pp_array     64 Fredkin gates form all partial products x[i]&y[j].
//   2. wt_stage1    rows 0..3 and 4..7 are each reduced by half adders, full
//                   adders and a chain of 4:2 compressors (blocks 1..18).
//   3. wt_stage2    the stage-1 sums and carries are reduced again to two bits
//                   per weight (blocks 19..31).
//   4. tsg_parallel_adder  a 13-bit TSG ripple-carry adder (block 32) adds the
//                   two rows and yields P3..P15.
// P0 is x0y0, P1 is the stage-1 sum S1 and P2 the stage-2 sum S19.
// Every gate output that nothing else uses is brought out on garbage, so the
// netlist keeps the one-to-one character of the reversible gates:
//   garbage[127:0]   partial products (Fredkin A'B and A outputs)
//   garbage[187:128] stage 1,  garbage[223:188] stage 2,
//   garbage[250:224] block 32 (TSG P/Q outputs, then its final carry out).
// Many garbage bits are copies of an input or constant 0 (a TSG's P output is
// its A input, a Fredkin gate's A output is x[i], a half adder's P is 0).
// That is how reversible gates behave, not a wiring fault, and such bits stay
// on the port so that each gate keeps all of its outputs.
// The block numbers, partial-product names and stage split follow the
// published block diagram; the garbage port, its bit order and the
// constant-zero carry into block 32 are this design's own choices.
// Timing: no clock and no registers. The longest path runs through one Fredkin
// gate, the stage-1 and stage-2 compressor chains and the 13 ripple positions of
// block 32; the output is valid once that path has settled.
module rev_wallace_mult8
  import rev_mult_pkg::*;
(
  input  logic [N-1:0]        x,
  input  logic [N-1:0]        y,
  output logic [PW-1:0]       p,
  output logic [G_TOTAL-1:0]  garbage
);

  pp_t          pp;
  logic [18:1]  s1, c1;
  logic [31:19] s2, c2;
  logic         x0y0, x7y3, x0y4, x7y7;
  logic [ADD_W-1:0] add_a, add_b, add_sum;
  logic         add_cout;

  localparam int unsigned O_ST1 = G_PP;
  localparam int unsigned O_ST2 = O_ST1 + G_ST1;
  localparam int unsigned O_ST3 = O_ST2 + G_ST2;

  pp_array u_pp (
    .x (x), .y (y), .pp (pp),
    .garbage (garbage[O_ST1-1:0])
  );

  wt_stage1 u_st1 (
    .pp (pp),
    .s (s1), .c (c1),
    .x0y0 (x0y0), .x7y3 (x7y3), .x0y4 (x0y4), .x7y7 (x7y7),
    .garbage (garbage[O_ST2-1:O_ST1])
  );

  wt_stage2 u_st2 (
    .s1 (s1[18:2]), .c1 (c1),
    .x7y3 (x7y3), .x0y4 (x0y4), .x7y7 (x7y7),
    .s (s2), .c (c2),
    .garbage (garbage[O_ST3-1:O_ST2])
  );

  // Block 32: position i (weight i+3) adds S(20+i) and C(19+i); weight 15
  // has only C31, and the carry into the first position is 0.
  assign add_a = {1'b0, s2[31:20]};
  assign add_b = c2[31:19];

  tsg_parallel_adder #(.W (ADD_W)) u_st3 (
    .a (add_a), .b (add_b), .cin (1'b0),
    .sum (add_sum), .cout (add_cout),
    .garbage (garbage[O_ST3 + G_ADDER*ADD_W - 1:O_ST3])
  );

  assign garbage[G_TOTAL-1] = add_cout;

  assign p = {add_sum, s2[19], s1[1], x0y0};

endmodule
