// rev_compressor_4_2: reversible 4:2 compressor made of two TSG gates.
//
// A 4:2 compressor takes four bits i1..i4 of one weight j plus a carry-in cin
// from weight j-1 and returns sum (weight j) and carry and cout (both weight
// j+1), so that i1+i2+i3+i4+cin = sum + 2*(carry + cout). cout does not depend
// on cin, so a row of compressors chained cout -> cin has no long carry path.
//
// Structure (two TSG gates used as full adders, C inputs tied to 0):
//   TSG 1: A=i2, B=i3, C=0, D=i4  -> R1 = i2^i3^i4 (internal), S1 = cout
//   TSG 2: A=cin, B=i1, C=0, D=R1 -> R2 = sum, S2 = carry
// The P and Q outputs of both gates are the four garbage outputs g1..g4
// (garbage[0] = P1, [1] = Q1, [2] = P2, [3] = Q2). The two constant-0 inputs
// are internal. Two gates, four garbage outputs, two gate delays, as in the
// published comparison. Combinational.
module rev_compressor_4_2 (
  input  logic       i1,
  input  logic       i2,
  input  logic       i3,
  input  logic       i4,
  input  logic       cin,
  output logic       sum,
  output logic       carry,
  output logic       cout,
  output logic [3:0] garbage
);

  logic r1;

  tsg_gate u_tsg1 (
    .a (i2),
    .b (i3),
    .c (1'b0),
    .d (i4),
    .p (garbage[0]),
    .q (garbage[1]),
    .r (r1),
    .s (cout)
  );

  tsg_gate u_tsg2 (
    .a (cin),
    .b (i1),
    .c (1'b0),
    .d (r1),
    .p (garbage[2]),
    .q (garbage[3]),
    .r (sum),
    .s (carry)
  );

endmodule
