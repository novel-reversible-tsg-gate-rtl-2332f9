// tsg_full_adder: a reversible full adder made of a single TSG gate.
//
// The TSG gate is driven with A = a, B = b, C = 0 and D = cin. Its outputs are
//   P = a (garbage), Q = a xor b (garbage),
//   R = a xor b xor cin = sum,  S = (a xor b)cin xor ab = cout.
// One gate, two garbage outputs, one gate delay, as published for its
// full adder. The garbage port carries {Q, P}. Combinational.
module tsg_full_adder (
  input  logic       a,
  input  logic       b,
  input  logic       cin,
  output logic       sum,
  output logic       cout,
  output logic [1:0] garbage
);

  tsg_gate u_tsg (
    .a (a),
    .b (b),
    .c (1'b0),
    .d (cin),
    .p (garbage[0]),
    .q (garbage[1]),
    .r (sum),
    .s (cout)
  );

endmodule
