// tsg_half_adder: a reversible half adder made of a single TSG gate.
//
// The TSG gate is driven with A = 0, B = a, C = 0 and D = b, the way the
// two-input adder blocks of the published block diagram tie two of their inputs to
// zero. Then Q = a, R = a xor b = sum and S = a & b = carry; P (= 0) and Q are
// garbage and leave on the garbage port as {Q, P}. Which two inputs the diagram
// ties to zero is read from its drawing; tying A and C or C and D instead gives
// the same sum and carry. Combinational.
module tsg_half_adder (
  input  logic       a,
  input  logic       b,
  output logic       sum,
  output logic       carry,
  output logic [1:0] garbage
);

  tsg_gate u_tsg (
    .a (1'b0),
    .b (a),
    .c (1'b0),
    .d (b),
    .p (garbage[0]),
    .q (garbage[1]),
    .r (sum),
    .s (carry)
  );

endmodule
