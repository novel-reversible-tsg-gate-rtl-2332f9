// tsg_gate: the 4x4 reversible TSG gate.
//
// Outputs, as defined for the gate:
//   P = A
//   Q = A'C' xor B'
//   R = Q xor D
//   S = (Q & D) xor (A&B xor C)
// The mapping from (A,B,C,D) to (P,Q,R,S) is one-to-one, so the gate is
// reversible. With C = 0 it reduces to a full adder (Q = A xor B, R = sum,
// S = carry), which is how every adder in this design uses it. Purely
// combinational, no clock; the gate counts as one unit of delay.
module tsg_gate (
  input  logic a,
  input  logic b,
  input  logic c,
  input  logic d,
  output logic p,
  output logic q,
  output logic r,
  output logic s
);

  always_comb begin
    p = a;
    q = (~a & ~c) ^ ~b;
    r = q ^ d;
    s = (q & d) ^ ((a & b) ^ c);
  end

endmodule
