// fredkin_gate: the 3x3 reversible Fredkin (controlled-swap) gate.
//
// A is the control and is passed through. When A = 1 the other two lines are
// swapped, when A = 0 they pass straight:
//   P = A,  Q = A'B | AC,  R = AB | A'C
// With C tied to 0 this gives Q = A'B and R = AB, i.e. a reversible AND whose
// two other outputs (A and A'B) are garbage; the partial-product array uses it
// that way. The C = 0 outputs (AB, A'B, A) follow the published design; the general
// C = 1 behaviour is the standard Fredkin definition. Combinational.
module fredkin_gate (
  input  logic a,
  input  logic b,
  input  logic c,
  output logic p,
  output logic q,
  output logic r
);

  always_comb begin
    p = a;
    q = a ? c : b;
    r = a ? b : c;
  end

endmodule
