// pp_array: parallel partial-product generation with Fredkin gates.
//
// One Fredkin gate per bit pair forms pp[j][i] = x[i] & y[j]: the gate's
// control input A is x[i], B is y[j] and C is tied to 0, so output R = AB is
// the partial product. The other two outputs (A'B and A) are garbage. All N*N
// gates work in parallel, one gate delay.
//
// Interface: x, y are the N-bit operands; pp is the N x N matrix with row j
// holding x * y[j] (bit i has weight i + j). garbage[2*(j*N+i) +: 2] holds
// {A, A'B} of the gate for pp[j][i]. Combinational.
module pp_array
  import rev_mult_pkg::*;
#(
  parameter int unsigned W = N
) (
  input  logic [W-1:0]              x,
  input  logic [W-1:0]              y,
  output logic [W-1:0][W-1:0]       pp,
  output logic [G_FREDKIN*W*W-1:0]  garbage
);

  for (genvar j = 0; j < W; j++) begin : g_row
    for (genvar i = 0; i < W; i++) begin : g_col
      fredkin_gate u_fg (
        .a (x[i]),
        .b (y[j]),
        .c (1'b0),
        .p (garbage[G_FREDKIN*(j*W+i) + 1]),
        .q (garbage[G_FREDKIN*(j*W+i)]),
        .r (pp[j][i])
      );
    end
  end

endmodule
