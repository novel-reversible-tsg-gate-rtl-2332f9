// tsg_parallel_adder: ripple-carry adder built from TSG full adders (block 32).
//
// Position i is one TSG gate wired as a full adder (A = a[i], B = b[i], C = 0,
// D = carry from position i-1); its S output is the carry into position i+1.
// sum = a + b + cin modulo 2^W; the last carry leaves on cout. In the
// multiplier W = 13 (product bits P3..P15) and cin is 0. Worst-case delay is W gate delays along the carry
// chain. garbage[2*i +: 2] holds {Q, P} of position i. Combinational.
module tsg_parallel_adder
  import rev_mult_pkg::*;
#(
  parameter int unsigned W = ADD_W
) (
  input  logic [W-1:0]           a,
  input  logic [W-1:0]           b,
  input  logic                   cin,
  output logic [W-1:0]           sum,
  output logic                   cout,
  output logic [G_ADDER*W-1:0]   garbage
);

  logic [W:0] cy;

  assign cy[0] = cin;
  assign cout  = cy[W];

  for (genvar i = 0; i < W; i++) begin : g_bit
    tsg_full_adder u_fa (
      .a (a[i]), .b (b[i]), .cin (cy[i]),
      .sum (sum[i]), .cout (cy[i+1]),
      .garbage (garbage[G_ADDER*i +: G_ADDER])
    );
  end

endmodule
