// tb_pp_array: self-checking test of the Fredkin partial-product array.
//
// Every operand pair (x, y) of the default 8-bit width is applied. Each
// pp[j][i] must be x[i] & y[j]; each gate's garbage pair must be {x[i],
// ~x[i] & y[j]}.
module tb_pp_array;
  import rev_mult_pkg::*;

  localparam int unsigned W = N;

  logic [W-1:0]             x, y;
  logic [W-1:0][W-1:0]      pp;
  logic [2*W*W-1:0]         garbage;
  int                       checks   = 0;
  int                       failures = 0;

  pp_array dut (.*);

  initial begin
    #1_000_000;
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    bit ok_pp, ok_g;
    for (int v = 0; v < (1 << (2 * W)); v++) begin
      {x, y} = (2*W)'(v);
      #1;
      ok_pp = 1'b1;
      ok_g  = 1'b1;
      for (int j = 0; j < W; j++)
        for (int i = 0; i < W; i++) begin
          if (pp[j][i] !== (x[i] & y[j])) ok_pp = 1'b0;
          if (garbage[2*(j*W+i) +: 2] !== {x[i], ~x[i] & y[j]}) ok_g = 1'b0;
        end
      checks += 2;
      if (!ok_pp) begin
        failures++;
        if (failures < 10) $display("FAIL pp x=%h y=%h", x, y);
      end
      if (!ok_g) begin
        failures++;
        if (failures < 10) $display("FAIL garbage x=%h y=%h", x, y);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
