// tb_tsg_half_adder: exhaustive self-checking test of the one-gate half adder.
//
// For all 4 input patterns: a + b must equal sum + 2*carry; garbage must be
// {a, 0} (the TSG's Q and P outputs with A tied to 0).
module tb_tsg_half_adder;

  logic       a, b;
  logic       sum, carry;
  logic [1:0] garbage;
  int         checks   = 0;
  int         failures = 0;

  tsg_half_adder dut (.*);

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL %s (a=%0b b=%0b -> sum=%0b carry=%0b g=%b)", what, a, b, sum, carry, garbage);
    end
  endtask

  initial begin
    #1000;
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int v = 0; v < 4; v++) begin
      {a, b} = 2'(v);
      #1;
      check(2 * int'(carry) + int'(sum) == int'(a) + int'(b), "sum/carry");
      check(garbage == {a, 1'b0}, "garbage = {A, 0}");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
