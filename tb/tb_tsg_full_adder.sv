// tb_tsg_full_adder: exhaustive self-checking test of the one-gate full adder.
//
// For all 8 input patterns: a + b + cin must equal sum + 2*cout, and the two
// garbage outputs must be {a xor b, a}.
module tb_tsg_full_adder;

  logic       a, b, cin;
  logic       sum, cout;
  logic [1:0] garbage;
  int         checks   = 0;
  int         failures = 0;

  tsg_full_adder dut (.*);

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL %s (a=%0b b=%0b cin=%0b -> sum=%0b cout=%0b g=%b)", what, a, b, cin, sum, cout, garbage);
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
    for (int v = 0; v < 8; v++) begin
      {a, b, cin} = 3'(v);
      #1;
      check(2 * int'(cout) + int'(sum) == int'(a) + int'(b) + int'(cin), "sum/carry");
      check(garbage == {a ^ b, a}, "garbage = {A xor B, A}");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
