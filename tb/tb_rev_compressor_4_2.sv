// tb_rev_compressor_4_2: exhaustive self-checking test of the 4:2 compressor.
//
// For all 32 patterns of (i1..i4, cin):
//  - i1+i2+i3+i4+cin == sum + 2*(carry + cout)   (compression is exact)
//  - cout does not depend on cin                 (no carry ripple)
//  - cout is the majority of i2, i3, i4 and the garbage outputs are
//    {cin xor i1, cin, i2 xor i3, i2}            (the two-gate structure)
module tb_rev_compressor_4_2;

  logic       i1, i2, i3, i4, cin;
  logic       sum, carry, cout;
  logic [3:0] garbage;
  int         checks   = 0;
  int         failures = 0;
  logic       cout_cin0 [16];

  rev_compressor_4_2 dut (.*);

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL %s (i=%0b%0b%0b%0b cin=%0b -> sum=%0b carry=%0b cout=%0b g=%b)",
               what, i1, i2, i3, i4, cin, sum, carry, cout, garbage);
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
    int ones;
    for (int v = 0; v < 32; v++) begin
      {cin, i1, i2, i3, i4} = 5'(v);
      #1;
      ones = int'(i1) + int'(i2) + int'(i3) + int'(i4) + int'(cin);
      check(int'(sum) + 2 * (int'(carry) + int'(cout)) == ones, "weighted sum");
      check(cout == ((int'(i2) + int'(i3) + int'(i4)) >= 2), "cout = maj(i2,i3,i4)");
      check(garbage == {cin ^ i1, cin, i2 ^ i3, i2}, "garbage outputs");
      if (cin == 0) cout_cin0[v] = cout;
      else check(cout == cout_cin0[v - 16], "cout independent of cin");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
