// tb_fredkin_gate: exhaustive self-checking test of the Fredkin gate.
//
// All 8 input patterns are applied; outputs are compared with the controlled
// swap (A = 1 swaps B and C), checked to be a permutation of the inputs' 8
// patterns, and with C = 0 the outputs must be A, A'B, AB.
module tb_fredkin_gate;

  logic a, b, c;
  logic p, q, r;
  int   checks   = 0;
  int   failures = 0;
  bit   seen [8];

  fredkin_gate dut (.*);

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL %s (a=%0b b=%0b c=%0b -> p=%0b q=%0b r=%0b)", what, a, b, c, p, q, r);
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
    for (int i = 0; i < 8; i++) seen[i] = 1'b0;
    for (int v = 0; v < 8; v++) begin
      {a, b, c} = 3'(v);
      #1;
      check(p == a, "P = A");
      check({q, r} == (a ? {c, b} : {b, c}), "controlled swap");
      check(int'(p) + int'(q) + int'(r) == int'(a) + int'(b) + int'(c), "ones conserved");
      check(!seen[{p, q, r}], "output pattern unique");
      seen[{p, q, r}] = 1'b1;
      if (c == 0) check(r == (a & b) && q == (!a & b), "C=0 gives AB and A'B");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
