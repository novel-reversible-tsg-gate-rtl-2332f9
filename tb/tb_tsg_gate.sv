// tb_tsg_gate: exhaustive self-checking test of the TSG gate.
//
// All 16 input patterns are applied. Each output is compared with the gate's
// defining equations written as a truth-table lookup, the 16 output patterns
// are checked to be all different (the gate is reversible), and for C = 0 the
// gate is checked to add A + B + D (R = sum, S = carry).
module tb_tsg_gate;

  logic a, b, c, d;
  logic p, q, r, s;
  int   checks   = 0;
  int   failures = 0;
  bit   seen [16];

  tsg_gate dut (.*);

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL %s (a=%0b b=%0b c=%0b d=%0b -> p=%0b q=%0b r=%0b s=%0b)",
               what, a, b, c, d, p, q, r, s);
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
    logic eq, er, es;
    for (int i = 0; i < 16; i++) seen[i] = 1'b0;
    for (int v = 0; v < 16; v++) begin
      {a, b, c, d} = 4'(v);
      #1;
      // Q = A'C' xor B': 1 only when exactly one of (A nor C) and (not B) holds.
      eq = ((a == 0 && c == 0) != (b == 0));
      er = eq != d;
      es = (eq && d) != ((a && b) != c);
      check(p == a,  "P = A");
      check(q == eq, "Q");
      check(r == er, "R");
      check(s == es, "S");
      check(!seen[{p, q, r, s}], "output pattern unique");
      seen[{p, q, r, s}] = 1'b1;
      if (c == 0) check(int'(a) + int'(b) + int'(d) == int'(r) + 2 * int'(s), "C=0 full adder");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
