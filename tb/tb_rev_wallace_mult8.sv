// tb_rev_wallace_mult8: end-to-end test of the reversible 8x8 multiplier.
//
// The top is used exactly as built (no parameter overrides). All 65,536
// operand pairs are applied and the product is compared with x * y computed
// here. Also checked on every vector: the Fredkin garbage of each partial
// product is {x[i], ~x[i] & y[j]}, and the carry out of the final adder
// (garbage MSB) is 0, since an 8x8 product always fits in 16 bits.
//
// The design's mechanisms are counted and each must occur at least once:
//   - a stage-1 compressor passing cout = 1 into the next compressor,
//   - a stage-2 compressor passing cout = 1 into the next compressor,
//   - the last compressor of a chain handing cout = 1 to its full adder,
//   - a carry rippling through block 32 into its top position (P15),
//   - a product with P15 = 1.
module tb_rev_wallace_mult8;
  import rev_mult_pkg::*;

  logic [N-1:0]       x, y;
  logic [PW-1:0]      p;
  logic [G_TOTAL-1:0] garbage;
  int                 checks   = 0;
  int                 failures = 0;

  int n_chain1 = 0, n_chain2 = 0, n_chain_end = 0, n_ripple_top = 0, n_p15 = 0;

  rev_wallace_mult8 dut (.*);

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 10) $display("FAIL %s x=%0d y=%0d p=%0d", what, x, y, p);
    end
  endtask

  task automatic need(input int count, input string what);
    $display("  %-40s %0d", what, count);
    check(count > 0, what);
  endtask

  initial begin
    #10_000_000;
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    bit ok_g;
    for (int v = 0; v < (1 << (2 * N)); v++) begin
      {x, y} = (2*N)'(v);
      #1;
      check(p == PW'(int'(x) * int'(y)), "product");
      ok_g = 1'b1;
      for (int j = 0; j < N; j++)
        for (int i = 0; i < N; i++)
          if (garbage[2*(j*N+i) +: 2] != {x[i], ~x[i] & y[j]}) ok_g = 1'b0;
      check(ok_g, "partial-product garbage");
      check(garbage[G_TOTAL-1] == 1'b0, "final adder carry out is 0");

      if (|dut.u_st1.u_grp0.co[7:3] || |dut.u_st1.u_grp1.co[7:3]) n_chain1++;
      if (|dut.u_st2.co[26:23]) n_chain2++;
      if (dut.u_st1.u_grp0.co[8] || dut.u_st1.u_grp1.co[8] || dut.u_st2.co[27]) n_chain_end++;
      if (dut.u_st3.cy[ADD_W-1]) n_ripple_top++;
      if (p[PW-1]) n_p15++;
    end
    $display("Mechanism counts over %0d products:", 1 << (2 * N));
    need(n_chain1,     "stage-1 compressor cout -> cin");
    need(n_chain2,     "stage-2 compressor cout -> cin");
    need(n_chain_end,  "last compressor cout -> full adder");
    need(n_ripple_top, "block-32 carry into top position");
    need(n_p15,        "product with P15 = 1");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
