// tb_wt_stage1: self-checking test of the first Wallace-tree stage.
//
// Random partial-product matrices (any bit pattern, not only products) are
// applied. The stage must conserve the weighted value: the sum over inputs of
// pp[j][i] * 2^(i+j) must equal the sum over outputs of each bit times its
// weight (s[k] at weight k or k-5, c[k] one higher, the four bypass bits at
// their own weights). The check is done separately for the two four-row
// groups, and the bypass bits must equal the partial products they carry.
module tb_wt_stage1;
  import rev_mult_pkg::*;

  pp_t               pp;
  logic [18:1]       s, c;
  logic              x0y0, x7y3, x0y4, x7y7;
  logic [G_ST1-1:0]  garbage;
  int                checks   = 0;
  int                failures = 0;

  wt_stage1 dut (.*);

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 10) $display("FAIL %s pp=%h", what, pp);
    end
  endtask

  initial begin
    #1_000_000;
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    longint in0, in1, out0, out1;
    for (int n = 0; n < 20000; n++) begin
      if (n == 0)      pp = '0;
      else if (n == 1) pp = '1;
      else             pp = {$urandom, $urandom};
      #1;
      in0 = 0; in1 = 0;
      for (int j = 0; j < 8; j++)
        for (int i = 0; i < 8; i++)
          if (pp[j][i]) begin
            if (j < 4) in0 += longint'(1) << (i + j);
            else       in1 += longint'(1) << (i + j);
          end
      out0 = longint'(x0y0) + (longint'(x7y3) << 10);
      out1 = (longint'(x0y4) << 4) + (longint'(x7y7) << 14);
      for (int k = 1; k <= 9; k++)
        out0 += (longint'(s[k]) << k) + (longint'(c[k]) << (k + 1));
      for (int k = 10; k <= 18; k++)
        out1 += (longint'(s[k]) << (k - 5)) + (longint'(c[k]) << (k - 4));
      check(in0 == out0, "rows 0-3 weighted sum");
      check(in1 == out1, "rows 4-7 weighted sum");
      check({x0y0, x7y3, x0y4, x7y7} == {pp[0][0], pp[3][7], pp[4][0], pp[7][7]}, "bypass bits");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
