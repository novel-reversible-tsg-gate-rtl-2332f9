// tb_wt_stage2: self-checking test of the second Wallace-tree stage.
//
// Random stage-1 results are applied (any bit pattern). The weighted value of
// the inputs (s1[k] at weight k for k <= 9 and k-5 above, c1[k] one higher,
// x0y4 at 4, x7y3 at 10, x7y7 at 14) must equal that of the outputs (s[k] at
// weight k-17, c[k] at k-16). Because every output weight 3..15 then holds at
// most two bits, the result is ready for a two-operand adder.
module tb_wt_stage2;
  import rev_mult_pkg::*;

  logic [18:2]       s1;
  logic [18:1]       c1;
  logic              x7y3, x0y4, x7y7;
  logic [31:19]      s, c;
  logic [G_ST2-1:0]  garbage;
  int                checks   = 0;
  int                failures = 0;

  wt_stage2 dut (.*);

  initial begin
    #1_000_000;
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    longint vin, vout;
    for (int n = 0; n < 20000; n++) begin
      if (n == 0)      {s1, c1, x7y3, x0y4, x7y7} = '0;
      else if (n == 1) {s1, c1, x7y3, x0y4, x7y7} = '1;
      else             {s1, c1, x7y3, x0y4, x7y7} = 38'({$urandom, $urandom});
      #1;
      vin = (longint'(x0y4) << 4) + (longint'(x7y3) << 10) + (longint'(x7y7) << 14);
      for (int k = 2; k <= 18; k++) vin += longint'(s1[k]) << (k <= 9 ? k : k - 5);
      for (int k = 1; k <= 18; k++) vin += longint'(c1[k]) << (k <= 9 ? k + 1 : k - 4);
      vout = 0;
      for (int k = 19; k <= 31; k++)
        vout += (longint'(s[k]) << (k - 17)) + (longint'(c[k]) << (k - 16));
      checks++;
      if (vin != vout) begin
        failures++;
        if (failures < 10) $display("FAIL weighted sum in=%0d out=%0d", vin, vout);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
