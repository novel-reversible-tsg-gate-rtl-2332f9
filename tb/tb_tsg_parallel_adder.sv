// tb_tsg_parallel_adder: self-checking test of the TSG ripple-carry adder.
//
// At the default width (13, block 32 of the multiplier) random operands plus
// the corner cases (all zeros, all ones with carry-in, full-length carry
// ripple) are applied; {cout, sum} must equal a + b + cin and position i's
// garbage pair must be {a[i] xor b[i], a[i]}.
module tb_tsg_parallel_adder;
  import rev_mult_pkg::*;

  localparam int unsigned W = ADD_W;

  logic [W-1:0]      a, b, sum;
  logic              cin, cout;
  logic [2*W-1:0]    garbage;
  int                checks   = 0;
  int                failures = 0;

  tsg_parallel_adder dut (.*);

  initial begin
    #1_000_000;
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [W:0] expect_v;
    bit         ok_g;
    for (int n = 0; n < 20000; n++) begin
      case (n)
        0:       begin a = '0; b = '0; cin = 1'b0; end
        1:       begin a = '1; b = '1; cin = 1'b1; end
        2:       begin a = '1; b = '0; cin = 1'b1; end
        default: begin a = W'($urandom); b = W'($urandom); cin = 1'($urandom); end
      endcase
      #1;
      expect_v = (W+1)'(a) + (W+1)'(b) + (W+1)'(cin);
      checks++;
      if ({cout, sum} != expect_v) begin
        failures++;
        if (failures < 10) $display("FAIL a=%h b=%h cin=%0b -> %h expected %h", a, b, cin, {cout, sum}, expect_v);
      end
      ok_g = 1'b1;
      for (int i = 0; i < W; i++)
        if (garbage[2*i +: 2] != {a[i] ^ b[i], a[i]}) ok_g = 1'b0;
      checks++;
      if (!ok_g) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
