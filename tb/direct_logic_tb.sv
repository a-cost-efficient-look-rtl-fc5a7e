// direct_logic_tb: all four input combinations of the C_3 = 1 path. With
// C_3 = 1 the output, read with S_0 as a BCD digit, must be 6 + 2*C_0 + S_0
// and the carry 1 (the sum of two digits 8 or 9 minus 10); with C_3 = 0 it
// must be 0.
module direct_logic_tb;
  import bcd_pkg::*;

  logic clk;
  initial clk = 1'b0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  logic   c0, c3;
  upper_t beta;

  direct_logic dut (.c0(c0), .c3(c3), .beta(beta));

  initial begin : watchdog
    repeat (1000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int want_digit_upper;
    for (int k = 0; k < 4; k++) begin
      {c3, c0} = 2'(k);
      @(posedge clk);
      checks++;
      // Upper three bits of the digit 6 + 2*C_0 + S_0, i.e. (6 + 2*C_0) / 2.
      want_digit_upper = (6 + 2 * int'(c0)) / 2;
      if (c3 ? (beta.cout != 1'b1 || int'(beta.s) != want_digit_upper)
             : (4'(beta) != 4'b0)) begin
        failures++;
        $display("FAIL c3=%0b c0=%0b: got %04b", c3, c0, 4'(beta));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
