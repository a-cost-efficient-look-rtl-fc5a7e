// bitwise_addition_tb: exhaustive check of the first tree level over all
// 4-bit a, b and both carries. Each bit position is checked on its own
// against integer addition of that position, and the weighted outputs must
// add back up to a + b + cin.
module bitwise_addition_tb;
  import bcd_pkg::*;

  logic clk;
  initial clk = 1'b0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  bcd_digit_t a, b;
  logic       cin, s0;
  logic [2:0] s_alpha;
  logic [3:0] c;

  bitwise_addition dut (.a(a), .b(b), .cin(cin), .s0(s0), .s_alpha(s_alpha), .c(c));

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s: a=%0d b=%0d cin=%0b s0=%0b s_alpha=%03b c=%04b",
               what, a, b, cin, s0, s_alpha, c);
    end
  endtask

  initial begin : watchdog
    repeat (10000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int total;
    for (int k = 0; k < 512; k++) begin
      {a, b, cin} = 9'(k);
      @(posedge clk);
      total = int'(a[0]) + int'(b[0]) + int'(cin);
      check(s0 == total[0] && c[0] == total[1], "bit 0");
      for (int i = 1; i <= 3; i++) begin
        total = int'(a[i]) + int'(b[i]);
        check(s_alpha[i-1] == total[0] && c[i] == total[1], "bit pair");
      end
      total = int'(s0) + 2 * int'(c[0]);
      for (int i = 1; i <= 3; i++)
        total += (int'(s_alpha[i-1]) << i) + (int'(c[i]) << (i + 1));
      check(total == int'(a) + int'(b) + int'(cin), "weighted sum");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
