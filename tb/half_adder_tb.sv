// half_adder_tb: exhaustive check of the half adder against integer
// addition: {c, s} must equal a + b for all four input pairs.
module half_adder_tb;
  logic clk;
  initial clk = 1'b0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  logic a, b, s, c;

  half_adder dut (.a(a), .b(b), .s(s), .c(c));

  initial begin : watchdog
    repeat (1000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int k = 0; k < 4; k++) begin
      {a, b} = 2'(k);
      @(posedge clk);
      checks++;
      if (2'({c, s}) != 2'(int'(a) + int'(b))) begin
        failures++;
        $display("FAIL a=%0b b=%0b got c=%0b s=%0b", a, b, c, s);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
