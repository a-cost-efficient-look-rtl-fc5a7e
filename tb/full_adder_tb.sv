// full_adder_tb: exhaustive check of the full adder against integer
// addition: {c, s} must equal a + b + cin for all eight input triples.
module full_adder_tb;
  logic clk;
  initial clk = 1'b0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  logic a, b, cin, s, c;

  full_adder dut (.a(a), .b(b), .cin(cin), .s(s), .c(c));

  initial begin : watchdog
    repeat (1000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int k = 0; k < 8; k++) begin
      {a, b, cin} = 3'(k);
      @(posedge clk);
      checks++;
      if (2'({c, s}) != 2'(int'(a) + int'(b) + int'(cin))) begin
        failures++;
        $display("FAIL a=%0b b=%0b cin=%0b got c=%0b s=%0b", a, b, cin, c, s);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
