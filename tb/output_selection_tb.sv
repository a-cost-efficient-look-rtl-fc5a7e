// output_selection_tb: random gamma and beta words with both select values;
// the output must be beta when sel is 1 and gamma when it is 0.
module output_selection_tb;
  import bcd_pkg::*;

  logic clk;
  initial clk = 1'b0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  logic   sel;
  upper_t gamma, beta, y;

  output_selection dut (.sel(sel), .gamma(gamma), .beta(beta), .y(y));

  initial begin : watchdog
    repeat (1000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int k = 0; k < 512; k++) begin
      {sel, gamma, beta} = 9'(k);
      @(posedge clk);
      checks++;
      if (y != (sel ? beta : gamma)) begin
        failures++;
        $display("FAIL sel=%0b gamma=%04b beta=%04b y=%04b", sel, gamma, beta, y);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
