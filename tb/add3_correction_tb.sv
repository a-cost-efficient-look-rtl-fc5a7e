// add3_correction_tb: exhaustive check of the LUT-based correction path.
// For C_3 = 0 the output must be F or F + 3 (F = S^alpha(3:1) + C(2:0),
// +3 when F >= 5, kept to 4 bits), worked out here with integers. For
// C_3 = 1 the switched-off LUT inputs read as 0, so the output must be 0.
// Also checks the rows of the two worked examples of the algorithm.
module add3_correction_tb;
  import bcd_pkg::*;

  logic clk;
  initial clk = 1'b0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int corrected = 0, uncorrected = 0;
  logic [2:0] s_alpha, c;
  logic       c3;
  upper_t     gamma;

  add3_correction dut (.s_alpha(s_alpha), .c(c), .c3(c3), .gamma(gamma));

  task automatic check(input logic [3:0] want);
    checks++;
    if (4'(gamma) != want) begin
      failures++;
      $display("FAIL s_alpha=%03b c=%03b c3=%0b: got %04b want %04b",
               s_alpha, c, c3, 4'(gamma), want);
    end
  endtask

  initial begin : watchdog
    repeat (1000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int f;
    logic [3:0] want;
    for (int k = 0; k < 128; k++) begin
      {c3, s_alpha, c} = 7'(k);
      @(posedge clk);
      f = int'(s_alpha) + int'(c);
      if (c3) want = 4'd0;
      else if (f >= 5) begin want = 4'(f + 3); corrected++; end
      else begin want = 4'(f); uncorrected++; end
      check(want);
    end
    // Worked example, 9 + 5 + 0: S^alpha(3:1) = 110, C(2:0) = 001 gives
    // F = 0111, corrected to 1010.
    s_alpha = 3'b110; c = 3'b001; c3 = 1'b0;
    @(posedge clk);
    check(4'b1010);
    if (corrected == 0 || uncorrected == 0) begin
      failures++;
      $display("FAIL: both outcomes of the correction were not exercised");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
