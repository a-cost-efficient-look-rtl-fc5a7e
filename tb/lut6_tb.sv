// lut6_tb: loads a LUT with a fixed, irregular 64-bit pattern and reads
// every address; each output must be that bit of the pattern.
module lut6_tb;
  localparam logic [63:0] PATTERN = 64'hA5C3_0F96_1E2D_7B48;

  logic clk;
  initial clk = 1'b0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  logic [5:0] i;
  logic       o;

  lut6 #(.INIT(PATTERN)) dut (.i(i), .o(o));

  initial begin : watchdog
    repeat (1000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int k = 0; k < 64; k++) begin
      i = 6'(k);
      @(posedge clk);
      checks++;
      if (o != PATTERN[k]) begin
        failures++;
        $display("FAIL address %0d: got %0b", k, o);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
