// bcd_adder_sizes_tb: the adder at every width of the published
// area/delay comparison, 1, 2, 4, 8, 16 and 32 digits. Each width gets the
// all-nines carry ripple and 500 random additions with random carry in,
// checked against an integer reference.
module bcd_adder_sizes_tb;
  localparam int NSIZES = 6;

  logic clk;
  initial clk = 1'b0;
  always #5 clk = ~clk;

  logic start;
  logic [NSIZES-1:0] done;
  int c[NSIZES], f[NSIZES];
  int checks, failures;

  bcd_adder_size_check #(.N(1))  u_n1  (.clk(clk), .start(start), .done(done[0]), .checks(c[0]), .failures(f[0]));
  bcd_adder_size_check #(.N(2))  u_n2  (.clk(clk), .start(start), .done(done[1]), .checks(c[1]), .failures(f[1]));
  bcd_adder_size_check #(.N(4))  u_n4  (.clk(clk), .start(start), .done(done[2]), .checks(c[2]), .failures(f[2]));
  bcd_adder_size_check #(.N(8))  u_n8  (.clk(clk), .start(start), .done(done[3]), .checks(c[3]), .failures(f[3]));
  bcd_adder_size_check #(.N(16)) u_n16 (.clk(clk), .start(start), .done(done[4]), .checks(c[4]), .failures(f[4]));
  bcd_adder_size_check #(.N(32)) u_n32 (.clk(clk), .start(start), .done(done[5]), .checks(c[5]), .failures(f[5]));

  function automatic void tally();
    checks = 0;
    failures = 0;
    for (int k = 0; k < NSIZES; k++) begin
      checks += c[k];
      failures += f[k];
    end
  endfunction

  initial begin : watchdog
    repeat (10000) @(posedge clk);
    tally();
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    start = 1'b0;
    repeat (2) @(posedge clk);
    start = 1'b1;
    wait (&done);
    @(posedge clk);
    tally();
    for (int k = 0; k < NSIZES; k++)
      $display("size %0d digits: checks=%0d failures=%0d", 1 << k, c[k], f[k]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
