// bcd_digit_adder_tb: one-digit BCD adder.
//
// 1. Exhaustive over the specified domain: a, b in 0..9, cin in 0..1. The
//    expected digit and carry are (a + b + cin) mod 10 and (a + b + cin) >= 10.
// 2. The two worked examples of the algorithm: 9 + 5 + 0 = 1_0100 (correction
//    path) and 8 + 9 + 1 = 1_1000 (direct-logic path).
// 3. The vectors of the published one-digit simulation waveform, which uses
//    operands above 9 with cin = 0: 5 + 6 -> 1, 6 + 10 -> 6, 5 + 13 -> 8,
//    carry 1 each time.
// The three ways a digit can be formed (direct logic when both digits are 8
// or 9; add-3 correction; no correction) are counted from the operands, and
// each must occur.
module bcd_digit_adder_tb;
  import bcd_pkg::*;

  logic clk;
  initial clk = 1'b0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int n_direct = 0, n_corrected = 0, n_plain = 0;
  bcd_digit_t a, b, s;
  logic       cin, cout;

  bcd_digit_adder dut (.a(a), .b(b), .cin(cin), .s(s), .cout(cout));

  task automatic apply(input int av, input int bv, input int cv,
                       input int want_s, input int want_c);
    a = 4'(av); b = 4'(bv); cin = 1'(cv);
    @(posedge clk);
    checks++;
    if (int'(s) != want_s || int'(cout) != want_c) begin
      failures++;
      $display("FAIL %0d + %0d + %0d: got c=%0d s=%0d want c=%0d s=%0d",
               av, bv, cv, cout, s, want_c, want_s);
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
    int sum;
    for (int av = 0; av <= 9; av++)
      for (int bv = 0; bv <= 9; bv++)
        for (int cv = 0; cv <= 1; cv++) begin
          sum = av + bv + cv;
          if (av >= 8 && bv >= 8) n_direct++;
          else if (sum >= 10) n_corrected++;
          else n_plain++;
          apply(av, bv, cv, sum % 10, int'(sum >= 10));
        end
    apply(9, 5, 0, 4, 1);   // worked example, C_3 = 0
    apply(8, 9, 1, 8, 1);   // worked example, C_3 = 1
    apply(5, 6, 0, 1, 1);   // waveform vectors
    apply(6, 10, 0, 6, 1);
    apply(5, 13, 0, 8, 1);
    if (n_direct == 0 || n_corrected == 0 || n_plain == 0) begin
      failures++;
      $display("FAIL: a digit path was never exercised");
    end
    $display("paths: direct=%0d corrected=%0d plain=%0d", n_direct, n_corrected, n_plain);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
