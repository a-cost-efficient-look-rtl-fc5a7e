// bcd_adder_tb: end-to-end test of the N-digit adder at its default size
// (32 digits, no parameter override).
//
// Operands are held as arrays of decimal digits; the expected sum is worked
// out digit by digit with integer arithmetic, independently of the circuit.
// Directed cases: 0 + 0; 99..9 + 0 + cin = 1 (carry ripples through every
// digit and out of the top); 99..9 + 99..9 + 1; alternating patterns. Then
// random operands with random carry in.
//
// Counted mechanisms, each of which must occur: the direct-logic path
// (both digits 8 or 9), the add-3 correction, a digit with no correction, a
// carry entering a digit from below, a carry out of the top digit, and a
// ripple that crosses every digit.
module bcd_adder_tb;
  import bcd_pkg::*;

  localparam int N = 32;   // must match the default of bcd_adder

  logic clk;
  initial clk = 1'b0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int n_direct = 0, n_corrected = 0, n_plain = 0;
  int n_carry_in_digit = 0, n_cout = 0, n_full_ripple = 0;

  logic [4*N-1:0] a, b, s;
  logic           cin, cout;

  bcd_adder dut (.a(a), .b(b), .cin(cin), .s(s), .cout(cout));

  int da[N], db[N];

  task automatic run(input int cv);
    int carry, t, run_len, max_run;
    logic [4*N-1:0] want;
    for (int i = 0; i < N; i++) begin
      a[4*i +: 4] = 4'(da[i]);
      b[4*i +: 4] = 4'(db[i]);
    end
    cin = 1'(cv);
    carry = cv;
    run_len = 0; max_run = 0;
    for (int i = 0; i < N; i++) begin
      t = da[i] + db[i] + carry;
      if (carry != 0) n_carry_in_digit++;
      if (da[i] >= 8 && db[i] >= 8) n_direct++;
      else if (t >= 10) n_corrected++;
      else n_plain++;
      want[4*i +: 4] = 4'(t % 10);
      carry = (t >= 10) ? 1 : 0;
      run_len = (carry != 0) ? run_len + 1 : 0;
      if (run_len > max_run) max_run = run_len;
    end
    if (carry != 0) n_cout++;
    if (max_run == N) n_full_ripple++;
    @(posedge clk);
    checks++;
    if (s !== want || int'(cout) != carry) begin
      failures++;
      $display("FAIL a=%h b=%h cin=%0d: got %0b_%h want %0d_%h", a, b, cv, cout, s, carry, want);
    end
  endtask

  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    foreach (da[i]) begin da[i] = 0; db[i] = 0; end
    run(0);
    foreach (da[i]) begin da[i] = 9; db[i] = 0; end
    run(1);                                 // ripple through all digits
    foreach (da[i]) begin da[i] = 9; db[i] = 9; end
    run(1);
    run(0);
    foreach (da[i]) begin da[i] = (i % 2 != 0) ? 9 : 1; db[i] = (i % 2 != 0) ? 0 : 8; end
    run(1);
    foreach (da[i]) begin da[i] = i % 10; db[i] = 9 - (i % 10); end
    run(0);
    run(1);
    for (int k = 0; k < 2000; k++) begin
      foreach (da[i]) begin da[i] = int'($urandom_range(9)); db[i] = int'($urandom_range(9)); end
      run(int'($urandom_range(1)));
    end
    $display("mechanisms: direct=%0d corrected=%0d plain=%0d carry_in_digit=%0d cout=%0d full_ripple=%0d",
             n_direct, n_corrected, n_plain, n_carry_in_digit, n_cout, n_full_ripple);
    if (n_direct == 0 || n_corrected == 0 || n_plain == 0 || n_carry_in_digit == 0
        || n_cout == 0 || n_full_ripple == 0) begin
      failures++;
      $display("FAIL: a mechanism was never exercised");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
