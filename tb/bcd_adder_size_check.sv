// bcd_adder_size_check: testbench helper that drives one bcd_adder of
// N digits with random BCD operands (plus the all-nines carry ripple) and
// compares every result with a digit-by-digit integer reference. It starts
// on `start`, raises `done` when finished and reports its counts.
module bcd_adder_size_check #(
  parameter int N = 1,
  parameter int VECTORS = 500
) (
  input  logic clk,
  input  logic start,
  output logic done,
  output int   checks,
  output int   failures
);
  logic [4*N-1:0] a, b, s;
  logic           cin, cout;

  bcd_adder #(.DIGITS(N)) dut (.a(a), .b(b), .cin(cin), .s(s), .cout(cout));

  int da[N], db[N];

  task automatic run(input int cv);
    int carry, t;
    logic [4*N-1:0] want;
    for (int i = 0; i < N; i++) begin
      a[4*i +: 4] = 4'(da[i]);
      b[4*i +: 4] = 4'(db[i]);
    end
    cin = 1'(cv);
    carry = cv;
    for (int i = 0; i < N; i++) begin
      t = da[i] + db[i] + carry;
      want[4*i +: 4] = 4'(t % 10);
      carry = (t >= 10) ? 1 : 0;
    end
    @(posedge clk);
    checks++;
    if (s != want || int'(cout) != carry) begin
      failures++;
      $display("FAIL N=%0d a=%h b=%h cin=%0d: got %0b_%h want %0d_%h",
               N, a, b, cv, cout, s, carry, want);
    end
  endtask

  initial begin
    done = 1'b0;
    checks = 0;
    failures = 0;
    a = '0; b = '0; cin = 1'b0;
    wait (start);
    foreach (da[i]) begin da[i] = 9; db[i] = 0; end
    run(1);
    foreach (da[i]) begin da[i] = 9; db[i] = 9; end
    run(1);
    for (int k = 0; k < VECTORS; k++) begin
      foreach (da[i]) begin da[i] = int'($urandom_range(9)); db[i] = int'($urandom_range(9)); end
      run(int'($urandom_range(1)));
    end
    done = 1'b1;
  end
endmodule
