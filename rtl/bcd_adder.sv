// bcd_adder: N-digit LUT-based BCD adder (top level).
//
// DIGITS one-digit adders side by side; the carry out of digit i is the
// carry in of digit i+1, so digits are added one after another while the
// work inside each digit is parallel. Digit i of an operand occupies bits
// [4i+3:4i]; digit 0 is the least significant.
//
// Interface: a, b are DIGITS-digit BCD numbers; cin is the carry into the
// lowest digit (tie it to 0 for a plain addition); s is the BCD sum and cout
// the decimal carry out of the highest digit, i.e. the (DIGITS+1)-th digit.
// Purely combinational: the delay grows linearly with DIGITS, one digit
// adder per digit along the carry chain.
//
// The ripple structure follows the original block diagram. DIGITS defaults
// to 32, the widest adder the original evaluation reports (it reports 1, 2,
// 4, 8, 16 and 32 digits and names no single main size).
module bcd_adder
  import bcd_pkg::*;
#(
  parameter int unsigned DIGITS = 32
) (
  input  logic [4*DIGITS-1:0] a,
  input  logic [4*DIGITS-1:0] b,
  input  logic                cin,
  output logic [4*DIGITS-1:0] s,
  output logic                cout
);
  logic [DIGITS:0] carry;

  assign carry[0] = cin;

  for (genvar i = 0; i < DIGITS; i++) begin : g_digit
    bcd_digit_adder u_digit (
      .a   (a[4*i +: 4]),
      .b   (b[4*i +: 4]),
      .cin (carry[i]),
      .s   (s[4*i +: 4]),
      .cout(carry[i+1])
    );
  end

  assign cout = carry[DIGITS];
endmodule
