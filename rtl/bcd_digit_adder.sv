// bcd_digit_adder: one-digit LUT-based BCD adder.
//
// Adds two BCD digits and a carry in two levels. Level 1 (bitwise_addition)
// adds every bit position at once: a full adder on bit 0 with the carry in,
// half adders on bits 1..3. Its sum S_0 is already the final bit 0. Level 2
// works out the upper three sum bits and the carry out in two ways at once:
//   - add3_correction (C_3 = 0): F = S^alpha(3:1) + C(2:0), plus 3 if F >= 5,
//     in four 6-input LUTs;
//   - direct_logic (C_3 = 1, both digits 8 or 9): C_out = 1, S_3 = C_0,
//     S_2 = S_1 = not C_0.
// output_selection picks one of the two by C_3.
//
// Interface: a, b are BCD digits (0..9), cin the decimal carry from the next
// lower digit; s is the BCD sum digit and cout the decimal carry. Purely
// combinational: the critical path is full adder -> LUT -> output switch.
// The structure follows the original one-digit circuit; inputs above 9 are
// outside its specification (see the testbench for what it does with them).
module bcd_digit_adder
  import bcd_pkg::*;
(
  input  bcd_digit_t a,
  input  bcd_digit_t b,
  input  logic       cin,
  output bcd_digit_t s,
  output logic       cout
);
  logic       s0;
  logic [2:0] s_alpha;
  logic [3:0] c;
  upper_t     gamma, beta, y;

  bitwise_addition u_bitwise (
    .a(a), .b(b), .cin(cin), .s0(s0), .s_alpha(s_alpha), .c(c)
  );

  add3_correction u_add3 (
    .s_alpha(s_alpha), .c(c[2:0]), .c3(c[3]), .gamma(gamma)
  );

  direct_logic u_direct (.c0(c[0]), .c3(c[3]), .beta(beta));

  output_selection u_select (.sel(c[3]), .gamma(gamma), .beta(beta), .y(y));

  assign s    = {y.s, s0};
  assign cout = y.cout;
endmodule
