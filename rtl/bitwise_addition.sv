// bitwise_addition: first tree level of a one-digit BCD adder.
//
// All four bit positions are added at once and independently: a full adder
// on A_0, B_0 and the incoming carry, and three half adders on bits 1..3.
// Nothing propagates between the bit positions, which is what keeps this
// level one gate deep. Outputs:
//   s0      S_0, final bit 0 of the digit sum
//   s_alpha S^alpha(3:1), the half-adder sums (s_alpha[0] = S^alpha_1)
//   c       C(3:0): c[0] from the full adder, c[3:1] from the half adders
// Purely combinational.
module bitwise_addition
  import bcd_pkg::*;
(
  input  bcd_digit_t a,
  input  bcd_digit_t b,
  input  logic       cin,
  output logic       s0,
  output logic [2:0] s_alpha,
  output logic [3:0] c
);
  full_adder u_fa (.a(a[0]), .b(b[0]), .cin(cin), .s(s0), .c(c[0]));

  for (genvar i = 1; i <= 3; i++) begin : g_ha
    half_adder u_ha (.a(a[i]), .b(b[i]), .s(s_alpha[i-1]), .c(c[i]));
  end
endmodule
