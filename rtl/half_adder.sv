// half_adder: one bit of the first (bitwise) tree level for bits 1..3.
//
// S^alpha_i = A_i xor B_i, C_i = A_i and B_i, as in the digit addition
// algorithm. Purely combinational; no clock.
module half_adder (
  input  logic a,
  input  logic b,
  output logic s,
  output logic c
);
  assign s = a ^ b;
  assign c = a & b;
endmodule
