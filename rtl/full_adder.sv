// full_adder: bit 0 of the first (bitwise) tree level.
//
// Adds A_0, B_0 and the decimal carry from the next lower digit. The sum is
// directly bit S_0 of the digit result; the carry C_0 goes to the correction
// and direct-logic paths. The carry is the usual full-adder majority
// function. (One pseudo-code line of the original description writes it as a
// three-input AND, but the text calls the block a full adder and its worked
// example 8 + 9 + 1 needs C_0 = 1; the full adder is followed here.)
// Purely combinational.
module full_adder (
  input  logic a,
  input  logic b,
  input  logic cin,
  output logic s,
  output logic c
);
  assign s = a ^ b ^ cin;
  assign c = (a & b) | (a & cin) | (b & cin);
endmodule
