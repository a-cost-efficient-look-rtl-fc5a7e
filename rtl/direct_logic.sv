// direct_logic: second tree level, the "direct logic" path used when C_3 = 1.
//
// C_3 = 1 means A_3 = B_3 = 1, so both digits are 8 or 9 and the digit sum
// is 16 + A_0 + B_0 + C_in, between 16 and 19. The corrected digit is then
// 6 + S_0 + 2*C_0 with a carry out, so with no arithmetic at all:
//   C^beta_out = 1, S^beta_3 = C_0, S^beta_2 = S^beta_1 = not C_0.
// In the original circuit four transistors, switched on by C_3, drive these
// nodes and leave them floating otherwise; this model drives beta to 0 while
// C_3 = 0 (a choice of this design, invisible at the adder output because
// the output selection then takes the other path). Purely combinational.
module direct_logic
  import bcd_pkg::*;
(
  input  logic   c0,   // C_0 from the full adder
  input  logic   c3,   // C_3: outputs are driven only while 1
  output upper_t beta
);
  always_comb begin
    if (c3) begin
      beta.cout = 1'b1;
      beta.s    = {c0, ~c0, ~c0};
    end else begin
      beta = '0;
    end
  end
endmodule
