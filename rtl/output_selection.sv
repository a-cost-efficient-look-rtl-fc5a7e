// output_selection: the four 2-to-1 switches at the bottom of a digit.
//
// {C_out, S_3, S_2, S_1} take the direct-logic result (beta) when C_3 = 1 and
// the add-3 correction result (gamma) otherwise. The original circuit builds
// each switch from a transmission-gate pair and an inverter; here each is a
// plain multiplexer. Purely combinational.
module output_selection
  import bcd_pkg::*;
(
  input  logic   sel,     // C_3
  input  upper_t gamma,
  input  upper_t beta,
  output upper_t y
);
  assign y = sel ? beta : gamma;
endmodule
