// lut6: a 6-input look-up table, the FPGA primitive the adder is mapped to.
//
// The output is bit `i` of the 64-bit constant INIT, the same convention as
// the 6-input LUTs of Xilinx Virtex-6 class devices. Purely combinational.
// INIT defaults to all zeros (a constant-0 LUT); every instance in this design
// sets its own contents.
module lut6 #(
  parameter logic [63:0] INIT = 64'h0
) (
  input  logic [5:0] i,
  output logic       o
);
  assign o = INIT[i];
endmodule
