// add3_correction: second tree level, the "addition with 3-correction" path.
//
// Used when C_3 = 0. It adds the half-adder sums S^alpha(3:1) to the carries
// C(2:0) (the carries weigh one place more than the sums they sit under) and
// corrects the result:
//   F = S^alpha(3:1) + C(2:0);  gamma = (F >= 5) ? F + 3 : F
// giving {C^gamma_out, S^gamma_3, S^gamma_2, S^gamma_1}. Because the digit
// sum equals 2*F + S_0, the test F >= 5 is "digit sum >= 10" and +3 on these
// upper bits is the +6 BCD correction.
//
// As in the original circuit, the whole path is four 6-input LUTs, one per
// output bit, all fed by the same six signals {S^alpha_3, C_2, S^alpha_2,
// C_1, S^alpha_1, C_0}; their contents come from bcd_pkg::lut_init(). The
// six LUT inputs pass through switches that are on only while C_3 = 0. In
// the transistor circuit the inputs then float; this model holds them at 0
// instead (a choice of this design). The output selection ignores gamma
// while C_3 = 1, so the choice is invisible at the adder output.
// Purely combinational, one LUT deep.
module add3_correction
  import bcd_pkg::*;
(
  input  logic [2:0] s_alpha,   // S^alpha(3:1), s_alpha[0] = S^alpha_1
  input  logic [2:0] c,         // C(2:0)
  input  logic       c3,        // C_3: LUT inputs pass only while 0
  output upper_t     gamma
);
  logic [5:0] lut_in;
  logic [3:0] lut_out;

  // LUT address: {S^alpha_3, C_2, S^alpha_2, C_1, S^alpha_1, C_0}.
  assign lut_in = c3 ? 6'b0
                     : {s_alpha[2], c[2], s_alpha[1], c[1], s_alpha[0], c[0]};

  for (genvar k = 0; k < 4; k++) begin : g_lut
    lut6 #(.INIT(lut_init(2'(k)))) u_lut (.i(lut_in), .o(lut_out[k]));
  end

  assign gamma = upper_t'(lut_out);
endmodule
