// bcd_pkg: types and constant functions shared by the LUT-based BCD adder.
//
// A BCD digit is four bits, 0..9. The upper part of a digit result,
// {C_out, S_3, S_2, S_1}, travels as the packed struct upper_t; bit 0 of
// the sum (S_0) comes straight from the full adder and is not part of it.
//
// correct3() is the add-3 correction of the second tree level: with
// F = S^alpha(3:1) + C(2:0), the result is F + 3 when F >= 5, else F. Since
// the digit sum is 2*F + S_0, "F >= 5" is "sum >= 10" and "+3" on the upper
// bits is the familiar "+6" BCD correction. lut_init() turns correct3() into
// the 64-bit contents of the LUT that produces one bit of the result, with
// the LUT address ordered {S^alpha_3, C_2, S^alpha_2, C_1, S^alpha_1, C_0}
// (the left-to-right order of the inputs in the circuit diagram; the order is
// this design's choice). Computing the contents keeps them exactly in step
// with the correction rule instead of copying a table by hand.
package bcd_pkg;

  typedef logic [3:0] bcd_digit_t;

  // {C_out, S_3, S_2, S_1}: the four outputs of the correction path, the
  // direct path and the output selection.
  typedef struct packed {
    logic       cout;
    logic [2:0] s;      // s[2] = S_3, s[1] = S_2, s[0] = S_1
  } upper_t;

  // Add-3 correction of the two 3-bit words. Kept to four bits: F + 3 only
  // exceeds 4 bits for F >= 13, which two BCD digits never produce.
  function automatic logic [3:0] correct3(input logic [2:0] s_alpha,
                                          input logic [2:0] c_low);
    logic [3:0] f;
    f = {1'b0, s_alpha} + {1'b0, c_low};
    return (f >= 4'd5) ? f + 4'd3 : f;
  endfunction

  // Contents of the LUT that drives result bit `bit_idx` (0 = S_1 ..
  // 3 = C_out). Address bits: [5] S^alpha_3, [4] C_2, [3] S^alpha_2,
  // [2] C_1, [1] S^alpha_1, [0] C_0.
  function automatic logic [63:0] lut_init(input logic [1:0] bit_idx);
    logic [63:0] init;
    logic [5:0]  adr;
    logic [3:0]  r;
    init = '0;
    for (int k = 0; k < 64; k++) begin
      adr = 6'(k);
      r = correct3({adr[5], adr[3], adr[1]}, {adr[4], adr[2], adr[0]});
      init[k] = r[bit_idx];
    end
    return init;
  endfunction

endpackage
