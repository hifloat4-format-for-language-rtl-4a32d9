// hif4_scale_mul: the one floating-point multiplier of the HiF4 dot product,
// acting on the two level-1 E6M2 scales.
//
// Mantissas: 1.mm_A x 1.mm_B as 3-bit x 3-bit integers gives a 6-bit
// unsigned 2P4 product (value man_o / 16, in [1, 3.0625]). Exponents: the
// unbiased exponents are added, E8 = (eA - 48) + (eB - 48), a signed 8-bit
// number in [-96, 30]. These widths (1P2, 2P4, E8) are the ones of the
// format's dot-product flow; keeping E8 unbiased two's complement is this
// design's choice. nan_o is set if either scale is the NaN code 0xFF.
// Interface: a_i, b_i in; man_o, e8_o, nan_o out. Purely combinational.
module hif4_scale_mul
  import hif4_pkg::*;
(
  input  e6m2_t             a_i,
  input  e6m2_t             b_i,
  output logic [5:0]        man_o,  // 2P4
  output logic signed [7:0] e8_o,   // unbiased exponent of the product
  output logic              nan_o
);

  always_comb begin
    man_o = {3'b0, 1'b1, a_i[1:0]} * {3'b0, 1'b1, b_i[1:0]};
    e8_o  = signed'({2'b00, a_i[7:2]}) + signed'({2'b00, b_i[7:2]}) - 8'(2 * E6M2_BIAS);
    nan_o = (a_i == E6M2_NAN) || (b_i == E6M2_NAN);
  end

endmodule
