// hif4_bf16_to_e6m2: quantises a non-negative BF16 scale factor to the
// unsigned E6M2 level-1 scale of a HiF4 unit.
//
// E6M2 value = 2^(exp-48) * 1.mm, exponent field 0..63, 0xFF reserved for NaN,
// no zero, no infinity, no subnormals (from the format definition). The BF16
// significand is rounded from 8 to 3 bits (ROUND selects half-to-even or
// half-away-from-zero, the two modes the format allows); a rounding carry
// bumps the exponent.
// This design's own choices, where the format is silent: the sign bit is
// ignored (the scale is a peak magnitude times 1/7); a result above
// 2^15 * 1.5 saturates to the largest finite code 0xFE; a result below 2^-48,
// including zero and BF16 subnormals, is clamped up to the smallest code 0x00
// (a larger scale can only make elements smaller, so no element overflows);
// BF16 Inf or NaN gives E6M2 NaN.
// Interface: bf16_i in, e6m2_o out. Purely combinational.
module hif4_bf16_to_e6m2
  import hif4_pkg::*;
#(
  parameter round_mode_t ROUND = RND_HALF_EVEN
) (
  input  bf16_t bf16_i,
  output e6m2_t e6m2_o
);

  logic [3:0]  sig_r;          // 1.mm rounded, may carry to 10.00
  logic signed [9:0] e_unb;    // unbiased exponent after rounding

  always_comb begin
    sig_r = {1'b0, 1'b1, bf16_i[6:5]}
          + 4'(round_up(ROUND, bf16_i[5], bf16_i[4], |bf16_i[3:0]));
    e_unb = 10'(signed'({2'b0, bf16_i[14:7]})) - 10'(BF16_BIAS);
    if (sig_r[3]) begin
      sig_r = 4'b0100;
      e_unb = e_unb + 10'sd1;
    end

    if (bf16_i[14:7] == 8'hFF)
      e6m2_o = E6M2_NAN;
    else if (bf16_i[14:7] == 8'h00 || e_unb < -signed'(10'(E6M2_BIAS)))
      e6m2_o = E6M2_MIN;
    else if (e_unb > 10'sd15 || (e_unb == 10'sd15 && sig_r[1:0] == 2'b11))
      e6m2_o = E6M2_MAX;
    else
      e6m2_o = {6'(e_unb + 10'(E6M2_BIAS)), sig_r[1:0]};
  end

endmodule
