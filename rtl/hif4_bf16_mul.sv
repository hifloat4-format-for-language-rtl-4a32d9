// hif4_bf16_mul: BF16 x BF16 multiplier with a rounded BF16 result, the
// multiply instruction used throughout the BF16-to-HiF4 conversion
// (peak x 1/7, peaks x E6M2 reciprocal, elements x E6M2 reciprocal).
//
// The 8-bit significands (hidden 1 included) are multiplied into a 16-bit
// product, normalised by at most one place, and rounded back to 8 bits with
// the guard bit and a sticky OR of the rest; a rounding carry bumps the
// exponent. The format requires round-half-to-even or round-half-away-from-
// zero; ROUND selects which.
// This design's own choices, where the format says nothing: subnormal
// inputs and results are flushed to zero (a subnormal BF16 is below 2^-126,
// far under the smallest HiF4 value 2^-50, so conversion results do not
// change); an Inf or NaN input gives a quiet NaN (0x7FC0); exponent overflow
// gives infinity with the product's sign.
// Interface: a_i, b_i in, p_o out. Purely combinational.
module hif4_bf16_mul
  import hif4_pkg::*;
#(
  parameter round_mode_t ROUND = RND_HALF_EVEN
) (
  input  bf16_t a_i,
  input  bf16_t b_i,
  output bf16_t p_o
);

  logic        sign;
  logic [15:0] prod;
  logic [7:0]  sig;
  logic        guard, sticky;
  logic [8:0]  sig_r;        // rounded significand, may carry to 9 bits
  logic signed [10:0] exp_r; // biased result exponent

  always_comb begin
    sign  = a_i[15] ^ b_i[15];
    prod  = {1'b1, a_i[6:0]} * {1'b1, b_i[6:0]};
    exp_r = 11'(signed'({3'b0, a_i[14:7]})) + 11'(signed'({3'b0, b_i[14:7]})) - 11'sd127;
    if (prod[15]) begin
      sig    = prod[15:8];
      guard  = prod[7];
      sticky = |prod[6:0];
      exp_r  = exp_r + 11'sd1;
    end else begin
      sig    = prod[14:7];
      guard  = prod[6];
      sticky = |prod[5:0];
    end
    sig_r = {1'b0, sig} + 9'(round_up(ROUND, sig[0], guard, sticky));
    if (sig_r[8]) begin
      sig_r = 9'h080;
      exp_r = exp_r + 11'sd1;
    end

    if (a_i[14:7] == 8'hFF || b_i[14:7] == 8'hFF)
      p_o = 16'h7FC0;
    else if (a_i[14:7] == 8'h00 || b_i[14:7] == 8'h00 || exp_r <= 0)
      p_o = {sign, 15'h0000};
    else if (exp_r >= 255)
      p_o = {sign, 8'hFF, 7'h00};
    else
      p_o = {sign, exp_r[7:0], sig_r[6:0]};
  end

endmodule
