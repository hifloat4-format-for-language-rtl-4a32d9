// hif4_bf16_to_s1p2: quantises a scaled BF16 value to a 4-bit sign-magnitude
// S1P2 element (1 integer bit, 2 fraction bits, magnitudes 0..1.75 in steps
// of 0.25).
//
// The magnitude times 4 is formed by shifting the 8-bit significand right by
// 132 - exp; the dropped bits give guard and sticky for rounding (ROUND
// selects half-to-even or half-away-from-zero, as the format allows). A
// rounded magnitude above 1.75 is clamped to 1.75 keeping the sign, as the
// format requires. Table values come from the format: S0.00 = +-0,
// S1.11 = +-1.75. Bit order {sign, int, frac[1:0]} and keeping the sign of a
// value that rounds to zero (-0 is a valid S1P2 code) are this design's
// choices; Inf/NaN inputs clamp like large values.
// Interface: bf16_i in, s1p2_o out, clamp_o flags a clamp. Combinational.
module hif4_bf16_to_s1p2
  import hif4_pkg::*;
#(
  parameter round_mode_t ROUND = RND_HALF_EVEN
) (
  input  bf16_t bf16_i,
  output s1p2_t s1p2_o,
  output logic  clamp_o
);

  logic [39:0] ext;    // {significand, 32 fraction bits} after the shift
  logic [8:0]  shamt;
  logic [8:0]  q;      // rounded magnitude in quarters

  always_comb begin
    ext     = '0;
    q       = '0;
    clamp_o = 1'b0;
    shamt   = 9'd132 - {1'b0, bf16_i[14:7]};
    if (bf16_i[14:7] == 8'h00) begin
      q = '0;
    end else if (bf16_i[14:7] >= 8'd132) begin
      clamp_o = 1'b1;
    end else begin
      ext = {1'b1, bf16_i[6:0], 32'h0} >> ((shamt > 9'd33) ? 9'd33 : shamt);
      q   = {1'b0, ext[39:32]} + 9'(round_up(ROUND, ext[32], ext[31], |ext[30:0]));
      if (q > 9'd7) clamp_o = 1'b1;
    end
    s1p2_o = {bf16_i[15], clamp_o ? 3'd7 : q[2:0]};
  end

endmodule
