// hif4_e6m2_rec: reciprocal of an E6M2 scale, returned as BF16.
//
// Because E6M2 has no subnormals, 1/(2^E * 1.mm) = 2^(-E+adj) * r(mm) where
// the mantissa r and the exponent adjustment adj depend only on the two
// mantissa bits. A 4-entry table indexed by mm supplies them and a single
// subtraction forms the exponent, as the format's conversion scheme
// proposes. Table entries are 1/1.mm rounded to nearest BF16 (none is a
// tie):
//   mm=00: 1/1.00 = 1.0            -> man 0x00, adj  0
//   mm=01: 1/1.25 = 0.8  = 1.6/2   -> man 0x4D (1.6015625), adj -1
//   mm=10: 1/1.50 = 0.667= 1.333/2 -> man 0x2B (1.3359375), adj -1
//   mm=11: 1/1.75 = 0.571= 1.143/2 -> man 0x12 (1.140625),  adj -1
// Output biased exponent = 127 - (e - 48) + adj = 175 - e + adj, always in
// 112..175. E6M2 NaN gives a BF16 quiet NaN (0x7FC0), this design's choice.
// Interface: e6m2_i in, rec_o out. Purely combinational.
module hif4_e6m2_rec
  import hif4_pkg::*;
(
  input  e6m2_t e6m2_i,
  output bf16_t rec_o
);

  logic [6:0] lut_man;
  logic       lut_adj;  // 1: subtract one from the exponent

  always_comb begin
    unique case (e6m2_i[1:0])
      2'b00: begin lut_man = 7'h00; lut_adj = 1'b0; end
      2'b01: begin lut_man = 7'h4D; lut_adj = 1'b1; end
      2'b10: begin lut_man = 7'h2B; lut_adj = 1'b1; end
      2'b11: begin lut_man = 7'h12; lut_adj = 1'b1; end
    endcase
    if (e6m2_i == E6M2_NAN)
      rec_o = 16'h7FC0;
    else
      rec_o = {1'b0, 8'(8'd175 - {2'b00, e6m2_i[7:2]} - {7'b0, lut_adj}), lut_man};
  end

endmodule
