// hif4_dot64: processing element computing the 64-length dot product of two
// HiF4 units almost entirely in integer arithmetic.
//
// Dataflow, with the fixed-point widths of the format's dot-product flow
// (SxPy = sign, x integer bits, y fraction bits):
//   1. each S1P2 element is shifted left by its level-3 micro-exponent:
//      S2P2 (5-bit two's complement, magnitude code << E1_16);
//   2. 64 integer multipliers S2P2 x S2P2 = S4P4 (9 bits);
//   3. adder tree 64 -> 8: the 8 products under one level-2 micro-exponent
//      are summed to S7P4 (12 bits);
//   4. each sum is shifted left by E1_8A + E1_8B (0..2): S9P4 (14 bits);
//   5. adder tree 8 -> 1: S12P4 (17 bits);
//   6. one integer multiplier S12P4 x 2P4 = S14P8 (23 bits), where 2P4 is
//      the mantissa product of the two E6M2 scales (hif4_scale_mul);
//   7. result = 2^E8 x S14P8, E8 the sum of the unbiased scale exponents.
// The result is exact: no bit is dropped on the way.
// This design's own choices: two's complement rather than sign-magnitude
// inside the datapath; the tree is a plain adder tree (no compressor cells
// are specified); one output register stage. nan_o is raised if either
// E6M2 is NaN, in which case the other outputs are meaningless.
// Interface and timing: a_i/b_i with in_valid_i in cycle t give
// out_valid_o, e8_o, s14p8_o (value s14p8_o * 2^(e8_o - 8)) in cycle t+1.
// One dot product per cycle. Synchronous active-low reset on the valid bit.
module hif4_dot64
  import hif4_pkg::*;
(
  input  logic               clk,
  input  logic               rst_n,
  input  logic               in_valid_i,
  input  hif4_unit_t         a_i,
  input  hif4_unit_t         b_i,
  output logic               out_valid_o,
  output logic               nan_o,
  output logic signed [7:0]  e8_o,
  output logic signed [22:0] s14p8_o
);

  logic signed [4:0]  s2p2_a [N_ELEM];
  logic signed [4:0]  s2p2_b [N_ELEM];
  logic signed [8:0]  s4p4   [N_ELEM];
  logic signed [11:0] s7p4   [N_L2];
  logic signed [13:0] s9p4   [N_L2];
  logic signed [16:0] s12p4;
  logic        [5:0]  man2p4;
  logic signed [7:0]  e8;
  logic               nan;
  logic signed [22:0] s14p8;

  hif4_scale_mul u_scale (.a_i(a_i.e6m2), .b_i(b_i.e6m2), .man_o(man2p4), .e8_o(e8), .nan_o(nan));

  // S1P2 sign-magnitude -> shifted two's complement S2P2
  function automatic logic signed [4:0] to_s2p2(input s1p2_t e, input logic ue);
    logic [4:0] mag;
    mag = ue ? {1'b0, e[2:0], 1'b0} : {2'b00, e[2:0]};
    return e[3] ? -signed'(mag) : signed'(mag);
  endfunction

  always_comb begin
    for (int i = 0; i < N_ELEM; i++) begin
      s2p2_a[i] = to_s2p2(a_i.elem[i], a_i.e1_16[i/ELEMS_PER_L3]);
      s2p2_b[i] = to_s2p2(b_i.elem[i], b_i.e1_16[i/ELEMS_PER_L3]);
      s4p4[i]   = 9'(s2p2_a[i]) * 9'(s2p2_b[i]);
    end
    for (int j = 0; j < N_L2; j++) begin
      s7p4[j] = '0;
      for (int e = 0; e < ELEMS_PER_L2; e++)
        s7p4[j] = s7p4[j] + 12'(s4p4[ELEMS_PER_L2*j+e]);
      s9p4[j] = 14'(s7p4[j]) <<< (2'(a_i.e1_8[j]) + 2'(b_i.e1_8[j]));
    end
    s12p4 = '0;
    for (int j = 0; j < N_L2; j++) s12p4 = s12p4 + 17'(s9p4[j]);
    s14p8 = 23'(s12p4) * signed'({17'd0, man2p4});
  end

  always_ff @(posedge clk) begin
    if (!rst_n) out_valid_o <= 1'b0;
    else        out_valid_o <= in_valid_i;
    nan_o   <= nan;
    e8_o    <= e8;
    s14p8_o <= s14p8;
  end

endmodule
