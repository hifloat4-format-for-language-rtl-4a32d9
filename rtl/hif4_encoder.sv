// hif4_encoder: converts a vector of 64 BF16 values into one HiF4 unit.
//
// The conversion follows the format's three-stage algorithm, one pipeline
// register per stage:
//   stage 1  magnitudes of the 64 inputs go through the 4/2/8 peak tree
//            (hif4_peak_tree), giving 16 local peaks V16, 8 peaks V8 and the
//            global peak Vmax;
//   stage 2  SF = Vmax * (1/7 rounded to BF16), quantised to E6M2; the E6M2
//            reciprocal REC is read from the 4-entry table (hif4_e6m2_rec);
//            E1_8[j]  = (V8[j]  * REC >= 4),
//            E1_16[k] = (V16[k] * REC * 2^-E1_8[k/2] >= 2)
//            (the 2^-E1 factor is an exponent decrement, the "bypass" form
//            of a multiply, so the compare is on the BF16 exponent);
//   stage 3  every element is multiplied by REC, its exponent is reduced
//            by E1_8 + E1_16 of its group, and it is rounded to S1P2 with
//            clamping (hif4_bf16_to_s1p2).
// Every product is a BF16 multiply rounded to BF16 (hif4_bf16_mul), as in
// the algorithm written with BF16 variables, not a fused operation with a
// single rounding. 7 is the largest magnitude the intra-group part can
// express (2^(1+1) * 1.75).
// If any input is Inf or NaN the peak is non-finite, E6M2 becomes NaN and
// the elements are set to zero (the elements of a NaN unit are don't-care in
// the format; zero is this design's choice). BF16 subnormal inputs are
// treated as zero.
// Interface and timing: valid-only pipeline without back-pressure (this
// design's choice; the format gives no handshake). A vector accepted with
// in_valid_i in cycle t appears on unit_o with out_valid_o in cycle t+3; one
// vector per cycle is accepted. clamp_o counts elements clamped to +-1.75 in
// the output unit (status only). Synchronous active-low reset clears the
// valid bits only.
module hif4_encoder
  import hif4_pkg::*;
#(
  parameter round_mode_t ROUND = RND_HALF_EVEN
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    in_valid_i,
  input  bf16_t [N_ELEM-1:0]      vec_i,
  output logic                    out_valid_o,
  output hif4_unit_t              unit_o,
  output logic [6:0]              clamp_o
);

  // ---------------- stage 1: peak tree ----------------
  bf16_t [N_ELEM-1:0]     vec_f;       // subnormals flushed
  logic  [N_ELEM-1:0][14:0] mag;
  logic  [N_L3-1:0][14:0] v16;
  logic  [N_L2-1:0][14:0] v8;
  logic  [14:0]           vmax;

  always_comb begin
    for (int i = 0; i < N_ELEM; i++) begin
      vec_f[i] = (vec_i[i][14:7] == 8'h00) ? {vec_i[i][15], 15'h0} : vec_i[i];
      mag[i]   = vec_f[i][14:0];
    end
  end

  hif4_peak_tree u_peak (.mag_i(mag), .v16_o(v16), .v8_o(v8), .vmax_o(vmax));

  logic                   s1_valid;
  bf16_t [N_ELEM-1:0]     s1_vec;
  logic  [N_L3-1:0][14:0] s1_v16;
  logic  [N_L2-1:0][14:0] s1_v8;
  logic  [14:0]           s1_vmax;

  always_ff @(posedge clk) begin
    if (!rst_n) s1_valid <= 1'b0;
    else        s1_valid <= in_valid_i;
    s1_vec  <= vec_f;
    s1_v16  <= v16;
    s1_v8   <= v8;
    s1_vmax <= vmax;
  end

  // ---------------- stage 2: scaling metadata ----------------
  bf16_t sf;
  e6m2_t e6m2;
  bf16_t rec;
  bf16_t [N_L2-1:0] p8;
  bf16_t [N_L3-1:0] p16;
  logic  [N_L2-1:0] e1_8;
  logic  [N_L3-1:0] e1_16;

  hif4_bf16_mul     #(.ROUND(ROUND)) u_sf  (.a_i({1'b0, s1_vmax}), .b_i(BF16_ONE_SEVENTH), .p_o(sf));
  hif4_bf16_to_e6m2 #(.ROUND(ROUND)) u_e6  (.bf16_i(sf), .e6m2_o(e6m2));
  hif4_e6m2_rec                      u_rec (.e6m2_i(e6m2), .rec_o(rec));

  for (genvar j = 0; j < N_L2; j++) begin : g_l2
    hif4_bf16_mul #(.ROUND(ROUND)) u_m8 (.a_i({1'b0, s1_v8[j]}), .b_i(rec), .p_o(p8[j]));
  end
  for (genvar k = 0; k < N_L3; k++) begin : g_l3
    hif4_bf16_mul #(.ROUND(ROUND)) u_m16 (.a_i({1'b0, s1_v16[k]}), .b_i(rec), .p_o(p16[k]));
  end

  always_comb begin
    // x >= 4.0 <=> biased exponent >= 129; x * 2^-e >= 2.0 <=> exponent >= 128 + e
    for (int j = 0; j < N_L2; j++) e1_8[j] = (p8[j][14:7] >= 8'd129);
    for (int k = 0; k < N_L3; k++)
      e1_16[k] = ({1'b0, p16[k][14:7]} >= 9'd128 + {8'd0, e1_8[k/2]});
  end

  logic               s2_valid;
  bf16_t [N_ELEM-1:0] s2_vec;
  e6m2_t              s2_e6m2;
  bf16_t              s2_rec;
  logic  [N_L2-1:0]   s2_e1_8;
  logic  [N_L3-1:0]   s2_e1_16;

  always_ff @(posedge clk) begin
    if (!rst_n) s2_valid <= 1'b0;
    else        s2_valid <= s1_valid;
    s2_vec   <= s1_vec;
    s2_e6m2  <= e6m2;
    s2_rec   <= rec;
    s2_e1_8  <= e1_8;
    s2_e1_16 <= e1_16;
  end

  // ---------------- stage 3: elements ----------------
  bf16_t [N_ELEM-1:0] p64;
  bf16_t [N_ELEM-1:0] scaled;
  s1p2_t [N_ELEM-1:0] q64;
  logic  [N_ELEM-1:0] clamp;
  logic  [6:0]        clamp_cnt;

  for (genvar i = 0; i < N_ELEM; i++) begin : g_el
    logic [1:0] dec;
    assign dec = 2'(s2_e1_8[i/ELEMS_PER_L2]) + 2'(s2_e1_16[i/ELEMS_PER_L3]);
    hif4_bf16_mul #(.ROUND(ROUND)) u_m64 (.a_i(s2_vec[i]), .b_i(s2_rec), .p_o(p64[i]));
    // multiply by 2^-(E1_8 + E1_16): exponent decrement, zero stays zero
    assign scaled[i] = (p64[i][14:7] <= {6'd0, dec}) ? {p64[i][15], 15'h0}
                     : {p64[i][15], 8'(p64[i][14:7] - {6'd0, dec}), p64[i][6:0]};
    hif4_bf16_to_s1p2 #(.ROUND(ROUND)) u_q (.bf16_i(scaled[i]), .s1p2_o(q64[i]), .clamp_o(clamp[i]));
  end

  always_comb begin
    clamp_cnt = '0;
    for (int i = 0; i < N_ELEM; i++) clamp_cnt = clamp_cnt + 7'(clamp[i]);
  end

  always_ff @(posedge clk) begin
    if (!rst_n) out_valid_o <= 1'b0;
    else        out_valid_o <= s2_valid;
    unit_o.e6m2  <= s2_e6m2;
    unit_o.e1_8  <= s2_e1_8;
    unit_o.e1_16 <= s2_e1_16;
    unit_o.elem  <= (s2_e6m2 == E6M2_NAN) ? '0 : q64;
    clamp_o      <= (s2_e6m2 == E6M2_NAN) ? '0 : clamp_cnt;
  end

endmodule
