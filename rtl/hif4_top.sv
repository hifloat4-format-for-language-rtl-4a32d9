// hif4_top: BF16 operands in, HiF4 dot product out.
//
// Two BF16-to-HiF4 encoders quantise a 64-element slice of operand A and of
// operand B (for instance an activation row and a weight column), and the
// resulting units feed the 64-length HiF4 dot-product element. This is the
// path the format is built for: both weights and activations are quantised
// to HiF4 before a matrix multiplication, and one pair of 64-element units
// exactly fills a 64-wide dot-product element. Wiring the two encoders
// straight to the element is this design's choice; in a real accelerator
// the units would normally be stored and reused.
// The quantised units are also brought out (unit_a_o, unit_b_o) so that they
// can be written back to memory, and the element's accumulation, whose
// format is not specified, is left to the consumer of e8_o/s14p8_o.
// Timing: in_valid_i in cycle t -> units valid (unit_valid_o) in t+3 ->
// dot product valid (out_valid_o) in t+4; one operand pair per cycle.
// The result value is s14p8_o * 2^(e8_o - 8), or NaN when nan_o is set.
module hif4_top
  import hif4_pkg::*;
#(
  parameter round_mode_t ROUND = RND_HALF_EVEN
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               in_valid_i,
  input  bf16_t [N_ELEM-1:0] a_i,
  input  bf16_t [N_ELEM-1:0] b_i,
  output logic               unit_valid_o,
  output hif4_unit_t         unit_a_o,
  output hif4_unit_t         unit_b_o,
  output logic [6:0]         clamp_a_o,
  output logic [6:0]         clamp_b_o,
  output logic               out_valid_o,
  output logic               nan_o,
  output logic signed [7:0]  e8_o,
  output logic signed [22:0] s14p8_o
);

  logic valid_a, valid_b;

  hif4_encoder #(.ROUND(ROUND)) u_enc_a (
    .clk, .rst_n, .in_valid_i, .vec_i(a_i),
    .out_valid_o(valid_a), .unit_o(unit_a_o), .clamp_o(clamp_a_o));

  hif4_encoder #(.ROUND(ROUND)) u_enc_b (
    .clk, .rst_n, .in_valid_i, .vec_i(b_i),
    .out_valid_o(valid_b), .unit_o(unit_b_o), .clamp_o(clamp_b_o));

  assign unit_valid_o = valid_a & valid_b;

  hif4_dot64 u_dot (
    .clk, .rst_n, .in_valid_i(unit_valid_o), .a_i(unit_a_o), .b_i(unit_b_o),
    .out_valid_o, .nan_o, .e8_o, .s14p8_o);

  // Both encoders see the same valid stream, so they stay in lock step.
  always_ff @(posedge clk)
    if (rst_n) assert (valid_a == valid_b) else $error("encoder valid mismatch");

endmodule
