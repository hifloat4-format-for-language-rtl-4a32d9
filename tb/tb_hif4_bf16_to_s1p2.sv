// tb_hif4_bf16_to_s1p2: every BF16 code with exponent 100..140 (covering
// zero-rounding, all quarters, ties and clamping), in both rounding modes,
// against the real-number reference.
module tb_hif4_bf16_to_s1p2;
  import hif4_pkg::*;
  import tb_hif4_ref_pkg::*;

  logic clk = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  bf16_t x;
  s1p2_t q_even, q_away;
  logic  c_even, c_away;

  hif4_bf16_to_s1p2 #(.ROUND(RND_HALF_EVEN)) dut_e (.bf16_i(x), .s1p2_o(q_even), .clamp_o(c_even));
  hif4_bf16_to_s1p2 #(.ROUND(RND_HALF_AWAY)) dut_a (.bf16_i(x), .s1p2_o(q_away), .clamp_o(c_away));

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int n_clamp = 0;
    real v;
    s1p2_t ee, ea;
    for (int c = 0; c < 2 * 41 * 128 + 2; c++) begin
      if (c < 2 * 41 * 128) x = {1'(c / (41 * 128)), 8'(100 + (c / 128) % 41), 7'(c % 128)};
      else x = (c % 2) ? 16'h0000 : 16'h8000;
      #1;
      v  = bf16_to_real(x);
      ee = real_to_s1p2(v, x[15], 0);
      ea = real_to_s1p2(v, x[15], 1);
      checks += 3;
      if (q_even !== ee) begin failures++; if (failures < 20) $display("even %h -> %h exp %h", x, q_even, ee); end
      if (q_away !== ea) begin failures++; if (failures < 20) $display("away %h -> %h exp %h", x, q_away, ea); end
      if (c_even !== (rnd_int((v < 0.0 ? -v : v) * 4.0, 0) > 7.0)) failures++;
      if (c_even) n_clamp++;
      if (c % 64 == 0) @(posedge clk);
    end
    // 0.375 is a tie between 0.25 and 0.5
    x = 16'h3EC0; #1; checks += 2;
    if (q_even !== 4'b0010) failures++;
    if (q_away !== 4'b0010) failures++;
    x = 16'h3E40; #1; checks += 2;  // 0.1875 -> 0.25 in both
    if (q_even !== 4'b0001 || q_away !== 4'b0001) failures += 2;
    x = 16'hBF20; #1; checks += 2;  // -0.625 tie: even -> -0.5, away -> -0.75
    if (q_even !== 4'b1010) failures++;
    if (q_away !== 4'b1011) failures++;
    $display("clamped=%0d", n_clamp);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
