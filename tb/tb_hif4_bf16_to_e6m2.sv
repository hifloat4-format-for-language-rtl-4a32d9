// tb_hif4_bf16_to_e6m2: every positive BF16 code (and a sample of negative
// ones) converted in both rounding modes and compared with the real-number
// reference: rounding to a 3-bit significand, saturation above 2^15*1.5,
// clamping below 2^-48, NaN for Inf/NaN inputs.
module tb_hif4_bf16_to_e6m2;
  import hif4_pkg::*;
  import tb_hif4_ref_pkg::*;

  logic clk = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  bf16_t x;
  e6m2_t q_even, q_away;

  hif4_bf16_to_e6m2 #(.ROUND(RND_HALF_EVEN)) dut_e (.bf16_i(x), .e6m2_o(q_even));
  hif4_bf16_to_e6m2 #(.ROUND(RND_HALF_AWAY)) dut_a (.bf16_i(x), .e6m2_o(q_away));

  function automatic e6m2_t ref_q(input bf16_t b, input bit away);
    real v;
    if (!bf16_finite(b)) return 8'hFF;
    v = bf16_to_real(b);
    if (v < 0.0) v = -v;
    return real_to_e6m2(v, away);
  endfunction

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int n_sat = 0, n_min = 0, n_nan = 0;
    for (int c = 0; c < 32768 + 512; c++) begin
      x = (c < 32768) ? 16'(c) : {1'b1, 15'($urandom)};
      #1;
      checks += 2;
      if (q_even !== ref_q(x, 0)) begin
        failures++;
        if (failures < 20) $display("even %h -> %h exp %h", x, q_even, ref_q(x, 0));
      end
      if (q_away !== ref_q(x, 1)) begin
        failures++;
        if (failures < 20) $display("away %h -> %h exp %h", x, q_away, ref_q(x, 1));
      end
      if (q_even == 8'hFE && x[14:7] > 8'd142) n_sat++;
      if (q_even == 8'h00 && x[14:7] < 8'd79) n_min++;
      if (q_even == 8'hFF) n_nan++;
      if (c % 64 == 0) @(posedge clk);
    end
    // directed values from the format table
    x = 16'h4740; #1; checks++; if (q_even !== 8'hFE) failures++;  // 2^15*1.5
    x = 16'h2780; #1; checks++; if (q_even !== 8'h00) failures++;  // 2^-48
    x = 16'h3FA0; #1; checks++; if (q_even !== 8'hC1) failures++;  // 1.25
    checks++;
    if (n_sat == 0 || n_min == 0 || n_nan == 0) failures++;
    $display("saturated=%0d clamped_to_min=%0d nan=%0d", n_sat, n_min, n_nan);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
