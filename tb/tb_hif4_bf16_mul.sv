// tb_hif4_bf16_mul: products of random BF16 operands, in both rounding
// modes, against the real-arithmetic reference; plus zero, subnormal,
// infinity/NaN, exponent overflow and underflow cases.
module tb_hif4_bf16_mul;
  import hif4_pkg::*;
  import tb_hif4_ref_pkg::*;

  logic clk = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  bf16_t a, b, p_even, p_away;

  hif4_bf16_mul #(.ROUND(RND_HALF_EVEN)) dut_e (.a_i(a), .b_i(b), .p_o(p_even));
  hif4_bf16_mul #(.ROUND(RND_HALF_AWAY)) dut_a (.a_i(a), .b_i(b), .p_o(p_away));

  int ties = 0;

  task automatic check(input bf16_t got, input bf16_t exp, input string tag);
    checks++;
    if (got !== exp) begin
      failures++;
      if (failures < 20) $display("%s: %h * %h = %h, expected %h", tag, a, b, got, exp);
    end
  endtask

  function automatic bf16_t ref_mul(input bf16_t x, input bf16_t y, input bit away);
    bf16_t m;
    if (!bf16_finite(x) || !bf16_finite(y)) return 16'h7FC0;
    m = real_to_bf16(bf16_to_real({1'b0, x[14:0]}) * bf16_to_real({1'b0, y[14:0]}), away);
    return {x[15] ^ y[15], m[14:0]};
  endfunction

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 20000; t++) begin
      a = 16'($urandom);
      b = 16'($urandom);
      if (t % 3 != 0) begin  // keep most products in range
        a[14:7] = 8'($urandom_range(70, 180));
        b[14:7] = 8'($urandom_range(70, 180));
      end
      if (t % 50 == 0) a[14:7] = 8'h00;
      if (t % 77 == 0) b[14:7] = 8'hFF;
      #1;
      if (bf16_finite(a) && bf16_finite(b) && a[14:7] != 0 && b[14:7] != 0) begin
        // count exact ties (9th significant bit set, rest zero)
        logic [15:0] pr;
        pr = {1'b1, a[6:0]} * {1'b1, b[6:0]};
        if (pr[15] ? (pr[7:0] == 8'h80) : (pr[6:0] == 7'h40)) ties++;
      end
      check(p_even, ref_mul(a, b, 0), "even");
      check(p_away, ref_mul(a, b, 1), "away");
      @(posedge clk);
    end
    // directed: 1.5 * 1.5 ties etc.
    a = 16'h3FC0; b = 16'h3F81; #1; check(p_even, ref_mul(a, b, 0), "even"); check(p_away, ref_mul(a, b, 1), "away");
    a = 16'h7F7F; b = 16'h7F7F; #1; check(p_even, 16'h7F80, "ovf");
    a = 16'h0080; b = 16'h0080; #1; check(p_even, 16'h0000, "unf");
    a = 16'hBF80; b = 16'h3E12; #1; check(p_even, 16'hBE12, "neg");
    checks++;
    if (ties == 0) begin failures++; $display("no rounding tie exercised"); end
    $display("ties exercised: %0d", ties);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
