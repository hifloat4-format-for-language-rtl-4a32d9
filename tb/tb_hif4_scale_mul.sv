// tb_hif4_scale_mul: all 65536 pairs of E6M2 codes. The product
// (man/16) * 2^e8 must equal the real product of the two scales, the
// mantissa must lie in [1, 3.0625], and NaN must be flagged exactly when an
// operand is 0xFF.
module tb_hif4_scale_mul;
  import hif4_pkg::*;
  import tb_hif4_ref_pkg::*;

  logic clk = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  e6m2_t a, b;
  logic [5:0] man;
  logic signed [7:0] e8;
  logic nan;

  hif4_scale_mul dut (.a_i(a), .b_i(b), .man_o(man), .e8_o(e8), .nan_o(nan));

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < 65536; i++) begin
      a = 8'(i >> 8);
      b = 8'(i);
      #1;
      checks++;
      if (nan !== (a == 8'hFF || b == 8'hFF)) failures++;
      if (a != 8'hFF && b != 8'hFF) begin
        checks += 2;
        if (real'(man) / 16.0 * pow2(int'(e8)) != e6m2_to_real(a) * e6m2_to_real(b)) begin
          failures++;
          if (failures < 20) $display("%h*%h: man %0d e8 %0d", a, b, man, e8);
        end
        if (man < 6'd16 || man > 6'd49) failures++;
      end
      if (i % 256 == 0) @(posedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
