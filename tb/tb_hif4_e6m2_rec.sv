// tb_hif4_e6m2_rec: all 256 E6M2 codes; the reciprocal must equal 1/value
// rounded to the nearest BF16, and NaN must map to NaN.
module tb_hif4_e6m2_rec;
  import hif4_pkg::*;
  import tb_hif4_ref_pkg::*;

  logic clk = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  e6m2_t c;
  bf16_t r;

  hif4_e6m2_rec dut (.e6m2_i(c), .rec_o(r));

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    bf16_t e;
    for (int i = 0; i < 256; i++) begin
      c = 8'(i);
      @(posedge clk);
      e = (c == 8'hFF) ? 16'h7FC0 : real_to_bf16(1.0 / e6m2_to_real(c), 0);
      checks++;
      if (r !== e) begin failures++; $display("rec(%h) = %h expected %h", c, r, e); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
