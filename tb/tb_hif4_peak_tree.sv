// tb_hif4_peak_tree: random 64-element magnitude vectors (with ties and with
// zero runs) against maxima computed by a direct scan of each group.
module tb_hif4_peak_tree;
  import hif4_pkg::*;

  logic clk = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic [N_ELEM-1:0][14:0] mag;
  logic [N_L3-1:0][14:0]   v16;
  logic [N_L2-1:0][14:0]   v8;
  logic [14:0]             vmax;

  hif4_peak_tree dut (.mag_i(mag), .v16_o(v16), .v8_o(v8), .vmax_o(vmax));

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [14:0] e16, e8, em;
    for (int t = 0; t < 2000; t++) begin
      for (int i = 0; i < N_ELEM; i++) begin
        case (t % 4)
          0: mag[i] = 15'($urandom);
          1: mag[i] = 15'($urandom_range(0, 7));           // many ties
          2: mag[i] = (i == (t / 4) % 64) ? 15'h7F80 : 15'($urandom_range(0, 16'h4000));
          default: mag[i] = ($urandom_range(0, 3) == 0) ? 15'($urandom) : 15'h0;
        endcase
      end
      @(posedge clk);
      em = 0;
      for (int k = 0; k < N_L3; k++) begin
        e16 = 0;
        for (int i = 4*k; i < 4*k+4; i++) if (mag[i] > e16) e16 = mag[i];
        checks++;
        if (v16[k] !== e16) begin failures++; $display("v16[%0d] %h exp %h", k, v16[k], e16); end
      end
      for (int j = 0; j < N_L2; j++) begin
        e8 = 0;
        for (int i = 8*j; i < 8*j+8; i++) if (mag[i] > e8) e8 = mag[i];
        if (e8 > em) em = e8;
        checks++;
        if (v8[j] !== e8) begin failures++; $display("v8[%0d] %h exp %h", j, v8[j], e8); end
      end
      checks++;
      if (vmax !== em) begin failures++; $display("vmax %h exp %h", vmax, em); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
