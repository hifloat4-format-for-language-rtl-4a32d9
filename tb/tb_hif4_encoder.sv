// tb_hif4_encoder: streams random BF16 vectors (several shapes, random
// bubbles) through the encoder, compares every output unit field by field
// with the reference conversion, and checks the 3-cycle latency and the
// clamp count. A second encoder built for round-half-away-from-zero runs on
// the same stream and is checked against the reference in that mode.
module tb_hif4_encoder;
  import hif4_pkg::*;
  import tb_hif4_ref_pkg::*;
  import tb_hif4_gen_pkg::*;

  localparam int N_VEC = 3000;
  localparam int LATENCY = 3;

  logic clk = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  int cycle = 0;
  always @(posedge clk) cycle <= cycle + 1;

  logic               rst_n;
  logic               in_valid;
  bf16_t [N_ELEM-1:0] vec;
  logic               out_valid;
  hif4_unit_t         unit;
  logic [6:0]         clamp;

  hif4_encoder dut (.clk, .rst_n, .in_valid_i(in_valid), .vec_i(vec),
                    .out_valid_o(out_valid), .unit_o(unit), .clamp_o(clamp));

  logic       out_valid_aw;
  hif4_unit_t unit_aw;
  logic [6:0] clamp_aw;
  hif4_encoder #(.ROUND(RND_HALF_AWAY)) dut_aw (
    .clk, .rst_n, .in_valid_i(in_valid), .vec_i(vec),
    .out_valid_o(out_valid_aw), .unit_o(unit_aw), .clamp_o(clamp_aw));
  ref_unit_t exp_aw_q[$];
  int        n_aw_diff = 0;   // units where the two modes differ

  ref_unit_t exp_q[$];
  int        t_in[$];
  int        n_out = 0;
  int        n_e1_8 = 0, n_e1_16 = 0, n_clamp = 0, n_nan = 0, n_sat = 0, n_min = 0;

  initial begin
    repeat (N_VEC * 3 + 1000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // driver
  initial begin
    logic [15:0] v [64];
    rst_n = 1'b0; in_valid = 1'b0; vec = '0;
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    for (int n = 0; n < N_VEC; ) begin
      @(posedge clk);
      if ($urandom_range(0, 3) == 0) begin
        in_valid <= 1'b0;
      end else begin
        rand_vec((n % 23 == 5) ? 3 : (n % 17 == 3) ? 4 : (n % 19 == 7) ? 5 :
                 (n % 13 == 2) ? 2 : (n % 5 == 1) ? 1 : (n % 7 == 4) ? 6 : 0, v);
        for (int i = 0; i < 64; i++) vec[i] <= v[i];
        in_valid <= 1'b1;
        exp_q.push_back(ref_encode(v, 0));
        exp_aw_q.push_back(ref_encode(v, 1));
        t_in.push_back(cycle + 1);  // edge at which the DUT samples it
        n++;
      end
    end
    @(posedge clk) in_valid <= 1'b0;
  end

  // monitor
  always @(posedge clk) begin
    if (rst_n && out_valid) begin
      ref_unit_t e;
      int t0;
      e  = exp_q.pop_front();
      t0 = t_in.pop_front();
      begin
        ref_unit_t ea;
        bit        same;
        ea = exp_aw_q.pop_front();
        checks++;
        if (!out_valid_aw || unit_aw.e6m2 !== ea.e6m2) begin
          failures++; if (failures < 20) $display("away unit %0d e6m2 %h exp %h", n_out, unit_aw.e6m2, ea.e6m2);
        end
        same = (ea.e6m2 == e.e6m2);
        if (ea.e6m2 != E6M2_NAN) begin
          checks += 2;
          if (unit_aw.e1_8 !== ea.e1_8 || unit_aw.e1_16 !== ea.e1_16) failures++;
          if (int'(clamp_aw) != ea.clamps) failures++;
          same = same && ea.e1_8 == e.e1_8 && ea.e1_16 == e.e1_16;
        end
        for (int i = 0; i < N_ELEM; i++) begin
          checks++;
          if (unit_aw.elem[i] !== ea.elem[i]) begin
            failures++; if (failures < 20) $display("away unit %0d elem %0d %h exp %h", n_out, i, unit_aw.elem[i], ea.elem[i]);
          end
          if (ea.elem[i] != e.elem[i]) same = 0;
        end
        if (!same) n_aw_diff++;
      end
      checks++;
      if (cycle - t0 != LATENCY) begin
        failures++; $display("latency %0d", cycle - t0);
      end
      checks++;
      if (unit.e6m2 !== e.e6m2) begin
        failures++; if (failures < 20) $display("unit %0d e6m2 %h exp %h", n_out, unit.e6m2, e.e6m2);
      end
      if (e.e6m2 != E6M2_NAN) begin
        checks += 3;
        if (unit.e1_8 !== e.e1_8) begin
          failures++; if (failures < 20) $display("unit %0d e1_8 %h exp %h", n_out, unit.e1_8, e.e1_8);
        end
        if (unit.e1_16 !== e.e1_16) begin
          failures++; if (failures < 20) $display("unit %0d e1_16 %h exp %h", n_out, unit.e1_16, e.e1_16);
        end
        if (int'(clamp) != e.clamps) begin
          failures++; if (failures < 20) $display("unit %0d clamps %0d exp %0d", n_out, clamp, e.clamps);
        end
      end else n_nan++;
      for (int i = 0; i < N_ELEM; i++) begin
        checks++;
        if (unit.elem[i] !== e.elem[i]) begin
          failures++;
          if (failures < 20) $display("unit %0d elem %0d %h exp %h", n_out, i, unit.elem[i], e.elem[i]);
        end
      end
      if (e.e6m2 != E6M2_NAN) begin
        if (|e.e1_8) n_e1_8++;
        if (|e.e1_16) n_e1_16++;
        if (e.clamps > 0) n_clamp++;
        if (e.e6m2 == E6M2_MAX) n_sat++;
        if (e.e6m2 == E6M2_MIN) n_min++;
      end
      n_out++;
      if (n_out == N_VEC) begin
        $display("units=%0d with_e1_8=%0d with_e1_16=%0d with_clamp=%0d nan=%0d sat=%0d min=%0d mode_differs=%0d",
                 n_out, n_e1_8, n_e1_16, n_clamp, n_nan, n_sat, n_min, n_aw_diff);
        checks++;
        if (n_e1_8 == 0 || n_e1_16 == 0 || n_clamp == 0 || n_nan == 0 || n_sat == 0 || n_min == 0 ||
            n_aw_diff == 0) begin
          failures++; $display("a conversion case was never exercised");
        end
        $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
        $finish;
      end
    end
  end
endmodule
