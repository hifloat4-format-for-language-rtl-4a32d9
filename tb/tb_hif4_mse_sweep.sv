// tb_hif4_mse_sweep: quantisation-error sweep over data scale, run on the
// RTL encoder.
//
// A base matrix of zero-mean Gaussian samples with standard deviation 0.01
// is drawn (Box-Muller on $urandom) and rounded to BF16; it is then scaled
// by 2^x for x = 0..17, which in BF16 is an exact exponent shift, giving
// sigma = 0.01 * 2^x as in the reference experiment of the format. Each
// scaled matrix is converted 64 elements at a time by hif4_encoder, every
// output unit is checked against the reference conversion, and the mean
// squared error of the decoded HiF4 values against the BF16 inputs is
// accumulated.
// Because every step of the conversion commutes with a power-of-two
// scaling as long as the E6M2 scale stays in range, MSE / sigma^2 must be
// the same for every x: the format needs no per-tensor pre-scaling. The
// bench checks that equality (to 1e-9 relative) and prints the normalised
// MSE. Each matrix has N_UNITS x 64 = 1024 x 1024 elements, the size of
// the reference experiment.
module tb_hif4_mse_sweep;
  import hif4_pkg::*;
  import tb_hif4_ref_pkg::*;

  localparam int N_UNITS = 16384;  // 64-element units per scale (1024 x 1024)
  localparam int N_X     = 18;

  logic clk = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic               rst_n, in_valid, out_valid;
  bf16_t [N_ELEM-1:0] vec;
  hif4_unit_t         unit;
  logic [6:0]         clamp;

  hif4_encoder dut (.clk, .rst_n, .in_valid_i(in_valid), .vec_i(vec),
                    .out_valid_o(out_valid), .unit_o(unit), .clamp_o(clamp));

  logic [15:0] base [N_UNITS][64];
  real         mse [N_X];

  initial begin
    repeat (N_X * (N_UNITS + 10) * 2 + 1000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic real gauss();
    real u1, u2;
    u1 = (real'($urandom) + 1.0) / 4294967297.0;
    u2 = real'($urandom) / 4294967296.0;
    return $sqrt(-2.0 * $ln(u1)) * $cos(6.283185307179586 * u2);
  endfunction

  function automatic logic [15:0] shift_bf16(input logic [15:0] b, input int x);
    if (b[14:7] == 8'h00) return b;
    return {b[15], 8'(int'(b[14:7]) + x), b[6:0]};
  endfunction

  initial begin
    logic [15:0] v [64];
    ref_unit_t   e;
    real         se;
    int          sent, got;
    for (int u = 0; u < N_UNITS; u++)
      for (int i = 0; i < 64; i++) base[u][i] = real_to_bf16(0.01 * gauss(), 0);
    rst_n = 1'b0; in_valid = 1'b0; vec = '0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int x = 0; x < N_X; x++) begin
      se = 0.0; sent = 0; got = 0;
      while (got < N_UNITS) begin
        @(posedge clk);
        // collect a result produced by the previous edge
        if (out_valid) begin
          for (int i = 0; i < 64; i++) v[i] = shift_bf16(base[got][i], x);
          e = ref_encode(v, 0);
          checks++;
          if (unit.e6m2 !== e.e6m2 || unit.e1_8 !== e.e1_8 || unit.e1_16 !== e.e1_16) begin
            failures++; if (failures < 10) $display("x=%0d unit %0d metadata mismatch", x, got);
          end
          for (int i = 0; i < 64; i++) begin
            real d;
            if (unit.elem[i] !== e.elem[i]) failures++;
            d = unit_elem(unit.e6m2, unit.e1_8, unit.e1_16, unit.elem[i], i) - bf16_to_real(v[i]);
            se += d * d;
          end
          got++;
        end
        if (sent < N_UNITS) begin
          for (int i = 0; i < 64; i++) vec[i] <= shift_bf16(base[sent][i], x);
          in_valid <= 1'b1;
          sent++;
        end else in_valid <= 1'b0;
      end
      mse[x] = se / (64.0 * N_UNITS);
      $display("x=%2d sigma=%g  MSE=%g  MSE/sigma^2=%f", x, 0.01 * pow2(x), mse[x],
               mse[x] / (0.0001 * pow2(2 * x)));
    end
    for (int x = 1; x < N_X; x++) begin
      real r;
      r = mse[x] / pow2(2 * x) / mse[0];
      checks++;
      if (r < 1.0 - 1e-9 || r > 1.0 + 1e-9) begin
        failures++; $display("normalised MSE at x=%0d differs from x=0 by ratio %f", x, r);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
