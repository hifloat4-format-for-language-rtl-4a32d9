// tb_hif4_dot64: random HiF4 unit pairs (random metadata, random and
// extreme elements) streamed through the dot-product element. Each result
// s14p8 * 2^(e8-8) must equal, exactly, the real-number sum over the 64
// element products, each element taken as E6M2 * 2^(E1_8+E1_16) * S1P2.
// Also checks the NaN flag and the 1-cycle latency, and that the largest
// possible sum (all elements 1.75, all micro-exponents 1) is produced.
module tb_hif4_dot64;
  import hif4_pkg::*;
  import tb_hif4_ref_pkg::*;

  localparam int N_PAIR = 5000;

  logic clk = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic              rst_n, in_valid, out_valid, nan;
  hif4_unit_t        a, b;
  logic signed [7:0] e8;
  logic signed [22:0] s14p8;

  hif4_dot64 dut (.clk, .rst_n, .in_valid_i(in_valid), .a_i(a), .b_i(b),
                  .out_valid_o(out_valid), .nan_o(nan), .e8_o(e8), .s14p8_o(s14p8));

  initial begin
    repeat (N_PAIR * 4 + 1000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic hif4_unit_t rand_unit(input int kind);
    hif4_unit_t u;
    u.e6m2  = 8'($urandom_range(0, 254));
    u.e1_8  = 8'($urandom);
    u.e1_16 = 16'($urandom);
    for (int i = 0; i < N_ELEM; i++) u.elem[i] = 4'($urandom);
    if (kind == 1) begin          // extreme: all max magnitude, all shifts
      u.e1_8 = '1; u.e1_16 = '1;
      for (int i = 0; i < N_ELEM; i++) u.elem[i] = 4'b0111;
    end
    if (kind == 2) u.e6m2 = E6M2_NAN;
    return u;
  endfunction

  function automatic real ref_dot(input hif4_unit_t x, input hif4_unit_t y);
    real s;
    s = 0.0;
    for (int i = 0; i < N_ELEM; i++)
      s += unit_elem(x.e6m2, x.e1_8, x.e1_16, x.elem[i], i)
         * unit_elem(y.e6m2, y.e1_8, y.e1_16, y.elem[i], i);
    return s;
  endfunction

  real exp_val[$];
  bit  exp_nan[$];
  int  n_out = 0, n_nan = 0, n_ext = 0;

  initial begin
    rst_n = 1'b0; in_valid = 1'b0; a = '0; b = '0;
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    for (int n = 0; n < N_PAIR; n++) begin
      hif4_unit_t ua, ub;
      @(posedge clk);
      ua = rand_unit((n % 97 == 1) ? 1 : (n % 89 == 2) ? 2 : 0);
      ub = rand_unit((n % 97 == 1) ? 1 : 0);
      if (n % 97 == 1) begin
        // the negative extreme: A all +1.75, B all -1.75
        for (int i = 0; i < N_ELEM; i++) ub.elem[i] = (n % 2) ? 4'b1111 : 4'b0111;
        n_ext++;
      end
      a <= ua; b <= ub; in_valid <= 1'b1;
      exp_nan.push_back(ua.e6m2 == E6M2_NAN || ub.e6m2 == E6M2_NAN);
      exp_val.push_back((ua.e6m2 == E6M2_NAN || ub.e6m2 == E6M2_NAN) ? 0.0 : ref_dot(ua, ub));
      @(posedge clk);
      in_valid <= 1'b0;
      // result registered at the edge after the one that sampled the inputs
      @(posedge clk);
      checks++;
      if (!out_valid) begin failures++; $display("no result after 1 cycle"); end
    end
    repeat (2) @(posedge clk);
    checks++;
    if (n_out != N_PAIR || n_nan == 0 || n_ext == 0) begin
      failures++; $display("results %0d nan %0d extremes %0d", n_out, n_nan, n_ext);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) begin
    if (rst_n && out_valid) begin
      real e, got;
      bit  en;
      e  = exp_val.pop_front();
      en = exp_nan.pop_front();
      checks++;
      if (nan !== en) begin failures++; $display("nan flag %b exp %b", nan, en); end
      if (!en) begin
        got = real'(s14p8) * pow2(int'(e8) - 8);
        checks++;
        if (got != e) begin
          failures++;
          if (failures < 20) $display("pair %0d: got %g expected %g", n_out, got, e);
        end
      end else n_nan++;
      n_out++;
    end
  end
endmodule
