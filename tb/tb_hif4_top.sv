// tb_hif4_top: end-to-end test of the BF16 -> HiF4 -> dot-product path at
// the default (format-defined) sizes. Pairs of random BF16 vectors of
// several shapes are streamed in, mostly back to back with random bubbles.
// For every pair the bench checks
//   - both quantised units, field by field, against the reference
//     conversion, 3 cycles after the input was taken;
//   - the dot product, 4 cycles after the input, exactly against the
//     real-number dot product of the two reference units, and the NaN flag.
// It counts how often each mechanism of the design was exercised: level-2
// and level-3 micro-exponents set, element clamping, E6M2 saturation,
// E6M2 clamping to its minimum, NaN propagation into the dot product, and
// full-rate back-to-back results; one that never happened is a failure. It
// also reports the RMS error of the quantised dot products against the
// unquantised BF16 dot products, divided by |a||b| (information only).
module tb_hif4_top;
  import hif4_pkg::*;
  import tb_hif4_ref_pkg::*;
  import tb_hif4_gen_pkg::*;

  localparam int N_VEC = 2000;

  logic clk = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  int cycle = 0;
  always @(posedge clk) cycle <= cycle + 1;

  logic               rst_n, in_valid;
  bf16_t [N_ELEM-1:0] a, b;
  logic               unit_valid, out_valid, nan;
  hif4_unit_t         ua, ub;
  logic [6:0]         ca, cb;
  logic signed [7:0]  e8;
  logic signed [22:0] s14p8;

  hif4_top dut (.clk, .rst_n, .in_valid_i(in_valid), .a_i(a), .b_i(b),
                .unit_valid_o(unit_valid), .unit_a_o(ua), .unit_b_o(ub),
                .clamp_a_o(ca), .clamp_b_o(cb),
                .out_valid_o(out_valid), .nan_o(nan), .e8_o(e8), .s14p8_o(s14p8));

  typedef struct {
    ref_unit_t ra, rb;
    int        t0;
    real       exact;
    real       norm;   // |a| * |b|
  } item_t;

  item_t uq[$];
  item_t dq[$];
  int n_e1_8 = 0, n_e1_16 = 0, n_clamp = 0, n_sat = 0, n_min = 0, n_nan = 0;
  int n_b2b = 0, n_done = 0, n_err = 0;
  real err_sum = 0.0;
  logic prev_out_valid = 1'b0;

  initial begin
    repeat (N_VEC * 3 + 1000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int pick_kind(input int n);
    if (n % 41 == 7)  return 3;
    if (n % 29 == 3)  return 4;
    if (n % 31 == 11) return 5;
    if (n % 5 == 1)   return 1;
    if (n % 7 == 4)   return 6;
    return 0;
  endfunction

  function automatic bit unit_nan(input ref_unit_t u);
    return u.e6m2 == E6M2_NAN;
  endfunction

  function automatic bit unit_eq(input hif4_unit_t g, input ref_unit_t e, input logic [6:0] c);
    if (g.e6m2 !== e.e6m2) return 0;
    if (e.e6m2 != E6M2_NAN && (g.e1_8 !== e.e1_8 || g.e1_16 !== e.e1_16 || int'(c) != e.clamps)) return 0;
    for (int i = 0; i < N_ELEM; i++) if (g.elem[i] !== e.elem[i]) return 0;
    return 1;
  endfunction

  function automatic real unit_dot(input ref_unit_t x, input ref_unit_t y);
    real s;
    s = 0.0;
    for (int i = 0; i < N_ELEM; i++)
      s += unit_elem(x.e6m2, x.e1_8, x.e1_16, x.elem[i], i)
         * unit_elem(y.e6m2, y.e1_8, y.e1_16, y.elem[i], i);
    return s;
  endfunction

  // driver
  initial begin
    logic [15:0] va [64];
    logic [15:0] vb [64];
    rst_n = 1'b0; in_valid = 1'b0; a = '0; b = '0;
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    for (int n = 0; n < N_VEC; ) begin
      @(posedge clk);
      if ($urandom_range(0, 7) == 0) begin
        in_valid <= 1'b0;
      end else begin
        item_t it;
        rand_vec(pick_kind(n), va);
        rand_vec((n % 3 == 0) ? pick_kind(n + 1) : pick_kind(n), vb);
        for (int i = 0; i < 64; i++) begin a[i] <= va[i]; b[i] <= vb[i]; end
        in_valid <= 1'b1;
        it.ra = ref_encode(va, 0);
        it.rb = ref_encode(vb, 0);
        it.t0 = cycle + 1;     // edge at which the design samples the pair
        it.exact = 0.0;
        begin
          real na, nb;
          na = 0.0; nb = 0.0;
          for (int i = 0; i < 64; i++) begin
            it.exact += bf16_to_real(va[i]) * bf16_to_real(vb[i]);
            na += bf16_to_real(va[i]) * bf16_to_real(va[i]);
            nb += bf16_to_real(vb[i]) * bf16_to_real(vb[i]);
          end
          it.norm = $sqrt(na) * $sqrt(nb);
        end
        uq.push_back(it);
        n++;
      end
    end
    @(posedge clk) in_valid <= 1'b0;
  end

  // monitor
  always @(posedge clk) begin
    if (rst_n && unit_valid) begin
      item_t it;
      it = uq.pop_front();
      checks += 3;
      if (cycle - it.t0 != 3) begin failures++; $display("unit latency %0d", cycle - it.t0); end
      if (!unit_eq(ua, it.ra, ca)) begin failures++; if (failures < 20) $display("unit A mismatch"); end
      if (!unit_eq(ub, it.rb, cb)) begin failures++; if (failures < 20) $display("unit B mismatch"); end
      if (!unit_nan(it.ra)) begin
        if (|it.ra.e1_8) n_e1_8++;
        if (|it.ra.e1_16) n_e1_16++;
        if (it.ra.clamps > 0) n_clamp++;
        if (it.ra.e6m2 == E6M2_MAX) n_sat++;
        if (it.ra.e6m2 == E6M2_MIN) n_min++;
      end
      dq.push_back(it);
    end
    if (rst_n && out_valid) begin
      item_t it;
      bit en;
      real e, got;
      it = dq.pop_front();
      en = unit_nan(it.ra) || unit_nan(it.rb);
      checks += 2;
      if (cycle - it.t0 != 4) begin failures++; $display("dot latency %0d", cycle - it.t0); end
      if (nan !== en) begin failures++; $display("nan flag %b expected %b", nan, en); end
      if (en) n_nan++;
      else begin
        e   = unit_dot(it.ra, it.rb);
        got = real'(s14p8) * pow2(int'(e8) - 8);
        checks++;
        if (got != e) begin
          failures++;
          if (failures < 20) $display("dot %0d: got %g expected %g", n_done, got, e);
        end
        if (it.norm != 0.0 && it.ra.e6m2 != E6M2_MAX && it.rb.e6m2 != E6M2_MAX &&
            it.ra.e6m2 != E6M2_MIN && it.rb.e6m2 != E6M2_MIN) begin
          err_sum += ((got - it.exact) / it.norm) * ((got - it.exact) / it.norm);
          n_err++;
        end
      end
      if (prev_out_valid) n_b2b++;
      n_done++;
      if (n_done == N_VEC) begin
        $display("pairs=%0d e1_8=%0d e1_16=%0d clamp=%0d e6m2_sat=%0d e6m2_min=%0d nan=%0d back_to_back=%0d",
                 n_done, n_e1_8, n_e1_16, n_clamp, n_sat, n_min, n_nan, n_b2b);
        $display("rms dot-product error vs BF16, relative to |a||b| (%0d pairs): %f", n_err, $sqrt(err_sum / n_err));
        checks++;
        if (n_e1_8 == 0 || n_e1_16 == 0 || n_clamp == 0 || n_sat == 0 || n_min == 0 ||
            n_nan == 0 || n_b2b == 0) begin
          failures++; $display("a mechanism was never exercised");
        end
        $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
        $finish;
      end
    end
    prev_out_valid <= out_valid;
  end
endmodule
