// tb_hif4_ref_pkg: reference model of the HiF4 conversion and dot product,
// written with real-number arithmetic so that it shares no code or
// structure with the integer RTL. Real (double) precision holds every
// intermediate exactly: BF16 products need 16 significant bits, and HiF4
// dot products are short sums of small dyadic numbers.
package tb_hif4_ref_pkg;

  // round(x) to an integer with the given tie rule (x >= 0)
  function automatic real rnd_int(input real x, input bit away);
    real f, fr;
    f  = $floor(x);
    fr = x - f;
    if (fr > 0.5) return f + 1.0;
    if (fr < 0.5) return f;
    if (away) return f + 1.0;
    return ($floor(f / 2.0) * 2.0 == f) ? f : f + 1.0;
  endfunction

  function automatic real pow2(input int e);
    real r;
    r = 1.0;
    if (e >= 0) for (int i = 0; i < e; i++) r = r * 2.0;
    else        for (int i = 0; i < -e; i++) r = r / 2.0;
    return r;
  endfunction

  // floor(log2(x)) for x > 0
  function automatic int ilog2(input real x);
    int e;
    e = 0;
    while (x >= 2.0) begin x = x / 2.0; e++; end
    while (x < 1.0)  begin x = x * 2.0; e--; end
    return e;
  endfunction

  // round |x| to a significand of nbits bits (hidden bit included)
  function automatic real rnd_sig(input real x, input int nbits, input bit away);
    int  e;
    real m;
    if (x == 0.0) return 0.0;
    e = ilog2(x);
    m = rnd_int(x / pow2(e - nbits + 1), away);
    return m * pow2(e - nbits + 1);
  endfunction

  function automatic bit bf16_finite(input logic [15:0] b);
    return b[14:7] != 8'hFF;
  endfunction

  // BF16 to real, subnormals read as zero
  function automatic real bf16_to_real(input logic [15:0] b);
    real v;
    if (b[14:7] == 8'h00) return 0.0;
    v = (128.0 + real'(b[6:0])) * pow2(int'(b[14:7]) - 127 - 7);
    return b[15] ? -v : v;
  endfunction

  // real to BF16 with rounding, flush below 2^-126, Inf above range
  function automatic logic [15:0] real_to_bf16(input real x, input bit away);
    logic s;
    real  a, r;
    int   e;
    s = (x < 0.0);
    a = s ? -x : x;
    r = rnd_sig(a, 8, away);
    if (r == 0.0) return {s, 15'h0};
    e = ilog2(r);
    if (e < -126) return {s, 15'h0};
    if (e > 127)  return {s, 8'hFF, 7'h0};
    return {s, 8'(e + 127), 7'(int'(r / pow2(e - 7)) - 128)};
  endfunction

  // BF16-rounded product of two reals
  function automatic real mul_bf16(input real a, input real b, input bit away);
    return bf16_to_real(real_to_bf16(a * b, away));
  endfunction

  function automatic real e6m2_to_real(input logic [7:0] c);
    return (1.0 + real'(c[1:0]) / 4.0) * pow2(int'(c[7:2]) - 48);
  endfunction

  // Quantise a non-negative real scale to E6M2 (saturating, clamp to min)
  function automatic logic [7:0] real_to_e6m2(input real x, input bit away);
    real r;
    int  e;
    int  m;
    if (x == 0.0) return 8'h00;
    r = rnd_sig(x, 3, away);
    e = ilog2(r);
    m = int'(r / pow2(e - 2)) - 4;
    if (e > 15 || (e == 15 && m == 3)) return 8'hFE;
    if (e < -48) return 8'h00;
    return {6'(e + 48), 2'(m)};
  endfunction

  // Round a real to S1P2 (sign-magnitude, quarters, clamp 1.75)
  function automatic logic [3:0] real_to_s1p2(input real x, input bit neg, input bit away);
    real a, q;
    a = (x < 0.0) ? -x : x;
    q = rnd_int(a * 4.0, away);
    if (q > 7.0) q = 7.0;
    return {neg, 3'(int'(q))};
  endfunction

  function automatic real s1p2_to_real(input logic [3:0] c);
    real v;
    v = real'(c[2:0]) / 4.0;
    return c[3] ? -v : v;
  endfunction

  typedef struct {
    logic [7:0]  e6m2;
    logic [7:0]  e1_8;
    logic [15:0] e1_16;
    logic [3:0]  elem [64];
    int          clamps;
  } ref_unit_t;

  // Reference BF16 -> HiF4 conversion, written from the algorithm text.
  function automatic ref_unit_t ref_encode(input logic [15:0] v [64], input bit away);
    ref_unit_t u;
    real x [64];
    real v16 [16];
    real v8 [8];
    real vmax, sf, rec, t, scaled;
    bit  bad;
    bad = 0;
    for (int i = 0; i < 64; i++) begin
      if (!bf16_finite(v[i])) bad = 1;
      x[i] = bf16_to_real(v[i]);
    end
    u.clamps = 0;
    if (bad) begin
      u.e6m2 = 8'hFF; u.e1_8 = '0; u.e1_16 = '0;
      for (int i = 0; i < 64; i++) u.elem[i] = 4'h0;
      return u;
    end
    for (int k = 0; k < 16; k++) begin
      v16[k] = 0.0;
      for (int e = 0; e < 4; e++) begin
        t = (x[4*k+e] < 0.0) ? -x[4*k+e] : x[4*k+e];
        if (t > v16[k]) v16[k] = t;
      end
    end
    vmax = 0.0;
    for (int j = 0; j < 8; j++) begin
      v8[j] = (v16[2*j] > v16[2*j+1]) ? v16[2*j] : v16[2*j+1];
      if (v8[j] > vmax) vmax = v8[j];
    end
    sf     = mul_bf16(vmax, 0.142578125, away);      // (1/7) rounded to BF16
    u.e6m2 = real_to_e6m2(sf, away);
    rec    = bf16_to_real(real_to_bf16(1.0 / e6m2_to_real(u.e6m2), 0));
    for (int j = 0; j < 8; j++) u.e1_8[j] = (mul_bf16(v8[j], rec, away) >= 4.0);
    for (int k = 0; k < 16; k++)
      u.e1_16[k] = (mul_bf16(v16[k], rec, away) * pow2(-int'(u.e1_8[k/2])) >= 2.0);
    for (int i = 0; i < 64; i++) begin
      scaled = mul_bf16(x[i], rec, away) * pow2(-int'(u.e1_8[i/8]) - int'(u.e1_16[i/4]));
      u.elem[i] = real_to_s1p2(scaled, v[i][15], away);
      if (rnd_int(((scaled < 0.0) ? -scaled : scaled) * 4.0, away) > 7.0) u.clamps++;
    end
    return u;
  endfunction

  // Value of element i of a unit (NaN scale not handled here)
  function automatic real unit_elem(input logic [7:0] e6m2, input logic [7:0] e1_8,
                                    input logic [15:0] e1_16, input logic [3:0] c, input int i);
    return e6m2_to_real(e6m2) * pow2(int'(e1_8[i/8]) + int'(e1_16[i/4])) * s1p2_to_real(c);
  endfunction

endpackage
