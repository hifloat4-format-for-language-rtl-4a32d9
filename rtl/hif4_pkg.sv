// hif4_pkg: shared types, constants and rounding helper of the HiF4 datapath.
//
// HiF4 is a 4.5-bit/value block floating-point format. One unit holds 64
// sign-magnitude S1P2 elements (4 bits each) and 32 bits of scaling metadata
// arranged as a three-level hierarchy:
//   level 1: one unsigned E6M2 scale (6-bit exponent, bias 48, 2-bit mantissa
//            with hidden 1, no zero/infinity, 0xFF = NaN),
//   level 2: eight 1-bit micro-exponents E1_8, each covering 8 elements,
//   level 3: sixteen 1-bit micro-exponents E1_16, each covering 4 elements.
// Element i (0-based) represents
//   E6M2 * 2^(E1_8[i/8] + E1_16[i/4]) * S1P2[i].
// These numbers follow the format definition. The packing of the fields
// into the 288-bit hif4_unit_t struct (field order, element 0 in the lowest
// slot, sign in bit 3 of an element) is this design's own choice.
package hif4_pkg;

  // Format geometry
  localparam int unsigned N_ELEM = 64;  // elements per unit
  localparam int unsigned N_L2   = 8;   // level-2 micro-exponents
  localparam int unsigned N_L3   = 16;  // level-3 micro-exponents
  localparam int unsigned ELEMS_PER_L2 = N_ELEM / N_L2;  // 8
  localparam int unsigned ELEMS_PER_L3 = N_ELEM / N_L3;  // 4

  // E6M2 constants
  localparam int unsigned E6M2_BIAS = 48;
  localparam logic [7:0]  E6M2_NAN  = 8'hFF;  // 111111_11
  localparam logic [7:0]  E6M2_MAX  = 8'hFE;  // 111111_10 = 2^15 * 1.50
  localparam logic [7:0]  E6M2_MIN  = 8'h00;  // 000000_00 = 2^-48 * 1.00

  // BF16 constants
  localparam int unsigned BF16_BIAS = 127;
  localparam logic [15:0] BF16_ONE_SEVENTH = 16'h3E12;  // (1/7) rounded to BF16 = 0.142578125

  typedef logic [15:0] bf16_t;  // {sign, exp[7:0], man[6:0]}
  typedef logic [7:0]  e6m2_t;  // {exp[5:0], man[1:0]}
  typedef logic [3:0]  s1p2_t;  // {sign, int, frac[1:0]}

  // One HiF4 unit: 32 metadata bits + 64 x 4 element bits.
  typedef struct packed {
    e6m2_t                  e6m2;
    logic [N_L2-1:0]        e1_8;   // bit j covers elements 8j .. 8j+7
    logic [N_L3-1:0]        e1_16;  // bit k covers elements 4k .. 4k+3
    s1p2_t [N_ELEM-1:0]     elem;   // elem[i] is element i
  } hif4_unit_t;

  // Rounding of every conversion step. The format allows either mode.
  typedef enum logic {
    RND_HALF_EVEN = 1'b0,
    RND_HALF_AWAY = 1'b1
  } round_mode_t;

  // Round-up decision for a magnitude truncated at bit `lsb` with the next
  // bit `guard` and the OR of all lower bits `sticky`.
  function automatic logic round_up(input round_mode_t mode, input logic lsb,
                                    input logic guard, input logic sticky);
    if (mode == RND_HALF_AWAY) return guard;
    return guard & (sticky | lsb);
  endfunction

endpackage
