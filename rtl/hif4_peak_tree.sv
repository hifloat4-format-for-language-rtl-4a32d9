// hif4_peak_tree: stage 1 of the BF16-to-HiF4 conversion, a three-level
// maximum tree over the magnitudes of the 64 inputs.
//
// Level 1 compares each run of 4 adjacent magnitudes and yields 16 local
// peaks (one per level-3 micro-exponent), level 2 reduces adjacent pairs of
// those to 8 peaks (one per level-2 micro-exponent), level 3 reduces the 8
// to the global peak. The tree shape and the fan-ins 4/2/8 follow the
// conversion algorithm of the format.
// A magnitude is a BF16 value with its sign bit removed (15 bits); for
// non-negative BF16 numbers integer order equals numeric order, so plain
// unsigned comparators are used (this design's choice). Infinity and NaN
// encodings sort above all finite values, so they reach the global peak.
// Interface: mag_i[i] is the magnitude of element i. Purely combinational.
module hif4_peak_tree
  import hif4_pkg::*;
(
  input  logic [N_ELEM-1:0][14:0] mag_i,
  output logic [N_L3-1:0][14:0]   v16_o,   // peak of elements 4k..4k+3
  output logic [N_L2-1:0][14:0]   v8_o,    // peak of elements 8j..8j+7
  output logic [14:0]             vmax_o   // peak of all 64
);

  always_comb begin
    for (int k = 0; k < N_L3; k++) begin
      v16_o[k] = mag_i[4*k];
      for (int e = 1; e < ELEMS_PER_L3; e++)
        if (mag_i[4*k+e] > v16_o[k]) v16_o[k] = mag_i[4*k+e];
    end
    for (int j = 0; j < N_L2; j++)
      v8_o[j] = (v16_o[2*j+1] > v16_o[2*j]) ? v16_o[2*j+1] : v16_o[2*j];
    vmax_o = v8_o[0];
    for (int j = 1; j < N_L2; j++)
      if (v8_o[j] > vmax_o) vmax_o = v8_o[j];
  end

endmodule
