// tb_hif4_gen_pkg: stimulus generators for the HiF4 testbenches. Vectors
// are drawn from several shapes: a group scale spread over the whole BF16
// range with elements a few binades below it, vectors with one outlier,
// all-zero vectors, vectors holding Inf/NaN, huge vectors that saturate the
// E6M2 scale and tiny ones that clamp it to its minimum.
package tb_hif4_gen_pkg;

  function automatic logic [15:0] rand_elem(input int top_exp, input int spread);
    int e;
    e = top_exp - $urandom_range(0, spread);
    if (e < 1) e = 1;
    if (e > 254) e = 254;
    return {1'($urandom), 8'(e), 7'($urandom)};
  endfunction

  // kind: 0 general, 1 outlier, 2 zeros, 3 non-finite, 4 huge, 5 tiny,
  //       6 narrow (all elements within one binade)
  function automatic void rand_vec(input int kind, output logic [15:0] v [64]);
    int top;
    top = $urandom_range(60, 190);
    for (int i = 0; i < 64; i++) begin
      case (kind)
        0: v[i] = rand_elem(top, 6);
        1: v[i] = rand_elem(top - 5, 3);
        2: v[i] = {1'($urandom), 15'h0};
        3: v[i] = rand_elem(top, 6);
        4: v[i] = rand_elem(200, 10);
        5: v[i] = rand_elem(50, 10);
        default: v[i] = rand_elem(top, 0);
      endcase
      if (kind == 0 && $urandom_range(0, 9) == 0) v[i] = {1'($urandom), 15'h0};
    end
    if (kind == 1) v[$urandom_range(0, 63)] = rand_elem(top, 0);
    if (kind == 3) v[$urandom_range(0, 63)] = $urandom_range(0, 1) ? 16'h7F80 : 16'hFFC1;
  endfunction

endpackage
