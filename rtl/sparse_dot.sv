// sparse_dot: partial dot product of one projected feature with one sparse
// SVM weight word.
//
// After basis projection at least 7 of the 13 weights of a template cell are
// zero, so a weight word holds a 13-bit flag of nonzero positions and six
// 5-bit signed weights (43 bits instead of 65). A 13x6 crossbar picks the
// feature dimensions that the flag marks, six multipliers multiply them with
// the stored weights and an adder tree sums the products. The flag, crossbar,
// six multipliers and word sizes follow the paper; packing the nonzero weights
// in order of rising dimension is this design's own choice. If the flag has
// more than six bits set, only the first six are used.
// Purely combinational.
module sparse_dot
  import dpm_pkg::*;
(
  input  feat_t  f,
  input  sw_t    w,
  output score_t y
);
  fe_t  sel [NNZ];     // crossbar outputs
  logic use_s [NNZ];

  // 13x6 crossbar: slot s takes the dimension of the (s+1)-th set flag bit.
  always_comb begin
    int s;
    s = 0;
    for (int k = 0; k < NNZ; k++) begin
      sel[k]   = '0;
      use_s[k] = 1'b0;
    end
    for (int k = 0; k < NDIM; k++) begin
      if (w.flag[k] && s < NNZ) begin
        sel[s]   = f[k];
        use_s[s] = 1'b1;
        s++;
      end
    end
  end

  // Six multipliers and the adder tree.
  always_comb begin
    y = '0;
    for (int s = 0; s < NNZ; s++) begin
      if (use_s[s])
        y += score_t'(sel[s]) * score_t'(wt_t'(w.w[s]));
    end
  end
endmodule
