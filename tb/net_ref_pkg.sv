// net_ref_pkg: integer reference model of the quantised network, for testbenches.
//
// Feature maps are flat int arrays indexed (y*dim + x)*channels + c. Weights of a
// layer are [cout][9*cin] with synapse index (ky*3 + kx)*cin + c, the order in
// which the hardware's window stream and weight memories are laid out.
// Thresholds are [cout][15]; an activation is the number of thresholds the
// accumulator reaches. Random weights and thresholds are generated here too:
// weights uniform in +-(2^(b-1)-1), thresholds 15 evenly spaced steps around zero
// with the step set to a quarter of the accumulator's expected standard deviation
// so that the 4-bit outputs use their whole range.
package net_ref_pkg;

  typedef int int_arr_t[];

  // one layer: valid 3x3 convolution, optional thresholds, optional 2x2/2 max pool
  function automatic int_arr_t conv_layer_ref(const ref int_arr_t in, input int dim, cin, cout,
                                              const ref int_arr_t w, const ref int_arr_t th,
                                              input bit use_thr, bit pool, output int odim);
    int cdim = dim - 2;
    int mw   = 9 * cin;
    int_arr_t conv = new[cdim * cdim * cout];
    int_arr_t res;
    for (int y = 0; y < cdim; y++)
      for (int x = 0; x < cdim; x++)
        for (int o = 0; o < cout; o++) begin
          int acc = 0;
          for (int ky = 0; ky < 3; ky++)
            for (int kx = 0; kx < 3; kx++) begin
              int ib = ((y + ky) * dim + (x + kx)) * cin;
              int wb = o * mw + (ky * 3 + kx) * cin;
              for (int c = 0; c < cin; c++) acc += in[ib + c] * w[wb + c];
            end
          if (use_thr) begin
            int n = 0;
            for (int t = 0; t < 15; t++) if (acc >= th[o * 15 + t]) n++;
            acc = n;
          end
          conv[(y * cdim + x) * cout + o] = acc;
        end
    if (!pool) begin
      odim = cdim;
      return conv;
    end
    odim = cdim / 2;
    res = new[odim * odim * cout];
    for (int y = 0; y < odim; y++)
      for (int x = 0; x < odim; x++)
        for (int o = 0; o < cout; o++) begin
          int m = 0;
          for (int dy = 0; dy < 2; dy++)
            for (int dx = 0; dx < 2; dx++) begin
              int v = conv[((2 * y + dy) * cdim + 2 * x + dx) * cout + o];
              if (v > m) m = v;
            end
          res[(y * odim + x) * cout + o] = m;
        end
    return res;
  endfunction

  function automatic int_arr_t rand_weights(int cout, int cin, int bits);
    int lim = (1 << (bits - 1)) - 1;
    int_arr_t w = new[cout * 9 * cin];
    foreach (w[i]) w[i] = $urandom_range(0, 2 * lim) - lim;
    return w;
  endfunction

  // mean_sq: expected square of an input element
  function automatic int_arr_t rand_thresholds(int cout, int cin, int wbits, real mean_sq);
    int lim = (1 << (wbits - 1)) - 1;
    real w_sq = real'(lim) * real'(lim + 1) / 3.0;
    int step = int'($sqrt(9.0 * cin * mean_sq * w_sq) / 4.0) + 1;
    int_arr_t th = new[cout * 15];
    for (int o = 0; o < cout; o++)
      for (int t = 0; t < 15; t++) th[o * 15 + t] = (t - 7) * step + (o % 5) - 2;
    return th;
  endfunction

endpackage
