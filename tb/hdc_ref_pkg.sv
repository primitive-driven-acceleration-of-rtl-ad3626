// hdc_ref_pkg: reference model used by the testbenches.
//
// bank_elem() defines the contents of the base bank (bank 0, one row per
// pixel position) and the level bank (bank 1, one row per intensity level):
// element `dim` of row `row` is the low byte of a 32-bit integer hash of
// (bank, row, dim), read as a signed number. Elements exist for every dim,
// including the padding lanes beyond D of the last segment, so the hardware
// must ignore those lanes to match the reference.
//
// ref_hv_sum() computes one element of the bundled image sum exactly as the
// algorithm defines it, straight from the formulas and independent of the
// segmented hardware schedule:
//     sum_d = sum_t sum_{(i,j) in patch t} B_ij[(d-t) mod D] * L_lvl(i,j)[(d-t) mod D]
package hdc_ref_pkg;

  function automatic logic [31:0] mix32(logic [31:0] x);
    x = x ^ (x >> 16);
    x = x * 32'h7feb352d;
    x = x ^ (x >> 15);
    x = x * 32'h846ca68b;
    x = x ^ (x >> 16);
    return x;
  endfunction

  function automatic int bank_elem(int bank, int row, int dim);
    logic [31:0] h;
    logic signed [7:0] v;
    h = mix32({bank[0], row[14:0], dim[15:0]} ^ 32'h5bd1e995);
    v = h[7:0];
    return int'(v);
  endfunction

  // Element d of the (un-binarized) image sum.
  function automatic int ref_hv_sum(int d, int D, int IMG_W, int M, int STRIDE,
                                    int KH, int KW, ref int img[]);
    int s, src, t, i, j;
    s = 0;
    for (t = 0; t < KH * KW; t++) begin
      src = (d - t) % D;
      if (src < 0) src += D;
      for (int qi = 0; qi < M; qi++)
        for (int qj = 0; qj < M; qj++) begin
          i = (t / KW) * STRIDE + qi;
          j = (t % KW) * STRIDE + qj;
          s += bank_elem(0, i * IMG_W + j, src) * bank_elem(1, img[i * IMG_W + j], src);
        end
    end
    return s;
  endfunction

endpackage
