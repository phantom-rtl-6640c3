// length_equalizer: expands a sparse-mask tile to dense form.
//
// A tile is stored as a K*K-bit sparse mask plus its non-zero values packed in
// column-major order.  Walking the mask in the same order, every one takes
// the next packed value and every zero becomes a zero byte.  This is the
// "adding zeros at the locations given by the sparse mask" step that the
// thread mapper needs before it can pick operands by position.
// Purely combinational.
module length_equalizer
  import phantom_pkg::*;
(
  input  mask_t   mask,
  input  packed_t nz,
  output tile_t   dense
);

  always_comb begin
    int unsigned idx;
    idx = 0;
    dense = '0;
    for (int c = 0; c < K; c++)
      for (int r = 0; r < K; r++)
        if (mask[c][r]) begin
          dense[c][r] = nz[idx];
          idx++;
        end
  end

endmodule
