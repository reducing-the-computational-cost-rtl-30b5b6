// tile_mul: product of two 2x2 fixed-point tiles, C = X * Y.
//
// This is the elementary operation of both compute layers. In the tensor
// contraction it multiplies one A tile by one B tile and sums over the
// primed (inside-tile) contraction index k'; in the SVD it applies a 2x2
// Jacobi rotation to a block. Each output element is the sum of two full
// precision products, rescaled once to Q8.24 (rounded toward minus infinity);
// overflow of the Q8.24 range wraps.
//
// Purely combinational: eight multipliers and four adders, no clock.
// Follows the original: the first contraction step "is equivalent to the
// multiplication of two 2x2 matrices". This design's own choice: the number
// format and the single rescale after the sum.
module tile_mul
  import tn_pkg::*;
(
  input  tile_t x,
  input  tile_t y,
  output tile_t c
);

  function automatic fx_t dot2(fx_t a0, fx_t b0, fx_t a1, fx_t b1);
    fx2_t s;
    s = fx2_t'(a0) * fx2_t'(b0) + fx2_t'(a1) * fx2_t'(b1);
    return fx_t'(s >>> FX_FRAC);
  endfunction

  always_comb begin
    c.e00 = dot2(x.e00, y.e00, x.e01, y.e10);
    c.e01 = dot2(x.e00, y.e01, x.e01, y.e11);
    c.e10 = dot2(x.e10, y.e00, x.e11, y.e10);
    c.e11 = dot2(x.e10, y.e01, x.e11, y.e11);
  end

endmodule
