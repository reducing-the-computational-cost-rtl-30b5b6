// jacobi_rotator: block processor of the rotation layer of the quad-tile
// two-sided Jacobi SVD.
//
// The block at tile position (row pair p, column pair q) is updated with the
// angles found on the diagonal blocks p and q:
//   M' = J_l(p)^T  M  J_r(q)      (the matrix being diagonalized)
//   U' = J_l(p)^T  U              (accumulated left rotations, block of rows p)
//   V' = J_r(p)^T  V              (accumulated right rotations, block of rows p)
// with J(theta) = [cos sin; -sin cos], so J^T = [cos -sin; sin cos]. U and V
// here hold the transposed singular-vector matrices, so that after any number
// of steps M_now = U * M_start * V^T.
//
// Combinational: four tile multipliers (two in series for M); the SVD array
// registers the results.
//
// Follows the original: every block is rotated by the angles of its diagonal
// blocks, and U and V are updated alongside. The original writes the block
// update with the right angle of the row pair, J_{Ii}^{l+} M_{IiIj} J_{Ii}^r;
// this design uses the right angle of the column pair, J_r(q), which is what
// makes the diagonal blocks of the next step consistent (standard two-sided
// Jacobi). Storing U and V transposed is this design's own choice.
module jacobi_rotator
  import tn_pkg::*;
(
  input  tile_t m_in,
  input  tile_t u_in,
  input  tile_t v_in,
  input  fx_t   row_cos_l,
  input  fx_t   row_sin_l,
  input  fx_t   row_cos_r,
  input  fx_t   row_sin_r,
  input  fx_t   col_cos_r,
  input  fx_t   col_sin_r,
  output tile_t m_out,
  output tile_t u_out,
  output tile_t v_out
);

  tile_t jl_t, jr_row_t, jr_col, m_left;

  assign jl_t     = tile_transpose(rot_tile(row_cos_l, row_sin_l));
  assign jr_row_t = tile_transpose(rot_tile(row_cos_r, row_sin_r));
  assign jr_col   = rot_tile(col_cos_r, col_sin_r);

  tile_mul u_m_left  (.x(jl_t),     .y(m_in),   .c(m_left));
  tile_mul u_m_right (.x(m_left),   .y(jr_col), .c(m_out));
  tile_mul u_u       (.x(jl_t),     .y(u_in),   .c(u_out));
  tile_mul u_v       (.x(jr_row_t), .y(v_in),   .c(v_out));

endmodule
