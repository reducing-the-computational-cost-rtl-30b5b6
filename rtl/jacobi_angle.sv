// jacobi_angle: angle processor of one diagonal block in the quad-tile
// two-sided Jacobi SVD (upper compute layer of the SVD array).
//
// For the 2x2 diagonal block M = [a b; c d] it finds the left and right
// angles for which J(theta_l)^T M J(theta_r) is diagonal, with
// J(theta) = [cos sin; -sin cos]:
//   theta_sum  = atan2(c + b, d - a)
//   theta_diff = atan2(c - b, d + a)
//   theta_l = (theta_sum - theta_diff) / 2,  theta_r = (theta_sum + theta_diff) / 2
// where theta_sum and theta_diff are first folded into [-pi/2, pi/2] by
// adding or subtracting pi. The fold keeps both angles within pi/2, the
// smallest rotations that diagonalize the block; without it the sweeps can
// stall, trading large entries between blocks instead of removing them.
// and then their cosines and sines, which are what the rotation layer uses.
// The two angles and their cos/sin are held in output registers: these are
// the theta^l (module U) and theta^r (module V) registers of the array.
//
// Two CORDIC units work side by side: first both in vectoring mode (the two
// arctangents), then both in rotation mode (cos/sin of theta_l and theta_r).
//
// Timing: the edge that takes `start` starts the arctangents. With ITER
// CORDIC iterations the outputs are updated, and `done` is high for one
// cycle, LATENCY = 2*ITER + 3 edges after start, independent of the matrix
// size. A start while busy is ignored.
//
// Follows the original: Jacobi rotations with left and right angles that
// diagonalize each diagonal block. This design's own choice: the closed-form
// angle formulas above (standard two-sided Jacobi), CORDIC, real arithmetic
// (the original speaks of a Hermitian matrix; complex phases are not
// handled).
module jacobi_angle
  import tn_pkg::*;
#(
  parameter int unsigned ITER = 24
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  start,
  input  tile_t blk,
  output fx_t   theta_l,
  output fx_t   theta_r,
  output fx_t   cos_l,
  output fx_t   sin_l,
  output fx_t   cos_r,
  output fx_t   sin_r,
  output logic  busy,
  output logic  done
);

  typedef enum logic [1:0] {A_IDLE, A_VEC, A_ROT} astate_e;
  astate_e state_q;

  logic c_start, c_vec;
  fx_t  s_x, s_y, s_z, d_x, d_y, d_z;
  fx_t  s_xo, s_yo, s_zo, d_xo, d_yo, d_zo;
  logic s_busy, s_done, d_busy, d_done;
  fx_t  th_l_c, th_r_c;

  // Fold an angle from (-pi, pi] into [-pi/2, pi/2] (the 2x2 problem is
  // solved by theta and theta +- pi alike).
  function automatic fx_t fold(fx_t t);
    if (t > FX_HALF_PI)       return t - FX_PI;
    else if (t < -FX_HALF_PI) return t + FX_PI;
    else                      return t;
  endfunction

  // theta_l and theta_r from the two arctangents (valid when they are done).
  fx_t th_sum_diff, th_sum_add;
  assign th_sum_diff = fold(s_zo) - fold(d_zo);
  assign th_sum_add  = fold(s_zo) + fold(d_zo);
  assign th_l_c = th_sum_diff >>> 1;
  assign th_r_c = th_sum_add  >>> 1;

  always_comb begin
    c_vec   = (state_q == A_IDLE);
    c_start = ((state_q == A_IDLE) && start) || ((state_q == A_VEC) && s_done);
    // Unit "s": sum angle, then theta_l. Unit "d": difference angle, then theta_r.
    s_x = blk.e11 - blk.e00;
    s_y = blk.e10 + blk.e01;
    d_x = blk.e11 + blk.e00;
    d_y = blk.e10 - blk.e01;
    s_z = th_l_c;
    d_z = th_r_c;
  end

  cordic #(.ITER(ITER)) u_cordic_s (
    .clk, .rst_n, .start(c_start), .vectoring(c_vec),
    .x_in(s_x), .y_in(s_y), .z_in(s_z),
    .x_out(s_xo), .y_out(s_yo), .z_out(s_zo), .busy(s_busy), .done(s_done)
  );

  cordic #(.ITER(ITER)) u_cordic_d (
    .clk, .rst_n, .start(c_start), .vectoring(c_vec),
    .x_in(d_x), .y_in(d_y), .z_in(d_z),
    .x_out(d_xo), .y_out(d_yo), .z_out(d_zo), .busy(d_busy), .done(d_done)
  );

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state_q <= A_IDLE;
      done    <= 1'b0;
      theta_l <= '0;
      theta_r <= '0;
      cos_l   <= FX_ONE;
      sin_l   <= '0;
      cos_r   <= FX_ONE;
      sin_r   <= '0;
    end else begin
      done <= 1'b0;
      case (state_q)
        A_IDLE: if (start) state_q <= A_VEC;
        A_VEC: if (s_done) begin
          state_q <= A_ROT;
          theta_l <= th_l_c;
          theta_r <= th_r_c;
        end
        A_ROT: if (s_done) begin
          state_q <= A_IDLE;
          cos_l   <= s_xo;
          sin_l   <= s_yo;
          cos_r   <= d_xo;
          sin_r   <= d_yo;
          done    <= 1'b1;
        end
        default: state_q <= A_IDLE;
      endcase
    end
  end

  assign busy = (state_q != A_IDLE);

  // Both CORDIC units run in lock step.
  always @(posedge clk) begin
    if (rst_n) assert (s_done == d_done && s_busy == d_busy)
      else $error("jacobi_angle: CORDIC units out of step");
  end

endmodule
