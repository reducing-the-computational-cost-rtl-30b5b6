// svd_engine: quad-tile systolic two-sided Jacobi SVD of an N x N real matrix.
//
// The matrix M, and the rotation accumulators U and V (both start as the
// identity), are cut into (N/2) x (N/2) quad tiles, one processor per tile.
// One Jacobi step is:
//   1. Angle layer: the N/2 diagonal tiles each compute, in parallel, the
//      left and right angles that diagonalize them (jacobi_angle).
//   2. Rotation layer: every tile (p, q) is rotated with the angles of
//      diagonal tiles p and q (jacobi_rotator), all tiles in parallel.
//   3. Systolic exchange: rows and columns of M, and rows of U and V, move
//      one position along a fixed ring so that new index pairs meet in the
//      diagonal tiles. Position 0 stays; the others circulate
//      top(1) -> top(2) -> ... -> top(N/2-1) -> bottom(N/2-1) -> ... ->
//      bottom(0) -> top(1), where top(t) = 2t and bottom(t) = 2t + 1 are the
//      two positions of tile t (round-robin ordering). The same permutation
//      is used for rows and columns, and every element moves at most to a
//      neighbouring tile.
// The rotation and the exchange are written back in one clock edge. N - 1
// steps make a sweep, in which every pair of indices meets exactly once;
// after a sweep the ordering is back where it started. After every sweep the
// largest off-diagonal magnitude is compared with `tol`: the engine stops
// when it is not above tol (`converged` = 1) or after `max_sweeps` sweeps
// (`converged` = 0).
//
// Outputs, valid when done: m_out is the (nearly) diagonal Lambda, u_out and
// v_out hold U^T and V^T of M_start = U Lambda V^T, in the sense that
// m_out = u_out * M_start * v_out^T at all times. Diagonal entries may come
// out negative or in any order (no sign fix-up or sorting).
//
// Timing: the start edge loads the matrix. Each step then takes
// STEP_CYCLES = 2*ITER + 5 clock edges, the same for every N; each sweep adds
// one edge for the convergence check, so a run of S sweeps takes
// 1 + S*((N-1)*STEP_CYCLES + 1) edges, linear in N.
//
// Follows the original: tiles of 2x2, diagonal-block angles, rotation of all
// blocks of M, U and V by those angles, systolic exchange, repeat until M is
// diagonal to a set precision. Design choices of its own: the round-robin
// ring (the original states that the ordering returns after 2*D_b - 1 steps
// without giving the schedule; this ring returns after N - 1), the stop
// rule (tolerance plus sweep limit), real arithmetic and Q8.24 numbers.
module svd_engine
  import tn_pkg::*;
#(
  parameter int unsigned N    = 12,
  parameter int unsigned ITER = 24
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       start,
  input  tile_t      m_in  [N/2][N/2],
  input  fx_t        tol,
  input  logic [7:0] max_sweeps,
  output tile_t      m_out [N/2][N/2],
  output tile_t      u_out [N/2][N/2],
  output tile_t      v_out [N/2][N/2],
  output logic       busy,
  output logic       done,
  output logic       converged,
  output logic [7:0] sweeps,
  output logic [15:0] steps
);

  localparam int unsigned NB = N / 2;

  // Source position of position p after one systolic exchange.
  function automatic int unsigned src_pos(int unsigned p);
    int unsigned m;
    m = NB;
    if (p == 0 || m < 2)         return p;
    if (p == 2)                  return 1;
    if (p == 2 * m - 1)          return 2 * m - 2;
    if (p % 2 == 0)              return p - 2;
    return p + 2;
  endfunction

  typedef enum logic [2:0] {S_IDLE, S_ANG_GO, S_ANG_WAIT, S_ROT, S_CHECK} sstate_e;
  sstate_e state_q;

  fx_t m_q [N][N];
  fx_t u_q [N][N];
  fx_t v_q [N][N];

  logic [15:0] step_in_sweep_q;

  // Tile views of the stored matrices.
  tile_t m_t [NB][NB];
  tile_t u_t [NB][NB];
  tile_t v_t [NB][NB];
  for (genvar p = 0; p < NB; p++) begin : g_tp
    for (genvar q = 0; q < NB; q++) begin : g_tq
      assign m_t[p][q] = '{m_q[2*p][2*q], m_q[2*p][2*q+1], m_q[2*p+1][2*q], m_q[2*p+1][2*q+1]};
      assign u_t[p][q] = '{u_q[2*p][2*q], u_q[2*p][2*q+1], u_q[2*p+1][2*q], u_q[2*p+1][2*q+1]};
      assign v_t[p][q] = '{v_q[2*p][2*q], v_q[2*p][2*q+1], v_q[2*p+1][2*q], v_q[2*p+1][2*q+1]};
    end
  end

  // Angle layer.
  logic        ang_start;
  logic [NB-1:0] ang_done;
  fx_t cl [NB];
  fx_t sl [NB];
  fx_t cr [NB];
  fx_t sr [NB];

  assign ang_start = (state_q == S_ANG_GO);

  for (genvar p = 0; p < NB; p++) begin : g_ang
    jacobi_angle #(.ITER(ITER)) u_ang (
      .clk, .rst_n, .start(ang_start), .blk(m_t[p][p]),
      .theta_l(), .theta_r(),
      .cos_l(cl[p]), .sin_l(sl[p]), .cos_r(cr[p]), .sin_r(sr[p]),
      .busy(), .done(ang_done[p])
    );
  end

  // Rotation layer.
  tile_t m_r [NB][NB];
  tile_t u_r [NB][NB];
  tile_t v_r [NB][NB];
  fx_t   m_re [N][N];
  fx_t   u_re [N][N];
  fx_t   v_re [N][N];

  for (genvar p = 0; p < NB; p++) begin : g_rp
    for (genvar q = 0; q < NB; q++) begin : g_rq
      jacobi_rotator u_rot (
        .m_in(m_t[p][q]), .u_in(u_t[p][q]), .v_in(v_t[p][q]),
        .row_cos_l(cl[p]), .row_sin_l(sl[p]),
        .row_cos_r(cr[p]), .row_sin_r(sr[p]),
        .col_cos_r(cr[q]), .col_sin_r(sr[q]),
        .m_out(m_r[p][q]), .u_out(u_r[p][q]), .v_out(v_r[p][q])
      );
      assign m_re[2*p][2*q]     = m_r[p][q].e00;
      assign m_re[2*p][2*q+1]   = m_r[p][q].e01;
      assign m_re[2*p+1][2*q]   = m_r[p][q].e10;
      assign m_re[2*p+1][2*q+1] = m_r[p][q].e11;
      assign u_re[2*p][2*q]     = u_r[p][q].e00;
      assign u_re[2*p][2*q+1]   = u_r[p][q].e01;
      assign u_re[2*p+1][2*q]   = u_r[p][q].e10;
      assign u_re[2*p+1][2*q+1] = u_r[p][q].e11;
      assign v_re[2*p][2*q]     = v_r[p][q].e00;
      assign v_re[2*p][2*q+1]   = v_r[p][q].e01;
      assign v_re[2*p+1][2*q]   = v_r[p][q].e10;
      assign v_re[2*p+1][2*q+1] = v_r[p][q].e11;
    end
  end

  // Convergence test: every off-diagonal magnitude at most tol.
  logic off_ok;
  always_comb begin
    off_ok = 1'b1;
    for (int r = 0; r < N; r++)
      for (int c = 0; c < N; c++)
        if (r != c && (m_q[r][c] > tol || m_q[r][c] < -tol)) off_ok = 1'b0;
  end

  wire last_step = (step_in_sweep_q == 16'(N - 2));

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state_q         <= S_IDLE;
      done            <= 1'b0;
      converged       <= 1'b0;
      sweeps          <= '0;
      steps           <= '0;
      step_in_sweep_q <= '0;
    end else begin
      done <= 1'b0;
      case (state_q)
        S_IDLE: if (start) begin
          state_q         <= S_ANG_GO;
          converged       <= 1'b0;
          sweeps          <= '0;
          steps           <= '0;
          step_in_sweep_q <= '0;
        end
        S_ANG_GO:   state_q <= S_ANG_WAIT;
        S_ANG_WAIT: if (ang_done[0]) state_q <= S_ROT;
        S_ROT: begin
          steps <= steps + 1'b1;
          if (last_step) begin
            step_in_sweep_q <= '0;
            sweeps          <= sweeps + 1'b1;
            state_q         <= S_CHECK;
          end else begin
            step_in_sweep_q <= step_in_sweep_q + 1'b1;
            state_q         <= S_ANG_GO;
          end
        end
        S_CHECK: begin
          if (off_ok) begin
            converged <= 1'b1;
            done      <= 1'b1;
            state_q   <= S_IDLE;
          end else if (sweeps >= max_sweeps) begin
            done    <= 1'b1;
            state_q <= S_IDLE;
          end else begin
            state_q <= S_ANG_GO;
          end
        end
        default: state_q <= S_IDLE;
      endcase
    end
  end

  // Matrix registers: load on start, rotate and exchange once per step.
  always_ff @(posedge clk) begin
    if (state_q == S_IDLE && start) begin
      for (int p = 0; p < NB; p++)
        for (int q = 0; q < NB; q++) begin
          m_q[2*p][2*q]     <= m_in[p][q].e00;
          m_q[2*p][2*q+1]   <= m_in[p][q].e01;
          m_q[2*p+1][2*q]   <= m_in[p][q].e10;
          m_q[2*p+1][2*q+1] <= m_in[p][q].e11;
        end
      for (int r = 0; r < N; r++)
        for (int c = 0; c < N; c++) begin
          u_q[r][c] <= (r == c) ? FX_ONE : '0;
          v_q[r][c] <= (r == c) ? FX_ONE : '0;
        end
    end else if (state_q == S_ROT) begin
      for (int r = 0; r < N; r++)
        for (int c = 0; c < N; c++) begin
          m_q[r][c] <= m_re[src_pos(r)][src_pos(c)];
          u_q[r][c] <= u_re[src_pos(r)][c];
          v_q[r][c] <= v_re[src_pos(r)][c];
        end
    end
  end

  assign m_out = m_t;
  assign u_out = u_t;
  assign v_out = v_t;
  assign busy  = (state_q != S_IDLE);

  initial begin
    assert (N >= 2 && N % 2 == 0) else $error("svd_engine: N must be even and at least 2");
  end

  // All diagonal angle processors run in lock step.
  always @(posedge clk) begin
    if (rst_n) assert (ang_done == '0 || ang_done == '1)
      else $error("svd_engine: angle processors out of step");
  end

endmodule
