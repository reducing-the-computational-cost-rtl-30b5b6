// tb_svd_engine: self-checking test of the systolic Jacobi SVD array (N = 6).
// Random symmetric and random general matrices are decomposed. Checks, all
// against double-precision arithmetic on the inputs and outputs:
//   - converged is set and every off-diagonal output is within tol;
//   - the invariant Lambda = U^T M V holds (u_out = U^T, v_out = V^T);
//   - U^T and V^T are orthogonal;
//   - the Frobenius norm is kept (sum of squared singular values);
//   - the run takes 1 + S*((N-1)*(2*ITER+5) + 1) clocks for S sweeps;
//   - with max_sweeps = 1 and tol = 0 the engine stops after one sweep
//     with converged = 0.
module tb_svd_engine;
  import tn_pkg::*;

  localparam int unsigned N = 6, NB = N / 2, ITER = 24;

  logic clk = 1'b0, rst_n = 1'b0, start = 1'b0;
  tile_t m_in [NB][NB];
  fx_t tol = '0;
  logic [7:0] max_sweeps = 8'd20;
  tile_t m_out [NB][NB];
  tile_t u_out [NB][NB];
  tile_t v_out [NB][NB];
  logic busy, done, converged;
  logic [7:0] sweeps;
  logic [15:0] steps;
  int checks = 0, failures = 0;
  real m0 [N][N];

  always #5 clk = ~clk;

  svd_engine #(.N(N), .ITER(ITER)) dut (
    .clk, .rst_n, .start, .m_in, .tol, .max_sweeps, .m_out, .u_out, .v_out,
    .busy, .done, .converged, .sweeps, .steps
  );

  function automatic real fx2r(fx_t v);
    return real'(v) / real'(1 << FX_FRAC);
  endfunction
  function automatic fx_t r2fx(real v);
    return fx_t'($rtoi(v * real'(1 << FX_FRAC)));
  endfunction
  function automatic real rnd();
    return (real'($urandom % 2000001) - 1000000.0) / 1000000.0;
  endfunction
  function automatic real absr(real v);
    return v < 0.0 ? -v : v;
  endfunction
  function automatic real el(tile_t t [NB][NB], int r, int c);
    return fx2r(tile_get(t[r/2][c/2], {r[0], c[0]}));
  endfunction

  task automatic near(string what, real got, real expv, real tol_r);
    checks++;
    if (absr(got - expv) > tol_r) begin
      failures++;
      $display("FAIL %s got %f exp %f", what, got, expv);
    end
  endtask

  task automatic load(bit symmetric);
    for (int r = 0; r < N; r++)
      for (int c = 0; c < N; c++)
        if (!symmetric || c >= r) m0[r][c] = fx2r(r2fx(rnd()));
        else m0[r][c] = m0[c][r];
    for (int p = 0; p < NB; p++)
      for (int q = 0; q < NB; q++)
        m_in[p][q] = '{r2fx(m0[2*p][2*q]), r2fx(m0[2*p][2*q+1]),
                       r2fx(m0[2*p+1][2*q]), r2fx(m0[2*p+1][2*q+1])};
  endtask

  task automatic run(output int cyc);
    @(negedge clk);
    start = 1'b1;
    @(negedge clk);
    start = 1'b0;
    cyc = 1;
    while (!done) begin @(negedge clk); cyc++; end
  endtask

  task automatic check_decomposition(real tol_r);
    real fro_in, fro_out, s, t;
    fro_in = 0.0; fro_out = 0.0;
    for (int r = 0; r < N; r++)
      for (int c = 0; c < N; c++) begin
        fro_in += m0[r][c] * m0[r][c];
        fro_out += el(m_out, r, c) * el(m_out, r, c);
        if (r != c) begin
          checks++;
          if (absr(el(m_out, r, c)) > tol_r) begin
            failures++;
            $display("FAIL offdiag (%0d,%0d) = %f", r, c, el(m_out, r, c));
          end
        end
        // (U^T M0 V)[r][c] = sum_a sum_b Ut[r][a] M0[a][b] Vt[c][b]
        s = 0.0;
        for (int a = 0; a < N; a++)
          for (int b = 0; b < N; b++) s += el(u_out, r, a) * m0[a][b] * el(v_out, c, b);
        near("invariant", s, el(m_out, r, c), 1e-3);
        s = 0.0; t = 0.0;
        for (int a = 0; a < N; a++) begin
          s += el(u_out, r, a) * el(u_out, c, a);
          t += el(v_out, r, a) * el(v_out, c, a);
        end
        near("U orthogonal", s, (r == c) ? 1.0 : 0.0, 1e-3);
        near("V orthogonal", t, (r == c) ? 1.0 : 0.0, 1e-3);
      end
    near("Frobenius norm", fro_out, fro_in, 1e-3 * fro_in);
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int cyc, expc;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    tol = r2fx(1.0 / 8192.0);
    max_sweeps = 8'd20;
    for (int trial = 0; trial < 4; trial++) begin
      load(trial < 2);
      run(cyc);
      checks++;
      if (!converged) begin failures++; $display("FAIL not converged, trial %0d", trial); end
      expc = 1 + int'(sweeps) * ((N - 1) * (2 * ITER + 5) + 1);
      checks++;
      if (cyc != expc) begin failures++; $display("FAIL cycles %0d exp %0d", cyc, expc); end
      checks++;
      if (int'(steps) != int'(sweeps) * (N - 1)) begin failures++; $display("FAIL steps %0d", steps); end
      $display("trial %0d: %0d sweeps, %0d cycles", trial, sweeps, cyc);
      check_decomposition(1.0 / 8192.0);
    end
    // Sweep limit.
    load(1'b0);
    tol = '0;
    max_sweeps = 8'd1;
    run(cyc);
    checks++;
    if (converged || sweeps != 8'd1) begin
      failures++;
      $display("FAIL sweep limit: converged=%0d sweeps=%0d", converged, sweeps);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
