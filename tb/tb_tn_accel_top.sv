// tb_tn_accel_top: end-to-end test of the accelerator at its default size
// (bond dimension DB = 12, so 6 x 6 tiles per matrix, NL = 1, ITER = 24).
// Everything goes through the host port, as a host would use the design:
//   1. A (12 x 12) and B (12 x 1 x 12) are written element by element; the
//      contraction runs and M_{j[i]} = sum_k A_{ik} B_{jk} is read back and
//      compared with a double-precision reference; its latency must be
//      NB + 1 = 7 clocks.
//   2. The SVD runs on the contraction result (svd_src = 1) without
//      reloading: Lambda, U^T and V^T are read back; Lambda must be diagonal
//      within tol, equal U^T M V, and U^T, V^T orthogonal.
//   3. A symmetric matrix is loaded into S and decomposed (svd_src = 0).
//   4. With max_sweeps = 1 and tol = 0 the SVD must stop after one sweep
//      without converging.
// The run time of each SVD must be 1 + S*((DB-1)*(2*ITER+5) + 1) clocks.
// Each mechanism (contraction, SVD from the host matrix, SVD chained after
// the contraction, converged stop, sweep-limit stop, systolic exchange) is
// counted; one that never happens is a failure.
module tb_tn_accel_top;
  import tn_pkg::*;

  localparam int unsigned DB = 12, NB = DB / 2, ITER = 24;

  logic clk = 1'b0, rst_n = 1'b0;
  logic wr_en = 1'b0;
  logic [1:0] wr_bank = '0;
  logic [7:0] wr_row = '0, wr_col = '0, wr_l = '0;
  fx_t wr_data = '0;
  logic contract_start = 1'b0, contract_busy, contract_done;
  logic svd_start = 1'b0, svd_src = 1'b0;
  fx_t svd_tol = '0;
  logic [7:0] svd_max_sweeps = 8'd20;
  logic svd_busy, svd_done, svd_converged;
  logic [7:0] svd_sweeps;
  logic [15:0] svd_steps;
  logic [1:0] rd_bank = '0;
  logic [7:0] rd_row = '0, rd_col = '0, rd_l = '0;
  fx_t rd_data;

  int checks = 0, failures = 0;
  int n_contract = 0, n_svd_host = 0, n_svd_chain = 0, n_conv = 0, n_limit = 0, n_exchange = 0;

  real ar [DB][DB];
  real br [DB][DB];
  real m0 [DB][DB];
  real lam [DB][DB];
  real ut [DB][DB];
  real vt [DB][DB];

  always #5 clk = ~clk;

  tn_accel_top dut (.*);

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

  task automatic near(string what, real got, real expv, real tol_r);
    checks++;
    if (absr(got - expv) > tol_r) begin
      failures++;
      $display("FAIL %s got %f exp %f", what, got, expv);
    end
  endtask

  task automatic write(logic [1:0] bank, int r, int c, int l, real v);
    @(negedge clk);
    wr_en = 1'b1; wr_bank = bank; wr_row = 8'(r); wr_col = 8'(c); wr_l = 8'(l);
    wr_data = r2fx(v);
    @(negedge clk);
    wr_en = 1'b0;
  endtask

  task automatic read(logic [1:0] bank, int r, int c, output real v);
    @(negedge clk);
    rd_bank = bank; rd_row = 8'(r); rd_col = 8'(c); rd_l = '0;
    @(negedge clk);
    v = fx2r(rd_data);
  endtask

  task automatic run_svd(bit src, real tol_r, int max_sw, output int cyc);
    svd_src = src;
    svd_tol = r2fx(tol_r);
    svd_max_sweeps = 8'(max_sw);
    @(negedge clk);
    svd_start = 1'b1;
    @(negedge clk);
    svd_start = 1'b0;
    cyc = 1;
    while (!svd_done) begin @(negedge clk); cyc++; end
    checks++;
    if (cyc != 1 + int'(svd_sweeps) * ((DB - 1) * (2 * ITER + 5) + 1)) begin
      failures++;
      $display("FAIL SVD cycles %0d for %0d sweeps", cyc, svd_sweeps);
    end
    if (svd_steps != 0) n_exchange += int'(svd_steps);
    if (svd_converged) n_conv++;
    else n_limit++;
  endtask

  task automatic check_svd(real tol_r);
    real s, t, fro_in, fro_out;
    for (int r = 0; r < DB; r++)
      for (int c = 0; c < DB; c++) begin
        read(2'(RB_LAMBDA), r, c, lam[r][c]);
        read(2'(RB_U), r, c, ut[r][c]);
        read(2'(RB_V), r, c, vt[r][c]);
      end
    fro_in = 0.0; fro_out = 0.0;
    for (int r = 0; r < DB; r++)
      for (int c = 0; c < DB; c++) begin
        fro_in += m0[r][c] * m0[r][c];
        fro_out += lam[r][c] * lam[r][c];
        if (r != c) near("offdiag", lam[r][c], 0.0, tol_r);
        s = 0.0;
        for (int a = 0; a < DB; a++)
          for (int b = 0; b < DB; b++) s += ut[r][a] * m0[a][b] * vt[c][b];
        near("Lambda = U^T M V", s, lam[r][c], 2e-3 * (1.0 + absr(lam[r][c])));
        s = 0.0; t = 0.0;
        for (int a = 0; a < DB; a++) begin
          s += ut[r][a] * ut[c][a];
          t += vt[r][a] * vt[c][a];
        end
        near("U orthogonal", s, (r == c) ? 1.0 : 0.0, 1e-3);
        near("V orthogonal", t, (r == c) ? 1.0 : 0.0, 1e-3);
      end
    near("Frobenius norm", fro_out, fro_in, 1e-3 * fro_in);
  endtask

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int cyc;
    real v;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;

    // 1. Contraction.
    for (int r = 0; r < DB; r++)
      for (int c = 0; c < DB; c++) begin
        ar[r][c] = fx2r(r2fx(0.5 * rnd()));
        br[r][c] = fx2r(r2fx(0.5 * rnd()));
        write(2'(WB_A), r, c, 0, ar[r][c]);
        write(2'(WB_B), r, c, 0, br[r][c]);
      end
    @(negedge clk);
    contract_start = 1'b1;
    @(negedge clk);
    contract_start = 1'b0;
    cyc = 1;
    while (!contract_done) begin @(negedge clk); cyc++; end
    checks++;
    if (cyc != NB + 1) begin failures++; $display("FAIL contraction latency %0d", cyc); end
    n_contract++;
    for (int j = 0; j < DB; j++)
      for (int i = 0; i < DB; i++) begin
        m0[j][i] = 0.0;
        for (int k = 0; k < DB; k++) m0[j][i] += ar[i][k] * br[j][k];
        read(2'(RB_M), j, i, v);
        near("contraction", v, m0[j][i], 1e-5);
        m0[j][i] = v;
      end

    // 2. SVD of the contraction result.
    run_svd(1'b1, 1.0 / 4096.0, 30, cyc);
    $display("chained SVD: %0d sweeps, %0d clocks, converged=%0d", svd_sweeps, cyc, svd_converged);
    checks++;
    if (!svd_converged) begin failures++; $display("FAIL chained SVD did not converge"); end
    n_svd_chain++;
    check_svd(1.0 / 4096.0);

    // 3. SVD of a symmetric host matrix.
    for (int r = 0; r < DB; r++)
      for (int c = r; c < DB; c++) begin
        m0[r][c] = fx2r(r2fx(rnd()));
        m0[c][r] = m0[r][c];
      end
    for (int r = 0; r < DB; r++)
      for (int c = 0; c < DB; c++) write(2'(WB_S), r, c, 0, m0[r][c]);
    run_svd(1'b0, 1.0 / 4096.0, 30, cyc);
    $display("host SVD: %0d sweeps, %0d clocks, converged=%0d", svd_sweeps, cyc, svd_converged);
    checks++;
    if (!svd_converged) begin failures++; $display("FAIL host SVD did not converge"); end
    n_svd_host++;
    check_svd(1.0 / 4096.0);

    // 4. Sweep limit.
    run_svd(1'b0, 0.0, 1, cyc);
    checks++;
    if (svd_converged || svd_sweeps != 8'd1) begin
      failures++;
      $display("FAIL sweep limit: converged=%0d sweeps=%0d", svd_converged, svd_sweeps);
    end

    $display("mechanisms: contraction=%0d svd_host=%0d svd_chained=%0d converged_stop=%0d sweep_limit_stop=%0d exchange_steps=%0d",
             n_contract, n_svd_host, n_svd_chain, n_conv, n_limit, n_exchange);
    checks++; if (n_contract == 0)  begin failures++; $display("FAIL no contraction"); end
    checks++; if (n_svd_host == 0)  begin failures++; $display("FAIL no host-source SVD"); end
    checks++; if (n_svd_chain == 0) begin failures++; $display("FAIL no chained SVD"); end
    checks++; if (n_conv == 0)      begin failures++; $display("FAIL no converged stop"); end
    checks++; if (n_limit == 0)     begin failures++; $display("FAIL no sweep-limit stop"); end
    checks++; if (n_exchange == 0)  begin failures++; $display("FAIL no systolic exchange"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
