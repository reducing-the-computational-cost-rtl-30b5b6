// wl_runner: test driver used by tb_workload_scaling. It owns one
// tn_accel_top of bond dimension DB and runs one tensor-network update
// through its host port: random D_b x D_b matrices A and B (entries in
// [-0.5, 0.5], seeded by SEED) are contracted, M_{j[i]} = sum_k A_ik B_jk,
// and the result is decomposed by the SVD engine straight from the
// contraction (svd_src = 1). It checks the contraction against a
// double-precision reference, and the SVD for convergence, Lambda = U^T M V
// and orthogonality of U and V, and reports the clock counts of both
// operations. `finished` rises when everything has been checked.
module wl_runner
  import tn_pkg::*;
#(
  parameter int unsigned DB   = 4,
  parameter int unsigned SEED = 1
) (
  input  logic clk,
  input  logic rst_n,
  output logic finished,
  output int   checks,
  output int   failures,
  output int   contract_cycles,
  output int   svd_cycles,
  output int   svd_sweeps_run
);

  localparam int unsigned ITER = 24;

  logic wr_en = 1'b0;
  logic [1:0] wr_bank = '0;
  logic [7:0] wr_row = '0, wr_col = '0, wr_l = '0;
  fx_t wr_data = '0;
  logic contract_start = 1'b0, contract_busy, contract_done;
  logic svd_start = 1'b0, svd_src = 1'b1;
  fx_t svd_tol;
  logic [7:0] svd_max_sweeps = 8'd30;
  logic svd_busy, svd_done, svd_converged;
  logic [7:0] svd_sweeps;
  logic [15:0] svd_steps;
  logic [1:0] rd_bank = '0;
  logic [7:0] rd_row = '0, rd_col = '0, rd_l = '0;
  fx_t rd_data;

  real ar [DB][DB];
  real br [DB][DB];
  real m0 [DB][DB];
  real lam [DB][DB];
  real ut [DB][DB];
  real vt [DB][DB];

  tn_accel_top #(.DB(DB)) u_top (.*);

  function automatic real fx2r(fx_t v);
    return real'(v) / real'(1 << FX_FRAC);
  endfunction
  function automatic fx_t r2fx(real v);
    return fx_t'($rtoi(v * real'(1 << FX_FRAC)));
  endfunction
  function automatic real absr(real v);
    return v < 0.0 ? -v : v;
  endfunction

  task automatic near(string what, real got, real expv, real tol_r);
    checks++;
    if (absr(got - expv) > tol_r) begin
      failures++;
      $display("FAIL DB=%0d %s got %f exp %f", DB, what, got, expv);
    end
  endtask

  task automatic write(logic [1:0] bank, int r, int c, real v);
    @(negedge clk);
    wr_en = 1'b1; wr_bank = bank; wr_row = 8'(r); wr_col = 8'(c); wr_l = '0;
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

  initial begin
    int unsigned seed;
    real v, s, t;
    finished = 1'b0;
    checks = 0;
    failures = 0;
    svd_tol = r2fx(1.0 / 4096.0);
    seed = SEED;
    @(posedge rst_n);
    for (int r = 0; r < DB; r++)
      for (int c = 0; c < DB; c++) begin
        seed = seed * 1664525 + 1013904223;
        ar[r][c] = fx2r(r2fx(real'(seed % 1000001) / 1000000.0 - 0.5));
        seed = seed * 1664525 + 1013904223;
        br[r][c] = fx2r(r2fx(real'(seed % 1000001) / 1000000.0 - 0.5));
        write(2'(WB_A), r, c, ar[r][c]);
        write(2'(WB_B), r, c, br[r][c]);
      end
    // Contraction.
    @(negedge clk);
    contract_start = 1'b1;
    @(negedge clk);
    contract_start = 1'b0;
    contract_cycles = 1;
    while (!contract_done) begin @(negedge clk); contract_cycles++; end
    for (int j = 0; j < DB; j++)
      for (int i = 0; i < DB; i++) begin
        s = 0.0;
        for (int k = 0; k < DB; k++) s += ar[i][k] * br[j][k];
        read(2'(RB_M), j, i, v);
        near("contraction", v, s, 1e-5);
        m0[j][i] = v;
      end
    // SVD of the contraction result.
    @(negedge clk);
    svd_start = 1'b1;
    @(negedge clk);
    svd_start = 1'b0;
    svd_cycles = 1;
    while (!svd_done) begin @(negedge clk); svd_cycles++; end
    svd_sweeps_run = int'(svd_sweeps);
    checks++;
    if (!svd_converged) begin failures++; $display("FAIL DB=%0d SVD not converged", DB); end
    for (int r = 0; r < DB; r++)
      for (int c = 0; c < DB; c++) begin
        read(2'(RB_LAMBDA), r, c, lam[r][c]);
        read(2'(RB_U), r, c, ut[r][c]);
        read(2'(RB_V), r, c, vt[r][c]);
      end
    for (int r = 0; r < DB; r++)
      for (int c = 0; c < DB; c++) begin
        if (r != c) near("offdiag", lam[r][c], 0.0, 1.0 / 4096.0);
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
    finished = 1'b1;
  end

endmodule
