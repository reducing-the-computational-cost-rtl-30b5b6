// tb_workload_scaling: runs one update (contraction, then SVD of its
// result) at every iTEBD bond dimension of the evaluation, D_b = 2, 4, 6,
// 8, 10, 12; D_b = 2 is also the size (D_b^2 = 4) of the smallest HOTRG case.
// Each size has its own accelerator instance (tn_accel_top with DB = D_b),
// driven by a wl_runner that checks the numbers. On top of that this bench
// checks the time scaling the tile partitioning is meant to give:
//   - the contraction takes D_b/2 + 1 clocks (linear in D_b);
//   - each SVD sweep takes (D_b - 1)*(2*ITER + 5) + 1 clocks (linear in
//     D_b, the Jacobi step itself being the same for all sizes).
// It prints a table of the clock counts.
module tb_workload_scaling;

  localparam int unsigned NSZ = 6;
  localparam int unsigned ITER = 24;
  localparam int unsigned SIZES [NSZ] = '{2, 4, 6, 8, 10, 12};

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic [NSZ-1:0] fin;
  int chk [NSZ];
  int fail [NSZ];
  int ccyc [NSZ];
  int scyc [NSZ];
  int swp [NSZ];
  int checks = 0, failures = 0;

  for (genvar g = 0; g < NSZ; g++) begin : g_size
    wl_runner #(.DB(SIZES[g]), .SEED(17 + g)) u_run (
      .clk, .rst_n, .finished(fin[g]), .checks(chk[g]), .failures(fail[g]),
      .contract_cycles(ccyc[g]), .svd_cycles(scyc[g]), .svd_sweeps_run(swp[g])
    );
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    wait (fin == '1);
    $display("  D_b  contraction  SVD sweeps  SVD clocks  clocks/sweep");
    for (int g = 0; g < NSZ; g++) begin
      int per_sweep;
      checks += chk[g];
      failures += fail[g];
      per_sweep = (swp[g] > 0) ? (scyc[g] - 1) / swp[g] : 0;
      $display("  %3d  %11d  %10d  %10d  %12d", SIZES[g], ccyc[g], swp[g], scyc[g], per_sweep);
      checks++;
      if (ccyc[g] != int'(SIZES[g] / 2 + 1)) begin
        failures++;
        $display("FAIL D_b=%0d contraction %0d clocks", SIZES[g], ccyc[g]);
      end
      checks++;
      if (swp[g] == 0 || scyc[g] != 1 + swp[g] * ((int'(SIZES[g]) - 1) * int'(2 * ITER + 5) + 1)) begin
        failures++;
        $display("FAIL D_b=%0d SVD %0d clocks for %0d sweeps", SIZES[g], scyc[g], swp[g]);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
