// tb_jacobi_angle: self-checking test of the diagonal-block angle processor.
// For random 2x2 blocks (general, symmetric, already diagonal, and the zero
// block) the returned cos/sin pairs are applied in double precision,
// J_l^T M J_r, and both off-diagonal entries must vanish to 1e-4 of the
// block size; each pair must satisfy cos^2 + sin^2 = 1 and agree with the
// returned angles. Both angles must lie within [-pi/2, pi/2]. Latency must be 2*ITER + 3 clocks.
module tb_jacobi_angle;
  import tn_pkg::*;

  localparam int unsigned ITER = 24;

  logic clk = 1'b0, rst_n = 1'b0, start = 1'b0;
  tile_t blk = '0;
  fx_t theta_l, theta_r, cos_l, sin_l, cos_r, sin_r;
  logic busy, done;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  jacobi_angle #(.ITER(ITER)) dut (.clk, .rst_n, .start, .blk, .theta_l, .theta_r,
                                   .cos_l, .sin_l, .cos_r, .sin_r, .busy, .done);

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

  task automatic near(string what, real got, real expv, real tol);
    checks++;
    if (absr(got - expv) > tol) begin
      failures++;
      $display("FAIL %s got %f exp %f", what, got, expv);
    end
  endtask

  task automatic run(real a, real b, real c, real d);
    int cyc;
    real cl, sl, cr, sr, o01, o10, scale, t00, t01, t10, t11;
    @(negedge clk);
    blk = '{r2fx(a), r2fx(b), r2fx(c), r2fx(d)};
    start = 1'b1;
    @(negedge clk);
    start = 1'b0;
    cyc = 1;
    while (!done) begin @(negedge clk); cyc++; end
    checks++;
    if (cyc != 2 * ITER + 3) begin failures++; $display("FAIL latency %0d", cyc); end
    cl = fx2r(cos_l); sl = fx2r(sin_l); cr = fx2r(cos_r); sr = fx2r(sin_r);
    checks++;
    if (absr(fx2r(theta_l)) > 1.5708 || absr(fx2r(theta_r)) > 1.5708) begin
      failures++;
      $display("FAIL angle beyond pi/2: %f %f", fx2r(theta_l), fx2r(theta_r));
    end
    near("norm l", cl*cl + sl*sl, 1.0, 1e-4);
    near("norm r", cr*cr + sr*sr, 1.0, 1e-4);
    near("cos l", cl, $cos(fx2r(theta_l)), 1e-4);
    near("sin r", sr, $sin(fx2r(theta_r)), 1e-4);
    // T = J_l^T M, with J^T = [c -s; s c]; then O = T J_r with J = [c s; -s c].
    t00 = cl*a - sl*c; t01 = cl*b - sl*d;
    t10 = sl*a + cl*c; t11 = sl*b + cl*d;
    o01 = t00*sr + t01*cr;
    o10 = t10*cr - t11*sr;
    scale = absr(a) + absr(b) + absr(c) + absr(d) + 1e-3;
    near("offdiag 01", o01 / scale, 0.0, 1e-4);
    near("offdiag 10", o10 / scale, 0.0, 1e-4);
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    real a, b, d;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    run(0.0, 0.0, 0.0, 0.0);
    run(2.0, 0.0, 0.0, -1.0);
    run(1.0, 1.0, 1.0, 1.0);
    for (int n = 0; n < 60; n++) run(4.0*rnd(), 4.0*rnd(), 4.0*rnd(), 4.0*rnd());
    for (int n = 0; n < 40; n++) begin
      a = 4.0*rnd(); b = 4.0*rnd(); d = 4.0*rnd();
      run(a, b, b, d);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
