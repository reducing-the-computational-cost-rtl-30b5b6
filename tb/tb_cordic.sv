// tb_cordic: self-checking test of the CORDIC unit.
// Vectoring: random vectors in all four quadrants, on the axes and the zero
// vector; z_out is compared with $atan2 and x_out with gain * length.
// Rotation: random angles over [-pi, pi]; x_out and y_out are compared with
// $cos and $sin. Latency must be ITER + 1 clocks from start to done.
module tb_cordic;
  import tn_pkg::*;

  localparam int unsigned ITER = 24;
  localparam real GAIN = 1.646760258121;

  logic clk = 1'b0, rst_n = 1'b0, start = 1'b0, vectoring = 1'b0;
  fx_t x_in = '0, y_in = '0, z_in = '0, x_out, y_out, z_out;
  logic busy, done;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  cordic #(.ITER(ITER)) dut (.clk, .rst_n, .start, .vectoring, .x_in, .y_in, .z_in,
                             .x_out, .y_out, .z_out, .busy, .done);

  function automatic real fx2r(fx_t v);
    return real'(v) / real'(1 << FX_FRAC);
  endfunction
  function automatic fx_t r2fx(real v);
    return fx_t'($rtoi(v * real'(1 << FX_FRAC)));
  endfunction
  function automatic real rnd();
    return (real'($urandom % 2000001) - 1000000.0) / 1000000.0;
  endfunction

  task automatic near(string what, real got, real expv, real tol);
    checks++;
    if ((got - expv) > tol || (expv - got) > tol) begin
      failures++;
      $display("FAIL %s got %f exp %f", what, got, expv);
    end
  endtask

  task automatic run(logic vec, real x, real y, real z);
    int cyc;
    @(negedge clk);
    vectoring = vec; x_in = r2fx(x); y_in = r2fx(y); z_in = r2fx(z);
    start = 1'b1;
    @(negedge clk);
    start = 1'b0;
    cyc = 1;
    while (!done) begin @(negedge clk); cyc++; end
    checks++;
    if (cyc != ITER + 1) begin failures++; $display("FAIL latency %0d", cyc); end
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    real x, y, z, pi;
    pi = 3.14159265358979;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    // Fixed cases: axes and the zero vector.
    run(1'b1, 1.0, 0.0, 0.0);   near("atan2(0,1)",  fx2r(z_out), 0.0, 1e-5);
    run(1'b1, 0.0, 2.0, 0.0);   near("atan2(2,0)",  fx2r(z_out), pi/2, 1e-5);
    run(1'b1, -1.5, 0.0, 0.0);  near("atan2(0,-1.5)", fx2r(z_out), pi, 1e-5);
    run(1'b1, 0.0, -3.0, 0.0);  near("atan2(-3,0)", fx2r(z_out), -pi/2, 1e-5);
    run(1'b1, 0.0, 0.0, 0.0);   near("atan2(0,0)",  fx2r(z_out), 0.0, 1e-6);
    for (int n = 0; n < 100; n++) begin
      x = 8.0 * rnd(); y = 8.0 * rnd();
      x = fx2r(r2fx(x)); y = fx2r(r2fx(y));
      run(1'b1, x, y, 0.0);
      near("vector angle", fx2r(z_out), $atan2(y, x), 2e-5);
      near("vector length", fx2r(x_out), GAIN * $sqrt(x*x + y*y), 1e-4);
    end
    for (int n = 0; n < 100; n++) begin
      z = fx2r(r2fx(pi * rnd()));
      run(1'b0, 0.0, 0.0, z);
      near("cos", fx2r(x_out), $cos(z), 2e-5);
      near("sin", fx2r(y_out), $sin(z), 2e-5);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
