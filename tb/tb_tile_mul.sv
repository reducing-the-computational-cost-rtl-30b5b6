// tb_tile_mul: self-checking test of the 2x2 tile multiplier.
// Random tiles with entries in [-4, 4] are multiplied; the reference is the
// same product in double precision, compared to within 2^-20.
module tb_tile_mul;
  import tn_pkg::*;

  tile_t x, y, c;
  int checks = 0, failures = 0;
  real xr [2][2], yr [2][2], cr [2][2];

  tile_mul dut (.x, .y, .c);

  function automatic real fx2r(fx_t v);
    return real'(v) / real'(1 << FX_FRAC);
  endfunction

  function automatic fx_t r2fx(real v);
    return fx_t'($rtoi(v * real'(1 << FX_FRAC)));
  endfunction

  function automatic real rnd(real range);
    return range * (real'($urandom % 2000001) - 1000000.0) / 1000000.0;
  endfunction

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int n = 0; n < 500; n++) begin
      for (int r = 0; r < 2; r++)
        for (int k = 0; k < 2; k++) begin
          xr[r][k] = fx2r(r2fx(rnd(4.0)));
          yr[r][k] = fx2r(r2fx(rnd(4.0)));
        end
      x = '{r2fx(xr[0][0]), r2fx(xr[0][1]), r2fx(xr[1][0]), r2fx(xr[1][1])};
      y = '{r2fx(yr[0][0]), r2fx(yr[0][1]), r2fx(yr[1][0]), r2fx(yr[1][1])};
      for (int r = 0; r < 2; r++)
        for (int k = 0; k < 2; k++)
          cr[r][k] = xr[r][0] * yr[0][k] + xr[r][1] * yr[1][k];
      #1;
      for (int e = 0; e < 4; e++) begin
        real got;
        got = fx2r(tile_get(c, 2'(e)));
        checks++;
        if ((got - cr[e/2][e%2]) > 1.0e-6 || (cr[e/2][e%2] - got) > 1.0e-6) begin
          failures++;
          $display("FAIL n=%0d elem %0d got %f exp %f", n, e, got, cr[e/2][e%2]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
