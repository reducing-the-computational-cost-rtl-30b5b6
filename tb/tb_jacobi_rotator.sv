// tb_jacobi_rotator: self-checking test of the rotation-layer block
// processor. Random blocks and random angles; the reference computes
// J_l(p)^T M J_r(q), J_l(p)^T U and J_r(p)^T V in double precision with
// $cos/$sin of the same angles.
module tb_jacobi_rotator;
  import tn_pkg::*;

  tile_t m_in, u_in, v_in, m_out, u_out, v_out;
  fx_t row_cos_l, row_sin_l, row_cos_r, row_sin_r, col_cos_r, col_sin_r;
  int checks = 0, failures = 0;

  jacobi_rotator dut (.m_in, .u_in, .v_in, .row_cos_l, .row_sin_l, .row_cos_r,
                      .row_sin_r, .col_cos_r, .col_sin_r, .m_out, .u_out, .v_out);

  function automatic real fx2r(fx_t v);
    return real'(v) / real'(1 << FX_FRAC);
  endfunction
  function automatic fx_t r2fx(real v);
    return fx_t'($rtoi(v * real'(1 << FX_FRAC)));
  endfunction
  function automatic real rnd();
    return (real'($urandom % 2000001) - 1000000.0) / 1000000.0;
  endfunction

  typedef real mat_t [2][2];

  function automatic mat_t mul(mat_t x, mat_t y);
    mat_t r;
    for (int i = 0; i < 2; i++)
      for (int j = 0; j < 2; j++) r[i][j] = x[i][0]*y[0][j] + x[i][1]*y[1][j];
    return r;
  endfunction
  function automatic mat_t rot(real th, bit transpose);
    mat_t r;
    r[0][0] = $cos(th); r[1][1] = $cos(th);
    r[0][1] = transpose ? -$sin(th) : $sin(th);
    r[1][0] = transpose ? $sin(th) : -$sin(th);
    return r;
  endfunction
  function automatic tile_t to_tile(mat_t x);
    return '{r2fx(x[0][0]), r2fx(x[0][1]), r2fx(x[1][0]), r2fx(x[1][1])};
  endfunction

  task automatic cmp(string what, tile_t got, mat_t expv);
    for (int e = 0; e < 4; e++) begin
      real g, x;
      g = fx2r(tile_get(got, 2'(e)));
      x = expv[e/2][e%2];
      checks++;
      if ((g - x) > 1e-5 || (x - g) > 1e-5) begin
        failures++;
        $display("FAIL %s elem %0d got %f exp %f", what, e, g, x);
      end
    end
  endtask

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    mat_t m, u, v;
    real tl, trp, trq;
    for (int n = 0; n < 300; n++) begin
      for (int i = 0; i < 2; i++)
        for (int j = 0; j < 2; j++) begin
          m[i][j] = fx2r(r2fx(4.0*rnd()));
          u[i][j] = fx2r(r2fx(rnd()));
          v[i][j] = fx2r(r2fx(rnd()));
        end
      tl = 3.14159265 * rnd(); trp = 3.14159265 * rnd(); trq = 3.14159265 * rnd();
      m_in = to_tile(m); u_in = to_tile(u); v_in = to_tile(v);
      row_cos_l = r2fx($cos(tl));  row_sin_l = r2fx($sin(tl));
      row_cos_r = r2fx($cos(trp)); row_sin_r = r2fx($sin(trp));
      col_cos_r = r2fx($cos(trq)); col_sin_r = r2fx($sin(trq));
      #1;
      cmp("M", m_out, mul(mul(rot(tl, 1'b1), m), rot(trq, 1'b0)));
      cmp("U", u_out, mul(rot(tl, 1'b1), u));
      cmp("V", v_out, mul(rot(trp, 1'b1), v));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
