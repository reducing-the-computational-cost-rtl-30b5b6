// tb_contract_engine: self-checking test of the quad-tile contraction.
// Uses a small, deliberately uneven shape (NI=2, NJ=3, NK=4, NL=2) so that
// every index has its own size. The reference M[j][i][l] = sum_k
// A[i][k] * B[j][l][k] is computed element by element in double precision
// from the same inputs. Also checks the latency, NK + 1 clocks from start to
// done, that busy is high in between, and that a second contraction with new
// data overwrites the first.
module tb_contract_engine;
  import tn_pkg::*;

  localparam int unsigned NI = 2, NJ = 3, NK = 4, NL = 2;

  logic clk = 1'b0, rst_n = 1'b0, start = 1'b0;
  tile_t a_tile [NI][NK];
  tile_t b_tile [NJ][NL][NK];
  tile_t m_tile [NJ][NI][NL];
  logic busy, done;
  int checks = 0, failures = 0;

  real ar [2*NI][2*NK];
  real br [2*NJ][NL][2*NK];

  always #5 clk = ~clk;

  contract_engine #(.NI(NI), .NJ(NJ), .NK(NK), .NL(NL)) dut (
    .clk, .rst_n, .start, .a_tile, .b_tile, .m_tile, .busy, .done
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

  task automatic fill();
    for (int i = 0; i < 2*NI; i++)
      for (int k = 0; k < 2*NK; k++) ar[i][k] = fx2r(r2fx(rnd()));
    for (int j = 0; j < 2*NJ; j++)
      for (int l = 0; l < NL; l++)
        for (int k = 0; k < 2*NK; k++) br[j][l][k] = fx2r(r2fx(rnd()));
    for (int ti = 0; ti < NI; ti++)
      for (int tk = 0; tk < NK; tk++)
        a_tile[ti][tk] = '{r2fx(ar[2*ti][2*tk]), r2fx(ar[2*ti][2*tk+1]),
                           r2fx(ar[2*ti+1][2*tk]), r2fx(ar[2*ti+1][2*tk+1])};
    for (int tj = 0; tj < NJ; tj++)
      for (int l = 0; l < NL; l++)
        for (int tk = 0; tk < NK; tk++)
          b_tile[tj][l][tk] = '{r2fx(br[2*tj][l][2*tk]), r2fx(br[2*tj][l][2*tk+1]),
                                r2fx(br[2*tj+1][l][2*tk]), r2fx(br[2*tj+1][l][2*tk+1])};
  endtask

  task automatic run_and_check();
    int cyc;
    @(negedge clk);
    start = 1'b1;
    @(negedge clk);
    start = 1'b0;
    cyc = 1;
    while (!done) begin
      checks++;
      if (!busy) begin failures++; $display("FAIL busy low while working"); end
      @(negedge clk);
      cyc++;
    end
    checks++;
    if (cyc != NK + 1) begin
      failures++;
      $display("FAIL latency %0d expected %0d", cyc, NK + 1);
    end
    for (int j = 0; j < 2*NJ; j++)
      for (int i = 0; i < 2*NI; i++)
        for (int l = 0; l < NL; l++) begin
          real ref_v, got;
          ref_v = 0.0;
          for (int k = 0; k < 2*NK; k++) ref_v += ar[i][k] * br[j][l][k];
          got = fx2r(tile_get(m_tile[j/2][i/2][l], {j[0], i[0]}));
          checks++;
          if ((got - ref_v) > 1.0e-5 || (ref_v - got) > 1.0e-5) begin
            failures++;
            $display("FAIL M[%0d][%0d][%0d] got %f exp %f", j, i, l, got, ref_v);
          end
        end
  endtask

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    fill();
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    run_and_check();
    fill();
    run_and_check();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
