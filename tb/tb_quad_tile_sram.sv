// tb_quad_tile_sram: self-checking test of one quad-tile memory.
// Checks reset to zero, that each element write lands in the addressed
// element only (a shadow copy of the tile is the reference), that the write
// is visible one clock after it, and that a cycle without write keeps data.
module tb_quad_tile_sram;
  import tn_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0, we = 1'b0;
  logic [1:0] waddr = '0;
  fx_t wdata = '0;
  tile_t tile;
  int checks = 0, failures = 0;
  fx_t shadow [4];

  always #5 clk = ~clk;

  quad_tile_sram dut (.clk, .rst_n, .we, .waddr, .wdata, .tile);

  task automatic check_tile(string what);
    for (int e = 0; e < 4; e++) begin
      checks++;
      if (tile_get(tile, 2'(e)) !== shadow[e]) begin
        failures++;
        $display("FAIL %s elem %0d got %h exp %h", what, e, tile_get(tile, 2'(e)), shadow[e]);
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
    for (int e = 0; e < 4; e++) shadow[e] = '0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    check_tile("reset");
    for (int n = 0; n < 200; n++) begin
      we    = ($urandom % 4) != 0;
      waddr = 2'($urandom);
      wdata = fx_t'($urandom);
      @(negedge clk);
      if (we) shadow[waddr] = wdata;
      check_tile("write");
    end
    we = 1'b0;
    @(negedge clk);
    check_tile("hold");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
