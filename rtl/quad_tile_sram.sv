// quad_tile_sram: storage for one quad tile, the 2x2 group of tensor elements
// that the accelerator keeps together in one small distributed memory.
//
// The tensor is cut into 2x2 tiles and each tile gets its own memory, so the
// computing layer can read every element of every tile in the same cycle.
// Loading is one element per cycle through a narrow write port addressed by
// the element index {row, col}; reading is the whole tile, all four elements,
// continuously. A write is visible on `tile` one cycle after the clock edge
// that takes it. Synchronous active-low reset clears the tile to zero.
//
// Follows the original: one memory per quad tile (the SRAM boxes of the
// overview figure, built from LUTs and flip-flops). This design's own choice:
// the write port width (one element), the reset and the flip-flop form.
module quad_tile_sram
  import tn_pkg::*;
(
  input  logic       clk,
  input  logic       rst_n,
  input  logic       we,
  input  logic [1:0] waddr,
  input  fx_t        wdata,
  output tile_t      tile
);

  tile_t mem_q;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      mem_q <= '0;
    end else if (we) begin
      case (waddr)
        2'd0:    mem_q.e00 <= wdata;
        2'd1:    mem_q.e01 <= wdata;
        2'd2:    mem_q.e10 <= wdata;
        default: mem_q.e11 <= wdata;
      endcase
    end
  end

  assign tile = mem_q;

endmodule
