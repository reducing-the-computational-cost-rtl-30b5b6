// contract_engine: quad-tile tensor contraction
//   M_{j[il]} = sum_k A_{ik} B_{jlk}
// written directly in the layout of the result, so that no separate permute
// or reshape step is needed.
//
// Indices i, j, k are split into a tile index (I, J, K) and an index inside
// the tile (i', j', k'), each of size two; l is not split (NL values). The
// work is done by two compute layers:
//   1. Multiply layer: for every (K, J, I, L) at once, one tile_mul forms
//      the intermediate tile M^[K]_{JIL} = B_{JLK} * A_{IK}^T, i.e. the
//      product over k' inside the tile. All NI*NJ*NL*NK tile products are
//      made in a single cycle whatever the tensor size.
//   2. Summation layer: the intermediate tiles are summed over the tile
//      index K, one K per cycle. The intermediate registers form a shift
//      register along K, so each output accumulator always adds slice 0.
// Output tile (J, I, L) holds element [j'][i'] = M_{(2J+j'),(2I+i'),l}.
//
// Timing: `start` is taken in IDLE. The clock edge that takes it registers
// all products; the next NK edges accumulate; `done` is high for one cycle
// after the last accumulation, so done follows start by LATENCY = NK + 1
// edges, linear in the number of K tiles. `m_tile` holds the result until the
// next start. A start while busy is ignored.
//
// Follows the original: both layers, full parallelism of the first, linear
// time of the second, and direct mapping to the M_{J[IL]} layout. This
// design's own choices: the fixed-point format (accumulation wraps on
// overflow), the shift register along K, the start/busy/done handshake.
module contract_engine
  import tn_pkg::*;
#(
  parameter int unsigned NI = 6,
  parameter int unsigned NJ = 6,
  parameter int unsigned NK = 6,
  parameter int unsigned NL = 1
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  start,
  input  tile_t a_tile [NI][NK],
  input  tile_t b_tile [NJ][NL][NK],
  output tile_t m_tile [NJ][NI][NL],
  output logic  busy,
  output logic  done
);

  localparam int unsigned KW = (NK > 1) ? $clog2(NK + 1) : 1;

  typedef enum logic [1:0] {S_IDLE, S_SUM} state_e;
  state_e      state_q;
  logic [KW-1:0] k_q;

  tile_t prod_c [NK][NJ][NI][NL];
  tile_t prod_q [NK][NJ][NI][NL];
  tile_t acc_q  [NJ][NI][NL];

  // Multiply layer: every tile pair at once.
  for (genvar gk = 0; gk < NK; gk++) begin : g_k
    for (genvar gj = 0; gj < NJ; gj++) begin : g_j
      for (genvar gi = 0; gi < NI; gi++) begin : g_i
        for (genvar gl = 0; gl < NL; gl++) begin : g_l
          tile_mul u_mul (
            .x (b_tile[gj][gl][gk]),
            .y (tile_transpose(a_tile[gi][gk])),
            .c (prod_c[gk][gj][gi][gl])
          );
        end
      end
    end
  end

  wire take = (state_q == S_IDLE) && start;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state_q <= S_IDLE;
      k_q     <= '0;
      done    <= 1'b0;
    end else begin
      done <= 1'b0;
      case (state_q)
        S_IDLE: if (start) begin
          state_q <= S_SUM;
          k_q     <= '0;
        end
        S_SUM: begin
          k_q <= k_q + 1'b1;
          if (k_q == KW'(NK - 1)) begin
            state_q <= S_IDLE;
            done    <= 1'b1;
          end
        end
        default: state_q <= S_IDLE;
      endcase
    end
  end

  // Intermediate tiles and accumulators: data path without reset (written
  // before they are read in every operation).
  always_ff @(posedge clk) begin
    for (int j = 0; j < NJ; j++)
      for (int i = 0; i < NI; i++)
        for (int l = 0; l < NL; l++) begin
          if (take) begin
            for (int k = 0; k < NK; k++) prod_q[k][j][i][l] <= prod_c[k][j][i][l];
            acc_q[j][i][l] <= '0;
          end else if (state_q == S_SUM) begin
            for (int k = 0; k + 1 < NK; k++) prod_q[k][j][i][l] <= prod_q[k+1][j][i][l];
            acc_q[j][i][l] <= tile_add(acc_q[j][i][l], prod_q[0][j][i][l]);
          end
        end
  end

  assign m_tile = acc_q;
  assign busy   = (state_q != S_IDLE);

endmodule
