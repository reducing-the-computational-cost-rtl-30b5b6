// tn_accel_top: quad-tile tensor-network accelerator, top level.
//
// The two operations that dominate tensor-network algorithms such as iTEBD
// and HOTRG, tensor contraction and singular value decomposition, each get a
// fully parallel array of 2x2-tile processors:
//   - input tile memories A (NB x NB tiles of A_{ik}), B (NB x NL x NB tiles
//     of B_{jlk}) and S (NB x NB tiles of a matrix for the SVD), each tile a
//     quad_tile_sram;
//   - contract_engine, which forms M_{j[il]} = sum_k A_{ik} B_{jlk} straight
//     into its output tile memory (the summation over tile index K takes one
//     cycle per K);
//   - svd_engine, the systolic two-sided Jacobi SVD of a DB x DB matrix,
//     whose input is chosen by `svd_src`: the S memory (0) or the l = 0
//     slice of the contraction result M_{j[i,0]} (1), so that a contraction
//     can be followed by the SVD of its result without moving data.
// NB = DB/2 tiles per index, with DB the bond dimension; NL is the size of
// the unsplit index l.
//
// Host port. Write: wr_en with wr_bank (0 = A, 1 = B, 2 = S), element row
// wr_row, column wr_col (for B: row j, column k, and wr_l = l), value
// wr_data; one element per clock. Read: rd_bank (0 = contraction result M
// (row j, column i, slice rd_l), 1 = SVD Lambda, 2 = U^T, 3 = V^T),
// rd_row, rd_col; rd_data is registered, valid one clock later. Control:
// contract_start / svd_start pulses, busy levels and one-cycle done pulses.
// Neither engine checks whether the other is busy: the host starts the SVD
// after the contraction has finished.
//
// Follows the original: memories per tile on both sides of parallel compute
// layers, and contraction followed by SVD as the two steps of an update.
// This design's own choice: the host port, the bank numbering, the input
// select and the number format. The iTEBD and HOTRG sequencing around these
// operations (gate application, truncation, normalization) is left to the
// host.
module tn_accel_top
  import tn_pkg::*;
#(
  parameter int unsigned DB   = 12,
  parameter int unsigned NL   = 1,
  parameter int unsigned ITER = 24
) (
  input  logic        clk,
  input  logic        rst_n,
  // Host write port
  input  logic        wr_en,
  input  logic [1:0]  wr_bank,
  input  logic [7:0]  wr_row,
  input  logic [7:0]  wr_col,
  input  logic [7:0]  wr_l,
  input  fx_t         wr_data,
  // Contraction control
  input  logic        contract_start,
  output logic        contract_busy,
  output logic        contract_done,
  // SVD control
  input  logic        svd_start,
  input  logic        svd_src,
  input  fx_t         svd_tol,
  input  logic [7:0]  svd_max_sweeps,
  output logic        svd_busy,
  output logic        svd_done,
  output logic        svd_converged,
  output logic [7:0]  svd_sweeps,
  output logic [15:0] svd_steps,
  // Host read port
  input  logic [1:0]  rd_bank,
  input  logic [7:0]  rd_row,
  input  logic [7:0]  rd_col,
  input  logic [7:0]  rd_l,
  output fx_t         rd_data
);

  localparam int unsigned NB = DB / 2;

  tile_t a_tile [NB][NB];
  tile_t b_tile [NB][NL][NB];
  tile_t s_tile [NB][NB];
  tile_t m_tile [NB][NB][NL];
  tile_t svd_in [NB][NB];
  tile_t lam_tile [NB][NB];
  tile_t u_tile [NB][NB];
  tile_t v_tile [NB][NB];

  wire [1:0] wr_elem = {wr_row[0], wr_col[0]};

  // Input tile memories.
  for (genvar t = 0; t < NB; t++) begin : g_t
    for (genvar k = 0; k < NB; k++) begin : g_k
      quad_tile_sram u_a (
        .clk, .rst_n,
        .we(wr_en && wr_bank == WB_A && 8'(wr_row[7:1]) == 8'(t) && 8'(wr_col[7:1]) == 8'(k)),
        .waddr(wr_elem), .wdata(wr_data), .tile(a_tile[t][k])
      );
      quad_tile_sram u_s (
        .clk, .rst_n,
        .we(wr_en && wr_bank == WB_S && 8'(wr_row[7:1]) == 8'(t) && 8'(wr_col[7:1]) == 8'(k)),
        .waddr(wr_elem), .wdata(wr_data), .tile(s_tile[t][k])
      );
      for (genvar l = 0; l < NL; l++) begin : g_l
        quad_tile_sram u_b (
          .clk, .rst_n,
          .we(wr_en && wr_bank == WB_B && 8'(wr_row[7:1]) == 8'(t) &&
              8'(wr_col[7:1]) == 8'(k) && wr_l == 8'(l)),
          .waddr(wr_elem), .wdata(wr_data), .tile(b_tile[t][l][k])
        );
      end
    end
  end

  contract_engine #(.NI(NB), .NJ(NB), .NK(NB), .NL(NL)) u_contract (
    .clk, .rst_n, .start(contract_start),
    .a_tile, .b_tile, .m_tile,
    .busy(contract_busy), .done(contract_done)
  );

  // SVD input select: host matrix S or the l = 0 slice of the contraction.
  always_comb begin
    for (int p = 0; p < NB; p++)
      for (int q = 0; q < NB; q++)
        svd_in[p][q] = svd_src ? m_tile[p][q][0] : s_tile[p][q];
  end

  svd_engine #(.N(DB), .ITER(ITER)) u_svd (
    .clk, .rst_n, .start(svd_start),
    .m_in(svd_in), .tol(svd_tol), .max_sweeps(svd_max_sweeps),
    .m_out(lam_tile), .u_out(u_tile), .v_out(v_tile),
    .busy(svd_busy), .done(svd_done), .converged(svd_converged),
    .sweeps(svd_sweeps), .steps(svd_steps)
  );

  // Registered read port.
  localparam int unsigned TW = (NB > 1) ? $clog2(NB) : 1;
  localparam int unsigned LW = (NL > 1) ? $clog2(NL) : 1;
  logic [TW-1:0] rt, rc;
  logic [LW-1:0] rl;
  tile_t         rd_tile;
  always_comb begin
    // Out-of-range indices wrap into the array.
    rt = TW'(int'(rd_row[7:1]) % NB);
    rc = TW'(int'(rd_col[7:1]) % NB);
    rl = LW'(int'(rd_l) % NL);
    case (rd_bank_e'(rd_bank))
      RB_M:      rd_tile = m_tile[rt][rc][rl];
      RB_LAMBDA: rd_tile = lam_tile[rt][rc];
      RB_U:      rd_tile = u_tile[rt][rc];
      default:   rd_tile = v_tile[rt][rc];
    endcase
  end

  always_ff @(posedge clk) begin
    if (!rst_n) rd_data <= '0;
    else        rd_data <= tile_get(rd_tile, {rd_row[0], rd_col[0]});
  end

endmodule
