// cordic: iterative CORDIC unit for the angle computations of the Jacobi SVD.
//
// Two modes, chosen by `vectoring` when `start` is taken:
//   vectoring = 1: (x_in, y_in) is turned onto the positive x axis; z_out is
//                  atan2(y_in, x_in) in (-pi, pi] and x_out is the length of
//                  the vector times the CORDIC gain (about 1.6468).
//                  atan2(0, 0) is returned as 0.
//   vectoring = 0: z_in (an angle in [-pi, pi]) is turned into x_out =
//                  cos(z_in) and y_out = sin(z_in); x_in and y_in are unused.
// A vector in the left half plane (vectoring), or an angle beyond +-pi/2
// (rotation), is first turned by pi so the shift-and-add iterations, which
// converge only for angles up to about 1.74 rad, always apply.
//
// Timing: one micro-rotation per clock. The edge that takes `start` loads the
// registers, ITER more edges iterate, and `done` is high for one cycle after
// the last one: results are valid ITER + 1 edges after start and stay until
// the next start. A start while busy is ignored.
//
// The original uses DSP slices for "trigonometric function evaluations
// during the SVD procedure" without saying how; CORDIC, its iteration count
// and the two guard bits on x and y are this design's own choice.
module cordic
  import tn_pkg::*;
#(
  parameter int unsigned ITER = 24
) (
  input  logic clk,
  input  logic rst_n,
  input  logic start,
  input  logic vectoring,
  input  fx_t  x_in,
  input  fx_t  y_in,
  input  fx_t  z_in,
  output fx_t  x_out,
  output fx_t  y_out,
  output fx_t  z_out,
  output logic busy,
  output logic done
);

  localparam int unsigned GW = FX_W + 2;   // guard bits for the gain
  localparam int unsigned IW = $clog2(ITER + 1);
  typedef logic signed [GW-1:0] gx_t;

  gx_t           x_q, y_q;
  fx_t           z_q;
  logic          vec_q, neg_q, run_q;
  logic [IW-1:0] i_q;

  // Load values, with the half-plane / range pre-rotation by pi.
  gx_t  x0, y0;
  fx_t  z0;
  logic neg0;
  always_comb begin
    neg0 = 1'b0;
    if (vectoring) begin
      if (x_in < 0) begin
        x0 = -gx_t'(x_in);
        y0 = -gx_t'(y_in);
        z0 = (y_in >= 0) ? FX_PI : -FX_PI;
      end else begin
        x0 = gx_t'(x_in);
        y0 = gx_t'(y_in);
        z0 = '0;
      end
    end else begin
      x0 = gx_t'(CORDIC_INV_GAIN);
      y0 = '0;
      if (z_in > FX_HALF_PI) begin
        z0   = z_in - FX_PI;
        neg0 = 1'b1;
      end else if (z_in < -FX_HALF_PI) begin
        z0   = z_in + FX_PI;
        neg0 = 1'b1;
      end else begin
        z0 = z_in;
      end
    end
  end

  // One micro-rotation by +-atan(2^-i).
  logic dir_neg;   // rotate clockwise
  always_comb begin
    if (vec_q) dir_neg = (y_q >= 0);
    else       dir_neg = (z_q < 0);
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      run_q <= 1'b0;
      done  <= 1'b0;
      i_q   <= '0;
      vec_q <= 1'b0;
      neg_q <= 1'b0;
      x_q   <= '0;
      y_q   <= '0;
      z_q   <= '0;
    end else begin
      done <= 1'b0;
      if (!run_q) begin
        if (start) begin
          run_q <= 1'b1;
          i_q   <= '0;
          vec_q <= vectoring;
          neg_q <= neg0;
          x_q   <= x0;
          y_q   <= y0;
          z_q   <= z0;
        end
      end else begin
        // A zero vector has no direction: leave it (and its angle) alone.
        if (!(vec_q && x_q == 0 && y_q == 0)) begin
          if (dir_neg) begin
            x_q <= x_q + (y_q >>> i_q);
            y_q <= y_q - (x_q >>> i_q);
            z_q <= z_q + cordic_atan(int'(i_q));
          end else begin
            x_q <= x_q - (y_q >>> i_q);
            y_q <= y_q + (x_q >>> i_q);
            z_q <= z_q - cordic_atan(int'(i_q));
          end
        end
        i_q <= i_q + 1'b1;
        if (i_q == IW'(ITER - 1)) begin
          run_q <= 1'b0;
          done  <= 1'b1;
        end
      end
    end
  end

  assign x_out = neg_q ? -fx_t'(x_q) : fx_t'(x_q);
  assign y_out = neg_q ? -fx_t'(y_q) : fx_t'(y_q);
  assign z_out = z_q;
  assign busy  = run_q;

  initial begin
    assert (ITER >= 1 && ITER <= CORDIC_MAX_ITER)
      else $error("cordic: ITER must be 1..%0d", CORDIC_MAX_ITER);
  end

endmodule
