// tn_pkg: number format, tile type and shared constants of the quad-tile
// tensor-network accelerator.
//
// Every tensor element is a signed fixed-point number of FX_W bits with
// FX_FRAC fraction bits (Q8.24). The format is this design's own choice; the
// original work generated its arithmetic with a high-level-synthesis tool and
// does not state a number format. A quad tile is the 2x2 group of elements
// that one tile memory holds and one tile processor works on. Angles are
// radians in the same Q8.24 format. The CORDIC arctangent table entry i is
// round(atan(2^-i) * 2^FX_FRAC); the rotation-mode start value is the
// reciprocal CORDIC gain 1/prod_i sqrt(1 + 2^-2i) in Q8.24.
package tn_pkg;

  localparam int unsigned FX_W    = 32;
  localparam int unsigned FX_FRAC = 24;

  typedef logic signed [FX_W-1:0]   fx_t;
  typedef logic signed [2*FX_W-1:0] fx2_t;

  // One quad tile: element rc = row r, column c of the 2x2 block.
  typedef struct packed {
    fx_t e00;
    fx_t e01;
    fx_t e10;
    fx_t e11;
  } tile_t;

  localparam fx_t FX_ONE     = fx_t'(32'sd16777216);
  localparam fx_t FX_PI      = fx_t'(32'sd52707179);
  localparam fx_t FX_HALF_PI = fx_t'(32'sd26353589);
  localparam fx_t CORDIC_INV_GAIN = fx_t'(32'sd10188014);
  localparam int unsigned CORDIC_MAX_ITER = 28;

  // Banks of the host port of the top level.
  typedef enum logic [1:0] {WB_A = 2'd0, WB_B = 2'd1, WB_S = 2'd2} wr_bank_e;
  typedef enum logic [1:0] {RB_M = 2'd0, RB_LAMBDA = 2'd1, RB_U = 2'd2, RB_V = 2'd3} rd_bank_e;

  // Fixed-point product, rounded toward minus infinity.
  function automatic fx_t fx_mul(fx_t a, fx_t b);
    fx2_t p;
    p = fx2_t'(a) * fx2_t'(b);
    return fx_t'(p >>> FX_FRAC);
  endfunction

  // Element access by 2-bit index {row, col}.
  function automatic fx_t tile_get(tile_t t, logic [1:0] idx);
    case (idx)
      2'd0:    return t.e00;
      2'd1:    return t.e01;
      2'd2:    return t.e10;
      default: return t.e11;
    endcase
  endfunction

  function automatic tile_t tile_transpose(tile_t t);
    tile_t r;
    r.e00 = t.e00;
    r.e01 = t.e10;
    r.e10 = t.e01;
    r.e11 = t.e11;
    return r;
  endfunction

  function automatic tile_t tile_add(tile_t a, tile_t b);
    tile_t r;
    r.e00 = a.e00 + b.e00;
    r.e01 = a.e01 + b.e01;
    r.e10 = a.e10 + b.e10;
    r.e11 = a.e11 + b.e11;
    return r;
  endfunction

  // Rotation J(theta) = [cos sin; -sin cos] built from its cosine and sine.
  function automatic tile_t rot_tile(fx_t c, fx_t s);
    tile_t r;
    r.e00 = c;
    r.e01 = s;
    r.e10 = -s;
    r.e11 = c;
    return r;
  endfunction

  // atan(2^-i) in Q8.24.
  function automatic fx_t cordic_atan(int unsigned i);
    case (i)
       0: return fx_t'(32'sd13176795);
       1: return fx_t'(32'sd7778716);
       2: return fx_t'(32'sd4110060);
       3: return fx_t'(32'sd2086331);
       4: return fx_t'(32'sd1047214);
       5: return fx_t'(32'sd524117);
       6: return fx_t'(32'sd262123);
       7: return fx_t'(32'sd131069);
       8: return fx_t'(32'sd65536);
       9: return fx_t'(32'sd32768);
      10: return fx_t'(32'sd16384);
      11: return fx_t'(32'sd8192);
      12: return fx_t'(32'sd4096);
      13: return fx_t'(32'sd2048);
      14: return fx_t'(32'sd1024);
      15: return fx_t'(32'sd512);
      16: return fx_t'(32'sd256);
      17: return fx_t'(32'sd128);
      18: return fx_t'(32'sd64);
      19: return fx_t'(32'sd32);
      20: return fx_t'(32'sd16);
      21: return fx_t'(32'sd8);
      22: return fx_t'(32'sd4);
      23: return fx_t'(32'sd2);
      24: return fx_t'(32'sd1);
      25: return fx_t'(32'sd0);
      26: return fx_t'(32'sd0);
      27: return fx_t'(32'sd0);
      default: return '0;
    endcase
  endfunction

endpackage
