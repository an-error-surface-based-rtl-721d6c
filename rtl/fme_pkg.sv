// fme_pkg -- types, constants and small pure functions shared by the
// error-surface fractional motion estimation (FME) engine.
//
// The engine works on one 128x128 CTU at a time, cut into 256 8x8 blocks that
// are visited in Z (Morton) order. For every block it runs the CU shapes that
// contain the block, one after another, each for 8 cycles (one 8x1 row per
// cycle). The thirteen shapes and their order are the ones printed in the
// schedule of the source design: 8x8, 16x8, 8x16, 16x16, 32x16, 16x32, 32x32,
// 64x32, 32x64, 64x64, 128x64, 64x128, 128x128 (width x height). Five of them
// (the squares) remain in quadtree-only mode.
//
// Candidate numbering: the nine integer positions around the IMV are numbered
// 0..8 in raster order, candidate i sits at dx = i%3-1, dy = i/3-1, with y
// growing downwards. Candidate 4 is the IMV itself.
package fme_pkg;

  // ---------------------------------------------------------------- sizes
  localparam int unsigned NCAND    = 9;   // IMV and its eight neighbours
  localparam int unsigned NSHAPE   = 13;  // CU shapes searched per 8x8 block
  localparam int unsigned CTU_BLK  = 16;  // 128/8 blocks per CTU side
  localparam int unsigned NBLK     = CTU_BLK * CTU_BLK; // 256
  localparam int unsigned PIX_W    = 8;   // pixel bit depth
  localparam int unsigned RES_W    = PIX_W + 1;  // residual, signed
  localparam int unsigned SATD_W   = 18;  // SATD of one 8x8 block (max 261120)
  localparam int unsigned ACC_W    = SATD_W + 8; // SATD of a 128x128 CU
  localparam int unsigned RATE_W   = 16;  // lambda * bits, integer
  localparam int unsigned COST_W   = 16;  // shifted R-D cost fed to the fit
  localparam int unsigned IMV_W    = 14;  // integer MV component, signed
  localparam int unsigned MV_W     = IMV_W + 2; // quarter-pel MV component
  localparam int unsigned Q_W      = COST_W + 6; // 12*P of the fit, signed
  localparam int unsigned PROD_W   = 2 * Q_W + 2; // numerators / denominator
  localparam int unsigned NACC     = 17;  // accumulator sets in the Sum unit

  typedef logic [3:0] shape_t;     // 0..12
  typedef logic [7:0] blk_idx_t;   // Morton index of an 8x8 block in the CTU
  typedef logic [3:0] blk_coord_t; // 8x8 block coordinate inside the CTU

  typedef logic signed [IMV_W-1:0] imv_t;
  typedef logic signed [MV_W-1:0]  mv_t;
  typedef logic [SATD_W-1:0]       satd_t;
  typedef logic [RATE_W-1:0]       rate_t;
  typedef logic [COST_W-1:0]       cost_t;
  typedef logic signed [Q_W-1:0]   q_t;
  typedef logic signed [PROD_W-1:0] prod_t;

  // Everything the pipeline needs to know about the CU a slot belongs to.
  typedef struct packed {
    shape_t     shape;
    blk_coord_t cu_x;      // CU origin, in 8x8 block units
    blk_coord_t cu_y;
    imv_t       imv_x;     // integer MV of the CU (from IME)
    imv_t       imv_y;
  } cu_info_t;

  // One 8-cycle slot of the schedule: an 8x8 block processed for one CU.
  typedef struct packed {
    cu_info_t   cu;
    blk_coord_t bx;        // block being processed
    blk_coord_t by;
    logic [4:0] acc_idx;   // accumulator set in the Sum unit
    logic       first;     // first 8x8 block of the CU in Z order
    logic       last;      // last 8x8 block of the CU: compute the FMV
  } slot_t;

  // Error-surface parameters, scaled by 12 so they are all integers.
  typedef struct packed {
    q_t p1;  // x^2
    q_t p2;  // y^2
    q_t p3;  // xy
    q_t p4;  // x
    q_t p5;  // y
  } surf_t;

  // Numerators and denominator of the surface minimum (Eq. 4 form):
  //   x = nx / den, y = ny / den, valid as a minimum only when has_min.
  typedef struct packed {
    prod_t nx;
    prod_t ny;
    prod_t den;
    logic  has_min;
  } fmv_eq_t;

  // ------------------------------------------------------ shape geometry
  // log2 of the CU width and height in 8x8 block units.
  function automatic logic [2:0] shape_lw(shape_t s);
    case (s)
      4'd0: return 3'd0;  4'd1: return 3'd1;  4'd2: return 3'd0;
      4'd3: return 3'd1;  4'd4: return 3'd2;  4'd5: return 3'd1;
      4'd6: return 3'd2;  4'd7: return 3'd3;  4'd8: return 3'd2;
      4'd9: return 3'd3;  4'd10: return 3'd4; 4'd11: return 3'd3;
      default: return 3'd4;
    endcase
  endfunction

  function automatic logic [2:0] shape_lh(shape_t s);
    case (s)
      4'd0: return 3'd0;  4'd1: return 3'd0;  4'd2: return 3'd1;
      4'd3: return 3'd1;  4'd4: return 3'd1;  4'd5: return 3'd2;
      4'd6: return 3'd2;  4'd7: return 3'd2;  4'd8: return 3'd3;
      4'd9: return 3'd3;  4'd10: return 3'd3; 4'd11: return 3'd4;
      default: return 3'd4;
    endcase
  endfunction

  // Taller-than-wide shapes have two CUs open at once in Z order.
  function automatic logic shape_is_tall(shape_t s);
    return shape_lh(s) > shape_lw(s);
  endfunction

  function automatic logic shape_is_square(shape_t s);
    return shape_lh(s) == shape_lw(s);
  endfunction

  // First accumulator set of each shape (tall shapes own two sets).
  function automatic logic [4:0] shape_acc_base(shape_t s);
    case (s)
      4'd0: return 5'd0;   4'd1: return 5'd1;   4'd2: return 5'd2;
      4'd3: return 5'd4;   4'd4: return 5'd5;   4'd5: return 5'd6;
      4'd6: return 5'd8;   4'd7: return 5'd9;   4'd8: return 5'd10;
      4'd9: return 5'd12;  4'd10: return 5'd13; 4'd11: return 5'd14;
      default: return 5'd16;
    endcase
  endfunction

  // Morton (Z-order) index <-> block coordinates, x in the even bits.
  function automatic blk_idx_t morton(blk_coord_t x, blk_coord_t y);
    blk_idx_t m;
    for (int b = 0; b < 4; b++) begin
      m[2*b]   = x[b];
      m[2*b+1] = y[b];
    end
    return m;
  endfunction

  function automatic blk_coord_t morton_x(blk_idx_t m);
    blk_coord_t x;
    for (int b = 0; b < 4; b++) x[b] = m[2*b];
    return x;
  endfunction

  function automatic blk_coord_t morton_y(blk_idx_t m);
    blk_coord_t y;
    for (int b = 0; b < 4; b++) y[b] = m[2*b+1];
    return y;
  endfunction

  // 4-point Hadamard butterfly, used by both steps of the 4x4 transform.
  // Elements are two's complement; read them back through $signed().
  typedef logic signed [15:0] h_t;
  typedef logic [3:0][15:0] h4_t;

  function automatic h4_t hadamard4(h_t a, h_t b, h_t c, h_t d);
    h4_t o;
    h_t s0, s1, d0, d1;
    s0 = a + b;  d0 = a - b;
    s1 = c + d;  d1 = c - d;
    o[0] = s0 + s1;
    o[1] = d0 + d1;
    o[2] = s0 - s1;
    o[3] = d0 - d1;
    return o;
  endfunction

endpackage
