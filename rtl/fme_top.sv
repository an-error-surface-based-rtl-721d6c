// fme_top -- interpolation-free fractional motion estimation engine.
//
// For every CU of a 128x128 CTU (thirteen shapes from 128x128 down to 8x8,
// or the five squares in quadtree-only mode) it measures the R-D cost
// J = SATD + lambda*R at the integer MV from IME and its eight integer
// neighbours, fits the quadratic error surface through the nine costs and
// returns the quarter-pel MV at the surface minimum. No sub-pel interpolation
// and no iterative half/quarter-pel search take place.
//
// Structure (after the source design's block diagram):
//   cost calculator  fme_residual -> 9 x fme_satd_kernel -> fme_sum
//                    fme_mvd_kernel (CMVP, MVD rate)  -----^
//   FMV calculator   fme_param_gen -> fme_fmv_divider
//   control          fme_control (interlaced Z-order schedule)
// The final MV of every 8x8 CU is fed back to the MVD kernel's MV store for
// the coarse MV predictor of later CUs.
//
// Interface: the engine pulls one 8x1 row per cycle. While in_ready is high,
// cur_bx/cur_by/cur_shape/cur_row name the row wanted; the source presents
// the eight original pixels of that row, the 3x10 integer reference window
// around it (rows dy=-1..1, columns -1..8, displaced by the CU's IMV) and the
// CU's IMV, with in_valid. Gaps in in_valid are allowed. Each CU yields one
// fmv_valid pulse with its quarter-pel MV and CU description; ctu_done
// marks the last one (the 128x128 CU).
//
// Timing: a CTU takes 8 x 13 x 256 = 26624 row cycles (10240 in quadtree-only
// mode) plus a short drain; the next CTU may be started as soon as in_ready
// has fallen, so a stream of CTUs costs 26625 (10241) cycles each. The FMV
// of a CU appears 10 cycles after its last row is accepted
// (17 cycles after the first row of an 8x8 CU). The source design quotes 12
// cycles for the latter; this implementation registers every stage instead.
module fme_top
  import fme_pkg::*;
(
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic                          start,
  input  logic                          qt_only,
  input  logic [5:0]                    qp,
  // pixel / IMV stream
  input  logic                          in_valid,
  output logic                          in_ready,
  output blk_coord_t                    cur_bx,
  output blk_coord_t                    cur_by,
  output shape_t                        cur_shape,
  output logic [2:0]                    cur_row,
  input  logic [7:0][PIX_W-1:0]         org_row,
  input  logic [2:0][9:0][PIX_W-1:0]    ref_win,
  input  imv_t                          imv_x,
  input  imv_t                          imv_y,
  // results
  output logic                          fmv_valid,
  output mv_t                           fmv_x,
  output mv_t                           fmv_y,
  output cu_info_t                      fmv_cu,
  output logic signed [2:0]             fmv_frac_x,
  output logic signed [2:0]             fmv_frac_y,
  output logic                          fmv_convex,
  output logic                          ctu_done
);

  // ------------------------------------------------------------ control
  logic  fire, calc, ctl_done, mode_qt;
  slot_t slot_cur, slot_last;

  fme_control u_ctl (
    .clk, .rst_n, .start, .qt_only, .in_valid, .imv_x, .imv_y,
    .in_ready, .fire, .cur_bx, .cur_by, .cur_shape, .cur_row,
    .calc, .slot_cur, .slot_last, .done(ctl_done), .mode_qt
  );

  // ------------------------------------------------------------ cost calculator
  logic [NCAND-1:0][7:0][RES_W-1:0] res;

  fme_residual u_res (.org_row, .ref_win, .res);

  logic [NCAND-1:0] satd_valid;
  satd_t [NCAND-1:0] satd;

  for (genvar i = 0; i < NCAND; i++) begin : g_satd
    fme_satd_kernel u_satd (
      .clk, .rst_n,
      .in_valid  (fire),
      .res       (res[i]),
      .satd_valid(satd_valid[i]),
      .satd      (satd[i])
    );
  end

  rate_t [NCAND-1:0] rate;
  mv_t        mvp_x, mvp_y;
  logic [2:0] mvp_src;
  logic       mv_we;

  fme_mvd_kernel u_mvd (
    .clk, .rst_n, .qp, .calc,
    .cu        (slot_cur.cu),
    .mv_we     (mv_we),
    .mv_wx     (fmv_cu.cu_x),
    .mv_wy     (fmv_cu.cu_y),
    .mv_wdata_x(fmv_x),
    .mv_wdata_y(fmv_y),
    .rate, .mvp_x, .mvp_y, .mvp_src
  );

  logic     cost_valid;
  cost_t [NCAND-1:0] cost;
  cu_info_t cost_cu;

  fme_sum u_sum (
    .clk, .rst_n,
    .satd_valid(satd_valid[0]),
    .satd, .rate,
    .slot      (slot_last),
    .cost_valid, .cost,
    .cu_out    (cost_cu)
  );

  // ------------------------------------------------------------ FMV calculator
  logic     eq_valid;
  fmv_eq_t  eq;
  cu_info_t eq_cu;

  fme_param_gen u_pgen (
    .clk, .rst_n, .cost_valid, .cost, .cu_in(cost_cu),
    .eq_valid, .eq, .cu_out(eq_cu)
  );

  fme_fmv_divider u_div (
    .clk, .rst_n, .eq_valid, .eq, .cu_in(eq_cu),
    .fmv_valid, .fmv_x, .fmv_y,
    .frac_x(fmv_frac_x), .frac_y(fmv_frac_y),
    .convex(fmv_convex), .cu_out(fmv_cu)
  );

  // Final MVs of 8x8 CUs go back to the MVD kernel.
  assign mv_we    = fmv_valid && (fmv_cu.shape == '0);
  assign ctu_done = fmv_valid && (fmv_cu.shape == shape_t'(NSHAPE - 1));

  // The nine kernels see the same rows and so finish together.
  a_kernels_aligned: assert property (@(posedge clk) disable iff (!rst_n)
    satd_valid == '0 || satd_valid == '1);

endmodule
