// fme_mvd_kernel -- rate estimator of the cost calculator (MVD kernel).
//
// It keeps the final quarter-pel MV of every 8x8 CU of the current CTU in a
// 16x16 register array (written by the FMV calculator whenever an 8x8 CU
// finishes). For the CU of the current slot it forms the coarse MV predictor
// (CMVP): the MVs of the 8x8 CUs at the five AMVP neighbour positions of the
// CU, at 8x8 granularity -- A0 (below-left), A1 (left of the bottom-left
// block), B0 (above-right), B1 (above the top-right block), B2 (above-left).
// The first available one in the order A0, A1, B0, B1, B2 is the predictor; a
// neighbour is available when it lies inside the CTU and precedes the CU's
// first block in Z order; with none available the predictor is zero.
// For each of the nine candidates (IMV + (dx,dy)) the MVD in quarter pel is
// coded with signed Exp-Golomb length (the "MVD LUT"), and the rate is
// round(sqrt(lambda) * bits), sqrt(lambda) coming from a QP table (the
// "QP LUT") and the product from nine multipliers ("Multiple").
//
// From the source design: the MV store of 8x8 CUs, CMVP from the blue 8x8
// neighbours of its CMVP figure, an MVD table, a QP table and multipliers.
// This implementation's choices: the candidate order, the availability rule,
// no MVs from neighbouring CTUs, Exp-Golomb bit counts and the lambda model
// sqrt(lambda) = sqrt(0.57) * 2^((QP-12)/6) in 8 fractional bits.
//
// Timing: all inputs are sampled on the cycle calc is high; rate[] and mvp
// appear on the next cycle and hold until the next calc.
module fme_mvd_kernel
  import fme_pkg::*;
(
  input  logic       clk,
  input  logic       rst_n,
  input  logic [5:0] qp,
  input  logic       calc,       // compute the rates of cu
  input  cu_info_t   cu,
  // MV store write port (final MV of an 8x8 CU)
  input  logic       mv_we,
  input  blk_coord_t mv_wx,
  input  blk_coord_t mv_wy,
  input  mv_t        mv_wdata_x,
  input  mv_t        mv_wdata_y,
  output rate_t [NCAND-1:0] rate,
  output mv_t        mvp_x,
  output mv_t        mvp_y,
  output logic [2:0] mvp_src     // 0..4 = A0,A1,B0,B1,B2; 5 = none
);

  // ------------------------------------------------------------ MV store
  mv_t mv_x_mem [CTU_BLK*CTU_BLK];
  mv_t mv_y_mem [CTU_BLK*CTU_BLK];

  always_ff @(posedge clk) begin
    if (mv_we) begin
      mv_x_mem[{mv_wy, mv_wx}] <= mv_wdata_x;
      mv_y_mem[{mv_wy, mv_wx}] <= mv_wdata_y;
    end
  end

  // ------------------------------------------------------------ CMVP
  logic [2:0] lw, lh;
  logic signed [5:0] ox, oy, w, h;
  logic signed [5:0] nx [5];
  logic signed [5:0] ny [5];
  logic [4:0] avail;
  blk_idx_t   m_first;
  mv_t        pred_x, pred_y;
  logic [2:0] src;

  always_comb begin
    lw = shape_lw(cu.shape);
    lh = shape_lh(cu.shape);
    ox = $signed({2'b00, cu.cu_x});
    oy = $signed({2'b00, cu.cu_y});
    w  = $signed(6'(1) << lw);
    h  = $signed(6'(1) << lh);
    nx[0] = ox - 6'sd1;     ny[0] = oy + h;          // A0
    nx[1] = ox - 6'sd1;     ny[1] = oy + h - 6'sd1;  // A1
    nx[2] = ox + w;         ny[2] = oy - 6'sd1;      // B0
    nx[3] = ox + w - 6'sd1; ny[3] = oy - 6'sd1;      // B1
    nx[4] = ox - 6'sd1;     ny[4] = oy - 6'sd1;      // B2
    m_first = morton(cu.cu_x, cu.cu_y);
    for (int k = 0; k < 5; k++) begin
      avail[k] = (nx[k] >= 0) && (nx[k] < 16) && (ny[k] >= 0) && (ny[k] < 16) &&
                 (morton(nx[k][3:0], ny[k][3:0]) < m_first);
    end
    pred_x = '0;
    pred_y = '0;
    src    = 3'd5;
    for (int k = 4; k >= 0; k--) begin
      if (avail[k]) begin
        pred_x = mv_x_mem[{ny[k][3:0], nx[k][3:0]}];
        pred_y = mv_y_mem[{ny[k][3:0], nx[k][3:0]}];
        src    = 3'(k);
      end
    end
  end

  // ------------------------------------------------------------ QP table
  // sqrt(lambda) in 8 fractional bits: mantissa of 2^(r/6) * sqrt(0.57).
  function automatic logic [8:0] qp_mant(logic [2:0] r);
    case (r)
      3'd0: return 9'd193;  3'd1: return 9'd217;  3'd2: return 9'd244;
      3'd3: return 9'd273;  3'd4: return 9'd307;  default: return 9'd344;
    endcase
  endfunction

  logic [17:0] sqrt_lambda;  // Q8
  always_comb begin
    logic [3:0] e;
    logic [2:0] r;
    e = 4'(qp / 6);
    r = 3'(qp % 6);
    sqrt_lambda = 18'((27'(qp_mant(r)) << e) >> 2);
  end

  // ------------------------------------------------------------ MVD table
  localparam int unsigned D_W = MV_W + 2;
  typedef logic signed [D_W-1:0] mvd_t;

  // Signed Exp-Golomb code length of v.
  function automatic logic [5:0] eg_bits(mvd_t v);
    logic [D_W:0] t;
    logic [5:0]   msb;
    t = (v <= 0) ? ((D_W+1)'(-v) << 1) + 1'b1 : (D_W+1)'(v) << 1;
    msb = '0;
    for (int b = 0; b <= D_W; b++) if (t[b]) msb = 6'(b);
    return 6'(2 * msb + 1);
  endfunction

  // ------------------------------------------------------------ rates
  rate_t [NCAND-1:0] rate_c;
  always_comb begin
    for (int i = 0; i < NCAND; i++) begin
      mvd_t dx, dy;
      logic [6:0]  bits;
      logic [25:0] prod;
      dx = (mvd_t'(cu.imv_x) + mvd_t'(i % 3) - 1) * 4 - mvd_t'(pred_x);
      dy = (mvd_t'(cu.imv_y) + mvd_t'(i / 3) - 1) * 4 - mvd_t'(pred_y);
      bits = 7'(eg_bits(dx)) + 7'(eg_bits(dy));
      prod = 26'(sqrt_lambda) * 26'(bits) + 26'd128;
      rate_c[i] = (prod[25:8] > 18'(2**RATE_W - 1)) ? '1 : prod[8 +: RATE_W];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rate    <= '0;
      mvp_x   <= '0;
      mvp_y   <= '0;
      mvp_src <= 3'd5;
    end else if (calc) begin
      rate    <= rate_c;
      mvp_x   <= pred_x;
      mvp_y   <= pred_y;
      mvp_src <= src;
    end
  end

endmodule
