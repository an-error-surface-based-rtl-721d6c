// tb_fme_top -- end-to-end test of the FME engine on whole 128x128 CTUs at
// the default sizes.
//
// The bench builds a synthetic reference frame (smooth texture plus noise)
// and an original frame that is the reference moved by a quarter-pel motion
// per 32x32 region (bilinear), with one region of pure noise so that some
// error surfaces have no minimum. Every CU gets an IMV near the true motion.
// The bench answers the engine's row requests and checks every FMV against a
// reference model written from the algorithm, not from the RTL: 4x4 Hadamard
// SATD by matrix products, Exp-Golomb MVD bits, sqrt(lambda) computed in real
// arithmetic, the least-squares surface fit in real arithmetic and a real
// division for the minimum, rounded to the nearest quarter pel.
//
// Runs: (1) all 13 shapes with random input gaps, (2) all 13 shapes with no
// gaps, checking 8*13*256 row cycles and the FMV latency, (3) quadtree-only
// mode, checking 8*5*256 row cycles. Each mechanism -- input gaps, the
// quadtree mode, every CU shape, every reachable predictor source, the no-minimum
// fallback, the +-3/4 pel limit -- must occur at least once.
module tb_fme_top;
  import fme_pkg::*;

  localparam int M    = 16;        // reference margin around the CTU
  localparam int RN   = 128 + 2*M;
  localparam int QP   = 32;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic start = 0, qt_only = 0, in_valid = 0;
  logic [5:0] qp = 6'(QP);
  logic in_ready;
  blk_coord_t cur_bx, cur_by;
  shape_t cur_shape;
  logic [2:0] cur_row;
  logic [7:0][PIX_W-1:0] org_row;
  logic [2:0][9:0][PIX_W-1:0] ref_win;
  imv_t imv_x, imv_y;
  logic fmv_valid, fmv_convex, ctu_done;
  mv_t fmv_x, fmv_y;
  cu_info_t fmv_cu;
  logic signed [2:0] fmv_frac_x, fmv_frac_y;

  fme_top dut (.*);

  int checks = 0, failures = 0;
  int cycle = 0;
  always @(posedge clk) cycle <= cycle + 1;

  // watchdog
  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ------------------------------------------------------------ frames
  int refp [RN][RN];
  int orgp [128][128];
  int imv_tab_x [NSHAPE][16][16];
  int imv_tab_y [NSHAPE][16][16];

  function automatic int clip8(real v);
    int i;
    i = int'(v);
    return i < 0 ? 0 : (i > 255 ? 255 : i);
  endfunction

  task automatic make_frames();
    int mvq_x [4][4];
    int mvq_y [4][4];
    for (int y = 0; y < RN; y++)
      for (int x = 0; x < RN; x++)
        refp[y][x] = clip8(128.0 + 45.0*$sin(0.31*x + 0.13*y) + 35.0*$cos(0.23*y - 0.07*x)
                           + 20.0*$sin(0.05*x*y/8.0) + real'($urandom_range(8)) - 4.0);
    for (int ry = 0; ry < 4; ry++)
      for (int rx = 0; rx < 4; rx++) begin
        mvq_x[ry][rx] = int'($urandom_range(40)) - 20;
        mvq_y[ry][rx] = int'($urandom_range(40)) - 20;
      end
    for (int y = 0; y < 128; y++)
      for (int x = 0; x < 128; x++) begin
        int mx, my, ix, iy;
        real fx, fy, v;
        mx = mvq_x[y/32][x/32];
        my = mvq_y[y/32][x/32];
        ix = M + x + (mx >>> 2);  fx = real'(mx & 3) / 4.0;
        iy = M + y + (my >>> 2);  fy = real'(my & 3) / 4.0;
        v = (1-fx)*(1-fy)*refp[iy][ix] + fx*(1-fy)*refp[iy][ix+1]
          + (1-fx)*fy*refp[iy+1][ix] + fx*fy*refp[iy+1][ix+1];
        if (x >= 96 && y >= 96) v = real'($urandom_range(255));   // no motion at all
        orgp[y][x] = clip8(v + 0.5 + real'($urandom_range(4)) - 2.0);
      end
    // IMV of every CU: the integer part of the true motion at the CU origin,
    // sometimes off by one (as an imperfect IME would be).
    for (int s = 0; s < NSHAPE; s++)
      for (int cy = 0; cy < 16; cy++)
        for (int cx = 0; cx < 16; cx++) begin
          int mx, my;
          mx = mvq_x[cy/4][cx/4];
          my = mvq_y[cy/4][cx/4];
          imv_tab_x[s][cy][cx] = ((mx + 2) >>> 2) + ($urandom_range(5) == 0 ? int'($urandom_range(2)) - 1 : 0);
          imv_tab_y[s][cy][cx] = ((my + 2) >>> 2) + ($urandom_range(5) == 0 ? int'($urandom_range(2)) - 1 : 0);
        end
  endtask

  // ------------------------------------------------------------ geometry (model)
  int shp_w [NSHAPE] = '{1, 2, 1, 2, 4, 2, 4, 8, 4, 8, 16, 8, 16};
  int shp_h [NSHAPE] = '{1, 1, 2, 2, 2, 4, 4, 4, 8, 8, 8, 16, 16};

  function automatic int zorder(int x, int y);
    int m = 0;
    for (int b = 0; b < 4; b++) m |= (((x >> b) & 1) << (2*b)) | (((y >> b) & 1) << (2*b+1));
    return m;
  endfunction

  // ------------------------------------------------------------ stimulus
  int gap_pct = 0;
  int bubbles = 0;
  always_comb begin
    int s, ox, oy, ix, iy, py, px0;
    s  = int'(cur_shape);
    ox = int'(cur_bx) & ~(shp_w[s] - 1);
    oy = int'(cur_by) & ~(shp_h[s] - 1);
    ix = imv_tab_x[s][oy][ox];
    iy = imv_tab_y[s][oy][ox];
    imv_x = imv_t'(ix);
    imv_y = imv_t'(iy);
    py  = int'(cur_by) * 8 + int'(cur_row);
    px0 = int'(cur_bx) * 8;
    for (int c = 0; c < 8; c++) org_row[c] = 8'(orgp[py][px0 + c]);
    for (int r = 0; r < 3; r++)
      for (int j = 0; j < 10; j++)
        ref_win[r][j] = 8'(refp[M + py + iy + r - 1][M + px0 + ix + j - 1]);
  end

  always @(negedge clk) begin
    in_valid <= ($urandom_range(99) >= gap_pct);
  end
  always @(posedge clk) if (in_ready && !in_valid) bubbles++;

  // ------------------------------------------------------------ reference model
  int model_mv_x [16][16];
  int model_mv_y [16][16];
  int hm [4][4] = '{'{1, 1, 1, 1}, '{1, -1, 1, -1}, '{1, 1, -1, -1}, '{1, -1, -1, 1}};

  function automatic int satd4(int d [4][4]);
    int t [4][4];
    int s = 0;
    for (int i = 0; i < 4; i++)
      for (int j = 0; j < 4; j++) begin
        t[i][j] = 0;
        for (int k = 0; k < 4; k++) t[i][j] += hm[i][k] * d[k][j];
      end
    for (int i = 0; i < 4; i++)
      for (int j = 0; j < 4; j++) begin
        int v = 0;
        for (int k = 0; k < 4; k++) v += t[i][k] * hm[j][k];
        s += (v < 0) ? -v : v;
      end
    return s;
  endfunction

  function automatic int eg_len(int v);
    int t = (v <= 0) ? (-v * 2 + 1) : v * 2;
    int n = 1;
    while (t > 1) begin t >>= 1; n += 2; end
    return n;
  endfunction

  function automatic real rabs(real v);
    return v < 0.0 ? -v : v;
  endfunction

  int src_count [6];
  int shape_count [NSHAPE];
  int nonconvex = 0, clamp3 = 0;

  // Expected FMV of one CU; also records the predictor source used.
  task automatic model_cu(input int s, input int ox, input int oy, input int imx, input int imy,
                          output int ex, output int ey, output bit convex,
                          output bit tie_x, output bit tie_y, output int alt_x, output int alt_y);
    int cost [9];
    int w = shp_w[s], h = shp_h[s];
    int nbx [5], nby [5];
    int px = 0, py = 0, src = 5;
    real sl, p1, p2, p3, p4, p5, den, vx, vy;
    int sh = $clog2(w * h);
    // predictor
    nbx = '{ox - 1, ox - 1, ox + w, ox + w - 1, ox - 1};
    nby = '{oy + h, oy + h - 1, oy - 1, oy - 1, oy - 1};
    for (int k = 0; k < 5; k++)
      if (src == 5 && nbx[k] >= 0 && nbx[k] < 16 && nby[k] >= 0 && nby[k] < 16 &&
          zorder(nbx[k], nby[k]) < zorder(ox, oy)) begin
        src = k; px = model_mv_x[nby[k]][nbx[k]]; py = model_mv_y[nby[k]][nbx[k]];
      end
    src_count[src]++;
    sl = $floor(256.0 * $sqrt(0.57) * $pow(2.0, real'(QP % 6) / 6.0) + 0.5);
    sl = $floor(sl * $pow(2.0, real'(QP / 6)) / 4.0);
    for (int i = 0; i < 9; i++) begin
      int dx = i % 3 - 1, dy = i / 3 - 1;
      int sd = 0, bits, rate, tot;
      for (int by = 0; by < h; by++)
        for (int bx = 0; bx < w; bx++)
          for (int qy = 0; qy < 2; qy++)
            for (int qx = 0; qx < 2; qx++) begin
              int d [4][4];
              for (int r = 0; r < 4; r++)
                for (int c = 0; c < 4; c++) begin
                  int yy = (oy + by) * 8 + qy * 4 + r;
                  int xx = (ox + bx) * 8 + qx * 4 + c;
                  d[r][c] = orgp[yy][xx] - refp[M + yy + imy + dy][M + xx + imx + dx];
                end
              sd += satd4(d);
            end
      bits = eg_len((imx + dx) * 4 - px) + eg_len((imy + dy) * 4 - py);
      rate = int'($floor(sl * bits / 256.0 + 0.5));
      tot  = ((sd >> 1) + rate) >> sh;
      cost[i] = tot > 65535 ? 65535 : tot;
    end
    // least-squares fit on the 3x3 grid
    p1 = (cost[0] + cost[2] + cost[3] + cost[5] + cost[6] + cost[8]) / 6.0 - (cost[1] + cost[4] + cost[7]) / 3.0;
    p2 = (cost[0] + cost[1] + cost[2] + cost[6] + cost[7] + cost[8]) / 6.0 - (cost[3] + cost[4] + cost[5]) / 3.0;
    p3 = (cost[0] - cost[2] - cost[6] + cost[8]) / 4.0;
    p4 = (cost[2] + cost[5] + cost[8] - cost[0] - cost[3] - cost[6]) / 6.0;
    p5 = (cost[6] + cost[7] + cost[8] - cost[0] - cost[1] - cost[2]) / 6.0;
    den = p3 * p3 - 4.0 * p1 * p2;
    convex = (den < -1e-9) && (p1 > 1e-9);
    ex = imx * 4; ey = imy * 4; alt_x = ex; alt_y = ey; tie_x = 0; tie_y = 0;
    if (convex) begin
      real ax, ay;
      int mx, my;
      vx = (2.0 * p2 * p4 - p3 * p5) / den;
      vy = (2.0 * p1 * p5 - p3 * p4) / den;
      ax = 4.0 * (vx < 0 ? -vx : vx);
      ay = 4.0 * (vy < 0 ? -vy : vy);
      mx = ax >= 2.5 ? 3 : int'($floor(ax + 0.5));
      my = ay >= 2.5 ? 3 : int'($floor(ay + 0.5));
      tie_x = (ax < 2.6) && (rabs(ax - $floor(ax) - 0.5) < 1e-6);
      tie_y = (ay < 2.6) && (rabs(ay - $floor(ay) - 0.5) < 1e-6);
      ex = imx * 4 + (vx < 0 ? -mx : mx);
      ey = imy * 4 + (vy < 0 ? -my : my);
      alt_x = imx * 4 + (vx < 0 ? -(mx - 1) : (mx - 1));
      alt_y = imy * 4 + (vy < 0 ? -(my - 1) : (my - 1));
      if (mx == 3 || my == 3) clamp3++;
    end else nonconvex++;
    if (s == 0) begin
      model_mv_x[oy][ox] = ex;
      model_mv_y[oy][ox] = ey;
    end
  endtask

  int n_fmv = 0;
  int last_row_cycle = 0;
  always @(posedge clk) begin
    if (rst_n && fmv_valid) begin
      int ex, ey, ax, ay;
      bit cv, tx, ty, okx, oky;
      model_cu(int'(fmv_cu.shape), int'(fmv_cu.cu_x), int'(fmv_cu.cu_y),
               int'(fmv_cu.imv_x), int'(fmv_cu.imv_y), ex, ey, cv, tx, ty, ax, ay);
      n_fmv++;
      shape_count[fmv_cu.shape]++;
      okx = (int'(fmv_x) == ex) || (tx && int'(fmv_x) == ax);
      oky = (int'(fmv_y) == ey) || (ty && int'(fmv_y) == ay);
      checks++;
      if (!okx || !oky || cv != fmv_convex) begin
        failures++;
        if (failures < 10)
          $display("FMV mismatch shape %0d cu (%0d,%0d): got (%0d,%0d) conv %0d, expected (%0d,%0d) conv %0d",
                   fmv_cu.shape, fmv_cu.cu_x, fmv_cu.cu_y, fmv_x, fmv_y, fmv_convex, ex, ey, cv);
      end
    end
  end

  // ------------------------------------------------------------ runs
  task automatic run_ctu(input bit qt, input int gaps, input int exp_fmv, input int exp_rows);
    int t0, t_done, fires, n0;
    gap_pct = gaps;
    n0 = n_fmv;
    @(negedge clk);
    qt_only = qt;
    start   = 1;
    @(negedge clk);
    start   = 0;
    t0 = cycle;
    fires = 0;
    while (in_ready) begin
      @(posedge clk);
      if (in_valid && in_ready) fires++;
      #1;
    end
    last_row_cycle = cycle;
    t_done = 0;
    while (!ctu_done) begin
      @(posedge clk); #1; t_done++;
    end
    checks++;
    if (fires != exp_rows) begin
      failures++; $display("rows accepted %0d, expected %0d", fires, exp_rows);
    end
    if (gaps == 0) begin
      // every row is accepted back to back: rows then the FMV latency
      checks++;
      if (cycle - t0 != exp_rows + 9) begin
        failures++; $display("CTU took %0d cycles, expected %0d", cycle - t0, exp_rows + 9);
      end
    end
    repeat (3) @(posedge clk);
    checks++;
    if (n_fmv - n0 != exp_fmv) begin
      failures++; $display("%0d FMVs, expected %0d", n_fmv - n0, exp_fmv);
    end
    $display("CTU qt=%0d gaps=%0d%%: %0d rows, %0d FMVs, %0d cycles", qt, gaps, fires, n_fmv - n0, cycle - t0);
  endtask

  // First FMV latency: first row of the first 8x8 CU to its FMV.
  int first_fire = -1, first_fmv = -1;

  initial begin
    make_frames();
    repeat (3) @(posedge clk);
    rst_n = 1;
    run_ctu(0, 15, 681, 8 * 13 * 256);
    @(negedge clk);
    first_fire = -1; first_fmv = -1;
    fork
      run_ctu(0, 0, 681, 8 * 13 * 256);
      begin
        @(posedge clk iff dut.fire); first_fire = cycle;
        @(posedge clk iff fmv_valid); first_fmv = cycle;
      end
    join
    checks++;
    if (first_fmv - first_fire != 17) begin
      failures++; $display("first FMV after %0d cycles, expected 17", first_fmv - first_fire);
    end
    run_ctu(1, 0, 341, 8 * 5 * 256);
    // mechanism coverage
    checks++; if (bubbles == 0) begin failures++; $display("no input gaps"); end
    for (int s = 0; s < NSHAPE; s++) begin
      checks++;
      if (shape_count[s] == 0) begin failures++; $display("shape %0d never finished", s); end
    end
    // B2 can never win: B1 (above the CU) always precedes the CU in Z order.
    for (int k = 0; k < 6; k++) begin
      if (k == 4) continue;
      checks++;
      if (src_count[k] == 0) begin failures++; $display("predictor source %0d never used", k); end
    end
    checks++; if (nonconvex == 0) begin failures++; $display("no surface without minimum"); end
    checks++; if (clamp3 == 0)    begin failures++; $display("3/4-pel limit never reached"); end
    $display("coverage: gaps %0d, shapes %p, mvp sources %p, no-minimum %0d, 3/4-pel %0d",
             bubbles, shape_count, src_count, nonconvex, clamp3);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
