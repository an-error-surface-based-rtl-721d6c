// tb_fme_workload -- streaming workload for the FME engine: CTUs back to back
// at the four common test QPs (22, 27, 32, 37), first with all 13 CU shapes,
// then in quadtree-only mode, on frames whose true motion is known.
//
// Each CTU shows a smooth synthetic picture (a sum of slanted sinusoids plus
// +-2 of noise). Its reference is the same analytic picture moved by a
// per-CTU global motion given in quarter pel, so the exact answer is known
// and no interpolation filter is involved in building the stimulus. Every CU
// gets the rounded integer motion as its IMV.
//
// Checked:
//  * throughput: a new CTU is started as soon as the engine stops taking rows,
//    and the start-to-start period must not exceed the source design's cycle
//    count per CTU, (12-8) + 8 x shapes x 256 (26628 for 13 shapes, 10244 for
//    the quadtree). The bench prints the resulting frame rate for 3840x2160
//    at 400 MHz and 7680x4320 (quadtree) at 631 MHz.
//  * completeness: every CU of every CTU yields one FMV, and ctu_done comes
//    once per CTU.
//  * accuracy: at least 90% of the FMVs must lie within one quarter pel of the
//    true motion in both axes, and at least 50% must match it exactly. These
//    are loose limits for an approximate algorithm, not an exact model; the
//    exact model is in tb_fme_top.
module tb_fme_workload;
  import fme_pkg::*;

  localparam int M     = 8;            // reference margin around the CTU
  localparam int RN    = 128 + 2*M;
  localparam int NQP   = 4;
  localparam int QPS [NQP] = '{22, 27, 32, 37};

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic start = 0, qt_only = 0, in_valid = 1;
  logic [5:0] qp = '0;
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

  // ------------------------------------------------------------ pictures
  int refp [RN][RN];
  int orgp [128][128];
  int cur_imx, cur_imy;                 // IMV of the CTU being fed

  function automatic real tex(real x, real y, int seed);
    real ph = 0.7 * seed;
    return 128.0 + 50.0*$sin(0.29*x + 0.11*y + ph) + 35.0*$cos(0.21*y - 0.09*x + 2.0*ph)
                 + 12.0*$sin(0.47*x + 0.38*y + 3.0*ph);
  endfunction

  function automatic int clip8(real v);
    int i;
    i = int'(v);
    return i < 0 ? 0 : (i > 255 ? 255 : i);
  endfunction

  // original(x, y) = tex(x, y); reference(X, Y) = tex(X - mx/4, Y - my/4), so
  // original(x, y) = reference(x + mx/4, y + my/4): the motion is (mx, my).
  task automatic make_ctu(input int seed, input int mx, input int my);
    for (int y = 0; y < RN; y++)
      for (int x = 0; x < RN; x++)
        refp[y][x] = clip8(tex(real'(x - M) - mx / 4.0, real'(y - M) - my / 4.0, seed) + 0.5);
    for (int y = 0; y < 128; y++)
      for (int x = 0; x < 128; x++)
        orgp[y][x] = clip8(tex(real'(x), real'(y), seed) + 0.5 + real'($urandom_range(4)) - 2.0);
    cur_imx = (mx + 2) >>> 2;
    cur_imy = (my + 2) >>> 2;
  endtask

  always_comb begin
    int py, px0;
    imv_x = imv_t'(cur_imx);
    imv_y = imv_t'(cur_imy);
    py  = int'(cur_by) * 8 + int'(cur_row);
    px0 = int'(cur_bx) * 8;
    for (int c = 0; c < 8; c++) org_row[c] = 8'(orgp[py][px0 + c]);
    for (int r = 0; r < 3; r++)
      for (int j = 0; j < 10; j++)
        ref_win[r][j] = 8'(refp[M + py + cur_imy + r - 1][M + px0 + cur_imx + j - 1]);
  end

  // ------------------------------------------------------------ result check
  // True motion of each CTU, indexed by the number of CTUs finished so far:
  // FMVs of a CTU may still drain after the next one has started.
  int true_x [2*NQP];
  int true_y [2*NQP];
  int n_done = 0;
  int n_fmv [2*NQP];
  int n_exact = 0, n_near = 0, n_all = 0;

  always @(posedge clk) if (rst_n && fmv_valid) begin
    int ex, ey;
    ex = int'(fmv_x) - true_x[n_done];
    ey = int'(fmv_y) - true_y[n_done];
    n_fmv[n_done]++;
    n_all++;
    if (ex == 0 && ey == 0) n_exact++;
    if (ex >= -1 && ex <= 1 && ey >= -1 && ey <= 1) n_near++;
    if (ctu_done) n_done <= n_done + 1;
  end

  // ------------------------------------------------------------ stream
  task automatic run_stream(input bit qt, input int first, input int exp_rows, input int paper_cycles);
    int t_start [NQP];
    int period, worst;
    worst = 0;
    for (int k = 0; k < NQP; k++) begin
      int mx, my;
      mx = int'($urandom_range(24)) - 12;
      my = int'($urandom_range(24)) - 12;
      true_x[first + k] = mx;
      true_y[first + k] = my;
      make_ctu(first + k, mx, my);
      qp      = 6'(QPS[k]);
      qt_only = qt;
      start   = 1;
      @(negedge clk);
      start   = 0;
      t_start[k] = cycle;
      @(negedge clk);
      while (in_ready) @(negedge clk);
      if (k > 0) begin
        period = t_start[k] - t_start[k-1];
        if (period > worst) worst = period;
      end
    end
    period = cycle - t_start[NQP-1];
    if (period > worst) worst = period;   // last CTU: rows only, a lower bound
    while (n_done < first + NQP) @(negedge clk);
    checks++;
    if (worst > paper_cycles) begin
      failures++; $display("CTU period %0d cycles, more than %0d", worst, paper_cycles);
    end
    for (int k = first; k < first + NQP; k++) begin
      checks++;
      if (n_fmv[k] != (qt ? 341 : 681)) begin
        failures++; $display("CTU %0d: %0d FMVs", k, n_fmv[k]);
      end
    end
    if (qt)
      $display("quadtree only: %0d cycles per CTU (rows %0d); 7680x4320 at 631 MHz: %0.2f fps",
               worst, exp_rows, 631.0e6 / (2040.0 * worst));
    else
      $display("13 shapes: %0d cycles per CTU (rows %0d); 3840x2160 at 400 MHz: %0.2f fps",
               worst, exp_rows, 400.0e6 / (510.0 * worst));
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    run_stream(0, 0, 8 * 13 * 256, 4 + 8 * 13 * 256);
    run_stream(1, NQP, 8 * 5 * 256, 4 + 8 * 5 * 256);
    checks++;
    if (n_near * 10 < n_all * 9) begin
      failures++; $display("only %0d of %0d FMVs within a quarter pel", n_near, n_all);
    end
    checks++;
    if (n_exact * 2 < n_all) begin
      failures++; $display("only %0d of %0d FMVs exact", n_exact, n_all);
    end
    $display("accuracy: %0d FMVs, %0d exact, %0d within one quarter pel", n_all, n_exact, n_near);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
