// tb_fme_mvd_kernel -- fills the MV store with random quarter-pel MVs, then
// asks for the rates of random CUs (shape, position, IMV, QP) and compares the
// predictor and the nine rates with a model: neighbour positions A0, A1, B0,
// B1, B2 at 8x8 granularity, availability by Z order inside the CTU,
// Exp-Golomb lengths by a counting loop, sqrt(lambda) in real arithmetic.
module tb_fme_mvd_kernel;
  import fme_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic [5:0] qp = '0;
  logic calc = 0;
  cu_info_t cu = '0;
  logic mv_we = 0;
  blk_coord_t mv_wx = '0, mv_wy = '0;
  mv_t mv_wdata_x = '0, mv_wdata_y = '0;
  rate_t [NCAND-1:0] rate;
  mv_t mvp_x, mvp_y;
  logic [2:0] mvp_src;

  fme_mvd_kernel dut (.*);

  int checks = 0, failures = 0;
  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int shp_w [NSHAPE] = '{1, 2, 1, 2, 4, 2, 4, 8, 4, 8, 16, 8, 16};
  int shp_h [NSHAPE] = '{1, 1, 2, 2, 2, 4, 4, 4, 8, 8, 8, 16, 16};
  int mvx [16][16], mvy [16][16];
  int src_seen [6];

  function automatic int zorder(int x, int y);
    int m = 0;
    for (int b = 0; b < 4; b++) m |= (((x >> b) & 1) << (2*b)) | (((y >> b) & 1) << (2*b+1));
    return m;
  endfunction

  function automatic int eg_len(int v);
    int t = (v <= 0) ? (-v * 2 + 1) : v * 2;
    int n = 1;
    while (t > 1) begin t >>= 1; n += 2; end
    return n;
  endfunction

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int y = 0; y < 16; y++)
      for (int x = 0; x < 16; x++) begin
        mvx[y][x] = int'($urandom_range(400)) - 200;
        mvy[y][x] = int'($urandom_range(400)) - 200;
        mv_we = 1; mv_wx = 4'(x); mv_wy = 4'(y);
        mv_wdata_x = mv_t'(mvx[y][x]); mv_wdata_y = mv_t'(mvy[y][x]);
        @(negedge clk);
      end
    mv_we = 0;
    for (int t = 0; t < 3000; t++) begin
      automatic int s = int'($urandom_range(NSHAPE - 1));
      automatic int w = shp_w[s], h = shp_h[s];
      automatic int ox = int'($urandom_range(15)) & ~(w - 1);
      automatic int oy = int'($urandom_range(15)) & ~(h - 1);
      automatic int imx = (t % 7 == 0) ? 4000 : int'($urandom_range(200)) - 100;
      automatic int imy = (t % 11 == 0) ? -4000 : int'($urandom_range(200)) - 100;
      automatic int q = int'($urandom_range(63));
      int nbx [5], nby [5];
      int px, py, src;
      real sl;
      cu.shape = shape_t'(s); cu.cu_x = 4'(ox); cu.cu_y = 4'(oy);
      cu.imv_x = imv_t'(imx); cu.imv_y = imv_t'(imy);
      qp = 6'(q);
      calc = 1;
      @(negedge clk);
      calc = 0;
      // model
      nbx = '{ox - 1, ox - 1, ox + w, ox + w - 1, ox - 1};
      nby = '{oy + h, oy + h - 1, oy - 1, oy - 1, oy - 1};
      px = 0; py = 0; src = 5;
      for (int k = 0; k < 5; k++)
        if (src == 5 && nbx[k] >= 0 && nbx[k] < 16 && nby[k] >= 0 && nby[k] < 16 &&
            zorder(nbx[k], nby[k]) < zorder(ox, oy)) begin
          src = k; px = mvx[nby[k]][nbx[k]]; py = mvy[nby[k]][nbx[k]];
        end
      src_seen[src]++;
      checks++;
      if (int'(mvp_src) != src || int'(mvp_x) != px || int'(mvp_y) != py) begin
        failures++;
        if (failures < 5) $display("cu s%0d (%0d,%0d): mvp src %0d (%0d,%0d), expected %0d (%0d,%0d)",
                                   s, ox, oy, mvp_src, mvp_x, mvp_y, src, px, py);
      end
      sl = $floor(256.0 * $sqrt(0.57) * $pow(2.0, real'(q % 6) / 6.0) + 0.5);
      sl = $floor(sl * $pow(2.0, real'(q / 6)) / 4.0);
      for (int i = 0; i < 9; i++) begin
        automatic int bits = eg_len((imx + i % 3 - 1) * 4 - px) + eg_len((imy + i / 3 - 1) * 4 - py);
        automatic int e = int'($floor(sl * bits / 256.0 + 0.5));
        if (e > 65535) e = 65535;
        checks++;
        if (int'(rate[i]) != e) begin
          failures++;
          if (failures < 5) $display("rate[%0d] = %0d, expected %0d (qp %0d bits %0d)", i, rate[i], e, q, bits);
        end
      end
    end
    // sources A0, A1, B0, B1 and "none" must all occur (B2 cannot win, B1 is
    // always available when B2 is)
    for (int k = 0; k < 6; k++) if (k != 4) begin
      checks++;
      if (src_seen[k] == 0) begin failures++; $display("source %0d never seen", k); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
