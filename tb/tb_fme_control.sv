// tb_fme_control -- walks whole CTUs (all thirteen shapes, then quadtree
// only) with random input gaps and checks every accepted row against a model
// of the schedule: Z-order block sequence, shape order, row counter, CU
// origin, first/last flags, accumulator set, IMV capture on row 0, calc on
// the eighth row, slot_last, the row count per CTU and the done pulse.
module tb_fme_control;
  import fme_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic start = 0, qt_only = 0, in_valid = 0;
  imv_t imv_x = '0, imv_y = '0;
  logic in_ready, fire, calc, done, mode_qt;
  blk_coord_t cur_bx, cur_by;
  shape_t cur_shape;
  logic [2:0] cur_row;
  slot_t slot_cur, slot_last;

  fme_control dut (.*);

  int checks = 0, failures = 0;
  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int shp_w [NSHAPE] = '{1, 2, 1, 2, 4, 2, 4, 8, 4, 8, 16, 8, 16};
  int shp_h [NSHAPE] = '{1, 1, 2, 2, 2, 4, 4, 4, 8, 8, 8, 16, 16};
  int accb  [NSHAPE] = '{0, 1, 2, 4, 5, 6, 8, 9, 10, 12, 13, 14, 16};

  task automatic check(input bit c, input string what);
    checks++;
    if (!c) begin
      failures++;
      if (failures < 8) $display("%s", what);
    end
  endtask

  task automatic run(input bit qt, input int gap_pct);
    int rows = 0, n_done = 0;
    @(negedge clk);
    qt_only = qt; start = 1;
    @(negedge clk);
    start = 0; qt_only = 0;
    for (int k = 0; k < 256; k++) begin
      int bx = 0, by = 0;
      for (int b = 0; b < 4; b++) begin bx |= ((k >> (2*b)) & 1) << b; by |= ((k >> (2*b+1)) & 1) << b; end
      for (int s = 0; s < NSHAPE; s++) begin
        int w = shp_w[s], h = shp_h[s];
        int ox = bx & ~(w - 1), oy = by & ~(h - 1);
        int ix = int'($urandom_range(2000)) - 1000, iy = int'($urandom_range(2000)) - 1000;
        if (qt && w != h) continue;
        for (int r = 0; r < 8; r++) begin
          while ($urandom_range(99) < gap_pct) begin
            in_valid = 0;
            #1;
            check(!fire && !calc, "fire without in_valid");
            @(negedge clk);
          end
          in_valid = 1;
          // the IMV is only sampled on row 0; later rows present junk
          imv_x = (r == 0) ? imv_t'(ix) : imv_t'($urandom);
          imv_y = (r == 0) ? imv_t'(iy) : imv_t'($urandom);
          #1;
          check(in_ready && fire, "not ready");
          check(int'(cur_bx) == bx && int'(cur_by) == by && int'(cur_shape) == s && int'(cur_row) == r,
                $sformatf("position: got b(%0d,%0d) s%0d r%0d, expected b(%0d,%0d) s%0d r%0d",
                          cur_bx, cur_by, cur_shape, cur_row, bx, by, s, r));
          check(calc == (r == 7), "calc");
          check(int'(slot_cur.cu.cu_x) == ox && int'(slot_cur.cu.cu_y) == oy &&
                slot_cur.first == ((bx == ox) && (by == oy)) &&
                slot_cur.last == ((bx == ox + w - 1) && (by == oy + h - 1)) &&
                int'(slot_cur.acc_idx) == accb[s] + ((h > w) ? ((ox / w) & 1) : 0),
                $sformatf("slot info b(%0d,%0d) s%0d", bx, by, s));
          check(int'(slot_cur.cu.imv_x) == ix && int'(slot_cur.cu.imv_y) == iy, "imv capture");
          check(mode_qt == qt, "mode");
          @(negedge clk);
          rows++;
          if (done) n_done++;
          if (r == 7) check(slot_last.bx == 4'(bx) && slot_last.cu.shape == shape_t'(s) &&
                            int'(slot_last.cu.imv_x) == ix, "slot_last");
        end
      end
    end
    in_valid = 0;
    check(!in_ready, "still ready after the CTU");
    check(n_done == 1, $sformatf("done pulses %0d", n_done));
    check(rows == (qt ? 8 * 5 * 256 : 8 * 13 * 256), $sformatf("rows %0d", rows));
    @(negedge clk);
    check(!done, "done longer than one cycle");
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    check(!in_ready, "ready before start");
    run(0, 20);
    run(1, 10);
    run(0, 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
