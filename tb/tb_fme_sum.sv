// tb_fme_sum -- runs the slot sequence of a whole CTU (Z order, thirteen
// shapes per block) through the Sum unit with random 8x8 SATDs and rates,
// and checks the nine costs of every CU against a model that sums each CU's
// SATDs directly, keyed by CU, then applies ((SATD>>1)+rate)>>log2(area) and
// saturation. Large SATDs in one pass exercise the saturation.
module tb_fme_sum;
  import fme_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic satd_valid = 0;
  satd_t [NCAND-1:0] satd = '0;
  rate_t [NCAND-1:0] rate = '0;
  slot_t slot = '0;
  logic cost_valid;
  cost_t [NCAND-1:0] cost;
  cu_info_t cu_out;

  fme_sum dut (.*);

  int checks = 0, failures = 0;
  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int shp_w [NSHAPE] = '{1, 2, 1, 2, 4, 2, 4, 8, 4, 8, 16, 8, 16};
  int shp_h [NSHAPE] = '{1, 1, 2, 2, 2, 4, 4, 4, 8, 8, 8, 16, 16};
  int accb  [NSHAPE] = '{0, 1, 2, 4, 5, 6, 8, 9, 10, 12, 13, 14, 16};
  longint model [NSHAPE][16][16][9];
  longint expq [$];
  int n_cu = 0, n_sat = 0;

  always @(negedge clk) if (rst_n && cost_valid) begin
    for (int i = 0; i < 9; i++) begin
      automatic longint e = expq.pop_front();
      checks++;
      if (longint'(cost[i]) != e) begin
        failures++;
        if (failures < 5) $display("cu %0d cost[%0d] = %0d, expected %0d", n_cu, i, cost[i], e);
      end
      if (e == 65535) n_sat++;
    end
    n_cu++;
  end

  task automatic run_ctu(input bit big);
    for (int k = 0; k < 256; k++) begin
      int bx = 0, by = 0;
      for (int b = 0; b < 4; b++) begin bx |= ((k >> (2*b)) & 1) << b; by |= ((k >> (2*b+1)) & 1) << b; end
      for (int s = 0; s < NSHAPE; s++) begin
        int w = shp_w[s], h = shp_h[s];
        int ox = bx & ~(w - 1), oy = by & ~(h - 1);
        bit first = (bx == ox) && (by == oy);
        bit last  = (bx == ox + w - 1) && (by == oy + h - 1);
        slot.cu.shape = shape_t'(s); slot.cu.cu_x = 4'(ox); slot.cu.cu_y = 4'(oy);
        slot.cu.imv_x = imv_t'(k); slot.cu.imv_y = imv_t'(-s);
        slot.bx = 4'(bx); slot.by = 4'(by);
        slot.first = first; slot.last = last;
        slot.acc_idx = 5'(accb[s] + ((h > w) ? ((ox / w) & 1) : 0));
        for (int i = 0; i < 9; i++) begin
          satd[i] = big ? satd_t'(200000 + $urandom_range(60000)) : satd_t'($urandom_range(3000));
          rate[i] = rate_t'($urandom_range(big ? 65535 : 500));
          if (first) model[s][oy][ox][i] = 0;
          model[s][oy][ox][i] += longint'(satd[i]);
          if (last) begin
            longint t = ((model[s][oy][ox][i] >> 1) + longint'(rate[i])) >> $clog2(w * h);
            expq.push_back(t > 65535 ? 65535 : t);
          end
        end
        satd_valid = 1;
        @(negedge clk);
        // the CU description travels with the result
        if (last) begin
          checks++;
          if (cu_out != slot.cu) begin failures++; $display("cu_out mismatch"); end
        end
        satd_valid = 0;
        if ($urandom_range(3) == 0) @(negedge clk);
      end
    end
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    run_ctu(0);
    run_ctu(1);
    repeat (3) @(negedge clk);
    checks++;
    if (n_cu != 2 * 681) begin failures++; $display("%0d CUs", n_cu); end
    checks++;
    if (n_sat == 0) begin failures++; $display("saturation never reached"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
