// tb_fme_satd_kernel -- feeds random 8x8 residual blocks (plus the all +255
// and all -255 extremes) row by row, back to back and with random gaps, and
// compares each SATD with the sum of the four 4x4 Hadamard SATDs computed by
// matrix products. Checks the 8-cycle block rate and the 5-cycle latency
// after the eighth row.
module tb_fme_satd_kernel;
  import fme_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic in_valid = 0;
  logic [7:0][RES_W-1:0] res = '0;
  logic satd_valid;
  satd_t satd;

  fme_satd_kernel dut (.*);

  int checks = 0, failures = 0, cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int hm [4][4] = '{'{1, 1, 1, 1}, '{1, -1, 1, -1}, '{1, 1, -1, -1}, '{1, -1, -1, 1}};
  int expq [$];
  int last_row_cyc [$];

  function automatic int satd8(int b [8][8]);
    int s = 0;
    for (int by = 0; by < 8; by += 4)
      for (int bx = 0; bx < 8; bx += 4)
        for (int u = 0; u < 4; u++)
          for (int v = 0; v < 4; v++) begin
            int acc = 0;
            for (int r = 0; r < 4; r++)
              for (int c = 0; c < 4; c++) acc += hm[u][r] * b[by + r][bx + c] * hm[v][c];
            s += acc < 0 ? -acc : acc;
          end
    return s;
  endfunction

  task automatic send_block(input int mode, input int gap_pct);
    int b [8][8];
    for (int r = 0; r < 8; r++)
      for (int c = 0; c < 8; c++)
        b[r][c] = mode == 1 ? 255 : mode == 2 ? -255 : int'($urandom_range(510)) - 255;
    expq.push_back(satd8(b));
    for (int r = 0; r < 8; r++) begin
      while ($urandom_range(99) < gap_pct) begin in_valid = 0; @(negedge clk); end
      in_valid = 1;
      for (int c = 0; c < 8; c++) res[c] = RES_W'(b[r][c]);
      @(negedge clk);
      if (r == 7) last_row_cyc.push_back(cyc);   // edge that took the eighth row
    end
    in_valid = 0;
  endtask

  int n_out = 0, prev_out = -1, gaps_mode = 0;
  always @(negedge clk) if (rst_n && satd_valid) begin
    int e, lr;
    e  = expq.pop_front();
    lr = last_row_cyc.pop_front();
    checks++;
    if (int'(satd) != e) begin
      failures++; if (failures < 5) $display("block %0d: satd %0d, expected %0d", n_out, satd, e);
    end
    checks++;
    if (cyc - lr != 5) begin failures++; $display("latency %0d", cyc - lr); end
    if (!gaps_mode && prev_out >= 0) begin
      checks++;
      if (cyc - prev_out != 8) begin failures++; $display("block interval %0d", cyc - prev_out); end
    end
    prev_out = cyc;
    n_out++;
  end

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    send_block(1, 0);
    send_block(2, 0);
    for (int k = 0; k < 100; k++) send_block(0, 0);
    repeat (10) @(negedge clk);
    gaps_mode = 1;
    for (int k = 0; k < 100; k++) send_block(0, 25);
    repeat (10) @(negedge clk);
    checks++;
    if (n_out != 202) begin failures++; $display("%0d blocks out", n_out); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
