// tb_fme_transpose_buf -- writes random 4x4 tiles row by row, with random gaps
// and back to back, and checks that every tile comes out column by column,
// in order, with the documented latency (first column one cycle after the
// fourth row when the bank is free).
module tb_fme_transpose_buf;
  localparam int W = 11;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic wr_en = 0;
  logic [3:0][W-1:0] wr_row = '0;
  logic rd_valid, rd_last;
  logic [3:0][W-1:0] rd_col;
  logic [1:0] rd_idx;

  fme_transpose_buf #(.W(W)) dut (.*);

  int checks = 0, failures = 0;
  logic [W-1:0] tiles [$];   // expected elements, tile-major, row-major
  int n_tiles_out = 0;
  int col_cnt = 0;
  int wr_cycle4 = -1, cyc = 0;

  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // checker: samples after each rising edge, on the falling edge
  logic [W-1:0] cur [16];
  always @(negedge clk) if (rst_n && rd_valid) begin
    if (col_cnt == 0) for (int k = 0; k < 16; k++) cur[k] = tiles.pop_front();
    for (int r = 0; r < 4; r++) begin
      checks++;
      if (rd_col[r] !== cur[r * 4 + col_cnt]) begin
        failures++;
        if (failures < 5) $display("tile %0d col %0d row %0d: %0h vs %0h", n_tiles_out, col_cnt, r, rd_col[r], cur[r*4+col_cnt]);
      end
    end
    checks++;
    if (rd_idx != 2'(col_cnt) || rd_last != (col_cnt == 3)) failures++;
    col_cnt = (col_cnt + 1) % 4;
    if (col_cnt == 0) n_tiles_out++;
  end

  // Drives one tile on falling edges; each row is taken on the next rising edge.
  task automatic write_tile(input int gap_pct);
    for (int r = 0; r < 4; r++) begin
      while ($urandom_range(99) < gap_pct) begin
        wr_en = 0; @(negedge clk);
      end
      wr_en = 1;
      for (int c = 0; c < 4; c++) begin
        wr_row[c] = W'($urandom);
        tiles.push_back(wr_row[c]);
      end
      @(negedge clk);
    end
    wr_en = 0;
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    // latency of a single tile
    write_tile(0);
    wr_cycle4 = cyc;     // the fourth row was taken on edge cyc
    while (!rd_valid) @(negedge clk);
    checks++;
    if (cyc - wr_cycle4 != 1) begin
      failures++; $display("first column %0d cycles after last row", cyc - wr_cycle4);
    end
    repeat (8) @(negedge clk);
    for (int t = 0; t < 40; t++) write_tile(t < 20 ? 0 : 30);
    repeat (10) @(negedge clk);
    checks++;
    if (n_tiles_out != 41) begin failures++; $display("%0d tiles out", n_tiles_out); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
