// tb_fme_residual -- checks the nine residual rows against a direct
// computation for random pixels, including the extreme values 0 and 255.
module tb_fme_residual;
  import fme_pkg::*;

  logic [7:0][PIX_W-1:0] org_row;
  logic [2:0][9:0][PIX_W-1:0] ref_win;
  logic [NCAND-1:0][7:0][PIX_W:0] res;

  fme_residual dut (.*);

  int checks = 0, failures = 0;

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 500; t++) begin
      for (int c = 0; c < 8; c++)
        org_row[c] = (t < 2) ? 8'(t * 255) : 8'($urandom);
      for (int r = 0; r < 3; r++)
        for (int j = 0; j < 10; j++)
          ref_win[r][j] = (t < 2) ? 8'((1 - t) * 255) : 8'($urandom);
      #1;
      for (int dy = -1; dy <= 1; dy++)
        for (int dx = -1; dx <= 1; dx++)
          for (int c = 0; c < 8; c++) begin
            automatic int i = (dy + 1) * 3 + dx + 1;
            automatic int e = int'(org_row[c]) - int'(ref_win[dy + 1][c + dx + 1]);
            checks++;
            if (int'($signed(res[i][c])) != e) begin
              failures++;
              if (failures < 5) $display("res[%0d][%0d] = %0d, expected %0d", i, c, $signed(res[i][c]), e);
            end
          end
      #1;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
