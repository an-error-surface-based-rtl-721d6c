// fme_residual -- residual generator of the cost calculator.
//
// Each cycle it takes one 8x1 row of original pixels and the three
// integer-pel reference rows that the nine candidate positions need (the rows
// at dy = -1, 0, +1 around the IMV, ten pixels each, covering columns -1..8 of
// the block), and forms the nine 8x1 residual rows original - prediction, one
// for every candidate (IMV and its eight neighbours). Candidate i uses
// dx = i%3-1, dy = i/3-1.
//
// The source design names this unit and shows it as an adder tree fed with
// original and prediction pixels; the 3x10 reference window format of the
// prediction input is this implementation's choice, so the nine predictions of
// a row share their pixels. Purely combinational: the residuals are valid in
// the same cycle as the pixels.
module fme_residual
  import fme_pkg::*;
#(
  parameter int unsigned PW = PIX_W   // pixel bit depth
) (
  input  logic [7:0][PW-1:0]       org_row,  // org_row[c] = column c
  input  logic [2:0][9:0][PW-1:0]  ref_win,  // ref_win[dy+1][dx+1+c]
  output logic [NCAND-1:0][7:0][PW:0] res    // res[i][c], two's complement
);

  always_comb begin
    for (int i = 0; i < NCAND; i++) begin
      for (int c = 0; c < 8; c++) begin
        res[i][c] = {1'b0, org_row[c]} - {1'b0, ref_win[i / 3][(i % 3) + c]};
      end
    end
  end

endmodule
