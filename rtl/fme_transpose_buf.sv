// fme_transpose_buf -- register-based 4x4 transpose buffer placed between the
// row step and the column step of a 4x4 Hadamard transform.
//
// Two 4x4 register banks work in ping-pong ("duplex"): while four rows are
// written into one bank, one row per valid input cycle, the other bank, once
// full, is read out one column per cycle. A bank becomes readable in the cycle
// after its fourth row is written and is read on four consecutive cycles, so
// writing and reading overlap and a new row can be accepted every cycle with
// no back-pressure. The output column of bank b, column c is
// {row3[c], row2[c], row1[c], row0[c]}.
//
// The source design states that register transpose buffers sit between the
// two Hadamard steps and work in a duplex way; the ping-pong organisation is
// this implementation's reading of that. Latency: the first column of a group
// leaves 1 cycle after its fourth row enters (registered output), the fourth
// column 4 cycles after.
module fme_transpose_buf #(
  parameter int unsigned W = 11   // element width
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              wr_en,     // a row is presented
  input  logic [3:0][W-1:0] wr_row,    // wr_row[c]
  output logic              rd_valid,  // rd_col holds a column
  output logic [3:0][W-1:0] rd_col,    // rd_col[r] = element (r, rd_idx)
  output logic [1:0]        rd_idx,    // which column
  output logic              rd_last    // fourth column of the group
);

  logic [1:0][3:0][3:0][W-1:0] bank;   // bank[b][row][col]
  logic       wr_bank;
  logic [1:0] wr_row_idx;
  logic [1:0] full;                    // bank holds four unread rows
  logic       rd_bank;
  logic [1:0] rd_cnt;

  // Write side.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wr_bank    <= 1'b0;
      wr_row_idx <= '0;
    end else if (wr_en) begin
      wr_row_idx <= wr_row_idx + 2'd1;
      if (wr_row_idx == 2'd3) wr_bank <= ~wr_bank;
    end
  end

  always_ff @(posedge clk) begin
    if (wr_en) bank[wr_bank][wr_row_idx] <= wr_row;
  end

  // Read side: drains a full bank in four cycles.
  logic rd_go;
  assign rd_go = full[rd_bank];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      full     <= '0;
      rd_bank  <= 1'b0;
      rd_cnt   <= '0;
      rd_valid <= 1'b0;
      rd_idx   <= '0;
      rd_last  <= 1'b0;
    end else begin
      rd_valid <= rd_go;
      rd_idx   <= rd_cnt;
      rd_last  <= rd_go && (rd_cnt == 2'd3);
      if (rd_go) begin
        rd_cnt <= rd_cnt + 2'd1;
        if (rd_cnt == 2'd3) rd_bank <= ~rd_bank;
      end
      for (int b = 0; b < 2; b++) begin
        if (wr_en && (wr_row_idx == 2'd3) && (wr_bank == b[0]))
          full[b] <= 1'b1;
        else if (rd_go && (rd_cnt == 2'd3) && (rd_bank == b[0]))
          full[b] <= 1'b0;
      end
    end
  end

  always_ff @(posedge clk) begin
    for (int r = 0; r < 4; r++) rd_col[r] <= bank[rd_bank][r][rd_cnt];
  end

  // A bank must be drained before it is written again.
  a_no_overrun: assert property (@(posedge clk) disable iff (!rst_n)
    wr_en && (wr_row_idx == 2'd0) |-> !full[wr_bank] || (rd_go && rd_bank == wr_bank && rd_cnt == 2'd3));

endmodule
