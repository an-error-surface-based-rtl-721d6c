// fme_satd_kernel -- SATD of one 8x8 residual block, 8x1 pixels per cycle.
//
// A row of eight residuals enters per valid cycle. The row is split into two
// 4-pixel halves; each half goes through the first 1-D 4-point Hadamard step,
// a 4x4 transpose buffer, the second 4-point Hadamard step along the columns,
// and an absolute-value stage. An adder tree sums the |coefficients| of both
// halves and accumulates them, so after eight rows the kernel holds the sum of
// the four 4x4 Hadamard SATDs of the 8x8 block (unnormalised: the plain sum of
// absolute transform coefficients).
//
// The structure (two 4x4 Hadamard paths with transpose buffers, abs stage and
// adder tree, eight cycles per 8x8 block) follows the source design. The
// figure labels the abs stage "Abs & Max"; no maximum is described anywhere,
// so here the stage is the absolute value only.
//
// Timing: rows must arrive in groups of eight, one block after another, at any
// rate up to one per cycle. satd_valid pulses 5 cycles after the eighth row of
// a block is presented (4 cycles to read the last transpose group, 1 output
// register), and satd holds its value until the next pulse.
module fme_satd_kernel
  import fme_pkg::*;
(
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  in_valid,
  input  logic [7:0][RES_W-1:0] res,        // two's complement residuals
  output logic                  satd_valid,
  output satd_t                 satd
);

  localparam int unsigned H1_W = RES_W + 2;   // after the first step

  logic [1:0][3:0][H1_W-1:0] h1;               // h1[half][coef]
  logic [1:0]                rd_valid, rd_last;
  logic [1:0][3:0][H1_W-1:0] col;
  logic [1:0][1:0]           rd_idx;

  // First Hadamard step on each half of the row.
  always_comb begin
    for (int h = 0; h < 2; h++) begin
      h4_t t;
      t = hadamard4(h_t'($signed(res[4*h+0])), h_t'($signed(res[4*h+1])),
                    h_t'($signed(res[4*h+2])), h_t'($signed(res[4*h+3])));
      for (int k = 0; k < 4; k++) h1[h][k] = t[k][H1_W-1:0];
    end
  end

  for (genvar h = 0; h < 2; h++) begin : g_half
    fme_transpose_buf #(.W(H1_W)) u_tbuf (
      .clk, .rst_n,
      .wr_en   (in_valid),
      .wr_row  (h1[h]),
      .rd_valid(rd_valid[h]),
      .rd_col  (col[h]),
      .rd_idx  (rd_idx[h]),
      .rd_last (rd_last[h])
    );
  end

  // Second Hadamard step, absolute values and the adder tree.
  logic [15:0] col_sum;
  always_comb begin
    col_sum = '0;
    for (int h = 0; h < 2; h++) begin
      h4_t t;
      t = hadamard4(h_t'($signed(col[h][0])), h_t'($signed(col[h][1])),
                    h_t'($signed(col[h][2])), h_t'($signed(col[h][3])));
      for (int k = 0; k < 4; k++) begin
        h_t v;
        v = $signed(t[k]);
        col_sum = col_sum + (v < 0 ? 16'(-v) : 16'(v));
      end
    end
  end

  // Accumulate the two 4-row groups of the block.
  satd_t acc;
  logic  grp;   // 0: rows 0..3 of the block, 1: rows 4..7
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      acc        <= '0;
      grp        <= 1'b0;
      satd_valid <= 1'b0;
      satd       <= '0;
    end else begin
      satd_valid <= 1'b0;
      if (rd_valid[0]) begin
        if (rd_last[0]) begin
          grp <= ~grp;
          if (grp) begin
            satd       <= acc + satd_t'(col_sum);
            satd_valid <= 1'b1;
            acc        <= '0;
          end else begin
            acc <= acc + satd_t'(col_sum);
          end
        end else begin
          acc <= acc + satd_t'(col_sum);
        end
      end
    end
  end

  // Both halves run in lockstep.
  a_lockstep: assert property (@(posedge clk) disable iff (!rst_n)
    rd_valid[0] == rd_valid[1] && rd_idx[0] == rd_idx[1]);

endmodule
