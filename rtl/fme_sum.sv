// fme_sum -- Sum unit of the cost calculator: SATD accumulation per CU, rate
// addition and shift, giving the nine R-D costs of a CU.
//
// Because the 8x8 blocks of different CUs are interleaved, the SATDs of one
// CU arrive spread over many slots. An array of accumulator sets keeps the
// running sum of each open CU: one set per CU shape, two for the tall shapes
// (8x16, 16x32, 32x64, 64x128), whose left and right CUs are open at the same
// time in Z order -- 17 sets of nine sums. On the CU's first block the set is
// loaded, on later blocks added to; on its last block the nine costs
//   cost[i] = min(2^COST_W - 1, ((SATD_i >> 1) + rate_i) >> log2(blocks in CU))
// are output. The ">> 1" is the usual 4x4 Hadamard normalisation; the shift
// by the CU area keeps every CU's costs in COST_W bits for the fit. Shifting
// all nine costs by the same amount leaves the minimum of the surface in
// place (apart from rounding).
//
// The source design shows an adder tree followed by a shift and speaks of
// "shifted R-D costs"; the amounts, the saturation and the accumulator
// organisation are this implementation's choices.
//
// Timing: sampled when satd_valid is high; cost_valid pulses one cycle later
// for slots that are the last of their CU.
module fme_sum
  import fme_pkg::*;
(
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  satd_valid,
  input  satd_t [NCAND-1:0]     satd,
  input  rate_t [NCAND-1:0]     rate,
  input  slot_t                 slot,
  output logic                  cost_valid,
  output cost_t [NCAND-1:0]     cost,
  output cu_info_t              cu_out
);

  typedef logic [ACC_W-1:0] acc_t;

  acc_t [NCAND-1:0] acc_mem [NACC];
  acc_t [NCAND-1:0] acc_new;
  cost_t [NCAND-1:0] cost_c;

  always_comb begin
    logic [3:0] sh;
    sh = 4'(shape_lw(slot.cu.shape)) + 4'(shape_lh(slot.cu.shape));
    for (int i = 0; i < NCAND; i++) begin
      logic [ACC_W:0] total;
      acc_new[i] = (slot.first ? acc_t'(0) : acc_mem[slot.acc_idx][i]) + acc_t'(satd[i]);
      total      = ((ACC_W+1)'(acc_new[i] >> 1) + (ACC_W+1)'(rate[i])) >> sh;
      cost_c[i]  = (total > (ACC_W+1)'(2**COST_W - 1)) ? '1 : total[COST_W-1:0];
    end
  end

  always_ff @(posedge clk) begin
    if (satd_valid && !slot.last) acc_mem[slot.acc_idx] <= acc_new;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cost_valid <= 1'b0;
      cost       <= '0;
      cu_out     <= '0;
    end else begin
      cost_valid <= satd_valid && slot.last;
      if (satd_valid && slot.last) begin
        cost   <= cost_c;
        cu_out <= slot.cu;
      end
    end
  end

  a_acc_idx: assert property (@(posedge clk) disable iff (!rst_n)
    satd_valid |-> slot.acc_idx < 5'(NACC));

endmodule
