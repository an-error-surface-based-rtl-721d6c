// fme_param_gen -- parameter generator of the FMV calculator.
//
// Fits the six-parameter error surface
//   C(x,y) = P1 x^2 + P2 y^2 + P3 xy + P4 x + P5 y + P6
// to the R-D costs of the IMV and its eight integer neighbours by least
// squares, then forms the numerators and the common denominator of the
// position of the surface minimum:
//   x* = (2 P2 P4 - P3 P5) / (P3^2 - 4 P1 P2)
//   y* = (2 P1 P5 - P3 P4) / (P3^2 - 4 P1 P2)
//
// On the 3x3 grid x,y in {-1,0,1} the normal equations decouple and each
// parameter is a fixed signed sum of the nine costs; multiplied by 12 all of
// them become integers (stage 1, five adder trees):
//   12 P1 = 2 (sum of columns x=+-1) - 4 (column x=0)
//   12 P2 = 2 (sum of rows    y=+-1) - 4 (row    y=0)
//   12 P3 = 3 (C(-1,-1) - C(1,-1) - C(-1,1) + C(1,1))
//   12 P4 = 2 (column x=1 - column x=-1)
//   12 P5 = 2 (row    y=1 - row    y=-1)
// P6 does not move the minimum and is not formed. The factor 12 scales the
// numerators and the denominator alike (by 144) and cancels. Stage 2 holds
// the six multipliers, the shifts by 1 and 2 and the three subtractors.
// has_min is set when the surface is a bowl (denominator < 0 and P1 > 0).
// cost[i] is candidate i = (i%3-1, i/3-1), y downwards.
//
// From the source design: the least-squares fit, the six-parameter model,
// dropping P6, the adder trees, multipliers, shifts and subtractors of this
// unit. This implementation's own: the scaling by 12, the word widths, the
// has_min test and the two register stages.
//
// Timing: eq_valid follows cost_valid by two cycles; a new cost set may
// enter every cycle.
module fme_param_gen
  import fme_pkg::*;
(
  input  logic              clk,
  input  logic              rst_n,
  input  logic              cost_valid,
  input  cost_t [NCAND-1:0] cost,
  input  cu_info_t          cu_in,
  output logic              eq_valid,
  output fmv_eq_t           eq,
  output cu_info_t          cu_out
);

  // ------------------------------------------------------------ stage 1
  surf_t p_c, p;
  logic     p_valid;
  cu_info_t p_cu;

  always_comb begin
    q_t c [NCAND];
    for (int i = 0; i < NCAND; i++) c[i] = q_t'(cost[i]);
    p_c.p1 = 2 * (c[0] + c[2] + c[3] + c[5] + c[6] + c[8]) - 4 * (c[1] + c[4] + c[7]);
    p_c.p2 = 2 * (c[0] + c[1] + c[2] + c[6] + c[7] + c[8]) - 4 * (c[3] + c[4] + c[5]);
    p_c.p3 = 3 * (c[0] - c[2] - c[6] + c[8]);
    p_c.p4 = 2 * (c[2] + c[5] + c[8] - c[0] - c[3] - c[6]);
    p_c.p5 = 2 * (c[6] + c[7] + c[8] - c[0] - c[1] - c[2]);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      p_valid <= 1'b0;
      p       <= '0;
      p_cu    <= '0;
    end else begin
      p_valid <= cost_valid;
      if (cost_valid) begin
        p    <= p_c;
        p_cu <= cu_in;
      end
    end
  end

  // ------------------------------------------------------------ stage 2
  fmv_eq_t eq_c;

  always_comb begin
    prod_t p1, p2, p3, p4, p5;
    p1 = prod_t'(p.p1);  p2 = prod_t'(p.p2);  p3 = prod_t'(p.p3);
    p4 = prod_t'(p.p4);  p5 = prod_t'(p.p5);
    eq_c.nx      = ((p2 * p4) <<< 1) - p3 * p5;
    eq_c.ny      = ((p1 * p5) <<< 1) - p3 * p4;
    eq_c.den     = p3 * p3 - ((p1 * p2) <<< 2);
    eq_c.has_min = (eq_c.den < 0) && (p.p1 > 0);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      eq_valid <= 1'b0;
      eq       <= '0;
      cu_out   <= '0;
    end else begin
      eq_valid <= p_valid;
      if (p_valid) begin
        eq     <= eq_c;
        cu_out <= p_cu;
      end
    end
  end

endmodule
