// fme_fmv_divider -- divider-free FMV stage of the FMV calculator.
//
// The minimum of the fitted surface lies at x* = nx/den, y* = ny/den. Only
// its rounding to quarter pel is needed, so no division is done: with
// a = |numerator| and b = |denominator| the quarter-pel magnitude is
//   3 if 8a >= 5b, else 2 if 8a >= 3b, else 1 if 8a >= b, else 0,
// i.e. round(4 a / b) limited to 3/4 pel (ties round away from zero); the
// sign is the sign of the quotient. Per axis three comparators and a chain
// of three multiplexers do this, the chain selecting 3 or 2, then 1, then 0.
// 8a is a shift, 3b and 5b a shift and an add. When the surface has no
// minimum (has_min low) the fraction is zero and the result is the IMV.
//
// From the source design: no divider; the 8x numerator compared with 3x and
// 5x denominator; comparators feeding a multiplexer chain with inputs 3/2,
// 1 and 0 per axis. This implementation's own: the 1x comparison written out,
// the +-3/4 limit, the no-minimum fallback and one output register.
//
// Timing: fmv_valid follows eq_valid by one cycle; fmv = 4 IMV + fraction,
// in quarter pel.
module fme_fmv_divider
  import fme_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic        eq_valid,
  input  fmv_eq_t     eq,
  input  cu_info_t    cu_in,
  output logic        fmv_valid,
  output mv_t         fmv_x,
  output mv_t         fmv_y,
  output logic signed [2:0] frac_x,   // quarter-pel offset from the IMV
  output logic signed [2:0] frac_y,
  output logic        convex,         // surface had a minimum
  output cu_info_t    cu_out
);

  localparam int unsigned CW = PROD_W + 4;   // room for 8x and 5x
  typedef logic signed [CW-1:0] w_t;

  // Quarter-pel rounding of num/den without dividing.
  function automatic logic signed [2:0] round_q(prod_t num, prod_t den);
    w_t a, b, a8;
    logic [1:0] m;
    a  = (num < 0) ? -w_t'(num) : w_t'(num);
    b  = (den < 0) ? -w_t'(den) : w_t'(den);
    a8 = a <<< 3;
    m  = (a8 >= (b <<< 2) + b) ? 2'd3 : 2'd2;   // first multiplexer
    m  = (a8 >= (b <<< 1) + b) ? m    : 2'd1;   // second
    m  = (a8 >= b)             ? m    : 2'd0;   // third
    return ((num < 0) != (den < 0)) ? -$signed({1'b0, m}) : $signed({1'b0, m});
  endfunction

  logic signed [2:0] qx, qy;
  always_comb begin
    qx = eq.has_min ? round_q(eq.nx, eq.den) : 3'sd0;
    qy = eq.has_min ? round_q(eq.ny, eq.den) : 3'sd0;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      fmv_valid <= 1'b0;
      fmv_x     <= '0;
      fmv_y     <= '0;
      frac_x    <= '0;
      frac_y    <= '0;
      convex    <= 1'b0;
      cu_out    <= '0;
    end else begin
      fmv_valid <= eq_valid;
      if (eq_valid) begin
        fmv_x  <= (mv_t'(cu_in.imv_x) <<< 2) + mv_t'(qx);
        fmv_y  <= (mv_t'(cu_in.imv_y) <<< 2) + mv_t'(qy);
        frac_x <= qx;
        frac_y <= qy;
        convex <= eq.has_min;
        cu_out <= cu_in;
      end
    end
  end

endmodule
