// tb_fme_fmv_divider -- draws random surface parameters (mostly with a
// minimum, some without), forms the numerators and denominator of the
// minimum, and compares the quarter-pel result with a real division rounded
// to the nearest quarter and limited to +-3/4; surfaces without a minimum must
// give the IMV. Also checks the 1-cycle latency and that the CU description
// is carried along.
module tb_fme_fmv_divider;
  import fme_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic eq_valid = 0;
  fmv_eq_t eq = '0;
  cu_info_t cu_in = '0;
  logic fmv_valid, convex;
  mv_t fmv_x, fmv_y;
  logic signed [2:0] frac_x, frac_y;
  cu_info_t cu_out;

  fme_fmv_divider dut (.*);

  int checks = 0, failures = 0;
  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int rq(real v, output bit tie);
    real a = 4.0 * (v < 0 ? -v : v);
    int m;
    tie = 0;
    if (a >= 2.5) m = 3;
    else begin
      m = int'($floor(a + 0.5));
      tie = (a - $floor(a) - 0.5 < 1e-9) && (a - $floor(a) - 0.5 > -1e-9);
    end
    return v < 0 ? -m : m;
  endfunction

  int n_conv = 0, n_nonconv = 0;
  int seen_frac [7];

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 5000; t++) begin
      longint q1, q2, q3, q4, q5;
      real den, vx, vy;
      int ex, ey, imx, imy;
      bit cv, tx, ty;
      // costs up to 16 bits give |12 P| < 2^20
      q1 = longint'($urandom_range(t % 5 == 0 ? 2000000 : 40000)) - (t % 5 == 0 ? 1000000 : 2000);
      q2 = longint'($urandom_range(t % 5 == 0 ? 2000000 : 40000)) - (t % 5 == 0 ? 1000000 : 2000);
      q3 = longint'($urandom_range(20000)) - 10000;
      q4 = longint'($urandom_range(t % 3 == 0 ? 2000000 : 60000)) - (t % 3 == 0 ? 1000000 : 30000);
      q5 = longint'($urandom_range(t % 3 == 0 ? 2000000 : 60000)) - (t % 3 == 0 ? 1000000 : 30000);
      imx = int'($urandom_range(2000)) - 1000;
      imy = int'($urandom_range(2000)) - 1000;
      eq.nx  = prod_t'(2 * q2 * q4 - q3 * q5);
      eq.ny  = prod_t'(2 * q1 * q5 - q3 * q4);
      eq.den = prod_t'(q3 * q3 - 4 * q1 * q2);
      eq.has_min = (q3 * q3 - 4 * q1 * q2 < 0) && (q1 > 0);
      cu_in = cu_info_t'({$urandom, $urandom});
      cu_in.imv_x = imv_t'(imx); cu_in.imv_y = imv_t'(imy);
      eq_valid = 1;
      @(negedge clk);
      eq_valid = 0;
      checks++;
      if (!fmv_valid || cu_out != cu_in) begin failures++; $display("no result after 1 cycle"); end
      den = real'(q3) * real'(q3) - 4.0 * real'(q1) * real'(q2);
      cv = (den < 0) && (q1 > 0);
      ex = 0; ey = 0; tx = 0; ty = 0;
      if (cv) begin
        vx = (2.0 * real'(q2) * real'(q4) - real'(q3) * real'(q5)) / den;
        vy = (2.0 * real'(q1) * real'(q5) - real'(q3) * real'(q4)) / den;
        ex = rq(vx, tx);
        ey = rq(vy, ty);
        n_conv++;
      end else n_nonconv++;
      checks++;
      if (convex != cv || !((int'(frac_x) == ex) || tx) || !((int'(frac_y) == ey) || ty) ||
          int'(fmv_x) != imx * 4 + int'(frac_x) || int'(fmv_y) != imy * 4 + int'(frac_y)) begin
        failures++;
        if (failures < 5) $display("t %0d: got frac (%0d,%0d) conv %0d, expected (%0d,%0d) conv %0d",
                                   t, frac_x, frac_y, convex, ex, ey, cv);
      end
      seen_frac[int'(frac_x) + 3]++;
    end
    for (int k = 0; k < 7; k++) begin
      checks++;
      if (seen_frac[k] == 0) begin failures++; $display("fraction %0d never produced", k - 3); end
    end
    checks++;
    if (n_conv == 0 || n_nonconv == 0) begin failures++; $display("convex %0d non-convex %0d", n_conv, n_nonconv); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
