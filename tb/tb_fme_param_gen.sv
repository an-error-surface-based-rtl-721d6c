// tb_fme_param_gen -- checks the surface fit on random and on extreme
// (0 / 65535) cost sets. The reference solves the 6x6 normal equations
// (X^T X) P = X^T C of the nine-point system by Gaussian elimination in real
// arithmetic, independently of the closed forms used by the RTL, scales the
// parameters by 12 and forms the numerators and denominator of the surface
// minimum; the RTL must match them after exactly two cycles.
module tb_fme_param_gen;
  import fme_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic cost_valid = 0;
  cost_t [NCAND-1:0] cost = '0;
  cu_info_t cu_in = '0;
  logic eq_valid;
  fmv_eq_t eq;
  cu_info_t cu_out;

  fme_param_gen dut (.*);

  int checks = 0, failures = 0;
  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // least squares by elimination
  task automatic lsq(input int c [9], output real sol [6]);
    real a [6][7];
    for (int r = 0; r < 6; r++) for (int k = 0; k < 7; k++) a[r][k] = 0.0;
    for (int i = 0; i < 9; i++) begin
      real x, y;
      real row [6];
      x = real'(i % 3 - 1); y = real'(i / 3 - 1);
      row = '{x*x, y*y, x*y, x, y, 1.0};
      for (int r = 0; r < 6; r++) begin
        for (int k = 0; k < 6; k++) a[r][k] += row[r] * row[k];
        a[r][6] += row[r] * real'(c[i]);
      end
    end
    for (int col = 0; col < 6; col++) begin
      int piv = col;
      for (int r = col + 1; r < 6; r++) if ((a[r][col] < 0 ? -a[r][col] : a[r][col]) > (a[piv][col] < 0 ? -a[piv][col] : a[piv][col])) piv = r;
      for (int k = 0; k < 7; k++) begin real t = a[col][k]; a[col][k] = a[piv][k]; a[piv][k] = t; end
      for (int r = 0; r < 6; r++) if (r != col) begin
        real f = a[r][col] / a[col][col];
        for (int k = 0; k < 7; k++) a[r][k] -= f * a[col][k];
      end
    end
    for (int r = 0; r < 6; r++) sol[r] = a[r][6] / a[r][r];
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 2000; t++) begin
      int c [9];
      real sol [6];
      q_t got [5];
      for (int i = 0; i < 9; i++)
        c[i] = t < 20 ? (($urandom_range(1) == 1) ? 65535 : 0) : int'($urandom_range(t % 2 ? 65535 : 3000));
      for (int i = 0; i < 9; i++) cost[i] = cost_t'(c[i]);
      cu_in = cu_info_t'({$urandom, $urandom});
      cost_valid = 1;
      @(negedge clk);
      cost_valid = 0;
      checks++;
      if (eq_valid) begin failures++; $display("result after one cycle"); end
      @(negedge clk);
      lsq(c, sol);
      begin
        real q [5];
        real en [3];
        real gt [3];
        for (int k = 0; k < 5; k++) q[k] = 12.0 * sol[k];
        en[0] = 2.0 * q[1] * q[3] - q[2] * q[4];
        en[1] = 2.0 * q[0] * q[4] - q[2] * q[3];
        en[2] = q[2] * q[2] - 4.0 * q[0] * q[1];
        gt = '{real'(eq.nx), real'(eq.ny), real'(eq.den)};
        for (int k = 0; k < 3; k++) begin
          automatic real d = gt[k] - en[k];
          automatic real tol = 0.5 + 1e-9 * (en[k] < 0 ? -en[k] : en[k]);
          checks++;
          if (d > tol || d < -tol) begin
            failures++;
            if (failures < 5) $display("set %0d term %0d: got %f, expected %f", t, k, gt[k], en[k]);
          end
        end
        checks++;
        if (eq.has_min != ((en[2] < -0.5) && (q[0] > 0.5))) begin
          failures++; $display("set %0d: has_min %0d", t, eq.has_min);
        end
      end
      checks++;
      if (!eq_valid || cu_out != cu_in) begin failures++; $display("valid/cu not carried"); end
      if ($urandom_range(1)) @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
