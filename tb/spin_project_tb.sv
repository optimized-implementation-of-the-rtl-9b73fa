// spin_project_tb: checks the 8 spin projections (4 directions x 2 hop
// signs). A random spinor is applied every cycle to one instance of each
// kind; the expected half spinor is the upper two rows of (1 -+ gamma_mu)
// psi computed with the explicit 4x4 gamma matrices of the testbench
// package (sums of two floats, so the comparison is exact after rounding).
// Results are matched to inputs ADD_LAT (2) cycles earlier.
module spin_project_tb;
  import dw_pkg::*;
  import tb_fp_pkg::*;

  logic clk = 0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  spinor_t psi;
  half_t   h [NHOP];
  spinor_t in_q [$];

  for (genvar d = 0; d < NHOP; d++) begin : g_dut
    spin_project #(.MU(d / 2), .FWD((d % 2) == 0)) dut (.clk, .psi, .h(h[d]));
  end

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(negedge clk) begin
    if (in_q.size() > ADD_LAT) begin
      spinor_t p;
      p = in_q.pop_front();
      for (int d = 0; d < NHOP; d++) begin
        int bad = 0;
        real sg;
        sg = (d % 2 == 0) ? -1.0 : 1.0;
        for (int r = 0; r < 2; r++)
          for (int c = 0; c < 3; c++) begin
            rc_t e;
            e = rc(p[r][c]);
            for (int k = 0; k < 4; k++)
              e = rc_add(e, rc_scale(rc_mul(gamma_el(d / 2, r, k), rc(p[k][c])), sg));
            if (to_real(h[d][r][c].re) != to_real(from_real(e.re))) bad++;
            if (to_real(h[d][r][c].im) != to_real(from_real(e.im))) bad++;
          end
        checks++;
        if (bad != 0) begin
          failures++;
          if (failures < 5) $display("spin_project hop %0d: %0d components wrong", d, bad);
        end
      end
    end
  end

  initial begin
    psi = '0;
    @(posedge clk); #1;
    for (int i = 0; i < 500; i++) begin
      psi = rand_spinor();
      in_q.push_back(psi);
      @(posedge clk); #1;
    end
    repeat (4) begin @(posedge clk); #1; end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
