// spin_accumulate_tb: checks stage 4. For every hop d a random full spinor
// chi_d is projected in the testbench with the explicit gamma matrices,
// P_d chi_d = (1 -+ gamma_mu) chi_d; its upper two rows (rounded) are the
// block's input h[d], and the expected output is
//     psi_c - kappa * sum_d P_d chi_d
// using all four rows computed in double precision, so the block's
// reconstruction of rows 2 and 3 is checked against the gamma matrices.
// New inputs every cycle; results matched MUL_LAT + 4*ADD_LAT (10) cycles
// later. Tolerance 1e-4 (sums of 8 terms of magnitude up to 2).
module spin_accumulate_tb;
  import dw_pkg::*;
  import tb_fp_pkg::*;

  localparam int LAT = MUL_LAT + 4 * ADD_LAT;

  logic clk = 0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  half_t [NHOP-1:0] h;
  spinor_t psi_c, y;
  flt_t kappa;
  rbits_t exp_q [$];

  spin_accumulate dut (.clk, .h, .psi_c, .kappa, .y);

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(negedge clk) begin
    if (exp_q.size() > LAT) begin
      rspinor_t e;
      int bad;
      unpack_r(e, exp_q.pop_front());
      bad = spinor_diff(y, e, 1e-4);
      checks++;
      if (bad != 0) begin
        failures++;
        if (failures < 5) $display("spin_accumulate: %0d components wrong", bad);
      end
    end
  end

  initial begin
    h = '0; psi_c = '0; kappa = '0;
    @(posedge clk); #1;
    for (int i = 0; i < 400; i++) begin
      rspinor_t sum, e;
      real k;
      for (int s = 0; s < 4; s++)
        for (int c = 0; c < 3; c++) begin sum[s][c].re = 0.0; sum[s][c].im = 0.0; end
      for (int d = 0; d < NHOP; d++) begin
        spinor_t chi;
        real sg;
        chi = rand_spinor();
        sg  = (d % 2 == 0) ? -1.0 : 1.0;
        for (int r = 0; r < 4; r++)
          for (int c = 0; c < 3; c++) begin
            rc_t p;
            p = rc(chi[r][c]);
            for (int q = 0; q < 4; q++)
              p = rc_add(p, rc_scale(rc_mul(gamma_el(d / 2, r, q), rc(chi[q][c])), sg));
            if (r < 2) begin
              h[d][r][c].re = from_real(p.re);
              h[d][r][c].im = from_real(p.im);
              p = rc(h[d][r][c]);
            end
            sum[r][c] = rc_add(sum[r][c], p);
          end
      end
      psi_c = rand_spinor();
      kappa = from_real(0.05 + 0.2 * real'($urandom_range(0, 1000)) / 1000.0);
      k = to_real(kappa);
      for (int s = 0; s < 4; s++)
        for (int c = 0; c < 3; c++)
          e[s][c] = rc_add(rc(psi_c[s][c]), rc_scale(sum[s][c], -k));
      exp_q.push_back(pack_r(e));
      @(posedge clk); #1;
    end
    repeat (LAT + 2) begin @(posedge clk); #1; end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
