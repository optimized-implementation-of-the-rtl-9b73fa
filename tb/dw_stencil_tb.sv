// dw_stencil_tb: checks the whole stencil pipeline at its default stage
// latencies. Random stencil inputs (9 spinors, 8 links, kappa) are applied
// with random gaps in in_valid; each expected output is the Wilson-Dirac
// operator of that site computed in double precision by the testbench
// package (colour product first, then the explicit (1 -+ gamma) matrix,
// the opposite order of the hardware). The testbench checks that out_valid
// rises exactly LATENCY = 142 cycles after each in_valid, that the values
// agree within 1e-4, and that a burst of back-to-back inputs is accepted
// at one site per cycle.
module dw_stencil_tb;
  import dw_pkg::*;
  import tb_fp_pkg::*;

  localparam int LATENCY = 1 + 14 + 70 + 57;

  logic clk = 0;
  always #5 clk = ~clk;
  logic rst_n = 0;

  int checks = 0, failures = 0;
  int cycle = 0;
  logic              in_valid, out_valid;
  spinor_t [NNB-1:0] psi_nb;
  links_t            u_fwd, u_bwd;
  flt_t              kappa;
  spinor_t           out_data;

  rbits_t exp_q [$];
  int       tin_q [$];

  dw_stencil dut (.clk, .rst_n, .in_valid, .psi_nb, .u_fwd, .u_bwd, .kappa,
                  .out_valid, .out_data);

  always @(posedge clk) cycle <= cycle + 1;

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(negedge clk) begin
    if (rst_n && out_valid) begin
      rspinor_t e;
      int t0, bad;
      checks++;
      if (exp_q.size() == 0) begin
        failures++;
        $display("dw_stencil: unexpected output at cycle %0d", cycle);
      end else begin
        unpack_r(e, exp_q.pop_front());
        t0 = tin_q.pop_front();
        bad = spinor_diff(out_data, e, 1e-4);
        if (bad != 0 || cycle - t0 != LATENCY) begin
          failures++;
          if (failures < 5)
            $display("dw_stencil: %0d components wrong, latency %0d", bad, cycle - t0);
        end
      end
    end
  end

  initial begin
    in_valid = 0; psi_nb = '0; u_fwd = '0; u_bwd = '0; kappa = from_real(0.125);
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    for (int i = 0; i < 300; i++) begin
      // first 100 back to back, then random gaps
      if (i >= 100) begin
        while ($urandom_range(0, 2) == 0) begin
          in_valid = 0;
          psi_nb = '1;  // garbage on idle cycles
          @(posedge clk); #1;
        end
      end
      for (int k = 0; k < NNB; k++) psi_nb[k] = rand_spinor();
      for (int m = 0; m < 4; m++) begin u_fwd[m] = rand_su3(); u_bwd[m] = rand_su3(); end
      in_valid = 1;
      begin
        rspinor_t e;
        dslash_ref(e, psi_nb, u_fwd, u_bwd, kappa);
        exp_q.push_back(pack_r(e));
        tin_q.push_back(cycle);
      end
      @(posedge clk); #1;
    end
    in_valid = 0;
    repeat (LATENCY + 5) begin @(posedge clk); #1; end
    if (exp_q.size() != 0) begin
      failures++;
      $display("dw_stencil: %0d results missing", exp_q.size());
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
