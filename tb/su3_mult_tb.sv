// su3_mult_tb: checks U*h and U^dagger*h. Random links and half spinors are
// applied every cycle to one instance of each kind; the expected result is
// the matrix product computed in double precision (U^dagger formed
// explicitly as the conjugate transpose). Tolerance 1e-5 for entries below
// 1 in magnitude. Each result is matched to the inputs applied
// MUL_LAT + 3*ADD_LAT (8) cycles earlier, which checks the latency.
module su3_mult_tb;
  import dw_pkg::*;
  import tb_fp_pkg::*;

  localparam int LAT = MUL_LAT + 3 * ADD_LAT;

  logic clk = 0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  su3_t  u;
  half_t h, y0, y1;
  su3_t  uq [$];
  half_t hq [$];

  su3_mult #(.DAGGER(1'b0)) dut0 (.clk, .u, .h, .y(y0));
  su3_mult #(.DAGGER(1'b1)) dut1 (.clk, .u, .h, .y(y1));

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(negedge clk) begin
    if (uq.size() > LAT) begin
      su3_t  m;
      half_t v;
      m = uq.pop_front();
      v = hq.pop_front();
      for (int dag = 0; dag < 2; dag++) begin
        int bad = 0;
        for (int s = 0; s < 2; s++)
          for (int i = 0; i < 3; i++) begin
            rc_t e;
            cplx_t g;
            e.re = 0.0; e.im = 0.0;
            for (int j = 0; j < 3; j++)
              e = rc_add(e, rc_mul(dag ? rc_conj(rc(m[j][i])) : rc(m[i][j]), rc(v[s][j])));
            g = dag ? y1[s][i] : y0[s][i];
            if (absr(to_real(g.re) - e.re) > 1e-5) bad++;
            if (absr(to_real(g.im) - e.im) > 1e-5) bad++;
          end
        checks++;
        if (bad != 0) begin
          failures++;
          if (failures < 5) $display("su3_mult dagger=%0d: %0d components wrong", dag, bad);
        end
      end
    end
  end

  initial begin
    u = '0; h = '0;
    @(posedge clk); #1;
    for (int i = 0; i < 500; i++) begin
      spinor_t p;
      p = rand_spinor();
      u = rand_su3();
      h = {p[1], p[0]};
      uq.push_back(u);
      hq.push_back(h);
      @(posedge clk); #1;
    end
    repeat (LAT + 2) begin @(posedge clk); #1; end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
