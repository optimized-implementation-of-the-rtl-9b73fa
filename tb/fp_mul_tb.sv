// fp_mul_tb: self-checking test of the floating-point multiplier.
// Random operands (wide and narrow exponent ranges), zeros, overflow and
// inf*0 are applied one per cycle. The expected product is computed in
// double precision, where a single-precision product is exact, and rounded
// to the datapath format with round-to-nearest-even. Each result is matched
// with the operands applied MUL_LAT (2) cycles earlier.
module fp_mul_tb;
  import dw_pkg::*;
  import tb_fp_pkg::*;

  logic clk = 0;
  always #5 clk = ~clk;

  flt_t a, b, y;
  int checks = 0, failures = 0;
  int n_applied = 0;
  flt_t exp_q [$];

  fp_mul #(.EW(FP_EW), .MW(FP_MW)) dut (.clk, .a, .b, .y);

  localparam flt_t PINF = {1'b0, {FP_EW{1'b1}}, {FP_MW{1'b0}}};
  localparam flt_t QNAN = {1'b0, {FP_EW{1'b1}}, 1'b1, {(FP_MW-1){1'b0}}};

  task automatic apply(flt_t x, flt_t z, flt_t e);
    a = x; b = z;
    exp_q.push_back(e);
    n_applied++;
    @(posedge clk); #1;
  endtask

  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // at the falling edge the queue holds the operands of the last LAT+1
  // cycles; the oldest one is the result now at the output
  always @(negedge clk) begin
    if (exp_q.size() > MUL_LAT) begin
      flt_t e;
      e = exp_q.pop_front();
      checks++;
      if (y !== e) begin
        failures++;
        if (failures < 10) $display("fp_mul mismatch: got %h expected %h", y, e);
      end
    end
  end

  initial begin
    flt_t x, z;
    a = '0; b = '0;
    @(posedge clk); #1;
    for (int i = 0; i < 20000; i++) begin
      if (i % 2 == 0) begin x = rand_flt(40); z = rand_flt(40); end
      else            begin x = rand_flt(4);  z = rand_flt(4);  end
      apply(x, z, from_real(to_real(x) * to_real(z)));
    end
    apply('0, 32'h3f800000, '0);
    apply(32'h7f000000, 32'h7f000000, PINF);
    apply(PINF, '0, QNAN);
    apply(PINF, 32'hbf800000, fneg(PINF));
    apply(32'h3f800000, 32'h3f800000, 32'h3f800000);
    repeat (4) begin @(posedge clk); #1; end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
