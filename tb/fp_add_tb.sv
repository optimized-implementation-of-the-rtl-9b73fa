// fp_add_tb: self-checking test of the floating-point adder.
// Random operands over a wide exponent range, near-cancelling pairs, zeros
// and infinities are fed one per cycle; every result is compared with the
// sum computed in double precision and rounded to the datapath format
// (the double sum is exact whenever the exponents differ by less than 29;
// beyond that the expected value is the larger operand). The 2-cycle
// latency is checked by matching each result to the operands applied two
// cycles earlier.
module fp_add_tb;
  import dw_pkg::*;
  import tb_fp_pkg::*;

  logic clk = 0;
  always #5 clk = ~clk;

  flt_t a, b, y;
  int checks = 0, failures = 0;

  fp_add #(.EW(FP_EW), .MW(FP_MW)) dut (.clk, .a, .b, .y);

  flt_t exp_q [$];

  function automatic flt_t ref_add(flt_t x, flt_t z);
    int ex, ez;
    ex = int'(x[FP_W-2:FP_MW]);
    ez = int'(z[FP_W-2:FP_MW]);
    if (ex == 0) return (ez == 0) ? {x[FP_W-1] & z[FP_W-1], {(FP_W-1){1'b0}}} : z;
    if (ez == 0) return x;
    if (ex - ez > 28) return x;
    if (ez - ex > 28) return z;
    return from_real(to_real(x) + to_real(z));
  endfunction

  task automatic apply(flt_t x, flt_t z, flt_t e);
    a = x; b = z;
    exp_q.push_back(e);
    @(posedge clk); #1;
  endtask

  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // checker: result of operands applied at cycle k appears after 2 edges
  int n_applied = 0;
  // at the falling edge the queue holds the operands of the last LAT+1
  // cycles; the oldest one is the result now at the output
  always @(negedge clk) begin
    if (exp_q.size() > ADD_LAT) begin
      flt_t e;
      e = exp_q.pop_front();
      checks++;
      if (y !== e) begin
        failures++;
        if (failures < 10) $display("fp_add mismatch: got %h expected %h", y, e);
      end
    end
  end

  initial begin
    flt_t x, z;
    a = '0; b = '0;
    @(posedge clk); #1;
    fork
      begin
        for (int i = 0; i < 20000; i++) begin
          case (i % 4)
            0: begin x = rand_flt(30); z = rand_flt(30); end
            1: begin x = rand_flt(3);  z = rand_flt(3);  end
            2: begin x = rand_flt(10); z = {~x[FP_W-1], x[FP_W-2:0] ^ FP_W'($urandom_range(0, 15))}; end
            default: begin x = rand_flt(2); z = fneg(x); end
          endcase
          apply(x, z, ref_add(x, z));
          n_applied++;
        end
        // specials
        apply({1'b0, {FP_EW{1'b1}}, {FP_MW{1'b0}}}, 32'h3f800000, {1'b0, {FP_EW{1'b1}}, {FP_MW{1'b0}}});
        apply({1'b0, {FP_EW{1'b1}}, {FP_MW{1'b0}}}, {1'b1, {FP_EW{1'b1}}, {FP_MW{1'b0}}},
              {1'b0, {FP_EW{1'b1}}, 1'b1, {(FP_MW-1){1'b0}}});
        apply('0, '0, '0);
        apply({1'b0, 8'd254, 23'h7fffff}, {1'b0, 8'd254, 23'h7fffff}, {1'b0, {FP_EW{1'b1}}, {FP_MW{1'b0}}});
        apply(32'h3f800000, 32'hbf800000, '0);
        n_applied += 5;
        repeat (4) begin @(posedge clk); #1; end
      end
    join
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
