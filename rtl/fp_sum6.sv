// fp_sum6: pipelined sum of six floating-point numbers with a 3-level
// adder tree ((x0+x1) + (x2+x3)) + (x4+x5). The third partial sum waits one
// adder latency in a register while the first two are added.
// Latency 3*ADD_LAT cycles, one set of operands per cycle.
module fp_sum6
  import dw_pkg::*;
(
  input  logic clk,
  input  flt_t x [6],
  output flt_t y
);
  flt_t l1 [3];
  flt_t l2, l1_2d;
  for (genvar k = 0; k < 3; k++) begin : g_l1
    fp_add #(.EW(FP_EW), .MW(FP_MW)) u_a (.clk, .a(x[2*k]), .b(x[2*k+1]), .y(l1[k]));
  end
  fp_add #(.EW(FP_EW), .MW(FP_MW)) u_l2 (.clk, .a(l1[0]), .b(l1[1]), .y(l2));
  delay_line #(.W(FP_W), .DEPTH(ADD_LAT)) u_dly (.clk, .d(l1[2]), .q(l1_2d));
  fp_add #(.EW(FP_EW), .MW(FP_MW)) u_l3 (.clk, .a(l2), .b(l1_2d), .y(y));
endmodule
