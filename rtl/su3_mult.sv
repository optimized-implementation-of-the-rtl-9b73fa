// su3_mult: stage 3 of the stencil, colour multiplication of one hop.
//
// Multiplies both colour vectors of a projected half spinor by the 3x3
// complex link matrix u (DAGGER = 0, forward hop) or by its Hermitian
// conjugate (DAGGER = 1, backward hop; element (i,j) is conj(u[j][i]),
// which only re-routes wires and flips sign bits). Each output component
//     y[s][i] = sum_j M[i][j] * h[s][j]
// is built from 12 real products: 6 for the real part (re*re and the
// negated im*im) and 6 for the imaginary part, each set summed by a
// 3-level adder tree (6 -> 3 -> 2 -> 1, the odd term of the second level
// waits one adder latency in a register).
//
// Timing: fully pipelined, latency MUL_LAT + 3*ADD_LAT (8) cycles.
module su3_mult
  import dw_pkg::*;
#(
  parameter bit DAGGER = 1'b0
) (
  input  logic  clk,
  input  su3_t  u,
  input  half_t h,
  output half_t y
);

  for (genvar s = 0; s < 2; s++) begin : g_spin
    for (genvar i = 0; i < 3; i++) begin : g_row
      flt_t p_re [6];   // terms of the real part
      flt_t p_im [6];   // terms of the imaginary part
      for (genvar j = 0; j < 3; j++) begin : g_term
        cplx_t m;
        flt_t  rr, ii, ri, ir;
        assign m = DAGGER ? cconj(u[j][i]) : u[i][j];
        fp_mul #(.EW(FP_EW), .MW(FP_MW)) u_rr (.clk, .a(m.re), .b(h[s][j].re), .y(rr));
        fp_mul #(.EW(FP_EW), .MW(FP_MW)) u_ii (.clk, .a(m.im), .b(h[s][j].im), .y(ii));
        fp_mul #(.EW(FP_EW), .MW(FP_MW)) u_ri (.clk, .a(m.re), .b(h[s][j].im), .y(ri));
        fp_mul #(.EW(FP_EW), .MW(FP_MW)) u_ir (.clk, .a(m.im), .b(h[s][j].re), .y(ir));
        assign p_re[2*j]   = rr;
        assign p_re[2*j+1] = fneg(ii);
        assign p_im[2*j]   = ri;
        assign p_im[2*j+1] = ir;
      end
      fp_sum6 u_sre (.clk, .x(p_re), .y(y[s][i].re));
      fp_sum6 u_sim (.clk, .x(p_im), .y(y[s][i].im));
    end
  end
endmodule
