// spin_project: stage 2 of the stencil, the spin projection of one hop.
//
// For a hop in direction MU the Wilson operator applies (1 - gamma_MU) to
// the forward neighbour (FWD = 1) and (1 + gamma_MU) to the backward
// neighbour (FWD = 0). Since (1 +- gamma) has rank two, only the upper two
// spin rows need to be computed:
//     h[r] = psi[r] + ph(r) * psi[col(r)],   r = 0, 1
// where col(r) and the phase ph(r) in {+-1, +-i} come from the gamma table
// of dw_pkg (DeGrand-Rossi basis). Multiplying by a phase is a swap of
// real and imaginary parts plus sign flips, so each projection costs
// 12 real additions; the 8 instances of the stencil give the 96 operations
// of stage 2. The lower rows are rebuilt for free in stage 4.
//
// Timing: fully pipelined, result ADD_LAT (2) cycles after psi, one spinor
// per cycle.
module spin_project
  import dw_pkg::*;
#(
  parameter int unsigned MU  = 0,
  parameter bit          FWD = 1'b1
) (
  input  logic    clk,
  input  spinor_t psi,
  output half_t   h
);
  for (genvar r = 0; r < 2; r++) begin : g_row
    for (genvar c = 0; c < 3; c++) begin : g_col
      cplx_t t;
      assign t = cmul_ph(psi[gamma_col(MU, r)][c], proj_ph(MU, r, FWD));
      fp_add #(.EW(FP_EW), .MW(FP_MW)) u_re (.clk, .a(psi[r][c].re), .b(t.re), .y(h[r][c].re));
      fp_add #(.EW(FP_EW), .MW(FP_MW)) u_im (.clk, .a(psi[r][c].im), .b(t.im), .y(h[r][c].im));
    end
  end
endmodule
