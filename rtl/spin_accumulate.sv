// spin_accumulate: stage 4 of the stencil, spin reconstruction and sum.
//
// Input: the 8 colour-multiplied half spinors of one site, hop index
// d = 2*mu + b (b = 0 forward, b = 1 backward), the centre spinor psi_c and
// the hopping parameter kappa. Each half spinor is expanded back to four
// spin rows: rows 0 and 1 are the half spinor itself, and because
// (1 -+ gamma_mu) has rank two, row k = 2, 3 equals ph(k) * h[col(k)] with
// the phase and column of the gamma table (a free swap/sign flip). The 8
// full spinors are summed by a 3-level adder tree (168 additions), scaled
// by kappa (24 multiplications) and subtracted from the centre spinor
// (24 additions), 216 operations in all:
//     y = psi_c - kappa * sum_d recon(h[d])
//
// Timing: fully pipelined; psi_c and kappa are presented with h and the
// result follows 4*ADD_LAT + MUL_LAT (10) cycles later. psi_c and kappa are
// delayed internally to meet the tree output.
module spin_accumulate
  import dw_pkg::*;
(
  input  logic             clk,
  input  half_t [NHOP-1:0] h,
  input  spinor_t          psi_c,
  input  flt_t             kappa,
  output spinor_t          y
);
  localparam int unsigned TREE_LAT = 3 * ADD_LAT;

  // reconstruction: wiring only
  spinor_t full [NHOP];
  for (genvar d = 0; d < NHOP; d++) begin : g_hop
    localparam int unsigned MU  = d / 2;
    localparam bit          FWD = (d % 2) == 0;
    for (genvar c = 0; c < 3; c++) begin : g_col
      assign full[d][0][c] = h[d][0][c];
      assign full[d][1][c] = h[d][1][c];
      assign full[d][2][c] = cmul_ph(h[d][gamma_col(MU, 2)][c], proj_ph(MU, 2, FWD));
      assign full[d][3][c] = cmul_ph(h[d][gamma_col(MU, 3)][c], proj_ph(MU, 3, FWD));
    end
  end

  spinor_t psi_d;
  flt_t    kappa_d;

  delay_line #(.W(SPINOR_W), .DEPTH(TREE_LAT + MUL_LAT)) u_psi
    (.clk, .d(psi_c), .q(psi_d));
  delay_line #(.W(FP_W), .DEPTH(TREE_LAT)) u_kap
    (.clk, .d(kappa), .q(kappa_d));

  for (genvar s = 0; s < 4; s++) begin : g_spin
    for (genvar c = 0; c < 3; c++) begin : g_col
      for (genvar p = 0; p < 2; p++) begin : g_part
        flt_t l1 [4];
        flt_t l2 [2];
        flt_t tot, sc, res;
        for (genvar k = 0; k < 4; k++) begin : g_l1
          fp_add #(.EW(FP_EW), .MW(FP_MW)) u_a (.clk,
            .a(p == 0 ? full[2*k][s][c].re : full[2*k][s][c].im),
            .b(p == 0 ? full[2*k+1][s][c].re : full[2*k+1][s][c].im),
            .y(l1[k]));
        end
        for (genvar k = 0; k < 2; k++) begin : g_l2
          fp_add #(.EW(FP_EW), .MW(FP_MW)) u_a (.clk, .a(l1[2*k]), .b(l1[2*k+1]), .y(l2[k]));
        end
        fp_add #(.EW(FP_EW), .MW(FP_MW)) u_l3 (.clk, .a(l2[0]), .b(l2[1]), .y(tot));
        fp_mul #(.EW(FP_EW), .MW(FP_MW)) u_k  (.clk, .a(tot), .b(kappa_d), .y(sc));
        fp_add #(.EW(FP_EW), .MW(FP_MW)) u_s  (.clk,
          .a(p == 0 ? psi_d[s][c].re : psi_d[s][c].im), .b(fneg(sc)), .y(res));
        if (p == 0) begin : g_re
          assign y[s][c].re    = res;
        end else begin : g_im
          assign y[s][c].im    = res;
        end
      end
    end
  end
endmodule
