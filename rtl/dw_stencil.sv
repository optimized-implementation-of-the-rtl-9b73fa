// dw_stencil: the Wilson-Dirac stencil pipeline, one lattice site per cycle.
//
// Computes, for one site x,
//   out = psi(x) - kappa * sum_mu [ (1 - gamma_mu) U_mu(x)        psi(x+mu)
//                                 + (1 + gamma_mu) U_mu(x-mu)^dag psi(x-mu) ]
// in four stages, as laid out in the kernel diagram:
//   stage 1  load: the 9 spinors (centre and 8 neighbours) and the 8 links
//            are registered in one cycle
//   stage 2  8 spin projections (spin_project), 96 additions
//   stage 3  4 multiplications by U and 4 by U^dagger (su3_mult)
//   stage 4  reconstruction, 8-way sum, kappa scaling and subtraction from
//            the centre spinor (spin_accumulate), 216 operations
// The links bypass stage 2 and the centre spinor and kappa bypass stages 2
// and 3 in delay lines.
//
// Timing: initiation interval 1 (a new site may enter every cycle, there is
// no stall), latency LATENCY = 1 + S2_LAT + S3_LAT + S4_LAT cycles from
// in_valid to out_valid. The per-stage latencies default to the
// double-precision figures of the original kernel (1/14/70/57, 142 in all);
// the float arithmetic here needs only 2/8/10 cycles in stages 2/3/4, and
// each stage is padded with registers up to its stage latency so that the
// timing of the original kernel is kept. Padding is this design's choice.
//
// Interface: psi_nb[0] is the centre, psi_nb[1+d] the neighbour of hop
// d = 2*mu + b (b = 0: x+mu, b = 1: x-mu). u_fwd[mu] = U_mu(x),
// u_bwd[mu] = U_mu(x-mu) (not yet conjugated). Reset clears only the valid
// pipeline.
module dw_stencil
  import dw_pkg::*;
#(
  parameter int unsigned S2_LAT = 14,
  parameter int unsigned S3_LAT = 70,
  parameter int unsigned S4_LAT = 57
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              in_valid,
  input  spinor_t [NNB-1:0] psi_nb,
  input  links_t            u_fwd,
  input  links_t            u_bwd,
  input  flt_t              kappa,
  output logic              out_valid,
  output spinor_t           out_data
);
  localparam int unsigned S2_ARITH = ADD_LAT;
  localparam int unsigned S3_ARITH = MUL_LAT + 3 * ADD_LAT;
  localparam int unsigned S4_ARITH = MUL_LAT + 4 * ADD_LAT;
  localparam int unsigned LATENCY  = 1 + S2_LAT + S3_LAT + S4_LAT;

  if (S2_LAT < S2_ARITH || S3_LAT < S3_ARITH || S4_LAT < S4_ARITH) begin : g_bad_lat
    $error("dw_stencil: a stage latency is shorter than its arithmetic");
  end

  // ------------------------------------------------------------- stage 1
  spinor_t [NNB-1:0] psi1;
  links_t            uf1, ub1;
  flt_t              kap1;

  always_ff @(posedge clk) begin
    psi1 <= psi_nb;
    uf1  <= u_fwd;
    ub1  <= u_bwd;
    kap1 <= kappa;
  end

  // valid pipeline, the only state with a reset
  logic [LATENCY-1:0] vpipe;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) vpipe <= '0;
    else        vpipe <= {vpipe[LATENCY-2:0], in_valid};
  end
  assign out_valid = vpipe[LATENCY-1];

  // ------------------------------------------------------------- stage 2
  half_t [NHOP-1:0] h2a, h2;
  for (genvar d = 0; d < NHOP; d++) begin : g_proj
    spin_project #(.MU(d / 2), .FWD((d % 2) == 0)) u_proj
      (.clk, .psi(psi1[1+d]), .h(h2a[d]));
  end
  delay_line #(.W($bits(h2)), .DEPTH(S2_LAT - S2_ARITH)) u_pad2 (.clk, .d(h2a), .q(h2));

  // links skip stage 2
  links_t uf3, ub3;
  delay_line #(.W(LINKS_W), .DEPTH(S2_LAT)) u_uf (.clk, .d(uf1), .q(uf3));
  delay_line #(.W(LINKS_W), .DEPTH(S2_LAT)) u_ub (.clk, .d(ub1), .q(ub3));

  // ------------------------------------------------------------- stage 3
  half_t [NHOP-1:0] h3a, h3;
  for (genvar d = 0; d < NHOP; d++) begin : g_mult
    if ((d % 2) == 0) begin : g_fwd
      su3_mult #(.DAGGER(1'b0)) u_mult (.clk, .u(uf3[d/2]), .h(h2[d]), .y(h3a[d]));
    end else begin : g_bwd
      su3_mult #(.DAGGER(1'b1)) u_mult (.clk, .u(ub3[d/2]), .h(h2[d]), .y(h3a[d]));
    end
  end
  delay_line #(.W($bits(h3)), .DEPTH(S3_LAT - S3_ARITH)) u_pad3 (.clk, .d(h3a), .q(h3));

  // centre spinor and kappa skip stages 2 and 3
  spinor_t psi4;
  flt_t    kap4;
  delay_line #(.W(SPINOR_W), .DEPTH(S2_LAT + S3_LAT)) u_psic (.clk, .d(psi1[0]), .q(psi4));
  delay_line #(.W(FP_W),     .DEPTH(S2_LAT + S3_LAT)) u_kap  (.clk, .d(kap1),    .q(kap4));

  // ------------------------------------------------------------- stage 4
  spinor_t y4;
  spin_accumulate u_acc (.clk, .h(h3), .psi_c(psi4), .kappa(kap4), .y(y4));
  delay_line #(.W(SPINOR_W), .DEPTH(S4_LAT - S4_ARITH)) u_pad4 (.clk, .d(y4), .q(out_data));

endmodule
