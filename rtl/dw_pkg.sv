// dw_pkg: shared types, constants and helper functions of the Wilson-Dirac
// stencil datapath.
//
// The datapath works on IEEE-754 binary floating point numbers. The default
// format is single precision (float), the type of the benchmarked
// configuration; setting FP_EW=11 and FP_MW=52 gives double precision.
// A complex number is a packed {re, im} pair, a colour vector holds 3 complex
// numbers, an SU(3) link holds 3 rows of colour vectors, a Dirac spinor holds
// 4 spin components of colour vectors (12 complex numbers) and a half spinor
// holds 2.
//
// Spin structure: the Euclidean gamma matrices are written in the
// DeGrand-Rossi (chiral) basis. Each row of each gamma matrix has exactly
// one non-zero entry, a phase in {1, i, -1, -i}; GAMMA_COL/GAMMA_PH tabulate
// its column and phase. The basis is this design's choice.
package dw_pkg;

  // ---------------------------------------------------------------- format
  localparam int unsigned FP_EW = 8;            // exponent bits
  localparam int unsigned FP_MW = 23;           // fraction bits
  localparam int unsigned FP_W  = 1 + FP_EW + FP_MW;

  // latency of the arithmetic units, in clock cycles
  localparam int unsigned ADD_LAT = 2;
  localparam int unsigned MUL_LAT = 2;

  // lattice geometry: number of directions and of hops per site
  localparam int unsigned NDIM  = 4;
  localparam int unsigned NHOP  = 2 * NDIM;     // 8: +x,-x,+y,-y,+z,-z,+t,-t
  localparam int unsigned NNB   = NHOP + 1;     // centre plus 8 neighbours

  typedef logic [FP_W-1:0] flt_t;

  typedef struct packed {
    flt_t re;
    flt_t im;
  } cplx_t;

  typedef cplx_t [2:0]  cvec_t;    // colour vector, index = colour
  typedef cvec_t [2:0]  su3_t;     // link matrix, index = row
  typedef cvec_t [3:0]  spinor_t;  // index = spin
  typedef cvec_t [1:0]  half_t;    // upper two spin rows after projection
  typedef su3_t  [3:0]  links_t;   // four links of one site, index = mu

  localparam int unsigned SPINOR_W = $bits(spinor_t);
  localparam int unsigned LINKS_W  = $bits(links_t);

  // phase codes: multiplication by i^code
  typedef enum logic [1:0] {PH_P1 = 2'd0, PH_PI = 2'd1, PH_M1 = 2'd2, PH_MI = 2'd3} phase_e;

  // column and phase of the non-zero entry of row r of gamma_mu,
  // DeGrand-Rossi basis; mu = 0..3 is x, y, z, t
  function automatic int unsigned gamma_col(int unsigned mu, int unsigned r);
    case (mu)
      0, 1:    return 3 - r;                       // anti-diagonal
      default: return (r < 2) ? r + 2 : r - 2;     // block off-diagonal
    endcase
  endfunction

  function automatic phase_e gamma_ph(int unsigned mu, int unsigned r);
    case (mu)
      0: return (r < 2) ? PH_PI : PH_MI;
      1: return (r == 0 || r == 3) ? PH_M1 : PH_P1;
      2: return (r == 0 || r == 3) ? PH_PI : PH_MI;
      default: return PH_P1;
    endcase
  endfunction

  // phase of s*gamma_mu[r][col], s = -1 for a forward hop (1 - gamma)
  // and s = +1 for a backward hop (1 + gamma)
  function automatic phase_e proj_ph(int unsigned mu, int unsigned r, bit fwd);
    return phase_e'(gamma_ph(mu, r) + (fwd ? 2'd2 : 2'd0));
  endfunction

  function automatic flt_t fneg(flt_t a);
    return {~a[FP_W-1], a[FP_W-2:0]};
  endfunction

  // exact multiplication by a phase: swaps and sign flips only
  function automatic cplx_t cmul_ph(cplx_t z, phase_e p);
    cplx_t r;
    case (p)
      PH_P1: r = z;
      PH_PI: begin r.re = fneg(z.im); r.im = z.re;       end
      PH_M1: begin r.re = fneg(z.re); r.im = fneg(z.im); end
      default: begin r.re = z.im;     r.im = fneg(z.re); end
    endcase
    return r;
  endfunction

  function automatic cplx_t cconj(cplx_t z);
    cplx_t r;
    r.re = z.re;
    r.im = fneg(z.im);
    return r;
  endfunction

endpackage
