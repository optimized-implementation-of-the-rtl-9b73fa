// tb_fp_pkg: reference conversions between `real` and the datapath's
// floating-point format, used by the testbenches to compute expected values
// independently of the RTL arithmetic units.
//
// to_real() expands a packed float into a real; from_real() rounds a real to
// the packed format with round-to-nearest-even and the same flush-to-zero
// rule as the RTL (results below the smallest normal become signed zero).
// Also: complex/spinor helpers in plain reals and a tolerance compare.
package tb_fp_pkg;
  import dw_pkg::*;

  localparam int BIAS = (1 << (FP_EW - 1)) - 1;

  function automatic real to_real(flt_t f);
    logic [63:0] d;
    int e;
    e = int'(f[FP_W-2:FP_MW]);
    if (e == 0) return 0.0;
    d = {f[FP_W-1], 11'(e - BIAS + 1023), f[FP_MW-1:0], {(52-FP_MW){1'b0}}};
    return $bitstoreal(d);
  endfunction

  function automatic flt_t from_real(real r);
    logic [63:0] d;
    int e;
    logic [FP_MW:0] keep;
    logic g, s;
    d = $realtobits(r);
    if (d[62:52] == 0) return {d[63], {(FP_W-1){1'b0}}};
    e    = int'(d[62:52]) - 1023 + BIAS;
    keep = {1'b0, d[51 -: FP_MW]};
    g    = d[51-FP_MW];
    s    = |(d[50-FP_MW:0]);
    if (g && (s || keep[0])) keep = keep + 1;
    if (keep[FP_MW]) e = e + 1;
    if (e <= 0) return {d[63], {(FP_W-1){1'b0}}};
    if (e >= (1 << FP_EW) - 1) return {d[63], {FP_EW{1'b1}}, {FP_MW{1'b0}}};
    return {d[63], FP_EW'(e), keep[FP_MW-1:0]};
  endfunction

  // random float in +-[2^-range, 2^range) with a uniform fraction
  function automatic flt_t rand_flt(int range);
    int e;
    e = BIAS - range + int'($urandom_range(0, 2 * range - 1));
    return {1'($urandom), FP_EW'(e), FP_MW'($urandom)};
  endfunction

  // random float of magnitude below 1, rounded from a uniform real
  function automatic flt_t rand_unit();
    real r;
    r = (real'($urandom_range(0, 2000000)) - 1000000.0) / 1000000.0;
    return from_real(r);
  endfunction

  function automatic real absr(real r);
    return (r < 0.0) ? -r : r;
  endfunction

  // complex numbers as two reals
  typedef struct { real re; real im; } rc_t;

  function automatic rc_t rc(cplx_t z);
    rc_t r;
    r.re = to_real(z.re);
    r.im = to_real(z.im);
    return r;
  endfunction

  function automatic rc_t rc_add(rc_t a, rc_t b);
    rc_t r; r.re = a.re + b.re; r.im = a.im + b.im; return r;
  endfunction

  function automatic rc_t rc_mul(rc_t a, rc_t b);
    rc_t r;
    r.re = a.re * b.re - a.im * b.im;
    r.im = a.re * b.im + a.im * b.re;
    return r;
  endfunction

  function automatic rc_t rc_scale(rc_t a, real s);
    rc_t r; r.re = a.re * s; r.im = a.im * s; return r;
  endfunction

  function automatic rc_t rc_conj(rc_t a);
    rc_t r; r.re = a.re; r.im = -a.im; return r;
  endfunction

  // full 4x4 gamma matrix element (DeGrand-Rossi basis), written out
  // explicitly rather than taken from the RTL tables
  function automatic rc_t gamma_el(int mu, int r, int c);
    rc_t z; z.re = 0.0; z.im = 0.0;
    case (mu)
      0: begin // gamma_x
        if (r == 0 && c == 3) z.im =  1.0;
        if (r == 1 && c == 2) z.im =  1.0;
        if (r == 2 && c == 1) z.im = -1.0;
        if (r == 3 && c == 0) z.im = -1.0;
      end
      1: begin // gamma_y
        if (r == 0 && c == 3) z.re = -1.0;
        if (r == 1 && c == 2) z.re =  1.0;
        if (r == 2 && c == 1) z.re =  1.0;
        if (r == 3 && c == 0) z.re = -1.0;
      end
      2: begin // gamma_z
        if (r == 0 && c == 2) z.im =  1.0;
        if (r == 1 && c == 3) z.im = -1.0;
        if (r == 2 && c == 0) z.im = -1.0;
        if (r == 3 && c == 1) z.im =  1.0;
      end
      default: begin // gamma_t
        if (r == 0 && c == 2) z.re = 1.0;
        if (r == 1 && c == 3) z.re = 1.0;
        if (r == 2 && c == 0) z.re = 1.0;
        if (r == 3 && c == 1) z.re = 1.0;
      end
    endcase
    return z;
  endfunction

  // random spinor / link with entries of magnitude below 1
  function automatic spinor_t rand_spinor();
    spinor_t p;
    for (int s = 0; s < 4; s++)
      for (int c = 0; c < 3; c++) begin
        p[s][c].re = rand_unit();
        p[s][c].im = rand_unit();
      end
    return p;
  endfunction

  function automatic su3_t rand_su3();
    su3_t u;
    for (int i = 0; i < 3; i++)
      for (int j = 0; j < 3; j++) begin
        u[i][j].re = rand_unit();
        u[i][j].im = rand_unit();
      end
    return u;
  endfunction

  // reference hop term: s*... applied as (1 + sg*gamma_mu) M psi where M is
  // u or u^dagger; returns a full spinor in reals
  typedef rc_t rspinor_t [4][3];

  function automatic void hop_ref(ref rspinor_t acc, input int mu, input real sg,
                                  input su3_t u, input bit dag, input spinor_t psi);
    rc_t up [4][3];
    rc_t t;
    // colour multiplication first
    for (int s = 0; s < 4; s++)
      for (int i = 0; i < 3; i++) begin
        up[s][i].re = 0.0; up[s][i].im = 0.0;
        for (int j = 0; j < 3; j++) begin
          t = dag ? rc_conj(rc(u[j][i])) : rc(u[i][j]);
          up[s][i] = rc_add(up[s][i], rc_mul(t, rc(psi[s][j])));
        end
      end
    // then spin matrix (1 + sg*gamma)
    for (int r = 0; r < 4; r++)
      for (int i = 0; i < 3; i++) begin
        acc[r][i] = rc_add(acc[r][i], up[r][i]);
        for (int c = 0; c < 4; c++)
          acc[r][i] = rc_add(acc[r][i], rc_scale(rc_mul(gamma_el(mu, r, c), up[c][i]), sg));
      end
  endfunction

  // reference stencil of one site: nb[0] centre, nb[1+2mu] = psi(x+mu),
  // nb[2+2mu] = psi(x-mu); uf[mu] = U_mu(x), ub[mu] = U_mu(x-mu)
  function automatic void dslash_ref(ref rspinor_t res, input spinor_t [NNB-1:0] nb,
                                     input links_t uf, input links_t ub, input flt_t kappa);
    rspinor_t acc;
    for (int s = 0; s < 4; s++)
      for (int c = 0; c < 3; c++) begin acc[s][c].re = 0.0; acc[s][c].im = 0.0; end
    for (int mu = 0; mu < 4; mu++) begin
      hop_ref(acc, mu, -1.0, uf[mu], 1'b0, nb[1+2*mu]);
      hop_ref(acc, mu,  1.0, ub[mu], 1'b1, nb[2+2*mu]);
    end
    for (int s = 0; s < 4; s++)
      for (int c = 0; c < 3; c++)
        res[s][c] = rc_add(rc(nb[0][s][c]), rc_scale(acc[s][c], -to_real(kappa)));
  endfunction

  // number of the 24 real components of got that differ from want by more
  // than tol
  function automatic int spinor_diff(spinor_t got, const ref rspinor_t want, input real tol);
    int n = 0;
    for (int s = 0; s < 4; s++)
      for (int c = 0; c < 3; c++) begin
        if (absr(to_real(got[s][c].re) - want[s][c].re) > tol) n++;
        if (absr(to_real(got[s][c].im) - want[s][c].im) > tol) n++;
      end
    return n;
  endfunction

  // a reference spinor packed as 24 IEEE doubles, for queues
  typedef logic [3:0][2:0][1:0][63:0] rbits_t;

  function automatic rbits_t pack_r(const ref rspinor_t r);
    rbits_t b;
    for (int s = 0; s < 4; s++)
      for (int c = 0; c < 3; c++) begin
        b[s][c][0] = $realtobits(r[s][c].re);
        b[s][c][1] = $realtobits(r[s][c].im);
      end
    return b;
  endfunction

  function automatic void unpack_r(ref rspinor_t r, input rbits_t b);
    for (int s = 0; s < 4; s++)
      for (int c = 0; c < 3; c++) begin
        r[s][c].re = $bitstoreal(b[s][c][0]);
        r[s][c].im = $bitstoreal(b[s][c][1]);
      end
  endfunction

endpackage
