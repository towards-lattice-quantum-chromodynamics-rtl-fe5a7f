// lqcd_ref_pkg: reference model used by the testbenches. It evaluates the
// Wilson-Dirac stencil with the simulator's double-precision reals, directly
// from the textbook formula with full 4x4 Dirac matrices (no half-spinor
// trick, no projection tables), so that it shares no structure with the RTL:
//   out(n) = psi(n) + kappa * sum_mu [ U_mu(n) (1 - gamma_mu) psi(n+mu)
//                                    + U_mu(n-mu)^dagger (1 + gamma_mu) psi(n-mu) ]
// It also converts between the RTL bit-level types and reals and draws random
// fields.
package lqcd_ref_pkg;
  import lqcd_pkg::*;

  typedef struct {
    real re;
    real im;
  } rc_t;

  typedef rc_t rspin_t [4][3];
  typedef rc_t rmat_t  [3][3];

  function automatic rc_t rc(real re, real im);
    rc_t r;
    r.re = re;
    r.im = im;
    return r;
  endfunction

  function automatic rc_t radd(rc_t a, rc_t b);
    return rc(a.re + b.re, a.im + b.im);
  endfunction

  function automatic rc_t rmul(rc_t a, rc_t b);
    return rc(a.re * b.re - a.im * b.im, a.re * b.im + a.im * b.re);
  endfunction

  function automatic rc_t rconj(rc_t a);
    return rc(a.re, -a.im);
  endfunction

  // Dirac matrices, chiral representation as listed with the design.
  function automatic rc_t gam(int mu, int r, int c);
    rc_t z;
    z = rc(0.0, 0.0);
    case (mu)
      0: begin
        if (r == 0 && c == 3) z = rc(0, 1);
        if (r == 1 && c == 2) z = rc(0, 1);
        if (r == 2 && c == 1) z = rc(0, -1);
        if (r == 3 && c == 0) z = rc(0, -1);
      end
      1: begin
        if (r == 0 && c == 3) z = rc(-1, 0);
        if (r == 1 && c == 2) z = rc(1, 0);
        if (r == 2 && c == 1) z = rc(1, 0);
        if (r == 3 && c == 0) z = rc(-1, 0);
      end
      2: begin
        if (r == 0 && c == 2) z = rc(0, 1);
        if (r == 1 && c == 3) z = rc(0, -1);
        if (r == 2 && c == 0) z = rc(0, -1);
        if (r == 3 && c == 1) z = rc(0, 1);
      end
      default: begin
        if (r == 0 && c == 2) z = rc(1, 0);
        if (r == 1 && c == 3) z = rc(1, 0);
        if (r == 2 && c == 0) z = rc(1, 0);
        if (r == 3 && c == 1) z = rc(1, 0);
      end
    endcase
    return z;
  endfunction

  function automatic real rnd_real();
    return (real'($urandom_range(2000000, 0)) - 1000000.0) / 1000000.0;
  endfunction

  function automatic cplx_t rnd_cplx();
    cplx_t c;
    c.re = $realtobits(rnd_real());
    c.im = $realtobits(rnd_real());
    return c;
  endfunction

  function automatic spinor_t rnd_spinor();
    spinor_t s;
    for (int a = 0; a < 4; a++)
      for (int c = 0; c < 3; c++) s[a][c] = rnd_cplx();
    return s;
  endfunction

  function automatic su3_mat_t rnd_mat();
    su3_mat_t m;
    for (int i = 0; i < 9; i++) m[i] = rnd_cplx();
    return m;
  endfunction

  function automatic rc_t to_rc(cplx_t c);
    return rc($bitstoreal(c.re), $bitstoreal(c.im));
  endfunction

  task automatic to_rspin(input spinor_t s, output rspin_t r);
    for (int a = 0; a < 4; a++)
      for (int c = 0; c < 3; c++) r[a][c] = to_rc(s[a][c]);
  endtask

  task automatic to_rmat(input su3_mat_t m, output rmat_t r);
    for (int i = 0; i < 3; i++)
      for (int j = 0; j < 3; j++) r[i][j] = to_rc(m[3 * i + j]);
  endtask

  // acc += f * M (1 + sgn*gamma_mu) psi, with M = U or U^dagger
  task automatic add_hop(inout rspin_t acc, input rmat_t u, input bit dag,
                         input int mu, input real sgn, input rspin_t psi, input real f);
    rspin_t w;
    for (int a = 0; a < 4; a++)
      for (int c = 0; c < 3; c++) begin
        w[a][c] = psi[a][c];
        for (int b = 0; b < 4; b++) begin
          rc_t g;
          g = gam(mu, a, b);
          g = rc(sgn * g.re, sgn * g.im);
          w[a][c] = radd(w[a][c], rmul(g, psi[b][c]));
        end
      end
    for (int a = 0; a < 4; a++)
      for (int r = 0; r < 3; r++) begin
        rc_t s;
        s = rc(0, 0);
        for (int k = 0; k < 3; k++)
          s = radd(s, rmul(dag ? rconj(u[k][r]) : u[r][k], w[a][k]));
        acc[a][r] = radd(acc[a][r], rc(f * s.re, f * s.im));
      end
  endtask

  function automatic spinor_t g5(spinor_t s);
    spinor_t r;
    r = s;
    for (int a = 2; a < 4; a++)
      for (int c = 0; c < 3; c++) begin
        r[a][c].re[63] = ~s[a][c].re[63];
        r[a][c].im[63] = ~s[a][c].im[63];
      end
    return r;
  endfunction

  // Full stencil for one site.
  task automatic ref_stencil(input spinor_t pc, input spinor_t pf[4], input spinor_t pb[4],
                             input su3_mat_t uf[4], input su3_mat_t ub[4], input real kappa,
                             input bit dagger, output rspin_t out);
    rspin_t acc, t;
    rmat_t  m;
    to_rspin(dagger ? g5(pc) : pc, acc);
    for (int mu = 0; mu < 4; mu++) begin
      to_rmat(uf[mu], m);
      to_rspin(dagger ? g5(pf[mu]) : pf[mu], t);
      add_hop(acc, m, 1'b0, mu, -1.0, t, kappa);
      to_rmat(ub[mu], m);
      to_rspin(dagger ? g5(pb[mu]) : pb[mu], t);
      add_hop(acc, m, 1'b1, mu, 1.0, t, kappa);
    end
    if (dagger)
      for (int a = 2; a < 4; a++)
        for (int c = 0; c < 3; c++) acc[a][c] = rc(-acc[a][c].re, -acc[a][c].im);
    out = acc;
  endtask

  function automatic bit close(real got, real exp_v);
    real d, m;
    d = got - exp_v;
    if (d < 0) d = -d;
    m = (exp_v < 0) ? -exp_v : exp_v;
    return d <= 1.0e-12 * (m + 1.0);
  endfunction

  // number of the 24 real components of s that differ from r
  function automatic int spin_mismatches(spinor_t s, rspin_t r);
    int n;
    n = 0;
    for (int a = 0; a < 4; a++)
      for (int c = 0; c < 3; c++) begin
        if (!close($bitstoreal(s[a][c].re), r[a][c].re)) n++;
        if (!close($bitstoreal(s[a][c].im), r[a][c].im)) n++;
      end
    return n;
  endfunction
endpackage
