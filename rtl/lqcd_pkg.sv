// lqcd_pkg: shared types and constants of the Wilson-Dirac stencil accelerator.
//
// All arithmetic is IEEE-754 double precision; a double travels as its 64-bit
// pattern (f64_t). The lattice field types mirror the C++ abstract types of the
// host code: a complex number (real, imaginary), an su3_vector of 3 complex
// colour components, an su3_matrix of 9 complex entries stored row-major
// (entry (r,c) at index 3*r+c) and an su3_spinor of 4 su3_vectors (spin index).
// Multiplications by 0, +-1 and +-i never need a floating-point unit: they are
// sign flips and real/imaginary swaps done in wiring, provided here as functions.
//
// The Dirac matrices follow the chiral convention listed with the design
// (gamma_0 .. gamma_3, gamma_5 = diag(1,1,-1,-1)). Each gamma_mu has the block
// form [[0,B],[C,0]], so the projector (1 + s*gamma_mu), s = +-1, maps a spinor
// to upper half h = psi_up + s*B*psi_lo and lower half s*C*h. Every row of B and
// C holds exactly one non-zero entry from {+1,-1,+i,-i}; the tables below give
// its column and phase. Direction mu = 0,1,2,3 is taken as x,y,z,t.
package lqcd_pkg;

  typedef logic [63:0] f64_t;

  typedef struct packed {
    f64_t re;
    f64_t im;
  } cplx_t;

  typedef cplx_t    [2:0] su3_vec_t;     // colour index 0..2
  typedef cplx_t    [8:0] su3_mat_t;     // (row,col) at 3*row+col
  typedef su3_vec_t [3:0] spinor_t;      // spin index 0..3
  typedef su3_vec_t [1:0] half_spinor_t; // upper two spin components

  // Latency of one double-precision addition or multiplication.
  localparam int unsigned FP_LAT = 14;

  // Phase factors that cost no arithmetic.
  typedef enum logic [1:0] {PH_P1, PH_M1, PH_PI, PH_MI} phase_e;


  function automatic f64_t f_neg(f64_t a);
    return {~a[63], a[62:0]};
  endfunction

  function automatic cplx_t c_neg(cplx_t a);
    cplx_t r;
    r.re = f_neg(a.re);
    r.im = f_neg(a.im);
    return r;
  endfunction

  function automatic cplx_t c_conj(cplx_t a);
    cplx_t r;
    r.re = a.re;
    r.im = f_neg(a.im);
    return r;
  endfunction

  // Multiply a complex number by one of +1, -1, +i, -i.
  function automatic cplx_t c_phase(cplx_t a, phase_e p);
    cplx_t r;
    unique case (p)
      PH_P1: r = a;
      PH_M1: r = c_neg(a);
      PH_PI: begin r.re = f_neg(a.im); r.im = a.re;        end
      default: begin r.re = a.im;      r.im = f_neg(a.re); end
    endcase
    return r;
  endfunction

  function automatic su3_vec_t v_phase(su3_vec_t a, phase_e p);
    su3_vec_t r;
    for (int c = 0; c < 3; c++) r[c] = c_phase(a[c], p);
    return r;
  endfunction

  // Phase multiplied by the projector sign s (s_neg = 1 means s = -1).
  function automatic phase_e ph_signed(phase_e p, logic s_neg);
    if (!s_neg) return p;
    unique case (p)
      PH_P1: return PH_M1;
      PH_M1: return PH_P1;
      PH_PI: return PH_MI;
      default: return PH_PI;
    endcase
  endfunction

  // gamma_5 = diag(1,1,-1,-1): negate the lower spin components.
  function automatic spinor_t gamma5(spinor_t a);
    spinor_t r;
    r[0] = a[0];
    r[1] = a[1];
    r[2] = v_phase(a[2], PH_M1);
    r[3] = v_phase(a[3], PH_M1);
    return r;
  endfunction

  // Row a (0,1) of B for direction mu: column (0 -> psi_2, 1 -> psi_3), phase.
  function automatic logic b_col(int mu, int a);
    unique case (mu)
      0: return (a == 0) ? 1'b1 : 1'b0;   // gamma_0: row0 i*psi3, row1 i*psi2
      1: return (a == 0) ? 1'b1 : 1'b0;   // gamma_1: row0 -psi3,  row1 +psi2
      2: return (a == 0) ? 1'b0 : 1'b1;   // gamma_2: row0 i*psi2, row1 -i*psi3
      default: return (a == 0) ? 1'b0 : 1'b1; // gamma_3: row0 psi2, row1 psi3
    endcase
  endfunction

  function automatic phase_e b_ph(int mu, int a);
    unique case (mu)
      0: return PH_PI;
      1: return (a == 0) ? PH_M1 : PH_P1;
      2: return (a == 0) ? PH_PI : PH_MI;
      default: return PH_P1;
    endcase
  endfunction

  // Row b (0 -> spin 2, 1 -> spin 3) of C for direction mu: column of h, phase.
  function automatic logic c_col(int mu, int b);
    unique case (mu)
      0: return (b == 0) ? 1'b1 : 1'b0;   // gamma_0: row2 -i*psi1, row3 -i*psi0
      1: return (b == 0) ? 1'b1 : 1'b0;   // gamma_1: row2 +psi1,   row3 -psi0
      2: return (b == 0) ? 1'b0 : 1'b1;   // gamma_2: row2 -i*psi0, row3 +i*psi1
      default: return (b == 0) ? 1'b0 : 1'b1; // gamma_3: row2 psi0, row3 psi1
    endcase
  endfunction

  function automatic phase_e c_ph(int mu, int b);
    unique case (mu)
      0: return PH_MI;
      1: return (b == 0) ? PH_P1 : PH_M1;
      2: return (b == 0) ? PH_MI : PH_PI;
      default: return PH_P1;
    endcase
  endfunction

endpackage
