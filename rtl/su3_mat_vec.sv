// su3_mat_vec: Stage 3 unit of the stencil kernel. Multiplies one SU(3) link
// matrix U (or its hermitian conjugate when DAGGER = 1) by the two su3_vectors
// of a half spinor and scales the result by kappa:
//   chi_v = kappa * M * h_v,  M = U or U^dagger,  v = 0,1.
// The matrix is applied to both vectors at once, so one link read serves a
// whole half spinor. The computation is a 5-layer cascade of double units:
//   layer 1 (mul)  all 4 real products of the 9 complex products per vector
//   layer 2 (add)  re = ar*br - ai*bi, im = ar*bi + ai*br       (28 clocks)
//   layers 3,4     sum of the three complex terms of each row  (28 clocks)
//   layer 5 (mul)  rescaling by kappa                           (14 clocks)
// giving 5*LAT = 70 clocks of latency at one half spinor per clock, with
// 144 double operations (84 multipliers, 60 adders). U^dagger costs nothing
// extra: it is an index transpose and an imaginary-part sign flip.
// kappa is carried along the pipeline with the data.
module su3_mat_vec
  import lqcd_pkg::*;
#(
  parameter bit          DAGGER = 1'b0,
  parameter int unsigned LAT    = FP_LAT
) (
  input  logic         clk,
  input  su3_mat_t     u,
  input  half_spinor_t h,
  input  f64_t         kappa,
  output half_spinor_t chi
);
  f64_t kappa_d;
  pipe_delay #(.WIDTH(64), .DEPTH(4 * LAT)) u_kd (.clk(clk), .d(kappa), .q(kappa_d));

  for (genvar v = 0; v < 2; v++) begin : g_v
    for (genvar r = 0; r < 3; r++) begin : g_r
      cplx_t prod [3];
      for (genvar k = 0; k < 3; k++) begin : g_k
        cplx_t m;
        f64_t  p_rr, p_ii, p_ri, p_ir;
        assign m = DAGGER ? c_conj(u[3 * k + r]) : u[3 * r + k];
        fp64_mul #(.LAT(LAT)) u_rr (.clk(clk), .a(m.re), .b(h[v][k].re), .y(p_rr));
        fp64_mul #(.LAT(LAT)) u_ii (.clk(clk), .a(m.im), .b(h[v][k].im), .y(p_ii));
        fp64_mul #(.LAT(LAT)) u_ri (.clk(clk), .a(m.re), .b(h[v][k].im), .y(p_ri));
        fp64_mul #(.LAT(LAT)) u_ir (.clk(clk), .a(m.im), .b(h[v][k].re), .y(p_ir));
        fp64_add #(.LAT(LAT)) u_re (.clk(clk), .a(p_rr), .b(f_neg(p_ii)), .y(prod[k].re));
        fp64_add #(.LAT(LAT)) u_im (.clk(clk), .a(p_ri), .b(p_ir), .y(prod[k].im));
      end
      cplx_t s01, p2_d, s012;
      fp64_add #(.LAT(LAT)) u_s01r (.clk(clk), .a(prod[0].re), .b(prod[1].re), .y(s01.re));
      fp64_add #(.LAT(LAT)) u_s01i (.clk(clk), .a(prod[0].im), .b(prod[1].im), .y(s01.im));
      pipe_delay #(.WIDTH(128), .DEPTH(LAT)) u_p2d (.clk(clk), .d(prod[2]), .q(p2_d));
      fp64_add #(.LAT(LAT)) u_s2r (.clk(clk), .a(s01.re), .b(p2_d.re), .y(s012.re));
      fp64_add #(.LAT(LAT)) u_s2i (.clk(clk), .a(s01.im), .b(p2_d.im), .y(s012.im));
      fp64_mul #(.LAT(LAT)) u_kr (.clk(clk), .a(s012.re), .b(kappa_d), .y(chi[v][r].re));
      fp64_mul #(.LAT(LAT)) u_ki (.clk(clk), .a(s012.im), .b(kappa_d), .y(chi[v][r].im));
    end
  end
endmodule
