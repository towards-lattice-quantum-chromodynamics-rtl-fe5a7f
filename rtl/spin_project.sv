// spin_project: Stage 2 of the stencil kernel. For each of the four directions
// mu it projects the neighbour spinors onto their upper two spin components:
//   forward,  s = -1: h = upper part of (1 - gamma_mu) psi(n + mu)
//   backward, s = +1: h = upper part of (1 + gamma_mu) psi(n - mu)
// Each upper row is psi_a + s*B_mu(a)*psi_lower, where B_mu(a) is a single
// factor from {+-1, +-i} (see lqcd_pkg), so each row is one su3_vector addition
// or subtraction: 16 of them, 96 double adders working in parallel. The
// lower spin components are not formed here; they are recovered from the
// upper ones after the colour multiplication (spin_reconstruct_sum).
// Latency: LAT clocks (one adder), one new site per clock.
module spin_project
  import lqcd_pkg::*;
#(
  parameter int unsigned LAT = FP_LAT
) (
  input  logic                    clk,
  input  spinor_t      [3:0]      psi_fwd,  // psi(n + mu), mu = 0..3
  input  spinor_t      [3:0]      psi_bwd,  // psi(n - mu)
  output half_spinor_t [3:0]      h_fwd,
  output half_spinor_t [3:0]      h_bwd
);
  for (genvar mu = 0; mu < 4; mu++) begin : g_mu
    for (genvar dir = 0; dir < 2; dir++) begin : g_dir
      // dir 0: forward neighbour, projector sign s = -1; dir 1: backward, s = +1
      for (genvar a = 0; a < 2; a++) begin : g_a
        su3_vec_t x, yv, r;
        always_comb begin
          spinor_t p;
          p  = (dir == 0) ? psi_fwd[mu] : psi_bwd[mu];
          x  = p[a];
          yv = v_phase(p[2 + int'(b_col(mu, a))], ph_signed(b_ph(mu, a), dir == 0));
        end
        for (genvar c = 0; c < 3; c++) begin : g_c
          fp64_add #(.LAT(LAT)) u_re (.clk(clk), .a(x[c].re), .b(yv[c].re), .y(r[c].re));
          fp64_add #(.LAT(LAT)) u_im (.clk(clk), .a(x[c].im), .b(yv[c].im), .y(r[c].im));
        end
        if (dir == 0) begin : g_f
          assign h_fwd[mu][a] = r;
        end else begin : g_b
          assign h_bwd[mu][a] = r;
        end
      end
    end
  end
endmodule
