// spin_reconstruct_sum: Stage 4 of the stencil kernel. Rebuilds the eight
// hopping terms as full spinors and adds them to the site's own spinor:
//   out = psi(n) + sum_mu [ (1 - gamma_mu) term_fwd_mu + (1 + gamma_mu) term_bwd_mu ]
// where each term arrives as its upper half chi (already multiplied by the
// link and kappa). The lower half of a projected spinor is s*C_mu*chi, a
// sign flip and real/imaginary swap per row (see lqcd_pkg), so the
// reconstruction is free. The nine spinors are reduced by a 4-layer adder
// cascade (9 -> 5 -> 3 -> 2 -> 1, the odd spinor delayed alongside), 8 spinor
// additions = 192 double adders, followed by one output register:
// latency 4*LAT + 1 = 57 clocks, one site per clock.
module spin_reconstruct_sum
  import lqcd_pkg::*;
#(
  parameter int unsigned LAT = FP_LAT
) (
  input  logic               clk,
  input  spinor_t            psi_c,    // psi(n), aligned with chi
  input  half_spinor_t [3:0] chi_fwd,  // kappa * U_mu(n) * h_fwd
  input  half_spinor_t [3:0] chi_bwd,  // kappa * U_mu(n-mu)^dagger * h_bwd
  output spinor_t            out
);
  spinor_t term [9];

  assign term[0] = psi_c;
  for (genvar i = 0; i < 8; i++) begin : g_term
    localparam int MU  = i % 4;
    localparam bit FWD = (i < 4);
    always_comb begin
      half_spinor_t ch;
      ch = FWD ? chi_fwd[MU] : chi_bwd[MU];
      term[i + 1][0] = ch[0];
      term[i + 1][1] = ch[1];
      for (int b = 0; b < 2; b++)
        term[i + 1][2 + b] = v_phase(ch[int'(c_col(MU, b))], ph_signed(c_ph(MU, b), FWD));
    end
  end

  spinor_t l1 [4];
  spinor_t l2 [2];
  spinor_t l3, l4, t8_d;

  for (genvar j = 0; j < 4; j++) begin : g_l1
    spinor_add #(.LAT(LAT)) u_add (.clk(clk), .a(term[2 * j]), .b(term[2 * j + 1]), .y(l1[j]));
  end
  for (genvar j = 0; j < 2; j++) begin : g_l2
    spinor_add #(.LAT(LAT)) u_add (.clk(clk), .a(l1[2 * j]), .b(l1[2 * j + 1]), .y(l2[j]));
  end
  spinor_add #(.LAT(LAT)) u_l3 (.clk(clk), .a(l2[0]), .b(l2[1]), .y(l3));
  pipe_delay #(.WIDTH($bits(spinor_t)), .DEPTH(3 * LAT)) u_t8d (.clk(clk), .d(term[8]), .q(t8_d));
  spinor_add #(.LAT(LAT)) u_l4 (.clk(clk), .a(l3), .b(t8_d), .y(l4));

  always_ff @(posedge clk) out <= l4;
endmodule
