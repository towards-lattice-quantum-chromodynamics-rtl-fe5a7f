// tb_spin_project: checks Stage 2. Each clock a random set of eight neighbour
// spinors is applied; after exactly 14 clocks the 16 half spinors must equal
// the upper two rows of (1 - gamma_mu) psi_fwd and (1 + gamma_mu) psi_bwd,
// computed here with the full 4x4 Dirac matrices.
module tb_spin_project;
  import lqcd_pkg::*;
  import lqcd_ref_pkg::*;
  localparam int LAT = 14, N = 200;
  logic clk = 1'b0;
  spinor_t [3:0] pf, pb;
  half_spinor_t [3:0] hf, hb;
  spinor_t sf [N][4];
  spinor_t sb [N][4];
  int checks = 0, failures = 0;

  spin_project dut (.clk, .psi_fwd(pf), .psi_bwd(pb), .h_fwd(hf), .h_bwd(hb));

  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check_half(half_spinor_t h, spinor_t p, int mu, real sgn);
    rspin_t r;
    to_rspin(p, r);
    for (int a = 0; a < 2; a++)
      for (int c = 0; c < 3; c++) begin
        rc_t e;
        e = r[a][c];
        for (int b = 0; b < 4; b++) begin
          rc_t g;
          g = gam(mu, a, b);
          e = radd(e, rmul(rc(sgn * g.re, sgn * g.im), r[b][c]));
        end
        checks++;
        if (!close($bitstoreal(h[a][c].re), e.re) || !close($bitstoreal(h[a][c].im), e.im)) begin
          failures++;
          if (failures < 8) $display("mu %0d sgn %0.0f row %0d col %0d mismatch", mu, sgn, a, c);
        end
      end
  endtask

  initial begin
    pf = '0; pb = '0;
    for (int k = 0; k < N + LAT; k++) begin
      @(negedge clk);
      if (k < N)
        for (int mu = 0; mu < 4; mu++) begin
          sf[k][mu] = rnd_spinor(); sb[k][mu] = rnd_spinor();
          pf[mu] = sf[k][mu]; pb[mu] = sb[k][mu];
        end
      if (k >= LAT)
        for (int mu = 0; mu < 4; mu++) begin
          check_half(hf[mu], sf[k - LAT][mu], mu, -1.0);
          check_half(hb[mu], sb[k - LAT][mu], mu, 1.0);
        end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
