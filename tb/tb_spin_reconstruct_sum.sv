// tb_spin_reconstruct_sum: checks Stage 4. For each direction and sign a
// random spinor w is projected here with the full Dirac matrices,
// p = (1 -+ gamma_mu) w, and only the upper half of p is given to the block.
// After exactly 57 clocks the output must equal psi_c plus the eight full
// projected spinors p, which checks both the reconstruction of the lower
// spin components and the 9-term sum.
module tb_spin_reconstruct_sum;
  import lqcd_pkg::*;
  import lqcd_ref_pkg::*;
  localparam int LAT = 57, N = 150;
  logic clk = 1'b0;
  spinor_t pc, out;
  half_spinor_t [3:0] cf, cb;
  rspin_t expv [N];
  int checks = 0, failures = 0;

  spin_reconstruct_sum dut (.clk, .psi_c(pc), .chi_fwd(cf), .chi_bwd(cb), .out);

  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // p = (1 + sgn*gamma_mu) w; returns p and adds it to acc
  task automatic project(input spinor_t w, input int mu, input real sgn,
                         output half_spinor_t up, inout rspin_t acc);
    rspin_t rw;
    to_rspin(w, rw);
    for (int a = 0; a < 4; a++)
      for (int c = 0; c < 3; c++) begin
        rc_t e;
        e = rw[a][c];
        for (int b = 0; b < 4; b++) begin
          rc_t g;
          g = gam(mu, a, b);
          e = radd(e, rmul(rc(sgn * g.re, sgn * g.im), rw[b][c]));
        end
        acc[a][c] = radd(acc[a][c], e);
        if (a < 2) begin
          up[a][c].re = $realtobits(e.re);
          up[a][c].im = $realtobits(e.im);
        end
      end
  endtask

  initial begin
    pc = '0; cf = '0; cb = '0;
    for (int k = 0; k < N + LAT; k++) begin
      @(negedge clk);
      if (k < N) begin
        rspin_t acc;
        half_spinor_t hs;
        pc = rnd_spinor();
        to_rspin(pc, acc);
        for (int mu = 0; mu < 4; mu++) begin
          project(rnd_spinor(), mu, -1.0, hs, acc);
          cf[mu] = hs;
          project(rnd_spinor(), mu, 1.0, hs, acc);
          cb[mu] = hs;
        end
        expv[k] = acc;
      end
      if (k >= LAT) begin
        int m;
        m = spin_mismatches(out, expv[k - LAT]);
        checks++;
        if (m != 0) begin
          failures++;
          if (failures < 8) $display("set %0d: %0d components differ", k - LAT, m);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
