// tb_su3_mat_vec: checks the Stage 3 unit in both forms (U and U^dagger).
// Each clock a random link, half spinor and kappa are applied to both
// instances; after exactly 70 clocks the outputs must equal kappa*U*h and
// kappa*U^dagger*h, computed here with real complex arithmetic.
module tb_su3_mat_vec;
  import lqcd_pkg::*;
  import lqcd_ref_pkg::*;
  localparam int LAT = 70, N = 300;
  logic clk = 1'b0;
  su3_mat_t u;
  half_spinor_t h, chi0, chi1;
  f64_t kappa;
  su3_mat_t su [N];
  half_spinor_t sh [N];
  real sk [N];
  int checks = 0, failures = 0;

  su3_mat_vec #(.DAGGER(1'b0)) dut0 (.clk, .u, .h, .kappa, .chi(chi0));
  su3_mat_vec #(.DAGGER(1'b1)) dut1 (.clk, .u, .h, .kappa, .chi(chi1));

  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(half_spinor_t got, su3_mat_t m, half_spinor_t hv, real k, bit dag);
    rmat_t rm;
    to_rmat(m, rm);
    for (int v = 0; v < 2; v++)
      for (int r = 0; r < 3; r++) begin
        rc_t s;
        s = rc(0, 0);
        for (int c = 0; c < 3; c++)
          s = radd(s, rmul(dag ? rconj(rm[c][r]) : rm[r][c], to_rc(hv[v][c])));
        checks++;
        if (!close($bitstoreal(got[v][r].re), k * s.re) || !close($bitstoreal(got[v][r].im), k * s.im)) begin
          failures++;
          if (failures < 8) $display("dag %0d v %0d r %0d mismatch", dag, v, r);
        end
      end
  endtask

  initial begin
    u = '0; h = '0; kappa = '0;
    for (int k = 0; k < N + LAT; k++) begin
      @(negedge clk);
      if (k < N) begin
        su[k] = rnd_mat();
        for (int v = 0; v < 2; v++)
          for (int c = 0; c < 3; c++) sh[k][v][c] = rnd_cplx();
        sk[k] = 0.05 + 0.2 * real'($urandom_range(1000, 0)) / 1000.0;
        u = su[k]; h = sh[k]; kappa = $realtobits(sk[k]);
      end
      if (k >= LAT) begin
        check(chi0, su[k - LAT], sh[k - LAT], sk[k - LAT], 1'b0);
        check(chi1, su[k - LAT], sh[k - LAT], sk[k - LAT], 1'b1);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
