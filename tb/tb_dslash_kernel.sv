// tb_dslash_kernel: end-to-end test of the single-stencil kernel. Feeds one
// random stencil (9 spinors, 8 links) per clock for NS sites, some with the
// gamma_5 (dagger) mode set, then idles. Each result is compared with the
// real-valued reference stencil (relative tolerance 1e-12); its tag must
// match and it must appear exactly 142 clocks after its input. A gap in the
// input stream checks that out_valid follows in_valid.
module tb_dslash_kernel;
  import lqcd_pkg::*;
  import lqcd_ref_pkg::*;
  localparam int NS  = 40;
  localparam int LAT_TOTAL = 142;
  logic clk = 1'b0, rst_n = 1'b0;
  logic in_valid, in_dagger, out_valid;
  logic [10:0] in_tag, out_tag;
  f64_t kappa;
  spinor_t pc, out_psi;
  spinor_t  [3:0] pf, pb;
  su3_mat_t [3:0] uf, ub;
  rspin_t expv [NS];
  int in_cycle [NS];
  int checks = 0, failures = 0, cycle = 0, nout = 0;

  dslash_kernel dut (.clk, .rst_n, .in_valid, .in_tag, .in_dagger, .kappa,
                     .psi_c(pc), .psi_fwd(pf), .psi_bwd(pb), .u_fwd(uf), .u_bwd(ub),
                     .out_valid, .out_tag, .out_psi);

  always #5 clk = ~clk;
  always @(posedge clk) cycle <= cycle + 1;

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n && out_valid) begin
    int t, m;
    t = int'(out_tag);
    checks++;
    if (t >= NS) begin
      failures++;
    end else begin
      m = spin_mismatches(out_psi, expv[t]);
      if (m != 0) begin
        failures++;
        $display("site %0d: %0d components differ", t, m);
      end
      checks++;
      if (cycle - in_cycle[t] != LAT_TOTAL) begin
        failures++;
        $display("site %0d: latency %0d", t, cycle - in_cycle[t]);
      end
    end
    nout++;
  end

  initial begin
    spinor_t  a_pf [4], a_pb [4];
    su3_mat_t a_uf [4], a_ub [4];
    real kap;
    kap = 0.125;
    kappa = $realtobits(kap);
    in_valid = 0; in_dagger = 0; in_tag = '0;
    pc = '0; pf = '0; pb = '0; uf = '0; ub = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int s = 0; s < NS; s++) begin
      if (s == 20) begin
        @(negedge clk); in_valid = 0;
        repeat (3) @(negedge clk);
      end else begin
        @(negedge clk);
      end
      pc = rnd_spinor();
      for (int mu = 0; mu < 4; mu++) begin
        a_pf[mu] = rnd_spinor(); a_pb[mu] = rnd_spinor();
        a_uf[mu] = rnd_mat();    a_ub[mu] = rnd_mat();
        pf[mu] = a_pf[mu]; pb[mu] = a_pb[mu]; uf[mu] = a_uf[mu]; ub[mu] = a_ub[mu];
      end
      in_dagger = (s % 3 == 2);
      in_tag = 11'(s);
      in_valid = 1;
      ref_stencil(pc, a_pf, a_pb, a_uf, a_ub, kap, in_dagger, expv[s]);
      in_cycle[s] = cycle;
    end
    @(negedge clk); in_valid = 0;
    repeat (LAT_TOTAL + 10) @(posedge clk);
    checks++;
    if (nout != NS) begin
      failures++;
      $display("got %0d results, expected %0d", nout, NS);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
