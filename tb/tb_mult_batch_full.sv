// tb_mult_batch_full: the end-to-end test of tb_mult_batch run on the
// accelerator at its default size, a 6^3 x 8 lattice (1728 sites) split into
// two 6^3 x 4 blocks, with no parameter overridden. Two calls: D with freshly
// loaded links, then D^dagger with the links kept on chip. Every returned
// double is checked against the reference stencil, the kernel occupancy must
// be V + 142 clocks, and each mechanism (input gaps, output stalls, block
// switch, link reuse, dagger mode) must occur.
module tb_mult_batch_full;
  import lqcd_pkg::*;
  import lqcd_ref_pkg::*;
  localparam int L = 6, T = 8;  // the defaults of mult_batch
  localparam int V = L * L * L * T;
  localparam int KLAT = 142;

  logic clk = 1'b0, rst_n = 1'b0;
  logic start, load_gauge, dagger;
  f64_t kappa;
  logic [3:0] u_re_valid, u_re_ready, u_im_valid, u_im_ready;
  f64_t [3:0] u_re_data, u_im_data;
  logic psi_re_valid, psi_re_ready, psi_im_valid, psi_im_ready;
  f64_t psi_re_data, psi_im_data;
  logic out_valid, out_ready, busy, done;
  f64_t out_re, out_im;
  logic [31:0] kernel_cycles;

  mult_batch dut (.*);

  always #5 clk = ~clk;

  spinor_t  psi [V];
  su3_mat_t U   [4][V];
  rspin_t   expv [V];
  int checks = 0, failures = 0;
  int n_in_gap = 0, n_out_stall = 0, n_block_switch = 0, n_gauge_reuse = 0, n_dagger = 0;
  bit feeding = 0;
  bit feed_u  = 0;

  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int site(int x, int y, int z, int t);
    return ((t * L + z) * L + y) * L + x;
  endfunction

  function automatic int nb(int g, int mu, int d);
    int c[4];
    c[0] = g % L; c[1] = (g / L) % L; c[2] = (g / (L * L)) % L; c[3] = g / (L * L * L);
    c[mu] = (c[mu] + d + ((mu == 3) ? T : L)) % ((mu == 3) ? T : L);
    return site(c[0], c[1], c[2], c[3]);
  endfunction

  task automatic compute_ref(real kap, bit dag);
    spinor_t pf [4], pb [4];
    su3_mat_t uf [4], ub [4];
    for (int g = 0; g < V; g++) begin
      for (int mu = 0; mu < 4; mu++) begin
        pf[mu] = psi[nb(g, mu, 1)];
        pb[mu] = psi[nb(g, mu, -1)];
        uf[mu] = U[mu][g];
        ub[mu] = U[mu][nb(g, mu, -1)];
      end
      ref_stencil(psi[g], pf, pb, uf, ub, kap, dag, expv[g]);
    end
  endtask

  // ---------------- input channel drivers ----------------
  int ur_i [4], ui_i [4];
  int pr_i, pi_i;
  always @(negedge clk) begin
    if (feeding) begin
      for (int mu = 0; mu < 4; mu++) begin
        u_re_valid[mu] = feed_u && ur_i[mu] < 9 * V && ($urandom_range(3, 0) != 0);
        u_re_data[mu]  = U[mu][ur_i[mu] / 9][ur_i[mu] % 9].re;
        u_im_valid[mu] = feed_u && ui_i[mu] < 9 * V && ($urandom_range(3, 0) != 0);
        u_im_data[mu]  = U[mu][ui_i[mu] / 9][ui_i[mu] % 9].im;
      end
      psi_re_valid = pr_i < 12 * V && ($urandom_range(3, 0) != 0);
      psi_re_data  = psi[pr_i / 12][(pr_i % 12) / 3][pr_i % 3].re;
      psi_im_valid = pi_i < 12 * V && ($urandom_range(3, 0) != 0);
      psi_im_data  = psi[pi_i / 12][(pi_i % 12) / 3][pi_i % 3].im;
      if (pr_i < 12 * V && !psi_re_valid) n_in_gap++;
    end else begin
      u_re_valid = '0; u_im_valid = '0; psi_re_valid = 0; psi_im_valid = 0;
    end
    out_ready = ($urandom_range(2, 0) != 0);
  end

  always @(posedge clk) begin
    for (int mu = 0; mu < 4; mu++) begin
      if (u_re_valid[mu] && u_re_ready[mu]) ur_i[mu]++;
      if (u_im_valid[mu] && u_im_ready[mu]) ui_i[mu]++;
    end
    if (psi_re_valid && psi_re_ready) pr_i++;
    if (psi_im_valid && psi_im_ready) pi_i++;
    if (out_valid && !out_ready) n_out_stall++;
    if (dut.u_seq.block_start && dut.u_seq.bank != 0) n_block_switch++;
  end

  // ---------------- output checker ----------------
  int oi;
  always @(posedge clk) if (rst_n && out_valid && out_ready) begin
    int g, a, c;
    g = oi / 12; a = (oi % 12) / 3; c = oi % 3;
    checks++;
    if (g >= V || !close($bitstoreal(out_re), expv[g][a][c].re) ||
        !close($bitstoreal(out_im), expv[g][a][c].im)) begin
      failures++;
      if (failures < 10)
        $display("site %0d comp %0d/%0d: got (%g,%g) expected (%g,%g)", g, a, c,
                 $bitstoreal(out_re), $bitstoreal(out_im), expv[g][a][c].re, expv[g][a][c].im);
    end
    oi++;
  end

  task automatic run_call(bit lg, bit dag, real kap);
    for (int mu = 0; mu < 4; mu++) begin ur_i[mu] = 0; ui_i[mu] = 0; end
    pr_i = 0; pi_i = 0; oi = 0;
    compute_ref(kap, dag);
    @(negedge clk);
    load_gauge = lg; dagger = dag; kappa = $realtobits(kap); start = 1;
    @(negedge clk);
    start = 0;
    feeding = 1; feed_u = lg;
    wait (done);
    @(negedge clk);
    feeding = 0;
    checks++;
    if (oi != 12 * V) begin
      failures++;
      $display("received %0d doubles, expected %0d", oi, 12 * V);
    end
    checks++;
    if (kernel_cycles != V + KLAT) begin
      failures++;
      $display("kernel cycles %0d, expected %0d", kernel_cycles, V + KLAT);
    end
    if (!lg) n_gauge_reuse++;
    if (dag) n_dagger++;
  endtask

  initial begin
    start = 0; load_gauge = 0; dagger = 0; kappa = '0;
    u_re_valid = '0; u_im_valid = '0; psi_re_valid = 0; psi_im_valid = 0;
    u_re_data = '0; u_im_data = '0; psi_re_data = '0; psi_im_data = '0;
    out_ready = 0;
    for (int g = 0; g < V; g++) begin
      psi[g] = rnd_spinor();
      for (int mu = 0; mu < 4; mu++) U[mu][g] = rnd_mat();
    end
    repeat (4) @(posedge clk);
    rst_n = 1;
    run_call(1'b1, 1'b0, 0.13);
    for (int g = 0; g < V; g++) psi[g] = rnd_spinor();
    run_call(1'b0, 1'b1, 0.11);
    $display("mechanisms: input gaps %0d, output stalls %0d, block switches %0d, gauge reuse %0d, dagger %0d",
             n_in_gap, n_out_stall, n_block_switch, n_gauge_reuse, n_dagger);
    checks += 5;
    if (n_in_gap == 0) failures++;
    if (n_out_stall == 0) failures++;
    if (n_block_switch == 0) failures++;
    if (n_gauge_reuse == 0) failures++;
    if (n_dagger == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
