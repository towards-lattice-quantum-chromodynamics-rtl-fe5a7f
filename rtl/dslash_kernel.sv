// dslash_kernel: the single-stencil kernel. For one lattice site n per clock it
// evaluates the Wilson-Dirac operator
//   out(n) = psi(n) + kappa * sum_mu [ U_mu(n) (1 - gamma_mu) psi(n+mu)
//                                    + U_mu(n-mu)^dagger (1 + gamma_mu) psi(n-mu) ]
// from the nine spinors and eight links of the stencil, fully pipelined
// (initiation interval 1) in four stages:
//   Stage 1   1 clock   all inputs captured in registers
//   Stage 2  14 clocks  spin projection, 96 double adds        (spin_project)
//   Stage 3  70 clocks  8 link x half-spinor products + kappa  (su3_mat_vec x 8)
//   Stage 4  57 clocks  spin reconstruction and 9-term sum     (spin_reconstruct_sum)
// Total latency 142 clocks from in_valid to out_valid. The site's own spinor
// and the links are delayed alongside so that every stage sees data of the
// same site. in_tag (the site's output address) and in_dagger travel with the
// site. With in_dagger set the kernel applies D^dagger = gamma_5 D gamma_5
// instead, by negating the lower spin components of every input spinor and of
// the result (sign flips only); this mode is a choice of this design to serve
// the D D^dagger products of the conjugate-gradient solver. kappa must be
// held stable while sites are in flight. Only the valid bit is reset.
module dslash_kernel
  import lqcd_pkg::*;
#(
  parameter int unsigned TAG_W = 11,
  parameter int unsigned LAT   = FP_LAT
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   in_valid,
  input  logic [TAG_W-1:0]       in_tag,
  input  logic                   in_dagger,
  input  f64_t                   kappa,
  input  spinor_t                psi_c,    // psi(n)
  input  spinor_t  [3:0]         psi_fwd,  // psi(n + mu)
  input  spinor_t  [3:0]         psi_bwd,  // psi(n - mu)
  input  su3_mat_t [3:0]         u_fwd,    // U_mu(n)
  input  su3_mat_t [3:0]         u_bwd,    // U_mu(n - mu)
  output logic                   out_valid,
  output logic [TAG_W-1:0]       out_tag,
  output spinor_t                out_psi
);
  localparam int unsigned S2 = LAT;          // stage 2 latency
  localparam int unsigned S3 = 5 * LAT;      // stage 3 latency
  localparam int unsigned S4 = 4 * LAT + 1;  // stage 4 latency
  localparam int unsigned KERNEL_LAT = 1 + S2 + S3 + S4;

  // ---------------- Stage 1: registers ----------------
  logic                 s1_dagger;
  logic [TAG_W-1:0]     s1_tag;
  f64_t                 s1_kappa;
  spinor_t              s1_c;
  spinor_t  [3:0]       s1_f, s1_b;
  su3_mat_t [3:0]       s1_uf, s1_ub;

  always_ff @(posedge clk) begin
    s1_tag    <= in_tag;
    s1_dagger <= in_dagger;
    s1_kappa  <= kappa;
    s1_c      <= psi_c;
    s1_f      <= psi_fwd;
    s1_b      <= psi_bwd;
    s1_uf     <= u_fwd;
    s1_ub     <= u_bwd;
  end

  // gamma_5 on the inputs in dagger mode (wiring only)
  spinor_t        g_c;
  spinor_t [3:0]  g_f, g_b;
  always_comb begin
    g_c = s1_dagger ? gamma5(s1_c) : s1_c;
    for (int mu = 0; mu < 4; mu++) begin
      g_f[mu] = s1_dagger ? gamma5(s1_f[mu]) : s1_f[mu];
      g_b[mu] = s1_dagger ? gamma5(s1_b[mu]) : s1_b[mu];
    end
  end

  // ---------------- Stage 2: spin projection ----------------
  half_spinor_t [3:0] h_f, h_b;
  spin_project #(.LAT(LAT)) u_s2 (.clk(clk), .psi_fwd(g_f), .psi_bwd(g_b), .h_fwd(h_f), .h_bwd(h_b));

  su3_mat_t [3:0] s3_uf, s3_ub;
  f64_t           s3_kappa;
  pipe_delay #(.WIDTH($bits(u_fwd)), .DEPTH(S2)) u_dlyuf (.clk(clk), .d(s1_uf), .q(s3_uf));
  pipe_delay #(.WIDTH($bits(u_bwd)), .DEPTH(S2)) u_dlyub (.clk(clk), .d(s1_ub), .q(s3_ub));
  pipe_delay #(.WIDTH(64),           .DEPTH(S2)) u_dlyk  (.clk(clk), .d(s1_kappa), .q(s3_kappa));

  // ---------------- Stage 3: link multiplication ----------------
  half_spinor_t [3:0] chi_f, chi_b;
  for (genvar mu = 0; mu < 4; mu++) begin : g_s3
    su3_mat_vec #(.DAGGER(1'b1), .LAT(LAT)) u_bwd_mv (
      .clk(clk), .u(s3_ub[mu]), .h(h_b[mu]), .kappa(s3_kappa), .chi(chi_b[mu]));
    su3_mat_vec #(.DAGGER(1'b0), .LAT(LAT)) u_fwd_mv (
      .clk(clk), .u(s3_uf[mu]), .h(h_f[mu]), .kappa(s3_kappa), .chi(chi_f[mu]));
  end

  // the site's own spinor waits for stages 2 and 3
  spinor_t s4_c;
  pipe_delay #(.WIDTH($bits(spinor_t)), .DEPTH(S2 + S3)) u_dlyc (.clk(clk), .d(g_c), .q(s4_c));

  // ---------------- Stage 4: reconstruction and sum ----------------
  spinor_t s4_out;
  spin_reconstruct_sum #(.LAT(LAT)) u_s4 (
    .clk(clk), .psi_c(s4_c), .chi_fwd(chi_f), .chi_bwd(chi_b), .out(s4_out));

  // ---------------- side band: tag, dagger flag, valid ----------------
  logic [TAG_W-1:0] tag_o;
  logic             dag_o;
  pipe_delay #(.WIDTH(TAG_W + 1), .DEPTH(S2 + S3 + S4)) u_dlytag (
    .clk(clk), .d({s1_tag, s1_dagger}), .q({tag_o, dag_o}));

  logic [KERNEL_LAT-1:0] vpipe;
  always_ff @(posedge clk) begin
    if (!rst_n) vpipe <= '0;
    else        vpipe <= {vpipe[KERNEL_LAT-2:0], in_valid};
  end
  assign out_valid = vpipe[KERNEL_LAT-1];
  assign out_tag   = tag_o;
  assign out_psi   = dag_o ? gamma5(s4_out) : s4_out;

  // the result of every accepted site appears exactly KERNEL_LAT clocks later
  a_lat: assert property (@(posedge clk) disable iff (!rst_n)
                          in_valid |-> ##KERNEL_LAT out_valid);
endmodule
