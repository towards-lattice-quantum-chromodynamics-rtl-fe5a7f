// mult_batch: the accelerated function. It applies the Wilson-Dirac
// operator to a whole spinor field held on chip:
//   psi_out(n) = psi_in(n) + kappa * sum_mu [ U_mu(n) (1 - gamma_mu) psi_in(n+mu)
//                                          + U_mu(n-mu)^dagger (1 + gamma_mu) psi_in(n-mu) ]
// for all V = L^3 x T sites with periodic boundaries, or the hermitian
// conjugate D^dagger = gamma_5 D gamma_5 when dagger is set.
//
// Operation (one call, started by a pulse on start):
//  1. LOAD     psi_in, and the links if load_gauge is set, arrive on ten
//              sequential channels of doubles: real and imaginary parts of
//              psi and of U_x, U_y, U_z, U_t on separate channels. Each
//              seq_loader packs a site's doubles into one word, written into
//              every sublattice block that holds the site (its own block and
//              the halo of a neighbouring block). With load_gauge clear the
//              links of the previous call are kept and only psi is loaded.
//  2. COMPUTE  site_sequencer walks the blocks one after the other, one site
//              per clock; the nine spinors and eight links of a stencil are
//              read in one clock from the duplicated memories of the active
//              block and fed to dslash_kernel (latency 142, one site per
//              clock). Results are written to the output store by site index.
//              kernel_cycles reports the clocks from the first site entering
//              the kernel to the last result leaving it, V + 142 - 1 + 1.
//  3. STORE    result_streamer returns psi_out on two channels (real, imag),
//              12 doubles per site, under host flow control.
// done pulses at the end; busy is high from start to done.
// kappa, dagger and load_gauge are sampled at start.
module mult_batch
  import lqcd_pkg::*;
#(
  parameter int unsigned L  = 6,
  parameter int unsigned T  = 8,
  parameter int unsigned NB = 2,
  parameter int unsigned TB = T / NB,
  parameter int unsigned BANK_DEPTH = L * L * L * (TB + 2),
  parameter int unsigned V  = L * L * L * T,
  parameter int unsigned AW = $clog2(BANK_DEPTH),
  parameter int unsigned GW = $clog2(V),
  parameter int unsigned BW = (NB > 1) ? $clog2(NB) : 1
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             start,
  input  logic             load_gauge,
  input  logic             dagger,
  input  f64_t             kappa,
  // link channels, index mu = 0..3 (x, y, z, t)
  input  logic [3:0]       u_re_valid,
  input  f64_t [3:0]       u_re_data,
  output logic [3:0]       u_re_ready,
  input  logic [3:0]       u_im_valid,
  input  f64_t [3:0]       u_im_data,
  output logic [3:0]       u_im_ready,
  // input spinor channels
  input  logic             psi_re_valid,
  input  f64_t             psi_re_data,
  output logic             psi_re_ready,
  input  logic             psi_im_valid,
  input  f64_t             psi_im_data,
  output logic             psi_im_ready,
  // output spinor channels
  output logic             out_valid,
  input  logic             out_ready,
  output f64_t             out_re,
  output f64_t             out_im,
  // status
  output logic             busy,
  output logic             done,
  output logic [31:0]      kernel_cycles
);
  localparam int unsigned CW = $clog2(L + 1);
  localparam int unsigned TW = $clog2(T + 1);

  typedef enum logic [1:0] {S_IDLE, S_LOAD, S_COMPUTE, S_STORE} state_e;
  state_e state;
  logic   gauge_l, dagger_l;
  f64_t   kappa_l;

  // ------------------------------------------------------------------
  // input channels
  // ------------------------------------------------------------------
  logic start_psi, start_u;
  logic [3:0]              ur_wr, ui_wr, ur_done, ui_done;
  logic [3:0][CW-1:0]      ur_x, ur_y, ur_z, ui_x, ui_y, ui_z;
  logic [3:0][TW-1:0]      ur_t, ui_t;
  logic [3:0][8:0][63:0]   ur_d, ui_d;
  logic                    pr_wr, pi_wr, pr_done, pi_done;
  logic [CW-1:0]           pr_x, pr_y, pr_z, pi_x, pi_y, pi_z;
  logic [TW-1:0]           pr_t, pi_t;
  logic [11:0][63:0]       pr_d, pi_d;

  for (genvar mu = 0; mu < 4; mu++) begin : g_uld
    seq_loader #(.L(L), .T(T), .WORDS(9)) u_re_ld (
      .clk, .rst_n, .start(start_u), .s_valid(u_re_valid[mu]), .s_data(u_re_data[mu]),
      .s_ready(u_re_ready[mu]), .wr_en(ur_wr[mu]), .wr_x(ur_x[mu]), .wr_y(ur_y[mu]),
      .wr_z(ur_z[mu]), .wr_t(ur_t[mu]), .wr_data(ur_d[mu]), .done(ur_done[mu]));
    seq_loader #(.L(L), .T(T), .WORDS(9)) u_im_ld (
      .clk, .rst_n, .start(start_u), .s_valid(u_im_valid[mu]), .s_data(u_im_data[mu]),
      .s_ready(u_im_ready[mu]), .wr_en(ui_wr[mu]), .wr_x(ui_x[mu]), .wr_y(ui_y[mu]),
      .wr_z(ui_z[mu]), .wr_t(ui_t[mu]), .wr_data(ui_d[mu]), .done(ui_done[mu]));
  end
  seq_loader #(.L(L), .T(T), .WORDS(12)) u_psi_re_ld (
    .clk, .rst_n, .start(start_psi), .s_valid(psi_re_valid), .s_data(psi_re_data),
    .s_ready(psi_re_ready), .wr_en(pr_wr), .wr_x(pr_x), .wr_y(pr_y), .wr_z(pr_z),
    .wr_t(pr_t), .wr_data(pr_d), .done(pr_done));
  seq_loader #(.L(L), .T(T), .WORDS(12)) u_psi_im_ld (
    .clk, .rst_n, .start(start_psi), .s_valid(psi_im_valid), .s_data(psi_im_data),
    .s_ready(psi_im_ready), .wr_en(pi_wr), .wr_x(pi_x), .wr_y(pi_y), .wr_z(pi_z),
    .wr_t(pi_t), .wr_data(pi_d), .done(pi_done));

  // position of time slice t inside block b: 0 and TB+1 are the halo slices
  function automatic int rel_slice(int t, int b);
    int r;
    r = t - b * int'(TB) + 1;
    if (r < 0) r = r + int'(T);
    if (r >= int'(T)) r = r - int'(T);
    return r;
  endfunction

  function automatic logic in_block(int t, int b);
    return rel_slice(t, b) <= int'(TB) + 1;
  endfunction

  function automatic logic [AW-1:0] bank_addr(int x, int y, int z, int t, int b);
    return AW'(((rel_slice(t, b) * int'(L) + z) * int'(L) + y) * int'(L) + x);
  endfunction

  // ------------------------------------------------------------------
  // sequencer and sublattice memories
  // ------------------------------------------------------------------
  logic                seq_valid, seq_start;
  logic [BW-1:0]       seq_bank, rd_bank;
  logic [GW-1:0]       seq_gsite, rd_gsite;
  logic                rd_valid;
  logic [AW-1:0]       seq_c;
  logic [3:0][AW-1:0]  seq_f, seq_b;

  site_sequencer #(.L(L), .T(T), .NB(NB)) u_seq (
    .clk, .rst_n, .start(seq_start), .valid(seq_valid), .block_start(),
    .last(), .bank(seq_bank), .gsite(seq_gsite), .addr_c(seq_c),
    .addr_fwd(seq_f), .addr_bwd(seq_b), .busy());

  spinor_t  [NB-1:0][8:0]  bank_psi;
  su3_mat_t [NB-1:0][3:0]  bank_uf, bank_ub;

  for (genvar b = 0; b < NB; b++) begin : g_blk
    spinor_mem #(.DEPTH(BANK_DEPTH), .NRD(9)) u_psi (
      .clk,
      .we_re(pr_wr && in_block(int'(pr_t), b)),
      .waddr_re(bank_addr(int'(pr_x), int'(pr_y), int'(pr_z), int'(pr_t), b)),
      .wdata_re(pr_d),
      .we_im(pi_wr && in_block(int'(pi_t), b)),
      .waddr_im(bank_addr(int'(pi_x), int'(pi_y), int'(pi_z), int'(pi_t), b)),
      .wdata_im(pi_d),
      .raddr({seq_b, seq_f, seq_c}),
      .rdata(bank_psi[b]));
    for (genvar mu = 0; mu < 4; mu++) begin : g_u
      gauge_mem #(.DEPTH(BANK_DEPTH)) u_gauge (
        .clk,
        .we_re(ur_wr[mu] && in_block(int'(ur_t[mu]), b)),
        .waddr_re(bank_addr(int'(ur_x[mu]), int'(ur_y[mu]), int'(ur_z[mu]), int'(ur_t[mu]), b)),
        .wdata_re(ur_d[mu]),
        .we_im(ui_wr[mu] && in_block(int'(ui_t[mu]), b)),
        .waddr_im(bank_addr(int'(ui_x[mu]), int'(ui_y[mu]), int'(ui_z[mu]), int'(ui_t[mu]), b)),
        .wdata_im(ui_d[mu]),
        .raddr_fwd(seq_c),
        .raddr_bwd(seq_b[mu]),
        .rdata_fwd(bank_uf[b][mu]),
        .rdata_bwd(bank_ub[b][mu]));
    end
  end

  // memory read takes one clock: align the side band
  always_ff @(posedge clk) begin
    if (!rst_n) rd_valid <= 1'b0;
    else        rd_valid <= seq_valid;
    rd_bank  <= seq_bank;
    rd_gsite <= seq_gsite;
  end

  spinor_t  k_pc;
  spinor_t  [3:0] k_pf, k_pb;
  su3_mat_t [3:0] k_uf, k_ub;
  always_comb begin
    k_pc = bank_psi[rd_bank][0];
    for (int mu = 0; mu < 4; mu++) begin
      k_pf[mu] = bank_psi[rd_bank][1 + mu];
      k_pb[mu] = bank_psi[rd_bank][5 + mu];
      k_uf[mu] = bank_uf[rd_bank][mu];
      k_ub[mu] = bank_ub[rd_bank][mu];
    end
  end

  // ------------------------------------------------------------------
  // stencil kernel
  // ------------------------------------------------------------------
  logic          k_out_valid;
  logic [GW-1:0] k_out_tag;
  spinor_t       k_out_psi;

  dslash_kernel #(.TAG_W(GW)) u_kernel (
    .clk, .rst_n, .in_valid(rd_valid), .in_tag(rd_gsite), .in_dagger(dagger_l),
    .kappa(kappa_l), .psi_c(k_pc), .psi_fwd(k_pf), .psi_bwd(k_pb), .u_fwd(k_uf),
    .u_bwd(k_ub), .out_valid(k_out_valid), .out_tag(k_out_tag), .out_psi(k_out_psi));

  // ------------------------------------------------------------------
  // result store and output channels
  // ------------------------------------------------------------------
  logic [11:0][63:0] res_re, res_im;
  always_comb begin
    for (int a = 0; a < 4; a++)
      for (int c = 0; c < 3; c++) begin
        res_re[3 * a + c] = k_out_psi[a][c].re;
        res_im[3 * a + c] = k_out_psi[a][c].im;
      end
  end

  logic [GW-1:0] st_addr;
  spinor_t [0:0] st_data;
  logic          start_store, st_done;

  spinor_mem #(.DEPTH(V), .NRD(1)) u_out_mem (
    .clk, .we_re(k_out_valid), .waddr_re(k_out_tag), .wdata_re(res_re),
    .we_im(k_out_valid), .waddr_im(k_out_tag), .wdata_im(res_im),
    .raddr(st_addr), .rdata(st_data));

  result_streamer #(.V(V)) u_out (
    .clk, .rst_n, .start(start_store), .rd_addr(st_addr), .rd_data(st_data[0]),
    .m_valid(out_valid), .m_ready(out_ready), .m_re(out_re), .m_im(out_im), .done(st_done));

  // ------------------------------------------------------------------
  // call control
  // ------------------------------------------------------------------
  logic [GW-1:0] res_cnt;
  logic          k_run;
  logic          load_done;

  assign load_done = pr_done && pi_done && (!gauge_l || (&ur_done && &ui_done));
  assign busy      = (state != S_IDLE);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state <= S_IDLE;
      gauge_l <= 1'b0; dagger_l <= 1'b0; kappa_l <= '0;
      start_psi <= 1'b0; start_u <= 1'b0; seq_start <= 1'b0; start_store <= 1'b0;
      done <= 1'b0; res_cnt <= '0; k_run <= 1'b0; kernel_cycles <= '0;
    end else begin
      start_psi <= 1'b0; start_u <= 1'b0; seq_start <= 1'b0; start_store <= 1'b0;
      done <= 1'b0;
      if (k_run || rd_valid) kernel_cycles <= kernel_cycles + 1;
      unique case (state)
        S_IDLE: if (start) begin
          gauge_l   <= load_gauge;
          dagger_l  <= dagger;
          kappa_l   <= kappa;
          start_psi <= 1'b1;
          start_u   <= load_gauge;
          state     <= S_LOAD;
        end
        S_LOAD: if (!start_psi && load_done) begin
          seq_start     <= 1'b1;
          res_cnt       <= '0;
          kernel_cycles <= '0;
          k_run         <= 1'b0;
          state         <= S_COMPUTE;
        end
        S_COMPUTE: begin
          if (rd_valid) k_run <= 1'b1;
          if (k_out_valid) begin
            res_cnt <= res_cnt + 1'b1;
            if (int'(res_cnt) == int'(V) - 1) begin
              k_run       <= 1'b0;
              start_store <= 1'b1;
              state       <= S_STORE;
            end
          end
        end
        default: if (st_done) begin
          done  <= 1'b1;
          state <= S_IDLE;
        end
      endcase
    end
  end

  // a new call is only accepted while idle
  a_start: assert property (@(posedge clk) disable iff (!rst_n) start |-> state == S_IDLE)
    else $error("start while busy is ignored");
endmodule
