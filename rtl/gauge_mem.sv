// gauge_mem: on-chip store of the links U_mu of one direction mu for one
// sublattice block.
//
// Following the layout of the host arrays U_mu_r[2][vol][9] and
// U_mu_i[2][vol][9], real and imaginary parts sit in separate arrays, each
// word holds the 9 entries of one matrix side by side (the colour dimension
// reshaped into the word), and the whole store is kept twice. Both copies are
// written together; copy 0 is read at the site n (forward link U_mu(n)) and
// copy 1 at the backward neighbour n - mu (link U_mu(n - mu)), so both links
// of a direction come out in the same clock.
// Write ports: real and imaginary halves are written independently, one word
// per clock each, since they arrive on separate channels.
// Read: synchronous, data one clock after the address.
module gauge_mem
  import lqcd_pkg::*;
#(
  parameter int unsigned DEPTH = 1296,
  parameter int unsigned AW    = $clog2(DEPTH)
) (
  input  logic                  clk,
  input  logic                  we_re,
  input  logic [AW-1:0]         waddr_re,
  input  logic [8:0][63:0]      wdata_re,
  input  logic                  we_im,
  input  logic [AW-1:0]         waddr_im,
  input  logic [8:0][63:0]      wdata_im,
  input  logic [AW-1:0]         raddr_fwd,
  input  logic [AW-1:0]         raddr_bwd,
  output su3_mat_t              rdata_fwd,
  output su3_mat_t              rdata_bwd
);
  logic [8:0][63:0] mem_re [2][DEPTH];
  logic [8:0][63:0] mem_im [2][DEPTH];
  logic [8:0][63:0] q_re [2];
  logic [8:0][63:0] q_im [2];

  always_ff @(posedge clk) begin
    for (int k = 0; k < 2; k++) begin
      if (we_re) mem_re[k][waddr_re] <= wdata_re;
      if (we_im) mem_im[k][waddr_im] <= wdata_im;
    end
    q_re[0] <= mem_re[0][raddr_fwd];
    q_im[0] <= mem_im[0][raddr_fwd];
    q_re[1] <= mem_re[1][raddr_bwd];
    q_im[1] <= mem_im[1][raddr_bwd];
  end

  always_comb begin
    for (int i = 0; i < 9; i++) begin
      rdata_fwd[i].re = q_re[0][i];
      rdata_fwd[i].im = q_im[0][i];
      rdata_bwd[i].re = q_re[1][i];
      rdata_bwd[i].im = q_im[1][i];
    end
  end
endmodule
