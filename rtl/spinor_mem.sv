// spinor_mem: on-chip store of a spinor field with NRD read ports.
//
// The stencil needs nine spinors per clock (the site and its eight
// neighbours). A block RAM has one read port, so the field is duplicated
// NRD times; all copies are written together and each copy serves one read
// address. Real and imaginary parts are separate arrays, each word holding
// the 12 components of one site (index 3*spin + colour), written
// independently as they arrive on separate channels.
// Read: synchronous, data one clock after the address.
module spinor_mem
  import lqcd_pkg::*;
#(
  parameter int unsigned DEPTH = 1296,
  parameter int unsigned NRD   = 9,
  parameter int unsigned AW    = $clog2(DEPTH)
) (
  input  logic                   clk,
  input  logic                   we_re,
  input  logic [AW-1:0]          waddr_re,
  input  logic [11:0][63:0]      wdata_re,
  input  logic                   we_im,
  input  logic [AW-1:0]          waddr_im,
  input  logic [11:0][63:0]      wdata_im,
  input  logic [NRD-1:0][AW-1:0] raddr,
  output spinor_t [NRD-1:0]      rdata
);
  logic [11:0][63:0] mem_re [NRD][DEPTH];
  logic [11:0][63:0] mem_im [NRD][DEPTH];
  logic [11:0][63:0] q_re [NRD];
  logic [11:0][63:0] q_im [NRD];

  always_ff @(posedge clk) begin
    for (int k = 0; k < int'(NRD); k++) begin
      if (we_re) mem_re[k][waddr_re] <= wdata_re;
      if (we_im) mem_im[k][waddr_im] <= wdata_im;
      q_re[k] <= mem_re[k][raddr[k]];
      q_im[k] <= mem_im[k][raddr[k]];
    end
  end

  always_comb begin
    for (int k = 0; k < int'(NRD); k++)
      for (int a = 0; a < 4; a++)
        for (int c = 0; c < 3; c++) begin
          rdata[k][a][c].re = q_re[k][3 * a + c];
          rdata[k][a][c].im = q_im[k][3 * a + c];
        end
  end
endmodule
