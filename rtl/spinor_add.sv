// spinor_add: adds two su3_spinors component by component (24 double
// additions in parallel), y = a + b after LAT clocks. Used by the final
// accumulation stage of the stencil kernel.
module spinor_add
  import lqcd_pkg::*;
#(
  parameter int unsigned LAT = FP_LAT
) (
  input  logic    clk,
  input  spinor_t a,
  input  spinor_t b,
  output spinor_t y
);
  for (genvar s = 0; s < 4; s++) begin : g_s
    for (genvar c = 0; c < 3; c++) begin : g_c
      fp64_add #(.LAT(LAT)) u_re (.clk(clk), .a(a[s][c].re), .b(b[s][c].re), .y(y[s][c].re));
      fp64_add #(.LAT(LAT)) u_im (.clk(clk), .a(a[s][c].im), .b(b[s][c].im), .y(y[s][c].im));
    end
  end
endmodule
