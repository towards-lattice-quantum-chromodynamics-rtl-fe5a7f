// pipe_delay: a fixed-length register delay line of DEPTH stages for a WIDTH-bit
// bus. It keeps operands and side information aligned with the 14-cycle
// floating-point units of the stencil pipeline. DEPTH = 0 is a plain wire.
// No reset: the contents are data whose validity travels alongside.
module pipe_delay #(
  parameter int unsigned WIDTH = 64,
  parameter int unsigned DEPTH = 14
) (
  input  logic             clk,
  input  logic [WIDTH-1:0] d,
  output logic [WIDTH-1:0] q
);
  if (DEPTH == 0) begin : g_wire
    assign q = d;
  end else begin : g_regs
    logic [WIDTH-1:0] sr [DEPTH];
    always_ff @(posedge clk) begin
      sr[0] <= d;
      for (int i = 1; i < DEPTH; i++) sr[i] <= sr[i-1];
    end
    assign q = sr[DEPTH-1];
  end
endmodule
