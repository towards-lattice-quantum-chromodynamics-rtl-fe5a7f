// fp64_mul: IEEE-754 double-precision multiplier, y = a * b, one result per
// clock.
//
// Latency is LAT clocks (14, the figure quoted for a double multiplication on
// the target FPGA). The 53x53-bit significand product is normalised and
// rounded to nearest-even with a guard and a sticky bit; the exponent is the
// biased sum. The arithmetic is computed in the first stage and carried through
// LAT-1 more registers, which retiming spreads the logic over (on the FPGA the
// product maps onto DSP slices). Simplifications chosen for this design:
// subnormal inputs read as zero, subnormal results flush to signed zero, NaN
// results are the canonical quiet NaN.
module fp64_mul #(
  parameter int unsigned LAT = 14
) (
  input  logic        clk,
  input  logic [63:0] a,
  input  logic [63:0] b,
  output logic [63:0] y
);
  logic [63:0] r;

  always_comb begin
    logic         s, g, st, rnd;
    logic [10:0]  ea, eb;
    logic [105:0] p;
    logic [52:0]  mant;
    logic [53:0]  mant_r;
    int           e;
    s  = a[63] ^ b[63];
    ea = a[62:52];
    eb = b[62:52];
    p  = '0; mant = '0; mant_r = '0; g = 0; st = 0; rnd = 0; e = 0;
    r  = '0;
    if ((ea == 11'h7FF && a[51:0] != 0) || (eb == 11'h7FF && b[51:0] != 0)) begin
      r = 64'h7FF8_0000_0000_0000;
    end else if (ea == 11'h7FF || eb == 11'h7FF) begin
      r = (ea == 0 || eb == 0) ? 64'h7FF8_0000_0000_0000 : {s, 11'h7FF, 52'h0};
    end else if (ea == 0 || eb == 0) begin
      r = {s, 63'h0};
    end else begin
      p = {53'b0, 1'b1, a[51:0]} * {53'b0, 1'b1, b[51:0]};
      e = int'(ea) + int'(eb) - 1023;
      if (p[105]) begin
        mant = p[105:53];
        g    = p[52];
        st   = |p[51:0];
        e    = e + 1;
      end else begin
        mant = p[104:52];
        g    = p[51];
        st   = |p[50:0];
      end
      rnd    = g & (st | mant[0]);
      mant_r = {1'b0, mant} + {53'b0, rnd};
      if (mant_r[53]) begin
        mant_r = mant_r >> 1;
        e = e + 1;
      end
      if (e <= 0)         r = {s, 63'h0};
      else if (e >= 2047) r = {s, 11'h7FF, 52'h0};
      else                r = {s, e[10:0], mant_r[51:0]};
    end
  end

  pipe_delay #(.WIDTH(64), .DEPTH(LAT)) u_lat (.clk(clk), .d(r), .q(y));
endmodule
