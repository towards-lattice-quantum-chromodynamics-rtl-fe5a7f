// fp64_add: IEEE-754 double-precision adder, y = a + b, one result per clock.
//
// Latency is LAT clocks (14, the figure quoted for a double addition on the
// target FPGA): a and b sampled on one rising edge give y LAT edges later.
// Subtraction is done by the caller flipping the sign bit of b, which costs no
// logic. The sum is formed with the usual align / add / normalise / round
// steps, with a guard, a round and a sticky bit, rounding to nearest-even.
// The arithmetic is computed in the first stage and carried through the
// remaining LAT-1 registers; a synthesis tool with register retiming spreads
// the logic over them. Simplifications chosen for this design: subnormal
// inputs are read as zero and subnormal results flush to signed zero; NaN
// results are the canonical quiet NaN; an exact zero difference is +0.
module fp64_add #(
  parameter int unsigned LAT = 14
) (
  input  logic        clk,
  input  logic [63:0] a,
  input  logic [63:0] b,
  output logic [63:0] y
);
  logic [63:0] r;

  always_comb begin
    logic        sa, sb, sx, sy, eff_sub, sticky, g, rb, st, rnd;
    logic [10:0] ea, eb, ex, ey;
    logic [52:0] ma, mb, mx, my;
    logic [55:0] ax, by_al;
    logic [56:0] s;
    logic [52:0] mant;
    logic [53:0] mant_r;
    logic [11:0] d;
    int          lz;
    int          e;
    sa = a[63]; ea = a[62:52];
    sb = b[63]; eb = b[62:52];
    ma = {1'b1, a[51:0]};
    mb = {1'b1, b[51:0]};
    r  = '0;
    sticky = 1'b0;
    s = '0; lz = 0; e = 0; g = 0; rb = 0; st = 0; rnd = 0;
    mant = '0; mant_r = '0; ax = '0; by_al = '0; d = '0;
    sx = sa; sy = sb; ex = ea; ey = eb; mx = ma; my = mb; eff_sub = 1'b0;
    if ((ea == 11'h7FF && a[51:0] != 0) || (eb == 11'h7FF && b[51:0] != 0)) begin
      r = 64'h7FF8_0000_0000_0000;                   // NaN in
    end else if (ea == 11'h7FF && eb == 11'h7FF) begin
      r = (sa == sb) ? a : 64'h7FF8_0000_0000_0000;  // inf +- inf
    end else if (ea == 11'h7FF) begin
      r = a;
    end else if (eb == 11'h7FF) begin
      r = b;
    end else if (ea == 0 && eb == 0) begin
      r = {sa & sb, 63'h0};
    end else if (ea == 0) begin
      r = b;
    end else if (eb == 0) begin
      r = a;
    end else begin
      // x is the operand of larger magnitude
      if ({ea, a[51:0]} < {eb, b[51:0]}) begin
        sx = sb; ex = eb; mx = mb; sy = sa; ey = ea; my = ma;
      end
      eff_sub = sx ^ sy;
      d  = {1'b0, ex} - {1'b0, ey};
      ax = {mx, 3'b000};
      if (d >= 56) begin
        by_al  = '0;
        sticky = 1'b1;
      end else begin
        by_al  = {my, 3'b000} >> d;
        for (int i = 0; i < 56; i++)
          if (i < int'(d) && ((i >= 3) ? my[i-3] : 1'b0)) sticky = 1'b1;
      end
      by_al[0] = by_al[0] | sticky;
      s = eff_sub ? ({1'b0, ax} - {1'b0, by_al}) : ({1'b0, ax} + {1'b0, by_al});
      e = int'(ex);
      if (s == 0) begin
        r = 64'h0;
      end else begin
        if (s[56]) begin
          s = {1'b0, s[56:2], s[1] | s[0]};
          e = e + 1;
        end else begin
          lz = 0;
          for (int i = 55; i >= 0; i--) begin
            if (s[i]) break;
            lz++;
          end
          s = s << lz;
          e = e - lz;
        end
        mant = s[55:3];
        g    = s[2];
        rb   = s[1];
        st   = s[0];
        rnd  = g & (rb | st | mant[0]);
        mant_r = {1'b0, mant} + {53'b0, rnd};
        if (mant_r[53]) begin
          mant_r = mant_r >> 1;
          e = e + 1;
        end
        if (e <= 0)         r = {sx, 63'h0};
        else if (e >= 2047) r = {sx, 11'h7FF, 52'h0};
        else                r = {sx, e[10:0], mant_r[51:0]};
      end
    end
  end

  pipe_delay #(.WIDTH(64), .DEPTH(LAT)) u_lat (.clk(clk), .d(r), .q(y));
endmodule
