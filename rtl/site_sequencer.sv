// site_sequencer: walks the lattice one site per clock and issues the
// memory addresses of the stencil of each site.
//
// The L^3 x T lattice is split along the time direction into NB sublattice
// blocks of T/NB time slices. Each block has its own memories holding its
// slices plus one halo slice on each side (copies of the neighbouring
// blocks' boundary), so a block's stencils never reach into another block's
// memory. Inside a block the local address of (x,y,z,tl) is
// ((tl*L + z)*L + y)*L + x with tl = 1..T/NB for the block's own slices and
// tl = 0, T/NB+1 for the halos. Blocks are processed one after the other, x
// running fastest. Neighbour addresses are computed on the fly with periodic
// wrap-around in x, y, z; in t the halo slices take the place of the wrap.
// Direction mu = 0,1,2,3 is x,y,z,t.
// Interface: a pulse on start begins a sweep; the outputs are registered and
// valid for V = L^3*T consecutive clocks; gsite is the site's global
// lexicographic index, the address of its result. block_start marks the first
// site of each block.
module site_sequencer #(
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
  input  logic                clk,
  input  logic                rst_n,
  input  logic                start,
  output logic                valid,
  output logic                block_start,
  output logic                last,
  output logic [BW-1:0]       bank,
  output logic [GW-1:0]       gsite,
  output logic [AW-1:0]       addr_c,
  output logic [3:0][AW-1:0]  addr_fwd,
  output logic [3:0][AW-1:0]  addr_bwd,
  output logic                busy
);
  localparam int unsigned CW = $clog2(L + 1);
  localparam int unsigned TW = $clog2(TB + 2);

  logic [CW-1:0] x, y, z;
  logic [TW-1:0] tl;
  logic [BW-1:0] b;
  logic [GW-1:0] g;
  logic          run;

  function automatic logic [AW-1:0] la(int xx, int yy, int zz, int tt);
    return AW'(((tt * int'(L) + zz) * int'(L) + yy) * int'(L) + xx);
  endfunction

  function automatic int wrap_up(int c);
    return (c == int'(L) - 1) ? 0 : c + 1;
  endfunction

  function automatic int wrap_dn(int c);
    return (c == 0) ? int'(L) - 1 : c - 1;
  endfunction

  logic site_last, blk_last;
  assign blk_last  = (int'(x) == int'(L) - 1) && (int'(y) == int'(L) - 1) &&
                     (int'(z) == int'(L) - 1) && (int'(tl) == int'(TB));
  assign site_last = blk_last && (int'(b) == int'(NB) - 1);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      run <= 1'b0;
      x <= '0; y <= '0; z <= '0; tl <= TW'(1); b <= '0; g <= '0;
      valid <= 1'b0; last <= 1'b0; block_start <= 1'b0;
    end else begin
      valid       <= run;
      last        <= run && site_last;
      block_start <= run && x == 0 && y == 0 && z == 0 && int'(tl) == 1;
      if (start && !run) begin
        run <= 1'b1;
        x <= '0; y <= '0; z <= '0; tl <= TW'(1); b <= '0; g <= '0;
      end else if (run) begin
        g <= g + 1'b1;
        if (int'(x) != int'(L) - 1) x <= x + 1'b1;
        else begin
          x <= '0;
          if (int'(y) != int'(L) - 1) y <= y + 1'b1;
          else begin
            y <= '0;
            if (int'(z) != int'(L) - 1) z <= z + 1'b1;
            else begin
              z <= '0;
              if (int'(tl) != int'(TB)) tl <= tl + 1'b1;
              else begin
                tl <= TW'(1);
                if (site_last) run <= 1'b0;
                else b <= b + 1'b1;
              end
            end
          end
        end
      end
    end
  end

  always_ff @(posedge clk) begin
    bank     <= b;
    gsite    <= g;
    addr_c   <= la(int'(x), int'(y), int'(z), int'(tl));
    addr_fwd <= {la(int'(x), int'(y), int'(z), int'(tl) + 1),
                 la(int'(x), int'(y), wrap_up(int'(z)), int'(tl)),
                 la(int'(x), wrap_up(int'(y)), int'(z), int'(tl)),
                 la(wrap_up(int'(x)), int'(y), int'(z), int'(tl))};
    addr_bwd <= {la(int'(x), int'(y), int'(z), int'(tl) - 1),
                 la(int'(x), int'(y), wrap_dn(int'(z)), int'(tl)),
                 la(int'(x), wrap_dn(int'(y)), int'(z), int'(tl)),
                 la(wrap_dn(int'(x)), int'(y), int'(z), int'(tl))};
  end

  assign busy = run;
endmodule
