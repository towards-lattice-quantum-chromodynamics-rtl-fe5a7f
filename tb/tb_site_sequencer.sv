// tb_site_sequencer: checks the site walk on a 3^3 x 4 lattice in two
// blocks. After start the sequencer must issue V consecutive valid sites,
// each global site exactly once and in lexicographic order. Every address is
// decoded back into block-local coordinates (x,y,z,tl) and compared with the
// expected position of the site and of its eight neighbours: periodic
// wrap-around in x, y, z and the halo slices tl = 0 and tl = T/2+1 in t.
// block_start must mark exactly the first site of each block.
module tb_site_sequencer;
  localparam int L = 3, T = 4, NB = 2, TB = T / NB;
  localparam int V = L * L * L * T, DEPTH = L * L * L * (TB + 2);
  localparam int AW = $clog2(DEPTH), GW = $clog2(V);
  logic clk = 1'b0, rst_n = 1'b0, start = 1'b0;
  logic valid, block_start, last, busy;
  logic [0:0] bank;
  logic [GW-1:0] gsite;
  logic [AW-1:0] addr_c;
  logic [3:0][AW-1:0] addr_fwd, addr_bwd;
  int checks = 0, failures = 0;

  site_sequencer #(.L(L), .T(T), .NB(NB)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic expect_addr(int got, int x, int y, int z, int tl, string what);
    int e;
    e = ((tl * L + z) * L + y) * L + x;
    checks++;
    if (got != e) begin
      failures++;
      if (failures < 10) $display("%s: address %0d expected %0d", what, got, e);
    end
  endtask

  initial begin
    int n, nbs;
    n = 0; nbs = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk); start = 1;
    @(negedge clk); start = 0;
    while (n < V + 5) begin
      @(posedge clk); #1;
      if (valid) begin
        int x, y, z, t, b, tl;
        x = n % L; y = (n / L) % L; z = (n / (L * L)) % L; t = n / (L * L * L);
        b = t / TB; tl = t % TB + 1;
        checks++;
        if (int'(gsite) != n || int'(bank) != b) begin
          failures++;
          $display("site %0d: gsite %0d bank %0d", n, gsite, bank);
        end
        if (block_start) nbs++;
        checks++;
        if (block_start != (x == 0 && y == 0 && z == 0 && tl == 1)) failures++;
        checks++;
        if (last != (n == V - 1)) failures++;
        expect_addr(int'(addr_c), x, y, z, tl, "centre");
        expect_addr(int'(addr_fwd[0]), (x + 1) % L, y, z, tl, "x+1");
        expect_addr(int'(addr_fwd[1]), x, (y + 1) % L, z, tl, "y+1");
        expect_addr(int'(addr_fwd[2]), x, y, (z + 1) % L, tl, "z+1");
        expect_addr(int'(addr_fwd[3]), x, y, z, tl + 1, "t+1");
        expect_addr(int'(addr_bwd[0]), (x + L - 1) % L, y, z, tl, "x-1");
        expect_addr(int'(addr_bwd[1]), x, (y + L - 1) % L, z, tl, "y-1");
        expect_addr(int'(addr_bwd[2]), x, y, (z + L - 1) % L, tl, "z-1");
        expect_addr(int'(addr_bwd[3]), x, y, z, tl - 1, "t-1");
        n++;
      end else if (n > 0) begin
        break;
      end
    end
    checks++;
    if (n != V || nbs != NB) begin
      failures++;
      $display("issued %0d sites (expected %0d), %0d block starts", n, V, nbs);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
