// tb_seq_loader: streams the doubles of a 2^3 x 3 field (9 per site) with
// random gaps into the loader, twice. Each site word written must carry the
// site's coordinates in lexicographic order and its 9 doubles in stream
// order; done must rise after the last site and s_ready must then drop.
module tb_seq_loader;
  localparam int L = 2, T = 3, W = 9, V = L * L * L * T;
  logic clk = 1'b0, rst_n = 1'b0, start = 1'b0;
  logic s_valid, s_ready, wr_en, done;
  logic [63:0] s_data;
  logic [1:0] wr_x, wr_y, wr_z;
  logic [1:0] wr_t;
  logic [W-1:0][63:0] wr_data;
  logic [63:0] stream [V * W];
  int checks = 0, failures = 0, nw = 0, idx = 0;

  seq_loader #(.L(L), .T(T), .WORDS(W)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) begin
    if (s_valid && s_ready) idx++;
    if (rst_n && wr_en) begin
      int g;
      g = nw;
      checks++;
      if (int'(wr_x) != g % L || int'(wr_y) != (g / L) % L || int'(wr_z) != (g / (L * L)) % L ||
          int'(wr_t) != g / (L * L * L)) begin
        failures++;
        $display("word %0d: coordinates %0d %0d %0d %0d", g, wr_x, wr_y, wr_z, wr_t);
      end
      for (int i = 0; i < W; i++) begin
        checks++;
        if (wr_data[i] !== stream[g * W + i]) failures++;
      end
      nw++;
    end
  end

  initial begin
    s_valid = 0; s_data = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int pass = 0; pass < 2; pass++) begin
      for (int i = 0; i < V * W; i++) stream[i] = {$urandom, $urandom};
      nw = 0; idx = 0;
      @(negedge clk); start = 1;
      @(negedge clk); start = 0;
      while (idx < V * W) begin
        s_valid = ($urandom_range(2, 0) != 0);
        s_data  = stream[idx];
        @(negedge clk);
      end
      s_valid = 1; s_data = 64'hDEAD;
      repeat (3) @(negedge clk);
      s_valid = 0;
      checks++;
      if (!done || s_ready || nw != V) begin
        failures++;
        $display("pass %0d: done %0d ready %0d words %0d", pass, done, s_ready, nw);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
