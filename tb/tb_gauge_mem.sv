// tb_gauge_mem: checks the duplicated link store. Random real and imaginary
// writes (independent addresses, sometimes in the same clock) are mirrored in
// a shadow array; every clock both read ports read random written addresses
// and the data one clock later must match the shadow, which checks that both
// copies receive every write and that the ports are independent.
module tb_gauge_mem;
  import lqcd_pkg::*;
  localparam int DEPTH = 64, AW = 6;
  logic clk = 1'b0;
  logic we_re, we_im;
  logic [AW-1:0] waddr_re, waddr_im, raddr_fwd, raddr_bwd;
  logic [8:0][63:0] wdata_re, wdata_im;
  su3_mat_t rdata_fwd, rdata_bwd;
  logic [8:0][63:0] sh_re [DEPTH];
  logic [8:0][63:0] sh_im [DEPTH];
  int checks = 0, failures = 0;

  gauge_mem #(.DEPTH(DEPTH)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [8:0][63:0] rnd_word();
    logic [8:0][63:0] w;
    for (int i = 0; i < 9; i++) w[i] = {$urandom, $urandom};
    return w;
  endfunction

  task automatic cmp(su3_mat_t got, int a);
    checks++;
    for (int i = 0; i < 9; i++)
      if (got[i].re !== sh_re[a][i] || got[i].im !== sh_im[a][i]) begin
        failures++;
        if (failures < 8) $display("address %0d entry %0d mismatch", a, i);
        break;
      end
  endtask

  initial begin
    int pf, pb;
    we_re = 0; we_im = 0; waddr_re = '0; waddr_im = '0; wdata_re = '0; wdata_im = '0;
    raddr_fwd = '0; raddr_bwd = '0;
    // fill everything once
    for (int a = 0; a < DEPTH; a++) begin
      @(negedge clk);
      we_re = 1; we_im = 1; waddr_re = AW'(a); waddr_im = AW'(DEPTH - 1 - a);
      wdata_re = rnd_word(); wdata_im = rnd_word();
      sh_re[a] = wdata_re; sh_im[DEPTH - 1 - a] = wdata_im;
    end
    @(negedge clk); we_re = 0; we_im = 0;
    for (int k = 0; k < 3000; k++) begin
      @(negedge clk);
      // writes land at the coming edge, after the reads of this clock
      we_re = ($urandom_range(1, 0) == 1); we_im = ($urandom_range(1, 0) == 1);
      waddr_re = AW'($urandom_range(DEPTH - 1, 0)); waddr_im = AW'($urandom_range(DEPTH - 1, 0));
      wdata_re = rnd_word(); wdata_im = rnd_word();
      raddr_fwd = AW'($urandom_range(DEPTH - 1, 0)); raddr_bwd = AW'($urandom_range(DEPTH - 1, 0));
      pf = int'(raddr_fwd); pb = int'(raddr_bwd);
      @(posedge clk);
      #1;
      // expected values are the contents before this edge's writes
      cmp(rdata_fwd, pf); cmp(rdata_bwd, pb);
      if (we_re) sh_re[waddr_re] = wdata_re;
      if (we_im) sh_im[waddr_im] = wdata_im;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
