// tb_spinor_mem: checks the spinor store with nine read ports. Random real
// and imaginary writes are mirrored in a shadow array; every clock all nine
// ports read random addresses and the data one clock later must match the
// shadow contents from before that clock's write (read-before-write).
module tb_spinor_mem;
  import lqcd_pkg::*;
  localparam int DEPTH = 48, AW = 6, NRD = 9;
  logic clk = 1'b0;
  logic we_re, we_im;
  logic [AW-1:0] waddr_re, waddr_im;
  logic [11:0][63:0] wdata_re, wdata_im;
  logic [NRD-1:0][AW-1:0] raddr;
  spinor_t [NRD-1:0] rdata;
  logic [11:0][63:0] sh_re [DEPTH];
  logic [11:0][63:0] sh_im [DEPTH];
  int checks = 0, failures = 0;

  spinor_mem #(.DEPTH(DEPTH), .NRD(NRD)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [11:0][63:0] rnd_word();
    logic [11:0][63:0] w;
    for (int i = 0; i < 12; i++) w[i] = {$urandom, $urandom};
    return w;
  endfunction

  task automatic cmp(spinor_t got, int a);
    checks++;
    for (int i = 0; i < 12; i++)
      if (got[i / 3][i % 3].re !== sh_re[a][i] || got[i / 3][i % 3].im !== sh_im[a][i]) begin
        failures++;
        if (failures < 8) $display("address %0d component %0d mismatch", a, i);
        break;
      end
  endtask

  initial begin
    we_re = 0; we_im = 0; waddr_re = '0; waddr_im = '0; wdata_re = '0; wdata_im = '0; raddr = '0;
    for (int a = 0; a < DEPTH; a++) begin
      @(negedge clk);
      we_re = 1; we_im = 1; waddr_re = AW'(a); waddr_im = AW'(a);
      wdata_re = rnd_word(); wdata_im = rnd_word();
      sh_re[a] = wdata_re; sh_im[a] = wdata_im;
    end
    for (int k = 0; k < 2000; k++) begin
      int ra [NRD];
      @(negedge clk);
      we_re = ($urandom_range(1, 0) == 1); we_im = ($urandom_range(1, 0) == 1);
      waddr_re = AW'($urandom_range(DEPTH - 1, 0)); waddr_im = AW'($urandom_range(DEPTH - 1, 0));
      wdata_re = rnd_word(); wdata_im = rnd_word();
      for (int p = 0; p < NRD; p++) begin
        ra[p] = $urandom_range(DEPTH - 1, 0);
        raddr[p] = AW'(ra[p]);
      end
      @(posedge clk);
      #1;
      for (int p = 0; p < NRD; p++) cmp(rdata[p], ra[p]);
      if (we_re) sh_re[waddr_re] = wdata_re;
      if (we_im) sh_im[waddr_im] = wdata_im;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
