// tb_result_streamer: a behavioural one-clock-latency memory of 20 random
// spinors is read out by the streamer while the receiver throttles at random.
// The beats must come out as site after site, 12 components each in the
// order 3*spin + colour, real and imaginary parts on their two channels;
// done must pulse once after the last beat.
module tb_result_streamer;
  import lqcd_pkg::*;
  import lqcd_ref_pkg::*;
  localparam int V = 20, GW = 5;
  logic clk = 1'b0, rst_n = 1'b0, start = 1'b0;
  logic [GW-1:0] rd_addr;
  spinor_t rd_data;
  logic m_valid, m_ready, done;
  f64_t m_re, m_im;
  spinor_t mem [V];
  int checks = 0, failures = 0, nb = 0, ndone = 0, nstall = 0;

  result_streamer #(.V(V)) dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) rd_data <= mem[rd_addr];

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(negedge clk) m_ready = ($urandom_range(2, 0) != 0);

  always @(posedge clk) if (rst_n) begin
    if (done) ndone++;
    if (m_valid && !m_ready) nstall++;
    if (m_valid && m_ready) begin
      int g, j;
      g = nb / 12; j = nb % 12;
      checks++;
      if (g >= V || m_re !== mem[g][j / 3][j % 3].re || m_im !== mem[g][j / 3][j % 3].im) begin
        failures++;
        if (failures < 8) $display("beat %0d mismatch", nb);
      end
      nb++;
    end
  end

  initial begin
    for (int g = 0; g < V; g++) mem[g] = rnd_spinor();
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk); start = 1;
    @(negedge clk); start = 0;
    repeat (V * 12 * 4) @(negedge clk);
    checks++;
    if (nb != 12 * V || ndone != 1 || nstall == 0) begin
      failures++;
      $display("beats %0d, done pulses %0d, stalls %0d", nb, ndone, nstall);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
