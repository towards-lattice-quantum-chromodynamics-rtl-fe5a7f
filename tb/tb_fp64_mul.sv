// tb_fp64_mul: self-checking test of the double-precision multiplier.
// Drives one random operand pair per clock (wide exponent spread, mixed signs,
// zeros and infinities) and compares every
// result bit-for-bit with the simulator's own IEEE double multiplication, taken
// exactly 14 clocks after the operands were applied, which also checks the
// latency.
module tb_fp64_mul;
  localparam int LAT = 14;
  localparam int N   = 4000;
  logic clk = 1'b0;
  logic [63:0] a, b, y;
  logic [63:0] exp_q [N + LAT + 1];
  int checks = 0, failures = 0;

  fp64_mul #(.LAT(LAT)) dut (.clk(clk), .a(a), .b(b), .y(y));

  always #5 clk = ~clk;

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [63:0] rnd_double(int spread);
    logic [63:0] v;
    int e;
    e = 1023 + $signed($urandom_range(2 * spread, 0)) - spread;
    v = {1'($urandom), 11'(e), 20'($urandom), 32'($urandom)};
    return v;
  endfunction

  initial begin
    a = '0; b = '0;
    for (int k = 0; k < N + LAT; k++) begin
      if (k < N) begin
        unique case (k % 8)
          0, 1, 2: begin a = rnd_double(60); b = rnd_double(60); end
          3: begin a = rnd_double(3); b = rnd_double(3); end
          4: begin a = rnd_double(20); b = {~a[63], a[62:4], 4'($urandom)}; end
          5: begin a = rnd_double(20); b = {~a[63], a[62:0]}; end
          6: begin a = rnd_double(20); b = (k % 16 == 6) ? 64'h0 : 64'h7FF0_0000_0000_0000; end
          default: begin a = rnd_double(2); b = rnd_double(2); b[62:52] = a[62:52]; end
        endcase
        exp_q[k] = $realtobits($bitstoreal(a) * $bitstoreal(b));
      end
      @(posedge clk);
      #1;
      if (k >= LAT - 1 && k - (LAT - 1) < N) begin
        checks++;
        if (y !== exp_q[k - (LAT - 1)]) begin
          failures++;
          if (failures < 10)
            $display("mismatch #%0d: got %h expected %h", k - (LAT - 1), y, exp_q[k - (LAT - 1)]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
