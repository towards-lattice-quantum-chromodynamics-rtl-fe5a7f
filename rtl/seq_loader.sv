// seq_loader: receiver of one sequential input channel.
//
// The host streams each field array (for example the real parts of the links
// U_x, or the imaginary parts of psi) as consecutive doubles, site after
// site in lexicographic order (x fastest, then y, z, t), WORDS doubles per
// site. This block gathers the WORDS doubles of a site into one wide word and
// emits it with the site's coordinates for the memories to store.
// Interface: a pulse on start arms the channel; the stream uses a
// valid/ready handshake (s_ready high while armed and not yet full); wr_en
// pulses one clock after the last double of each site; done rises after the
// last of the V = L^3*T sites and stays high until the next start.
module seq_loader #(
  parameter int unsigned L     = 6,
  parameter int unsigned T     = 8,
  parameter int unsigned WORDS = 9,
  parameter int unsigned CW    = $clog2(L + 1),
  parameter int unsigned TW    = $clog2(T + 1)
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   start,
  input  logic                   s_valid,
  input  logic [63:0]            s_data,
  output logic                   s_ready,
  output logic                   wr_en,
  output logic [CW-1:0]          wr_x,
  output logic [CW-1:0]          wr_y,
  output logic [CW-1:0]          wr_z,
  output logic [TW-1:0]          wr_t,
  output logic [WORDS-1:0][63:0] wr_data,
  output logic                   done
);
  localparam int unsigned WW = $clog2(WORDS + 1);

  logic          armed;
  logic [WW-1:0] w;
  logic [CW-1:0] x, y, z;
  logic [TW-1:0] t;
  logic [WORDS-1:0][63:0] buffer;

  assign s_ready = armed;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      armed <= 1'b0; done <= 1'b0; wr_en <= 1'b0;
      w <= '0; x <= '0; y <= '0; z <= '0; t <= '0;
    end else begin
      wr_en <= 1'b0;
      if (start) begin
        armed <= 1'b1; done <= 1'b0;
        w <= '0; x <= '0; y <= '0; z <= '0; t <= '0;
      end else if (armed && s_valid) begin
        buffer[w] <= s_data;
        if (int'(w) != int'(WORDS) - 1) begin
          w <= w + 1'b1;
        end else begin
          w <= '0;
          wr_en <= 1'b1;
          wr_x <= x; wr_y <= y; wr_z <= z; wr_t <= t;
          if (int'(x) != int'(L) - 1) x <= x + 1'b1;
          else begin
            x <= '0;
            if (int'(y) != int'(L) - 1) y <= y + 1'b1;
            else begin
              y <= '0;
              if (int'(z) != int'(L) - 1) z <= z + 1'b1;
              else begin
                z <= '0;
                if (int'(t) != int'(T) - 1) t <= t + 1'b1;
                else begin
                  t <= '0;
                  armed <= 1'b0;
                  done  <= 1'b1;
                end
              end
            end
          end
        end
      end
    end
  end

  // the gathered site word; complete while wr_en is high
  always_comb begin
    wr_data = buffer;
  end
endmodule
