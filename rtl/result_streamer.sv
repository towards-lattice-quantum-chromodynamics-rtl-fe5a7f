// result_streamer: sends the output spinor field back to the host.
//
// Reads the result store site by site in lexicographic order (synchronous
// read, one clock) and emits the 12 complex components of each site
// (index 3*spin + colour) as two parallel sequential channels, real parts on
// m_re and imaginary parts on m_im, under one valid/ready handshake. The
// host may hold m_ready low at any time; the streamer then waits.
// A pulse on start begins; done pulses once after the last component of the
// last of V sites has been accepted.
module result_streamer
  import lqcd_pkg::*;
#(
  parameter int unsigned V  = 1728,
  parameter int unsigned GW = $clog2(V)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  output logic [GW-1:0] rd_addr,
  input  spinor_t       rd_data,
  output logic          m_valid,
  input  logic          m_ready,
  output f64_t          m_re,
  output f64_t          m_im,
  output logic          done
);
  typedef enum logic [1:0] {S_IDLE, S_READ, S_WAIT, S_SEND} state_e;
  state_e        state;
  logic [GW-1:0] site;
  logic [3:0]    j;
  spinor_t       buffer;

  assign rd_addr = site;
  assign m_valid = (state == S_SEND);
  assign m_re    = buffer[j / 3][j % 3].re;
  assign m_im    = buffer[j / 3][j % 3].im;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state <= S_IDLE; site <= '0; j <= '0; done <= 1'b0;
    end else begin
      done <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          site  <= '0;
          state <= S_READ;
        end
        S_READ: state <= S_WAIT;
        S_WAIT: begin
          buffer <= rd_data;
          j      <= '0;
          state  <= S_SEND;
        end
        default: if (m_ready) begin
          if (j != 4'd11) begin
            j <= j + 1'b1;
          end else if (int'(site) == int'(V) - 1) begin
            state <= S_IDLE;
            done  <= 1'b1;
          end else begin
            site  <= site + 1'b1;
            state <= S_READ;
          end
        end
      endcase
    end
  end

  // a beat offered to the host stays unchanged until it is taken
  a_hold: assert property (@(posedge clk) disable iff (!rst_n)
                           m_valid && !m_ready |=> m_valid && $stable(m_re) && $stable(m_im));
endmodule
