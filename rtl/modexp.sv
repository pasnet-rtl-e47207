// modexp: modular exponentiation base^exp mod m for the OT flow, with m the
// prime both servers share.
//
// Right-to-left square-and-multiply: each cycle consumes one exponent bit,
// multiplying the result by the running power when the bit is 1 and
// squaring the running power. A 32-bit exponent therefore takes exactly
// EXP_W = 32 cycles, the factor 32 in the published design's cycle model of the OT
// steps. Each step uses two (a*b mod m) units. The algorithm and its
// one-bit-per-cycle rate are this design's choice behind that model.
//
// Interface: start (while !busy) latches base, exp and m; busy stays high
// for EXP_W cycles; done pulses for one cycle with result valid (and held
// until the next start). base must be below m.
module modexp
  import pasnet_pkg::*;
#(
  parameter int unsigned EXP_W = RING_W
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  start,
  input  ring_t base,
  input  logic [EXP_W-1:0] exp,
  input  ring_t m,
  output logic  busy,
  output logic  done,
  output ring_t result
);
  localparam int unsigned CW = $clog2(EXP_W + 1);

  ring_t            pw, m_q;
  logic [EXP_W-1:0] e_q;
  logic [CW-1:0]    cnt;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy   <= 1'b0;
      done   <= 1'b0;
      result <= '0;
      pw     <= '0;
      m_q    <= '0;
      e_q    <= '0;
      cnt    <= '0;
    end else begin
      done <= 1'b0;
      if (!busy) begin
        if (start) begin
          busy   <= 1'b1;
          pw     <= base;
          m_q    <= m;
          e_q    <= exp;
          result <= ring_t'(1) % m;
          cnt    <= CW'(EXP_W);
        end
      end else begin
        if (e_q[0]) result <= mulmod(result, pw, m_q);
        pw  <= mulmod(pw, pw, m_q);
        e_q <= e_q >> 1;
        cnt <= cnt - 1'b1;
        if (cnt == CW'(1)) begin
          busy <= 1'b0;
          done <= 1'b1;
        end
      end
    end
  end
endmodule
