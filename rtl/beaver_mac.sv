// beaver_mac: one server's share of a secret-shared product (2PC-Conv,
// matrix multiplication) computed with a Beaver triple.
//
// With triple Z = A (x) B and the recovered public masks E = X - A and
// F = Y - B, server i forms its result share
//     R_i = -i * E (x) F + X_i (x) F + E (x) Y_i + Z_i
// and R_0 + R_1 = X (x) Y in the ring. For a convolution or matrix product
// every output element is a dot product; this unit has LANES output
// elements in flight (one per lane, e.g. one per output channel) and
// accumulates one dot-product term per lane at a time.
//
// Each lane owns a single ring multiplier and spends three cycles per term:
//   phase 0  acc <= (first ? Z_i : acc) + X_i * F
//   phase 1  acc <= acc + E * Y_i
//   phase 2  acc <= acc - i * E * F
// which is the 3 x K x K x FO^2 x IC x OC / PP cycle count of the published design's
// latency model for the convolution. The equation and the three-product
// schedule follow the published design; the streaming interface, the lane mapping and
// the output truncation are this design's choices.
//
// Interface: a term is taken when in_valid && in_ready; in_ready is high only
// in phase 0, so terms enter every third cycle. in_first marks the first term
// of a dot product (Z_i is taken with it), in_last the last one. Three cycles
// after the last term is taken, out_valid pulses for one cycle with
// res = trunc(acc, TRUNC) (TRUNC = FRAC removes the extra fraction bits of a
// fixed-point product; TRUNC = 0 keeps the plain ring product).
module beaver_mac
  import pasnet_pkg::*;
#(
  parameter int unsigned LANES = PP,
  parameter int unsigned TRUNC = FRAC
) (
  input  logic              clk,
  input  logic              rst_n,
  input  role_e             role,   // which server this unit serves
  input  logic              in_valid,
  output logic              in_ready,
  input  logic              in_first,
  input  logic              in_last,
  input  ring_t [LANES-1:0] x_sh,   // X_i
  input  ring_t [LANES-1:0] y_sh,   // Y_i
  input  ring_t [LANES-1:0] e_pub,  // E (recovered)
  input  ring_t [LANES-1:0] f_pub,  // F (recovered)
  input  ring_t [LANES-1:0] z_sh,   // Z_i, used with in_first
  output logic              out_valid,
  output ring_t [LANES-1:0] res
);
  logic [1:0]        phase;
  logic              last_q;
  ring_t [LANES-1:0] y_q, e_q, f_q, acc;
  ring_t [LANES-1:0] prod, addend;

  assign in_ready = (phase == 2'd0);

  // One multiplier per lane, its operands selected by the phase.
  always_comb begin
    for (int l = 0; l < LANES; l++) begin
      unique case (phase)
        2'd0:    prod[l] = x_sh[l] * f_pub[l];
        2'd1:    prod[l] = e_q[l] * y_q[l];
        default: prod[l] = e_q[l] * f_q[l];
      endcase
      addend[l] = (phase == 2'd0 && in_first) ? z_sh[l] : acc[l];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      phase     <= 2'd0;
      last_q    <= 1'b0;
      out_valid <= 1'b0;
      y_q       <= '0;
      e_q       <= '0;
      f_q       <= '0;
      acc       <= '0;
      res       <= '0;
    end else begin
      out_valid <= 1'b0;
      unique case (phase)
        2'd0: if (in_valid) begin
          y_q    <= y_sh;
          e_q    <= e_pub;
          f_q    <= f_pub;
          last_q <= in_last;
          for (int l = 0; l < LANES; l++) acc[l] <= addend[l] + prod[l];
          phase  <= 2'd1;
        end
        2'd1: begin
          for (int l = 0; l < LANES; l++) acc[l] <= acc[l] + prod[l];
          phase <= 2'd2;
        end
        default: begin
          for (int l = 0; l < LANES; l++) begin
            if (role == SERVER1) begin
              acc[l] <= acc[l] - prod[l];
              if (last_q) res[l] <= trunc_share(acc[l] - prod[l], 1'b1, TRUNC);
            end else if (last_q) begin
              res[l] <= trunc_share(acc[l], 1'b0, TRUNC);
            end
          end
          out_valid <= last_q;
          phase     <= 2'd0;
        end
      endcase
    end
  end
endmodule
