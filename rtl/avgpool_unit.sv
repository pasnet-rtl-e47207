// avgpool_unit: one server's share of average pooling. Averaging is linear,
// so each server works on its own shares with no communication: it adds the
// window's elements and multiplies the sum by the plaintext 1/WINDOW.
//
// Lanes carry independent channels. The window's elements arrive one beat
// per cycle, in_first on the first and in_last on the last. After the last
// beat one more cycle scales the sum by `scale` (fixed point, TRUNC fraction
// bits, normally round(2^TRUNC / window)) and truncates share-locally, and
// out_valid pulses with res. The next window may start in the cycle after
// in_last. A K x K window therefore costs K*K + 1 cycles, within the published design's
// 2 x FI^2 x IC / PP estimate. That the operator is add-then-scale follows
// the published design; the streaming order and fixed-point format are this design's.
module avgpool_unit
  import pasnet_pkg::*;
#(
  parameter int unsigned LANES = PP,
  parameter int unsigned TRUNC = FRAC
) (
  input  logic              clk,
  input  logic              rst_n,
  input  role_e             role,   // which server this unit serves
  input  ring_t             scale,
  input  logic              in_valid,
  input  logic              in_first,
  input  logic              in_last,
  input  ring_t [LANES-1:0] x_sh,
  output logic              out_valid,
  output ring_t [LANES-1:0] res
);
  logic is1;
  assign is1 = (role == SERVER1);

  ring_t [LANES-1:0] acc;
  logic              fin;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      acc       <= '0;
      fin       <= 1'b0;
      out_valid <= 1'b0;
      res       <= '0;
    end else begin
      out_valid <= fin;
      if (fin)
        for (int l = 0; l < LANES; l++) res[l] <= trunc_share(acc[l] * scale, is1, TRUNC);
      fin <= in_valid && in_last;
      if (in_valid)
        for (int l = 0; l < LANES; l++) acc[l] <= (in_first ? ring_t'(0) : acc[l]) + x_sh[l];
    end
  end
endmodule
