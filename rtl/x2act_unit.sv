// x2act_unit: one server's share of the trainable polynomial activation
//     delta(x) = w1' * x^2 + w2 * x + b,   w1' = c / sqrt(N_x) * w1,
// evaluated on a secret-shared input with a Beaver pair (Z = A * A).
//
// Step 1, the ciphertext square: with the recovered mask E = X - A,
//     S_i = Z_i + 2 * E * A_i + [i == 0] * E * E
// so S_0 + S_1 = X^2. (The published equation prints the E*E term in both servers'
// equations, which would count it twice; here only server 0 adds it, the
// same way the -i * E (x) F term of the multiplication is added by one server.)
// Step 2, two ciphertext-plaintext products and the bias:
//     Y_i = w1' * S_i + w2 * X_i + [i == 0] * b.
// Values are fixed point with TRUNC fraction bits: Z_i comes at 2*TRUNC
// fraction bits, S_i and Y_i are truncated share-locally back to TRUNC bits.
// w1' (already scaled by c/sqrt(N_x)), w2 and b are plaintext coefficients
// held by both servers.
//
// Each lane has two multipliers and takes two cycles per element, the
// 2 x FI^2 x IC / PP cycles of the published design's latency model. in_ready is high
// every other cycle; out_valid pulses two cycles after an element is taken.
// The equations and the two-cycle rate follow the published design; the fixed-point
// format and truncation are this design's choices.
module x2act_unit
  import pasnet_pkg::*;
#(
  parameter int unsigned LANES = PP,
  parameter int unsigned TRUNC = FRAC
) (
  input  logic              clk,
  input  logic              rst_n,
  input  role_e             role,   // which server this unit serves
  input  ring_t             w1,     // c/sqrt(N_x) * w1, fixed point
  input  ring_t             w2,
  input  ring_t             b,
  input  logic              in_valid,
  output logic              in_ready,
  input  ring_t [LANES-1:0] x_sh,   // X_i
  input  ring_t [LANES-1:0] a_sh,   // A_i of the Beaver pair
  input  ring_t [LANES-1:0] e_pub,  // E = X - A (recovered)
  input  ring_t [LANES-1:0] z_sh,   // Z_i = share of A*A
  output logic              out_valid,
  output ring_t [LANES-1:0] res
);
  logic is1;
  assign is1 = (role == SERVER1);

  logic              busy;
  ring_t [LANES-1:0] x_q, sq_t;

  assign in_ready = !busy;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy      <= 1'b0;
      out_valid <= 1'b0;
      x_q       <= '0;
      sq_t      <= '0;
      res       <= '0;
    end else begin
      out_valid <= 1'b0;
      if (!busy) begin
        if (in_valid) begin
          for (int l = 0; l < LANES; l++) begin
            x_q[l]  <= x_sh[l];
            sq_t[l] <= trunc_share(z_sh[l] + 2 * e_pub[l] * a_sh[l]
                                   + (is1 ? ring_t'(0) : e_pub[l] * e_pub[l]),
                                   is1, TRUNC);
          end
          busy <= 1'b1;
        end
      end else begin
        for (int l = 0; l < LANES; l++)
          res[l] <= trunc_share(w1 * sq_t[l] + w2 * x_q[l], is1, TRUNC)
                    + (is1 ? ring_t'(0) : b);
        out_valid <= 1'b1;
        busy      <= 1'b0;
      end
    end
  end
endmodule
