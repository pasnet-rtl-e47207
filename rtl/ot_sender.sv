// ot_sender: server 0's side of the OT-based secure comparison ("OT flow").
//
// The two servers hold additive shares d0 + d1 = d (mod 2^32) and want the
// sign of d. Server 0 compares its M0 = d0[30:0] with server 1's
// M1 = (2^31 - 1) - d1[30:0]: M0 > M1 is exactly the carry out of
// d0[30:0] + d1[30:0], so sign(d) = d0[31] ^ d1[31] ^ (M0 > M1). The
// comparison runs digit by digit, each 32-bit value split into U = 16 parts
// of 2 bits, through one 1-out-of-4 oblivious transfer per part.
//
// Protocol, server 0's steps (the numbers are the steps of the flow):
//   (1) session setup: draw rd, compute S = g^rd mod m and send S; also
//       T = S^rd and T^-1 = T^(m-2) (m prime), and T^-j for j = 0..3.
//   (3) per comparison: receive R_u for u = 0..15, compute K_u = R_u^rd and
//       the four keys key0(u,j) = K_u * T^-j mod m; send the 4 x 16 matrix
//       Enc(u,j) = entry(u,j) XOR key0(u,j), where entry(u,j) holds
//       {d0[31], M0_u > j, M0_u == j} in bits 2..0.
//   (5) receive T_mask (bit 0 of one word) and hand it out.
// Server 1 built R_u = S^c_u * g^b_u for its part c_u, so key0(u,c_u) =
// g^(rd*b_u) = S^b_u, the only key it can form. The step structure, the
// 2-bit parts, the 4 x 16 matrix, the XOR encryption and the T_mask reply
// follow the published design; the published design's key equations are not self-consistent, so
// the exact key derivation above (a Bellare-Micali / "simplest OT" style
// 1-of-4 OT) is this design's choice. Keys are used without hashing and
// T_mask is revealed to both servers, as in the published design's flow.
//
// Link: 32-bit words, valid/ready in each direction, one word per handshake.
// Timing: setup costs 3 exponentiations (3 x 33 cycles); a comparison costs
// 16 exponentiations plus 64 words out, about 16 x 38 cycles beyond the link.
module ot_sender
  import pasnet_pkg::*;
#(
  parameter logic [31:0] SEED = 32'h1234_5679
) (
  input  logic  clk,
  input  logic  rst_n,
  input  ring_t g,            // shared generator
  input  ring_t m,            // shared prime modulus
  input  logic  sess_start,   // step 1: new session key
  output logic  sess_ready,   // session set up, comparisons accepted
  input  logic  cmp_valid,
  output logic  cmp_ready,
  input  ring_t d_sh,         // this server's share of the value compared with 0
  output logic  mask_valid,
  output logic  mask,         // T_mask: 1 when d >= 0
  output logic  tx_valid,
  input  logic  tx_ready,
  output ring_t tx_data,
  input  logic  rx_valid,
  output logic  rx_ready,
  input  ring_t rx_data
);
  typedef enum logic [3:0] {
    ST_IDLE, ST_S_GO, ST_S_WAIT, ST_S_SEND, ST_T_GO, ST_T_WAIT, ST_TI_GO,
    ST_TI_WAIT, ST_POW, ST_READY, ST_RX_R, ST_K_GO, ST_K_WAIT, ST_ENC,
    ST_RX_MASK
  } state_e;

  state_e           st;
  ring_t            rd, s_val, t_inv, k_val;
  ring_t [OT_L-1:0] tipow;
  ring_t [OT_U-1:0] r_list;
  ring_t            d_q;
  logic [3:0]       u;
  logic [1:0]       j;
  ring_t            rnd;
  logic             me_start, me_busy, me_done;
  ring_t            me_base, me_exp, me_res;

  prng32 #(.SEED(SEED)) u_rng (.clk, .rst_n, .en(st == ST_IDLE && sess_start), .rnd);

  modexp u_exp (
    .clk, .rst_n, .start(me_start), .base(me_base), .exp(me_exp), .m,
    .busy(me_busy), .done(me_done), .result(me_res)
  );

  // Operands of the single exponentiation unit, by state.
  always_comb begin
    me_start = 1'b0;
    me_base  = g;
    me_exp   = rd;
    unique case (st)
      ST_S_GO:  begin me_start = 1'b1; me_base = g;         me_exp = rd;            end
      ST_T_GO:  begin me_start = 1'b1; me_base = s_val;     me_exp = rd;            end
      ST_TI_GO: begin me_start = 1'b1; me_base = me_res;    me_exp = m - ring_t'(2); end
      ST_K_GO:  begin me_start = 1'b1; me_base = r_list[u]; me_exp = rd;            end
      default: ;
    endcase
  end

  // Comparison entry for part u against index j.
  logic [1:0] m0_part;
  ring_t      entry, key0;
  always_comb begin
    m0_part = d_q[2*u +: 2];
    if (u == 4'(OT_U - 1)) m0_part[1] = 1'b0;   // bit 31 is not part of M0
    entry = {29'd0, d_q[RING_W-1], m0_part > j, m0_part == j};
    key0  = mulmod(k_val, tipow[j], m);
  end

  assign sess_ready = (st == ST_READY);
  assign cmp_ready  = (st == ST_READY);
  assign tx_valid   = (st == ST_S_SEND) || (st == ST_ENC);
  assign tx_data    = (st == ST_S_SEND) ? s_val : (entry ^ key0);
  assign rx_ready   = (st == ST_RX_R) || (st == ST_RX_MASK);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st         <= ST_IDLE;
      rd         <= '0;
      s_val      <= '0;
      t_inv      <= '0;
      k_val      <= '0;
      tipow      <= '0;
      r_list     <= '0;
      d_q        <= '0;
      u          <= '0;
      j          <= '0;
      mask_valid <= 1'b0;
      mask       <= 1'b0;
    end else begin
      mask_valid <= 1'b0;
      unique case (st)
        ST_IDLE:    if (sess_start) begin rd <= rnd; st <= ST_S_GO; end
        ST_S_GO:    st <= ST_S_WAIT;
        ST_S_WAIT:  if (me_done) begin s_val <= me_res; st <= ST_S_SEND; end
        ST_S_SEND:  if (tx_ready) st <= ST_T_GO;
        ST_T_GO:    st <= ST_T_WAIT;
        ST_T_WAIT:  if (me_done) st <= ST_TI_GO;        // me_res = T
        ST_TI_GO:   st <= ST_TI_WAIT;
        ST_TI_WAIT: if (me_done) begin
          t_inv    <= me_res;
          tipow[0] <= ring_t'(1);
          tipow[1] <= me_res;
          j        <= 2'd2;
          st       <= ST_POW;
        end
        ST_POW: begin
          tipow[j] <= mulmod(tipow[j-1], t_inv, m);
          j        <= j + 2'd1;
          if (j == 2'd3) st <= ST_READY;
        end
        ST_READY: begin
          if (sess_start) begin
            rd <= rnd;
            st <= ST_S_GO;
          end else if (cmp_valid) begin
            d_q <= d_sh;
            u   <= '0;
            st  <= ST_RX_R;
          end
        end
        ST_RX_R: if (rx_valid) begin
          r_list[u] <= rx_data;
          u         <= u + 4'd1;
          if (u == 4'(OT_U - 1)) st <= ST_K_GO;       // u wraps to 0
        end
        ST_K_GO:   st <= ST_K_WAIT;
        ST_K_WAIT: if (me_done) begin k_val <= me_res; j <= 2'd0; st <= ST_ENC; end
        ST_ENC: if (tx_ready) begin
          j <= j + 2'd1;
          if (j == 2'(OT_L - 1)) begin
            u  <= u + 4'd1;
            st <= (u == 4'(OT_U - 1)) ? ST_RX_MASK : ST_K_GO;
          end
        end
        ST_RX_MASK: if (rx_valid) begin
          mask       <= rx_data[0];
          mask_valid <= 1'b1;
          st         <= ST_READY;
        end
        default: st <= ST_IDLE;
      endcase
    end
  end

  // A started exponentiation must not be restarted while it runs.
  a_no_restart: assert property (@(posedge clk) disable iff (!rst_n) me_start |-> !me_busy);
  // Link rule: a word offered and not taken stays offered, unchanged.
  a_tx_hold: assert property (@(posedge clk) disable iff (!rst_n)
    tx_valid && !tx_ready |=> tx_valid && $stable(tx_data));
endmodule
