// ot_receiver: server 1's side of the OT-based secure comparison (see
// ot_sender for the arithmetic of the comparison).
//
// Server 1's steps:
//   (1) receive S from server 0 after sess_start; form S^c for c = 0..3.
//   (2) per comparison, with M1 = (2^31 - 1) - d1[30:0] split into 16 parts
//       c_u of 2 bits: draw b_u, send R_u = S^c_u * g^b_u mod m and keep
//       key1_u = S^b_u mod m.
//   (4) receive the 4 x 16 encrypted matrix, decode the entry of row c_u of
//       every part with key1_u, getting (M0_u > c_u, M0_u == c_u) and d0[31];
//       chain the parts from the least significant one,
//       gt = gt_u | (eq_u & gt), to get M0 > M1 (the carry), and form
//       T_mask = !(d0[31] ^ d1[31] ^ carry), 1 when d >= 0; send it.
//   (5) hand T_mask out.
// The steps, parts and message sizes follow the published design; the key derivation
// is this design's (as in ot_sender).
//
// Link: 32-bit words, valid/ready. Timing: 32 exponentiations per comparison
// (about 16 x 70 cycles) plus the 64-word matrix and one word of T_mask.
module ot_receiver
  import pasnet_pkg::*;
#(
  parameter logic [31:0] SEED = 32'h0BAD_5EED
) (
  input  logic  clk,
  input  logic  rst_n,
  input  ring_t g,
  input  ring_t m,
  input  logic  sess_start,
  output logic  sess_ready,
  input  logic  cmp_valid,
  output logic  cmp_ready,
  input  ring_t d_sh,
  output logic  mask_valid,
  output logic  mask,
  output logic  tx_valid,
  input  logic  tx_ready,
  output ring_t tx_data,
  input  logic  rx_valid,
  output logic  rx_ready,
  input  ring_t rx_data
);
  typedef enum logic [3:0] {
    ST_IDLE, ST_RX_S, ST_POW, ST_READY, ST_G_GO, ST_G_WAIT, ST_R_SEND,
    ST_K_GO, ST_K_WAIT, ST_RX_ENC, ST_TX_MASK
  } state_e;

  state_e           st;
  ring_t            s_val, r_val;
  ring_t [OT_L-1:0] spow;
  ring_t [OT_U-1:0] key1;
  logic  [OT_U-1:0] gt_u, eq_u;
  logic             msb0, t_mask;
  ring_t            m1;
  logic             msb1;
  logic [3:0]       u;
  logic [1:0]       j;
  ring_t            rnd, b_q;
  logic             me_start, me_busy, me_done;
  ring_t            me_base, me_res;

  prng32 #(.SEED(SEED)) u_rng (.clk, .rst_n, .en(st == ST_G_GO), .rnd);

  modexp u_exp (
    .clk, .rst_n, .start(me_start), .base(me_base), .exp(me_start && st == ST_G_GO ? rnd : b_q),
    .m, .busy(me_busy), .done(me_done), .result(me_res)
  );

  always_comb begin
    me_start = (st == ST_G_GO) || (st == ST_K_GO);
    me_base  = (st == ST_G_GO) ? g : s_val;
  end

  logic [1:0] c_u;
  logic [2:0] dec;      // {d0[31], gt, eq} of the chosen entry
  logic       carry;
  assign c_u = m1[2*u +: 2];
  assign dec = rx_data[2:0] ^ key1[u][2:0];

  always_comb begin
    carry = 1'b0;
    for (int k = 0; k < OT_U; k++) carry = gt_u[k] | (eq_u[k] & carry);
    t_mask = !(msb0 ^ msb1 ^ carry);
  end

  assign sess_ready = (st == ST_READY);
  assign cmp_ready  = (st == ST_READY);
  assign tx_valid   = (st == ST_R_SEND) || (st == ST_TX_MASK);
  assign tx_data    = (st == ST_R_SEND) ? r_val : {31'd0, t_mask};
  assign rx_ready   = (st == ST_RX_S) || (st == ST_RX_ENC);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st         <= ST_IDLE;
      s_val      <= '0;
      r_val      <= '0;
      spow       <= '0;
      key1       <= '0;
      gt_u       <= '0;
      eq_u       <= '0;
      msb0       <= 1'b0;
      m1         <= '0;
      msb1       <= 1'b0;
      u          <= '0;
      j          <= '0;
      b_q        <= '0;
      mask_valid <= 1'b0;
      mask       <= 1'b0;
    end else begin
      mask_valid <= 1'b0;
      unique case (st)
        ST_IDLE: if (sess_start) st <= ST_RX_S;
        ST_RX_S: if (rx_valid) begin
          s_val   <= rx_data;
          spow[0] <= ring_t'(1) % m;
          spow[1] <= rx_data;
          j       <= 2'd2;
          st      <= ST_POW;
        end
        ST_POW: begin
          spow[j] <= mulmod(spow[j-1], s_val, m);
          j       <= j + 2'd1;
          if (j == 2'd3) st <= ST_READY;
        end
        ST_READY: begin
          if (sess_start) st <= ST_RX_S;
          else if (cmp_valid) begin
            m1   <= {1'b0, 31'h7FFF_FFFF - d_sh[RING_W-2:0]};
            msb1 <= d_sh[RING_W-1];
            u    <= '0;
            st   <= ST_G_GO;
          end
        end
        ST_G_GO:   begin b_q <= rnd; st <= ST_G_WAIT; end
        ST_G_WAIT: if (me_done) begin r_val <= mulmod(me_res, spow[c_u], m); st <= ST_R_SEND; end
        ST_R_SEND: if (tx_ready) st <= ST_K_GO;
        ST_K_GO:   st <= ST_K_WAIT;
        ST_K_WAIT: if (me_done) begin
          key1[u] <= me_res;
          u       <= u + 4'd1;
          if (u == 4'(OT_U - 1)) begin j <= 2'd0; st <= ST_RX_ENC; end
          else st <= ST_G_GO;
        end
        ST_RX_ENC: if (rx_valid) begin
          if (j == c_u) begin
            gt_u[u] <= dec[1];
            eq_u[u] <= dec[0];
            msb0    <= dec[2];
          end
          j <= j + 2'd1;
          if (j == 2'(OT_L - 1)) begin
            u <= u + 4'd1;
            if (u == 4'(OT_U - 1)) st <= ST_TX_MASK;
          end
        end
        ST_TX_MASK: if (tx_ready) begin
          mask       <= t_mask;
          mask_valid <= 1'b1;
          st         <= ST_READY;
        end
        default: st <= ST_IDLE;
      endcase
    end
  end

  a_no_restart: assert property (@(posedge clk) disable iff (!rst_n) me_start |-> !me_busy);
  // Link rule: a word offered and not taken stays offered, unchanged.
  a_tx_hold: assert property (@(posedge clk) disable iff (!rst_n)
    tx_valid && !tx_ready |=> tx_valid && $stable(tx_data));
endmodule
