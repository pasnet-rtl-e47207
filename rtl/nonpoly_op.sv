// nonpoly_op: 2PC-ReLU and 2PC-MaxPool on secret shares, built on the OT
// comparison flow (ot_sender on server 0, ot_receiver on server 1).
//
// ReLU: for every element x the servers run one comparison on d = x and
// receive T_mask = [x >= 0]; each server then keeps its share of x or
// replaces it by 0 ("apply T_mask"), so the result shares add up to ReLU(x).
// MaxPool: the window's elements arrive as consecutive beats (in_first on
// the first, in_last on the last); the running maximum starts as the first
// element and each further element costs one comparison on d = cur - x,
// after which each server keeps its share of cur or of x. A 2 x 2 window
// takes three comparisons, the three extra rounds of the published design's
// MaxPool latency model.
//
// Every lane has its own comparison engine and its own 32-bit channel of the
// link, so the LANES elements of a beat are compared at the same time. This
// is the computational parallelism PP by which the published latency model
// divides the comparison steps. Both servers must be fed the same beats with
// the same in_first/in_last. The operators, T_mask and PP-wide comparison
// follow the published design; revealing T_mask to both servers follows its
// flow figure. The per-lane link channels, the per-lane seeds
// (SEED + l * 0x0101_0101) and the beat interface are this design's choices.
//
// Interface: in_valid/in_ready take a beat; out_valid pulses once per ReLU
// beat and once per MaxPool window with res. sess_start must have been given
// and sess_ready (all lanes' sessions set up) seen once before the first
// beat. Link lane l uses tx_valid[l]/tx_ready[l]/tx_data[l] and the same on
// rx; lanes never wait for each other on the link.
module nonpoly_op
  import pasnet_pkg::*;
#(
  parameter int unsigned LANES = PP,
  parameter logic [31:0] SEED  = 32'h1234_5679
) (
  input  logic              clk,
  input  logic              rst_n,
  input  role_e             role,   // server 0: OT sender, server 1: OT receiver
  input  np_mode_e          mode,
  input  ring_t             g,
  input  ring_t             m,
  input  logic              sess_start,
  output logic              sess_ready,
  input  logic              in_valid,
  output logic              in_ready,
  input  logic              in_first,
  input  logic              in_last,
  input  ring_t [LANES-1:0] x_sh,
  output logic              out_valid,
  output ring_t [LANES-1:0] res,
  output logic  [LANES-1:0] tx_valid,
  input  logic  [LANES-1:0] tx_ready,
  output ring_t [LANES-1:0] tx_data,
  input  logic  [LANES-1:0] rx_valid,
  output logic  [LANES-1:0] rx_ready,
  input  ring_t [LANES-1:0] rx_data
);
  typedef enum logic [1:0] { ST_IDLE, ST_ISSUE, ST_WAIT } state_e;

  state_e            st;
  ring_t [LANES-1:0] x_q, cur, d_sh;
  logic              last_q;
  np_mode_e          mode_q;
  logic [LANES-1:0]  issued, got, mask_q;
  logic [LANES-1:0]  cmp_valid, cmp_ready, mask_valid, mask, lane_ready;
  logic [LANES-1:0]  got_n, mask_n;

  assign in_ready   = (st == ST_IDLE);
  assign sess_ready = &lane_ready;
  assign got_n      = got | mask_valid;
  assign mask_n     = (mask_q & got) | (mask & mask_valid);

  logic is1;
  assign is1 = (role == SERVER1);

  // Both sides of the flow are present so that one build serves as either
  // server; `role` enables one of them and routes the lane's link to it.
  for (genvar l = 0; l < LANES; l++) begin : g_lane
    localparam logic [31:0] LSEED = SEED + 32'h0101_0101 * l;
    logic  s_sess_ready, s_cmp_ready, s_mask_valid, s_mask, s_tx_valid, s_rx_ready;
    logic  r_sess_ready, r_cmp_ready, r_mask_valid, r_mask, r_tx_valid, r_rx_ready;
    ring_t s_tx_data, r_tx_data;

    assign d_sh[l]      = (mode_q == NP_RELU) ? x_q[l] : cur[l] - x_q[l];
    assign cmp_valid[l] = (st == ST_ISSUE) && !issued[l];

    ot_sender #(.SEED(LSEED)) u_snd (
      .clk, .rst_n, .g, .m, .sess_start(sess_start && !is1), .sess_ready(s_sess_ready),
      .cmp_valid(cmp_valid[l] && !is1), .cmp_ready(s_cmp_ready), .d_sh(d_sh[l]),
      .mask_valid(s_mask_valid), .mask(s_mask), .tx_valid(s_tx_valid),
      .tx_ready(tx_ready[l]), .tx_data(s_tx_data), .rx_valid(rx_valid[l] && !is1),
      .rx_ready(s_rx_ready), .rx_data(rx_data[l])
    );

    ot_receiver #(.SEED(LSEED ^ 32'h5A5A_A5A5)) u_rcv (
      .clk, .rst_n, .g, .m, .sess_start(sess_start && is1), .sess_ready(r_sess_ready),
      .cmp_valid(cmp_valid[l] && is1), .cmp_ready(r_cmp_ready), .d_sh(d_sh[l]),
      .mask_valid(r_mask_valid), .mask(r_mask), .tx_valid(r_tx_valid),
      .tx_ready(tx_ready[l]), .tx_data(r_tx_data), .rx_valid(rx_valid[l] && is1),
      .rx_ready(r_rx_ready), .rx_data(rx_data[l])
    );

    assign lane_ready[l] = is1 ? r_sess_ready : s_sess_ready;
    assign cmp_ready[l]  = is1 ? r_cmp_ready  : s_cmp_ready;
    assign mask_valid[l] = is1 ? r_mask_valid : s_mask_valid;
    assign mask[l]       = is1 ? r_mask       : s_mask;
    assign tx_valid[l]   = is1 ? r_tx_valid   : s_tx_valid;
    assign tx_data[l]    = is1 ? r_tx_data    : s_tx_data;
    assign rx_ready[l]   = is1 ? r_rx_ready   : s_rx_ready;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st        <= ST_IDLE;
      x_q       <= '0;
      cur       <= '0;
      last_q    <= 1'b0;
      mode_q    <= NP_RELU;
      issued    <= '0;
      got       <= '0;
      mask_q    <= '0;
      out_valid <= 1'b0;
      res       <= '0;
    end else begin
      out_valid <= 1'b0;
      unique case (st)
        ST_IDLE: if (in_valid) begin
          x_q    <= x_sh;
          last_q <= in_last;
          mode_q <= mode;
          issued <= '0;
          got    <= '0;
          if (mode == NP_MAXPOOL && in_first) begin
            cur <= x_sh;                       // window starts: no comparison
            if (in_last) begin res <= x_sh; out_valid <= 1'b1; end
          end else begin
            st <= ST_ISSUE;
          end
        end
        ST_ISSUE: begin
          got    <= got_n;
          mask_q <= mask_n;
          issued <= issued | (cmp_valid & cmp_ready);
          if (&(issued | (cmp_valid & cmp_ready))) st <= ST_WAIT;
        end
        ST_WAIT: begin
          got    <= got_n;
          mask_q <= mask_n;
          if (&got_n) begin
            st <= ST_IDLE;
            for (int l = 0; l < LANES; l++) begin
              if (mode_q == NP_RELU) res[l] <= mask_n[l] ? x_q[l] : ring_t'(0);
              else if (!mask_n[l])   cur[l] <= x_q[l];
              if (mode_q == NP_MAXPOOL) res[l] <= mask_n[l] ? cur[l] : x_q[l];
            end
            if (mode_q == NP_RELU || last_q) out_valid <= 1'b1;
          end
        end
        default: st <= ST_IDLE;
      endcase
    end
  end
endmodule
