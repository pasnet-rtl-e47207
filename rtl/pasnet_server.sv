// pasnet_server: one server's 2PC private-inference accelerator. Two
// instances, role = SERVER0 and role = SERVER1, joined by their message
// ports, evaluate a secret-shared CNN layer by layer: each holds one additive
// share of every activation and weight.
//
// Operator units behind one operand bus (a 128-bit beat of PP = 4 ring
// elements per operand):
//   OP_ALU      share_alu     share generation/recovery, masking, k*X + Y
//   OP_CONV     beaver_mac    2PC-Conv / matmul with a Beaver triple
//   OP_X2ACT    x2act_unit    2PC-X^2act polynomial activation
//   OP_AVGPOOL  avgpool_unit  2PC-AvgPool
//   OP_RELU     nonpoly_op    2PC-ReLU through the OT comparison flow
//   OP_MAXPOOL  nonpoly_op    2PC-MaxPool through the OT comparison flow
// `op` selects the unit that receives the beat (in_valid/in_ready); the
// result of whichever unit finishes comes out on out_valid/out_res0/out_res1.
// `op` must stay fixed while a unit still owes a result. Operand roles per op:
//   ALU      a = first operand, b = second operand
//   CONV     a = X_i, b = Y_i, c = E, d = F, e = Z_i (with in_first)
//   X2ACT    a = X_i, b = A_i, c = E, d = Z_i
//   AVGPOOL / RELU / MAXPOOL   a = X_i
// E and F are the masks recovered beforehand with OP_ALU (SUB, then REC
// after exchanging the masked shares through the host).
//
// The list of operators, the ring, the lane count and the link between the
// servers follow the published design. It names a cryptographic hardware scheduler but
// does not describe it; the operator-select dispatch here is the simplest
// one that runs the operators, and loading operands, Beaver triples and
// tiles is left to the host over the operand bus. Only the comparison flow
// uses the tx/rx message ports, which go to the network interface: one
// 32-bit valid/ready channel per lane, because each lane has its own
// comparison engine (this design's choice of link framing).
module pasnet_server
  import pasnet_pkg::*;
#(
  parameter int unsigned LANES = PP,
  parameter int unsigned TRUNC = FRAC,
  parameter logic [31:0] SEED  = 32'h1234_5679
) (
  input  logic              clk,
  input  logic              rst_n,
  input  role_e             role,        // strap: SERVER0 or SERVER1
  // configuration
  input  op_e               op,
  input  alu_op_e           alu_op,
  input  ring_t             alu_k,       // AXPY plaintext scale
  input  ring_t             act_w1,      // X^2act coefficients (fixed point)
  input  ring_t             act_w2,
  input  ring_t             act_b,
  input  ring_t             pool_scale,  // AvgPool 1/window (fixed point)
  input  ring_t             ot_g,        // OT generator
  input  ring_t             ot_m,        // OT prime modulus
  input  logic              sess_start,  // new OT session (step 1)
  output logic              sess_ready,
  // operand bus
  input  logic              in_valid,
  output logic              in_ready,
  input  logic              in_first,
  input  logic              in_last,
  input  ring_t [LANES-1:0] opnd_a,
  input  ring_t [LANES-1:0] opnd_b,
  input  ring_t [LANES-1:0] opnd_c,
  input  ring_t [LANES-1:0] opnd_d,
  input  ring_t [LANES-1:0] opnd_e,
  // result bus
  output logic              out_valid,
  output ring_t [LANES-1:0] out_res0,
  output ring_t [LANES-1:0] out_res1,
  // messages to / from the other server
  output logic  [LANES-1:0] tx_valid,  // link to the other server, one
  input  logic  [LANES-1:0] tx_ready,  // 32-bit channel per lane
  output ring_t [LANES-1:0] tx_data,
  input  logic  [LANES-1:0] rx_valid,
  output logic  [LANES-1:0] rx_ready,
  input  ring_t [LANES-1:0] rx_data
);
  logic alu_v, mac_v, mac_rdy, x2_v, x2_rdy, ap_v, np_v, np_rdy;
  logic alu_ov, mac_ov, x2_ov, ap_ov, np_ov;
  ring_t [LANES-1:0] alu_r0, alu_r1, mac_r, x2_r, ap_r, np_r;
  logic  is_np;

  assign is_np = (op == OP_RELU) || (op == OP_MAXPOOL);

  always_comb begin
    unique case (op)
      OP_ALU:                in_ready = 1'b1;
      OP_CONV:               in_ready = mac_rdy;
      OP_X2ACT:              in_ready = x2_rdy;
      OP_AVGPOOL:            in_ready = 1'b1;
      OP_RELU, OP_MAXPOOL:   in_ready = np_rdy;
      default:               in_ready = 1'b0;
    endcase
  end

  assign alu_v = in_valid && op == OP_ALU;
  assign mac_v = in_valid && op == OP_CONV;
  assign x2_v  = in_valid && op == OP_X2ACT;
  assign ap_v  = in_valid && op == OP_AVGPOOL;
  assign np_v  = in_valid && is_np;

  share_alu #(.LANES(LANES)) u_alu (
    .clk, .rst_n, .in_valid(alu_v), .op(alu_op), .k(alu_k), .a(opnd_a), .b(opnd_b),
    .out_valid(alu_ov), .res0(alu_r0), .res1(alu_r1)
  );

  beaver_mac #(.LANES(LANES), .TRUNC(TRUNC)) u_mac (
    .clk, .rst_n, .role, .in_valid(mac_v), .in_ready(mac_rdy), .in_first, .in_last,
    .x_sh(opnd_a), .y_sh(opnd_b), .e_pub(opnd_c), .f_pub(opnd_d), .z_sh(opnd_e),
    .out_valid(mac_ov), .res(mac_r)
  );

  x2act_unit #(.LANES(LANES), .TRUNC(TRUNC)) u_x2 (
    .clk, .rst_n, .role, .w1(act_w1), .w2(act_w2), .b(act_b), .in_valid(x2_v), .in_ready(x2_rdy),
    .x_sh(opnd_a), .a_sh(opnd_b), .e_pub(opnd_c), .z_sh(opnd_d), .out_valid(x2_ov), .res(x2_r)
  );

  avgpool_unit #(.LANES(LANES), .TRUNC(TRUNC)) u_ap (
    .clk, .rst_n, .role, .scale(pool_scale), .in_valid(ap_v), .in_first, .in_last, .x_sh(opnd_a),
    .out_valid(ap_ov), .res(ap_r)
  );

  nonpoly_op #(.LANES(LANES), .SEED(SEED)) u_np (
    .clk, .rst_n, .role, .mode(op == OP_MAXPOOL ? NP_MAXPOOL : NP_RELU), .g(ot_g), .m(ot_m),
    .sess_start, .sess_ready, .in_valid(np_v), .in_ready(np_rdy), .in_first, .in_last,
    .x_sh(opnd_a), .out_valid(np_ov), .res(np_r),
    .tx_valid, .tx_ready, .tx_data, .rx_valid, .rx_ready, .rx_data
  );

  // Result bus: only the unit selected by `op` can finish.
  always_comb begin
    out_valid = alu_ov | mac_ov | x2_ov | ap_ov | np_ov;
    out_res0  = '0;
    out_res1  = '0;
    if (alu_ov)     begin out_res0 = alu_r0; out_res1 = alu_r1; end
    else if (mac_ov) out_res0 = mac_r;
    else if (x2_ov)  out_res0 = x2_r;
    else if (ap_ov)  out_res0 = ap_r;
    else if (np_ov)  out_res0 = np_r;
  end

  a_one_result: assert property (@(posedge clk) disable iff (!rst_n)
    $onehot0({alu_ov, mac_ov, x2_ov, ap_ov, np_ov}));
endmodule
