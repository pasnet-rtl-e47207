// pasnet_pkg: types, constants and helper functions shared by the 2PC
// (two-party computation) operator units.
//
// All secret-shared data lives in the ring Z_(2^RING_W) with RING_W = 32, as in
// the published design; overflow of the 32-bit adders and multipliers is the
// ring's modular reduction. PP = 4 lanes matches a 128-bit load/store bus
// carrying four 32-bit words per beat. The fixed-point fraction width FRAC and
// the share truncation rule are this design's own choices (the published design gives
// neither).
package pasnet_pkg;

  localparam int unsigned RING_W = 32;  // ring Z_(2^32)
  localparam int unsigned PP     = 4;   // lanes per 128-bit beat
  localparam int unsigned FRAC   = 8;   // fixed-point fraction bits (own choice)
  localparam int unsigned BUS_W  = RING_W * PP;

  // OT comparison: 32-bit values split into U parts of 2 bits each,
  // giving an index list of L = 4 entries per part.
  localparam int unsigned OT_U = 16;
  localparam int unsigned OT_L = 4;

  typedef logic [RING_W-1:0] ring_t;
  typedef ring_t [PP-1:0]    lanes_t;

  // Which server this hardware acts as.
  typedef enum logic { SERVER0 = 1'b0, SERVER1 = 1'b1 } role_e;

  // Share-ALU operations.
  typedef enum logic [1:0] {
    ALU_SHR  = 2'd0,  // share generation  x -> (r, x - r)
    ALU_REC  = 2'd1,  // share recovery    (x0, x1) -> x0 + x1
    ALU_SUB  = 2'd2,  // masking           X_i - A_i
    ALU_AXPY = 2'd3   // scaling/addition  k*X + Y   (k plaintext)
  } alu_op_e;

  // Operator selected at the server's operand bus.
  typedef enum logic [2:0] {
    OP_ALU     = 3'd0,
    OP_CONV    = 3'd1,
    OP_X2ACT   = 3'd2,
    OP_AVGPOOL = 3'd3,
    OP_RELU    = 3'd4,
    OP_MAXPOOL = 3'd5
  } op_e;

  // Non-polynomial operator mode.
  typedef enum logic { NP_RELU = 1'b0, NP_MAXPOOL = 1'b1 } np_mode_e;

  // Truncation of a share by f bits after a fixed-point product (SecureML
  // style local truncation): server 0 shifts arithmetically, server 1 negates,
  // shifts and negates back, so that the recovered value is the truncated
  // product to within one unit in the last place.
  function automatic ring_t trunc_share(input ring_t v, input logic role1,
                                        input int unsigned f);
    ring_t neg;
    if (!role1) return ring_t'($signed(v) >>> f);
    neg = -v;
    return -ring_t'($signed(neg) >>> f);
  endfunction

  // (a * b) mod m for the OT flow; m is the shared prime modulus.
  function automatic ring_t mulmod(input ring_t a, input ring_t b, input ring_t m);
    logic [2*RING_W-1:0] p;
    p = {{RING_W{1'b0}}, a} * {{RING_W{1'b0}}, b};
    return ring_t'(p % {{RING_W{1'b0}}, m});
  endfunction

endpackage
