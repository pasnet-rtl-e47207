// share_alu: lane-parallel elementwise arithmetic on additive secret shares.
//
// Operations (one 128-bit beat of PP = 4 ring elements per cycle):
//   ALU_SHR   share generation   res0 = r, res1 = a - r   (r pseudo-random)
//   ALU_REC   share recovery     res0 = a + b
//   ALU_SUB   Beaver masking     res0 = a - b             (E_i = X_i - A_i)
//   ALU_AXPY  scaling, addition  res0 = k * a + b         (k plaintext)
// All arithmetic wraps modulo 2^RING_W, which is how the ring works. The
// operations and the ring width follow the published design; the valid-only interface,
// the one-cycle latency and the per-lane xorshift generator are this design's
// choices. AXPY multiplies by an integer plaintext k with no truncation; a
// fixed-point scale goes through x2act_unit or avgpool_unit instead.
//
// Timing: in_valid with its operands in cycle t gives out_valid and the
// results in cycle t+1. There is no back-pressure: one beat per cycle.
module share_alu
  import pasnet_pkg::*;
#(
  parameter int unsigned LANES = PP
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  in_valid,
  input  alu_op_e               op,
  input  ring_t                 k,                 // AXPY plaintext scale
  input  ring_t [LANES-1:0]     a,
  input  ring_t [LANES-1:0]     b,
  output logic                  out_valid,
  output ring_t [LANES-1:0]     res0,
  output ring_t [LANES-1:0]     res1
);
  ring_t [LANES-1:0] rnd;

  for (genvar l = 0; l < LANES; l++) begin : g_rng
    prng32 #(.SEED(32'h9E37_79B9 ^ (32'(l + 1) * 32'h0101_0107))) u_rng (
      .clk, .rst_n, .en(in_valid && op == ALU_SHR), .rnd(rnd[l])
    );
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      res0      <= '0;
      res1      <= '0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) begin
        for (int l = 0; l < LANES; l++) begin
          unique case (op)
            ALU_SHR:  begin res0[l] <= rnd[l];          res1[l] <= a[l] - rnd[l]; end
            ALU_REC:  begin res0[l] <= a[l] + b[l];     res1[l] <= '0;            end
            ALU_SUB:  begin res0[l] <= a[l] - b[l];     res1[l] <= '0;            end
            ALU_AXPY: begin res0[l] <= k * a[l] + b[l]; res1[l] <= '0;            end
            default:  begin res0[l] <= '0;              res1[l] <= '0;            end
          endcase
        end
      end
    end
  end
endmodule
