// prng32: 32-bit xorshift pseudo-random source used wherever the protocols
// ask for "a random value" (share generation, OT exponents).
//
// Marsaglia xorshift32 (shifts 13, 17, 5); a new word is produced in the
// cycle after `en` is high. The sequence is reproducible from SEED, which
// makes simulation deterministic. This is a design choice, not part of the
// published design: it is NOT a cryptographically secure generator, and a deployment
// would replace it with a true or cryptographic RNG behind the same ports.
module prng32 #(
  parameter logic [31:0] SEED = 32'h2545_F491  // must be non-zero
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        en,     // advance to the next word
  output logic [31:0] rnd     // current word, never zero
);
  logic [31:0] s1, s2, s3;

  always_comb begin
    s1 = rnd ^ (rnd << 13);
    s2 = s1 ^ (s1 >> 17);
    s3 = s2 ^ (s2 << 5);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)  rnd <= SEED;
    else if (en) rnd <= s3;
  end
endmodule
