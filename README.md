# A two-server accelerator for secret-shared CNN inference

Two servers run a convolutional network on an input that neither of them may see.
Every value (input pixels, weights, activations) is split into two random-looking
additive shares, x = x0 + x1 modulo 2^32. Server 0 holds x0 and server 1 holds x1.
Linear work stays cheap on shares: each server adds, or scales by a public constant,
only its own share. A product of two shared values needs a precomputed *Beaver
triple* and one exchange of masked values. A comparison, as used by ReLU and
max-pooling, is much more expensive. It runs an oblivious-transfer (OT) protocol with
modular exponentiations and several network round trips.

This cost gap is the idea behind the PASNet network-search framework. Its search
replaces ReLU by a trainable second-order polynomial, `X^2act`, wherever accuracy
allows. It scores each candidate network with a per-operator latency model of this
accelerator. This RTL implements the accelerator side: one server's datapath, with
the polynomial operators (Conv, X^2act, AvgPool) and the comparison-based operators
(ReLU, MaxPool). Two instances, joined by a message link, carry out private
inference.

The numbers come from the published platform: a 32-bit ring, a 128-bit load/store
bus carrying PP = 4 ring elements per beat, and 200 MHz. The comparison protocol
splits 32-bit values into U = 16 parts of 2 bits and runs one 1-out-of-4 OT per part.
Many details are this design's own choices. The main ones are listed in
"How far this follows the published design".

## 1. Arithmetic on shares

All arithmetic is in the ring Z_2^32, so a plain 32-bit adder or multiplier that
wraps around gives exactly the modular result.

| operation | server i computes | unit |
|---|---|---|
| share generation | (r, x - r), with r random | `share_alu` SHR |
| recovery | x0 + x1 | `share_alu` REC |
| scaling, addition | k*X_i + Y_i | `share_alu` AXPY |
| masking | E_i = X_i - A_i, F_i = Y_i - B_i | `share_alu` SUB |
| product X*Y, triple Z = A*B | R_i = -i*E*F + X_i*F + E*Y_i + Z_i | `beaver_mac` |
| square X*X, pair Z = A*A | S_i = Z_i + 2*E*A_i + [i=0]*E*E | `x2act_unit` |

A product works in three steps. First, each server masks its shares with its shares
of the random triple (SUB). Then the servers swap the masked shares and both recover
the public masks E = X - A and F = Y - B (REC). Finally, each server applies the
product formula. The two results R_0 and R_1 add up to X*Y. The term -i*E*F is
applied by server 1 only. The same holds for the E*E term of the square: only server
0 adds it. (Printed literally, the published square formula adds E*E on both servers,
which gives the wrong result. The fault copy of `x2act_unit` used in testing does
exactly that.)

For a convolution or matrix product, the triple of one output is a whole dot product:
Z = sum over t of A_t*B_t. It is handed in with the first term.

### Fixed point

Activations and weights are fixed point with `FRAC` = 8 fraction bits, in 32-bit
words. A product of two such values has 2*FRAC fraction bits. `beaver_mac`,
`x2act_unit` and `avgpool_unit` bring the result back to FRAC bits with a
share-local truncation:

- server 0 shifts its share arithmetically right;
- server 1 negates its share, shifts it and negates it again.

The recovered value is then within one unit of the exact truncated product, except
with probability about |v| / 2^31, where v is the value before truncation. In that
rare case it is off by 2^(32-FRAC). The testbenches count such wraps separately. FRAC
is a package constant, and every unit also has a `TRUNC` parameter: TRUNC = 0 gives
plain integer ring arithmetic.

## 2. One server: `pasnet_server`

```
            op ─┐                                            ┌─ out_valid, out_res0/1
opnd_a..e ──────┼──> share_alu     (SHR, REC, SUB, AXPY)  ───┤
(5 x 128 bit)   ├──> beaver_mac    (2PC-Conv, matmul)     ───┤
in_valid/ready  ├──> x2act_unit    (2PC-X^2act)           ───┤
in_first/last   ├──> avgpool_unit  (2PC-AvgPool)          ───┤
                └──> nonpoly_op    (2PC-ReLU, 2PC-MaxPool)───┘
                        │  ot_sender (role 0) / ot_receiver (role 1)
                        │  modexp, prng32
                     tx_*, rx_* : message link to the other server,
                                  one 32-bit channel per lane
```

`op` selects which unit receives the operand beat. The finishing unit drives the
result bus. A strap input, `role`, tells the hardware whether it is server 0 or
server 1, so both boards run the same build. The host must do four things:

- deal the Beaver triples and pairs;
- swap the masked shares E_i and F_i between the servers and feed them back for REC;
- sequence the layers;
- keep `op` fixed while a unit still owes a result.

| op | operand a | b | c | d | e | rate per lane |
|---|---|---|---|---|---|---|
| ALU | first | second | | | | 1 beat / cycle, result next cycle |
| CONV | X_i | Y_i | E | F | Z_i (first term) | 3 cycles / term |
| X2ACT | X_i | A_i | E | Z_i | | 2 cycles / element |
| AVGPOOL | X_i | | | | | 1 cycle / element + 1 / window |
| RELU | X_i | | | | | 1 comparison / element |
| MAXPOOL | X_i | | | | | window - 1 comparisons / output |

The lanes are independent output elements, for example 4 output channels. The
compute rates follow the published latency model:

- Conv: 3*K*K*FO^2*IC*OC / PP cycles, from one multiplier per lane used three times
  per term.
- X^2act: 2*FI^2*IC / PP cycles, from two multipliers per lane over two cycles.

The X^2act coefficients are plaintext inputs: `act_w1` (the w1 of the activation,
already scaled by c/sqrt(N_x)), `act_w2` and `act_b`. The activation is
delta(x) = w1'*x^2 + w2*x + b.

## 3. The comparison flow (ReLU and MaxPool)

This is the expensive part, and the part where this design had to fill the most gaps.

**What is compared.** The servers hold d0 + d1 = d and want to know whether d >= 0.
Write L(.) for the low 31 bits. The sign bit of d is d0[31] xor d1[31] xor c, where c
is the carry out of L(d0) + L(d1). That carry is exactly M0 > M1, with M0 = L(d0)
(server 0's number) and M1 = 2^31 - 1 - L(d1) (server 1's number). Deciding M0 > M1
without revealing either number is the millionaires' problem. It is solved one 2-bit
part at a time: for each part, server 1 obliviously picks one of 4 table entries that
server 0 prepared.

**Messages** (S0 = `ot_sender`, S1 = `ot_receiver`, g and prime m shared):

| step | who | what | words |
|---|---|---|---|
| 1 | S0 | draw rd; send S = g^rd mod m; keep T^-j, with T = S^rd, for j = 0..3 | 1 per session |
| 2 | S1 | for each part u, with c_u the 2-bit digit of M1: draw b_u, send R_u = S^c_u * g^b_u, keep key1_u = S^b_u | 16 per comparison |
| 3 | S0 | K_u = R_u^rd; key0(u,j) = K_u * T^-j; send Enc(u,j) = entry(u,j) xor key0(u,j) | 64 per comparison |
| 4 | S1 | decode Enc(u,c_u) with key1_u; chain the parts; send T_mask | 1 per comparison |
| 5 | both | apply T_mask | |

Entry (u,j) holds {d0[31], M0_u > j, M0_u == j} in its low three bits. Only for
j = c_u does key0(u,j) equal g^(rd*b_u) = key1_u, so server 1 can open only the row it
chose. Server 1 chains the parts from the least significant: gt = gt_u | (eq_u & gt).
This gives c, and then T_mask = not(d0[31] xor d1[31] xor c).

Both servers learn T_mask. With it:

- ReLU: each server keeps its share of x or replaces it with 0.
- MaxPool: the window's elements arrive as consecutive beats. The running maximum
  starts at the first element. Each further element x costs one comparison, on
  d = cur - x, after which each server keeps its share of cur or of x. A 2x2 window
  therefore costs 3 comparisons, which matches the three extra rounds in the
  published MaxPool latency.

**Cost.** `modexp` handles one exponent bit per cycle, so each exponentiation takes
32 cycles. One comparison costs 32 exponentiations on server 1 and 16 on server 0.
With the link joined directly, this comes to about 1,680 cycles per comparison
(8.4 µs at 200 MHz), against a handful of cycles for X^2act. Each lane has its own
sender/receiver pair and its own 32-bit channel of the link, so the four elements of a
beat are compared at the same time. This is the parallelism PP that the published
latency model divides the comparison steps by. The lanes run independently on the link
and are joined again when all four masks are in.

**Differences from the published flow.** The published key equations use each
server's secret on the other server, so they cannot be followed as printed. The
Bellare-Micali style construction above was chosen to fit their shape. The following
are kept as published:

- the step structure of Fig. 4 of the paper: S, the R list, the encrypted 4 x 16
  matrix, T_mask;
- the 2-bit parts;
- the XOR encryption;
- revealing T_mask.

Three things make this a model of the protocol's cost and data flow, not a hardened
implementation:

- The keys are not hashed.
- The random numbers come from xorshift generators.
- Server 1 also learns d0[31], which is one bit of a uniformly random share.

## 4. Running a layer

`tb/tb_pasnet_2pc.sv` is the reference sequence. It runs one conv layer, 4 output
channels by 4 output pixels with a 3x3 kernel, on two servers:

1. SHR on server 0 shares the input and the weights.
2. Per term, SUB on both servers, then REC with the other server's masked share,
   gives E and F.
3. CONV streams the 9 terms.
4. SUB and REC again give the mask of the X^2act input, then X2ACT runs.
5. AVGPOOL runs over the 2x2 window.
6. AXPY runs on the shares.
7. An OT session starts, then RELU and MAXPOOL run on the conv output.

Every recovered result is checked against plaintext arithmetic.

## 5. Files

| file | contents |
|---|---|
| `rtl/pasnet_pkg.sv` | ring type, lanes, FRAC, enums, `trunc_share`, `mulmod` |
| `rtl/prng32.sv` | xorshift32 random source (not cryptographic) |
| `rtl/share_alu.sv` | share generation, recovery, masking, k*X + Y |
| `rtl/beaver_mac.sv` | Beaver-triple dot products (2PC-Conv) |
| `rtl/x2act_unit.sv` | Beaver-pair square and polynomial activation |
| `rtl/avgpool_unit.sv` | share-local average pooling |
| `rtl/modexp.sv` | square-and-multiply modular exponentiation |
| `rtl/ot_sender.sv`, `rtl/ot_receiver.sv` | the two sides of the comparison flow |
| `rtl/nonpoly_op.sv` | ReLU / MaxPool around the comparison flow |
| `rtl/pasnet_server.sv` | one server (top) |

Every testbench prints `TB_RESULT checks=N failures=M` and has a watchdog.

| testbench | what it proves |
|---|---|
| `tb_share_alu` | each ALU op against ring arithmetic; SHR shares recover the input and change from call to call |
| `tb_beaver_mac` | the 4-bit worked example of the paper (low 4 bits of the 32-bit shares equal the printed Z_16 shares r0 = [-4,-4], r1 = [6,1]); random dot products; 3 cycles per term; fixed point |
| `tb_x2act_unit` | square and polynomial against fixed-point reference; 2 cycles per element |
| `tb_avgpool_unit` | 2x2 and 3x3 windows; result one cycle after the window |
| `tb_modexp` | random and known powers under four primes; 32 cycles |
| `tb_ot_pair` | sender and receiver joined: T_mask for random and edge values, message counts per step, a second session |
| `tb_nonpoly_op` | ReLU and MaxPool (2x2, 3x3) on shares, comparison counts, four lanes in about one comparison time, random per-lane link stalls |
| `tb_resnet_layer` | a slice of a first ResNet layer (27-term dot products) through Conv, X^2act, ReLU and a residual add on two servers; cycle counts against the latency model: 3 cycles per conv term, 2 per X^2act beat, about 1,680 per ReLU beat |
| `tb_pasnet_2pc` | the whole layer above on two servers at default parameters; counts that each operator, each ALU op, the OT session, lanes using the link side by side, bus back-pressure and operator switching happened |

To simulate with Verilator 5, from the directory that holds `rtl/` and `tb/`:

```
verilator --binary --timing --assert -Wno-fatal --top-module tb_pasnet_2pc \
  -y rtl +libext+.sv rtl/pasnet_pkg.sv tb/tb_pasnet_2pc.sv -o sim
./obj_dir/sim
```

Replace the top module and testbench file to run another test. The end-to-end test
runs in a few seconds.

## 6. How far this follows the published design

The following come from the published design:

- the ring and its width;
- PP = 4 lanes on a 128-bit bus;
- the share, Beaver multiplication and square equations (with the E*E correction
  above);
- the X^2act form;
- AvgPool as add-and-scale;
- ReLU and MaxPool through an OT comparison;
- the 2-bit parts, U = 16 and the L = 4 index list;
- the step and message structure of the comparison flow;
- the per-operator cycle rates of Conv and X^2act;
- PP comparisons at a time, one per lane.

The following are this design's own:

- the key derivation of the OT;
- the fixed-point format and truncation;
- the random number generator;
- all handshakes and operand orders;
- the operator-select dispatch, where the published design only names a
  "cryptographic hardware scheduler";
- one link channel per lane, and the per-lane seeds;
- one 32-bit word per T_mask bit.

The following are not built:

- The on-chip tile buffers and loop tiling of the convolution. The published design
  cites an existing tiled FPGA architecture without details.
- Beaver-triple generation. It is named as OT-based but not described.
- The Ethernet link and the host processor and memory.

Operands and triples therefore enter over the operand bus, and the link is one pair of
32-bit valid/ready streams per lane.

**Throughput.** With 4 multipliers, the published network latencies (for example
12.2 ms for a ResNet-18-sized network on CIFAR-10) are out of reach. Such a network
has roughly 0.56 G multiply-accumulates (a general figure, not from the paper). At
3 cycles per term on 4 lanes at 200 MHz, that is about 2 s. The published latency
model assumes a convolution engine scaled up to the FPGA's compute roof. This design
keeps PP = 4 for every operator, as the published bus description suggests; widening
`LANES` is the knob for that.

## 7. Changing it

- `LANES` (every unit and `pasnet_server`) sets the number of ring elements per
  beat. The operand ports widen with it.
- `TRUNC` sets the fraction bits removed after a product. `FRAC` in the package sets
  the default.
- `SEED` seeds the random generators. Give two servers different seeds in a real
  run.
- Swap `prng32` for a real random source. It has the same ports.
- Swap the `%`-based `mulmod` in the package for a Montgomery multiplier to cut the
  area of `modexp`. Keep `done` timing or adjust the FSMs, which wait for `done`.
