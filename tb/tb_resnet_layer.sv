// tb_resnet_layer: the cost question behind polynomial activations, asked of
// two pasnet_server instances at their default parameters. A slice of the
// first convolution of a ResNet-18 for 32x32 images (3x3 kernel over 3 input
// channels, so 27 terms per output; 4 output channels on the 4 lanes, several
// output pixels) is computed on secret shares. Its output then goes through
// both activations the architecture search chooses between: the polynomial
// X^2act and the comparison-based ReLU. A residual add (AXPY with k = 1), as
// in a ResNet basic block, follows.
//
// Checked against plaintext arithmetic worked out here:
//   - conv outputs (fixed point, within one unit);
//   - X^2act outputs (within three units) and ReLU outputs (exact);
//   - the residual sum.
// Checked against the per-operator latency model of the published design:
//   - 2PC-Conv: 3 cycles per term and lane, i.e. 3 * 27 = 81 cycles per
//     beat of 4 outputs (a few cycles of pipeline latency allowed);
//   - 2PC-X^2act: 2 cycles per beat when beats are streamed back to back;
//   - 2PC-ReLU: one comparison time per beat of 4 elements, and more than
//     100 times the X^2act cost, which is why the search replaces ReLUs.
// The host role (dealing shares, Beaver triples and the public masks E, F)
// is played here; the mask recovery itself is exercised in tb_pasnet_2pc.
module tb_resnet_layer;
  import pasnet_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0, wraps = 0, cyc = 0;
  always @(posedge clk) cyc++;

  localparam int K = 27, NPIX = 4;

  op_e     op;
  alu_op_e alu_op;
  ring_t   alu_k, w1, w2, bb, pscale, g, m;
  logic    sess, sr0, sr1, v, rdy0, rdy1, first, last, ov0, ov1;
  lanes_t  a0, b0, c0, d0, e0, a1, b1, c1, d1, e1, p0, q0, p1, q1;
  logic   [PP-1:0] l01_v, l01_r, l10_v, l10_r;
  lanes_t          l01_d, l10_d;

  pasnet_server u_s0 (.clk, .rst_n, .role(SERVER0), .op, .alu_op, .alu_k, .act_w1(w1),
    .act_w2(w2), .act_b(bb), .pool_scale(pscale), .ot_g(g), .ot_m(m), .sess_start(sess),
    .sess_ready(sr0), .in_valid(v), .in_ready(rdy0), .in_first(first), .in_last(last),
    .opnd_a(a0), .opnd_b(b0), .opnd_c(c0), .opnd_d(d0), .opnd_e(e0),
    .out_valid(ov0), .out_res0(p0), .out_res1(q0),
    .tx_valid(l01_v), .tx_ready(l01_r), .tx_data(l01_d),
    .rx_valid(l10_v), .rx_ready(l10_r), .rx_data(l10_d));
  pasnet_server u_s1 (.clk, .rst_n, .role(SERVER1), .op, .alu_op, .alu_k, .act_w1(w1),
    .act_w2(w2), .act_b(bb), .pool_scale(pscale), .ot_g(g), .ot_m(m), .sess_start(sess),
    .sess_ready(sr1), .in_valid(v), .in_ready(rdy1), .in_first(first), .in_last(last),
    .opnd_a(a1), .opnd_b(b1), .opnd_c(c1), .opnd_d(d1), .opnd_e(e1),
    .out_valid(ov1), .out_res0(p1), .out_res1(q1),
    .tx_valid(l10_v), .tx_ready(l10_r), .tx_data(l10_d),
    .rx_valid(l01_v), .rx_ready(l01_r), .rx_data(l01_d));

  // results of both servers, with the cycle they appeared in
  lanes_t o0[$], o1[$];
  int     ot[$];
  always @(posedge clk) if (rst_n) begin
    if (ov0) begin o0.push_back(p0); ot.push_back(cyc); end
    if (ov1) o1.push_back(p1);
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  // Fixed-point comparison; a share-local truncation wrap of 2^(32-FRAC)
  // (rare) is counted apart.
  task automatic near(input ring_t got, input longint want, input int tol, input string what);
    longint err  = longint'($signed(got)) - want;
    longint wrap = longint'(1) << (RING_W - FRAC);
    if (err > wrap / 2) begin err -= wrap; wraps++; end
    else if (err < -wrap / 2) begin err += wrap; wraps++; end
    check(err <= tol && err >= -tol, $sformatf("%s: got %0d want %0d", what, $signed(got), want));
  endtask

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // One beat into both servers (they run in step); returns the cycle it was taken.
  task automatic beat(input op_e o, input bit f, input bit l, output int t);
    op = o; first = f; last = l; v = 1;
    @(posedge clk);
    while (!(rdy0 && rdy1)) @(posedge clk);
    t = cyc;
    #1 v = 0;
  endtask

  task automatic pop(output lanes_t r, output int t);
    while (o0.size() == 0 || o1.size() == 0) @(negedge clk);
    t = ot.pop_front();
    begin
      lanes_t x = o0.pop_front(), y = o1.pop_front();
      for (int l = 0; l < PP; l++) r[l] = x[l] + y[l];
    end
  endtask

  function automatic ring_t fx(real r);
    return ring_t'(longint'(r * real'(1 << FRAC)));
  endfunction

  longint xv[NPIX][K], wv[PP][K], yv[NPIX][PP];
  ring_t  ys0[NPIX][PP], ys1[NPIX][PP], ac0[NPIX][PP], ac1[NPIX][PP];

  initial begin
    lanes_t r;
    int     t_in, t_out, t_first, t_relu;
    ring_t  A, As, Zs, xs, ws;
    ring_t  Av[K], Bv[PP][K];
    ring_t  zsum[PP];
    longint want;
    op = OP_ALU; alu_op = ALU_AXPY; alu_k = 32'd1;
    w1 = fx(0.125); w2 = fx(0.5); bb = fx(0.25); pscale = '0;
    g = 32'd7; m = 32'h7FFF_FFFF;
    sess = 0; v = 0; first = 0; last = 0;
    {a0, b0, c0, d0, e0, a1, b1, c1, d1, e1} = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk);

    // plaintext: inputs in [-0.5, 0.5], weights in [-0.25, 0.25]
    for (int p = 0; p < NPIX; p++)
      for (int t = 0; t < K; t++) xv[p][t] = longint'($urandom_range(0, 256)) - 128;
    for (int l = 0; l < PP; l++)
      for (int t = 0; t < K; t++) wv[l][t] = longint'($urandom_range(0, 128)) - 64;

    // ---- 2PC-Conv: 27 terms per output pixel, 4 output channels ----
    for (int p = 0; p < NPIX; p++) begin
      // dealer: the whole triple of the dot product first, Z = sum of A * B
      for (int l = 0; l < PP; l++) zsum[l] = '0;
      for (int t = 0; t < K; t++) begin
        Av[t] = $urandom;
        for (int l = 0; l < PP; l++) begin Bv[l][t] = $urandom; zsum[l] += Av[t] * Bv[l][t]; end
      end
      for (int t = 0; t < K; t++) begin
        xs = $urandom;
        for (int l = 0; l < PP; l++) begin
          ws = $urandom;
          a0[l] = xs; a1[l] = ring_t'(xv[p][t]) - xs;
          b0[l] = ws; b1[l] = ring_t'(wv[l][t]) - ws;
          // public masks E = X - A, F = W - B, as the servers would recover them
          c0[l] = ring_t'(xv[p][t]) - Av[t];  c1[l] = c0[l];
          d0[l] = ring_t'(wv[l][t]) - Bv[l][t]; d1[l] = d0[l];
        end
        if (t == 0)
          for (int l = 0; l < PP; l++) begin
            Zs = $urandom; e0[l] = Zs; e1[l] = zsum[l] - Zs;
          end
        beat(OP_CONV, t == 0, t == K - 1, t_in);
        if (t == 0) t_first = t_in;
      end
      pop(r, t_out);
      check(t_out - t_first >= 3 * K - 3 && t_out - t_first <= 3 * K + 4,
            $sformatf("2PC-Conv took %0d cycles for %0d terms (3 per term)", t_out - t_first, K));
      for (int l = 0; l < PP; l++) begin
        want = 0;
        for (int t = 0; t < K; t++) want += xv[p][t] * wv[l][t];
        yv[p][l] = want >>> FRAC;
        near(r[l], yv[p][l], 1, "2PC-Conv output");
      end
    end
    $display("2PC-Conv: %0d cycles per beat of %0d outputs, model 3*K*K*IC = %0d", t_out - t_first, PP, 3 * K);

    // reshare the conv outputs as the next layer's inputs (fresh random split)
    for (int p = 0; p < NPIX; p++)
      for (int l = 0; l < PP; l++) begin
        ys0[p][l] = $urandom; ys1[p][l] = ring_t'(yv[p][l]) - ys0[p][l];
      end

    // ---- 2PC-X^2act, beats streamed back to back ----
    fork
      for (int p = 0; p < NPIX; p++) begin
        for (int l = 0; l < PP; l++) begin
          A = $urandom; As = $urandom; Zs = $urandom;
          a0[l] = ys0[p][l]; a1[l] = ys1[p][l];
          b0[l] = As;        b1[l] = A - As;
          c0[l] = ring_t'(yv[p][l]) - A; c1[l] = c0[l];
          d0[l] = Zs;        d1[l] = A * A - Zs;
        end
        beat(OP_X2ACT, 0, 0, t_in);
        if (p == 0) t_first = t_in;
      end
      for (int p = 0; p < NPIX; p++) begin
        pop(r, t_out);
        for (int l = 0; l < PP; l++) begin
          want = ((longint'($signed(w1)) * ((yv[p][l] * yv[p][l]) >>> FRAC)) >>> FRAC)
                 + ((longint'($signed(w2)) * yv[p][l]) >>> FRAC) + longint'($signed(bb));
          near(r[l], want, 3, "2PC-X2act output");
          ac0[p][l] = $urandom; ac1[p][l] = r[l] - ac0[p][l];
        end
      end
    join
    check(t_out - t_first <= 2 * NPIX + 2,
          $sformatf("2PC-X2act: %0d beats took %0d cycles (2 per beat)", NPIX, t_out - t_first));
    $display("2PC-X2act: %0d cycles for %0d beats, model 2 per beat", t_out - t_first, NPIX);

    // ---- 2PC-ReLU on the same conv outputs ----
    sess = 1; @(negedge clk); sess = 0;
    while (!(sr0 && sr1)) @(negedge clk);
    t_relu = 0;
    for (int p = 0; p < NPIX; p++) begin
      for (int l = 0; l < PP; l++) begin a0[l] = ys0[p][l]; a1[l] = ys1[p][l]; end
      beat(OP_RELU, 1, 1, t_in);
      pop(r, t_out);
      t_relu += t_out - t_in;
      for (int l = 0; l < PP; l++)
        check(r[l] == (yv[p][l] > 0 ? ring_t'(yv[p][l]) : '0), "2PC-ReLU output");
    end
    $display("2PC-ReLU: %0d cycles per beat of %0d elements", t_relu / NPIX, PP);
    check(t_relu / NPIX < 2500, "ReLU lanes compared in parallel (one comparison time per beat)");
    check(t_relu / NPIX > 100 * 2, "ReLU costs over 100 times X^2act per beat");

    // ---- residual add: X^2act output + block input (AXPY, k = 1) ----
    alu_op = ALU_AXPY; alu_k = 32'd1;
    for (int l = 0; l < PP; l++) begin
      a0[l] = ac0[0][l]; a1[l] = ac1[0][l]; b0[l] = ys0[0][l]; b1[l] = ys1[0][l];
    end
    beat(OP_ALU, 0, 0, t_in);
    pop(r, t_out);
    for (int l = 0; l < PP; l++)
      check(r[l] == ac0[0][l] + ac1[0][l] + ring_t'(yv[0][l]), "residual add on shares");

    check(wraps * 10 < checks, "truncation wraps rare");
    $display("truncation wraps=%0d", wraps);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
