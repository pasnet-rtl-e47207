// tb_pasnet_2pc: end-to-end private inference of a small convolution layer on
// two pasnet_server instances (server 0 and server 1) at their default
// parameters, with their message ports joined directly. The testbench plays
// the host of each server and the dealer of Beaver triples.
//
// Layer: 4 output channels (the 4 lanes), 4 output pixels (one 2x2 pooling
// window), 3x3 kernel on one input channel (9 terms per output), fixed point
// with FRAC fraction bits. Steps, each checked against values worked out
// here from the plaintext:
//   1. OP_ALU SHR     secret-share input and weights
//   2. OP_ALU SUB/REC Beaver masks E = X - A, F = W - B on both servers
//   3. OP_CONV        2PC-Conv; recovered result vs the plaintext convolution
//   4. OP_ALU SUB/REC mask of the activation input, then OP_X2ACT
//   5. OP_AVGPOOL     on the X^2act output
//   6. OP_ALU AXPY    k * conv + act on shares
//   7. OT session, OP_RELU on the conv output, OP_MAXPOOL over the window
// Every mechanism must happen at least once (each operator and ALU op, the
// OT session, back-pressure on the operand bus, a change of operator while
// streaming, lanes' comparison engines using the link side by side); one that
// never happens counts as a failure.
module tb_pasnet_2pc;
  import pasnet_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0, wraps = 0;

  localparam int K = 9, NPIX = 4;

  // ---- the two servers ----
  op_e     op;
  alu_op_e alu_op;
  ring_t   alu_k, w1, w2, bb, pscale, g, m;
  logic    sess, sr0, sr1;
  logic    v0, v1, rdy0, rdy1, first, last;
  lanes_t  a0, b0, c0, d0, e0, a1, b1, c1, d1, e1;
  logic    ov0, ov1;
  lanes_t  p0, q0, p1, q1;
  logic   [PP-1:0] l01_v, l01_r, l10_v, l10_r;
  lanes_t          l01_d, l10_d;

  pasnet_server u_s0 (.clk, .rst_n, .role(SERVER0), .op, .alu_op, .alu_k, .act_w1(w1),
    .act_w2(w2), .act_b(bb), .pool_scale(pscale), .ot_g(g), .ot_m(m), .sess_start(sess),
    .sess_ready(sr0), .in_valid(v0), .in_ready(rdy0), .in_first(first), .in_last(last),
    .opnd_a(a0), .opnd_b(b0), .opnd_c(c0), .opnd_d(d0), .opnd_e(e0),
    .out_valid(ov0), .out_res0(p0), .out_res1(q0),
    .tx_valid(l01_v), .tx_ready(l01_r), .tx_data(l01_d),
    .rx_valid(l10_v), .rx_ready(l10_r), .rx_data(l10_d));
  pasnet_server u_s1 (.clk, .rst_n, .role(SERVER1), .op, .alu_op, .alu_k, .act_w1(w1),
    .act_w2(w2), .act_b(bb), .pool_scale(pscale), .ot_g(g), .ot_m(m), .sess_start(sess),
    .sess_ready(sr1), .in_valid(v1), .in_ready(rdy1), .in_first(first), .in_last(last),
    .opnd_a(a1), .opnd_b(b1), .opnd_c(c1), .opnd_d(d1), .opnd_e(e1),
    .out_valid(ov1), .out_res0(p1), .out_res1(q1),
    .tx_valid(l10_v), .tx_ready(l10_r), .tx_data(l10_d),
    .rx_valid(l01_v), .rx_ready(l01_r), .rx_data(l01_d));

  // ---- result capture and event counters ----
  lanes_t o0[$], o0b[$], o1[$];
  int n_stall = 0, n_switch = 0, n_words = 0, n_par = 0;
  op_e last_op = OP_ALU;
  always @(posedge clk) if (rst_n) begin
    if (ov0) begin o0.push_back(p0); o0b.push_back(q0); end
    if (ov1) o1.push_back(p1);
    if ((v0 && !rdy0) || (v1 && !rdy1)) n_stall++;
    if ((v0 || v1) && op != last_op) begin n_switch++; last_op <= op; end
    n_words += $countones(l01_v & l01_r) + $countones(l10_v & l10_r);
    if ($countones(l01_v & l01_r) > 1) n_par++;   // lanes compared side by side
  end
  int n_op[8];
  int n_alu[4];
  int n_sess = 0;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  // Fixed-point comparison; share-local truncation may be off by
  // 2^(32-FRAC) with small probability, which is counted apart.
  task automatic near(input ring_t got, input longint want, input int tol, input string what);
    longint err  = longint'($signed(got)) - want;
    longint wrap = longint'(1) << (RING_W - FRAC);
    if (err > wrap / 2) begin err -= wrap; wraps++; end
    else if (err < -wrap / 2) begin err += wrap; wraps++; end
    check(err <= tol && err >= -tol, $sformatf("%s: got %0d want %0d", what, $signed(got), want));
  endtask

  initial begin
    repeat (3000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // One beat; `who` bit 0 = server 0, bit 1 = server 1. Waits until taken.
  task automatic beat(input op_e o, input bit [1:0] who, input bit f, input bit l);
    bit t0, t1;
    op = o; first = f; last = l;
    v0 = who[0]; v1 = who[1];
    t0 = !who[0]; t1 = !who[1];
    n_op[o]++;
    if (o == OP_ALU) n_alu[alu_op]++;
    while (!(t0 && t1)) begin
      @(posedge clk);
      if (v0 && rdy0) t0 = 1;
      if (v1 && rdy1) t1 = 1;
      #1;
      if (t0) v0 = 0;
      if (t1) v1 = 0;
    end
  endtask

  // Wait for n results from each named server.
  task automatic drain(input bit [1:0] who, input int n);
    while ((who[0] && o0.size() < n) || (who[1] && o1.size() < n)) @(negedge clk);
  endtask

  function automatic ring_t fx(real r);
    return ring_t'(longint'(r * real'(1 << FRAC)));
  endfunction

  // plaintext and shares
  longint xv[NPIX][K], wv[PP][K];
  ring_t  xs0[NPIX][K], xs1[NPIX][K], ws0[PP][K], ws1[PP][K];
  ring_t  y0[NPIX][PP], y1[NPIX][PP], act0[NPIX][PP], act1[NPIX][PP];

  initial begin
    lanes_t t0v, t1v, u0v, u1v, e_pub, f_pub;
    ring_t  A, B, As, Bs;
    ring_t  as_[PP], bs_[PP], ea0[PP], ea1[PP];
    ring_t  zsum[PP], zs0;
    ring_t  pool0[PP], pool1[PP];
    longint want;
    op = OP_ALU; alu_op = ALU_SHR; alu_k = '0;
    w1 = fx(0.25); w2 = fx(0.5); bb = fx(0.125); pscale = ring_t'((1 << FRAC) / 4);
    g = 32'd7; m = 32'h7FFF_FFFF;
    sess = 0; v0 = 0; v1 = 0; first = 0; last = 0;
    {a0, b0, c0, d0, e0, a1, b1, c1, d1, e1} = '0;
    foreach (n_op[i]) n_op[i] = 0;
    foreach (n_alu[i]) n_alu[i] = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk);

    for (int p = 0; p < NPIX; p++)
      for (int t = 0; t < K; t++) xv[p][t] = longint'($urandom_range(0, 256)) - 128;  // [-0.5, 0.5]
    for (int l = 0; l < PP; l++)
      for (int t = 0; t < K; t++) wv[l][t] = longint'($urandom_range(0, 256)) - 128;

    // ---- 1. share generation on server 0 (acting for client and vendor) ----
    alu_op = ALU_SHR;
    for (int p = 0; p < NPIX; p++)
      for (int t = 0; t < K; t++) begin
        for (int l = 0; l < PP; l++) a0[l] = ring_t'(xv[p][t]);
        beat(OP_ALU, 2'b01, 0, 0);
        drain(2'b01, 1);
        t0v = o0.pop_front(); t1v = o0b.pop_front();
        xs0[p][t] = t0v[0]; xs1[p][t] = t1v[0];
        check(xs0[p][t] + xs1[p][t] == ring_t'(xv[p][t]), "SHR shares of input recover");
      end
    for (int t = 0; t < K; t++) begin
      for (int l = 0; l < PP; l++) a0[l] = ring_t'(wv[l][t]);
      beat(OP_ALU, 2'b01, 0, 0);
      drain(2'b01, 1);
      t0v = o0.pop_front(); t1v = o0b.pop_front();
      for (int l = 0; l < PP; l++) begin
        ws0[l][t] = t0v[l]; ws1[l][t] = t1v[l];
        check(ws0[l][t] + ws1[l][t] == ring_t'(wv[l][t]), "SHR shares of weights recover");
      end
    end

    // ---- 2 + 3. Beaver masks and 2PC-Conv, one output pixel at a time ----
    for (int p = 0; p < NPIX; p++) begin
      lanes_t eq0[K], eq1[K], fq0[K], fq1[K], e_rec[K], f_rec[K];
      for (int l = 0; l < PP; l++) zsum[l] = '0;
      for (int t = 0; t < K; t++) begin
        // dealer: fresh A (per input term), B (per weight), shared at random
        A = $urandom; As = $urandom;
        for (int l = 0; l < PP; l++) begin
          B = $urandom; Bs = $urandom;
          as_[l] = As; bs_[l] = Bs;
          zsum[l] += A * B;
          // server i: a = X_i, b = A_i  (lanes repeat the input share)
          a0[l] = xs0[p][t]; b0[l] = As;
          a1[l] = xs1[p][t]; b1[l] = A - As;
          c0[l] = ws0[l][t]; d0[l] = Bs;
          c1[l] = ws1[l][t]; d1[l] = B - Bs;
        end
        alu_op = ALU_SUB;                       // E_i = X_i - A_i
        beat(OP_ALU, 2'b11, 0, 0);
        drain(2'b11, 1);
        eq0[t] = o0.pop_front(); void'(o0b.pop_front()); eq1[t] = o1.pop_front();
        a0 = c0; b0 = d0; a1 = c1; b1 = d1;     // F_i = W_i - B_i
        beat(OP_ALU, 2'b11, 0, 0);
        drain(2'b11, 1);
        fq0[t] = o0.pop_front(); void'(o0b.pop_front()); fq1[t] = o1.pop_front();
        alu_op = ALU_REC;                       // exchange and recover E, F
        a0 = eq0[t]; b0 = eq1[t]; a1 = eq1[t]; b1 = eq0[t];
        beat(OP_ALU, 2'b11, 0, 0);
        drain(2'b11, 1);
        e_rec[t] = o0.pop_front(); void'(o0b.pop_front()); u1v = o1.pop_front();
        check(e_rec[t] == u1v, "both servers recover the same E");
        check(e_rec[t][0] == ring_t'(xv[p][t]) - A, "E = X - A");
        a0 = fq0[t]; b0 = fq1[t]; a1 = fq1[t]; b1 = fq0[t];
        beat(OP_ALU, 2'b11, 0, 0);
        drain(2'b11, 1);
        f_rec[t] = o0.pop_front(); void'(o0b.pop_front()); void'(o1.pop_front());
      end
      // convolution terms
      for (int t = 0; t < K; t++) begin
        for (int l = 0; l < PP; l++) begin
          a0[l] = xs0[p][t]; b0[l] = ws0[l][t]; a1[l] = xs1[p][t]; b1[l] = ws1[l][t];
        end
        c0 = e_rec[t]; c1 = e_rec[t]; d0 = f_rec[t]; d1 = f_rec[t];
        if (t == 0) begin
          for (int l = 0; l < PP; l++) begin zs0 = $urandom; e0[l] = zs0; e1[l] = zsum[l] - zs0; end
        end
        beat(OP_CONV, 2'b11, t == 0, t == K - 1);
      end
      drain(2'b11, 1);
      t0v = o0.pop_front(); void'(o0b.pop_front()); t1v = o1.pop_front();
      for (int l = 0; l < PP; l++) begin
        want = 0;
        for (int t = 0; t < K; t++) want += xv[p][t] * wv[l][t];
        y0[p][l] = t0v[l]; y1[p][l] = t1v[l];
        near(t0v[l] + t1v[l], want >>> FRAC, 1, "2PC-Conv output");
      end
    end

    // ---- 4. X^2act on the conv output ----
    for (int p = 0; p < NPIX; p++) begin
      for (int l = 0; l < PP; l++) begin
        A = $urandom; As = $urandom;
        as_[l] = As; bs_[l] = A - As;          // pair shares
        zsum[l] = A * A;
        a0[l] = y0[p][l]; b0[l] = As; a1[l] = y1[p][l]; b1[l] = A - As;
      end
      alu_op = ALU_SUB;
      beat(OP_ALU, 2'b11, 0, 0);
      drain(2'b11, 1);
      u0v = o0.pop_front(); void'(o0b.pop_front()); u1v = o1.pop_front();
      alu_op = ALU_REC;
      a0 = u0v; b0 = u1v; a1 = u1v; b1 = u0v;
      beat(OP_ALU, 2'b11, 0, 0);
      drain(2'b11, 1);
      e_pub = o0.pop_front(); void'(o0b.pop_front()); void'(o1.pop_front());
      for (int l = 0; l < PP; l++) begin
        a0[l] = y0[p][l]; b0[l] = as_[l]; c0[l] = e_pub[l];
        a1[l] = y1[p][l]; b1[l] = bs_[l]; c1[l] = e_pub[l];
        zs0 = $urandom; d0[l] = zs0; d1[l] = zsum[l] - zs0;
      end
      beat(OP_X2ACT, 2'b11, 0, 0);
      drain(2'b11, 1);
      t0v = o0.pop_front(); void'(o0b.pop_front()); t1v = o1.pop_front();
      for (int l = 0; l < PP; l++) begin
        automatic longint yv = longint'($signed(y0[p][l] + y1[p][l]));
        act0[p][l] = t0v[l]; act1[p][l] = t1v[l];
        want = ((longint'($signed(w1)) * ((yv * yv) >>> FRAC)) >>> FRAC)
               + ((longint'($signed(w2)) * yv) >>> FRAC) + longint'($signed(bb));
        near(t0v[l] + t1v[l], want, 3, "2PC-X2act output");
      end
    end

    // ---- 5. AvgPool over the 2x2 window ----
    for (int p = 0; p < NPIX; p++) begin
      for (int l = 0; l < PP; l++) begin a0[l] = act0[p][l]; a1[l] = act1[p][l]; end
      beat(OP_AVGPOOL, 2'b11, p == 0, p == NPIX - 1);
    end
    drain(2'b11, 1);
    t0v = o0.pop_front(); void'(o0b.pop_front()); t1v = o1.pop_front();
    for (int l = 0; l < PP; l++) begin
      automatic longint s = 0;
      for (int p = 0; p < NPIX; p++) s += longint'($signed(act0[p][l] + act1[p][l]));
      near(t0v[l] + t1v[l], (s * longint'(pscale)) >>> FRAC, 2, "2PC-AvgPool output");
    end

    // ---- 6. AXPY: 3 * conv + act on shares ----
    alu_op = ALU_AXPY; alu_k = 32'd3;
    for (int l = 0; l < PP; l++) begin
      a0[l] = y0[0][l]; b0[l] = act0[0][l]; a1[l] = y1[0][l]; b1[l] = act1[0][l];
    end
    beat(OP_ALU, 2'b11, 0, 0);
    drain(2'b11, 1);
    t0v = o0.pop_front(); void'(o0b.pop_front()); t1v = o1.pop_front();
    for (int l = 0; l < PP; l++)
      check(t0v[l] + t1v[l] == 3 * (y0[0][l] + y1[0][l]) + act0[0][l] + act1[0][l], "AXPY on shares");

    // ---- 7. OT session, ReLU and MaxPool on the conv output ----
    sess = 1; @(negedge clk); sess = 0; n_sess++;
    while (!(sr0 && sr1)) @(negedge clk);
    for (int p = 0; p < NPIX; p++) begin
      for (int l = 0; l < PP; l++) begin a0[l] = y0[p][l]; a1[l] = y1[p][l]; end
      beat(OP_RELU, 2'b11, 1, 1);
      drain(2'b11, 1);
      t0v = o0.pop_front(); void'(o0b.pop_front()); t1v = o1.pop_front();
      for (int l = 0; l < PP; l++) begin
        automatic ring_t yv = y0[p][l] + y1[p][l];
        check(t0v[l] + t1v[l] == ($signed(yv) >= 0 ? yv : '0), "2PC-ReLU output");
      end
    end
    for (int p = 0; p < NPIX; p++) begin
      for (int l = 0; l < PP; l++) begin a0[l] = y0[p][l]; a1[l] = y1[p][l]; end
      beat(OP_MAXPOOL, 2'b11, p == 0, p == NPIX - 1);
    end
    drain(2'b11, 1);
    t0v = o0.pop_front(); void'(o0b.pop_front()); t1v = o1.pop_front();
    for (int l = 0; l < PP; l++) begin
      automatic ring_t mx = y0[0][l] + y1[0][l];
      for (int p = 1; p < NPIX; p++)
        if ($signed(y0[p][l] + y1[p][l]) > $signed(mx)) mx = y0[p][l] + y1[p][l];
      check(t0v[l] + t1v[l] == mx, "2PC-MaxPool output");
    end
    check(o0.size() == 0 && o1.size() == 0, "no stray results");

    // ---- every mechanism happened ----
    $display("events: SHR=%0d SUB=%0d REC=%0d AXPY=%0d CONV=%0d X2ACT=%0d AVGPOOL=%0d RELU=%0d MAXPOOL=%0d",
             n_alu[ALU_SHR], n_alu[ALU_SUB], n_alu[ALU_REC], n_alu[ALU_AXPY], n_op[OP_CONV],
             n_op[OP_X2ACT], n_op[OP_AVGPOOL], n_op[OP_RELU], n_op[OP_MAXPOOL]);
    $display("events: OT sessions=%0d link words=%0d parallel link cycles=%0d stall cycles=%0d operator switches=%0d truncation wraps=%0d",
             n_sess, n_words, n_par, n_stall, n_switch, wraps);
    check(n_alu[ALU_SHR] > 0 && n_alu[ALU_SUB] > 0 && n_alu[ALU_REC] > 0 && n_alu[ALU_AXPY] > 0,
          "every ALU operation used");
    check(n_op[OP_CONV] > 0 && n_op[OP_X2ACT] > 0 && n_op[OP_AVGPOOL] > 0, "polynomial operators used");
    check(n_op[OP_RELU] > 0 && n_op[OP_MAXPOOL] > 0, "comparison operators used");
    check(n_sess > 0 && n_words > 0, "OT session and link traffic happened");
    check(n_par > 0, "lanes compared in parallel");
    check(n_stall > 0, "back-pressure on the operand bus happened");
    check(n_switch > 0, "operator switch happened");
    check(wraps * 10 < checks, "truncation wraps rare");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
