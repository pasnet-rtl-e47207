// tb_nonpoly_op: server-0 and server-1 copies of nonpoly_op, joined by their
// message ports, run 2PC-ReLU on random beats and 2PC-MaxPool on random
// 2x2 (4-element) and 3x3 (9-element) windows of secret-shared values. The
// recovered outputs must equal max(x, 0) and the window maximum worked out
// here, and the number of comparisons (T_mask words) must be 4 per ReLU beat
// and 4 x (window - 1) per MaxPool window: 3 per output for a 2x2 window.
// The four lanes have their own comparison engines, so a ReLU beat must take
// about one comparison time (under 2,500 cycles; one comparison is about
// 1,680), not four. During the MaxPool part the link lanes are stalled at
// random, each on its own, so the lanes drift apart and must be joined again.
module tb_nonpoly_op;
  import pasnet_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0, cyc = 0;
  always @(posedge clk) cyc++;

  np_mode_e mode;
  ring_t    g, m;
  logic     sess, sr0, sr1, v, first, last, rdy0, rdy1, ov0, ov1;
  lanes_t   x0, x1, r0, r1;
  logic   [PP-1:0] a_v, a_r, b_v, b_r, a_vs, a_rs, hold;
  lanes_t          a_d, b_d;
  int              n_mask = 0, n_hold = 0;
  bit              throttle = 0;

  nonpoly_op s0 (.clk, .rst_n, .role(SERVER0), .mode, .g, .m, .sess_start(sess),
    .sess_ready(sr0), .in_valid(v), .in_ready(rdy0), .in_first(first), .in_last(last),
    .x_sh(x0), .out_valid(ov0), .res(r0),
    .tx_valid(a_v), .tx_ready(a_rs), .tx_data(a_d), .rx_valid(b_v), .rx_ready(b_r), .rx_data(b_d));
  nonpoly_op s1 (.clk, .rst_n, .role(SERVER1), .mode, .g, .m,
    .sess_start(sess), .sess_ready(sr1), .in_valid(v), .in_ready(rdy1), .in_first(first),
    .in_last(last), .x_sh(x1), .out_valid(ov1), .res(r1),
    .tx_valid(b_v), .tx_ready(b_r), .tx_data(b_d), .rx_valid(a_vs), .rx_ready(a_r), .rx_data(a_d));

  // random per-lane stalls on the server 0 -> server 1 link
  assign a_vs = a_v & ~hold;
  assign a_rs = a_r & ~hold;
  always @(posedge clk) begin
    hold <= throttle ? PP'($urandom) & PP'($urandom) : '0;
    n_hold += $countones(hold & a_v);
  end

  // server 0 receives exactly one T_mask word per comparison and lane
  always @(posedge clk) n_mask += $countones(s0.mask_valid);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    repeat (5000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic ring_t rnd_val();
    return ($urandom % 3 == 0) ? ring_t'($urandom) : ring_t'($signed($urandom_range(0, 4000)) - 2000);
  endfunction

  // one beat into both servers; waits until both took it
  task automatic put(lanes_t xv, bit f, bit l);
    for (int k = 0; k < PP; k++) begin x0[k] = $urandom; x1[k] = xv[k] - x0[k]; end
    first = f; last = l; v = 1;
    @(posedge clk);
    while (!(rdy0 && rdy1)) @(posedge clk);
    #1 v = 0;
  endtask

  task automatic get(output lanes_t res);
    do @(negedge clk); while (!ov0);
    check(ov1, "servers finish together");
    for (int k = 0; k < PP; k++) res[k] = r0[k] + r1[k];
  endtask

  initial begin
    lanes_t xv, want, got;
    int n0, win, t0;
    mode = NP_RELU; g = 32'd7; m = 32'h7FFF_FFFF;
    sess = 0; v = 0; first = 0; last = 0; x0 = '0; x1 = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk); sess = 1; @(negedge clk); sess = 0;
    while (!(sr0 && sr1)) @(negedge clk);

    // ReLU
    for (int it = 0; it < 8; it++) begin
      n0 = n_mask;
      mode = NP_RELU;
      for (int k = 0; k < PP; k++) begin
        xv[k] = rnd_val();
        want[k] = $signed(xv[k]) > 0 ? xv[k] : '0;
      end
      if (it == 0) xv[0] = '0;
      if (it == 0) want[0] = '0;
      t0 = cyc;
      put(xv, 1, 1);
      get(got);
      check(cyc - t0 < 2500, $sformatf("ReLU beat took %0d cycles", cyc - t0));
      for (int k = 0; k < PP; k++)
        check(got[k] == want[k], $sformatf("ReLU(%0d) got %0d", $signed(xv[k]), $signed(got[k])));
      check(n_mask - n0 == PP, "one comparison per ReLU element");
    end

    // MaxPool, with link stalls
    throttle = 1;
    for (int it = 0; it < 6; it++) begin
      win = (it % 3 == 2) ? 9 : 4;
      n0 = n_mask;
      mode = NP_MAXPOOL;
      for (int w = 0; w < win; w++) begin
        for (int k = 0; k < PP; k++) begin
          xv[k] = ring_t'($signed($urandom_range(0, 4000)) - 2000);
          if (w == 0 || $signed(xv[k]) > $signed(want[k])) want[k] = xv[k];
        end
        put(xv, w == 0, w == win - 1);
      end
      get(got);
      for (int k = 0; k < PP; k++)
        check(got[k] == want[k], $sformatf("MaxPool got %0d want %0d", $signed(got[k]), $signed(want[k])));
      check(n_mask - n0 == PP * (win - 1), $sformatf("%0d comparisons per output", win - 1));
    end
    check(n_hold > 0, "link stalls happened");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
