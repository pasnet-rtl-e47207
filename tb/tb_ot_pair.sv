// tb_ot_pair: ot_sender (server 0) and ot_receiver (server 1) joined by
// their message ports run the OT comparison flow on random share pairs and
// on edge values (0, -1, 1, most positive, most negative). Both must hand
// out the same T_mask, equal to [d0 + d1 >= 0] as a signed 32-bit value,
// worked out here. Also checked: the message counts of each step (1 word S
// per session, 16 words R, 64 words of matrix, 1 word T_mask per
// comparison), and a second session with a new generator.
module tb_ot_pair;
  import pasnet_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  ring_t g, m, d0, d1;
  logic  sess, rdy0, rdy1, cv, crdy0, crdy1, mv0, mv1, mk0, mk1;
  logic  a_v, a_r, b_v, b_r;
  ring_t a_d, b_d;      // a: server 0 -> 1, b: server 1 -> 0
  int    n_a = 0, n_b = 0;

  ot_sender u0 (.clk, .rst_n, .g, .m, .sess_start(sess), .sess_ready(rdy0), .cmp_valid(cv),
    .cmp_ready(crdy0), .d_sh(d0), .mask_valid(mv0), .mask(mk0),
    .tx_valid(a_v), .tx_ready(a_r), .tx_data(a_d), .rx_valid(b_v), .rx_ready(b_r), .rx_data(b_d));
  ot_receiver u1 (.clk, .rst_n, .g, .m, .sess_start(sess), .sess_ready(rdy1), .cmp_valid(cv),
    .cmp_ready(crdy1), .d_sh(d1), .mask_valid(mv1), .mask(mk1),
    .tx_valid(b_v), .tx_ready(b_r), .tx_data(b_d), .rx_valid(a_v), .rx_ready(a_r), .rx_data(a_d));

  always @(posedge clk) begin
    if (a_v && a_r) n_a++;
    if (b_v && b_r) n_b++;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic session(ring_t gg);
    @(negedge clk);
    g = gg; sess = 1;
    @(negedge clk);
    sess = 0;
    while (!(rdy0 && rdy1)) @(negedge clk);
  endtask

  task automatic compare(ring_t d);
    int a0, b0;
    logic want, got0, got1;
    bit seen0, seen1;
    a0 = n_a; b0 = n_b;
    d0 = $urandom; d1 = d - d0;
    want = !d[31];
    cv = 1;
    @(negedge clk);
    cv = 0;
    seen0 = 0; seen1 = 0;
    while (!(seen0 && seen1)) begin
      if (mv0) begin seen0 = 1; got0 = mk0; end
      if (mv1) begin seen1 = 1; got1 = mk1; end
      @(negedge clk);
    end
    check(got0 == want, $sformatf("server 0 T_mask for d=%0d", $signed(d)));
    check(got1 == want, $sformatf("server 1 T_mask for d=%0d", $signed(d)));
    check(n_b - b0 == 16 + 1, "16 R words and 1 T_mask word to server 0");
    check(n_a - a0 == 64, "64 matrix words to server 1");
  endtask

  initial begin
    int a0;
    ring_t edge_v[6] = '{32'd0, 32'hFFFF_FFFF, 32'd1, 32'h7FFF_FFFF, 32'h8000_0000, 32'd256};
    g = 32'd7; m = 32'h7FFF_FFFF;   // 7 is a primitive root of the prime 2^31 - 1
    sess = 0; cv = 0; d0 = '0; d1 = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    a0 = n_a;
    session(32'd7);
    check(n_a - a0 == 1, "one S word per session");
    foreach (edge_v[i]) compare(edge_v[i]);
    for (int it = 0; it < 24; it++) begin
      automatic ring_t d = (it % 2) ? ring_t'($urandom) : ring_t'($signed($urandom_range(0, 2000)) - 1000);
      compare(d);
    end
    session(32'd16807);
    for (int it = 0; it < 10; it++) compare($urandom);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
