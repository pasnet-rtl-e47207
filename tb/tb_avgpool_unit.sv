// tb_avgpool_unit: server-0 and server-1 copies of avgpool_unit average
// windows of random fixed-point shares (window sizes 4 and 9, i.e. 2x2 and
// 3x3). The recovered output must be within 2 units of sum * scale worked out
// here (the rare 2^(32-FRAC) wrap of share-local truncation is counted apart), and must appear one cycle after the window's last element.
module tb_avgpool_unit;
  import pasnet_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0, wraps = 0;

  ring_t  scale;
  logic   v, first, last, ov0, ov1;
  lanes_t x0, x1, r0, r1;
  int unsigned cyc = 0;
  always @(posedge clk) cyc++;

  avgpool_unit s0 (.clk, .rst_n, .role(SERVER0), .scale, .in_valid(v), .in_first(first),
    .in_last(last), .x_sh(x0), .out_valid(ov0), .res(r0));
  avgpool_unit s1 (.clk, .rst_n, .role(SERVER1), .scale, .in_valid(v), .in_first(first),
    .in_last(last), .x_sh(x1), .out_valid(ov1), .res(r1));

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    longint sum[PP], xv;
    int unsigned tl, tout;
    int win;
    v = 0; first = 0; last = 0; x0 = '0; x1 = '0; scale = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int it = 0; it < 100; it++) begin
      win = (it % 2) ? 9 : 4;
      @(negedge clk);
      scale = ring_t'(((1 << FRAC) + win / 2) / win);
      for (int l = 0; l < PP; l++) sum[l] = 0;
      for (int k = 0; k < win; k++) begin
        for (int l = 0; l < PP; l++) begin
          xv = longint'($urandom_range(0, 16 << FRAC)) - longint'(8 << FRAC);
          sum[l] += xv;
          x0[l] = $urandom; x1[l] = ring_t'(xv) - x0[l];
        end
        first = (k == 0); last = (k == win - 1); v = 1;
        @(negedge clk);
      end
      tl = cyc;
      v = 0; first = 0; last = 0;
      while (!ov0) @(negedge clk);
      tout = cyc;
      check(ov1, "servers finish together");
      check(tout - tl == 1, "result one cycle after the last element");
      for (int l = 0; l < PP; l++) begin
        automatic longint got  = longint'($signed(r0[l] + r1[l]));
        automatic longint want = (sum[l] * longint'(scale)) >>> FRAC;
        automatic longint err  = got - want;
        automatic longint wrap = longint'(1) << (RING_W - FRAC);
        if (err > wrap / 2) begin err -= wrap; wraps++; end
        else if (err < -wrap / 2) begin err += wrap; wraps++; end
        check(err <= 2 && err >= -2, $sformatf("mean got %0d want %0d", got, want));
      end
    end
    $display("truncation wraps: %0d of %0d outputs", wraps, 100 * PP);
    check(wraps * 20 < 100 * PP, "truncation wraps rare");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
