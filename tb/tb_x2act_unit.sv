// tb_x2act_unit: server-0 and server-1 copies of x2act_unit evaluate the
// polynomial activation on shares of random fixed-point inputs with random
// Beaver pairs (Z = A * A). The recovered result is compared with
// w1*x^2 + w2*x + b worked out here in fixed point (tolerance 3 units for
// the two share-local truncations, and the rare 2^(32-FRAC) wrap of
// share-local truncation counted separately); the first part checks the plain square
// (w1 = 1, w2 = 0, b = 0). Also checked: one element per two cycles.
module tb_x2act_unit;
  import pasnet_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0, wraps = 0;

  ring_t  w1, w2, b;
  logic   v, rdy0, rdy1, ov0, ov1;
  lanes_t x0, x1, a0, a1, e, z0, z1, r0, r1;
  int unsigned cyc = 0;
  always @(posedge clk) cyc++;

  x2act_unit s0 (.clk, .rst_n, .role(SERVER0), .w1, .w2, .b, .in_valid(v), .in_ready(rdy0),
    .x_sh(x0), .a_sh(a0), .e_pub(e), .z_sh(z0), .out_valid(ov0), .res(r0));
  x2act_unit s1 (.clk, .rst_n, .role(SERVER1), .w1, .w2, .b, .in_valid(v), .in_ready(rdy1),
    .x_sh(x1), .a_sh(a1), .e_pub(e), .z_sh(z1), .out_valid(ov1), .res(r1));

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
    longint xv[PP], want[PP];
    ring_t A, As;
    int unsigned tin, tout;
    v = 0; w1 = '0; w2 = '0; b = '0;
    x0 = '0; x1 = '0; a0 = '0; a1 = '0; e = '0; z0 = '0; z1 = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int it = 0; it < 200; it++) begin
      @(negedge clk);
      if (it < 50) begin
        w1 = ring_t'(1 << FRAC); w2 = '0; b = '0;
      end else begin
        w1 = ring_t'($urandom_range(0, 2 * (1 << FRAC)) - (1 << FRAC));
        w2 = ring_t'($urandom_range(0, 2 * (1 << FRAC)) - (1 << FRAC));
        b  = ring_t'($urandom_range(0, 2 * (1 << FRAC)) - (1 << FRAC));
      end
      for (int l = 0; l < PP; l++) begin
        xv[l] = longint'($urandom_range(0, 16 << FRAC)) - longint'(8 << FRAC);  // [-8, 8)
        // reference in fixed point, FRAC fraction bits
        want[l] = ((longint'($signed(w1)) * ((xv[l] * xv[l]) >>> FRAC)) >>> FRAC)
                  + ((longint'($signed(w2)) * xv[l]) >>> FRAC) + longint'($signed(b));
        A  = $urandom; As = $urandom;
        x0[l] = $urandom;       x1[l] = ring_t'(xv[l]) - x0[l];
        a0[l] = As;             a1[l] = A - As;
        e[l]  = (x0[l] - a0[l]) + (x1[l] - a1[l]);
        z0[l] = $urandom;       z1[l] = A * A - z0[l];
      end
      v = 1;
      @(posedge clk);
      while (!rdy0) @(posedge clk);
      tin = cyc;
      #1 v = 0;
      do @(negedge clk); while (!ov0);
      tout = cyc;
      check(ov1, "servers finish together");
      check(tout - tin == 2, $sformatf("two cycles per element (got %0d)", tout - tin));
      for (int l = 0; l < PP; l++) begin
        automatic longint got = longint'($signed(r0[l] + r1[l]));
        automatic longint err  = got - want[l];
        automatic longint wrap = longint'(1) << (RING_W - FRAC);
        if (err > wrap / 2) begin err -= wrap; wraps++; end
        else if (err < -wrap / 2) begin err += wrap; wraps++; end
        check(err <= 3 && err >= -3, $sformatf("x2act x=%0d got %0d want %0d", xv[l], got, want[l]));
      end
    end
    // Share-local truncation is off by 2^(32-FRAC) with probability about
    // |x| / 2^31 for a value x before truncation; with these ranges that is rare.
    $display("truncation wraps: %0d of %0d elements", wraps, 200 * PP);
    check(wraps * 20 < 200 * PP, "truncation wraps rare");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
