// tb_beaver_mac: runs the server-0 and server-1 copies of beaver_mac side by
// side on the two shares of a product and recovers the result.
//  1. The 4-bit worked example of the published design (query u = [-2, 1],
//     model w = [[0, 1], [2, -1]], given shares of u, w, A, B and Z): the
//     ring Z_2^32 reduces to Z_16 by keeping the low 4 bits, so the low 4 bits
//     of the result shares must be the example's r0 = [-4, -4], r1 = [6, 1],
//     and the recovered result must be u x w = [2, -3] in Z_16 (the
//     example's triple Z is a correct product only modulo 16).
//  2. Random dot products of random length with random triples, plain ring
//     (TRUNC = 0): the recovered value must equal the dot product, and the
//     result must appear 3 cycles per term after the first term.
//  3. The same with the default fixed-point truncation: recovered value
//     within one unit of the truncated dot product.
module tb_beaver_mac;
  import pasnet_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  typedef struct packed {
    logic   first, last;
    lanes_t x, y, e, f, z;
  } beat_t;

  beat_t  in0, in1;
  logic   v, rdy0, rdy1, rdy2, rdy3, ov0, ov1, ov2, ov3;
  lanes_t r0, r1, r2, r3;
  logic   trunc_mode;
  logic   va, vb;

  assign va = v && !trunc_mode;
  assign vb = v &&  trunc_mode;

  beaver_mac #(.TRUNC(0)) s0 (.clk, .rst_n, .role(SERVER0), .in_valid(va), .in_ready(rdy0),
    .in_first(in0.first), .in_last(in0.last), .x_sh(in0.x), .y_sh(in0.y), .e_pub(in0.e),
    .f_pub(in0.f), .z_sh(in0.z), .out_valid(ov0), .res(r0));
  beaver_mac #(.TRUNC(0)) s1 (.clk, .rst_n, .role(SERVER1), .in_valid(va), .in_ready(rdy1),
    .in_first(in1.first), .in_last(in1.last), .x_sh(in1.x), .y_sh(in1.y), .e_pub(in1.e),
    .f_pub(in1.f), .z_sh(in1.z), .out_valid(ov1), .res(r1));
  beaver_mac t0 (.clk, .rst_n, .role(SERVER0), .in_valid(vb), .in_ready(rdy2),
    .in_first(in0.first), .in_last(in0.last), .x_sh(in0.x), .y_sh(in0.y), .e_pub(in0.e),
    .f_pub(in0.f), .z_sh(in0.z), .out_valid(ov2), .res(r2));
  beaver_mac t1 (.clk, .rst_n, .role(SERVER1), .in_valid(vb), .in_ready(rdy3),
    .in_first(in1.first), .in_last(in1.last), .x_sh(in1.x), .y_sh(in1.y), .e_pub(in1.e),
    .f_pub(in1.f), .z_sh(in1.z), .out_valid(ov3), .res(r3));

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  ring_t want[PP];
  int unsigned cyc = 0;
  always @(posedge clk) cyc++;

  // Feed one dot product of n terms. The triple of a dot product is
  // Z = sum_t A_t * B_t, handed in with the first term; every term has its
  // own masks A_t, B_t. t0c is the cycle the first term was taken.
  task automatic run_dot(input int n, input bit tr, output int unsigned t0c);
    beat_t b0[16], b1[16];
    ring_t X, Y, A, B, Xs0, Ys0, As0, Bs0, Zs0;
    ring_t zsum[PP];
    for (int l = 0; l < PP; l++) begin want[l] = '0; zsum[l] = '0; end
    trunc_mode = tr;
    for (int t = 0; t < n; t++) begin
      b0[t] = '0; b1[t] = '0;
      for (int l = 0; l < PP; l++) begin
        X = tr ? ring_t'($signed($urandom_range(0, 8191)) - 4096) : $urandom;
        Y = tr ? ring_t'($signed($urandom_range(0, 8191)) - 4096) : $urandom;
        A = $urandom; B = $urandom;
        Xs0 = $urandom; Ys0 = $urandom; As0 = $urandom; Bs0 = $urandom;
        want[l] += X * Y;
        zsum[l] += A * B;
        b0[t].x[l] = Xs0;     b1[t].x[l] = X - Xs0;
        b0[t].y[l] = Ys0;     b1[t].y[l] = Y - Ys0;
        // E = rec(X_i - A_i), F = rec(Y_i - B_i)
        b0[t].e[l] = (Xs0 - As0) + ((X - Xs0) - (A - As0));
        b0[t].f[l] = (Ys0 - Bs0) + ((Y - Ys0) - (B - Bs0));
        b1[t].e[l] = b0[t].e[l];
        b1[t].f[l] = b0[t].f[l];
      end
      b0[t].first = (t == 0); b0[t].last = (t == n - 1);
      b1[t].first = b0[t].first; b1[t].last = b0[t].last;
    end
    for (int l = 0; l < PP; l++) begin
      Zs0 = $urandom;
      b0[0].z[l] = Zs0; b1[0].z[l] = zsum[l] - Zs0;
    end
    for (int t = 0; t < n; t++) begin
      in0 = b0[t]; in1 = b1[t];
      v = 1;
      @(posedge clk);
      while (!(tr ? rdy2 : rdy0)) @(posedge clk);
      if (t == 0) t0c = cyc;
      #1 v = 0;
    end
  endtask

  initial begin
    int unsigned t0c, t1c;
    v = 0; trunc_mode = 0; in0 = '0; in1 = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk);

    // ---- 1. worked example (only lanes 0 and 1 used) ----
    begin
      static int u0[2] = '{-4, -4}, u1[2] = '{2, 5};
      static int w0[2][2] = '{'{-3, -5}, '{-5, 1}}, w1[2][2] = '{'{3, 6}, '{7, -2}};
      static int a0[2] = '{3, 4}, a1[2] = '{4, -2};
      static int b0[2][2] = '{'{2, 4}, '{-5, 0}}, b1[2][2] = '{'{-6, -1}, '{-4, -2}};
      static int z0[2] = '{-8, -4}, z1[2] = '{-6, 5};
      static int exp_r0[2] = '{-4, -4}, exp_r1[2] = '{6, 1}, exp_r[2] = '{2, -3};
      for (int t = 0; t < 2; t++) begin
        in0 = '0; in1 = '0;
        for (int l = 0; l < 2; l++) begin
          in0.x[l] = ring_t'(u0[t]);    in1.x[l] = ring_t'(u1[t]);
          in0.y[l] = ring_t'(w0[t][l]); in1.y[l] = ring_t'(w1[t][l]);
          in0.e[l] = ring_t'(u0[t] - a0[t] + u1[t] - a1[t]);
          in1.e[l] = in0.e[l];
          in0.f[l] = ring_t'(w0[t][l] - b0[t][l] + w1[t][l] - b1[t][l]);
          in1.f[l] = in0.f[l];
          in0.z[l] = ring_t'(z0[l]);    in1.z[l] = ring_t'(z1[l]);
        end
        check(in0.e[0][3:0] == (t == 0 ? 4'd7 : 4'hF), "example E matches figure (7, -1)");
        in0.first = (t == 0); in0.last = (t == 1);
        in1.first = in0.first; in1.last = in0.last;
        v = 1;
        @(posedge clk);
        while (!rdy0) @(posedge clk);
        #1 v = 0;
      end
      do @(negedge clk); while (!ov0);
      for (int l = 0; l < 2; l++) begin
        check(r0[l][3:0] == 4'(exp_r0[l]), "example r0 (low 4 bits) matches figure");
        check(r1[l][3:0] == 4'(exp_r1[l]), "example r1 (low 4 bits) matches figure");
        check(4'(r0[l] + r1[l]) == 4'(exp_r[l]), "example u x w recovered in Z_16");
      end
      check(4'(r0[0] + r0[1]) == 4'(-8) && 4'(r1[0] + r1[1]) == 4'd7, "example m0 = -8, m1 = 7");
    end
    @(negedge clk);

    // ---- 2. random plain-ring dot products with cycle count ----
    for (int it = 0; it < 40; it++) begin
      automatic int n = $urandom_range(1, 16);
      run_dot(n, 0, t0c);
      do @(negedge clk); while (!ov0);
      t1c = cyc;
      check(ov1, "both servers finish together");
      check(t1c - t0c == 3 * n, $sformatf("3 cycles per term (n=%0d got %0d)", n, t1c - t0c));
      for (int l = 0; l < PP; l++)
        check(r0[l] + r1[l] == want[l], $sformatf("dot product n=%0d got %h want %h",
                                                  n, r0[l] + r1[l], want[l]));
      @(negedge clk);
    end

    // ---- 3. fixed point ----
    for (int it = 0; it < 20; it++) begin
      automatic int n = $urandom_range(1, 8);
      run_dot(n, 1, t0c);
      do @(negedge clk); while (!ov2);
      for (int l = 0; l < PP; l++) begin
        automatic int diff = int'(r2[l] + r3[l]) - int'($signed(want[l]) >>> FRAC);
        check(diff >= -1 && diff <= 1, $sformatf("fixed-point product within 1 ulp: got %h want %h", r2[l] + r3[l], want[l]));
      end
      @(negedge clk);
    end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
