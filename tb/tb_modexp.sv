// tb_modexp: compares modexp with a bit-serial reference computed here for
// random bases and exponents under several primes (2^31 - 1, 2^32 - 5,
// 65521, 97), plus known values (Fermat: g^(p-1) = 1 mod p, 7^0 = 1), and
// checks that every exponentiation takes 32 cycles.
module tb_modexp;
  import pasnet_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic  start, busy, done;
  ring_t base, m, result, ex;
  int unsigned cyc = 0;
  always @(posedge clk) cyc++;

  modexp dut (.clk, .rst_n, .start, .base, .exp(ex), .m, .busy, .done, .result);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  function automatic ring_t ref_pow(ring_t bb, ring_t ee, ring_t mm);
    longint unsigned r = 1 % mm, p = bb;
    for (int i = 0; i < 32; i++) begin
      if (ee[i]) r = (r * p) % mm;
      p = (p * p) % mm;
    end
    return ring_t'(r);
  endfunction

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run(ring_t bb, ring_t ee, ring_t mm, ring_t want);
    int unsigned t0;
    @(negedge clk);
    base = bb; ex = ee; m = mm; start = 1;
    @(negedge clk);
    start = 0;
    t0 = cyc;
    while (!done) @(negedge clk);
    check(result == want, $sformatf("%0d^%0d mod %0d = %0d, got %0d", bb, ee, mm, want, result));
    check(cyc - t0 == 32, $sformatf("32 cycles, got %0d", cyc - t0));
  endtask

  initial begin
    ring_t primes[4] = '{32'h7FFF_FFFF, 32'hFFFF_FFFB, 32'd65521, 32'd97};
    ring_t mm, bb, ee;
    start = 0; base = '0; ex = '0; m = 32'd97;
    repeat (3) @(posedge clk);
    rst_n = 1;
    run(32'd7, 32'h7FFF_FFFE, 32'h7FFF_FFFF, 32'd1);
    run(32'd7, 32'd0, 32'h7FFF_FFFF, 32'd1);
    run(32'd3, 32'd5, 32'd97, 32'd49);   // 243 mod 97
    for (int it = 0; it < 200; it++) begin
      mm = primes[it % 4];
      bb = $urandom % mm;
      ee = $urandom;
      run(bb, ee, mm, ref_pow(bb, ee, mm));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
