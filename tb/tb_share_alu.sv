// tb_share_alu: self-checking test of share_alu. Drives random beats of every
// operation and compares with sums and products worked out here: SHR shares
// must recover the input and differ between calls, REC/SUB/AXPY must match
// the ring arithmetic, and every result must come exactly one cycle later.
module tb_share_alu;
  import pasnet_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic    in_valid, out_valid;
  alu_op_e op;
  ring_t   k;
  lanes_t  a, b, res0, res1;
  int checks = 0, failures = 0;

  share_alu dut (.clk, .rst_n, .in_valid, .op, .k, .a, .b, .out_valid, .res0, .res1);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    lanes_t prev_r;
    in_valid = 0; op = ALU_SHR; k = '0; a = '0; b = '0; prev_r = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int it = 0; it < 200; it++) begin
      @(negedge clk);
      op = alu_op_e'(it % 4);
      k  = $urandom;
      for (int l = 0; l < PP; l++) begin a[l] = $urandom; b[l] = $urandom; end
      in_valid = 1;
      @(negedge clk);
      in_valid = 0;
      check(out_valid, "out_valid one cycle after in_valid");
      for (int l = 0; l < PP; l++) begin
        unique case (op)
          ALU_SHR: begin
            check(res0[l] + res1[l] == a[l], "SHR shares recover x");
            check(res0[l] != prev_r[l], "SHR mask changes");
            prev_r[l] = res0[l];
          end
          ALU_REC:  check(res0[l] == a[l] + b[l], "REC");
          ALU_SUB:  check(res0[l] == a[l] - b[l], "SUB");
          ALU_AXPY: check(res0[l] == ring_t'(longint'(k) * longint'(a[l]) + longint'(b[l])), "AXPY");
        endcase
      end
      @(negedge clk);
      check(!out_valid, "single result per beat");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
