// tb_fp32_add: checks the FP32 adder against exact integer sums truncated
// toward zero: random pairs over the whole normal range (so large exponent
// differences and sticky bits occur), near-equal operands of opposite sign
// (massive cancellation), exact cancellation to +0, zero operands and carries.
module tb_fp32_add;
  import sa_pkg::*;
  import fp_ref_pkg::*;

  fp32_t a, b, sum;
  int checks = 0, failures = 0;

  fp32_add dut (.a(a), .b(b), .sum(sum));

  task automatic check(logic [31:0] x, logic [31:0] y);
    logic [31:0] exp_v;
    a = fp32_t'(x); b = fp32_t'(y);
    #1;
    exp_v = ref_add(x, y);
    checks++;
    if (sum !== exp_v) begin
      failures++;
      if (failures < 10) $display("FAIL a=%h b=%h got=%h exp=%h", x, y, sum, exp_v);
    end
  endtask

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [31:0] x;
    check(32'h3f80_0000, 32'h3f80_0000);     // 1 + 1 (carry)
    check(32'h3f80_0000, 32'hbf80_0000);     // exact cancellation
    check(32'h0000_0000, 32'hc120_0000);     // 0 + x
    check(32'h4120_0000, 32'h8000_0000);     // x + -0
    check(32'h0000_0000, 32'h0000_0000);
    check(32'h3f80_0000, 32'hb380_0000);     // 1 - 2^-24: sticky in subtraction
    check(32'h3f80_0000, 32'ha000_0001);     // 1 - tiny
    for (int n = 0; n < 20000; n++) check(rand_f32(100, 150), rand_f32(100, 150));
    for (int n = 0; n < 5000; n++)  check(rand_f32(1, 254), rand_f32(1, 254));
    for (int n = 0; n < 5000; n++) begin      // near-equal magnitudes, opposite signs
      x = rand_f32(30, 200);
      check(x, {~x[31], x[30:23], x[22:0] ^ 23'($urandom % 16)});
      check(x, {~x[31], x[30:23] - 8'd1, 23'($urandom)});
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
