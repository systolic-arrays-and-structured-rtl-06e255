// tb_fp32_mul: checks the FP32 x FP32 multiplier against exact double
// products truncated toward zero: random pairs, zero and subnormal operands,
// all-ones significands (normalisation shift) and exponent underflow to +0.
module tb_fp32_mul;
  import sa_pkg::*;
  import fp_ref_pkg::*;

  fp32_t a, b, prod;
  int checks = 0, failures = 0;

  fp32_mul dut (.a(a), .b(b), .prod(prod));

  task automatic check(logic [31:0] x, logic [31:0] y);
    logic [31:0] exp_v;
    a = fp32_t'(x); b = fp32_t'(y);
    #1;
    exp_v = ref_mul_fp32(x, y);
    checks++;
    if (prod !== exp_v) begin
      failures++;
      if (failures < 10) $display("FAIL a=%h b=%h got=%h exp=%h", x, y, prod, exp_v);
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    check(32'h3f80_0000, 32'h3f80_0000);     // 1 * 1
    check(32'h3fff_ffff, 32'h3fff_ffff);     // product needs the normalising shift
    check(32'h0000_0000, 32'h4049_0fdb);     // zero
    check(32'hc049_0fdb, 32'h8000_0000);     // -0
    check(32'h0040_0000, 32'h3f80_0000);     // subnormal read as zero
    check(32'h0100_0000, 32'h0100_0000);     // underflow
    for (int n = 0; n < 20000; n++) check(rand_f32(64, 190), rand_f32(64, 190));
    for (int n = 0; n < 2000; n++)  check(rand_f32(1, 70), rand_f32(1, 70));   // underflow region
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
