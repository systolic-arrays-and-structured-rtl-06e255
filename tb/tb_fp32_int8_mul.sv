// tb_fp32_int8_mul: checks the hybrid FP32 x INT8 multiplier against exact
// double-precision products truncated toward zero. Covers every weight value
// (all 256 codes, including +0 and -0) with random activations, zero and
// subnormal activations, mantissas of all ones, and random pairs.
module tb_fp32_int8_mul;
  import sa_pkg::*;
  import fp_ref_pkg::*;

  fp32_t       act, prod;
  logic [7:0]  wgt;
  int checks = 0, failures = 0;

  fp32_int8_mul dut (.act(act), .wgt(wgt), .prod(prod));

  task automatic check(logic [31:0] a, logic [7:0] w);
    logic [31:0] exp_v;
    act = fp32_t'(a); wgt = w;
    #1;
    exp_v = ref_mul_int8(a, w);
    checks++;
    if (prod !== exp_v) begin
      failures++;
      if (failures < 10) $display("FAIL act=%h w=%h got=%h exp=%h", a, w, prod, exp_v);
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
    for (int w = 0; w < 256; w++) begin
      check(rand_f32(1, 240), 8'(w));
      check({1'b0, 8'd127, 23'h7fffff}, 8'(w));   // largest significand
      check(32'h0000_0000, 8'(w));                 // +0 activation
      check(32'h8000_0000, 8'(w));                 // -0 activation
      check(32'h0012_3456, 8'(w));                 // subnormal read as zero
    end
    for (int n = 0; n < 20000; n++) check(rand_f32(1, 240), rand_u8());
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
