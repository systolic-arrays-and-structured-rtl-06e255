// tb_sa_pe: checks one INT8-weight PE and one FP32-weight PE against a
// step-by-step model: after compute step t, a_out must equal the activation
// applied at step t and psum_out must equal psum_in(t) + a_in(t-2) * w. Cycles
// with en low are inserted at random and must leave every register unchanged;
// weights are re-programmed during the run without a compute step.
module tb_sa_pe;
  import sa_pkg::*;
  import fp_ref_pkg::*;

  localparam int STEPS = 3000;

  logic        clk = 0, rst_n = 0, en = 0, we8 = 0, we32 = 0;
  logic [7:0]  w8;
  logic [31:0] w32;
  fp32_t       a_in, psum_in;
  fp32_t       a_out8, psum_out8, a_out32, psum_out32;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  sa_pe #(.WEIGHT_INT8(1'b1)) dut8 (
    .clk(clk), .rst_n(rst_n), .en(en), .w_we(we8), .w_data(w8),
    .a_in(a_in), .psum_in(psum_in), .a_out(a_out8), .psum_out(psum_out8));
  sa_pe #(.WEIGHT_INT8(1'b0)) dut32 (
    .clk(clk), .rst_n(rst_n), .en(en), .w_we(we32), .w_data(w32),
    .a_in(a_in), .psum_in(psum_in), .a_out(a_out32), .psum_out(psum_out32));

  task automatic chk(string what, logic [31:0] got, logic [31:0] exp_v);
    checks++;
    if (got !== exp_v) begin
      failures++;
      if (failures < 10) $display("FAIL %s got=%h exp=%h at %0t", what, got, exp_v, $time);
    end
  endtask

  initial begin
    #200000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [31:0] a_hist [STEPS];
    logic [7:0]  cur_w8, w8_hist [STEPS];
    logic [31:0] cur_w32, w32_hist [STEPS];
    logic [31:0] p8, p32, hold_a8, hold_p8;
    a_in = '0; psum_in = '0; w8 = '0; w32 = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    chk("reset a_out", a_out8, 32'd0);
    chk("reset psum", psum_out8, 32'd0);
    cur_w8 = 8'h85; cur_w32 = 32'hbfc0_0000;
    w8 = cur_w8; w32 = cur_w32; we8 = 1; we32 = 1;
    @(negedge clk);
    we8 = 0; we32 = 0;
    for (int t = 0; t < STEPS; t++) begin
      // occasional idle cycles with changing inputs: nothing may move
      if (one_in(4)) begin
        hold_a8 = a_out8; hold_p8 = psum_out32;
        a_in = rand_f32(1, 254); psum_in = rand_f32(1, 254);
        if (one_in(2)) begin      // re-program the weights
          cur_w8 = rand_u8(); cur_w32 = rand_f32(110, 140);
          if (one_in(8)) cur_w8 = {1'($urandom), 7'd0};
          w8 = cur_w8; w32 = cur_w32; we8 = 1; we32 = 1;
        end
        @(negedge clk);
        we8 = 0; we32 = 0;
        chk("hold a_out", a_out8, hold_a8);
        chk("hold psum", psum_out32, hold_p8);
      end
      a_in    = (one_in(10)) ? 32'd0 : rand_f32(110, 140);
      psum_in = (one_in(10)) ? 32'd0 : rand_f32(110, 150);
      a_hist[t]   = a_in;
      w8_hist[t]  = cur_w8;
      w32_hist[t] = cur_w32;
      en = 1;
      @(negedge clk);
      en = 0;
      chk("a_out8", a_out8, a_in);
      chk("a_out32", a_out32, a_in);
      if (t >= 2) begin
        // the product of step t-1 used a_in(t-2) and the weight present then
        p8  = ref_mul_int8(a_hist[t-2], w8_hist[t-1]);
        p32 = ref_mul_fp32(a_hist[t-2], w32_hist[t-1]);
        chk("psum8", psum_out8, ref_add(psum_in, p8));
        chk("psum32", psum_out32, ref_add(psum_in, p32));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
