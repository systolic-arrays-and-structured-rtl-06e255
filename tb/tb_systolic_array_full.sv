// tb_systolic_array_full: the systolic-array unit at its default size (32 x 32
// PEs, INT8 weights) running a tiled GEMM of 4 x 64 activations by 64 x 64
// weights, i.e. 2 x 2 weight tiles of which the one with the lowest L1 norm is
// pruned and skipped (see sa_gemm_host for the sequence and the checks).
module tb_systolic_array_full;
  import sa_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic        cv, rv, done;
  sa_op_e      op;
  logic [15:0] ad;
  logic [31:0] cd, rd;
  int ck, fl, tr, ts, ww, st, cp, za, zw, cy;
  int checks, failures;

  systolic_array dut (
    .clk(clk), .rst_n(rst_n), .cmd_valid(cv), .cmd_op(op), .cmd_addr(ad),
    .cmd_data(cd), .rsp_valid(rv), .rsp_data(rd));
  sa_gemm_host #(.N(32), .WEIGHT_INT8(1'b1), .M(4), .KT(2), .NT(2), .PRUNE(1)) host (
    .clk(clk), .rst_n(rst_n), .cmd_valid(cv), .cmd_op(op), .cmd_addr(ad),
    .cmd_data(cd), .rsp_valid(rv), .rsp_data(rd), .done(done),
    .checks(ck), .failures(fl), .n_tiles_run(tr), .n_tiles_skipped(ts),
    .n_weight_words(ww), .n_streams(st), .n_computes(cp),
    .n_zero_acts(za), .n_zero_weights(zw), .n_cycles(cy));

  task automatic need(string what, int count);
    checks++;
    $display("  %-28s %0d", what, count);
    if (count == 0) begin
      failures++;
      $display("FAIL mechanism never occurred: %s", what);
    end
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", ck, fl + 1);
    $finish;
  end

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    wait (done);
    checks = ck;
    failures = fl;
    need("weight tiles computed", tr);
    need("pruned tiles skipped", ts);
    need("weight words programmed", ww);
    need("stream instructions", st);
    need("compute instructions", cp);
    need("zero activations", za);
    need("zero weights", zw);
    $display("  %-28s %0d", "instruction cycles", cy);
    checks++;
    if (cy != tr * (32 * 32 / 4 + 33 * (4 + sa_latency(32) + 1))) begin
      failures++;
      $display("FAIL instruction count %0d", cy);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
