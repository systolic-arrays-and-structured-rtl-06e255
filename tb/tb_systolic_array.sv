// tb_systolic_array: end-to-end test of the systolic-array unit in both of its
// data formats, a 4 x 4 array with INT8 weights and a 4 x 4 array with FP32
// weights, each running a tiled, structurally pruned GEMM through the three
// instructions (see sa_gemm_host). It fails if any partial or final result is
// wrong, a response is late, or a mechanism never occurred: weight
// programming, four-weights-per-word packing, streaming, compute steps, a
// skipped pruned tile, zero activations and zero weights reaching the
// multipliers' bypass.
module tb_systolic_array;
  import sa_pkg::*;

  localparam int N = 4;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic        cv [2], rv [2];
  sa_op_e      op [2];
  logic [15:0] ad [2];
  logic [31:0] cd [2], rd [2];
  logic        done [2];
  int ck [2], fl [2], tr [2], ts [2], ww [2], st [2], cp [2], za [2], zw [2], cy [2];
  int checks, failures;

  systolic_array #(.N(N), .WEIGHT_INT8(1'b1)) dut_i8 (
    .clk(clk), .rst_n(rst_n), .cmd_valid(cv[0]), .cmd_op(op[0]), .cmd_addr(ad[0]),
    .cmd_data(cd[0]), .rsp_valid(rv[0]), .rsp_data(rd[0]));
  sa_gemm_host #(.N(N), .WEIGHT_INT8(1'b1), .M(6), .KT(3), .NT(2), .PRUNE(2)) host_i8 (
    .clk(clk), .rst_n(rst_n), .cmd_valid(cv[0]), .cmd_op(op[0]), .cmd_addr(ad[0]),
    .cmd_data(cd[0]), .rsp_valid(rv[0]), .rsp_data(rd[0]), .done(done[0]),
    .checks(ck[0]), .failures(fl[0]), .n_tiles_run(tr[0]), .n_tiles_skipped(ts[0]),
    .n_weight_words(ww[0]), .n_streams(st[0]), .n_computes(cp[0]),
    .n_zero_acts(za[0]), .n_zero_weights(zw[0]), .n_cycles(cy[0]));

  systolic_array #(.N(N), .WEIGHT_INT8(1'b0)) dut_fp (
    .clk(clk), .rst_n(rst_n), .cmd_valid(cv[1]), .cmd_op(op[1]), .cmd_addr(ad[1]),
    .cmd_data(cd[1]), .rsp_valid(rv[1]), .rsp_data(rd[1]));
  sa_gemm_host #(.N(N), .WEIGHT_INT8(1'b0), .M(5), .KT(2), .NT(2), .PRUNE(1)) host_fp (
    .clk(clk), .rst_n(rst_n), .cmd_valid(cv[1]), .cmd_op(op[1]), .cmd_addr(ad[1]),
    .cmd_data(cd[1]), .rsp_valid(rv[1]), .rsp_data(rd[1]), .done(done[1]),
    .checks(ck[1]), .failures(fl[1]), .n_tiles_run(tr[1]), .n_tiles_skipped(ts[1]),
    .n_weight_words(ww[1]), .n_streams(st[1]), .n_computes(cp[1]),
    .n_zero_acts(za[1]), .n_zero_weights(zw[1]), .n_cycles(cy[1]));

  task automatic need(string what, int count);
    checks++;
    $display("  %-28s %0d", what, count);
    if (count == 0) begin
      failures++;
      $display("FAIL mechanism never occurred: %s", what);
    end
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", ck[0] + ck[1], fl[0] + fl[1] + 1);
    $finish;
  end

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    wait (done[0] && done[1]);
    checks = ck[0] + ck[1];
    failures = fl[0] + fl[1];
    for (int d = 0; d < 2; d++) begin
      $display("%s array:", d == 0 ? "FP32_INT8" : "FP32_FP32");
      need("weight tiles computed", tr[d]);
      need("pruned tiles skipped", ts[d]);
      need("weight words programmed", ww[d]);
      need("stream instructions", st[d]);
      need("compute instructions", cp[d]);
      need("zero activations", za[d]);
      need("zero weights", zw[d]);
      $display("  %-28s %0d", "instruction cycles", cy[d]);
      // one instruction per cycle: the count follows from the tiling
      checks++;
      if (cy[d] != tr[d] * (sa_weight_words(N, d == 0) + (N + 1) * ((d == 0 ? 6 : 5) + sa_latency(N) + 1))) begin
        failures++;
        $display("FAIL instruction count %0d", cy[d]);
      end
    end
    // INT8 packing: a quarter of the words of the FP32 format per tile
    checks++;
    if (ww[0] != tr[0] * N * N / 4 || ww[1] != tr[1] * N * N) begin
      failures++;
      $display("FAIL weight word counts %0d %0d", ww[0], ww[1]);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
