// sa_gemm_host: behavioural model of the host core and its GEMM library
// routine, driving one systolic_array through its instruction port.
//
// It computes Y = X * W for X of M x K FP32 activations and W of K x NO
// weights (INT8 sign-and-magnitude or FP32), tiled into N x N weight tiles.
// Before the run it prunes the PRUNE weight tiles of lowest L1 norm to zero
// (structured pruning matched to the array size) and zeroes a few single
// weights and activations so that the multipliers' zero bypass is exercised.
// For each output tile column and each reduction tile it then:
//   - skips the tile entirely when all its weights are zero;
//   - programs the N x N weights (N*N/4 words for INT8, N*N for FP32);
//   - for s = 0 .. M + LAT: streams row s of the X tile (zeros once s >= M)
//     while reading back the previous output vector, then issues a compute.
//     Row m's partial result is read during phase m + LAT + 1, and phase LAT
//     must still read zeros (no early result);
//   - adds each partial result into Y in software.
// Every partial result is compared with an independent reference, the final
// Y with the dense product computed with the pruned tiles included, and
// every response must arrive exactly one cycle after its instruction.
// Counters report how often each mechanism occurred.
//
// Instructions are presented on the falling clock edge and sampled by the
// array on the rising edge.
module sa_gemm_host
  import sa_pkg::*;
  import fp_ref_pkg::*;
#(
  parameter int N           = 4,
  parameter bit WEIGHT_INT8 = 1'b1,
  parameter int M           = 6,
  parameter int KT          = 2,     // reduction tiles: K = KT * N
  parameter int NT          = 2,     // output tiles: NO = NT * N
  parameter int PRUNE       = 1,     // weight tiles pruned to zero
  parameter int AW          = 16
) (
  input  logic          clk,
  input  logic          rst_n,
  output logic          cmd_valid,
  output sa_op_e        cmd_op,
  output logic [AW-1:0] cmd_addr,
  output logic [31:0]   cmd_data,
  input  logic          rsp_valid,
  input  logic [31:0]   rsp_data,
  output logic          done,
  output int            checks,
  output int            failures,
  output int            n_tiles_run,
  output int            n_tiles_skipped,
  output int            n_weight_words,
  output int            n_streams,
  output int            n_computes,
  output int            n_zero_acts,
  output int            n_zero_weights,
  output int            n_cycles
);

  localparam int K   = KT * N;
  localparam int NO  = NT * N;
  localparam int LAT = sa_latency(N);

  logic [31:0] x [M][K];
  logic [31:0] w [K][NO];      // INT8 codes in bits 7:0, or FP32 words
  logic [31:0] y [M][NO];
  bit          pruned [KT][NT];

  function automatic logic [31:0] mul(logic [31:0] a, logic [31:0] b);
    return WEIGHT_INT8 ? ref_mul_int8(a, b[7:0]) : ref_mul_fp32(a, b);
  endfunction

  function automatic real l1(logic [31:0] b);
    if (WEIGHT_INT8) return real'(int'(b[6:0]));
    return (b[30:23] == 0) ? 0.0 : f32_to_real({1'b0, b[30:0]});
  endfunction

  function automatic bit is_zero_w(logic [31:0] b);
    return WEIGHT_INT8 ? (b[6:0] == 0) : (b[30:23] == 0);
  endfunction

  task automatic chk(string what, logic [31:0] got, logic [31:0] exp_v);
    checks++;
    if (got !== exp_v) begin
      failures++;
      if (failures < 10) $display("FAIL %m %s got=%h exp=%h at %0t", what, got, exp_v, $time);
    end
  endtask

  // Issue one instruction; returns the response seen after the clock edge.
  task automatic issue(sa_op_e op, logic [AW-1:0] addr, logic [31:0] data,
                       output logic rv, output logic [31:0] rd);
    @(negedge clk);
    cmd_valid = 1'b1; cmd_op = op; cmd_addr = addr; cmd_data = data;
    @(posedge clk);
    #1;
    rv = rsp_valid; rd = rsp_data;
    n_cycles++;
  endtask

  initial begin
    logic        rv;
    logic [31:0] rd, acc;
    real         norm [KT][NT];
    int          best_kt, best_nt, m;
    bit          all_zero;
    logic [31:0] partial [M][N];

    cmd_valid = 0; cmd_op = OP_STREAM; cmd_addr = '0; cmd_data = '0;
    done = 0; checks = 0; failures = 0;
    n_tiles_run = 0; n_tiles_skipped = 0; n_weight_words = 0; n_streams = 0;
    n_computes = 0; n_zero_acts = 0; n_zero_weights = 0; n_cycles = 0;

    // operands
    for (int r = 0; r < M; r++) for (int k = 0; k < K; k++)
      x[r][k] = one_in(9) ? 32'd0 : rand_f32(110, 140);
    for (int k = 0; k < K; k++) for (int c = 0; c < NO; c++) begin
      if (WEIGHT_INT8) w[k][c] = one_in(10) ? {24'd0, rand_u8() & 8'h80} : {24'd0, rand_u8()};
      else             w[k][c] = one_in(10) ? 32'd0 : rand_f32(115, 135);
    end
    // structured pruning: zero the PRUNE tiles of lowest L1 norm
    for (int kt = 0; kt < KT; kt++) for (int nt = 0; nt < NT; nt++) begin
      norm[kt][nt] = 0.0; pruned[kt][nt] = 0;
      for (int i = 0; i < N; i++) for (int j = 0; j < N; j++)
        norm[kt][nt] += l1(w[kt*N+i][nt*N+j]);
    end
    for (int p = 0; p < PRUNE; p++) begin
      best_kt = -1; best_nt = -1;
      for (int kt = 0; kt < KT; kt++) for (int nt = 0; nt < NT; nt++)
        if (!pruned[kt][nt] && (best_kt < 0 || norm[kt][nt] < norm[best_kt][best_nt])) begin
          best_kt = kt; best_nt = nt;
        end
      pruned[best_kt][best_nt] = 1;
      for (int i = 0; i < N; i++) for (int j = 0; j < N; j++)
        w[best_kt*N+i][best_nt*N+j] = 32'd0;
    end
    for (int r = 0; r < M; r++) for (int c = 0; c < NO; c++) y[r][c] = 32'd0;

    @(posedge rst_n);
    repeat (2) @(negedge clk);

    for (int nt = 0; nt < NT; nt++) begin
      for (int kt = 0; kt < KT; kt++) begin
        all_zero = 1;
        for (int i = 0; i < N; i++) for (int j = 0; j < N; j++)
          if (!is_zero_w(w[kt*N+i][nt*N+j])) all_zero = 0;
        if (all_zero) begin
          n_tiles_skipped++;
          continue;
        end
        n_tiles_run++;
        // program the weight tile
        for (int i = 0; i < N; i++) begin
          if (WEIGHT_INT8) begin
            for (int g = 0; g < N / 4; g++) begin
              issue(OP_LOAD_W, AW'(i * (N / 4) + g),
                    {w[kt*N+i][nt*N+4*g+3][7:0], w[kt*N+i][nt*N+4*g+2][7:0],
                     w[kt*N+i][nt*N+4*g+1][7:0], w[kt*N+i][nt*N+4*g][7:0]}, rv, rd);
              n_weight_words++;
            end
          end else begin
            for (int j = 0; j < N; j++) begin
              issue(OP_LOAD_W, AW'(i * N + j), w[kt*N+i][nt*N+j], rv, rd);
              n_weight_words++;
            end
          end
          for (int j = 0; j < N; j++) if (is_zero_w(w[kt*N+i][nt*N+j])) n_zero_weights++;
        end
        // reference partial results, accumulated from tile row 0 down
        for (int r = 0; r < M; r++) for (int j = 0; j < N; j++) begin
          acc = 32'd0;
          for (int i = 0; i < N; i++) acc = ref_add(acc, mul(x[r][kt*N+i], w[kt*N+i][nt*N+j]));
          partial[r][j] = acc;
        end
        // stream and compute
        for (int s = 0; s <= M + LAT; s++) begin
          m = s - LAT - 1;
          for (int i = 0; i < N; i++) begin
            issue(OP_STREAM, '0, (s < M) ? x[s][kt*N+i] : 32'd0, rv, rd);
            n_streams++;
            if (s < M && x[s][kt*N+i] == 32'd0) n_zero_acts++;
            checks++;
            if (!rv) begin
              failures++;
              $display("FAIL %m no response one cycle after a stream instruction");
            end
            if (s == LAT) chk("early result", rd, 32'd0);
            if (m >= 0) begin
              chk("partial", rd, partial[m][i]);
              y[m][nt*N+i] = ref_add(y[m][nt*N+i], rd);
            end
          end
          issue(OP_COMPUTE, '0, '0, rv, rd);
          n_computes++;
          checks++;
          if (rv) begin
            failures++;
            $display("FAIL %m response to a compute instruction");
          end
        end
      end
    end
    @(negedge clk);
    cmd_valid = 1'b0;

    // the tiles skipped contribute exactly zero: compare with the dense product
    for (int r = 0; r < M; r++) for (int nt = 0; nt < NT; nt++) for (int j = 0; j < N; j++) begin
      acc = 32'd0;
      for (int kt = 0; kt < KT; kt++) begin
        logic [31:0] part;
        part = 32'd0;
        for (int i = 0; i < N; i++) part = ref_add(part, mul(x[r][kt*N+i], w[kt*N+i][nt*N+j]));
        acc = ref_add(acc, part);
      end
      chk("Y", y[r][nt*N+j], acc);
    end
    done = 1'b1;
  end

endmodule
