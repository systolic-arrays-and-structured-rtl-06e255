// tb_sa_mesh: an 8 x 8 INT8-weight mesh and a 4 x 4 FP32-weight mesh, fed by
// the testbench with hand-skewed activation rows (row i of input vector m at
// step m + i). Weights are programmed word by word (four INT8 weights per
// word), and the test checks that column j delivers sum_i x[m][i] * W[i][j], accumulated from
// row 0 down, after step m + N + j + 1 exactly.
module tb_sa_mesh;
  import sa_pkg::*;
  import fp_ref_pkg::*;

  localparam int NA = 8;   // INT8 mesh
  localparam int NB = 4;   // FP32 mesh
  localparam int M  = 40;  // input vectors
  localparam int STEPS = M + 2 * NA + 4;

  logic        clk = 0, rst_n = 0, en = 0, we_a = 0, we_b = 0;
  logic [15:0] addr;
  logic [31:0] wdata;
  fp32_t       ain_a [NA], pout_a [NA];
  fp32_t       ain_b [NB], pout_b [NB];
  logic [7:0]  wa [NA][NA];
  logic [31:0] wb [NB][NB];
  logic [31:0] x [M][NA];
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  sa_mesh #(.N(NA), .WEIGHT_INT8(1'b1)) dut_a (
    .clk(clk), .rst_n(rst_n), .en(en), .w_we(we_a), .w_addr(addr), .w_data(wdata),
    .a_in(ain_a), .psum_out(pout_a));
  sa_mesh #(.N(NB), .WEIGHT_INT8(1'b0)) dut_b (
    .clk(clk), .rst_n(rst_n), .en(en), .w_we(we_b), .w_addr(addr), .w_data(wdata),
    .a_in(ain_b), .psum_out(pout_b));

  task automatic chk(string what, logic [31:0] got, logic [31:0] exp_v);
    checks++;
    if (got !== exp_v) begin
      failures++;
      if (failures < 10) $display("FAIL %s got=%h exp=%h at %0t", what, got, exp_v, $time);
    end
  endtask

  function automatic logic [31:0] dot_a(int m, int j);
    logic [31:0] acc = 32'd0;
    for (int i = 0; i < NA; i++) acc = ref_add(acc, ref_mul_int8(x[m][i], wa[i][j]));
    return acc;
  endfunction

  function automatic logic [31:0] dot_b(int m, int j);
    logic [31:0] acc = 32'd0;
    for (int i = 0; i < NB; i++) acc = ref_add(acc, ref_mul_fp32(x[m][i], wb[i][j]));
    return acc;
  endfunction

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int m, t_out;
    addr = '0; wdata = '0;
    for (int i = 0; i < NA; i++) ain_a[i] = '0;
    for (int i = 0; i < NB; i++) ain_b[i] = '0;
    for (int i = 0; i < NA; i++) for (int j = 0; j < NA; j++)
      wa[i][j] = (one_in(6)) ? 8'h00 : rand_u8();
    for (int i = 0; i < NB; i++) for (int j = 0; j < NB; j++)
      wb[i][j] = (one_in(6)) ? 32'd0 : rand_f32(115, 135);
    for (int mm = 0; mm < M; mm++) for (int i = 0; i < NA; i++)
      x[mm][i] = (one_in(8)) ? 32'd0 : rand_f32(110, 140);
    repeat (2) @(negedge clk);
    rst_n = 1;
    // program weights: INT8 word r*(N/4)+g carries W[r][4g+k] in byte k
    for (int r = 0; r < NA; r++) for (int g = 0; g < NA / 4; g++) begin
      addr = 16'(r * (NA / 4) + g);
      wdata = {wa[r][4*g+3], wa[r][4*g+2], wa[r][4*g+1], wa[r][4*g]};
      we_a = 1;
      @(negedge clk);
      we_a = 0;
    end
    for (int r = 0; r < NB; r++) for (int c = 0; c < NB; c++) begin
      addr = 16'(r * NB + c); wdata = wb[r][c]; we_b = 1;
      @(negedge clk);
      we_b = 0;
    end
    // stream: at step t row i gets x[t-i][i]
    for (int t = 0; t < STEPS; t++) begin
      for (int i = 0; i < NA; i++) ain_a[i] = (t - i >= 0 && t - i < M) ? x[t-i][i] : 32'd0;
      for (int i = 0; i < NB; i++) ain_b[i] = (t - i >= 0 && t - i < M) ? x[t-i][i] : 32'd0;
      en = 1;
      @(negedge clk);
      en = 0;
      // after step t, column j shows the result of vector m = t - N - j - 1
      for (int j = 0; j < NA; j++) begin
        m = t - NA - j - 1;
        if (m >= 0 && m < M) chk("col8", pout_a[j], dot_a(m, j));
      end
      for (int j = 0; j < NB; j++) begin
        m = t - NB - j - 1;
        if (m >= 0 && m < M) chk("col32", pout_b[j], dot_b(m, j));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
