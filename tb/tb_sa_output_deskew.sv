// tb_sa_output_deskew: feeds random column values into an 8-column de-skew
// and checks that after step s column j outputs the value it received at step
// s - (N - 1 - j), so values entering column j one step after column j - 1
// leave together; nothing may move while en is low.
module tb_sa_output_deskew;
  import sa_pkg::*;
  import fp_ref_pkg::*;

  localparam int N = 8;
  localparam int STEPS = 200;

  logic  clk = 0, rst_n = 0, en = 0;
  fp32_t in_vec [N], out_vec [N];
  logic [31:0] hist [STEPS][N];
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  sa_output_deskew #(.N(N)) dut (.clk(clk), .rst_n(rst_n), .en(en), .in_vec(in_vec), .out_vec(out_vec));

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [31:0] exp_v;
    for (int i = 0; i < N; i++) in_vec[i] = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int s = 0; s < STEPS; s++) begin
      for (int j = 0; j < N; j++) begin
        hist[s][j] = rand_f32(1, 254);
        in_vec[j]  = hist[s][j];
      end
      en = (!one_in(3));
      @(negedge clk);
      if (!en) s--;
      en = 0;
      for (int j = 0; j < N; j++) begin
        exp_v = (s - (N - 1 - j) >= 0) ? hist[s-(N-1-j)][j] : 32'd0;
        checks++;
        if (out_vec[j] !== exp_v) begin
          failures++;
          if (failures < 10) $display("FAIL step %0d col %0d got=%h exp=%h", s, j, out_vec[j], exp_v);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
