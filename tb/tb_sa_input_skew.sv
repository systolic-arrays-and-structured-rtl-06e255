// tb_sa_input_skew: pushes random vectors into an 8-row input skew and checks
// that after step s row i outputs element i of the vector pushed at step s - i
// (zero before any vector reached it), and that nothing moves while en is low.
module tb_sa_input_skew;
  import sa_pkg::*;
  import fp_ref_pkg::*;

  localparam int N = 8;
  localparam int STEPS = 200;

  logic  clk = 0, rst_n = 0, en = 0;
  fp32_t in_vec [N], out_vec [N];
  logic [31:0] hist [STEPS][N];
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  sa_input_skew #(.N(N)) dut (.clk(clk), .rst_n(rst_n), .en(en), .in_vec(in_vec), .out_vec(out_vec));

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
      for (int i = 0; i < N; i++) begin
        hist[s][i] = rand_f32(1, 254);
        in_vec[i]  = hist[s][i];
      end
      en = (!one_in(3));
      @(negedge clk);
      if (!en) begin
        s--;            // idle cycle: outputs must still show the previous step
        en = 0;
      end
      en = 0;
      for (int i = 0; i < N; i++) begin
        exp_v = (s - i >= 0) ? hist[s-i][i] : 32'd0;
        checks++;
        if (out_vec[i] !== exp_v) begin
          failures++;
          if (failures < 10) $display("FAIL step %0d row %0d got=%h exp=%h", s, i, out_vec[i], exp_v);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
