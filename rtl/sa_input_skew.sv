// sa_input_skew: input shift registers that skew an activation vector along a
// diagonal before it enters the PE mesh.
//
// Row i is a shift register of depth i + 1, so element i of a vector loaded at
// step s leaves the block after step s + i. Consecutive rows are thus offset by
// one step, which matches the one-step offset between vertically adjacent PEs
// (see sa_pe). The shift registers of varying depth at the left edge of the
// array are the paper's; the depths 1..N are this design's reading of its
// drawing, confirmed by the alignment they produce. All stages move when en is
// high and are cleared by reset.
module sa_input_skew
  import sa_pkg::*;
#(
  parameter int N = 32
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  en,
  input  fp32_t in_vec  [N],
  output fp32_t out_vec [N]
);

  for (genvar i = 0; i < N; i++) begin : g_row
    fp32_t sr [i+1];
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        for (int k = 0; k <= i; k++) sr[k] <= FP32_ZERO;
      end else if (en) begin
        sr[0] <= in_vec[i];
        for (int k = 1; k <= i; k++) sr[k] <= sr[k-1];
      end
    end
    assign out_vec[i] = sr[i];
  end

endmodule
