// sa_output_deskew: output shift registers that re-align the column results
// of the PE mesh into one output vector.
//
// Column j of the mesh delivers its result one step after column j - 1
// (the activations reach it one step later). Column j passes through a shift
// register of depth N - j, so column 0 waits longest and all N results leave
// the block together. The last stage of every column is the output vector the
// host reads. The shift registers of decreasing depth under the array are the
// paper's; the depths N..1 are this design's reading of its drawing. All
// stages move when en is high and are cleared by reset.
module sa_output_deskew
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

  for (genvar j = 0; j < N; j++) begin : g_col
    fp32_t sr [N-j];
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        for (int k = 0; k < N - j; k++) sr[k] <= FP32_ZERO;
      end else if (en) begin
        sr[0] <= in_vec[j];
        for (int k = 1; k < N - j; k++) sr[k] <= sr[k-1];
      end
    end
    assign out_vec[j] = sr[N-j-1];
  end

endmodule
