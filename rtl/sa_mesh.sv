// sa_mesh: N x N mesh of weight-stationary PEs with nearest-neighbour links.
//
// Activations enter at the left edge (a_in[i] feeds row i) and move one PE to
// the right per compute step; partial sums start as +0 at the top and move one
// PE down per step; each PE keeps its weight. Column j thus produces
// psum_out[j] = sum over i of a[i] * W[i][j], accumulated from row 0 down
// (the order matters for floating point). With inputs skewed one step per row,
// the result of a vector whose element 0 entered row 0 at step t appears at
// the bottom of column j after step t + N + j + 1.
//
// Weights are written one 32-bit word per cycle through w_we/w_addr/w_data,
// independently of en. With WEIGHT_INT8 a word holds four sign-and-magnitude
// INT8 weights of one row: word r*(N/4) + g writes W[r][4g+k] from byte k
// (bits 8k+7:8k). Otherwise word r*N + c writes the FP32 weight W[r][c]. The
// four-weights-per-word packing is the paper's; the address map is this
// design's. N must be a multiple of 4 when WEIGHT_INT8 is set.
module sa_mesh
  import sa_pkg::*;
#(
  parameter int N           = 32,
  parameter bit WEIGHT_INT8 = 1'b1,
  parameter int AW          = 16
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          en,
  input  logic          w_we,
  input  logic [AW-1:0] w_addr,
  input  logic [31:0]   w_data,
  input  fp32_t         a_in     [N],
  output fp32_t         psum_out [N]
);

  localparam int WW  = WEIGHT_INT8 ? 8 : 32;
  localparam int WPW = WEIGHT_INT8 ? 4 : 1;   // weights per word

  fp32_t a_h [N][N+1];   // a_h[i][j]: activation entering PE (i,j)
  fp32_t p_v [N+1][N];   // p_v[i][j]: partial sum entering PE (i,j)

  for (genvar j = 0; j < N; j++) begin : g_top
    assign p_v[0][j]   = FP32_ZERO;
    assign psum_out[j] = p_v[N][j];
  end

  for (genvar i = 0; i < N; i++) begin : g_row
    assign a_h[i][0] = a_in[i];
    for (genvar j = 0; j < N; j++) begin : g_col
      localparam int WORD = i * (N / WPW) + j / WPW;
      localparam int LANE = j % WPW;
      logic we;
      assign we = w_we && (w_addr == AW'(WORD));
      sa_pe #(.WEIGHT_INT8(WEIGHT_INT8)) u_pe (
        .clk      (clk),
        .rst_n    (rst_n),
        .en       (en),
        .w_we     (we),
        .w_data   (w_data[LANE*WW +: WW]),
        .a_in     (a_h[i][j]),
        .psum_in  (p_v[i][j]),
        .a_out    (a_h[i][j+1]),
        .psum_out (p_v[i+1][j])
      );
    end
  end

  // Activations leaving the right edge are not used.
  initial begin
    assert (!WEIGHT_INT8 || (N % 4 == 0))
      else $error("sa_mesh: N must be a multiple of 4 with INT8 weights");
  end

endmodule
