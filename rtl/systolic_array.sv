// systolic_array: tightly coupled systolic-array functional unit for tiled,
// weight-stationary GEMM, driven by three custom instructions of a host core.
//
// Structure (left to right): an In buffer of N FP32 activations, the input
// skew registers, the N x N PE mesh, the output de-skew registers whose last
// stages form the Out buffer. One instruction is accepted per cycle when
// cmd_valid is high; the unit never stalls the host.
//
//   OP_LOAD_W   writes the 32-bit weight word cmd_data at word address
//               cmd_addr (four INT8 weights or one FP32 weight, see sa_mesh).
//   OP_STREAM   writes cmd_data into In[idx] and returns Out[idx] on rsp_data
//               with rsp_valid one cycle later; idx then advances (mod N).
//               One input and one output activation per instruction, as the
//               paper's 32-bit interface allows.
//   OP_COMPUTE  advances skew registers, mesh and de-skew registers by one
//               step, taking the In buffer as the next input vector, and
//               resets idx to 0.
//
// A host therefore runs a tile as: load the N x N weights, then for each
// input row stream its N activations and issue one compute; the result row
// pushed by compute number k can be streamed out after compute number
// k + sa_latency(N) (= 2N + 2), so LAT further rows of zeros drain the array.
// Partial results of different tiles are summed by the host. Weight tiles that
// are entirely zero are never loaded or computed: that skipping is done by the
// host software, the array needs no support for it.
//
// Following the paper: the instruction set (program weights, compute, stream),
// the 32-bit interface with four INT8 or one FP32 weight per word, the mesh,
// PE and skew/de-skew registers. This design's own choices: the opcode
// encoding, the idx counter shared by In and Out, the one-cycle response,
// the step-by-instruction timing and the weight address map.
module systolic_array
  import sa_pkg::*;
#(
  parameter int N           = 32,
  parameter bit WEIGHT_INT8 = 1'b1,
  parameter int AW          = 16
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          cmd_valid,
  input  sa_op_e        cmd_op,
  input  logic [AW-1:0] cmd_addr,
  input  logic [31:0]   cmd_data,
  output logic          rsp_valid,
  output logic [31:0]   rsp_data
);

  localparam int IW     = (N > 1) ? $clog2(N) : 1;
  localparam int NWORDS = sa_weight_words(N, WEIGHT_INT8);

  fp32_t           in_buf  [N];
  fp32_t           skewed  [N];
  fp32_t           col_out [N];
  fp32_t           out_buf [N];
  logic [IW-1:0]   idx;
  logic            step, w_we, stream;

  assign step   = cmd_valid && (cmd_op == OP_COMPUTE);
  assign w_we   = cmd_valid && (cmd_op == OP_LOAD_W);
  assign stream = cmd_valid && (cmd_op == OP_STREAM);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      idx       <= '0;
      rsp_valid <= 1'b0;
      rsp_data  <= '0;
      for (int k = 0; k < N; k++) in_buf[k] <= FP32_ZERO;
    end else begin
      rsp_valid <= stream;
      if (stream) begin
        in_buf[idx] <= fp32_t'(cmd_data);
        rsp_data    <= out_buf[idx];
        idx         <= (idx == IW'(N - 1)) ? '0 : idx + 1'b1;
      end else if (step) begin
        idx <= '0;
      end
    end
  end

  sa_input_skew #(.N(N)) u_skew (
    .clk(clk), .rst_n(rst_n), .en(step), .in_vec(in_buf), .out_vec(skewed)
  );

  sa_mesh #(.N(N), .WEIGHT_INT8(WEIGHT_INT8), .AW(AW)) u_mesh (
    .clk(clk), .rst_n(rst_n), .en(step),
    .w_we(w_we), .w_addr(cmd_addr), .w_data(cmd_data),
    .a_in(skewed), .psum_out(col_out)
  );

  sa_output_deskew #(.N(N)) u_deskew (
    .clk(clk), .rst_n(rst_n), .en(step), .in_vec(col_out), .out_vec(out_buf)
  );

  // Host-side rules of the instruction interface.
  a_known_op: assert property (@(posedge clk) disable iff (!rst_n)
      cmd_valid |-> cmd_op inside {OP_LOAD_W, OP_STREAM, OP_COMPUTE})
    else $error("systolic_array: undefined opcode");
  a_waddr: assert property (@(posedge clk) disable iff (!rst_n)
      w_we |-> (int'(cmd_addr) < NWORDS))
    else $error("systolic_array: weight address out of range");

endmodule
