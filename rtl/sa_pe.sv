// sa_pe: weight-stationary processing element of the systolic array.
//
// Holds the four registers of the paper's PE: the input register (FP32),
// which latches the activation from the left neighbour and passes it on to
// the right; the weight register (INT8 when WEIGHT_INT8, else FP32), written
// while weights are programmed and then kept; a product register after the
// multiplier; and the accumulation register (FP32), which takes the partial
// sum from the PE above plus the product and passes it down. The multiplier is
// fp32_int8_mul or fp32_mul, chosen by WEIGHT_INT8; the adder is fp32_add.
//
// Timing: every register except the weight register moves only when en is
// high (one compute step). If the activation enters a_reg at step t, its
// product is in p_reg after step t+1 and the updated partial sum in acc_reg
// after step t+2; the PE below must therefore see the same activation
// column one step later, which the input skew provides. The product register
// is this design's pipeline cut: the paper says the multiplier and adder are
// pipelined without giving the depth. The weight register is written by w_we
// independently of en. Reset clears all registers.
module sa_pe
  import sa_pkg::*;
#(
  parameter bit WEIGHT_INT8 = 1'b1
) (
  input  logic                             clk,
  input  logic                             rst_n,
  input  logic                             en,
  input  logic                             w_we,
  input  logic [(WEIGHT_INT8 ? 8 : 32)-1:0] w_data,
  input  fp32_t                            a_in,
  input  fp32_t                            psum_in,
  output fp32_t                            a_out,
  output fp32_t                            psum_out
);

  localparam int WW = WEIGHT_INT8 ? 8 : 32;

  fp32_t         a_reg, p_reg, acc_reg;
  logic [WW-1:0] w_reg;
  fp32_t         prod, sum;

  if (WEIGHT_INT8) begin : g_int8
    fp32_int8_mul u_mul (.act(a_reg), .wgt(w_reg[7:0]), .prod(prod));
  end else begin : g_fp32
    fp32_mul u_mul (.a(a_reg), .b(fp32_t'(w_reg)), .prod(prod));
  end

  fp32_add u_add (.a(psum_in), .b(p_reg), .sum(sum));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      w_reg <= '0;
    end else if (w_we) begin
      w_reg <= w_data;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      a_reg   <= FP32_ZERO;
      p_reg   <= FP32_ZERO;
      acc_reg <= FP32_ZERO;
    end else if (en) begin
      a_reg   <= a_in;
      p_reg   <= prod;
      acc_reg <= sum;
    end
  end

  assign a_out    = a_reg;
  assign psum_out = acc_reg;

endmodule
