// sa_pkg: types and constants shared by the systolic-array datapath and its
// instruction interface.
//
// fp32_t is an IEEE-754 single-precision word split into its fields. The
// arithmetic units of this design handle normal numbers and zero only:
// infinities, NaNs and subnormals are not given special treatment (the
// paper states this for its hybrid multiplier; this design applies the same
// rule to every unit) and subnormal inputs are read as zero.
//
// sa_op_e encodes the three custom instructions through which the host core
// drives the array: program a weight word, advance the array by one compute
// step, and stream one input activation in while one output activation is
// read back. The encoding is this design's own choice.
package sa_pkg;

  typedef struct packed {
    logic       sign;
    logic [7:0] exp;
    logic [22:0] mant;
  } fp32_t;

  localparam fp32_t FP32_ZERO = '0;

  typedef enum logic [1:0] {
    OP_LOAD_W  = 2'd0,  // write one 32-bit weight word (1 FP32 or 4 INT8 weights)
    OP_STREAM  = 2'd1,  // push one input activation, return one output activation
    OP_COMPUTE = 2'd2   // advance the whole array by one step
  } sa_op_e;

  // Number of compute steps between pushing an input vector and the step
  // after which its result vector can be streamed out, for an N x N array:
  // N + 1 steps through the input skew and the row pipeline, 2 for the
  // product and accumulation registers of the last PE row, N - 1 + 1 through
  // the output de-skew registers (see systolic_array).
  function automatic int sa_latency(int n);
    return 2 * n + 2;
  endfunction

  // Number of 32-bit weight words that fill an N x N array.
  function automatic int sa_weight_words(int n, bit weight_int8);
    return weight_int8 ? (n * n) / 4 : n * n;
  endfunction

endpackage
