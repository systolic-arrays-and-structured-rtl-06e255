// fp32_int8_mul: hybrid multiplier of an FP32 activation and an INT8 weight.
//
// The weight is in sign-and-magnitude form (bit 7 sign, bits 6:0 magnitude),
// so the product is an FP32 number whose sign is the XOR of the two signs.
// The 24-bit activation significand (hidden '1' restored) is multiplied by the
// 7-bit weight magnitude, giving a 31-bit unaligned significand whose leading
// '1' lies in bits 30..23. The highest 8 bits [30:23] are searched for their
// leftmost '1'; its index k is added to the activation exponent and the
// significand is shifted right by k, so the leading '1' lands on bit 23 and
// bits 22:0 become the result mantissa (truncation, i.e. rounding toward
// zero). A zero activation (exponent field 0) or zero weight magnitude selects
// +0 through a final multiplexer, since the datapath above cannot produce 0.
//
// All of this follows the paper's hybrid multiplier. Infinities, NaNs and
// subnormals are not handled, as in the paper: exponent overflow wraps and a
// subnormal activation is read as zero (the latter is this design's choice).
//
// Purely combinational; the PE registers its output.
module fp32_int8_mul
  import sa_pkg::*;
(
  input  fp32_t      act,
  input  logic [7:0] wgt,
  output fp32_t      prod
);

  logic [23:0] mant_ext;
  logic [6:0]  mag;
  logic [30:0] unaligned;
  logic [7:0]  top8;
  logic [2:0]  lead;
  logic [30:0] aligned;
  fp32_t       res;

  always_comb begin
    mant_ext  = {1'b1, act.mant};
    mag       = wgt[6:0];
    unaligned = 31'(mant_ext * mag);
    top8      = unaligned[30:23];
    lead      = '0;
    for (int k = 0; k < 8; k++)
      if (top8[k]) lead = 3'(k);
    aligned   = unaligned >> lead;
    res.sign  = act.sign ^ wgt[7];
    res.exp   = act.exp + 8'(lead);
    res.mant  = aligned[22:0];
    prod      = (act.exp == 8'd0 || mag == 7'd0) ? FP32_ZERO : res;
  end

endmodule
