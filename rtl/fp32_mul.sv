// fp32_mul: FP32 x FP32 multiplier of the non-quantized (FP32_FP32) PE.
//
// The paper takes this unit from an external floating-point library and only
// says what it does; this is the simplest multiplier with the same number
// rules as the rest of the design. The two 24-bit significands are multiplied
// into a 48-bit product whose leading '1' is bit 47 or 46; one conditional
// shift normalises it and the 23 bits below the leading '1' are kept
// (truncation, rounding toward zero). The exponent is ea + eb - 127, plus one
// when the product was shifted. A zero operand (exponent field 0, so
// subnormals count as zero) or an exponent underflow gives +0. Infinities and
// NaNs are not handled and exponent overflow wraps, as in the paper's hybrid
// multiplier.
//
// Purely combinational; the PE registers its output.
module fp32_mul
  import sa_pkg::*;
(
  input  fp32_t a,
  input  fp32_t b,
  output fp32_t prod
);

  logic [47:0]       p;
  logic              norm;
  logic signed [9:0] e;
  fp32_t             res;

  always_comb begin
    p        = {1'b1, a.mant} * {1'b1, b.mant};
    norm     = p[47];
    e        = $signed({2'b00, a.exp}) + $signed({2'b00, b.exp}) - 10'sd127 + $signed({9'd0, norm});
    res.sign = a.sign ^ b.sign;
    res.exp  = e[7:0];
    res.mant = norm ? p[46:24] : p[45:23];
    prod     = (a.exp == 8'd0 || b.exp == 8'd0 || e <= 0) ? FP32_ZERO : res;
  end

endmodule
