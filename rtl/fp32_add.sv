// fp32_add: FP32 adder of the PE (partial sum from above plus product).
//
// The paper takes this unit from an external floating-point library and only
// says what it does; this is a plain single-path adder with the number rules
// of the rest of the design: result truncated toward zero, zero for exact
// cancellation or exponent underflow, subnormal inputs read as zero, no
// infinities or NaNs (exponent overflow wraps).
//
// The operand of larger magnitude is put in "big". Both 24-bit significands
// are placed in a 50-bit field with 26 guard bits; the smaller one ("sml") is shifted
// right by the exponent difference, and any bits shifted out of the field are
// ORed into its last bit (sticky), which is enough for the truncated result to
// equal the truncation of the exact sum. The magnitudes are added or
// subtracted, the leading '1' of the 51-bit result is found and shifted to
// bit 49, the exponent is corrected by the same amount, and the 23 bits below
// the leading '1' are kept.
//
// Purely combinational; the PE registers its output.
module fp32_add
  import sa_pkg::*;
(
  input  fp32_t a,
  input  fp32_t b,
  output fp32_t sum
);

  fp32_t              big, sml;
  logic [23:0]        mb24, ms24;
  logic [7:0]         d;
  logic [49:0]        ma, ms_full, ms;
  logic               sticky;
  logic [50:0]        s;
  logic [5:0]         lead;
  logic [50:0]        sn;
  logic signed [9:0]  e;
  fp32_t              res;

  always_comb begin
    if ({a.exp, a.mant} >= {b.exp, b.mant}) begin
      big = a; sml = b;
    end else begin
      big = b; sml = a;
    end
    mb24    = (big.exp   == 8'd0) ? 24'd0 : {1'b1, big.mant};
    ms24    = (sml.exp == 8'd0) ? 24'd0 : {1'b1, sml.mant};
    d       = big.exp - sml.exp;
    ma      = {mb24, 26'd0};
    ms_full = {ms24, 26'd0};
    if (d >= 8'd50) begin
      ms     = '0;
      sticky = |ms24;
    end else begin
      ms     = ms_full >> d;
      sticky = |(ms_full & ((50'd1 << d) - 50'd1));
    end
    ms[0] = ms[0] | sticky;
    s     = (big.sign == sml.sign) ? ({1'b0, ma} + {1'b0, ms}) : ({1'b0, ma} - {1'b0, ms});
    lead  = '0;
    for (int k = 0; k < 51; k++)
      if (s[k]) lead = 6'(k);
    // leading '1' on bit 49 keeps the exponent of "big"
    e   = $signed({2'b00, big.exp}) + $signed({4'd0, lead}) - 10'sd49;
    sn  = (lead >= 6'd49) ? (s >> (lead - 6'd49)) : (s << (6'd49 - lead));
    res.sign = big.sign;
    res.exp  = e[7:0];
    res.mant = sn[48:26];
    sum = (s == 51'd0 || e <= 0) ? FP32_ZERO : res;
  end

endmodule
