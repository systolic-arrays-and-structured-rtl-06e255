// fp_ref_pkg: reference arithmetic for the testbenches, written independently
// of the RTL datapaths.
//
// Numbers follow the design's rules: normal FP32 values and zero, subnormal
// inputs read as zero, results truncated toward zero, +0 for zero results and
// underflow. Products are formed exactly in double precision (at most 48
// significant bits) and then truncated. Sums are formed exactly as integers:
// a normal value m * 2^(e-150) is held as m << e in a 300-bit field, so any
// two FP32 values add without error; the leading '1' of the exact sum then
// gives the result exponent and the 23 bits below it the mantissa.
package fp_ref_pkg;

  function automatic real f32_to_real(logic [31:0] f);
    logic [63:0] d;
    if (f[30:23] == 8'd0) return 0.0;
    d = {f[31], 11'(int'(f[30:23]) - 127 + 1023), f[22:0], 29'd0};
    return $bitstoreal(d);
  endfunction

  // Truncate a double toward zero to FP32 (normal range only).
  function automatic logic [31:0] real_to_f32_rz(real r);
    logic [63:0] d;
    int          e;
    if (r == 0.0) return 32'd0;
    d = $realtobits(r);
    e = int'(d[62:52]) - 1023 + 127;
    if (e <= 0) return 32'd0;
    return {d[63], 8'(e), d[51:29]};
  endfunction

  function automatic logic [31:0] ref_mul_fp32(logic [31:0] a, logic [31:0] b);
    return real_to_f32_rz(f32_to_real(a) * f32_to_real(b));
  endfunction

  function automatic logic [31:0] ref_mul_int8(logic [31:0] a, logic [7:0] w);
    real m;
    m = real'(int'(w[6:0]));
    if (w[7]) m = -m;
    return real_to_f32_rz(f32_to_real(a) * m);
  endfunction

  function automatic logic [31:0] ref_add(logic [31:0] a, logic [31:0] b);
    logic [299:0] ma, mb, mag;
    logic         sa, sb, sr;
    int           lead;
    logic [299:0] sh;
    ma = (a[30:23] == 0) ? '0 : (300'({1'b1, a[22:0]}) << a[30:23]);
    mb = (b[30:23] == 0) ? '0 : (300'({1'b1, b[22:0]}) << b[30:23]);
    sa = a[31]; sb = b[31];
    if (sa == sb) begin
      mag = ma + mb; sr = sa;
    end else if (ma >= mb) begin
      mag = ma - mb; sr = sa;
    end else begin
      mag = mb - ma; sr = sb;
    end
    if (mag == 0) return 32'd0;
    lead = 299;
    while (!mag[lead]) lead--;
    if (lead - 23 <= 0) return 32'd0;
    sh = mag >> (lead - 23);
    return {sr, 8'(lead - 23), sh[22:0]};
  endfunction

  // Random byte. (A size cast of $urandom inside a conditional expression is
  // avoided: some simulators evaluate it as zero.)
  function automatic logic [7:0] rand_u8();
    logic [31:0] r;
    r = $urandom;
    return r[7:0];
  endfunction

  // True with probability 1/n. The draw is kept out of the condition of a
  // conditional expression for the same reason.
  function automatic bit one_in(int unsigned n);
    int unsigned u;
    u = $urandom % n;
    return u == 0;
  endfunction

  // Random normal FP32 value with exponent field in [elo, ehi].
  function automatic logic [31:0] rand_f32(int elo, int ehi);
    return {1'($urandom), 8'(elo + int'($urandom % (ehi - elo + 1))), 23'($urandom)};
  endfunction

endpackage
