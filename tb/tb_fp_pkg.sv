// tb_fp_pkg: reference number conversions for the testbenches.
//
// The references are computed in double precision and rounded to FP32 with
// round-to-nearest-even by real_to_fp32, independently of the RTL helpers.
// Summing two FP32 numbers in double and rounding once more to FP32 gives
// the correctly rounded FP32 sum, so this is an exact reference for one
// FP32 addition. Integer helpers build FP16/FP32 encodings of small integers,
// whose sums and products are exact in any order.
package tb_fp_pkg;

  function automatic real fp16_to_real(logic [15:0] h);
    if (h[14:10] == 5'd0) return 0.0;
    return $bitstoreal({h[15], 11'(32'(h[14:10]) - 15 + 1023), h[9:0], 42'd0});
  endfunction

  function automatic real fp32_to_real(logic [31:0] x);
    if (x[30:23] == 8'd0) return 0.0;
    return $bitstoreal({x[31], 11'(32'(x[30:23]) - 127 + 1023), x[22:0], 29'd0});
  endfunction

  function automatic logic [31:0] real_to_fp32(real r);
    logic [63:0] d;
    logic [52:0] mant;
    logic [24:0] m24;
    logic [28:0] rem;
    int          e;
    logic        up;
    d = $realtobits(r);
    if (d[62:0] == 63'd0) return {d[63], 31'd0};
    e    = int'(d[62:52]) - 1023 + 127;
    mant = {1'b1, d[51:0]};
    m24  = {1'b0, mant[52:29]};
    rem  = mant[28:0];
    up   = (rem > 29'h1000_0000) || (rem == 29'h1000_0000 && m24[0]);
    m24  = m24 + 25'(up);
    if (m24[24]) begin
      m24 = m24 >> 1;
      e   = e + 1;
    end
    return {d[63], 8'(e), m24[22:0]};
  endfunction

  // random normal FP16 with exponent field in [lo, hi]
  function automatic logic [15:0] rand_fp16(int lo, int hi);
    return {1'($urandom), 5'(lo + int'($urandom % 32'(hi - lo + 1))), 10'($urandom)};
  endfunction

  // random normal FP32 with exponent field in [lo, hi]
  function automatic logic [31:0] rand_fp32(int lo, int hi);
    return {1'($urandom), 8'(lo + int'($urandom % 32'(hi - lo + 1))), 23'($urandom)};
  endfunction

  function automatic logic [15:0] int_to_fp16(int k);
    int m, e;
    logic s;
    if (k == 0) return 16'd0;
    s = (k < 0);
    m = s ? -k : k;
    e = 0;
    while ((m >> (e + 1)) != 0) e++;
    return {s, 5'(e + 15), 10'((m << (10 - e)) & 32'h3FF)};
  endfunction

  function automatic logic [31:0] int_to_fp32(int k);
    int m, e;
    logic s;
    if (k == 0) return 32'd0;
    s = (k < 0);
    m = s ? -k : k;
    e = 0;
    while ((m >> (e + 1)) != 0) e++;
    return {s, 8'(e + 127), 23'((longint'(m) << (23 - e)) & 64'h7F_FFFF)};
  endfunction

endpackage
