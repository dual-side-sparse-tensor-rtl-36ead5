// dstc_pkg: types, sizes and floating-point helpers shared by the dual-side
// sparse tensor core.
//
// Sizes follow the machine-level instructions of the design: one OHMMA.8161
// step multiplies an 8-element slice of an A column with a 16-element slice of
// a B row on two 8x8x1 outer-product tensor cores (OTCs), and a SpWMMA set is
// a 32x32x1 outer product, i.e. (32/8) x (32/16) = 8 OHMMA steps.
//
// Arithmetic: products are FP16 x FP16 and accumulation is FP32, as in the
// "OHMMA.8161.F32.F32" instruction. The FP16 x FP16 product is exact in FP32.
// The FP32 adder rounds to nearest-even. Both helpers treat a zero exponent
// as zero (subnormals are flushed) and do not model NaN or infinity inputs;
// an overflowing sum saturates to infinity. These simplifications are this
// design's own choice; the source text gives no numeric details.
package dstc_pkg;

  typedef logic [15:0] fp16_t;
  typedef logic [31:0] fp32_t;

  // Warp tile of one SpWMMA set (32x32x1) and the tile of one OHMMA step.
  localparam int unsigned WARP_M  = 32;
  localparam int unsigned WARP_N  = 32;
  localparam int unsigned STEP_M  = 8;    // rows of one OHMMA.8161 step
  localparam int unsigned STEP_N  = 16;   // columns of one OHMMA.8161 step
  localparam int unsigned OTC_N   = 8;    // one OTC is 8x8x1
  localparam int unsigned STEPS_M = WARP_M / STEP_M;       // 4
  localparam int unsigned STEPS_N = WARP_N / STEP_N;       // 2
  localparam int unsigned NSTEPS  = STEPS_M * STEPS_N;     // 8
  localparam int unsigned LANES   = STEP_M * STEP_N;       // 128 outputs per step

  // Exact product of two FP16 numbers, returned as FP32.
  function automatic fp32_t fp16_mul_fp32(fp16_t a, fp16_t b);
    logic        s;
    logic [21:0] p;
    logic [8:0]  e;
    fp32_t       r;
    s = a[15] ^ b[15];
    if (a[14:10] == 5'd0 || b[14:10] == 5'd0) begin
      r = {s, 31'd0};
    end else begin
      p = {1'b1, a[9:0]} * {1'b1, b[9:0]};
      // unbiased exponents add; FP32 bias is 127, FP16 bias is 15
      e = 9'(a[14:10]) + 9'(b[14:10]) + 9'd97;
      if (p[21]) r = {s, 8'(e + 9'd1), p[20:0], 2'b00};
      else       r = {s, 8'(e),        p[19:0], 3'b000};
    end
    return r;
  endfunction

  // FP32 addition, round to nearest even.
  function automatic fp32_t fp32_add(fp32_t x, fp32_t y);
    fp32_t       a, b, r;
    logic [7:0]  d8;
    logic [27:0] ma, mb, m;
    logic        sticky;
    int          e, lz;
    logic [24:0] mr;
    logic        up;
    // flushed zeros
    if (x[30:23] == 8'd0 && y[30:23] == 8'd0) return {x[31] & y[31], 31'd0};
    if (x[30:23] == 8'd0) return y;
    if (y[30:23] == 8'd0) return x;
    // a has the larger magnitude
    if (x[30:0] >= y[30:0]) begin a = x; b = y; end
    else                    begin a = y; b = x; end
    d8 = a[30:23] - b[30:23];
    // hidden bit, 23 fraction bits, guard, round, sticky; bit 27 for carry
    ma = {1'b0, 1'b1, a[22:0], 3'b000};
    mb = {1'b0, 1'b1, b[22:0], 3'b000};
    if (d8 >= 8'd27) begin
      mb = 28'd1;                       // only sticky survives
    end else if (d8 != 8'd0) begin
      sticky = |(mb & ((28'd1 << d8) - 28'd1));
      mb = (mb >> d8) | {27'd0, sticky};
    end
    e = int'(a[30:23]);
    if (a[31] == b[31]) begin
      m = ma + mb;
      if (m[27]) begin
        m = {1'b0, m[27:2], m[1] | m[0]};
        e = e + 1;
      end
    end else begin
      m = ma - mb;
      if (m == 28'd0) return 32'd0;
      lz = 0;
      for (int i = 26; i >= 0; i--) begin
        if (m[i]) break;
        lz++;
      end
      m = m << lz;
      e = e - lz;
    end
    // m[26] is the hidden bit, m[25:3] the fraction, m[2:0] guard/round/sticky
    up = m[2] & (m[1] | m[0] | m[3]);
    mr = {1'b0, m[26:3]} + {24'd0, up};
    if (mr[24]) begin
      mr = mr >> 1;
      e = e + 1;
    end
    if (e <= 0)        r = {a[31], 31'd0};
    else if (e >= 255) r = {a[31], 8'hFF, 23'd0};
    else               r = {a[31], 8'(e), mr[22:0]};
    return r;
  endfunction

  // Number of ones in a 32-bit bitmap (the POPC instruction).
  function automatic logic [5:0] popc32(logic [31:0] v);
    logic [5:0] c;
    c = '0;
    for (int i = 0; i < 32; i++) c = c + 6'(v[i]);
    return c;
  endfunction

endpackage
