// feop: four-element outer product unit (FEOP).
//
// The outer-product tensor core replaces each four-element dot-product unit
// of an inner-product tensor core by an FEOP: one element of A is multiplied
// by four elements of B in parallel, and each product is added to its own
// accumulator input, d[j] = c[j] + a * b[j]. Four FEOPs of a thread group
// together form a 4x4 outer product. The unit keeps the four FP16 multipliers
// and four adders of the dot-product unit it replaces; the adders accumulate in
// FP32.
//
// Interface: a (FP16), b[4] (FP16), c[4] (FP32 accumulator in), d[4] (FP32).
// Timing: purely combinational; the enclosing core issues one OHMMA step per
// cycle. Pipelining the unit (the inner-product core it replaces is a
// four-stage pipeline) is left out here.
module feop
  import dstc_pkg::*;
(
  input  fp16_t       a,
  input  fp16_t [3:0] b,
  input  fp32_t [3:0] c,
  output fp32_t [3:0] d
);
  always_comb begin
    for (int j = 0; j < 4; j++) d[j] = fp32_add(c[j], fp16_mul_fp32(a, b[j]));
  end
endmodule
