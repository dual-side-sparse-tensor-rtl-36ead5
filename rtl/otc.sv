// otc: outer-product tensor core, one 8x8x1 dense outer product per cycle.
//
// An 8-element column slice a of matrix A and an 8-element row slice b of
// matrix B give the 8x8 partial matrix a*b^T, which is added element by
// element to the accumulator input c: d[i][j] = c[i][j] + a[i]*b[j]. The 64
// multipliers and adders are 16 FEOPs: FEOP (i, g) takes a[i] and
// b[4g..4g+3]. Two OTCs side by side execute one OHMMA.8161 (8x16x1).
//
// Interface: a[8], b[8] FP16; c[64], d[64] FP32, element (i, j) at index
// i*8 + j. Timing: combinational.
module otc
  import dstc_pkg::*;
#(
  parameter int unsigned N = 8
) (
  input  fp16_t [N-1:0]   a,
  input  fp16_t [N-1:0]   b,
  input  fp32_t [N*N-1:0] c,
  output fp32_t [N*N-1:0] d
);
  for (genvar i = 0; i < N; i++) begin : g_row
    for (genvar g = 0; g < N / 4; g++) begin : g_feop
      feop u_feop (
        .a (a[i]),
        .b (b[4*g +: 4]),
        .c (c[i*N + 4*g +: 4]),
        .d (d[i*N + 4*g +: 4])
      );
    end
  end
endmodule
