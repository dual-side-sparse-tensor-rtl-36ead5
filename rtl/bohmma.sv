// bohmma: binary 32x32x1 outer product (BOHMMA.32321), the "multiply-bitmap"
// step of the bitmap-based SpGEMM.
//
// The bitmap of an A column (1 = non-zero) and the bitmap of a B row give the
// bitmap of their partial matrix: element (i, j) of the product is non-zero
// exactly where a_bm[i] and b_bm[j] are both set, so the 1-bit multiply is an
// AND. The unit also keeps the bitmap of the accumulated result, the OR of all
// partial bitmaps since the last clear, which is the bitmap of the output
// matrix E after the merge steps.
//
// Interface: a_bm[M], b_bm[N]; d_bm[i*N + j] is the partial bitmap
// (combinational); acc_bm is the registered OR of d_bm over every cycle with
// acc_en, cleared by acc_clr (which wins) or reset.
module bohmma #(
  parameter int unsigned M = 32,
  parameter int unsigned N = 32
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic [M-1:0]   a_bm,
  input  logic [N-1:0]   b_bm,
  input  logic           acc_en,
  input  logic           acc_clr,
  output logic [M*N-1:0] d_bm,
  output logic [M*N-1:0] acc_bm
);
  always_comb begin
    for (int i = 0; i < M; i++)
      for (int j = 0; j < N; j++)
        d_bm[i*N + j] = a_bm[i] & b_bm[j];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)       acc_bm <= '0;
    else if (acc_clr) acc_bm <= '0;
    else if (acc_en)  acc_bm <= acc_bm | d_bm;
  end
endmodule
