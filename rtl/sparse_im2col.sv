// sparse_im2col: bitmap-based, outer-product-friendly sparse im2col.
//
// Outer-product SpGEMM consumes the lowered feature map one column at a time.
// For a feature-map row of R elements and a K-wide kernel with stride S, the
// kernel offset kx = 0..K-1 produces one lowered column of B = (R-K+S)/S
// elements, the row elements kx, kx+S, ..., kx+(B-1)*S. The unit works on the
// bitmap-encoded row (bitmap + packed non-zero values) and never expands it:
//   column 0   : apply the mask (positions 0, S, ..., (B-1)*S) to the row
//                bitmap; the masked bits are the column's bitmap;
//   column kx>0: shift the bitmap left by one (towards position 0); the bit
//                shifted out is added to an accumulator, which is the address
//                offset of the first value still in view;
//   every column: popcount of the masked bits is the column's length, and the
//                non-zero values are read from the value vector starting at the
//                offset (for S = 1 they are contiguous; for S > 1 each masked
//                one's value index is offset + ones below it in the register).
// The column leaves in condensed form (bitmap, offset, length, packed values),
// ready to be an A column of the SpGEMM.
//
// Interface: load takes row_bm[R] (bit p = row element p) and row_val[R]
// (packed non-zeros, value 0 first). While col_valid, the outputs describe
// column col_kx; step advances to the next column; after column K-1 col_valid
// drops until the next load. Timing: load and step take effect at the clock
// edge; outputs are combinational from the registered state.
//
// The default R = 34 makes B = 32, the height of the warp tile, so one column
// is one full A column of a SpWMMA set; the source's worked example uses R = 6,
// K = 3, S = 1 (B = 4). Fetching a row's values through its row offset is left
// to the caller.
module sparse_im2col
  import dstc_pkg::*;
#(
  parameter int unsigned R = 34,
  parameter int unsigned K = 3,
  parameter int unsigned S = 1,
  localparam int unsigned B = (R - K + S) / S
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   load,
  input  logic [R-1:0]           row_bm,
  input  fp16_t [R-1:0]          row_val,
  input  logic                   step,
  output logic                   col_valid,
  output logic [$clog2(K)-1:0]   col_kx,
  output logic [B-1:0]           col_bm,
  output logic [$clog2(R+1)-1:0] col_off,
  output logic [$clog2(B+1)-1:0] col_len,
  output fp16_t [B-1:0]          col_val
);
  localparam int unsigned OW = $clog2(R + 1);
  localparam int unsigned LW = $clog2(B + 1);

  logic [R-1:0]   shreg;
  fp16_t [R-1:0]  vals;
  logic [OW-1:0]  off;
  logic [$clog2(K)-1:0] kx;
  logic           active;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      shreg  <= '0;
      off    <= '0;
      kx     <= '0;
      active <= 1'b0;
    end else if (load) begin
      shreg  <= row_bm;
      off    <= '0;
      kx     <= '0;
      active <= 1'b1;
    end else if (step && active) begin
      shreg  <= shreg >> 1;              // "shift left" towards position 0
      off    <= off + OW'(shreg[0]);     // accumulate the shifted-out bit
      kx     <= kx + 1'b1;
      if (32'(kx) == K - 1) active <= 1'b0;
    end
  end

  // the value vector is only read while active, so it needs no reset
  always_ff @(posedge clk) begin
    if (load) vals <= row_val;
  end

  always_comb begin
    logic [LW-1:0] n;
    logic [OW-1:0] ones_below;
    col_valid = active;
    col_kx    = kx;
    col_off   = off;
    for (int t = 0; t < int'(B); t++) col_bm[t] = shreg[t*S];   // apply mask
    col_val = '0;
    n = '0;
    ones_below = '0;
    for (int p = 0; p < int'(R); p++) begin
      if (p % S == 0 && p / S < int'(B) && shreg[p]) begin
        col_val[n] = vals[OW'(off + ones_below)];
        n = n + 1'b1;
      end
      ones_below = ones_below + OW'(shreg[p]);
    end
    col_len = n;                          // population count of the mask
  end
endmodule
