// scatter_ctrl: gather/scatter control unit of the accumulation buffer.
//
// In sparse mode the OTCs work on condensed operands, so output lane (r, c)
// of OHMMA step s holds the product of the i-th non-zero of the A column and
// the j-th non-zero of the B row, with i = 8*(s/2) + r and j = 16*(s%2) + c.
// The merge step has to add that product to element (row, col) of the 32x32
// accumulated matrix, where row is the position of the i-th set bit of a_bm
// and col the position of the j-th set bit of b_bm. These positions are where
// the partial bitmap a_bm x b_bm holds its ones, so the unit turns the bitmaps
// into one gather/scatter address per lane. Lanes that fall on the zero
// padding (i >= popcount(a_bm) or j >= popcount(b_bm)) are marked invalid and
// write nothing. In dense mode every lane is valid and addresses its own
// element, row = 8*(s/2) + r, col = 16*(s%2) + c.
//
// Each position's rank (number of ones below it) is a prefix popcount; lane
// index i selects the set bit whose rank equals i.
//
// Interface: a_bm, b_bm, sparse, step; per lane (index r*16 + c) valid, row,
// col. Timing: combinational.
module scatter_ctrl
  import dstc_pkg::*;
(
  input  logic [WARP_M-1:0]                 a_bm,
  input  logic [WARP_N-1:0]                 b_bm,
  input  logic                              sparse,
  input  logic [$clog2(NSTEPS)-1:0]         step,
  output logic [LANES-1:0]                  lane_valid,
  output logic [LANES-1:0][$clog2(WARP_M)-1:0] lane_row,
  output logic [LANES-1:0][$clog2(WARP_N)-1:0] lane_col
);
  localparam int unsigned RW = $clog2(WARP_M);
  localparam int unsigned CW = $clog2(WARP_N);

  logic [STEP_M-1:0]         row_ok;
  logic [STEP_M-1:0][RW-1:0] row_pos;
  logic [STEP_N-1:0]         col_ok;
  logic [STEP_N-1:0][CW-1:0] col_pos;

  always_comb begin
    logic [RW:0] rank;
    int unsigned base;
    rank = '0;
    // rows of this step
    base = (int'(step) / STEPS_N) * STEP_M;
    for (int r = 0; r < int'(STEP_M); r++) begin
      row_ok[r]  = 1'b0;
      row_pos[r] = RW'(base + r);
      if (sparse) begin
        rank = '0;
        for (int p = 0; p < int'(WARP_M); p++) begin
          if (a_bm[p] && 32'(rank) == base + r) begin
            row_ok[r]  = 1'b1;
            row_pos[r] = RW'(p);
          end
          rank = rank + (RW+1)'(a_bm[p]);
        end
      end else begin
        row_ok[r] = 1'b1;
      end
    end
    // columns of this step
    base = (int'(step) % STEPS_N) * STEP_N;
    for (int c = 0; c < int'(STEP_N); c++) begin
      col_ok[c]  = 1'b0;
      col_pos[c] = CW'(base + c);
      if (sparse) begin
        rank = '0;
        for (int p = 0; p < int'(WARP_N); p++) begin
          if (b_bm[p] && 32'(rank) == base + c) begin
            col_ok[c]  = 1'b1;
            col_pos[c] = CW'(p);
          end
          rank = rank + (RW+1)'(b_bm[p]);
        end
      end else begin
        col_ok[c] = 1'b1;
      end
    end
    for (int r = 0; r < int'(STEP_M); r++)
      for (int c = 0; c < int'(STEP_N); c++) begin
        lane_valid[r*STEP_N + c] = row_ok[r] & col_ok[c];
        lane_row[r*STEP_N + c]   = row_pos[r];
        lane_col[r*STEP_N + c]   = col_pos[c];
      end
  end
endmodule
