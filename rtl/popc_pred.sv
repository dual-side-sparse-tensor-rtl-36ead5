// popc_pred: population count of the A and B bitmaps of one SpWMMA set and the
// predicate bits of its eight OHMMA.8161 steps.
//
// The condensed A column holds na = popcount(a_bm) non-zeros packed to the top,
// the condensed B row nb = popcount(b_bm) packed to the left. Step s covers
// condensed rows 8*(s/2) .. 8*(s/2)+7 and condensed columns 16*(s%2) ..
// 16*(s%2)+15 (steps 0,1 are the first row of 8x16 tiles, steps 2,3 the
// second, and so on). A step is enabled when it holds at least one non-zero
// product, i.e. 8*(s/2) < na and 16*(s%2) < nb; all others are skipped. With
// sparse = 0 (dense OWMMA) all eight steps are enabled.
//
// Interface: a_bm[32], b_bm[32], sparse; na, nb (0..32), pred[8].
// Timing: combinational.
module popc_pred
  import dstc_pkg::*;
(
  input  logic [WARP_M-1:0] a_bm,
  input  logic [WARP_N-1:0] b_bm,
  input  logic              sparse,
  output logic [5:0]        na,
  output logic [5:0]        nb,
  output logic [NSTEPS-1:0] pred
);
  always_comb begin
    na = popc32(a_bm);
    nb = popc32(b_bm);
    for (int s = 0; s < int'(NSTEPS); s++) begin
      pred[s] = !sparse ||
                ((32'(s / STEPS_N) * STEP_M < 32'(na)) &&
                 (32'(s % STEPS_N) * STEP_N < 32'(nb)));
    end
  end
endmodule
