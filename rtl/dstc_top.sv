// dstc_top: the two tensor cores of one GPU sub-core, extended for dual-side
// sparsity (outer-product tensor cores, bitmap predication and a shared
// gather-scatter accumulation buffer).
//
// The unit executes one "set" at a time: a 32x32x1 outer product of a
// 32-element A column with a 32-element B row, accumulated into a 32x32 FP32
// tile D held in the accumulation buffer. Sixteen sets make a 32x32x16 SpWMMA
// (or a dense OWMMA); the sequencing of sets is the caller's (the warp's
// instruction stream).
//
//   dense set (OWMMA, set_sparse = 0): A and B are plain vectors. All eight
//     OHMMA.8161 steps run, one per cycle; step s multiplies A[8*(s/2)+:8]
//     with B[16*(s%2)+:16] on two 8x8x1 OTCs, reads the 8x16 block of D
//     through the buffer's dense ports, adds and writes it back.
//   sparse set (SpWMMA, set_sparse = 1): A and B arrive bitmap-encoded
//     (bitmap + non-zeros packed to index 0). The BOHMMA computes the partial
//     bitmap, whose OR over the sets is kept as the bitmap of the result; POPC
//     counts the non-zeros and enables only the OHMMA steps that hold any
//     (the others are skipped, which is the speed-up); each enabled step's
//     128 products go with their scattered (row, col) positions into the
//     buffer's lane queues, where the gather-accumulate-scatter happens.
//   im2col source (set_a_im2col = 1): the A column of a set is taken from the
//     sparse im2col unit, which expands a bitmap-encoded feature-map row
//     (loaded with fm_load) into the lowered columns of a K-wide kernel.
//
// Interface: set_valid/set_ready handshake per set; host port to load the
// bias C before and read D after a tile (only while idle); bm_clear clears
// the result bitmap; event counters for sets, issued and skipped steps,
// bank-conflict cycles, issue stalls and im2col-fed sets.
// Timing: a set is accepted in one cycle and its n enabled steps issue in the
// following n cycles back to back; the next set is accepted in the cycle of
// the last step, so a stream of sets costs max(n, 1) cycles each when no
// queue fills. A dense step waits until the sparse queues have drained.
// The ISA (OHMMA, BOHMMA, POPC predication, SpWMMA) and the buffer structure
// follow the source; the single-cycle combinational OTC and the handshake are
// this design's choices.
module dstc_top
  import dstc_pkg::*;
#(
  parameter int unsigned IM2COL_R = 34,
  parameter int unsigned IM2COL_K = 3,
  parameter int unsigned IM2COL_S = 1,
  parameter int unsigned QDEPTH   = 4,
  localparam int unsigned IM2COL_B = (IM2COL_R - IM2COL_K + IM2COL_S) / IM2COL_S
) (
  input  logic                    clk,
  input  logic                    rst_n,
  // one set of a SpWMMA / OWMMA
  input  logic                    set_valid,
  output logic                    set_ready,
  input  logic                    set_sparse,
  input  logic                    set_a_im2col,
  input  logic [WARP_M-1:0]       a_bm,
  input  fp16_t [WARP_M-1:0]      a_val,
  input  logic [WARP_N-1:0]       b_bm,
  input  fp16_t [WARP_N-1:0]      b_val,
  // sparse im2col feature-map row
  input  logic                    fm_load,
  input  logic [IM2COL_R-1:0]     fm_bm,
  input  fp16_t [IM2COL_R-1:0]    fm_val,
  output logic                    fm_col_valid,
  output logic [$clog2(IM2COL_K)-1:0]   fm_col_kx,
  output logic [$clog2(IM2COL_R+1)-1:0] fm_col_off,
  output logic [$clog2(IM2COL_B+1)-1:0] fm_col_len,
  // bitmap of the accumulated result
  input  logic                    bm_clear,
  output logic [WARP_M*WARP_N-1:0] res_bm,
  // host port of the accumulation buffer
  input  logic                    host_we,
  input  logic [$clog2(WARP_M)-1:0] host_row,
  input  logic [$clog2(STEPS_N)-1:0] host_chunk,
  input  fp32_t [STEP_N-1:0]      host_wdata,
  output fp32_t [STEP_N-1:0]      host_rdata,
  output logic                    idle,
  // event counters
  output logic [31:0]             cnt_sets,
  output logic [31:0]             cnt_steps,
  output logic [31:0]             cnt_skipped,
  output logic [31:0]             cnt_conflict,
  output logic [31:0]             cnt_stall,
  output logic [31:0]             cnt_im2col
);
  localparam int unsigned SW = $clog2(NSTEPS);

  if (IM2COL_B != WARP_M) begin : g_bad_im2col
    $error("im2col column height must equal the warp tile height");
  end

  // ---------------- im2col front end ----------------
  logic [WARP_M-1:0]   im_bm;
  fp16_t [WARP_M-1:0]  im_val;
  logic                im_valid;
  logic [$clog2(IM2COL_K)-1:0]      im_kx;
  logic [$clog2(IM2COL_R+1)-1:0]    im_off;
  logic [$clog2(IM2COL_B+1)-1:0]    im_len;
  logic                accept;

  sparse_im2col #(.R(IM2COL_R), .K(IM2COL_K), .S(IM2COL_S)) u_im2col (
    .clk, .rst_n,
    .load      (fm_load),
    .row_bm    (fm_bm),
    .row_val   (fm_val),
    .step      (accept && set_a_im2col),
    .col_valid (im_valid),
    .col_kx    (im_kx),
    .col_bm    (im_bm),
    .col_off   (im_off),
    .col_len   (im_len),
    .col_val   (im_val)
  );
  assign fm_col_valid = im_valid;
  assign fm_col_kx    = im_kx;
  assign fm_col_off   = im_off;
  assign fm_col_len   = im_len;

  logic [WARP_M-1:0]  sel_a_bm;
  fp16_t [WARP_M-1:0] sel_a_val;
  assign sel_a_bm  = set_a_im2col ? im_bm  : a_bm;
  assign sel_a_val = set_a_im2col ? im_val : a_val;

  // ---------------- BOHMMA and POPC predication ----------------
  logic [NSTEPS-1:0] pred;

  popc_pred u_pred (
    .a_bm (sel_a_bm), .b_bm (b_bm), .sparse (set_sparse),
    .na (), .nb (), .pred
  );

  bohmma #(.M(WARP_M), .N(WARP_N)) u_bohmma (
    .clk, .rst_n,
    .a_bm    (sel_a_bm),
    .b_bm    (b_bm),
    .acc_en  (accept && set_sparse),
    .acc_clr (bm_clear),
    .d_bm    (),
    .acc_bm  (res_bm)
  );

  // ---------------- set register and step sequencer ----------------
  logic [WARP_M-1:0]  cur_a_bm;
  logic [WARP_N-1:0]  cur_b_bm;
  fp16_t [WARP_M-1:0] cur_a_val;
  fp16_t [WARP_N-1:0] cur_b_val;
  logic               cur_sparse;
  logic [NSTEPS-1:0]  pend;
  logic [SW-1:0]      step;
  logic               issue, buf_ready, buf_empty, buf_conflict;

  always_comb begin
    step = '0;
    for (int s = NSTEPS - 1; s >= 0; s--) if (pend[s]) step = SW'(s);
  end

  assign issue     = (pend != '0) && (cur_sparse ? buf_ready : buf_empty);
  assign set_ready = ((pend == '0) || (issue && ((pend & ~(NSTEPS'(1) << step)) == '0)))
                     && (!set_a_im2col || im_valid);
  assign accept    = set_valid && set_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pend       <= '0;
      cur_sparse <= 1'b0;
      cur_a_bm   <= '0;
      cur_b_bm   <= '0;
      cur_a_val  <= '0;
      cur_b_val  <= '0;
    end else if (accept) begin
      pend       <= pred;
      cur_sparse <= set_sparse;
      cur_a_bm   <= sel_a_bm;
      cur_b_bm   <= b_bm;
      cur_a_val  <= sel_a_val;
      cur_b_val  <= b_val;
    end else if (issue) begin
      pend <= pend & ~(NSTEPS'(1) << step);
    end
  end

  // ---------------- OHMMA.8161 on two OTCs ----------------
  fp16_t [STEP_M-1:0]  op_a;
  fp16_t [STEP_N-1:0]  op_b;
  fp32_t [LANES-1:0]   acc_c, lane_d, dense_rdata;
  fp32_t [OTC_N*OTC_N-1:0] otc_c [STEP_N/OTC_N];
  fp32_t [OTC_N*OTC_N-1:0] otc_d [STEP_N/OTC_N];

  assign op_a  = cur_a_val[32'(step / STEPS_N) * STEP_M +: STEP_M];
  assign op_b  = cur_b_val[32'(step % STEPS_N) * STEP_N +: STEP_N];
  // dense mode accumulates onto D inside the OTC; sparse mode emits products
  assign acc_c = cur_sparse ? '0 : dense_rdata;

  for (genvar t = 0; t < int'(STEP_N / OTC_N); t++) begin : g_otc
    for (genvar i = 0; i < int'(OTC_N); i++) begin : g_map
      for (genvar j = 0; j < int'(OTC_N); j++) begin : g_lane
        assign otc_c[t][i*OTC_N + j]             = acc_c[i*STEP_N + t*OTC_N + j];
        assign lane_d[i*STEP_N + t*OTC_N + j]    = otc_d[t][i*OTC_N + j];
      end
    end
    otc #(.N(OTC_N)) u_otc (
      .a (op_a),
      .b (op_b[t*OTC_N +: OTC_N]),
      .c (otc_c[t]),
      .d (otc_d[t])
    );
  end

  // ---------------- gather/scatter control and accumulation buffer ---------
  logic [LANES-1:0]                      sc_valid;
  logic [LANES-1:0][$clog2(WARP_M)-1:0]  sc_row;
  logic [LANES-1:0][$clog2(WARP_N)-1:0]  sc_col;

  scatter_ctrl u_scatter (
    .a_bm (cur_a_bm), .b_bm (cur_b_bm), .sparse (cur_sparse), .step,
    .lane_valid (sc_valid), .lane_row (sc_row), .lane_col (sc_col)
  );

  accum_buffer #(
    .ROWS (WARP_M), .COLS (WARP_N), .LR (STEP_M), .LC (STEP_N), .QDEPTH (QDEPTH)
  ) u_buf (
    .clk, .rst_n,
    .dense_word    (step),
    .dense_rdata   (dense_rdata),
    .dense_we      (issue && !cur_sparse),
    .dense_wdata   (lane_d),
    .sp_valid      (issue && cur_sparse),
    .sp_ready      (buf_ready),
    .sp_lane_valid (sc_valid),
    .sp_row        (sc_row),
    .sp_col        (sc_col),
    .sp_val        (lane_d),
    .host_we, .host_row, .host_chunk, .host_wdata, .host_rdata,
    .empty         (buf_empty),
    .conflict      (buf_conflict)
  );

  assign idle = (pend == '0) && buf_empty;

  // ---------------- event counters ----------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cnt_sets <= '0; cnt_steps <= '0; cnt_skipped <= '0;
      cnt_conflict <= '0; cnt_stall <= '0; cnt_im2col <= '0;
    end else begin
      if (accept) cnt_sets <= cnt_sets + 1;
      if (accept && set_sparse)
        cnt_skipped <= cnt_skipped + 32'(NSTEPS) - 32'($countones(pred));
      if (accept && set_a_im2col) cnt_im2col <= cnt_im2col + 1;
      if (issue) cnt_steps <= cnt_steps + 1;
      if (buf_conflict) cnt_conflict <= cnt_conflict + 1;
      if (pend != '0 && !issue) cnt_stall <= cnt_stall + 1;
    end
  end

  a_host_idle: assert property (@(posedge clk) disable iff (!rst_n) host_we |-> idle);
endmodule
