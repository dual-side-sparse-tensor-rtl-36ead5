// accum_buffer: shared accumulation buffer of the sparse tensor core pair,
// with a dense mode and a sparse (gather-accumulate-scatter) mode.
//
// Storage is the full 32x32 FP32 warp tile (4 KB), split into LR*LC = 128
// single-ported banks of 8 words. Element (row, col) lives in bank
// (row % LR)*LC + (col % LC), word (row / LR)*(COLS/LC) + col / LC. This is the
// interleaving of the 8x8 example in the source (bank = (row%4)*4 + col%4 for
// 16 banks) widened to the 8x16 output tile of one OHMMA.8161 step, so a dense
// step touches every bank exactly once.
//
// Dense mode: each of the 128 bank ports is wired to one OTC output lane. The
// step's old values are read on dense_rdata (word dense_word of every bank),
// the OTC adds its products, and dense_we writes the sums back in the same
// cycle.
//
// Sparse mode: condensed products arrive with a scattered (row, col) target
// per lane and go into a per-lane queue (QDEPTH entries). Every cycle an
// operand collector looks at all queue heads and grants each bank to at most
// one of them (lowest lane first); a granted head reads its word through the
// crossbar, its lane adder adds the queued product (gather + accumulate) and
// the sum is written back to the same word (scatter). Heads that lost their
// bank wait and raise `conflict`; other lanes meanwhile proceed with later
// steps, so accesses of different OHMMA steps are combined in one cycle.
// sp_ready is low while any queue is full.
//
// Host port: one row chunk of LC words per cycle, to load the bias matrix C
// and to read the result D (combinational read, write on the clock edge).
//
// Timing: a product accepted in cycle t is at its queue head in cycle t+1 and,
// without conflict, written at the end of t+1. A bank does one read-add-write
// per cycle; its read is combinational.
//
// The source specifies the bank count only in examples (4 banks in the block
// diagram, 16 in the access-pattern example), the queue depth not at all, and
// draws the bitmap as queued ahead of the control unit; here the control
// unit's addresses travel with each product in the lane queues instead. The
// 128 lanes follow its "128-way parallel accumulators".
module accum_buffer
  import dstc_pkg::*;
#(
  parameter int unsigned ROWS   = 32,
  parameter int unsigned COLS   = 32,
  parameter int unsigned LR     = 8,
  parameter int unsigned LC     = 16,
  parameter int unsigned QDEPTH = 4
) (
  input  logic clk,
  input  logic rst_n,
  // dense mode
  input  logic [$clog2(ROWS*COLS/(LR*LC))-1:0] dense_word,
  output fp32_t [LR*LC-1:0]                    dense_rdata,
  input  logic                                 dense_we,
  input  fp32_t [LR*LC-1:0]                    dense_wdata,
  // sparse mode
  input  logic                                 sp_valid,
  output logic                                 sp_ready,
  input  logic [LR*LC-1:0]                     sp_lane_valid,
  input  logic [LR*LC-1:0][$clog2(ROWS)-1:0]   sp_row,
  input  logic [LR*LC-1:0][$clog2(COLS)-1:0]   sp_col,
  input  fp32_t [LR*LC-1:0]                    sp_val,
  // host port
  input  logic                                 host_we,
  input  logic [$clog2(ROWS)-1:0]              host_row,
  input  logic [$clog2(COLS/LC)-1:0]           host_chunk,
  input  fp32_t [LC-1:0]                       host_wdata,
  output fp32_t [LC-1:0]                       host_rdata,
  // status
  output logic                                 empty,
  output logic                                 conflict
);
  localparam int unsigned BANKS = LR * LC;
  localparam int unsigned LANES_L = LR * LC;
  localparam int unsigned WORDS = ROWS * COLS / BANKS;
  localparam int unsigned BW = $clog2(BANKS);
  localparam int unsigned WW = $clog2(WORDS);
  localparam int unsigned QW = $clog2(QDEPTH);

  typedef struct packed {
    logic [BW-1:0] bank;
    logic [WW-1:0] word;
    fp32_t         val;
  } req_t;

  fp32_t mem [BANKS][WORDS];

  req_t        q     [LANES_L][QDEPTH];
  logic [QW-1:0] q_head [LANES_L];
  logic [QW-1:0] q_tail [LANES_L];
  logic [QW:0]   q_cnt  [LANES_L];

  req_t              head [LANES_L];
  logic [LANES_L-1:0] nonempty, pop, push;
  fp32_t             lane_sum [LANES_L];

  function automatic logic [BW-1:0] bank_of(int unsigned row, int unsigned col);
    return BW'((row % LR) * LC + (col % LC));
  endfunction
  function automatic logic [WW-1:0] word_of(int unsigned row, int unsigned col);
    return WW'((row / LR) * (COLS / LC) + col / LC);
  endfunction

  // dense and host reads
  always_comb begin
    for (int b = 0; b < int'(BANKS); b++) dense_rdata[b] = mem[b][dense_word];
    for (int j = 0; j < int'(LC); j++)
      host_rdata[j] = mem[bank_of(32'(host_row), 32'(host_chunk) * LC + j)]
                         [word_of(32'(host_row), 32'(host_chunk) * LC + j)];
  end

  // operand collector: grant each bank to the lowest lane whose head wants it
  always_comb begin
    logic [BANKS-1:0] claimed;
    claimed = '0;
    for (int l = 0; l < int'(LANES_L); l++) begin
      head[l]     = q[l][q_head[l]];
      nonempty[l] = (q_cnt[l] != '0);
      pop[l]      = nonempty[l] && !claimed[head[l].bank];
      if (pop[l]) claimed[head[l].bank] = 1'b1;
      // lane adder: gathered word + queued product
      lane_sum[l] = fp32_add(mem[head[l].bank][head[l].word], head[l].val);
    end
  end

  always_comb begin
    sp_ready = 1'b1;
    for (int l = 0; l < int'(LANES_L); l++)
      if (q_cnt[l] == (QW+1)'(QDEPTH)) sp_ready = 1'b0;
  end

  always_comb begin
    for (int l = 0; l < int'(LANES_L); l++)
      push[l] = sp_valid && sp_ready && sp_lane_valid[l];
    empty    = (nonempty == '0);
    conflict = |(nonempty & ~pop);
  end

  // queues
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int l = 0; l < int'(LANES_L); l++) begin
        q_head[l] <= '0;
        q_tail[l] <= '0;
        q_cnt[l]  <= '0;
      end
    end else begin
      for (int l = 0; l < int'(LANES_L); l++) begin
        if (push[l]) begin
          q[l][q_tail[l]] <= '{bank: bank_of(32'(sp_row[l]), 32'(sp_col[l])),
                               word: word_of(32'(sp_row[l]), 32'(sp_col[l])),
                               val:  sp_val[l]};
          q_tail[l] <= q_tail[l] + 1'b1;
        end
        if (pop[l]) q_head[l] <= q_head[l] + 1'b1;
        q_cnt[l] <= q_cnt[l] + (QW+1)'(push[l]) - (QW+1)'(pop[l]);
      end
    end
  end

  // banks: scatter write-back, dense write, host write
  always_ff @(posedge clk) begin
    for (int l = 0; l < int'(LANES_L); l++)
      if (pop[l]) mem[head[l].bank][head[l].word] <= lane_sum[l];
    if (dense_we)
      for (int b = 0; b < int'(BANKS); b++) mem[b][dense_word] <= dense_wdata[b];
    if (host_we)
      for (int j = 0; j < int'(LC); j++)
        mem[bank_of(32'(host_row), 32'(host_chunk) * LC + j)]
           [word_of(32'(host_row), 32'(host_chunk) * LC + j)] <= host_wdata[j];
  end

  // dense-mode and host accesses must not overlap pending sparse work
  a_dense_when_empty: assert property (@(posedge clk) disable iff (!rst_n)
    (dense_we || host_we) |-> empty);
  a_qdepth_pow2: assert property (@(posedge clk) (QDEPTH & (QDEPTH - 1)) == 0);
endmodule
