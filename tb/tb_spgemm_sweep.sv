// tb_spgemm_sweep: SpGEMM over a range of operand sparsities, one 32x32
// output tile at a time, on the full-size tensor core.
//
// For each (A sparsity, B sparsity) pair the testbench multiplies a 32xKD
// matrix A by a KDx32 matrix B as KD sparse sets (one A column and one B row
// each, bitmap-encoded), starting from a zero tile. It then reads D back and
// compares it with an integer reference (values are small integers, so every
// FP32 sum is exact in any order). It also checks:
//   * the issued and skipped step counts against the POPC rule;
//   * the issue rate: at most one step per cycle, so the tile never finishes
//     in fewer cycles than it has enabled steps;
//   * with fully dense operands in sparse mode every lane of a step hits its
//     own bank, so the tile takes exactly 8*KD cycles of issue plus one
//     cycle for the last step to leave the lane queues (no conflicts);
//   * a set with no enabled step still occupies its accept cycle, so even
//     the sparsest point needs KD-1 cycles after the first set is taken;
//   * the tile time does not grow as both operands get sparser.
// The cycle count of each point and its speed-up over 8*KD (the dense
// outer-product time) are printed.
module tb_spgemm_sweep;
  import dstc_pkg::*;
  import tb_fp_pkg::*;

  localparam int KD = 32;          // inner dimension of each tile
  localparam int NPTS = 6;

  logic clk = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  longint cycle = 0;
  always @(posedge clk) cycle++;

  logic rst_n;
  logic set_valid, set_ready, set_sparse, set_a_im2col;
  logic [31:0] a_bm, b_bm;
  fp16_t [31:0] a_val, b_val;
  logic fm_load;
  logic [33:0] fm_bm;
  fp16_t [33:0] fm_val;
  logic fm_col_valid;
  logic [1:0] fm_col_kx;
  logic [5:0] fm_col_off, fm_col_len;
  logic bm_clear;
  logic [1023:0] res_bm;
  logic host_we;
  logic [4:0] host_row;
  logic [0:0] host_chunk;
  fp32_t [15:0] host_wdata, host_rdata;
  logic idle;
  logic [31:0] cnt_sets, cnt_steps, cnt_skipped, cnt_conflict, cnt_stall, cnt_im2col;

  dstc_top dut (.*);

  int ref_d [32][32];
  int exp_steps, exp_skipped;

  initial begin
    repeat (60000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 15) $display("FAIL %s", what);
    end
  endtask

  function automatic int steps_of(int na, int nb);
    int n = 0;
    for (int s = 0; s < 8; s++) if ((s / 2) * 8 < na && (s % 2) * 16 < nb) n++;
    return n;
  endfunction

  function automatic int rand_elem(int density_pct);
    int v;
    if (int'($urandom % 100) >= density_pct) return 0;
    v = 1 + int'($urandom % 4);
    return ($urandom % 2) ? v : -v;
  endfunction

  task automatic send_set(int a_d[32], int b_d[32]);
    int na, nb;
    @(negedge clk);
    set_sparse = 1'b1;
    set_a_im2col = 1'b0;
    na = 0; nb = 0;
    a_val = '0; b_val = '0;
    for (int i = 0; i < 32; i++) begin
      a_bm[i] = (a_d[i] != 0);
      b_bm[i] = (b_d[i] != 0);
      if (a_d[i] != 0) begin a_val[na] = int_to_fp16(a_d[i]); na++; end
      if (b_d[i] != 0) begin b_val[nb] = int_to_fp16(b_d[i]); nb++; end
    end
    for (int i = 0; i < 32; i++)
      for (int j = 0; j < 32; j++) ref_d[i][j] += a_d[i] * b_d[j];
    exp_steps   += steps_of(na, nb);
    exp_skipped += 8 - steps_of(na, nb);
    set_valid = 1'b1;
    while (!set_ready) @(negedge clk);
    @(posedge clk);
    #1 set_valid = 1'b0;
  endtask

  initial begin
    int a_d[32], b_d[32];
    int dens_a[NPTS], dens_b[NPTS];
    longint t0, dt, prev_dt;
    int s0, k0;

    dens_a = '{100, 50, 25, 10, 1, 10};
    dens_b = '{100, 50, 25, 10, 1, 100};

    rst_n = 1'b0;
    set_valid = 0; set_sparse = 0; set_a_im2col = 0;
    a_bm = '0; b_bm = '0; a_val = '0; b_val = '0;
    fm_load = 0; fm_bm = '0; fm_val = '0;
    bm_clear = 0; host_we = 0; host_row = '0; host_chunk = '0; host_wdata = '0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1'b1;

    prev_dt = 0;
    for (int p = 0; p < NPTS; p++) begin
      // zero tile
      for (int r = 0; r < 32; r++)
        for (int h = 0; h < 2; h++) begin
          host_row = 5'(r); host_chunk = 1'(h); host_we = 1'b1;
          for (int j = 0; j < 16; j++) begin
            ref_d[r][h*16+j] = 0;
            host_wdata[j] = '0;
          end
          @(posedge clk); #1;
        end
      host_we = 1'b0;
      exp_steps = 0; exp_skipped = 0;
      s0 = int'(cnt_steps); k0 = int'(cnt_skipped);

      t0 = -1;
      for (int k = 0; k < KD; k++) begin
        for (int i = 0; i < 32; i++) a_d[i] = rand_elem(dens_a[p]);
        for (int i = 0; i < 32; i++) b_d[i] = rand_elem(dens_b[p]);
        send_set(a_d, b_d);
        if (k == 0) t0 = cycle;
      end
      @(negedge clk);
      while (!idle) @(negedge clk);
      dt = cycle - t0;

      check(int'(cnt_steps) - s0 == exp_steps,
            $sformatf("point %0d: %0d steps issued, expected %0d", p, int'(cnt_steps) - s0, exp_steps));
      check(int'(cnt_skipped) - k0 == exp_skipped,
            $sformatf("point %0d: %0d steps skipped, expected %0d", p, int'(cnt_skipped) - k0, exp_skipped));
      check(dt >= longint'(exp_steps) && dt >= longint'(KD - 1),
            $sformatf("point %0d: %0d cycles for %0d steps", p, dt, exp_steps));
      if (p == 0)
        check(dt == 8 * KD + 1,
              $sformatf("dense operands in sparse mode took %0d cycles, expected %0d", dt, 8 * KD + 1));
      if (p > 0 && p < 5)
        check(dt <= prev_dt, $sformatf("point %0d slower (%0d) than the denser point (%0d)", p, dt, prev_dt));
      if (p < 5) prev_dt = dt;
      $display("A density %0d%%, B density %0d%%: %0d steps, %0d cycles, speed-up %0.2f over %0d",
               dens_a[p], dens_b[p], exp_steps, dt, real'(8 * KD) / real'(dt), 8 * KD);

      // read the tile back
      for (int r = 0; r < 32; r++)
        for (int h = 0; h < 2; h++) begin
          @(negedge clk);
          host_row = 5'(r); host_chunk = 1'(h);
          #1;
          for (int j = 0; j < 16; j++)
            check(host_rdata[j] == int_to_fp32(ref_d[r][h*16+j]),
                  $sformatf("point %0d D[%0d][%0d]", p, r, h*16+j));
        end
    end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
