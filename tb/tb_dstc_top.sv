// tb_dstc_top: end-to-end test of the dual-side sparse tensor core at its
// default size (32x32 warp tile, 128 lanes, 34-element im2col rows).
//
// A 32x32 tile D is loaded with a bias C, then accumulates
//   * a dense OWMMA (16 dense sets): each set must take exactly 8 cycles;
//   * a SpWMMA of 16 sparse sets of assorted densities, including the worked
//     example (A column with 20 non-zeros, B row with 11: 3 of 8 steps run)
//     and an empty set (all steps skipped);
//   * a lone worked-example set, which must finish its steps in 3 cycles;
//   * a dense set straight after sparse ones (mode switch: it has to wait for
//     the queues to drain);
//   * three sets whose A columns come from the sparse im2col of one
//     feature-map row.
// D is then read back and compared with a reference computed from the dense
// forms of all operands; values are small integers, so every sum is exact. The
// bitmap of the result is compared with the OR of all sparse partial bitmaps.
// Each mechanism (step skipping, bank conflict, issue stall, mode switch,
// im2col feed, empty set) is counted and must occur at least once.
module tb_dstc_top;
  import dstc_pkg::*;
  import tb_fp_pkg::*;

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
  logic [1023:0] ref_bm;
  int exp_steps = 0, exp_skipped = 0;
  int n_mode_switch = 0, n_empty_set = 0;
  bit last_sparse = 1'b0;

  initial begin
    repeat (50000) @(posedge clk);
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

  function automatic int rand_nz();
    int v;
    v = 1 + int'($urandom % 4);
    return ($urandom % 2) ? v : -v;
  endfunction

  // Present one set; returns at the clock edge that accepts it.
  // a_d / b_d are the dense operands; sparse sets are sent bitmap-encoded.
  task automatic send_set(bit sparse, bit from_im2col, int a_d[32], int b_d[32]);
    int na, nb;
    @(negedge clk);
    set_sparse = sparse;
    set_a_im2col = from_im2col;
    na = 0; nb = 0;
    for (int i = 0; i < 32; i++) begin
      a_val[i] = fp16_t'($urandom);      // padding must be ignored
      b_val[i] = fp16_t'($urandom);
    end
    for (int i = 0; i < 32; i++) begin
      if (sparse) begin
        a_bm[i] = (a_d[i] != 0);
        b_bm[i] = (b_d[i] != 0);
        if (a_d[i] != 0) begin a_val[na] = int_to_fp16(a_d[i]); na++; end
        if (b_d[i] != 0) begin b_val[nb] = int_to_fp16(b_d[i]); nb++; end
      end else begin
        a_bm[i] = 1'($urandom);
        b_bm[i] = 1'($urandom);
        a_val[i] = int_to_fp16(a_d[i]);
        b_val[i] = int_to_fp16(b_d[i]);
      end
    end
    if (from_im2col) begin
      na = 0;
      for (int i = 0; i < 32; i++) na += (a_d[i] != 0);
    end
    for (int i = 0; i < 32; i++)
      for (int j = 0; j < 32; j++) begin
        ref_d[i][j] += a_d[i] * b_d[j];
        if (sparse && a_d[i] != 0 && b_d[j] != 0) ref_bm[i*32+j] = 1'b1;
      end
    if (sparse) begin
      exp_steps   += steps_of(na, nb);
      exp_skipped += 8 - steps_of(na, nb);
      if (steps_of(na, nb) == 0) n_empty_set++;
    end else begin
      exp_steps += 8;
    end
    if (sparse != last_sparse) n_mode_switch++;
    last_sparse = sparse;
    set_valid = 1'b1;
    while (!set_ready) @(negedge clk);
    @(posedge clk);
    #1 set_valid = 1'b0;
  endtask

  task automatic wait_idle();
    @(negedge clk);
    while (!idle) @(negedge clk);
  endtask

  function automatic int rand_elem(int density_pct);
    int u;
    u = int'($urandom % 100);
    return (u < density_pct) ? rand_nz() : 0;
  endfunction

  task automatic ones_at(output int v[32], input int count, input int stride);
    for (int i = 0; i < 32; i++) v[i] = 0;
    for (int k = 0; k < count; k++) v[(k * stride) % 32] = rand_nz();
  endtask

  initial begin
    int a_d[32], b_d[32];
    int fm_d[34];
    int dens[16];
    longint t0;
    int s0, nz;

    rst_n = 1'b0;
    set_valid = 0; set_sparse = 0; set_a_im2col = 0;
    a_bm = '0; b_bm = '0; a_val = '0; b_val = '0;
    fm_load = 0; fm_bm = '0; fm_val = '0;
    bm_clear = 0; host_we = 0; host_row = '0; host_chunk = '0; host_wdata = '0;
    ref_bm = '0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1'b1;
    bm_clear = 1; @(posedge clk); #1 bm_clear = 0;

    // ---- bias C ----
    for (int r = 0; r < 32; r++)
      for (int h = 0; h < 2; h++) begin
        host_row = 5'(r); host_chunk = 1'(h); host_we = 1'b1;
        for (int j = 0; j < 16; j++) begin
          ref_d[r][h*16+j] = int'($urandom % 101) - 50;
          host_wdata[j] = int_to_fp32(ref_d[r][h*16+j]);
        end
        @(posedge clk); #1;
      end
    host_we = 1'b0;

    // ---- dense OWMMA: 16 sets, 8 cycles each ----
    t0 = -1;
    for (int k = 0; k < 16; k++) begin
      for (int i = 0; i < 32; i++) begin
        a_d[i] = int'($urandom % 9) - 4;
        b_d[i] = int'($urandom % 9) - 4;
      end
      send_set(1'b0, 1'b0, a_d, b_d);
      if (k == 0) t0 = cycle;
    end
    wait_idle();
    check(cycle - t0 == 128, $sformatf("dense OWMMA took %0d cycles after the first set, expected 128", cycle - t0));

    // ---- SpWMMA: 16 sparse sets ----
    dens = '{5, 10, 25, 50, 75, 90, 100, 30, 60, 15, 40, 80, 20, 70, 95, 35};
    for (int k = 0; k < 16; k++) begin
      if (k == 3) begin
        ones_at(a_d, 20, 7); ones_at(b_d, 11, 3);      // the worked example
      end else if (k == 9) begin
        for (int i = 0; i < 32; i++) a_d[i] = rand_elem(50); for (int i = 0; i < 32; i++) b_d[i] = 0;   // empty B row
      end else begin
        for (int i = 0; i < 32; i++) a_d[i] = rand_elem(dens[k]); for (int i = 0; i < 32; i++) b_d[i] = rand_elem(dens[15 - k]);
      end
      send_set(1'b1, 1'b0, a_d, b_d);
    end
    wait_idle();

    // ---- lone worked-example set: steps 0, 2, 4 in three cycles ----
    ones_at(a_d, 20, 7); ones_at(b_d, 11, 3);
    s0 = int'(cnt_steps);
    send_set(1'b1, 1'b0, a_d, b_d);
    t0 = cycle;
    while (dut.pend != '0) @(posedge clk);
    check(cycle - t0 == 3, $sformatf("worked example issued in %0d cycles, expected 3", cycle - t0));
    #1 check(int'(cnt_steps) - s0 == 3, "worked example issues 3 steps");

    // ---- sparse burst immediately followed by a dense set ----
    for (int k = 0; k < 4; k++) begin
      for (int i = 0; i < 32; i++) a_d[i] = rand_elem(85); for (int i = 0; i < 32; i++) b_d[i] = rand_elem(85);
      send_set(1'b1, 1'b0, a_d, b_d);
    end
    for (int i = 0; i < 32; i++) begin
      a_d[i] = int'($urandom % 5) - 2;
      b_d[i] = int'($urandom % 5) - 2;
    end
    send_set(1'b0, 1'b0, a_d, b_d);
    wait_idle();

    // ---- im2col-fed sets: one feature-map row, kernel width 3 ----
    @(negedge clk);
    nz = 0;
    fm_val = '0;
    for (int p = 0; p < 34; p++) begin
      fm_d[p] = (($urandom % 100) < 45) ? rand_nz() : 0;
      fm_bm[p] = (fm_d[p] != 0);
      if (fm_d[p] != 0) begin fm_val[nz] = int_to_fp16(fm_d[p]); nz++; end
    end
    fm_load = 1'b1;
    @(posedge clk); #1 fm_load = 1'b0;
    for (int kx = 0; kx < 3; kx++) begin
      for (int t = 0; t < 32; t++) a_d[t] = fm_d[kx + t];
      for (int i = 0; i < 32; i++) b_d[i] = rand_elem(40);
      send_set(1'b1, 1'b1, a_d, b_d);
    end
    wait_idle();
    #1 check(!fm_col_valid, "im2col row consumed after 3 columns");

    // ---- read back D and the result bitmap ----
    @(negedge clk);
    for (int r = 0; r < 32; r++)
      for (int h = 0; h < 2; h++) begin
        host_row = 5'(r); host_chunk = 1'(h);
        #1;
        for (int j = 0; j < 16; j++)
          check(host_rdata[j] == int_to_fp32(ref_d[r][h*16+j]),
                $sformatf("D[%0d][%0d] = %h, expected %0d", r, h*16+j, host_rdata[j], ref_d[r][h*16+j]));
      end
    check(res_bm == ref_bm, "result bitmap");
    check(int'(cnt_steps) == exp_steps, $sformatf("issued steps %0d, expected %0d", cnt_steps, exp_steps));
    check(int'(cnt_skipped) == exp_skipped, $sformatf("skipped steps %0d, expected %0d", cnt_skipped, exp_skipped));
    check(int'(cnt_sets) == 16 + 16 + 1 + 5 + 3, "set count");

    // ---- every mechanism happened ----
    $display("sets %0d steps %0d skipped %0d conflict-cycles %0d stall-cycles %0d im2col-sets %0d mode-switches %0d empty-sets %0d",
             cnt_sets, cnt_steps, cnt_skipped, cnt_conflict, cnt_stall, cnt_im2col, n_mode_switch, n_empty_set);
    check(cnt_skipped > 0,  "step skipping happened");
    check(cnt_conflict > 0, "bank conflicts happened");
    check(cnt_stall > 0,    "issue stalls happened");
    check(cnt_im2col == 3,  "im2col-fed sets happened");
    check(n_mode_switch >= 3, "dense/sparse mode switches happened");
    check(n_empty_set > 0,  "an all-skipped set happened");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
