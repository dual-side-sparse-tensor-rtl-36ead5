// tb_accum_buffer: checks the accumulation buffer at its default size
// (32x32 FP32, 128 banks, 128 lanes, 4-deep queues).
//  * host port: bias load and read-back;
//  * dense mode: read of a whole step's 128 words and write-back;
//  * sparse mode: random batches of scattered products, merged into a
//    reference tile. The values are small integers, so every FP32 sum is exact
//    and the result does not depend on the order the operand collector picks;
//  * rates: a batch whose 128 products hit 128 different banks drains in one
//    cycle; a batch whose products all hit one bank drains one per cycle
//    (128 cycles) and raises `conflict`; queue-full back-pressure (sp_ready = 0)
//    must occur.
module tb_accum_buffer;
  import dstc_pkg::*;
  import tb_fp_pkg::*;

  logic clk = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic rst_n;
  logic [2:0] dense_word;
  fp32_t [127:0] dense_rdata, dense_wdata;
  logic dense_we;
  logic sp_valid, sp_ready;
  logic [127:0] sp_lane_valid;
  logic [127:0][4:0] sp_row, sp_col;
  fp32_t [127:0] sp_val;
  logic host_we;
  logic [4:0] host_row;
  logic [0:0] host_chunk;
  fp32_t [15:0] host_wdata, host_rdata;
  logic empty, conflict;

  accum_buffer dut (.*);

  int ref_tile [32][32];
  int n_conflict = 0, n_backpressure = 0;

  always @(posedge clk) begin
    if (conflict) n_conflict++;
    if (sp_valid && !sp_ready) n_backpressure++;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
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

  task automatic check_tile(string what);
    for (int r = 0; r < 32; r++)
      for (int h = 0; h < 2; h++) begin
        host_row = 5'(r); host_chunk = 1'(h);
        #1;
        for (int j = 0; j < 16; j++)
          check(host_rdata[j] == int_to_fp32(ref_tile[r][h*16+j]),
                $sformatf("%s D[%0d][%0d]=%h exp %0d", what, r, h*16+j, host_rdata[j], ref_tile[r][h*16+j]));
      end
  endtask

  // push one batch; waits for sp_ready
  task automatic push_batch();
    sp_valid = 1'b1;
    do @(posedge clk); while (!sp_ready);
    #1 sp_valid = 1'b0;
  endtask

  task automatic drain(output int cycles);
    cycles = 0;
    while (!empty) begin
      @(posedge clk); #1;
      cycles++;
    end
  endtask

  initial begin
    int v, cyc;
    rst_n = 1'b0;
    dense_word = '0; dense_we = 1'b0; dense_wdata = '0;
    sp_valid = 1'b0; sp_lane_valid = '0; sp_row = '0; sp_col = '0; sp_val = '0;
    host_we = 1'b0; host_row = '0; host_chunk = '0; host_wdata = '0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1'b1;

    // ---- bias load through the host port ----
    for (int r = 0; r < 32; r++)
      for (int h = 0; h < 2; h++) begin
        host_row = 5'(r); host_chunk = 1'(h); host_we = 1'b1;
        for (int j = 0; j < 16; j++) begin
          v = int'($urandom % 201) - 100;
          ref_tile[r][h*16+j] = v;
          host_wdata[j] = int_to_fp32(v);
        end
        @(posedge clk); #1;
      end
    host_we = 1'b0;
    check_tile("bias");

    // ---- dense mode: every step reads its 8x16 block, adds, writes ----
    for (int s = 0; s < 8; s++) begin
      dense_word = 3'(s);
      #1;
      for (int l = 0; l < 128; l++) begin
        int r, c;
        r = (s / 2) * 8 + l / 16;
        c = (s % 2) * 16 + l % 16;
        check(dense_rdata[l] == int_to_fp32(ref_tile[r][c]), $sformatf("dense read s=%0d lane %0d", s, l));
        v = int'($urandom % 21) - 10;
        ref_tile[r][c] += v;
        dense_wdata[l] = int_to_fp32(ref_tile[r][c]);
      end
      dense_we = 1'b1;
      @(posedge clk); #1;
      dense_we = 1'b0;
    end
    check_tile("dense");

    // ---- conflict-free batch: lane l hits bank l, drains in one cycle ----
    for (int l = 0; l < 128; l++) begin
      int r, c;
      r = (l / 16) + 8 * int'($urandom % 4);
      c = (l % 16) + 16 * int'($urandom % 2);
      sp_lane_valid[l] = 1'b1; sp_row[l] = 5'(r); sp_col[l] = 5'(c);
      v = int'($urandom % 21) - 10;
      sp_val[l] = int_to_fp32(v);
      ref_tile[r][c] += v;
    end
    push_batch();
    check(!empty, "batch queued after push");
    drain(cyc);
    check(cyc == 1, $sformatf("conflict-free batch drained in %0d cycles, expected 1", cyc));

    // ---- all products to one bank (bank 0, 8 words): one per cycle ----
    for (int l = 0; l < 128; l++) begin
      int r, c;
      r = 8 * int'($urandom % 4);
      c = 16 * int'($urandom % 2);
      sp_lane_valid[l] = 1'b1; sp_row[l] = 5'(r); sp_col[l] = 5'(c);
      v = int'($urandom % 21) - 10;
      sp_val[l] = int_to_fp32(v);
      ref_tile[r][c] += v;
    end
    push_batch();
    drain(cyc);
    check(cyc == 128, $sformatf("single-bank batch drained in %0d cycles, expected 128", cyc));
    check_tile("sparse single bank");

    // ---- random scattered batches, back to back ----
    for (int n = 0; n < 60; n++) begin
      for (int l = 0; l < 128; l++) begin
        int r, c;
        r = int'($urandom % 32); c = int'($urandom % 32);
        sp_lane_valid[l] = ($urandom % 3) != 0;
        sp_row[l] = 5'(r); sp_col[l] = 5'(c);
        v = int'($urandom % 21) - 10;
        sp_val[l] = int_to_fp32(v);
        if (sp_lane_valid[l]) ref_tile[r][c] += v;
      end
      push_batch();
    end
    drain(cyc);
    check_tile("sparse random");

    check(n_conflict > 0, "bank conflicts occurred");
    check(n_backpressure > 0, "queue-full back-pressure occurred");
    $display("conflict cycles %0d, back-pressure cycles %0d", n_conflict, n_backpressure);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
