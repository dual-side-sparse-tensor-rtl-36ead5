// tb_sparse_im2col: checks the bitmap im2col.
//  * The worked example: feature-map row bitmap 0 1 0 1 1 0 with values
//    4 2 3, 3-wide kernel, stride 1: columns 0101 (offset 0, length 2, values
//    4 2), 1011 (offset 0, length 3, values 4 2 3), 0110 (offset 1, length 2,
//    values 2 3).
//  * Random rows at the default size (34 elements, 32-high columns) and with
//    stride 2, against columns cut from the expanded dense row.
//  * One column per cycle: the last column is followed by col_valid = 0.
module tb_sparse_im2col;
  import dstc_pkg::*;

  logic clk = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic rst_n;

  // worked example instance
  logic load0, step0, v0;
  logic [5:0] bm0;
  fp16_t [5:0] val0;
  logic [1:0] kx0;
  logic [3:0] cbm0;
  logic [2:0] off0;
  logic [2:0] len0;
  fp16_t [3:0] cval0;
  sparse_im2col #(.R(6), .K(3), .S(1)) u_ex (
    .clk, .rst_n, .load(load0), .row_bm(bm0), .row_val(val0), .step(step0),
    .col_valid(v0), .col_kx(kx0), .col_bm(cbm0), .col_off(off0), .col_len(len0), .col_val(cval0));

  // default instance
  logic load1, step1, v1;
  logic [33:0] bm1;
  fp16_t [33:0] val1;
  logic [1:0] kx1;
  logic [31:0] cbm1;
  logic [5:0] off1;
  logic [5:0] len1;
  fp16_t [31:0] cval1;
  sparse_im2col u_def (
    .clk, .rst_n, .load(load1), .row_bm(bm1), .row_val(val1), .step(step1),
    .col_valid(v1), .col_kx(kx1), .col_bm(cbm1), .col_off(off1), .col_len(len1), .col_val(cval1));

  // stride-2 instance: R = 11, K = 3, S = 2 gives 5-high columns
  logic load2, step2, v2;
  logic [10:0] bm2;
  fp16_t [10:0] val2;
  logic [1:0] kx2;
  logic [4:0] cbm2;
  logic [3:0] off2;
  logic [2:0] len2;
  fp16_t [4:0] cval2;
  sparse_im2col #(.R(11), .K(3), .S(2)) u_s2 (
    .clk, .rst_n, .load(load2), .row_bm(bm2), .row_val(val2), .step(step2),
    .col_valid(v2), .col_kx(kx2), .col_bm(cbm2), .col_off(off2), .col_len(len2), .col_val(cval2));

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic expect_ok(bit cond, string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 15) $display("FAIL %s ", what);
    end
  endtask

  initial begin
    fp16_t dense[64];
    fp16_t exp_vals[$];
    int nz;
    int exp_off;
    rst_n = 1'b0;
    load0 = 0; step0 = 0; load1 = 0; step1 = 0; load2 = 0; step2 = 0;
    bm0 = '0; val0 = '0; bm1 = '0; val1 = '0; bm2 = '0; val2 = '0;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;

    // ---- worked example (bit p = row element p) ----
    bm0 = 6'b011010;                        // elements 1, 3, 4 are non-zero
    val0 = '0; val0[0] = 16'd4; val0[1] = 16'd2; val0[2] = 16'd3;
    load0 = 1; @(posedge clk); #1 load0 = 0; #1;
    expect_ok(v0 && kx0 == 0 && cbm0 == 4'b1010 && off0 == 0 && len0 == 2 &&
              cval0[0] == 4 && cval0[1] == 2, "example column 0");
    step0 = 1; @(posedge clk); #1 step0 = 0; #1;
    expect_ok(v0 && kx0 == 1 && cbm0 == 4'b1101 && off0 == 0 && len0 == 3 &&
              cval0[0] == 4 && cval0[1] == 2 && cval0[2] == 3, "example column 1");
    step0 = 1; @(posedge clk); #1 step0 = 0; #1;
    expect_ok(v0 && kx0 == 2 && cbm0 == 4'b0110 && off0 == 1 && len0 == 2 &&
              cval0[0] == 2 && cval0[1] == 3, "example column 2");
    step0 = 1; @(posedge clk); #1 step0 = 0; #1;
    expect_ok(!v0, "example ends after 3 columns");

    // ---- random rows, default size ----
    for (int n = 0; n < 200; n++) begin
      bm1 = {$urandom, $urandom} & ((n % 3 == 0) ? {$urandom, $urandom} : '1);
      nz = 0;
      val1 = '0;
      for (int p = 0; p < 34; p++) begin
        dense[p] = bm1[p] ? fp16_t'(16'h100 + p) : '0;
        if (bm1[p]) begin val1[nz] = dense[p]; nz++; end
      end
      load1 = 1; @(posedge clk); #1 load1 = 0; #1;
      exp_off = 0;
      for (int kx = 0; kx < 3; kx++) begin
        exp_vals.delete();
        for (int t = 0; t < 32; t++) begin
          expect_ok(cbm1[t] == bm1[kx + t], "default column bitmap");
          if (bm1[kx + t]) exp_vals.push_back(dense[kx + t]);
        end
        expect_ok(v1 && kx1 == 2'(kx) && 32'(len1) == exp_vals.size() && 32'(off1) == exp_off,
                  $sformatf("default column %0d len %0d off %0d", kx, len1, off1));
        foreach (exp_vals[k]) expect_ok(cval1[k] == exp_vals[k], "default column value");
        exp_off += bm1[kx];
        step1 = 1; @(posedge clk); #1 step1 = 0; #1;
      end
      expect_ok(!v1, "default ends after K columns");
    end

    // ---- random rows, stride 2 ----
    for (int n = 0; n < 200; n++) begin
      bm2 = 11'($urandom);
      nz = 0;
      val2 = '0;
      for (int p = 0; p < 11; p++) begin
        dense[p] = bm2[p] ? fp16_t'(16'h200 + p) : '0;
        if (bm2[p]) begin val2[nz] = dense[p]; nz++; end
      end
      load2 = 1; @(posedge clk); #1 load2 = 0; #1;
      for (int kx = 0; kx < 3; kx++) begin
        exp_vals.delete();
        for (int t = 0; t < 5; t++) begin
          expect_ok(cbm2[t] == bm2[kx + 2*t], "stride-2 column bitmap");
          if (bm2[kx + 2*t]) exp_vals.push_back(dense[kx + 2*t]);
        end
        expect_ok(v2 && 32'(len2) == exp_vals.size(), "stride-2 column length");
        foreach (exp_vals[k]) expect_ok(cval2[k] == exp_vals[k], "stride-2 column value");
        step2 = 1; @(posedge clk); #1 step2 = 0; #1;
      end
    end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
