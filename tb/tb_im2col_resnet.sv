// tb_im2col_resnet: sparse im2col of convolution rows the size of a
// ResNet-18 layer (56x56 feature map, 3x3 filter, stride 1, zero padding 1),
// on the default 34-element im2col unit.
//
// A padded row has 58 elements and gives 56 output positions, more than one
// 32-high lowered column. The row is therefore cut into two overlapping
// pieces, which is how a caller feeds rows wider than the unit:
//   piece 0: padded elements 0..33  -> output positions 0..31;
//   piece 1: padded elements 32..57, then 8 zeros -> output positions 32..55
//            (its columns' last 8 positions lie past the output row; they
//            still see the row's last elements, so the caller drops them).
// Each piece is bitmap-encoded (bitmap + packed non-zeros) and loaded once;
// the unit then emits its 3 lowered columns, one per cycle. Every column's
// bitmap, value offset, length and values are compared with the plain im2col of the dense
// row, for rows at densities 100%, 75%, 50%, 25% and 10%. The cost per row is
// checked to be 2 loads + 6 columns = 8 cycles at every density: the bitmap
// method needs no per-element decoding.
module tb_im2col_resnet;
  import dstc_pkg::*;

  localparam int W    = 56;           // feature-map width
  localparam int KW   = 3;            // filter width
  localparam int WP   = W + KW - 1;   // padded row, 58
  localparam int ROWS = 40;           // rows per density

  logic clk = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  longint cycle = 0;
  always @(posedge clk) cycle++;

  logic rst_n;
  logic load, step, col_valid;
  logic [33:0] row_bm;
  fp16_t [33:0] row_val;
  logic [1:0] col_kx;
  logic [31:0] col_bm;
  logic [5:0] col_off, col_len;
  fp16_t [31:0] col_val;

  sparse_im2col dut (
    .clk, .rst_n, .load, .row_bm, .row_val, .step,
    .col_valid, .col_kx, .col_bm, .col_off, .col_len, .col_val);

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic expect_ok(bit cond, string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 15) $display("FAIL %s", what);
    end
  endtask

  initial begin
    fp16_t padded[WP + 8];
    fp16_t exp_vals[$];
    int dens[5];
    int nz, base, used;
    longint t0;

    dens = '{100, 75, 50, 25, 10};
    rst_n = 1'b0;
    load = 0; step = 0; row_bm = '0; row_val = '0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1'b1;

    foreach (dens[d]) begin
      used = 0;
      for (int r = 0; r < ROWS; r++) begin
        // padded dense row: zero at both ends and after the end
        foreach (padded[p]) padded[p] = '0;
        for (int p = 1; p <= W; p++)
          if (int'($urandom % 100) < dens[d]) padded[p] = fp16_t'(16'h3C00 + 16'(p));
        @(negedge clk);
        t0 = cycle;
        for (int piece = 0; piece < 2; piece++) begin
          base = piece * 32;
          nz = 0;
          row_val = '0;
          for (int p = 0; p < 34; p++) begin
            row_bm[p] = (padded[base + p] != 0);
            if (row_bm[p]) begin row_val[nz] = padded[base + p]; nz++; end
          end
          load = 1'b1;
          @(posedge clk); #1 load = 1'b0;
          for (int kx = 0; kx < KW; kx++) begin
            #1;
            exp_vals.delete();
            for (int t = 0; t < 32; t++) begin
              expect_ok(col_bm[t] == (padded[base + kx + t] != 0),
                        $sformatf("density %0d row %0d piece %0d kx %0d bit %0d", dens[d], r, piece, kx, t));
              if (padded[base + kx + t] != 0) exp_vals.push_back(padded[base + kx + t]);
            end
            expect_ok(col_valid && col_kx == 2'(kx) && 32'(col_len) == exp_vals.size(),
                      $sformatf("density %0d row %0d piece %0d kx %0d length", dens[d], r, piece, kx));
            foreach (exp_vals[k]) expect_ok(col_val[k] == exp_vals[k], "column value");
            nz = 0;
            for (int q = 0; q < kx; q++) nz += int'(padded[base + q] != 0);
            expect_ok(int'(col_off) == nz, "column value offset");
            used += int'(col_len);
            step = 1'b1;
            @(posedge clk); #1 step = 1'b0;
          end
        end
        expect_ok(cycle - t0 == 8, $sformatf("row took %0d cycles, expected 8", cycle - t0));
      end
      $display("density %0d%%: %0d rows, 8 cycles each, %0d non-zeros lowered", dens[d], ROWS, used);
    end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
