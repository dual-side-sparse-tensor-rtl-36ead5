// tb_bohmma: checks the 32x32x1 binary outer product and the OR-accumulated
// result bitmap, including clear.
module tb_bohmma;
  logic clk = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic rst_n, acc_en, acc_clr;
  logic [31:0] a_bm, b_bm;
  logic [1023:0] d_bm, acc_bm, ref_acc;

  bohmma dut (.clk, .rst_n, .a_bm, .b_bm, .acc_en, .acc_clr, .d_bm, .acc_bm);

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    rst_n = 1'b0; acc_en = 1'b0; acc_clr = 1'b0; a_bm = '0; b_bm = '0;
    ref_acc = '0;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    for (int n = 0; n < 200; n++) begin
      // sparse-ish bitmaps so the accumulated bitmap does not saturate
      a_bm = $urandom & $urandom & $urandom;
      b_bm = $urandom & $urandom;
      acc_en  = ($urandom % 4) != 0;
      acc_clr = (n % 37) == 36;
      #1;
      for (int i = 0; i < 32; i++)
        for (int j = 0; j < 32; j++) begin
          checks++;
          if (d_bm[i*32+j] !== (a_bm[i] && b_bm[j])) failures++;
        end
      @(posedge clk);
      #1;
      if (acc_clr) ref_acc = '0;
      else if (acc_en)
        for (int i = 0; i < 32; i++)
          for (int j = 0; j < 32; j++)
            if (a_bm[i] && b_bm[j]) ref_acc[i*32+j] = 1'b1;
      checks++;
      if (acc_bm !== ref_acc) begin
        failures++;
        if (failures < 10) $display("FAIL acc bitmap at n=%0d", n);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
