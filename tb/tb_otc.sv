// tb_otc: checks the 8x8x1 outer-product tensor core, d[i][j] = c[i][j] +
// a[i]*b[j], for all 64 outputs against a double-precision reference rounded
// to FP32.
module tb_otc;
  import dstc_pkg::*;
  import tb_fp_pkg::*;

  logic clk = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  fp16_t [7:0]  a, b;
  fp32_t [63:0] c, d;

  otc dut (.a, .b, .c, .d);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [31:0] e;
    for (int n = 0; n < 300; n++) begin
      for (int i = 0; i < 8; i++) begin
        a[i] = rand_fp16(10, 20);
        b[i] = rand_fp16(10, 20);
      end
      for (int k = 0; k < 64; k++) c[k] = rand_fp32(115, 139);
      @(posedge clk);
      for (int i = 0; i < 8; i++)
        for (int j = 0; j < 8; j++) begin
          e = real_to_fp32(fp32_to_real(c[i*8+j]) + fp16_to_real(a[i]) * fp16_to_real(b[j]));
          checks++;
          if (d[i*8+j] !== e && !(e[30:0] == 0 && d[i*8+j][30:0] == 0)) begin
            failures++;
            if (failures < 10) $display("FAIL (%0d,%0d) got %h exp %h", i, j, d[i*8+j], e);
          end
        end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
