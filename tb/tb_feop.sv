// tb_feop: checks the four-element outer product d[j] = c[j] + a*b[j] against
// a double-precision reference rounded to FP32, on random normal operands and
// on c = 0 (the product alone, which must be exact).
module tb_feop;
  import dstc_pkg::*;
  import tb_fp_pkg::*;

  logic clk = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  fp16_t       a;
  fp16_t [3:0] b;
  fp32_t [3:0] c, d;

  feop dut (.a, .b, .c, .d);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check_all(bit zero_c);
    logic [31:0] exp_d;
    for (int j = 0; j < 4; j++) begin
      exp_d = real_to_fp32(fp32_to_real(c[j]) + fp16_to_real(a) * fp16_to_real(b[j]));
      checks++;
      if (d[j] !== exp_d && !(exp_d[30:0] == 0 && d[j][30:0] == 0)) begin
        failures++;
        if (failures < 10)
          $display("FAIL a=%h b=%h c=%h d=%h exp=%h zc=%0d", a, b[j], c[j], d[j], exp_d, zero_c);
      end
    end
  endtask

  initial begin
    // worked value: 1.5 * 2.0 + 0.25 = 3.25
    a = 16'h3E00; b = {4{16'h4000}}; c = {4{32'h3E80_0000}};
    @(posedge clk);
    checks++;
    if (d[0] !== 32'h4050_0000) begin failures++; $display("FAIL 1.5*2+0.25 -> %h", d[0]); end
    for (int n = 0; n < 2000; n++) begin
      a = rand_fp16(8, 22);
      for (int j = 0; j < 4; j++) begin
        b[j] = rand_fp16(8, 22);
        // c near the product's magnitude so that cancellation and
        // alignment shifts of all sizes occur
        c[j] = (n % 4 == 0) ? 32'd0 : rand_fp32(112, 142);
      end
      @(posedge clk);
      check_all(n % 4 == 0);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
