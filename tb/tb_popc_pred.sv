// tb_popc_pred: checks the non-zero counts and OHMMA step predicates. Includes
// the worked example of a 32-element A column with 20 non-zeros and a B row
// with 11 (and with 12): steps 0, 2 and 4 run, the other five are skipped.
module tb_popc_pred;
  logic clk = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic [31:0] a_bm, b_bm;
  logic sparse;
  logic [5:0] na, nb;
  logic [7:0] pred;

  popc_pred dut (.a_bm, .b_bm, .sparse, .na, .nb, .pred);

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [31:0] first_ones(int n);
    return (n >= 32) ? 32'hFFFF_FFFF : ((32'd1 << n) - 1);
  endfunction

  task automatic check(logic [7:0] exp_pred);
    int ea, eb;
    ea = 0; eb = 0;
    for (int i = 0; i < 32; i++) begin ea += a_bm[i]; eb += b_bm[i]; end
    checks++;
    if (pred !== exp_pred || na != 6'(ea) || nb != 6'(eb)) begin
      failures++;
      if (failures < 10)
        $display("FAIL a=%h b=%h sparse=%0d pred=%b exp=%b na=%0d nb=%0d", a_bm, b_bm, sparse, pred, exp_pred, na, nb);
    end
  endtask

  initial begin
    logic [7:0] e;
    int ca, cb, ra, rb;
    sparse = 1'b1;
    a_bm = 32'h0; for (int i = 0; i < 20; i++) a_bm[(i * 7) % 32] = 1'b1;   // 20 ones
    b_bm = 32'h0; for (int i = 0; i < 11; i++) b_bm[(i * 3) % 32] = 1'b1;   // 11 ones
    #1 check(8'b0001_0101);
    b_bm = 32'h0; for (int i = 0; i < 12; i++) b_bm[(i * 5) % 32] = 1'b1;   // 12 ones
    #1 check(8'b0001_0101);
    for (int n = 0; n < 2000; n++) begin
      sparse = (n % 10) != 0;
      ca = $urandom % 33; cb = $urandom % 33;
      a_bm = first_ones(ca); b_bm = first_ones(cb);
      // scramble positions; the counts are what matter
      a_bm = {<<{a_bm}} ^ 32'h0; b_bm = (b_bm << (n % 3)) | (b_bm >> (32 - (n % 3)));
      ca = 0; cb = 0;
      for (int i = 0; i < 32; i++) begin ca += a_bm[i]; cb += b_bm[i]; end
      ra = (ca + 7) / 8; rb = (cb + 15) / 16;
      for (int s = 0; s < 8; s++) e[s] = !sparse || ((s / 2) < ra && (s % 2) < rb);
      #1 check(e);
      @(posedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
