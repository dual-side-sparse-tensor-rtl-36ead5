// tb_scatter_ctrl: checks the gather/scatter address of every output lane of
// every OHMMA step, in sparse mode against lists of set-bit positions built
// independently, and in dense mode against the plain tile position.
module tb_scatter_ctrl;
  logic clk = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic [31:0] a_bm, b_bm;
  logic sparse;
  logic [2:0] step;
  logic [127:0] lane_valid;
  logic [127:0][4:0] lane_row, lane_col;

  scatter_ctrl dut (.a_bm, .b_bm, .sparse, .step, .lane_valid, .lane_row, .lane_col);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int apos[$], bpos[$];
    int i, j, er, ec;
    bit ev;
    for (int n = 0; n < 300; n++) begin
      sparse = (n % 8) != 0;
      case (n % 4)
        0: begin a_bm = $urandom; b_bm = $urandom; end
        1: begin a_bm = $urandom & $urandom; b_bm = $urandom | $urandom; end
        2: begin a_bm = $urandom | $urandom; b_bm = $urandom & $urandom & $urandom; end
        default: begin a_bm = 32'hFFFF_FFFF; b_bm = (n % 3 == 0) ? 32'd0 : $urandom; end
      endcase
      apos.delete(); bpos.delete();
      for (int p = 0; p < 32; p++) begin
        if (a_bm[p]) apos.push_back(p);
        if (b_bm[p]) bpos.push_back(p);
      end
      for (int s = 0; s < 8; s++) begin
        step = 3'(s);
        @(posedge clk);
        for (int r = 0; r < 8; r++)
          for (int c = 0; c < 16; c++) begin
            i = (s / 2) * 8 + r;
            j = (s % 2) * 16 + c;
            if (sparse) begin
              ev = (i < apos.size()) && (j < bpos.size());
              er = ev ? apos[i] : 0;
              ec = ev ? bpos[j] : 0;
            end else begin
              ev = 1'b1; er = i; ec = j;
            end
            checks++;
            if (lane_valid[r*16+c] !== ev ||
                (ev && (lane_row[r*16+c] != 5'(er) || lane_col[r*16+c] != 5'(ec)))) begin
              failures++;
              if (failures < 10)
                $display("FAIL s=%0d lane(%0d,%0d) v=%0d row=%0d col=%0d exp v=%0d row=%0d col=%0d",
                         s, r, c, lane_valid[r*16+c], lane_row[r*16+c], lane_col[r*16+c], ev, er, ec);
            end
          end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
