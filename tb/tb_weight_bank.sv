// tb_weight_bank: loads a random integer weight tile, broadcasts it straight
// (16 rows in 16 clocks) and transposed (rows of W^T), checks every row, then
// applies SGD updates W[r] += -lr * G with exactly representable values and
// checks the result through the read port.
module tb_weight_bank;
  import gcn_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic ld_we = 0, g_valid = 0, bc_start = 0, bc_transpose = 0, bc_busy, bc_we, bc_done;
  logic [3:0] ld_row = 0, g_row = 0, bc_row, rd_row = 0; feat_t ld_data = '0, g_data = '0, bc_data, rd_data;
  logic [31:0] lr = 32'h3f000000;
  weight_bank dut (.*);
  initial begin #1000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  int wm [16][16];
  function automatic logic [31:0] f(int v);
    int a, m; logic [31:0] r;
    if (v == 0) return 32'd0;
    a = (v < 0) ? -v : v; m = 0;
    for (int i = 0; i < 24; i++) if (a >= (1 << i)) m = i;
    r[31] = (v < 0); r[30:23] = 8'(127 + m); r[22:0] = 23'(a << (23 - m));
    return r;
  endfunction
  task automatic bcast(bit tr);
    int nrows, cyc;
    @(negedge clk); bc_start = 1; bc_transpose = tr; @(negedge clk); bc_start = 0;
    nrows = 0; cyc = 0;
    while (!bc_done && cyc < 100) begin
      #1;
      if (bc_we) begin
        for (int c = 0; c < 16; c++) begin
          checks++;
          if (bc_data[c*32 +: 32] != f(tr ? wm[c][bc_row] : wm[bc_row][c])) begin
            failures++; if (failures < 5) $display("tr=%0d row %0d col %0d wrong", tr, bc_row, c);
          end
        end
        checks++; if (bc_row != 4'(nrows)) failures++;
        nrows++;
      end
      @(negedge clk); cyc++;
    end
    #1; if (bc_we) nrows++;
    checks++; if (nrows != 16) begin failures++; $display("tr=%0d sent %0d rows", tr, nrows); end
    checks++; if (cyc > (tr ? 34 : 17)) begin failures++; $display("broadcast took %0d clocks", cyc); end
  endtask
  initial begin
    repeat (3) @(posedge clk); rst_n = 1;
    for (int r = 0; r < 16; r++) begin
      @(negedge clk); ld_we = 1; ld_row = 4'(r);
      for (int c = 0; c < 16; c++) begin wm[r][c] = int'($urandom % 200) - 100; ld_data[c*32 +: 32] = f(wm[r][c]); end
    end
    @(negedge clk); ld_we = 0;
    bcast(0); bcast(1);
    for (int t = 0; t < 64; t++) begin
      int r; r = $urandom % 16;
      @(negedge clk); g_valid = 1; g_row = 4'(r);
      for (int c = 0; c < 16; c++) begin
        int gv; gv = 2 * (int'($urandom % 20) - 10);
        g_data[c*32 +: 32] = f(gv); wm[r][c] = wm[r][c] - gv / 2;
      end
      @(negedge clk); g_valid = 0; rd_row = 4'(r); #1;
      for (int c = 0; c < 16; c++) begin
        checks++; if (rd_data[c*32 +: 32] != f(wm[r][c])) begin failures++; if (failures < 8) $display("sgd r%0d c%0d %h want %0d", r, c, rd_data[c*32 +: 32], wm[r][c]); end
      end
    end
    bcast(1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
