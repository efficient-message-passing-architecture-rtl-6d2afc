// tb_data_transposer: writes random 16x16 tiles row by row and reads them
// back column by column, checking column c equals the c-th word of every row
// and that rd_valid follows rd_en by one clock.
module tb_data_transposer;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic wr_en = 0, rd_en = 0, rd_valid; logic [3:0] wr_row = 0, rd_col = 0;
  logic [15:0][31:0] wr_data = '0, rd_data;
  data_transposer dut (.*);
  initial begin #1000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  logic [31:0] m [16][16];
  initial begin
    repeat (3) @(posedge clk); rst_n = 1;
    for (int t = 0; t < 8; t++) begin
      for (int r = 0; r < 16; r++) begin
        @(negedge clk); wr_en = 1; wr_row = 4'(r);
        for (int c = 0; c < 16; c++) begin m[r][c] = $urandom; wr_data[c] = m[r][c]; end
      end
      @(negedge clk); wr_en = 0;
      for (int c = 0; c < 16; c++) begin
        @(negedge clk); rd_en = 1; rd_col = 4'(c);
        @(negedge clk); rd_en = 0;
        checks++; if (!rd_valid) failures++;
        for (int r = 0; r < 16; r++) begin
          checks++; if (rd_data[r] != m[r][c]) begin failures++; if (failures < 5) $display("col %0d row %0d", c, r); end
        end
        checks++; @(negedge clk); if (rd_valid) failures++;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
