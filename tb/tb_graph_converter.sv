// tb_graph_converter: streams random COO blocks into the Graph Converter in
// both modes and checks that the output is the same multiset of edges,
// sorted by (row, col) in forward mode and by (col, row) with row and column
// swapped in backward mode; also checks the one-edge-per-clock drain and the
// overflow flag on the 65th edge.
module tb_graph_converter;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic backward = 0, in_valid = 0, in_last = 0, in_ready, out_valid, out_last, out_ready = 1, overflow;
  logic [9:0] in_row = 0, in_col = 0, out_row, out_col; logic [31:0] in_val = 0, out_val;
  graph_converter dut (.*);
  initial begin #2000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  longint keys [$], got [$];
  initial begin
    int n, t0, drain_cycles;
    repeat (3) @(posedge clk); rst_n = 1;
    for (int t = 0; t < 40; t++) begin
      backward = t[0]; n = 1 + ($urandom % 64); keys.delete(); got.delete();
      for (int i = 0; i < n; i++) begin
        logic [9:0] r, c; logic [31:0] v;
        r = 10'($urandom); c = 10'($urandom); v = $urandom;
        @(negedge clk); in_valid = 1; in_row = r; in_col = c; in_val = v; in_last = (i == n - 1);
        keys.push_back(backward ? {c, r, v} : {r, c, v});
      end
      @(negedge clk); in_valid = 0; in_last = 0;
      keys.sort();
      t0 = 0; drain_cycles = 0;
      while (got.size() < n && drain_cycles < 200) begin
        out_ready = ($urandom % 4) != 0;
        #1;
        if (out_valid && out_ready) begin
          got.push_back({out_row, out_col, out_val});
          checks++; if (out_last != (got.size() == n)) begin failures++; $display("out_last wrong"); end
        end
        @(negedge clk); drain_cycles++;
      end
      out_ready = 1;
      for (int i = 0; i < n; i++) begin
        checks++;
        if (i >= got.size() || got[i] != keys[i]) begin failures++; if (failures < 5) $display("test %0d edge %0d wrong", t, i); end
      end
      checks++; if (overflow) failures++;
    end
    // overflow
    for (int i = 0; i < 65; i++) begin
      @(negedge clk); in_valid = 1; in_row = 10'(i); in_col = 0; in_last = (i == 64);
    end
    @(negedge clk); in_valid = 0; in_last = 0;
    checks++; if (!overflow) begin failures++; $display("no overflow"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
