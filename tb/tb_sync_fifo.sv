// tb_sync_fifo: random pushes and pops against a queue model; checks data
// order, empty/full flags and the count.
module tb_sync_fifo;
  logic clk = 0, rst_n = 0, push = 0, pop = 0;
  logic [31:0] wr_data = 0, rd_data;
  logic empty, full;
  logic [3:0] count;
  int checks = 0, failures = 0;
  logic [31:0] q[$];
  sync_fifo #(.WIDTH(32), .DEPTH(8)) dut (.*);
  always #5 clk = ~clk;
  initial begin repeat (5000) @(posedge clk); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  initial begin
    repeat (2) @(posedge clk); #1 rst_n = 1;
    for (int t = 0; t < 2000; t++) begin
      checks++;
      if (empty !== (q.size() == 0) || full !== (q.size() == 8) || int'(count) != q.size()) begin
        failures++; $display("FAIL flags t=%0d size=%0d count=%0d", t, q.size(), count); end
      pop  = !empty && ($urandom_range(0, 3) != 0);
      push = (!full || pop) && ($urandom_range(0, 3) != 0) && (t < 1900);
      wr_data = $urandom;
      if (pop) begin
        checks++;
        if (rd_data !== q[0]) begin failures++; $display("FAIL data %h exp %h", rd_data, q[0]); end
        void'(q.pop_front());
      end
      if (push) q.push_back(wr_data);
      @(posedge clk); #1;
    end
    push = 0; pop = 0;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
