// tb_reduced_regfile: random bursts of up to five arrivals per cycle against a
// queue model (lower port first), with a one-per-cycle drain; checks order,
// count and that the overflow flag stays low, then forces an overflow.
module tb_reduced_regfile;
  logic clk = 0, rst_n = 0, pop = 0;
  logic [4:0] wr_valid = 0;
  logic [4:0][31:0] wr_data;
  logic valid, overflow;
  logic [31:0] rd_data;
  logic [4:0] count;
  logic [31:0] q[$];
  int checks = 0, failures = 0;
  reduced_regfile #(.NPORT(5), .WIDTH(32), .DEPTH(16)) dut (.*);
  always #5 clk = ~clk;
  initial begin repeat (5000) @(posedge clk); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  initial begin
    repeat (2) @(posedge clk); #1 rst_n = 1;
    for (int t = 0; t < 1000; t++) begin
      pop = valid && ($urandom_range(0, 4) != 0);
      if (pop) begin
        checks++;
        if (rd_data !== q[0]) begin failures++; $display("FAIL data"); end
        void'(q.pop_front());
      end
      wr_valid = 0;
      for (int i = 0; i < 5; i++) begin
        wr_data[i] = $urandom;
        if (q.size() < 11 && $urandom_range(0, 2) == 0) begin wr_valid[i] = 1; q.push_back(wr_data[i]); end
      end
      @(posedge clk); #1;
      checks++;
      if (int'(count) != q.size() || overflow) begin failures++; $display("FAIL count %0d %0d", count, q.size()); end
    end
    pop = 0; wr_valid = 5'h1f; repeat (4) @(posedge clk); #1 wr_valid = 0;
    checks++; if (!overflow) begin failures++; $display("FAIL no overflow"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
