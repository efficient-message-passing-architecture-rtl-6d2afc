// tb_seq_estimator: random b, n, nbar, d, h, e, c; checks both Table 1 totals
// against a reference computed here with 64-bit integers and the chosen order.
module tb_seq_estimator;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic start = 0, done, agco; logic [23:0] b, n, nbar, d, h, e, c; logic [63:0] tc_coag, tc_agco;
  seq_estimator dut (.*);
  initial begin #1000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  initial begin
    longint unsigned rc, ra; int na = 0;
    b = 0; n = 0; nbar = 0; d = 0; h = 0; e = 0; c = 0;
    repeat (3) @(posedge clk); rst_n = 1;
    for (int t = 0; t < 500; t++) begin
      @(negedge clk);
      b = 24'($urandom % 4096); n = 24'($urandom % 200000); nbar = 24'($urandom % 200000);
      d = 24'(1 + $urandom % 4096); h = 24'(1 + $urandom % 1024); e = 24'($urandom % 4000000); c = 24'($urandom % 256);
      start = 1;
      rc = 3 * longint'(nbar) * d * h + 2 * longint'(e) * h + longint'(h) * d + longint'(b) * c;
      ra = 3 * longint'(n) * d * h + 2 * longint'(e) * d + longint'(h) * d + longint'(b) * c;
      @(negedge clk); start = 0;
      checks += 4;
      if (!done) failures++;
      if (tc_coag != rc) failures++;
      if (tc_agco != ra) failures++;
      if (agco != (ra < rc)) failures++;
      if (agco) na++;
    end
    checks++; if (na == 0 || na == 500) begin failures++; $display("only one order seen"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
