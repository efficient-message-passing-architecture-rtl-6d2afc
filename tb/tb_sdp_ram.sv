// tb_sdp_ram: writes random words, reads them back one cycle later, and
// checks read-during-write returns the old word.
module tb_sdp_ram;
  logic clk = 0, we = 0, re = 0;
  logic [5:0] waddr = 0, raddr = 0;
  logic [511:0] wdata = 0, rdata;
  logic [511:0] model [64];
  int checks = 0, failures = 0;
  sdp_ram #(.WIDTH(512), .DEPTH(64)) dut (.*);
  always #5 clk = ~clk;
  initial begin repeat (2000) @(posedge clk); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  initial begin
    for (int a = 0; a < 64; a++) begin
      we = 1; waddr = 6'(a); wdata = {16{$urandom}}; model[a] = wdata; @(posedge clk); #1;
    end
    we = 0;
    for (int t = 0; t < 300; t++) begin
      re = 1; raddr = 6'($urandom);
      we = $urandom_range(0, 1); waddr = raddr; wdata = {16{$urandom}};
      @(posedge clk); #1;
      checks++;
      if (rdata !== model[raddr]) begin failures++; $display("FAIL addr %0d", raddr); end
      if (we) model[waddr] = wdata;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
