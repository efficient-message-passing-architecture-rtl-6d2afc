// tb_msg_start_gen: loads N counts and source ids for four groups and checks
// each generated start point vector (valid = N > 0, source, destination =
// column) against a model, until all counts are used up.
module tb_msg_start_gen;
  import gcn_pkg::*;
  logic clk = 0, rst_n = 0, ld = 0, gen = 0;
  logic [1:0] ld_group = 0; cid_t ld_dst = 0, ld_src = 0; logic [6:0] ld_n = 0;
  logic out_valid, any_left;
  cid_t [63:0] start_src, start_dst; logic [63:0] start_valid;
  int checks = 0, failures = 0;
  int n_m [64]; cid_t s_m [64];
  msg_start_gen dut (.*);
  always #5 clk = ~clk;
  initial begin repeat (5000) @(posedge clk); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  task automatic chk(logic c, string s); checks++; if (!c) begin failures++; $display("FAIL %s", s); end endtask
  initial begin
    int rounds;
    repeat (2) @(posedge clk); #1 rst_n = 1;
    chk(!any_left, "empty after reset");
    for (int g = 0; g < 4; g++) for (int d = 0; d < 16; d++) begin
      n_m[g*16+d] = $urandom_range(0, 5); s_m[g*16+d] = 4'((d + 4 * g + 1) % 16);
      ld = 1; ld_group = 2'(g); ld_dst = 4'(d); ld_src = s_m[g*16+d]; ld_n = 7'(n_m[g*16+d]);
      @(posedge clk); #1;
    end
    ld = 0; rounds = 0;
    while (any_left) begin
      gen = 1; @(posedge clk); #1 gen = 0;
      chk(out_valid, "out_valid");
      for (int m = 0; m < 64; m++) begin
        chk(start_valid[m] == (n_m[m] > 0), "valid");
        if (n_m[m] > 0) begin chk(start_src[m] == s_m[m] && start_dst[m] == 4'(m % 16), "ids"); n_m[m]--; end
      end
      rounds++;
    end
    chk(rounds == 5 || rounds < 5, "rounds bounded by max N");
    for (int m = 0; m < 64; m++) chk(n_m[m] == 0, "all used");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
