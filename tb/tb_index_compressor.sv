// tb_index_compressor: feeds row-sorted edge blocks and checks the decoded
// fields (A = row[9:6], B = row[5:0], C = col[9:6], D = col[5:0]), the value,
// the `last` flag that closes each message, and the header A + C + N with
// the group; N is counted here as the number of distinct B in the block.
module tb_index_compressor;
  import gcn_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic in_valid = 0, in_last = 0, in_ready, bm_valid, hdr_valid;
  logic [9:0] in_row = 0, in_col = 0; logic [31:0] in_val = 0; logic [1:0] in_group = 0, hdr_group;
  bm_entry_t bm_entry; cid_t hdr_dst, hdr_src; logic [6:0] hdr_n;
  index_compressor dut (.*);
  initial begin #2000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  bm_entry_t exp_q [$];
  int hdr_seen = 0, exp_n, hdr_exp_n [$];
  logic [1:0] hdr_exp_g [$]; cid_t hdr_exp_a [$], hdr_exp_c [$];
  always @(posedge clk) if (rst_n) begin
    if (bm_valid) begin
      bm_entry_t e;
      checks++;
      if (exp_q.size() == 0) begin failures++; $display("unexpected entry"); end
      else begin
        e = exp_q.pop_front();
        if (bm_entry != e) begin failures++; if (failures < 5) $display("entry %p want %p", bm_entry, e); end
      end
    end
    if (hdr_valid) begin
      checks++;
      if (hdr_n != 7'(hdr_exp_n[hdr_seen]) || hdr_group != hdr_exp_g[hdr_seen] ||
          hdr_dst != hdr_exp_a[hdr_seen] || hdr_src != hdr_exp_c[hdr_seen]) begin
        failures++; $display("header %0d wrong: n=%0d want %0d", hdr_seen, hdr_n, hdr_exp_n[hdr_seen]);
      end
      hdr_seen++;
    end
  end
  initial begin
    int ne, nb;
    logic [5:0] bs [$];
    repeat (3) @(posedge clk); rst_n = 1;
    nb = 60;
    for (int t = 0; t < nb; t++) begin
      cid_t A, C; logic [1:0] g;
      A = cid_t'($urandom); C = cid_t'($urandom); g = 2'($urandom);
      ne = 1 + ($urandom % 40);
      bs.delete();
      for (int i = 0; i < ne; i++) bs.push_back(6'($urandom % ((t % 3 == 0) ? 4 : 64)));
      bs.sort();
      exp_n = 0;
      for (int i = 0; i < ne; i++) begin
        bm_entry_t e; logic [5:0] D; logic [31:0] v;
        D = 6'($urandom); v = $urandom;
        if (i == 0 || bs[i] != bs[i-1]) exp_n++;
        e.dst_core = A; e.src_core = C; e.agg_id = bs[i]; e.nb_id = D; e.val = v;
        e.last = (i == ne - 1) || (bs[i+1] != bs[i]);
        exp_q.push_back(e);
        @(negedge clk); while (!in_ready) @(negedge clk);
        in_valid = 1; in_row = {A, bs[i]}; in_col = {C, D}; in_val = v; in_last = (i == ne - 1); in_group = g;
        if (($urandom % 5) == 0) begin @(negedge clk); in_valid = 0; end
      end
      hdr_exp_n.push_back(exp_n); hdr_exp_g.push_back(g); hdr_exp_a.push_back(A); hdr_exp_c.push_back(C);
      @(negedge clk); in_valid = 0; in_last = 0;
    end
    repeat (5) @(posedge clk);
    checks++; if (hdr_seen != nb || exp_q.size() != 0) begin failures++; $display("headers %0d left %0d", hdr_seen, exp_q.size()); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
