// tb_route_calc: checks routing tables produced by the routing computation.
// For every row, independently of the design: each move crosses a dimension
// in which the message still differs from its destination (shortest paths
// only), no two messages leave one core on the same link, a waiting message
// is one that has not arrived, and each row moves at least one message. At
// the end every message must sit at its destination and the row count must
// be at least the longest step. Cases: the scalar example of the paper's
// Fig. 8(b) (1010 -> 0001, three rows), one group of 16 messages (a random
// permutation of sources to destinations 0..15, "Fuse1") and four groups of
// 64 ("Fuse4"), with the average row count printed.
module tb_route_calc;
  import gcn_pkg::*;
  localparam int P = 64;
  logic clk = 0, rst_n = 0, start = 0;
  cid_t [P-1:0] src, dst;
  logic [P-1:0] valid;
  logic busy, row_valid, done, overrun;
  logic [P-1:0] row_mv, row_wait;
  logic [P-1:0][1:0] row_dim;
  logic [4:0] rows;
  int checks = 0, failures = 0, waits = 0;
  route_calc #(.P(P)) dut (.*);
  always #5 clk = ~clk;
  initial begin repeat (400000) @(posedge clk); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  task automatic chk(logic c, string s); checks++; if (!c) begin failures++; $display("FAIL %s", s); end endtask

  task automatic run(output int nrows);
    cid_t p[P];
    int maxstep, nr;
    maxstep = 0; nr = 0;
    for (int m = 0; m < P; m++) begin
      p[m] = src[m];
      if (valid[m] && $countones(src[m] ^ dst[m]) > maxstep) maxstep = $countones(src[m] ^ dst[m]);
    end
    @(posedge clk); #1 start = 1; @(posedge clk); #1 start = 0;
    while (1) begin
      @(posedge clk); #1;
      if (row_valid) begin
        logic [3:0] used [16];
        int moved;
        moved = 0;
        for (int c = 0; c < 16; c++) used[c] = 0;
        for (int m = 0; m < P; m++) begin
          if (row_mv[m]) begin
            moved++;
            chk(valid[m] && ((p[m] ^ dst[m]) >> row_dim[m]) & 1, "move on a needed dimension");
            chk(!used[p[m]][row_dim[m]], "link used twice");
            used[p[m]][row_dim[m]] = 1;
          end
          chk(row_wait[m] == (valid[m] && p[m] != dst[m] && !row_mv[m]), "wait flag");
          if (row_wait[m]) waits++;
        end
        for (int m = 0; m < P; m++) if (row_mv[m]) p[m] = p[m] ^ (cid_t'(1) << row_dim[m]);
        chk(moved > 0, "row moves nothing");
        nr++;
      end
      if (done) break;
    end
    for (int m = 0; m < P; m++) if (valid[m]) chk(p[m] == dst[m], "arrived");
    chk(!overrun && int'(rows) == nr && nr >= maxstep, "row count");
    nrows = nr;
  endtask

  initial begin
    int nr, tot;
    int perm[16];
    repeat (2) @(posedge clk); #1 rst_n = 1;
    // Fig. 8(b): a = 1010 to b = 0001 takes three single steps.
    valid = '0; src = '0; dst = '0;
    valid[0] = 1; src[0] = 4'b1010; dst[0] = 4'b0001;
    run(nr); chk(nr == 3, "Fig 8(b) three steps");
    // Fuse1: one group.
    tot = 0;
    for (int t = 0; t < 20; t++) begin
      for (int i = 0; i < 16; i++) perm[i] = i;
      perm.shuffle();
      valid = '0;
      for (int d = 0; d < 16; d++) begin valid[d] = 1; src[d] = 4'(perm[d]); dst[d] = 4'(d); end
      run(nr); tot += nr;
    end
    $display("Fuse1 average rows %0.2f", real'(tot) / 20.0);
    // Fuse4: four groups.
    tot = 0;
    for (int t = 0; t < 20; t++) begin
      valid = '1;
      for (int g = 0; g < 4; g++) begin
        for (int i = 0; i < 16; i++) perm[i] = i;
        perm.shuffle();
        for (int d = 0; d < 16; d++) begin src[g*16+d] = 4'(perm[d]); dst[g*16+d] = 4'(d); end
      end
      run(nr); tot += nr;
    end
    $display("Fuse4 average rows %0.2f, waits %0d", real'(tot) / 20.0, waits);
    chk(waits > 0, "some message waited in a virtual channel");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
