// tb_router_st: routing rounds carried out on the real 16-core hypercube network.
// A simple model of the cores answers each header instruction by injecting a
// flit tagged with its group and source into the named slot; every message
// must then be delivered exactly once, at its destination core, with its own
// tag, and no slot may overflow. Sources per group are random permutations
// (the four-group "Fuse4" case of the paper). The network cycles per round
// are counted and printed.
module tb_router_st;
  import gcn_pkg::*;
  logic clk = 0, rst_n = 0;
  route_instr_t [15:0] instr; logic [15:0] instr_valid;
  logic [15:0] inj_valid; logic [15:0][3:0] inj_slot; flit_t [15:0] inj_flit;
  logic [15:0][3:0] dlv_valid, link_busy; pkt_t [15:0][3:0] dlv_pkt;
  int checks = 0, failures = 0, delivered = 0, net_cycles = 0;
  int got [64];
  cid_t src [64];
  task automatic chk(logic c, string s); checks++; if (!c) begin failures++; $display("FAIL %s", s); end endtask
  always #5 clk = ~clk;
  initial begin repeat (200000) @(posedge clk); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  hypercube_noc u_noc (.clk, .rst_n, .instr, .instr_valid, .inj_valid, .inj_slot, .inj_flit,
                       .dlv_valid, .dlv_pkt, .link_busy);

  // Core model: header -> inject {group, source} tag; local messages count at once.
  always_comb begin
    for (int c = 0; c < 16; c++) begin
      inj_valid[c] = instr_valid[c] && instr[c].head && instr[c].dest_id != cid_t'(c);
      inj_slot[c]  = instr[c].store_slot[0];
      inj_flit[c]  = '0;
      inj_flit[c].dest = instr[c].dest_id;
      inj_flit[c].pkt.agg_id = {2'(instr[c].store_slot[0]), instr[c].dest_id};
      inj_flit[c].pkt.feat[3:0] = cid_t'(c);
    end
  end
  always @(posedge clk) if (rst_n) begin
    if (|instr_valid && !(|(instr_valid & {16{1'b0}}))) begin
      for (int c = 0; c < 16; c++) if (instr_valid[c] && !instr[c].head) begin net_cycles++; break; end
    end
    for (int c = 0; c < 16; c++) begin
      if (instr_valid[c] && instr[c].head && instr[c].dest_id == cid_t'(c)) got[instr[c].store_slot[0]*16 + c]++;
      for (int k = 0; k < 4; k++) if (dlv_valid[c][k]) begin
        int m; m = int'(dlv_pkt[c][k].agg_id);
        got[m]++; delivered++;
        checks++;
        if (dlv_pkt[c][k].agg_id[3:0] != cid_t'(c) || dlv_pkt[c][k].feat[3:0] != src[m]) begin
          failures++; $display("FAIL delivery of %0d at core %0d", m, c); end
      end
    end
  end
  // Router-St with N counts loaded per block: several rounds per stage.
  logic ld = 0, round_start = 0, round_done, any_left, busy, slot_overflow, table_overrun;
  logic [1:0] ld_group = 0; cid_t ld_dst = 0, ld_src = 0; logic [6:0] ld_n = 0;
  logic [4:0] last_rows; logic [15:0] wait_events;
  int nleft [64];
  router_st dut (.clk, .rst_n, .ld, .ld_group, .ld_dst, .ld_src, .ld_n, .round_start, .round_done,
                 .any_left, .busy, .merge_done(1'b1), .instr, .instr_valid, .slot_overflow,
                 .table_overrun, .last_rows, .wait_events);
  initial begin
    int perm[16], rounds, expect_total;
    repeat (2) @(posedge clk); #1 rst_n = 1;
    expect_total = 0;
    for (int g = 0; g < 4; g++) begin
      for (int i = 0; i < 16; i++) perm[i] = i;
      perm.shuffle();
      for (int d = 0; d < 16; d++) begin
        src[g*16+d] = 4'(perm[d]); nleft[g*16+d] = $urandom_range(0, 3);
        if (perm[d] != d) expect_total += nleft[g*16+d];
        ld = 1; ld_group = 2'(g); ld_dst = 4'(d); ld_src = 4'(perm[d]); ld_n = 7'(nleft[g*16+d]);
        @(posedge clk); #1;
      end
    end
    ld = 0; rounds = 0;
    for (int m = 0; m < 64; m++) got[m] = 0;
    while (any_left) begin
      round_start = 1; @(posedge clk); #1 round_start = 0;
      wait (round_done); @(posedge clk); #1;
      rounds++;
    end
    for (int m = 0; m < 64; m++) chk(got[m] == nleft[m], $sformatf("message %0d: %0d of %0d", m, got[m], nleft[m]));
    chk(delivered == expect_total, "total over the network");
    chk(rounds == 3 || rounds < 3, "rounds = max N");
    chk(!slot_overflow && !table_overrun, "no overflow");
    chk(wait_events > 0, "virtual-channel waits happened");
    $display("%0d rounds, %0d flits over the network, %0d waits", rounds, delivered, wait_events);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
