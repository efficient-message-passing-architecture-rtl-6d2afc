// tb_instr_gen: routing rounds carried out on the real 16-core hypercube network.
// A simple model of the cores answers each header instruction by injecting a
// flit tagged with its group and source into the named slot; every message
// must then be delivered exactly once, at its destination core, with its own
// tag, and no slot may overflow. Sources per group are random permutations
// (the four-group "Fuse4" case of the paper). The network cycles per round
// are counted and printed.
module tb_instr_gen;
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
  // Routing computation feeds the instruction generator row by row.
  logic start = 0, busy, row_valid, done, overrun, begin_round = 0, want_rows, head_phase, slot_overflow;
  cid_t [63:0] s_src, s_dst; logic [63:0] s_val, row_mv, row_wait; logic [63:0][1:0] row_dim;
  logic [4:0] rows;
  logic [63:0] q_mv [16]; logic [63:0][1:0] q_dim [16]; int nq, pi; logic playing = 0;
  route_calc u_rc (.clk, .rst_n, .start, .src(s_src), .dst(s_dst), .valid(s_val), .busy, .row_valid,
                   .row_mv, .row_dim, .row_wait, .done, .rows, .overrun);
  logic rv; logic [63:0] rmv; logic [63:0][1:0] rdim;
  instr_gen dut (.clk, .rst_n, .begin_round, .src(s_src), .dst(s_dst), .valid(s_val), .merge_done(1'b1),
                 .want_rows, .row_valid(rv), .row_mv(rmv), .row_dim(rdim), .instr, .instr_valid,
                 .head_phase, .slot_overflow);
  always @(posedge clk) if (row_valid) begin q_mv[nq] <= row_mv; q_dim[nq] <= row_dim; nq <= nq + 1; end
  always_comb begin rv = playing && want_rows && pi < nq && !busy; rmv = rv ? q_mv[pi] : '0; rdim = q_dim[pi]; end
  always @(posedge clk) if (rv) pi <= pi + 1;
  initial begin
    int perm[16];
    repeat (2) @(posedge clk); #1 rst_n = 1;
    for (int t = 0; t < 10; t++) begin
      for (int m = 0; m < 64; m++) got[m] = 0;
      for (int g = 0; g < 4; g++) begin
        for (int i = 0; i < 16; i++) perm[i] = i;
        perm.shuffle();
        for (int d = 0; d < 16; d++) begin s_src[g*16+d] = 4'(perm[d]); s_dst[g*16+d] = 4'(d); s_val[g*16+d] = (t == 0) ? (d < 5) : 1'b1; src[g*16+d] = 4'(perm[d]); end
      end
      nq = 0; pi = 0; playing = 0;
      start = 1; @(posedge clk); #1 start = 0;
      wait (done); @(posedge clk); #1;
      begin_round = 1; @(posedge clk); #1 begin_round = 0; playing = 1;
      wait (want_rows && pi == nq); repeat (3) @(posedge clk); #1;
      for (int m = 0; m < 64; m++) chk(got[m] == (s_val[m] ? 1 : 0), $sformatf("message %0d delivered %0d times", m, got[m]));
      chk(!slot_overflow, "slot overflow");
    end
    $display("delivered %0d messages in %0d network cycles", delivered, net_cycles);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
