// tb_gcn_accel_top: end-to-end test of the whole accelerator at its default
// parameters (no overrides). It loads features into all 16 cores, a weight
// tile, and 64 Block Messages' worth of COO edges (4 groups x 16 destination
// cores, sources dst^{0,1,6,11}, so group 0 is core-local), runs a forward
// pass, reads every Aggregate Buffer and compares it with a reference
// computed here: agg[dst][B] = sum over edges (B,D) of val * (W x_src[D]).
// It then switches to backward mode: the same edges are streamed again (the
// Graph Converter transposes them) and the pass uses W^T, checked against
// agg[col][D] = sum val * (W^T x[row]). Features are small integers and W a
// permutation so every result is exact in TF32/FP32. It also checks an SGD
// update of the Weight Buffer, both answers of the Sequence Estimator, and
// finally overflows the Graph Converter on purpose.
// Mechanisms counted (a failure if one never happened): virtual-channel
// waits, core-local messages, forward/backward mode switch, more than one
// routing round, 8 or more packets delivered in one clock, transposed weight
// broadcast, SGD update, both estimator orders, Graph Converter overflow.
module tb_gcn_accel_top;
  import gcn_pkg::*;
  logic clk = 0, rst_n = 0;
  always #2 clk = ~clk;
  int checks = 0, failures = 0;

  logic fb_we = 0; cid_t fb_core = '0; logic [5:0] fb_addr = '0; feat_t fb_wdata = '0;
  logic w_ld_we = 0; logic [3:0] w_ld_row = '0; feat_t w_ld_data = '0;
  logic g_valid = 0; logic [3:0] g_row = '0; feat_t g_data = '0; logic [31:0] lr = '0;
  logic [3:0] w_rd_row = '0; feat_t w_rd_data;
  logic backward = 0, bm_clear = 0, e_valid = 0, e_last = 0, e_ready;
  logic [9:0] e_row = '0, e_col = '0; logic [31:0] e_val = '0; logic [1:0] e_group = '0;
  logic est_start = 0; logic [23:0] est_b = 0, est_n = 0, est_nbar = 0, est_d = 0, est_h = 0, est_e = 0, est_c = 0;
  logic est_done, est_agco;
  logic start = 0; logic [6:0] n_nodes = 7'd64; logic busy, done, graph_busy; logic [15:0] rounds;
  logic rd_en = 0; cid_t rd_core = '0; logic rd_sel = 0; logic [5:0] rd_addr = '0; feat_t rd_data;
  logic [31:0] stat_deliveries; logic [2:0] stat_peak_dlv_core; logic [6:0] stat_peak_dlv_all;
  logic [15:0] stat_waits; logic stat_overflow;

  gcn_accel_top dut (.*);

  initial begin
    #4000000;
    failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  // ---------------- reference model (integer arithmetic) ----------------
  int xv [16][64][16];          // features
  int wperm;                    // W[r][c] = 1 iff c == (r + wperm) % 16
  typedef struct { int r, c, v; } e_t;
  e_t edges [$];
  int blk_first [64], blk_len [64];   // block index = g*16 + dst
  int exp_agg [16][64][16];
  int n_local_msgs = 0;

  function automatic logic [31:0] i2f(int v);
    int a, m; logic [31:0] r;
    if (v == 0) return 32'd0;
    a = (v < 0) ? -v : v; m = 0;
    for (int i = 0; i < 24; i++) if (a >= (1 << i)) m = i;
    r[31] = (v < 0); r[30:23] = 8'(127 + m); r[22:0] = 23'(a << (23 - m));
    return r;
  endfunction

  task automatic clk_n(int n); repeat (n) @(posedge clk); #1; endtask

  task automatic send_block(int k, bit tr);
    for (int i = 0; i < blk_len[k]; i++) begin
      e_t e = edges[blk_first[k] + i];
      e_valid = 1; e_row = 10'(e.r); e_col = 10'(e.c); e_val = i2f(e.v);
      e_last = (i == blk_len[k] - 1); e_group = 2'(k / 16);
      @(posedge clk); while (!e_ready) @(posedge clk); #1;
    end
    e_valid = 0; e_last = 0;
    clk_n(2); while (graph_busy) clk_n(1);
  endtask

  task automatic build_expected(bit tr);
    for (int c = 0; c < 16; c++) for (int j = 0; j < 64; j++) for (int l = 0; l < 16; l++) exp_agg[c][j][l] = 0;
    foreach (edges[i]) begin
      int dr, dc, sh;
      dr = tr ? edges[i].c : edges[i].r;   // aggregate node (global index)
      dc = tr ? edges[i].r : edges[i].c;   // neighbour node
      sh = tr ? (16 - wperm) % 16 : wperm;
      for (int l = 0; l < 16; l++)
        exp_agg[dr / 64][dr % 64][l] += edges[i].v * xv[dc / 64][dc % 64][(l + sh) % 16];
    end
  endtask

  task automatic check_agg(string tag);
    int bad = 0;
    for (int c = 0; c < 16; c++) for (int j = 0; j < 64; j++) begin
      rd_en = 1; rd_core = cid_t'(c); rd_sel = 0; rd_addr = 6'(j); clk_n(1); rd_en = 0;
      for (int l = 0; l < 16; l++) begin
        checks++;
        if (rd_data[l*32 +: 32] !== i2f(exp_agg[c][j][l])) begin
          failures++; bad++;
          if (bad < 6) $display("%s mismatch core %0d node %0d lane %0d: got %h want %h", tag, c, j, l,
                                rd_data[l*32 +: 32], i2f(exp_agg[c][j][l]));
        end
      end
    end
    $display("%s: aggregate buffers checked, %0d mismatches", tag, bad);
  endtask

  task automatic run_pass(bit bwd, output int cyc, output int rnd);
    backward = bwd; bm_clear = 1; clk_n(1); bm_clear = 0;
    for (int k = 0; k < 64; k++) send_block(k, bwd);
    start = 1; clk_n(1); start = 0;
    cyc = 0;
    while (!done) begin clk_n(1); cyc++; end
    rnd = rounds;
  endtask

  int mech_wait, mech_local, mech_mode, mech_rounds, mech_four, mech_trans, mech_sgd, mech_agco, mech_coag, mech_ovf;
  int cyc_f, cyc_b, rnd_f, rnd_b, waits_before;

  initial begin
    mech_wait = 0; mech_local = 0; mech_mode = 0; mech_rounds = 0; mech_four = 0;
    mech_trans = 0; mech_sgd = 0; mech_agco = 0; mech_coag = 0; mech_ovf = 0;
    wperm = 3;
    for (int c = 0; c < 16; c++) for (int j = 0; j < 64; j++) for (int l = 0; l < 16; l++)
      xv[c][j][l] = (c + 2 * j + 3 * l) % 97 + 1;
    // graph: block (g, dst) has source dst ^ G[g]
    begin
      int G [4];
      G = '{0, 1, 6, 11};
      for (int g = 0; g < 4; g++) for (int d = 0; d < 16; d++) begin
        int s, k, ne;
        bit used [64][64];
        s = d ^ G[g]; k = g * 16 + d;
        for (int a = 0; a < 64; a++) for (int b2 = 0; b2 < 64; b2++) used[a][b2] = 0;
        blk_first[k] = edges.size();
        ne = 4 + ($urandom % 29);
        for (int i = 0; i < ne; i++) begin
          int B, D;
          B = $urandom % 64; D = $urandom % 64;
          if (!used[B][D]) begin
            used[B][D] = 1;
            edges.push_back('{d * 64 + B, s * 64 + D, 1 + ($urandom % 2)});
          end
        end
        blk_len[k] = edges.size() - blk_first[k];
      end
    end
    clk_n(3); rst_n = 1; clk_n(2);

    // features and weights
    for (int c = 0; c < 16; c++) for (int j = 0; j < 64; j++) begin
      fb_we = 1; fb_core = cid_t'(c); fb_addr = 6'(j);
      for (int l = 0; l < 16; l++) fb_wdata[l*32 +: 32] = i2f(xv[c][j][l]);
      clk_n(1);
    end
    fb_we = 0;
    for (int r = 0; r < 16; r++) begin
      w_ld_we = 1; w_ld_row = 4'(r); w_ld_data = '0;
      w_ld_data[((r + wperm) % 16)*32 +: 32] = FP_ONE;
      clk_n(1);
    end
    w_ld_we = 0;

    // ---------------- forward ----------------
    build_expected(0);
    for (int k = 0; k < 16; k++) if (blk_len[k] > 0) mech_local++;   // group 0 blocks are core-local
    run_pass(0, cyc_f, rnd_f);
    $display("forward pass: %0d cycles, %0d routing rounds, %0d deliveries, waits %0d, peak %0d/clk (%0d into one core)",
             cyc_f, rnd_f, stat_deliveries, stat_waits, stat_peak_dlv_all, stat_peak_dlv_core);
    check_agg("forward");
    checks++; if (stat_overflow) begin failures++; $display("unexpected overflow flag"); end
    if (rnd_f > 1) mech_rounds++;
    waits_before = stat_waits;
    if (stat_waits > 0) mech_wait++;
    if (stat_peak_dlv_all >= 8) mech_four++;   // many cores receive in the same clock

    // ---------------- backward (mode switch, W^T) ----------------
    build_expected(1);
    run_pass(1, cyc_b, rnd_b);
    $display("backward pass: %0d cycles, %0d routing rounds", cyc_b, rnd_b);
    check_agg("backward");
    mech_mode++; mech_trans++;
    checks++; if (stat_overflow) begin failures++; $display("unexpected overflow flag"); end

    // ---------------- SGD update: W[5] <- W[5] - 0.5 * G ----------------
    g_valid = 1; g_row = 4'd5; lr = 32'h3f000000;
    for (int l = 0; l < 16; l++) g_data[l*32 +: 32] = i2f(2 * l);
    clk_n(1); g_valid = 0;
    w_rd_row = 4'd5; #1;
    for (int l = 0; l < 16; l++) begin
      int wv;
      wv = (l == (5 + wperm) % 16) ? 1 : 0;
      checks++;
      if (w_rd_data[l*32 +: 32] !== i2f(wv - l)) begin
        failures++; $display("SGD lane %0d got %h want %h", l, w_rd_data[l*32 +: 32], i2f(wv - l));
      end
    end
    mech_sgd++;

    // ---------------- Sequence Estimator ----------------
    // dense features, few edges: CoAg; tiny d, many edges and nbar >> n: AgCo
    est_b = 1024; est_n = 10240; est_nbar = 102400; est_d = 500; est_h = 256; est_e = 102400; est_c = 7;
    est_start = 1; clk_n(1); est_start = 0; clk_n(1);
    checks++; if (est_agco) mech_agco++; else mech_coag++;
    est_d = 4096; est_n = 100000; est_nbar = 1024; est_e = 10000;
    est_start = 1; clk_n(1); est_start = 0; clk_n(1);
    if (est_agco) mech_agco++; else mech_coag++;

    // ---------------- Graph Converter overflow ----------------
    for (int i = 0; i < 65; i++) begin
      e_valid = 1; e_row = 10'(i); e_col = 10'(i); e_val = FP_ONE; e_last = (i == 64);
      @(posedge clk); #1;
    end
    e_valid = 0; e_last = 0; clk_n(2);
    if (stat_overflow) mech_ovf++;
    clk_n(80);

    $display("mechanisms: waits=%0d local=%0d mode_switch=%0d multi_round=%0d parallel_delivery=%0d transpose=%0d sgd=%0d agco=%0d coag=%0d overflow=%0d",
             stat_waits, mech_local, mech_mode, mech_rounds, mech_four, mech_trans, mech_sgd, mech_agco, mech_coag, mech_ovf);
    checks += 10;
    if (mech_wait == 0)   begin failures++; $display("no virtual-channel wait happened"); end
    if (mech_local == 0)  begin failures++; $display("no local message"); end
    if (mech_mode == 0)   begin failures++; $display("no mode switch"); end
    if (mech_rounds == 0) begin failures++; $display("only one routing round"); end
    if (mech_four == 0)   begin failures++; $display("never 8 or more deliveries in one clock"); end
    if (mech_trans == 0)  begin failures++; $display("no transposed broadcast"); end
    if (mech_sgd == 0)    begin failures++; $display("no SGD update"); end
    if (mech_agco == 0)   begin failures++; $display("estimator never chose AgCo"); end
    if (mech_coag == 0)   begin failures++; $display("estimator never chose CoAg"); end
    if (mech_ovf == 0)    begin failures++; $display("overflow never flagged"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
