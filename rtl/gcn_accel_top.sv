// gcn_accel_top: the GCN training accelerator (paper Fig. 2): 16 computation
// cores on a 4-dimensional hypercube network, the Router with its Message
// Start Point Generator, routing computation and instruction generation, the
// Graph Converter and Index Compressor that turn COO edges into Block
// Messages, the global Weight Buffer with SGD update and Data Transposer,
// the Sequence Estimator and the System Controller.
//
// Host/HBM side (plain ports here; HBM, DMA and PCIe are outside this RTL):
//   fb_*    write a node feature into core fb_core's Feature Buffer;
//   w_ld_*  load a weight row; g_* apply an SGD update row with rate lr;
//   e_*     stream the COO edges of one 64x64 block (e_last on its final
//           edge, e_group = the block's group 0..3, e_ready = accepted);
//           the Graph Converter sorts them (row-wise forward, column-wise
//           with `backward`), the Index Compressor writes the Block Message
//           entries into the source core and the header A+C+N into the
//           Router. bm_clear empties all Block Message buffers.
//   est_*   Sequence Estimator query (Table 1 complexities).
//   start   runs one pass: weight sync, combination, message passing rounds,
//           drain; done pulses at the end.
//   rd_*    read core rd_core's Aggregate (rd_sel=0) or Data Output (1)
//           Buffer; rd_data is valid one clock after rd_en.
// Status counters report deliveries, peak deliveries per clock, virtual
// channel waits and the overflow flags. Everything runs on one clock (the
// paper's system clock is 250 MHz).
module gcn_accel_top
  import gcn_pkg::*;
#(
  parameter int unsigned BM_DEPTH = 1024,
  parameter int unsigned GC_CAP   = 64
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         fb_we,
  input  cid_t         fb_core,
  input  logic [5:0]   fb_addr,
  input  feat_t        fb_wdata,
  input  logic         w_ld_we,
  input  logic [3:0]   w_ld_row,
  input  feat_t        w_ld_data,
  input  logic         g_valid,
  input  logic [3:0]   g_row,
  input  feat_t        g_data,
  input  logic [31:0]  lr,
  input  logic [3:0]   w_rd_row,
  output feat_t        w_rd_data,
  input  logic         backward,
  input  logic         bm_clear,
  input  logic         e_valid,
  input  logic [9:0]   e_row,
  input  logic [9:0]   e_col,
  input  logic [31:0]  e_val,
  input  logic         e_last,
  input  logic [1:0]   e_group,
  output logic         e_ready,
  input  logic         est_start,
  input  logic [23:0]  est_b, est_n, est_nbar, est_d, est_h, est_e, est_c,
  output logic         est_done,
  output logic         est_agco,
  input  logic         start,
  input  logic [6:0]   n_nodes,
  output logic         busy,
  output logic         done,
  output logic [15:0]  rounds,
  output logic         graph_busy,
  input  logic         rd_en,
  input  cid_t         rd_core,
  input  logic         rd_sel,
  input  logic [5:0]   rd_addr,
  output feat_t        rd_data,
  output logic [31:0]  stat_deliveries,
  output logic [2:0]   stat_peak_dlv_core,   // most packets one core took in a clock
  output logic [6:0]   stat_peak_dlv_all,    // most packets delivered in a clock
  output logic [15:0]  stat_waits,
  output logic         stat_overflow
);
  // ---------------- Graph Converter -> Index Compressor ----------------
  logic gc_ov, gc_v, gc_last, ic_ready;
  logic [9:0] gc_row, gc_col; logic [31:0] gc_val;
  logic [1:0] grp_q;
  graph_converter #(.CAP(GC_CAP), .IW(10)) u_gc (
    .clk, .rst_n, .backward, .in_valid(e_valid), .in_row(e_row), .in_col(e_col), .in_val(e_val),
    .in_last(e_last), .in_ready(e_ready), .out_valid(gc_v), .out_row(gc_row), .out_col(gc_col),
    .out_val(gc_val), .out_last(gc_last), .out_ready(ic_ready), .overflow(gc_ov));
  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) grp_q <= '0; else if (e_valid && e_ready && e_last) grp_q <= e_group;

  logic ic_bm_v, ic_hdr_v; bm_entry_t ic_bm; logic [1:0] ic_hg; cid_t ic_hd, ic_hs; logic [6:0] ic_hn;
  index_compressor u_ic (
    .clk, .rst_n, .in_valid(gc_v), .in_row(gc_row), .in_col(gc_col), .in_val(gc_val),
    .in_last(gc_last), .in_group(grp_q), .in_ready(ic_ready), .bm_valid(ic_bm_v), .bm_entry(ic_bm),
    .hdr_valid(ic_hdr_v), .hdr_group(ic_hg), .hdr_dst(ic_hd), .hdr_src(ic_hs), .hdr_n(ic_hn));
  assign graph_busy = gc_v || !e_ready || !ic_ready || ic_bm_v;

  // ---------------- Weight Buffer ----------------
  logic wb_bc_start, wb_bc_tr, wb_bc_busy, wb_bc_we, wb_bc_done; logic [3:0] wb_bc_row; feat_t wb_bc_data;
  weight_bank u_wb (
    .clk, .rst_n, .ld_we(w_ld_we), .ld_row(w_ld_row), .ld_data(w_ld_data),
    .g_valid, .g_row, .g_data, .lr, .bc_start(wb_bc_start), .bc_transpose(wb_bc_tr),
    .bc_busy(wb_bc_busy), .bc_we(wb_bc_we), .bc_row(wb_bc_row), .bc_data(wb_bc_data),
    .bc_done(wb_bc_done), .rd_row(w_rd_row), .rd_data(w_rd_data));

  // ---------------- Sequence Estimator ----------------
  logic [63:0] tc_coag, tc_agco;
  seq_estimator u_est (
    .clk, .rst_n, .start(est_start), .b(est_b), .n(est_n), .nbar(est_nbar), .d(est_d),
    .h(est_h), .e(est_e), .c(est_c), .done(est_done), .agco(est_agco),
    .tc_coag, .tc_agco);

  // ---------------- Router ----------------
  route_instr_t [N_CORES-1:0] r_instr; logic [N_CORES-1:0] r_instr_v;
  logic rt_round_start, rt_round_done, rt_any_left, rt_busy, rt_slot_ov, rt_tab_ov, all_merged;
  logic [4:0] rt_last_rows;
  router_st u_router (
    .clk, .rst_n, .ld(ic_hdr_v), .ld_group(ic_hg), .ld_dst(ic_hd), .ld_src(ic_hs), .ld_n(ic_hn),
    .round_start(rt_round_start), .round_done(rt_round_done), .any_left(rt_any_left),
    .busy(rt_busy), .merge_done(all_merged), .instr(r_instr), .instr_valid(r_instr_v),
    .slot_overflow(rt_slot_ov), .table_overrun(rt_tab_ov), .last_rows(rt_last_rows),
    .wait_events(stat_waits));

  // ---------------- Cores and network ----------------
  logic c_agg_clear, c_cmd_combine, c_agg_mode;
  logic [N_CORES-1:0] c_comb_done, c_merge_done, c_agg_idle, c_busy, c_rrf_ov, c_inj_v;
  logic [N_CORES-1:0][SLOT_W-1:0] c_inj_slot; flit_t [N_CORES-1:0] c_inj_flit;
  logic [N_CORES-1:0][DIMS-1:0] n_dlv_v, n_link_busy; pkt_t [N_CORES-1:0][DIMS-1:0] n_dlv_pkt;
  feat_t [N_CORES-1:0] c_rd_data;
  logic [N_CORES-1:0][15:0] c_agg_count;

  for (genvar c = 0; c < N_CORES; c++) begin : g_core
    gcn_core #(.CORE_ID(c), .BM_DEPTH(BM_DEPTH)) u_core (
      .clk, .rst_n,
      .fb_we(fb_we && fb_core == cid_t'(c)), .fb_addr(fb_addr), .fb_wdata(fb_wdata),
      .w_we(wb_bc_we), .w_row(wb_bc_row), .w_wdata(wb_bc_data),
      .bm_clear, .bm_we(ic_bm_v && ic_bm.src_core == cid_t'(c)), .bm_wdata(ic_bm),
      .cmd_combine(c_cmd_combine), .n_nodes, .agg_clear(c_agg_clear), .agg_mode(c_agg_mode),
      .combine_done(c_comb_done[c]), .merge_done(c_merge_done[c]), .agg_idle(c_agg_idle[c]),
      .busy(c_busy[c]), .instr(r_instr[c]), .instr_valid(r_instr_v[c]),
      .inj_valid(c_inj_v[c]), .inj_slot(c_inj_slot[c]), .inj_flit(c_inj_flit[c]),
      .dlv_valid(n_dlv_v[c]), .dlv_pkt(n_dlv_pkt[c]),
      .rd_en(rd_en && rd_core == cid_t'(c)), .rd_sel, .rd_addr, .rd_data(c_rd_data[c]),
      .agg_count(c_agg_count[c]), .rrf_overflow(c_rrf_ov[c]));
  end
  assign all_merged = &c_merge_done;

  hypercube_noc u_noc (
    .clk, .rst_n, .instr(r_instr), .instr_valid(r_instr_v), .inj_valid(c_inj_v),
    .inj_slot(c_inj_slot), .inj_flit(c_inj_flit), .dlv_valid(n_dlv_v), .dlv_pkt(n_dlv_pkt),
    .link_busy(n_link_busy));

  cid_t rd_core_q;
  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) rd_core_q <= '0; else if (rd_en) rd_core_q <= rd_core;
  assign rd_data = c_rd_data[rd_core_q];

  // ---------------- System Controller ----------------
  system_controller u_ctl (
    .clk, .rst_n, .start, .backward, .busy, .done, .rounds,
    .wb_bc_start, .wb_bc_transpose(wb_bc_tr), .wb_bc_done,
    .core_agg_clear(c_agg_clear), .core_cmd_combine(c_cmd_combine), .core_agg_mode(c_agg_mode),
    .core_combine_done(c_comb_done), .core_busy(c_busy | ~c_agg_idle),
    .rt_round_start, .rt_round_done, .rt_any_left, .state());

  // ---------------- Status ----------------
  logic [6:0] dlv_now; logic [2:0] dlv_core_max;
  always_comb begin
    dlv_now = '0; dlv_core_max = '0;
    for (int c = 0; c < N_CORES; c++) begin
      logic [2:0] k;
      k = 3'(n_dlv_v[c][0]) + 3'(n_dlv_v[c][1]) + 3'(n_dlv_v[c][2]) + 3'(n_dlv_v[c][3]);
      dlv_now = dlv_now + 7'(k);
      if (k > dlv_core_max) dlv_core_max = k;
    end
  end
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin stat_deliveries <= '0; stat_peak_dlv_all <= '0; stat_peak_dlv_core <= '0; end
    else begin
      stat_deliveries <= stat_deliveries + 32'(dlv_now);
      if (dlv_now > stat_peak_dlv_all) stat_peak_dlv_all <= dlv_now;
      if (dlv_core_max > stat_peak_dlv_core) stat_peak_dlv_core <= dlv_core_max;
    end
  end
  assign stat_overflow = gc_ov || rt_slot_ov || rt_tab_ov || (|c_rrf_ov);
endmodule
