// gcn_core: one computation core (paper Sec. 4.2, Fig. 3). A single unified
// engine, the 16x16 MAC adder-tree array, does both the combination phase
// (dense matrix-vector products) and the aggregation phase (scaled vector
// accumulation), fed by two FIFOs under an arbiter.
//
// Buffers (64 entries of 512 bits = 16 FP32 lanes, one per local node):
//   Feature Buffer      node features x_i, loaded from HBM (fb_* port);
//   Neighbor Buffer     combination results y_i = W x_i, read when messages
//                       are merged for sending;
//   Data Output Buffer  a copy of y_i for write-back (saved for backward);
//   Aggregate Buffer    running aggregation sums, one per aggregate node id;
//   Block Message buffer compressed edges (bm_entry_t), grouped per
//                       destination core, loaded by the Index Compressor.
// The 16x16 weight tile W sits in registers next to the array (w_* port).
//
// Operations, all through the Neighbor FIFO or the Input Data FIFO:
//   combine (cmd_combine, n_nodes): x_i is read into the Input Data FIFO and
//     y_i = W x_i (adder-tree output) is written to the Neighbor and Data
//     Output Buffers; combine_done pulses after the last write.
//   merge: a header routing instruction (head=1, dest_id) makes the Route
//     Receiver read the next Block Message for that destination: for its
//     aggregate node B it accumulates m = sum val_e * y_{D_e} over the
//     message's neighbours (MAC direct output). The 518-bit packet {m, B} is
//     written into the Transfer Register File slot named by the header; if
//     the destination is this core, it goes straight to the Reduced Register
//     File instead. merge_done is high when no header is pending.
//   aggregate: every packet delivered to this core (Des ID = Tile ID) goes
//     through the Reduced Register File into the Neighbor FIFO; the engine
//     computes agg[B] = 1.0 * m + agg[B] and writes it back to the Aggregate
//     Buffer. One aggregation is in the engine at a time, so updates of the
//     same B never overlap.
// The arbiter serves the Neighbor FIFO first while agg_mode is set.
// Engine timing: issue, array (one cycle), write-back. The buffer
// organisation, the per-destination Block Message lists and all timing are
// this design's choices; the paper gives the blocks and the data flow.
module gcn_core
  import gcn_pkg::*;
#(
  parameter int unsigned CORE_ID  = 0,
  parameter int unsigned BM_DEPTH = 1024
) (
  input  logic                   clk,
  input  logic                   rst_n,
  // loading (from HBM via DMA)
  input  logic                   fb_we,
  input  logic [NID_W-1:0]       fb_addr,
  input  feat_t                  fb_wdata,
  input  logic                   w_we,
  input  logic [3:0]             w_row,
  input  feat_t                  w_wdata,
  input  logic                   bm_clear,
  input  logic                   bm_we,
  input  bm_entry_t              bm_wdata,
  // commands from the system controller
  input  logic                   cmd_combine,
  input  logic [NID_W:0]         n_nodes,
  input  logic                   agg_clear,
  input  logic                   agg_mode,
  output logic                   combine_done,
  output logic                   merge_done,
  output logic                   agg_idle,
  output logic                   busy,
  // routing instruction and network
  input  route_instr_t           instr,
  input  logic                   instr_valid,
  output logic                   inj_valid,
  output logic [SLOT_W-1:0]      inj_slot,
  output flit_t                  inj_flit,
  input  logic [DIMS-1:0]        dlv_valid,
  input  pkt_t [DIMS-1:0]        dlv_pkt,
  // read-back (to HBM)
  input  logic                   rd_en,
  input  logic                   rd_sel,      // 0: Aggregate Buffer, 1: Data Output Buffer
  input  logic [NID_W-1:0]       rd_addr,
  output feat_t                  rd_data,
  output logic [15:0]            agg_count,
  output logic                   rrf_overflow
);
  localparam int unsigned BMA = $clog2(BM_DEPTH);

  typedef struct packed {
    pe_op_t           op;
    logic [31:0]      scale;
    feat_t            vec;
    logic [NID_W-1:0] id;       // node index (GEMM) or aggregate node id
    logic             first, last;
    cid_t             dest;
    logic [SLOT_W-1:0] slot;
  } nb_op_t;

  // ---------------- weights ----------------
  logic [LANES-1:0][LANES-1:0][31:0] wreg;
  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) wreg <= '0;
    else if (w_we) wreg[w_row] <= w_wdata;

  // ---------------- buffers ----------------
  logic             fb_re;   logic [NID_W-1:0] fb_raddr; feat_t fb_rdata;
  logic             nbb_re;  logic [NID_W-1:0] nbb_raddr; feat_t nbb_rdata;
  logic             nbb_we;  logic [NID_W-1:0] nbb_waddr; feat_t nbb_wdata;
  logic             ag_we;   logic [NID_W-1:0] ag_waddr;  feat_t ag_wdata;
  logic             ag_re;   logic [NID_W-1:0] ag_raddr;  feat_t ag_rdata;
  logic             ob_re;   feat_t ob_rdata;
  logic             bm_re;   logic [BMA-1:0] bm_raddr; bm_entry_t bm_rdata;
  logic [BMA-1:0]   bm_wp;

  sdp_ram #(.WIDTH(FEAT_W), .DEPTH(NODES_PC)) u_feature_buf (.clk, .we(fb_we), .waddr(fb_addr),
    .wdata(fb_wdata), .re(fb_re), .raddr(fb_raddr), .rdata(fb_rdata));
  sdp_ram #(.WIDTH(FEAT_W), .DEPTH(NODES_PC)) u_neighbor_buf (.clk, .we(nbb_we), .waddr(nbb_waddr),
    .wdata(nbb_wdata), .re(nbb_re), .raddr(nbb_raddr), .rdata(nbb_rdata));
  sdp_ram #(.WIDTH(FEAT_W), .DEPTH(NODES_PC)) u_output_buf (.clk, .we(nbb_we), .waddr(nbb_waddr),
    .wdata(nbb_wdata), .re(ob_re), .raddr(rd_addr), .rdata(ob_rdata));
  sdp_ram #(.WIDTH(FEAT_W), .DEPTH(NODES_PC)) u_aggregate_buf (.clk, .we(ag_we), .waddr(ag_waddr),
    .wdata(ag_wdata), .re(ag_re), .raddr(ag_raddr), .rdata(ag_rdata));
  sdp_ram #(.WIDTH($bits(bm_entry_t)), .DEPTH(BM_DEPTH)) u_bm_buf (.clk, .we(bm_we), .waddr(bm_wp),
    .wdata(bm_wdata), .re(bm_re), .raddr(bm_raddr), .rdata(bm_rdata));

  // Block Message lists: first entry of each destination's list, read pointer.
  logic [N_CORES-1:0][BMA-1:0] bm_ptr;
  logic [N_CORES-1:0]          bm_seen;

  // ---------------- FIFOs and arbiter ----------------
  logic   in_push, in_pop, in_empty, in_full;  nb_op_t in_wd, in_rd; logic [3:0] in_cnt;
  logic   nb_push, nb_pop, nb_empty, nb_full;  nb_op_t nb_wd, nb_rd; logic [3:0] nb_cnt;
  sync_fifo #(.WIDTH($bits(nb_op_t)), .DEPTH(8)) u_input_fifo (.clk, .rst_n, .push(in_push),
    .wr_data(in_wd), .pop(in_pop), .rd_data(in_rd), .empty(in_empty), .full(in_full), .count(in_cnt));
  sync_fifo #(.WIDTH($bits(nb_op_t)), .DEPTH(8)) u_neighbor_fifo (.clk, .rst_n, .push(nb_push),
    .wr_data(nb_wd), .pop(nb_pop), .rd_data(nb_rd), .empty(nb_empty), .full(nb_full), .count(nb_cnt));

  logic pe_ready, sel_nb, issue;
  fifo_arbiter u_arb (.in_empty, .nb_empty, .nb_full, .agg_en(agg_mode), .ready(pe_ready),
    .pop_in(in_pop), .pop_nb(nb_pop), .sel_nb, .issue);

  // ---------------- Reduced Register File ----------------
  logic       loc_valid;  pkt_t loc_pkt;
  logic       rrf_valid, rrf_pop;  pkt_t rrf_data; logic [4:0] rrf_cnt;
  logic [DIMS:0]            rrf_wv;
  logic [DIMS:0][$bits(pkt_t)-1:0] rrf_wd;
  always_comb begin
    for (int k = 0; k < DIMS; k++) begin rrf_wv[k] = dlv_valid[k]; rrf_wd[k] = dlv_pkt[k]; end
    rrf_wv[DIMS] = loc_valid; rrf_wd[DIMS] = loc_pkt;
  end
  reduced_regfile #(.NPORT(DIMS+1), .WIDTH($bits(pkt_t)), .DEPTH(16)) u_rrf (.clk, .rst_n,
    .wr_valid(rrf_wv), .wr_data(rrf_wd), .pop(rrf_pop), .valid(rrf_valid), .rd_data(rrf_data),
    .overflow(rrf_overflow), .count(rrf_cnt));

  // ---------------- combine feeder ----------------
  logic [NID_W:0] cf_i, cf_n, cw_cnt;
  logic           cf_act, cf_rd_q;
  logic [NID_W-1:0] cf_idx_q;
  assign fb_re    = cf_act && (cf_i < cf_n) && (in_cnt + (cf_rd_q ? 4'd1 : 4'd0) < 4'd7);
  assign fb_raddr = cf_i[NID_W-1:0];
  assign in_push  = cf_rd_q;
  always_comb begin
    in_wd = '0;
    in_wd.op = OP_GEMM; in_wd.vec = fb_rdata; in_wd.id = cf_idx_q;
  end

  // ---------------- merge engine (Route Receiver) ----------------
  typedef enum logic [2:0] {M_IDLE, M_RD, M_NB, M_PUSH} mst_t;
  mst_t   mst;
  logic   hq_push, hq_pop, hq_empty, hq_full; logic [3:0] hq_cnt;
  logic [CID_W+SLOT_W-1:0] hq_wd, hq_rd;
  sync_fifo #(.WIDTH(CID_W+SLOT_W), .DEPTH(8)) u_head_q (.clk, .rst_n, .push(hq_push),
    .wr_data(hq_wd), .pop(hq_pop), .rd_data(hq_rd), .empty(hq_empty), .full(hq_full), .count(hq_cnt));
  assign hq_push = instr_valid && instr.head;
  assign hq_wd   = {instr.dest_id, instr.store_slot[0]};
  assign hq_pop  = (mst == M_IDLE) && !hq_empty;

  cid_t   m_dest; logic [SLOT_W-1:0] m_slot; logic [BMA-1:0] m_rp; logic m_first;
  bm_entry_t m_e;
  logic [3:0] pend;       // merges accepted but not yet finished
  logic   m_push;
  assign bm_re    = (mst == M_RD);
  assign bm_raddr = m_rp;
  assign nbb_re   = (mst == M_NB);
  assign nbb_raddr = bm_rdata.nb_id;
  assign m_push   = (mst == M_PUSH) && !nb_full;
  // Delivered packets enter the Neighbor FIFO when the merge engine does not.
  assign rrf_pop  = rrf_valid && !m_push && !nb_full;
  assign nb_push  = m_push || rrf_pop;
  always_comb begin
    nb_wd = '0;
    if (m_push) begin
      nb_wd.op = OP_MERGE; nb_wd.scale = m_e.val; nb_wd.vec = nbb_rdata; nb_wd.id = m_e.agg_id;
      nb_wd.first = m_first; nb_wd.last = m_e.last; nb_wd.dest = m_dest; nb_wd.slot = m_slot;
    end else begin
      nb_wd.op = OP_AGG; nb_wd.scale = FP_ONE; nb_wd.vec = rrf_data.feat; nb_wd.id = rrf_data.agg_id;
    end
  end

  // ---------------- engine ----------------
  nb_op_t s1, s2; logic s1_v, s2_v;
  logic [LANES-1:0][LANES-1:0][31:0] pe_w;
  logic [LANES-1:0][31:0] pe_x, pe_c, pe_y;
  logic pe_yv;
  feat_t macc;
  assign pe_ready = !(s1_v && s1.op == OP_AGG) && !(s2_v && s2.op == OP_AGG);
  always_comb begin
    pe_w = wreg; pe_x = s1.vec; pe_c = '0;
    if (s1.op != OP_GEMM) begin
      for (int i = 0; i < LANES; i++) pe_w[i][0] = s1.scale;
      if (s1.op == OP_AGG) pe_c = ag_rdata;
      else if (!s1.first) pe_c = (s2_v && s2.op == OP_MERGE) ? pe_y : macc;
    end
  end
  mac_tree_array #(.LANES(LANES)) u_pe (.clk, .rst_n, .in_valid(s1_v), .tree(s1.op == OP_GEMM),
    .acc_en(1'b0), .w(pe_w), .x(pe_x), .c_in(pe_c), .y_valid(pe_yv), .y(pe_y));

  // Aggregate Buffer ports: clear, aggregation, read-back.
  logic [NID_W:0] clr_i; logic clr_act;
  assign ag_re    = (issue && sel_nb && nb_rd.op == OP_AGG) || (rd_en && !rd_sel);
  assign ag_raddr = (issue && sel_nb && nb_rd.op == OP_AGG) ? nb_rd.id : rd_addr;
  assign ob_re    = rd_en && rd_sel;
  logic rd_sel_q;
  assign rd_data  = rd_sel_q ? ob_rdata : ag_rdata;

  always_comb begin
    ag_we = 1'b0; ag_waddr = s2.id; ag_wdata = pe_y;
    nbb_we = 1'b0; nbb_waddr = s2.id; nbb_wdata = pe_y;
    inj_valid = 1'b0; inj_slot = s2.slot; inj_flit = '0;
    loc_valid = 1'b0; loc_pkt = '0;
    inj_flit.dest = s2.dest; inj_flit.pkt.feat = pe_y; inj_flit.pkt.agg_id = s2.id;
    loc_pkt.feat = pe_y; loc_pkt.agg_id = s2.id;
    if (clr_act) begin
      ag_we = 1'b1; ag_waddr = clr_i[NID_W-1:0]; ag_wdata = '0;
    end else if (s2_v) begin
      case (s2.op)
        OP_GEMM:  nbb_we = 1'b1;
        OP_AGG:   ag_we  = 1'b1;
        default: if (s2.last) begin
          if (s2.dest == cid_t'(CORE_ID)) loc_valid = 1'b1;
          else                            inj_valid = 1'b1;
        end
      endcase
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cf_i <= '0; cf_n <= '0; cf_act <= 1'b0; cf_rd_q <= 1'b0; cf_idx_q <= '0; cw_cnt <= '0;
      combine_done <= 1'b0;
      mst <= M_IDLE; m_dest <= '0; m_slot <= '0; m_rp <= '0; m_first <= 1'b0; m_e <= '0;
      pend <= '0;
      s1 <= '0; s2 <= '0; s1_v <= 1'b0; s2_v <= 1'b0; macc <= '0;
      clr_i <= '0; clr_act <= 1'b0; rd_sel_q <= 1'b0;
      bm_wp <= '0; bm_ptr <= '0; bm_seen <= '0; agg_count <= '0;
    end else begin
      combine_done <= 1'b0;
      rd_sel_q <= rd_sel;
      // Block Message buffer write pointer and per-destination list heads.
      if (bm_clear) begin
        bm_wp <= '0; bm_seen <= '0;
      end else if (bm_we) begin
        bm_wp <= bm_wp + 1'b1;
        if (!bm_seen[bm_wdata.dst_core]) begin
          bm_seen[bm_wdata.dst_core] <= 1'b1;
          bm_ptr[bm_wdata.dst_core]  <= bm_wp;
        end
      end
      // combine feeder
      if (cmd_combine) begin cf_act <= 1'b1; cf_i <= '0; cf_n <= n_nodes; cw_cnt <= '0; end
      else if (fb_re) cf_i <= cf_i + 1'b1;
      cf_rd_q  <= fb_re;
      cf_idx_q <= fb_raddr;
      if (s2_v && s2.op == OP_GEMM && !clr_act) begin
        cw_cnt <= cw_cnt + 1'b1;
        if (cw_cnt + 1'b1 == cf_n) begin combine_done <= 1'b1; cf_act <= 1'b0; end
      end
      // merge engine
      case (mst)
        M_IDLE: if (!hq_empty) begin
          m_dest <= hq_rd[SLOT_W +: CID_W]; m_slot <= hq_rd[SLOT_W-1:0];
          m_rp <= bm_ptr[hq_rd[SLOT_W +: CID_W]]; m_first <= 1'b1; mst <= M_RD;
        end
        M_RD:   mst <= M_NB;
        M_NB:   begin m_e <= bm_rdata; mst <= M_PUSH; end
        M_PUSH: if (m_push) begin
          m_rp <= m_rp + 1'b1; m_first <= 1'b0;
          if (m_e.last) begin bm_ptr[m_dest] <= m_rp + 1'b1; mst <= M_IDLE; end
          else mst <= M_RD;
        end
        default: mst <= M_IDLE;
      endcase
      pend <= pend + (hq_push ? 1'b1 : 1'b0) - ((s2_v && s2.op == OP_MERGE && s2.last) ? 1'b1 : 1'b0);
      // engine pipeline
      s1_v <= issue;
      if (issue) s1 <= sel_nb ? nb_rd : in_rd;
      s2_v <= s1_v;
      if (s1_v) s2 <= s1;
      if (s2_v && s2.op == OP_MERGE) macc <= pe_y;
      if (s2_v && s2.op == OP_AGG) agg_count <= agg_count + 1'b1;
      // Aggregate Buffer clear
      if (agg_clear) begin clr_act <= 1'b1; clr_i <= '0; end
      else if (clr_act) begin
        clr_i <= clr_i + 1'b1;
        if (clr_i == (NID_W+1)'(NODES_PC - 1)) clr_act <= 1'b0;
      end
    end
  end

  assign merge_done = (pend == 0) && hq_empty && (mst == M_IDLE);
  assign agg_idle   = !rrf_valid && nb_empty && !s1_v && !s2_v && !loc_valid;
  assign busy       = cf_act || clr_act || !merge_done || !agg_idle || !in_empty;

  a_no_head_overflow: assert property (@(posedge clk) disable iff (!rst_n) hq_push |-> !hq_full);
  a_no_rrf_overflow:  assert property (@(posedge clk) disable iff (!rst_n) !rrf_overflow);
endmodule
