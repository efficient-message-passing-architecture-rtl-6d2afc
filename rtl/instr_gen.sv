// instr_gen: the Instruction Generator of Router-St. It turns one routing
// round into per-core routing instructions (gcn_pkg::route_instr_t), one word
// per core per cycle.
//
// Header phase: for each group g in turn (GROUPS cycles), every core that is
// the source of group g's message gets a header instruction (head = 1) with
// the message's destination core id; the core merges that Block Message
// locally and puts the result in Transfer Register File slot g. The phase
// ends, three cycles later at the earliest, when all cores report that
// merging is complete (merge_done), as the
// paper requires before routing starts.
// Routing phase: one routing table row per cycle (row_valid, row_mv,
// row_dim). For each moving message at core c on dimension k the sender gets
// open_ch[k] and the message's slot as send_slot[k]; the neighbour c^(1<<k)
// gets recv[k] and, unless it is the destination, a free slot as
// store_slot[k]. The generator tracks each message's position and slot and
// each core's free slots; slots read in a row may be reused by arrivals of
// the same row. If a core has no free slot the sticky `slot_overflow` flag is
// raised. The paper gives the instruction's purpose and field names; this
// bookkeeping is the design's own.
module instr_gen
  import gcn_pkg::*;
(
  input  logic                         clk,
  input  logic                         rst_n,
  input  logic                         begin_round,
  input  cid_t  [MSGS-1:0]             src,
  input  cid_t  [MSGS-1:0]             dst,
  input  logic  [MSGS-1:0]             valid,
  input  logic                         merge_done,   // all cores done merging
  output logic                         want_rows,    // header phase over
  input  logic                         row_valid,
  input  logic  [MSGS-1:0]             row_mv,
  input  logic  [MSGS-1:0][1:0]        row_dim,
  output route_instr_t [N_CORES-1:0]   instr,
  output logic  [N_CORES-1:0]          instr_valid,
  output logic                         head_phase,
  output logic                         slot_overflow
);
  typedef enum logic [1:0] {G_IDLE, G_HEAD, G_WAIT, G_ROUTE} gst_t;
  gst_t st;
  logic [1:0] g_cnt;
  logic [1:0] w_cnt;   // lets header instructions reach the cores first

  cid_t [MSGS-1:0]               pos, dst_q;
  logic [MSGS-1:0]               val_q;
  logic [MSGS-1:0][SLOT_W-1:0]   slot_of, slot_n;
  logic [N_CORES-1:0][SLOTS-1:0] free_q, free_n;
  route_instr_t [N_CORES-1:0]    ri;
  logic [N_CORES-1:0]            riv;
  logic                          ovf;

  // Routing-phase instruction words for the current row.
  always_comb begin
    logic [N_CORES-1:0][DIMS-1:0] need;
    int in_m [N_CORES][DIMS];
    int c, n, k;
    logic found;
    c = 0; n = 0; k = 0; found = 1'b0;
    ri = '0; riv = '0; ovf = 1'b0;
    free_n = free_q; slot_n = slot_of;
    need = '0;
    for (int ci = 0; ci < N_CORES; ci++) for (int ki = 0; ki < DIMS; ki++) in_m[ci][ki] = 0;
    for (int m = 0; m < MSGS; m++) begin
      if (row_mv[m]) begin
        c = int'(pos[m]); k = int'(row_dim[m]); n = c ^ (1 << k);
        ri[c].open_ch[k]   = 1'b1;
        ri[c].send_slot[k] = slot_of[m];
        free_n[c][slot_of[m]] = 1'b1;
        ri[n].recv[k] = 1'b1;
        if (cid_t'(n) != dst_q[m]) begin need[n][k] = 1'b1; in_m[n][k] = m; end
      end
    end
    for (int nn = 0; nn < N_CORES; nn++) begin
      for (int kk = 0; kk < DIMS; kk++) begin
        n = nn; k = kk;
        found = 1'b0;
        if (need[n][k]) begin
          for (int s = 0; s < SLOTS; s++)
            if (!found && free_n[n][s]) begin
              found = 1'b1;
              free_n[n][s] = 1'b0;
              ri[n].store_slot[k] = SLOT_W'(s);
              slot_n[in_m[n][k]] = SLOT_W'(s);
            end
          if (!found) ovf = 1'b1;
        end
      end
      riv[nn] = (ri[nn].open_ch != '0) || (ri[nn].recv != '0);
    end
  end

  assign want_rows  = (st == G_ROUTE);
  assign head_phase = (st == G_HEAD);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= G_IDLE; g_cnt <= '0; w_cnt <= '0; pos <= '0; dst_q <= '0; val_q <= '0;
      slot_of <= '0; free_q <= '0; instr <= '0; instr_valid <= '0; slot_overflow <= 1'b0;
    end else begin
      instr       <= '0;
      instr_valid <= '0;
      case (st)
        G_IDLE: if (begin_round) begin
          pos <= src; dst_q <= dst; val_q <= valid; g_cnt <= '0;
          free_q <= '1; st <= G_HEAD;
        end
        G_HEAD: begin
          for (int d = 0; d < N_CORES; d++) begin
            int m;
            m = int'(g_cnt) * N_CORES + d;
            if (val_q[m]) begin
              instr[pos[m]].head    <= 1'b1;
              instr[pos[m]].dest_id <= cid_t'(d);
              instr[pos[m]].store_slot[0] <= SLOT_W'(g_cnt);
              instr_valid[pos[m]]   <= 1'b1;
              slot_of[m] <= SLOT_W'(g_cnt);
              if (pos[m] != cid_t'(d)) free_q[pos[m]][g_cnt] <= 1'b0;
            end
          end
          g_cnt <= g_cnt + 1'b1;
          w_cnt <= '0;
          if (g_cnt == 2'(GROUPS - 1)) st <= G_WAIT;
        end
        G_WAIT: begin
          if (w_cnt != 2'd3) w_cnt <= w_cnt + 1'b1;
          else if (merge_done) st <= G_ROUTE;
        end
        G_ROUTE: begin
          if (row_valid) begin
            instr <= ri; instr_valid <= riv;
            slot_of <= slot_n; free_q <= free_n;
            if (ovf) slot_overflow <= 1'b1;
            for (int m = 0; m < MSGS; m++)
              if (row_mv[m]) pos[m] <= pos[m] ^ (cid_t'(1) << row_dim[m]);
          end
          if (begin_round) begin
            pos <= src; dst_q <= dst; val_q <= valid; g_cnt <= '0;
            free_q <= '1; st <= G_HEAD;
          end
        end
        default: st <= G_IDLE;
      endcase
    end
  end
endmodule
