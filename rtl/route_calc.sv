// route_calc: the routing computation of Router-St (paper Algorithm 1, Fig. 6
// and Fig. 8). Given the P start points (source core ids of this round's
// messages), their destination core ids and valid bits, it produces the
// routing table one row per network cycle: for every message, whether it
// crosses a link in that cycle and on which dimension, or waits ("x" in the
// paper, held in a virtual channel of its current core).
//
// Per row, a small state machine runs:
//   XOR    xor_array gives each message its single-step path set and step;
//          if every step is 0 the table is complete (done);
//   FILT   routing_set_filter, once for each of the 16 receiving cores
//          (Constraint 1: at most four arrivals per core);
//   SORT   path_sorter orders messages by step, shortest first;
//   FILL   the Routing Table Filler serves one message per clock in that
//          order: it picks one link of its remaining set ("Rand_sel": the
//          first set bit at or after a rotating offset from an LFSR) and
//          routing_set_remover strips that link from every other message at
//          the same core (Constraint 2); an empty set means the message waits;
//   EMIT   the row is output (row_valid) and positions are advanced
//          (Generate_rp), then back to XOR.
// A row takes 3 + N_CORES + P clocks. The filler/remover give at most one
// message per directed link per row, and every row moves at least one
// message, so the table always completes; MAX_ROWS bounds it (overrun flag).
// The per-stage circuits follow the paper's descriptions; the sequential
// schedule, the LFSR and the tie-breaking are this design's choices.
module route_calc
  import gcn_pkg::*;
#(
  parameter int unsigned P = MSGS,
  parameter int unsigned ROWS = MAX_ROWS
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   start,
  input  cid_t [P-1:0]           src,
  input  cid_t [P-1:0]           dst,
  input  logic [P-1:0]           valid,
  output logic                   busy,
  output logic                   row_valid,
  output logic [P-1:0]           row_mv,
  output logic [P-1:0][1:0]      row_dim,
  output logic [P-1:0]           row_wait,   // valid, not arrived, not moving
  output logic                   done,
  output logic [$clog2(ROWS+1)-1:0] rows,
  output logic                   overrun
);
  localparam int unsigned PW = $clog2(P);
  typedef enum logic [2:0] {S_IDLE, S_XOR, S_FILT, S_SORT, S_FILL, S_EMIT} st_t;
  st_t st;

  cid_t [P-1:0]           pos, dst_q;
  logic [P-1:0]           val_q;
  logic [P-1:0][DIMS-1:0] set_q, set_x, set_f, set_r;
  logic [P-1:0][2:0]      step_q, step_x;
  logic [P-1:0][PW-1:0]   order_q, order_s;
  logic [3:0]             r_cnt;
  logic [PW:0]            i_cnt;
  logic [7:0]             lfsr;
  logic                   f_removed;

  xor_array #(.P(P)) u_xor (.pos(pos), .dst(dst_q), .valid(val_q), .pset(set_x), .step(step_x));
  routing_set_filter #(.P(P)) u_filt (.pos(pos), .pset_in(set_q), .r(r_cnt), .pset_out(set_f), .removed(f_removed));
  path_sorter #(.P(P)) u_sort (.step(step_q), .order(order_s));

  // Filler: message served this clock and the link it gets.
  logic [PW-1:0]   m_sel;
  logic [DIMS-1:0] avail, pick;
  logic            fill_ok;
  always_comb begin
    m_sel   = order_q[i_cnt[PW-1:0]];
    avail   = set_q[m_sel];
    pick    = '0;
    for (int j = DIMS - 1; j >= 0; j--) begin
      int k;
      k = (j + int'(lfsr[1:0])) % DIMS;
      if (avail[k]) pick = DIMS'(1) << k;
    end
    fill_ok = (st == S_FILL) && !i_cnt[PW] && (step_q[m_sel] != 0) && (avail != '0);
  end
  routing_set_remover #(.P(P)) u_rem (.pos(pos), .pset_in(set_q), .en(fill_ok), .sel(m_sel),
                                      .link(pick), .pset_out(set_r));

  function automatic logic [1:0] enc(logic [DIMS-1:0] oh);
    enc = 2'd0;
    for (int k = 0; k < DIMS; k++) if (oh[k]) enc = 2'(k);
  endfunction

  assign busy = (st != S_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= S_IDLE; pos <= '0; dst_q <= '0; val_q <= '0; set_q <= '0; step_q <= '0;
      order_q <= '0; r_cnt <= '0; i_cnt <= '0; lfsr <= 8'h5a;
      row_valid <= 1'b0; row_mv <= '0; row_dim <= '0; row_wait <= '0;
      done <= 1'b0; rows <= '0; overrun <= 1'b0;
    end else begin
      row_valid <= 1'b0;
      done      <= 1'b0;
      lfsr      <= {lfsr[6:0], lfsr[7] ^ lfsr[5] ^ lfsr[4] ^ lfsr[3]};
      case (st)
        S_IDLE: if (start) begin
          pos <= src; dst_q <= dst; val_q <= valid; rows <= '0; overrun <= 1'b0;
          st <= S_XOR;
        end
        S_XOR: begin
          set_q <= set_x; step_q <= step_x; row_mv <= '0; row_dim <= '0;
          r_cnt <= '0;
          if (step_x == '0) begin done <= 1'b1; st <= S_IDLE; end
          else if (32'(rows) == ROWS) begin overrun <= 1'b1; done <= 1'b1; st <= S_IDLE; end
          else st <= S_FILT;
        end
        S_FILT: begin
          set_q <= set_f;
          r_cnt <= r_cnt + 1'b1;
          if (r_cnt == 4'(N_CORES - 1)) st <= S_SORT;
        end
        S_SORT: begin
          order_q <= order_s; i_cnt <= '0; st <= S_FILL;
        end
        S_FILL: begin
          if (fill_ok) begin
            set_q <= set_r;
            set_q[m_sel] <= '0;
            row_mv[m_sel]  <= 1'b1;
            row_dim[m_sel] <= enc(pick);
          end
          i_cnt <= i_cnt + 1'b1;
          if (i_cnt == (PW+1)'(P - 1)) st <= S_EMIT;
        end
        S_EMIT: begin
          for (int m = 0; m < P; m++) begin
            if (row_mv[m]) pos[m] <= pos[m] ^ (cid_t'(1) << row_dim[m]);
            row_wait[m] <= (step_q[m] != 0) && !row_mv[m];
          end
          row_valid <= 1'b1;
          rows <= rows + 1'b1;
          st <= S_XOR;
        end
        default: st <= S_IDLE;
      endcase
    end
  end
endmodule
