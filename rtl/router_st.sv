// router_st: Router-St, the "street router" that plans all message passing of
// one aggregation stage (paper Sec. 4.3.3, Fig. 6(a)). It chains the Message
// Start Point Generator, the routing computation, a routing table store and
// the Instruction Generator. The Graph Converter and the Index Compressor,
// which the paper also places in front of the router, are separate modules
// (graph_converter, index_compressor) that fill the N table through ld_*.
//
// One routing round (round_start .. round_done):
//   1. the start point generator emits up to 64 start points (one per group
//      and destination core with N > 0) and decrements N;
//   2. route_calc computes the routing table, rows are written to the store;
//   3. instr_gen sends header instructions, waits for merge_done from all
//      cores, then plays the stored rows out, one network cycle per clock.
// The system controller repeats rounds while any_left is set. Computing the
// whole table before playing it out follows the paper's conversion of the
// edge table into a stored routing table; not overlapping the next round's
// computation with the current playout is this design's simplification.
module router_st
  import gcn_pkg::*;
#(
  parameter int unsigned ROWS = MAX_ROWS
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       ld,
  input  logic [1:0]                 ld_group,
  input  cid_t                       ld_dst,
  input  cid_t                       ld_src,
  input  logic [6:0]                 ld_n,
  input  logic                       round_start,
  output logic                       round_done,
  output logic                       any_left,
  output logic                       busy,
  input  logic                       merge_done,
  output route_instr_t [N_CORES-1:0] instr,
  output logic [N_CORES-1:0]         instr_valid,
  output logic                       slot_overflow,
  output logic                       table_overrun,
  output logic [$clog2(ROWS+1)-1:0]  last_rows,
  output logic [15:0]                wait_events      // messages held in a virtual channel
);
  typedef enum logic [2:0] {R_IDLE, R_GEN, R_CALC, R_PLAY, R_DONE} rst_t;
  rst_t st;

  cid_t [MSGS-1:0]  s_src, s_dst;
  logic [MSGS-1:0]  s_val;
  logic             s_ov, rc_busy, rc_row, rc_done, rc_over;
  logic [MSGS-1:0]  rc_mv, rc_wait;
  logic [MSGS-1:0][1:0] rc_dim;
  logic [$clog2(ROWS+1)-1:0] rc_rows, play_i;
  logic             want_rows, head_phase;

  logic [MSGS-1:0]      tab_mv  [ROWS];
  logic [MSGS-1:0][1:0] tab_dim [ROWS];

  msg_start_gen u_msg (
    .clk, .rst_n, .ld, .ld_group, .ld_dst, .ld_src, .ld_n,
    .gen(st == R_IDLE && round_start), .out_valid(s_ov),
    .start_src(s_src), .start_dst(s_dst), .start_valid(s_val), .any_left);

  route_calc #(.P(MSGS), .ROWS(ROWS)) u_rc (
    .clk, .rst_n, .start(s_ov), .src(s_src), .dst(s_dst), .valid(s_val),
    .busy(rc_busy), .row_valid(rc_row), .row_mv(rc_mv), .row_dim(rc_dim), .row_wait(rc_wait),
    .done(rc_done), .rows(rc_rows), .overrun(rc_over));

  logic play_v;
  assign play_v = (st == R_PLAY) && want_rows && (play_i < last_rows);

  instr_gen u_ig (
    .clk, .rst_n, .begin_round(st == R_CALC && rc_done),
    .src(s_src), .dst(s_dst), .valid(s_val), .merge_done, .want_rows,
    .row_valid(play_v), .row_mv(play_v ? tab_mv[play_i] : '0), .row_dim(tab_dim[play_i]),
    .instr, .instr_valid, .head_phase, .slot_overflow);

  assign busy = (st != R_IDLE);

  always_ff @(posedge clk) begin
    if (rc_row && rc_rows != 0 && 32'(rc_rows) <= ROWS) begin
      tab_mv[rc_rows - 1'b1]  <= rc_mv;
      tab_dim[rc_rows - 1'b1] <= rc_dim;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= R_IDLE; play_i <= '0; last_rows <= '0; round_done <= 1'b0;
      table_overrun <= 1'b0; wait_events <= '0;
    end else begin
      round_done <= 1'b0;
      if (rc_row) wait_events <= wait_events + 16'($countones(rc_wait));
      case (st)
        R_IDLE: if (round_start) st <= R_GEN;
        R_GEN:  if (s_ov) st <= R_CALC;
        R_CALC: if (rc_done) begin
          last_rows <= rc_rows; play_i <= '0; st <= R_PLAY;
          if (rc_over) table_overrun <= 1'b1;
        end
        R_PLAY: begin
          if (play_v) play_i <= play_i + 1'b1;
          if (want_rows && play_i == last_rows) st <= R_DONE;
        end
        R_DONE: begin round_done <= 1'b1; st <= R_IDLE; end
        default: st <= R_IDLE;
      endcase
    end
  end
endmodule
