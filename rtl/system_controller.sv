// system_controller: the System Controller (paper Sec. 4.1) that sequences
// one GCN layer pass over a loaded subgraph. On start it runs:
//   WSYNC  weight synchronisation: the Weight Buffer broadcasts W (forward)
//          or W^T through the Data Transposer (backward) to every core;
//   CLEAR  clears the cores' Aggregate Buffers;
//   COMB   combination: every core computes y_i = W x_i for n_nodes nodes;
//          waits until each core has reported combine_done;
//   ROUTE  message passing: while the Router has Block Messages left it
//          starts a routing round and waits for round_done;
//   DRAIN  waits until every core has been idle for QUIET clocks (the last
//          row's packets are still in the Reduced Register Files);
//   DONE   pulses done and returns to IDLE.
// The paper states the controller's role only; the state sequence (combine
// before aggregation, i.e. the CoAg order) and the quiet-time drain are this
// design's choices. The chosen order of the Sequence Estimator is reported by
// the top but the datapath always runs combination first.
module system_controller
  import gcn_pkg::*;
#(
  parameter int unsigned QUIET = 8
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               start,
  input  logic               backward,
  output logic               busy,
  output logic               done,
  output logic [15:0]        rounds,
  output logic               wb_bc_start,
  output logic               wb_bc_transpose,
  input  logic               wb_bc_done,
  output logic               core_agg_clear,
  output logic               core_cmd_combine,
  output logic               core_agg_mode,
  input  logic [N_CORES-1:0] core_combine_done,
  input  logic [N_CORES-1:0] core_busy,
  output logic               rt_round_start,
  input  logic               rt_round_done,
  input  logic               rt_any_left,
  output logic [2:0]         state
);
  typedef enum logic [2:0] {S_IDLE, S_WSYNC, S_CLEAR, S_COMB, S_ROUTE, S_RWAIT, S_DRAIN, S_DONE} st_t;
  st_t st;
  logic [N_CORES-1:0] cdone;
  logic [7:0] q;
  logic       bwd;

  assign state         = st;
  assign busy          = (st != S_IDLE);
  assign core_agg_mode = (st == S_ROUTE) || (st == S_RWAIT) || (st == S_DRAIN);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= S_IDLE; cdone <= '0; q <= '0; bwd <= 1'b0; rounds <= '0; done <= 1'b0;
      wb_bc_start <= 1'b0; wb_bc_transpose <= 1'b0; core_agg_clear <= 1'b0;
      core_cmd_combine <= 1'b0; rt_round_start <= 1'b0;
    end else begin
      wb_bc_start <= 1'b0; core_agg_clear <= 1'b0; core_cmd_combine <= 1'b0;
      rt_round_start <= 1'b0; done <= 1'b0;
      unique case (st)
        S_IDLE: if (start) begin
          bwd <= backward; rounds <= '0;
          wb_bc_start <= 1'b1; wb_bc_transpose <= backward; st <= S_WSYNC;
        end
        S_WSYNC: if (wb_bc_done) begin core_agg_clear <= 1'b1; q <= '0; st <= S_CLEAR; end
        S_CLEAR: begin
          // agg_clear raises core_busy on the next clock; wait it out
          q <= q + 1'b1;
          if (q >= 8'd2 && core_busy == '0) begin
            core_cmd_combine <= 1'b1; cdone <= '0; st <= S_COMB;
          end
        end
        S_COMB: begin
          cdone <= cdone | core_combine_done;
          if ((cdone | core_combine_done) == '1) st <= S_ROUTE;
        end
        S_ROUTE: if (rt_any_left) begin
          rt_round_start <= 1'b1; st <= S_RWAIT;
        end else begin q <= '0; st <= S_DRAIN; end
        S_RWAIT: if (rt_round_done) begin rounds <= rounds + 1'b1; st <= S_ROUTE; end
        S_DRAIN: begin
          if (core_busy != '0) q <= '0;
          else q <= q + 1'b1;
          if (q == 8'(QUIET)) st <= S_DONE;
        end
        S_DONE: begin done <= 1'b1; st <= S_IDLE; end
        default: st <= S_IDLE;
      endcase
    end
  end
endmodule
