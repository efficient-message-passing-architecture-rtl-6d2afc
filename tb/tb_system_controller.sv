// tb_system_controller: drives the controller with models of the weight
// bank, the cores and the router, and checks the phase order (weight sync,
// aggregate clear, combine, routing rounds, drain, done), that the weight
// broadcast is transposed only in backward mode, that combine waits for
// every core, that exactly the router's number of rounds is started and
// that done waits for the cores to be quiet.
module tb_system_controller;
  import gcn_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic start = 0, backward = 0, busy, done, wb_bc_start, wb_bc_transpose, wb_bc_done = 0;
  logic core_agg_clear, core_cmd_combine, core_agg_mode, rt_round_start, rt_round_done = 0, rt_any_left;
  logic [N_CORES-1:0] core_combine_done = '0, core_busy = '0; logic [15:0] rounds; logic [2:0] state;
  system_controller dut (.*);
  initial begin #2000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  int phase, left, started, tr_seen, busy_tail, ncomb;
  // models
  always @(posedge clk) begin
    wb_bc_done <= 0; rt_round_done <= 0; core_combine_done <= '0;
    if (wb_bc_start) begin
      checks++; if (phase != 0) failures++;
      phase <= 1; tr_seen <= wb_bc_transpose;
      fork begin repeat (5) @(posedge clk); wb_bc_done <= 1; end join_none
    end
    if (core_agg_clear) begin
      checks++; if (phase != 1) failures++; phase <= 2;
      fork begin @(posedge clk); core_busy <= '1; repeat (4) @(posedge clk); core_busy <= '0; end join_none
    end
    if (core_cmd_combine) begin
      checks++; if (phase != 2 || core_busy != '0) failures++; phase <= 3;
      for (int c = 0; c < N_CORES; c++)
        fork automatic int cc = c; begin repeat (3 + cc * 2) @(posedge clk); core_combine_done[cc] <= 1; end join_none
    end
    ncomb <= ncomb + $countones(core_combine_done);
    if (rt_round_start) begin
      checks++; if (phase != 3 || !core_agg_mode || ncomb != N_CORES) failures++;
      started <= started + 1;
      fork begin repeat (7) @(posedge clk); left <= left - 1; rt_round_done <= 1; core_busy[3] <= 1; repeat (3) @(posedge clk); core_busy[3] <= 0; end join_none
    end
    if (done) begin phase <= 4; checks++; if (ncomb != N_CORES) begin failures++; $display("done before all combines"); end end
  end
  assign rt_any_left = (left > 0);
  initial begin
    int cyc;
    repeat (3) @(posedge clk); rst_n = 1;
    for (int t = 0; t < 6; t++) begin
      phase = 0; left = t % 4; started = 0; tr_seen = 2; ncomb = 0;
      @(negedge clk); backward = t[0]; start = 1; @(negedge clk); start = 0; backward = ~backward;
      cyc = 0;
      while (!done && cyc < 500) begin
        @(negedge clk); cyc++;
        if (phase == 3 && core_agg_mode == 0 && cyc > 10 && rt_round_start) failures++;
      end
      checks++; if (!done) begin failures++; $display("no done"); end
      checks++; if (started != t % 4) begin failures++; $display("started %0d rounds want %0d", started, t % 4); end
      checks++; if (rounds != 16'(t % 4)) failures++;
      checks++; if (tr_seen != t[0]) begin failures++; $display("transpose flag %0d want %0d", tr_seen, t[0]); end
      checks++; if (core_busy != '0) begin failures++; $display("done while cores busy"); end
      checks++; if (busy) failures++;
      @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
