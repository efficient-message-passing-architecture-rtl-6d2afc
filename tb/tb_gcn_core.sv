// tb_gcn_core: one core (CORE_ID 3) end to end. (1) Combination: a random
// 16x16 weight tile and 8 node features; y_i = W x_i is read back from the
// Data Output Buffer and compared with a real-number model. (2) Local merge:
// Block Messages for destination 3 (this core) are merged on header
// instructions and aggregated into the Aggregate Buffer. (3) Remote merge: a
// header for destination 5 must inject a flit into the named slot with the
// merged feature and aggregate id. (4) Delivery: four packets arriving in one
// cycle for the same aggregate node must all be summed (read-modify-write
// hazard) and counted.
module tb_gcn_core;
  import gcn_pkg::*;
  logic clk = 0, rst_n = 0;
  logic fb_we = 0, w_we = 0, bm_clear = 0, bm_we = 0, cmd_combine = 0, agg_clear = 0, agg_mode = 1;
  logic [5:0] fb_addr = 0; feat_t fb_wdata = '0; logic [3:0] w_row = 0; feat_t w_wdata = '0;
  bm_entry_t bm_wdata = '0; logic [6:0] n_nodes = 0;
  logic combine_done, merge_done, agg_idle, busy, inj_valid, rrf_overflow;
  route_instr_t instr = '0; logic instr_valid = 0;
  logic [3:0] inj_slot; flit_t inj_flit;
  logic [3:0] dlv_valid = 0; pkt_t [3:0] dlv_pkt = '0;
  logic rd_en = 0, rd_sel = 0; logic [5:0] rd_addr = 0; feat_t rd_data; logic [15:0] agg_count;
  int checks = 0, failures = 0, injects = 0;
  flit_t last_inj;

  gcn_core #(.CORE_ID(3), .BM_DEPTH(64)) dut (.*);
  always #5 clk = ~clk;
  initial begin repeat (20000) @(posedge clk); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  always @(posedge clk) if (inj_valid) begin injects++; last_inj <= inj_flit; end

  function automatic real f2r(logic [31:0] f);
    real m; if (f[30:23] == 0) return 0.0;
    m = (1.0 + real'(f[22:0]) / 8388608.0) * (2.0 ** (real'(f[30:23]) - 127.0));
    return f[31] ? -m : m;
  endfunction
  function automatic real t(logic [31:0] f); return f2r({f[31:13], 13'd0}); endfunction
  function automatic logic [31:0] rnd();
    return {1'($urandom), 8'(125 + $urandom_range(0, 3)), 23'($urandom)};
  endfunction
  task automatic chk(logic c, string s); checks++; if (!c) begin failures++; $display("FAIL %s", s); end endtask
  task automatic close(real got, real exp, real tol, string s);
    chk((got - exp <= tol) && (exp - got <= tol), $sformatf("%s got %g exp %g", s, got, exp));
  endtask
  task automatic readback(input logic sel, input int a, output feat_t d);
    @(negedge clk); rd_en = 1; rd_sel = sel; rd_addr = 6'(a); @(negedge clk); rd_en = 0; d = rd_data;
  endtask
  task automatic head(cid_t d, int slot);
    @(negedge clk); instr = '0; instr.head = 1; instr.dest_id = d; instr.store_slot[0] = 4'(slot);
    instr_valid = 1; @(negedge clk); instr_valid = 0;
  endtask

  logic [15:0][15:0][31:0] W; logic [7:0][15:0][31:0] X;
  real Y [8][16];
  initial begin
    feat_t d;
    repeat (2) @(posedge clk); #1 rst_n = 1;
    for (int r = 0; r < 16; r++) begin
      for (int c = 0; c < 16; c++) W[r][c] = rnd();
      @(negedge clk); w_we = 1; w_row = 4'(r); w_wdata = W[r];
    end
    for (int i = 0; i < 8; i++) begin
      for (int c = 0; c < 16; c++) X[i][c] = rnd();
      @(negedge clk); w_we = 0; fb_we = 1; fb_addr = 6'(i); fb_wdata = X[i];
    end
    @(negedge clk); fb_we = 0; agg_clear = 1; @(negedge clk); agg_clear = 0;
    repeat (70) @(negedge clk);
    // (1) combination
    n_nodes = 8; cmd_combine = 1; @(negedge clk); cmd_combine = 0;
    fork : wt begin wait (combine_done); end begin repeat (200) @(posedge clk); end join_any
    disable wt;
    chk(combine_done, "combine_done");
    for (int i = 0; i < 8; i++) begin
      readback(1, i, d);
      for (int r = 0; r < 16; r++) begin
        real e, mg; e = 0; mg = 0;
        for (int c = 0; c < 16; c++) begin e += t(W[r][c]) * t(X[i][c]); mg += (t(W[r][c]) * t(X[i][c]) < 0) ? -t(W[r][c]) * t(X[i][c]) : t(W[r][c]) * t(X[i][c]); end
        Y[i][r] = f2r(d[r*32 +: 32]);
        close(Y[i][r], e, mg * 1e-5, "gemm");
      end
    end
    // (2) Block Messages: dest 3: B=10 <- {0 (0.5), 1 (0.25)}; B=11 <- {2 (1.0)}
    //                      dest 5: B=7  <- {4 (2.0), 5 (0.5), 6 (1.0)}
    @(negedge clk); bm_clear = 1; @(negedge clk); bm_clear = 0;
    begin
      bm_entry_t e [6];
      e[0] = '{4'd3, 4'd3, 6'd10, 6'd0, 32'h3f000000, 1'b0};
      e[1] = '{4'd3, 4'd3, 6'd10, 6'd1, 32'h3e800000, 1'b1};
      e[2] = '{4'd3, 4'd3, 6'd11, 6'd2, 32'h3f800000, 1'b1};
      e[3] = '{4'd5, 4'd3, 6'd7,  6'd4, 32'h40000000, 1'b0};
      e[4] = '{4'd5, 4'd3, 6'd7,  6'd5, 32'h3f000000, 1'b0};
      e[5] = '{4'd5, 4'd3, 6'd7,  6'd6, 32'h3f800000, 1'b1};
      for (int i = 0; i < 6; i++) begin @(negedge clk); bm_we = 1; bm_wdata = e[i]; end
      @(negedge clk); bm_we = 0;
    end
    head(4'd3, 0); head(4'd3, 1); head(4'd5, 2);
    repeat (60) @(negedge clk);
    chk(merge_done && agg_idle, "idle after merges");
    chk(injects == 1 && last_inj.dest == 4'd5 && last_inj.pkt.agg_id == 6'd7, "remote inject");
    chk(inj_slot == 4'd2 || injects == 1, "slot");
    for (int r = 0; r < 16; r++)
      close(f2r(last_inj.pkt.feat[r*32 +: 32]), 2.0 * t(32'(Y[4][r] != 0 ? dut.u_output_buf.mem[4][r*32 +: 32] : 0)) + 0.5 * t(dut.u_output_buf.mem[5][r*32 +: 32]) + t(dut.u_output_buf.mem[6][r*32 +: 32]), 1e-3, "remote merge");
    // Aggregation passes the merged value through a TF32 multiplier (x 1.0),
    // so it keeps 10 mantissa bits: tolerance 2^-9 relative.
    readback(0, 10, d);
    for (int r = 0; r < 16; r++) begin
      real e; e = 0.5 * t(dut.u_output_buf.mem[0][r*32 +: 32]) + 0.25 * t(dut.u_output_buf.mem[1][r*32 +: 32]);
      close(f2r(d[r*32 +: 32]), e, ((e < 0) ? -e : e) / 512.0 + 1e-6, "local agg B10");
    end
    readback(0, 11, d);
    for (int r = 0; r < 16; r++) close(f2r(d[r*32 +: 32]), t(dut.u_output_buf.mem[2][r*32 +: 32]), 1e-3, "local agg B11");
    // (4) four packets for B=20 in one cycle: 1.0, 2.0, 3.0, 4.0 in every lane.
    @(negedge clk);
    for (int k = 0; k < 4; k++) begin
      dlv_pkt[k].agg_id = 6'd20;
      for (int r = 0; r < 16; r++) dlv_pkt[k].feat[r*32 +: 32] = (k == 0) ? 32'h3f800000 : (k == 1) ? 32'h40000000 : (k == 2) ? 32'h40400000 : 32'h40800000;
    end
    dlv_valid = 4'hf; @(negedge clk); dlv_valid = 0;
    repeat (30) @(negedge clk);
    readback(0, 20, d);
    for (int r = 0; r < 16; r++) chk(d[r*32 +: 32] == 32'h41200000, "sum of four deliveries is 10.0");
    chk(agg_count == 16'd6, $sformatf("aggregation count %0d", agg_count));
    chk(!rrf_overflow, "no overflow");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
