// tb_hypercube_noc: the 16-core hypercube. (1) Every core sends one flit to
// the opposite corner (id ^ 15), moving one dimension per cycle: all 16 must
// arrive exactly after 4 cycles, each at the right core with its payload.
// (2) Every core sends four flits, one on each link, in a single cycle: 64
// deliveries in one cycle, the network's peak given in the paper.
module tb_hypercube_noc;
  import gcn_pkg::*;
  logic clk = 0, rst_n = 0;
  route_instr_t [15:0] instr;
  logic [15:0] instr_valid = 0, inj_valid = 0;
  logic [15:0][3:0] inj_slot;
  flit_t [15:0] inj_flit;
  logic [15:0][3:0] dlv_valid, link_busy;
  pkt_t [15:0][3:0] dlv_pkt;
  int checks = 0, failures = 0;
  hypercube_noc dut (.*);
  always #5 clk = ~clk;
  initial begin repeat (1000) @(posedge clk); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  task automatic chk(logic c, string s); checks++; if (!c) begin failures++; $display("FAIL %s", s); end endtask
  initial begin
    int n;
    instr = '0; inj_slot = '0; inj_flit = '0;
    repeat (2) @(posedge clk); #1 rst_n = 1;
    for (int c = 0; c < 16; c++) begin
      inj_valid[c] = 1; inj_slot[c] = 0;
      inj_flit[c] = {4'(c ^ 15), 480'd0, 32'(c * 1000 + 7), 6'(c)};
    end
    @(posedge clk); #1 inj_valid = 0;
    for (int k = 0; k < 4; k++) begin
      for (int c = 0; c < 16; c++) begin
        instr[c] = '0;
        instr[c].open_ch[k] = 1; instr[c].send_slot[k] = 4'(k % 2);
        instr[c].recv[k] = 1; instr[c].store_slot[k] = 4'((k + 1) % 2);
      end
      instr_valid = '1; #1;
      n = 0;
      for (int c = 0; c < 16; c++) for (int d = 0; d < 4; d++) if (dlv_valid[c][d]) begin
        n++;
        chk(d == 3 && dlv_pkt[c][d].agg_id == 6'(c ^ 15) && dlv_pkt[c][d].feat[31:0] == 32'((c ^ 15) * 1000 + 7), "corner payload");
      end
      chk(n == ((k == 3) ? 16 : 0), $sformatf("deliveries in hop %0d: %0d", k, n));
      chk(link_busy == {16{4'b0001 << k}}, "links busy");
      @(posedge clk); #1;
    end
    instr_valid = 0;
    // Four flits per core, one per dimension, all in one cycle.
    for (int s = 0; s < 4; s++) begin
      for (int c = 0; c < 16; c++) begin
        inj_valid[c] = 1; inj_slot[c] = 4'(s);
        inj_flit[c] = {4'(c ^ (1 << s)), 480'd0, 32'(c * 16 + s), 6'(s)};
      end
      @(posedge clk); #1;
    end
    inj_valid = 0;
    for (int c = 0; c < 16; c++) begin
      instr[c] = '0; instr[c].open_ch = 4'hf; instr[c].recv = 4'hf;
      instr[c].send_slot = {4'd3, 4'd2, 4'd1, 4'd0};
    end
    instr_valid = '1; #1;
    n = 0;
    for (int c = 0; c < 16; c++) for (int d = 0; d < 4; d++) if (dlv_valid[c][d]) begin
      n++;
      chk(dlv_pkt[c][d].feat[31:0] == 32'((c ^ (1 << d)) * 16 + d), "peak payload");
    end
    chk(n == 64, $sformatf("peak deliveries %0d", n));
    @(posedge clk); #1 instr_valid = 0;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
