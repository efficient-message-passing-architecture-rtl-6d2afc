// tb_hc_switch: one switch (core id 5). Injects flits into slots, checks that
// open links drive the chosen slots, that incoming flits for core 5 are
// delivered (Y branch) and that others are stored in the chosen slot and can
// be sent on later (N branch).
module tb_hc_switch;
  import gcn_pkg::*;
  logic clk = 0, rst_n = 0;
  route_instr_t instr;
  logic instr_valid = 0;
  flit_t [3:0] link_in, link_out;
  logic [3:0] link_in_valid = 0, link_out_valid, dlv_valid, fwd_valid;
  logic inj_valid = 0;
  logic [3:0] inj_slot = 0;
  flit_t inj_flit;
  pkt_t [3:0] dlv_pkt;
  int checks = 0, failures = 0;
  flit_t f [16];
  hc_switch #(.CORE_ID(5)) dut (.*);
  always #5 clk = ~clk;
  initial begin repeat (1000) @(posedge clk); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  task automatic chk(logic c, string s); checks++; if (!c) begin failures++; $display("FAIL %s", s); end endtask
  initial begin
    instr = '0; link_in = '0; inj_flit = '0;
    repeat (2) @(posedge clk); #1 rst_n = 1;
    for (int s = 0; s < 16; s++) begin
      f[s] = {4'(s + 1), {16{$urandom}}, 6'(s)};
      inj_valid = 1; inj_slot = 4'(s); inj_flit = f[s]; @(posedge clk); #1;
    end
    inj_valid = 0;
    // Drive slots 3, 9, 12, 0 on links 0..3.
    instr = '0; instr.open_ch = 4'b1011;
    instr.send_slot = {4'd0, 4'd12, 4'd9, 4'd3};
    instr_valid = 1; #1;
    chk(link_out_valid == 4'b1011, "open");
    chk(link_out[0] == f[3] && link_out[1] == f[9] && link_out[3] == f[0], "send data");
    // Receive: link 0 for core 5 (deliver), link 2 for core 7 into slot 9 while slot 9 is sent.
    link_in[0] = {4'd5, 512'hABCD, 6'd17};
    link_in[2] = {4'd7, 512'h1234, 6'd33};
    link_in_valid = 4'b0101; instr.recv = 4'b0101; instr.store_slot[2] = 4'd9; #1;
    chk(dlv_valid == 4'b0001 && dlv_pkt[0].agg_id == 6'd17 && dlv_pkt[0].feat == 512'hABCD, "deliver");
    chk(fwd_valid == 4'b0100, "forward");
    chk(link_out[1] == f[9], "read old before write");
    @(posedge clk); #1;
    link_in_valid = 0; instr = '0; instr.open_ch = 4'b0010; instr.send_slot[1] = 4'd9; #1;
    chk(link_out[1].dest == 4'd7 && link_out[1].pkt.agg_id == 6'd33, "stored and forwarded");
    chk(dlv_valid == 0, "no deliver without recv");
    instr_valid = 0; #1;
    chk(link_out_valid == 0, "idle");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
