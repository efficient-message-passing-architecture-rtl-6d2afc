// hc_switch: the switch of one core on the 4-D hypercube (paper Fig. 3 and
// Fig. 5). It holds the core's Transfer Register File: SLOTS entries, each a
// 518-bit packet plus its 4-bit destination core id. Link k joins this core to
// the core whose id differs in bit k; each link carries one flit per cycle in
// each direction, so a core sends at most four and receives at most four
// messages per cycle (the paper's switch model).
//
// Each cycle the routing instruction says which links are driven (open_ch)
// and from which slot (send_slot), and which incoming links are latched
// (recv) and into which slot (store_slot). An incoming flit whose destination
// equals CORE_ID ("Des ID = Tile ID?", Y branch) is not stored but delivered
// to the Reduced Register File in the same cycle; otherwise (N branch) it is
// written into its slot at the clock edge, ready to be forwarded. A slot read
// and a slot written in the same cycle may be the same: the read sees the old
// flit. The local core writes a merged message into a slot with inj_valid.
// The explicit slot fields are this design's choice; the paper gives the
// Transfer Register File and the instruction's field names only.
module hc_switch
  import gcn_pkg::*;
#(
  parameter int unsigned CORE_ID = 0
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  route_instr_t          instr,
  input  logic                  instr_valid,
  input  flit_t [DIMS-1:0]      link_in,
  input  logic  [DIMS-1:0]      link_in_valid,
  output flit_t [DIMS-1:0]      link_out,
  output logic  [DIMS-1:0]      link_out_valid,
  input  logic                  inj_valid,
  input  logic  [SLOT_W-1:0]    inj_slot,
  input  flit_t                 inj_flit,
  output logic  [DIMS-1:0]      dlv_valid,
  output pkt_t  [DIMS-1:0]      dlv_pkt,
  output logic  [DIMS-1:0]      fwd_valid       // flit stored for forwarding
);
  flit_t trf [SLOTS];
  logic [DIMS-1:0] rx;

  always_comb begin
    for (int k = 0; k < DIMS; k++) begin
      link_out[k]       = trf[instr.send_slot[k]];
      link_out_valid[k] = instr_valid && instr.open_ch[k];
      rx[k]             = instr_valid && instr.recv[k] && link_in_valid[k];
      dlv_valid[k]      = rx[k] && (link_in[k].dest == cid_t'(CORE_ID));
      fwd_valid[k]      = rx[k] && (link_in[k].dest != cid_t'(CORE_ID));
      dlv_pkt[k]        = link_in[k].pkt;
    end
  end

  always_ff @(posedge clk) begin
    for (int k = 0; k < DIMS; k++)
      if (fwd_valid[k]) trf[instr.store_slot[k]] <= link_in[k];
    if (inj_valid) trf[inj_slot] <= inj_flit;
  end

  // A receive must be matched by a flit on that link.
  a_recv_has_data: assert property (@(posedge clk) disable iff (!rst_n)
    instr_valid |-> ((instr.recv & ~link_in_valid) == '0));
endmodule
