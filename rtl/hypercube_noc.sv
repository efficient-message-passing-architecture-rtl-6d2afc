// hypercube_noc: the orthogonal-topology on-chip network. N = 2**DIMS switches
// (16 by default, a 4-D hypercube as in the paper) are joined so that link k
// of core i goes to link k of core i ^ (1<<k): the two cores' binary
// coordinates differ in dimension k only. Links are bidirectional (one wire
// bundle each way) and a flit crosses one link per clock. Every core has its
// own instruction, injection and delivery ports; there is no global arbiter,
// since the Router-St instructions already make each link carry at most one
// flit per cycle in each direction.
module hypercube_noc
  import gcn_pkg::*;
(
  input  logic                                 clk,
  input  logic                                 rst_n,
  input  route_instr_t [N_CORES-1:0]           instr,
  input  logic         [N_CORES-1:0]           instr_valid,
  input  logic         [N_CORES-1:0]           inj_valid,
  input  logic         [N_CORES-1:0][SLOT_W-1:0] inj_slot,
  input  flit_t        [N_CORES-1:0]           inj_flit,
  output logic         [N_CORES-1:0][DIMS-1:0] dlv_valid,
  output pkt_t         [N_CORES-1:0][DIMS-1:0] dlv_pkt,
  output logic         [N_CORES-1:0][DIMS-1:0] link_busy   // flit on link (for utilisation)
);
  flit_t [N_CORES-1:0][DIMS-1:0] lo;
  logic  [N_CORES-1:0][DIMS-1:0] lov;
  flit_t [N_CORES-1:0][DIMS-1:0] li;
  logic  [N_CORES-1:0][DIMS-1:0] liv;
  logic  [N_CORES-1:0][DIMS-1:0] fwd;

  for (genvar c = 0; c < N_CORES; c++) begin : g_core
    for (genvar k = 0; k < DIMS; k++) begin : g_link
      assign li[c][k]  = lo[c ^ (1 << k)][k];
      assign liv[c][k] = lov[c ^ (1 << k)][k];
    end
    hc_switch #(.CORE_ID(c)) u_sw (
      .clk, .rst_n, .instr(instr[c]), .instr_valid(instr_valid[c]),
      .link_in(li[c]), .link_in_valid(liv[c]),
      .link_out(lo[c]), .link_out_valid(lov[c]),
      .inj_valid(inj_valid[c]), .inj_slot(inj_slot[c]), .inj_flit(inj_flit[c]),
      .dlv_valid(dlv_valid[c]), .dlv_pkt(dlv_pkt[c]), .fwd_valid(fwd[c]));
  end
  assign link_busy = lov;
endmodule
