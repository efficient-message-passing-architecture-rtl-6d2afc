// routing_set_remover: the Routing Set Remover (Algorithm 1, line 10). After
// the filler gives link `dim` at core `pos[sel]` to message `sel`, every other
// message at the same core loses that link from its path set, so no receiver
// gets two messages from the same core in one cycle (the paper's Constraint
// 2) and no output channel is claimed twice (the conflict of Fig. 5).
// Combinational.
module routing_set_remover
  import gcn_pkg::*;
#(
  parameter int unsigned P = MSGS
) (
  input  cid_t [P-1:0]           pos,
  input  logic [P-1:0][DIMS-1:0] pset_in,
  input  logic                   en,
  input  logic [$clog2(P)-1:0]   sel,
  input  logic [DIMS-1:0]        link,     // one-hot link taken by sel
  output logic [P-1:0][DIMS-1:0] pset_out
);
  always_comb begin
    for (int m = 0; m < P; m++)
      pset_out[m] = (en && pos[m] == pos[sel] && m != int'(sel)) ? (pset_in[m] & ~link) : pset_in[m];
  end
endmodule
