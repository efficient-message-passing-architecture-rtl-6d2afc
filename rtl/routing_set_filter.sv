// routing_set_filter: one pass of the Routing Set Filter (Algorithm 1, line 4)
// for one receiving core r. Constraint 1 of the paper: a core receives at most
// four messages at once. If more than four messages have r in their path set,
// r is removed from the sets that have the most alternatives first; the four
// with the fewest alternatives (ties: lower message index) keep it, and a set
// is never emptied by the filter (a message whose only next hop is r keeps it).
// The paper describes the removal priority but not a circuit; running the
// pass once per receiving core, sequentially, is this design's way of making
// it "a dynamic process": each pass sees the sets left by the one before.
// Combinational.
module routing_set_filter
  import gcn_pkg::*;
#(
  parameter int unsigned P = MSGS
) (
  input  cid_t [P-1:0]           pos,
  input  logic [P-1:0][DIMS-1:0] pset_in,
  input  cid_t                   r,
  output logic [P-1:0][DIMS-1:0] pset_out,
  output logic                   removed
);
  logic [P-1:0] has;
  logic [P-1:0][2:0] sz;
  logic [P-1:0][DIMS-1:0] via;
  int cnt, rank;

  always_comb begin
    cnt = 0;
    rank = 0;
    for (int m = 0; m < P; m++) begin
      via[m] = pos[m] ^ r;                              // link leading to r
      has[m] = ($countones(via[m]) == 1) && ((pset_in[m] & via[m]) != '0);
      sz[m]  = 3'($countones(pset_in[m]));
      cnt    = cnt + (has[m] ? 1 : 0);
    end
    pset_out = pset_in;
    removed  = 1'b0;
    if (cnt > 4) begin
      for (int m = 0; m < P; m++) begin
        rank = 0;
        for (int j = 0; j < P; j++)
          if (has[j] && ((sz[j] < sz[m]) || (sz[j] == sz[m] && j < m))) rank++;
        if (has[m] && sz[m] > 1 && rank >= 4) begin
          pset_out[m] = pset_in[m] & ~via[m];
          removed = 1'b1;
        end
      end
    end
  end
endmodule
