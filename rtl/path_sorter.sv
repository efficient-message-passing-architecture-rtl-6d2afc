// path_sorter: the Sorter of the routing computation (Algorithm 1, line 3).
// Orders the P messages by step length, shortest first, grouping equal steps
// and keeping message-index order inside a group (a stable counting sort, the
// design's choice). order[i] is the message served i-th by the Routing Table
// Filler. Combinational.
module path_sorter
  import gcn_pkg::*;
#(
  parameter int unsigned P = MSGS
) (
  input  logic [P-1:0][2:0]             step,
  output logic [P-1:0][$clog2(P)-1:0]   order
);
  always_comb begin
    order = '0;
    for (int m = 0; m < P; m++) begin
      int rank;
      rank = 0;
      for (int j = 0; j < P; j++)
        if ((step[j] < step[m]) || (step[j] == step[m] && j < m)) rank++;
      order[rank] = ($clog2(P))'(m);
    end
  end
endmodule
