// fifo_arbiter: the core's Arbiter and FIFO Read Controller. Each cycle it
// decides whether the PE array takes its next operation from the Input Data
// FIFO (matrix work of the combination phase) or from the Neighbor FIFO
// (merge and aggregation work), from the FIFOs' empty/full status as the paper
// describes. The priority rule is this design's choice: the Neighbor FIFO is
// served when it holds work and either aggregation is enabled, it is full
// (it must drain so that the network can keep delivering) or the Input Data
// FIFO is empty; otherwise the Input Data FIFO is served. `ready` lets the
// consumer stall both. Purely combinational: pop_in, pop_nb, sel_nb and issue
// are valid in the same cycle as the status inputs.
module fifo_arbiter (
  input  logic in_empty,
  input  logic nb_empty,
  input  logic nb_full,
  input  logic agg_en,
  input  logic ready,
  output logic pop_in,
  output logic pop_nb,
  output logic sel_nb,
  output logic issue
);
  always_comb begin
    sel_nb = !nb_empty && (agg_en || nb_full || in_empty);
    issue  = ready && (sel_nb || !in_empty);
    pop_nb = issue && sel_nb;
    pop_in = issue && !sel_nb;
  end
endmodule
