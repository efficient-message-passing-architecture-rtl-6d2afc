// sync_fifo: single-clock FIFO, used for a core's Input Data FIFO (operands of
// the combination phase) and Neighbor FIFO (merge and aggregation operands).
// The paper names the two FIFOs and says the arbiter watches their empty/full
// status; depth, width and first-word-fall-through behaviour are this design's
// choice. rd_data shows the head entry while empty=0; a push and a pop may
// happen in the same cycle. Pushing when full or popping when empty is a
// protocol error, flagged by assertions.
module sync_fifo #(
  parameter int unsigned WIDTH = 32,
  parameter int unsigned DEPTH = 8
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             push,
  input  logic [WIDTH-1:0] wr_data,
  input  logic             pop,
  output logic [WIDTH-1:0] rd_data,
  output logic             empty,
  output logic             full,
  output logic [$clog2(DEPTH):0] count
);
  localparam int unsigned AW = (DEPTH > 1) ? $clog2(DEPTH) : 1;
  logic [WIDTH-1:0] mem [DEPTH];
  logic [AW-1:0] wp, rp;

  assign empty   = (count == 0);
  assign full    = (count == ($clog2(DEPTH)+1)'(DEPTH));
  assign rd_data = mem[rp];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp <= '0; rp <= '0; count <= '0;
    end else begin
      if (push) wp <= (wp == AW'(DEPTH-1)) ? '0 : wp + 1'b1;
      if (pop)  rp <= (rp == AW'(DEPTH-1)) ? '0 : rp + 1'b1;
      count <= count + (push ? 1'b1 : 1'b0) - (pop ? 1'b1 : 1'b0);
    end
  end
  always_ff @(posedge clk) if (push) mem[wp] <= wr_data;

  a_no_overflow:  assert property (@(posedge clk) disable iff (!rst_n) push |-> (!full || pop));
  a_no_underflow: assert property (@(posedge clk) disable iff (!rst_n) pop |-> !empty);
endmodule
