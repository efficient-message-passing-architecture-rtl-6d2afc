// graph_converter: the Graph Converter (paper Sec. 4.1 and Fig. 6(a)). The
// adjacency matrix is kept once, in COO form; forward propagation aggregates
// row-wise and backward propagation column-wise (A transposed). This block
// takes the COO edges of one 64x64 block, in any order, and returns them
// sorted by the aggregation index: by (row, column) in forward mode, and with
// row and column swapped, sorted by (column, row), in backward mode.
// Edges are inserted one per clock into a sorted register array of CAP
// entries (insertion sort); after in_last the sorted edges stream out one per
// clock under out_ready, out_last on the final one. The paper gives only the
// function; the insertion sorter and its capacity are this design's choice.
module graph_converter #(
  parameter int unsigned CAP = 64,
  parameter int unsigned IW  = 10
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          backward,     // 0: row-major (forward), 1: column-major
  input  logic          in_valid,
  input  logic [IW-1:0] in_row,
  input  logic [IW-1:0] in_col,
  input  logic [31:0]   in_val,
  input  logic          in_last,
  output logic          in_ready,
  output logic          out_valid,
  output logic [IW-1:0] out_row,
  output logic [IW-1:0] out_col,
  output logic [31:0]   out_val,
  output logic          out_last,
  input  logic          out_ready,
  output logic          overflow
);
  typedef struct packed { logic [IW-1:0] r, c; logic [31:0] v; } edge_t;
  edge_t arr [CAP];
  logic [$clog2(CAP+1)-1:0] cnt;
  logic draining;
  edge_t ne;
  logic [CAP-1:0] gt;

  always_comb begin
    ne = backward ? '{in_col, in_row, in_val} : '{in_row, in_col, in_val};
    for (int i = 0; i < CAP; i++) gt[i] = (i >= int'(cnt)) || ({arr[i].r, arr[i].c} > {ne.r, ne.c});
  end

  assign in_ready  = !draining;
  assign out_valid = draining && (cnt != 0);
  assign out_row   = arr[0].r;
  assign out_col   = arr[0].c;
  assign out_val   = arr[0].v;
  assign out_last  = (cnt == 1);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cnt <= '0; draining <= 1'b0; overflow <= 1'b0;
      for (int i = 0; i < CAP; i++) arr[i] <= '0;
    end else if (!draining) begin
      if (in_valid) begin
        if (32'(cnt) == CAP) overflow <= 1'b1;
        else begin
          for (int i = 0; i < CAP; i++)
            if (gt[i]) arr[i] <= (i == 0 || !gt[i-1]) ? ne : arr[i-1];
          cnt <= cnt + 1'b1;
        end
        if (in_last) draining <= 1'b1;
      end
    end else if (out_valid && out_ready) begin
      for (int i = 0; i < CAP - 1; i++) arr[i] <= arr[i+1];
      cnt <= cnt - 1'b1;
      if (cnt == 1) draining <= 1'b0;
    end
  end
endmodule
