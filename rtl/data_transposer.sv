// data_transposer: the Data Transposer (paper Fig. 5(a)) that provides W^T
// for backward propagation. It holds one 16x16 FP32 tile: a row of 16 words
// is written per clock (wr_en, wr_row, wr_data), and a column is read per
// clock (rd_col) as rd_data, registered, valid one clock after rd_en. Reading
// column c of the stored W gives row c of W^T. The paper names the block but
// not its structure; the single register tile is this design's choice.
module data_transposer
  import gcn_pkg::*;
#(
  parameter int unsigned N = LANES
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                wr_en,
  input  logic [$clog2(N)-1:0] wr_row,
  input  logic [N-1:0][31:0]  wr_data,
  input  logic                rd_en,
  input  logic [$clog2(N)-1:0] rd_col,
  output logic                rd_valid,
  output logic [N-1:0][31:0]  rd_data
);
  logic [N-1:0][N-1:0][31:0] tile;   // [row][col]

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      tile <= '0; rd_valid <= 1'b0; rd_data <= '0;
    end else begin
      if (wr_en) tile[wr_row] <= wr_data;
      rd_valid <= rd_en;
      if (rd_en)
        for (int r = 0; r < N; r++) rd_data[r] <= tile[r][rd_col];
    end
  end
endmodule
