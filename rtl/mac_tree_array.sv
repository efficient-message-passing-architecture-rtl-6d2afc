// mac_tree_array: the 2D MAC adder-tree array of a core. LANES x LANES TF32
// multipliers (PEs) feed LANES binary adder trees, each closed by one FP32
// accumulator, so the default 16x16 array has 256 multipliers and
// 16*(15+1) = 256 FP32 adders, the counts the paper gives per core.
//
// Two output paths, selected per operation by `tree`:
//   tree=1 (adder-tree output): y[r] = sum_c w[r][c]*x[c] + base[r]
//          a matrix-vector product, used for the combination (GEMM) phase;
//   tree=0 (MAC direct output): y[i] = w[i][0]*x[i] + base[i]
//          a lane-wise multiply-accumulate, used for merging and aggregation.
// base[i] is the accumulator (the previous y[i]) when acc_en=1, else c_in[i].
// One operation is accepted per cycle; y is registered, so y_valid follows
// in_valid by one cycle. The single pipeline stage is this design's choice.
module mac_tree_array #(
  parameter int unsigned LANES = 16
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic                        in_valid,
  input  logic                        tree,
  input  logic                        acc_en,
  input  logic [LANES-1:0][LANES-1:0][31:0] w,
  input  logic [LANES-1:0][31:0]      x,
  input  logic [LANES-1:0][31:0]      c_in,
  output logic                        y_valid,
  output logic [LANES-1:0][31:0]      y
);
  localparam int unsigned LV = $clog2(LANES);

  logic [LANES-1:0][LANES-1:0][31:0] prod;
  logic [LANES-1:0][31:0]            dot, base, res;
  // Adder tree storage: level l has LANES>>l partial sums per row.
  logic [LANES-1:0][LV:0][LANES-1:0][31:0] tr;

  for (genvar r = 0; r < LANES; r++) begin : g_row
    for (genvar c = 0; c < LANES; c++) begin : g_pe
      // In direct mode only column 0 of each row is used, with operand x[r].
      tf32_mul u_pe (.a(w[r][c]), .b(tree ? x[c] : x[r]), .y(prod[r][c]));
      assign tr[r][0][c] = prod[r][c];
    end
    for (genvar l = 1; l <= LV; l++) begin : g_lvl
      for (genvar k = 0; k < (LANES >> l); k++) begin : g_add
        fp32_add u_add (.a(tr[r][l-1][2*k]), .b(tr[r][l-1][2*k+1]), .y(tr[r][l][k]));
      end
      for (genvar k = (LANES >> l); k < LANES; k++) begin : g_pad
        assign tr[r][l][k] = 32'd0;
      end
    end
    assign dot[r]  = tree ? tr[r][LV][0] : prod[r][0];
    assign base[r] = acc_en ? y[r] : c_in[r];
    fp32_add u_acc (.a(dot[r]), .b(base[r]), .y(res[r]));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      y_valid <= 1'b0;
      y       <= '0;
    end else begin
      y_valid <= in_valid;
      if (in_valid) y <= res;
    end
  end
endmodule
