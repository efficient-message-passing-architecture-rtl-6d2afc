// weight_bank: the global Weight Buffer with its SGD update and the weight
// broadcast to all cores (paper Sec. 4.1: after backward propagation the
// Weight Buffer update engine applies SGD; "Weight Synchronization" keeps the
// cores' copies equal). It stores one 16x16 FP32 weight tile W[r][c].
//  - host load: ld_we writes row ld_row.
//  - SGD:       g_valid applies W[g_row] <- W[g_row] + (-lr) * G   (16 lanes,
//               TF32 multiply and FP32 add, registered, one row per clock).
//  - broadcast: bc_start sends the 16 rows to the cores on bc_we/bc_row/
//               bc_data, one per clock. With bc_transpose the tile is first
//               copied into the data_transposer (16 clocks) and its columns,
//               i.e. rows of W^T, are sent instead. bc_done pulses after the
//               last row. Forward takes 16 clocks, transposed 33.
// The paper gives the roles; the tile size per broadcast, the one-row-per-clock
// SGD datapath and the sequencing are this design's choices.
module weight_bank
  import gcn_pkg::*;
(
  input  logic       clk,
  input  logic       rst_n,
  input  logic       ld_we,
  input  logic [3:0] ld_row,
  input  feat_t      ld_data,
  input  logic       g_valid,
  input  logic [3:0] g_row,
  input  feat_t      g_data,
  input  logic [31:0] lr,
  input  logic       bc_start,
  input  logic       bc_transpose,
  output logic       bc_busy,
  output logic       bc_we,
  output logic [3:0] bc_row,
  output feat_t      bc_data,
  output logic       bc_done,
  input  logic [3:0] rd_row,
  output feat_t      rd_data
);
  logic [LANES-1:0][LANES-1:0][31:0] w;
  logic [LANES-1:0][31:0] prod, upd;
  logic [31:0] neg_lr;

  assign neg_lr = {~lr[31], lr[30:0]};
  assign rd_data = w[rd_row];

  for (genvar l = 0; l < LANES; l++) begin : g_sgd
    tf32_mul u_mul (.a(neg_lr), .b(g_data[l*32 +: 32]), .y(prod[l]));
    fp32_add u_add (.a(w[g_row][l]), .b(prod[l]), .y(upd[l]));
  end

  typedef enum logic [1:0] {B_IDLE, B_COPY, B_SEND} bstate_t;
  bstate_t st;
  logic [4:0] cnt;
  logic       tr;
  logic       tp_rd_en, tp_rd_valid;
  logic [LANES-1:0][31:0] tp_rd_data;
  logic [3:0] tp_col_q;

  data_transposer u_tp (
    .clk, .rst_n,
    .wr_en(st == B_COPY), .wr_row(cnt[3:0]), .wr_data(w[cnt[3:0]]),
    .rd_en(tp_rd_en), .rd_col(cnt[3:0]),
    .rd_valid(tp_rd_valid), .rd_data(tp_rd_data)
  );
  assign tp_rd_en = (st == B_SEND) && tr && !cnt[4];
  assign bc_busy  = (st != B_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      w <= '0; st <= B_IDLE; cnt <= '0; tr <= 1'b0;
      bc_we <= 1'b0; bc_row <= '0; bc_data <= '0; bc_done <= 1'b0; tp_col_q <= '0;
    end else begin
      bc_we <= 1'b0; bc_done <= 1'b0;
      if (ld_we) w[ld_row] <= ld_data;
      else if (g_valid) w[g_row] <= upd;
      unique case (st)
        B_IDLE: if (bc_start) begin
          tr <= bc_transpose; cnt <= '0;
          st <= bc_transpose ? B_COPY : B_SEND;
        end
        B_COPY: begin
          cnt <= cnt + 1'b1;
          if (cnt == 5'd15) begin cnt <= '0; st <= B_SEND; end
        end
        B_SEND: begin
          if (!tr) begin
            bc_we <= 1'b1; bc_row <= cnt[3:0]; bc_data <= w[cnt[3:0]];
            cnt <= cnt + 1'b1;
            if (cnt == 5'd15) begin st <= B_IDLE; bc_done <= 1'b1; end
          end else begin
            if (!cnt[4]) cnt <= cnt + 1'b1;
            tp_col_q <= cnt[3:0];
            if (tp_rd_valid) begin
              bc_we <= 1'b1; bc_row <= tp_col_q; bc_data <= tp_rd_data;
              if (tp_col_q == 4'd15) begin st <= B_IDLE; bc_done <= 1'b1; end
            end
          end
        end
        default: st <= B_IDLE;
      endcase
    end
  end

  // The host must not change W while a broadcast is reading it.
  always_ff @(posedge clk)
    if (rst_n && bc_busy) assert (!ld_we && !g_valid) else $error("weight_bank: W written during broadcast");
endmodule
