// index_compressor: the Index Compressor and Index Decoder (paper Sec. 4.3.3,
// Fig. 7). The Index Decoder splits each 10-bit index of a 1024-node
// subgraph: row[9:6] is the destination core id A, row[5:0] the aggregate
// node id B in that core's Aggregate Buffer, col[9:6] the source core id C and
// col[5:0] the neighbour node id D in the source core's Neighbor Buffer. The
// compressor takes one block's edges sorted by row (so all share A and C)
// and groups consecutive edges with the same B into one message: each edge
// is emitted as a bm_entry_t whose `last` bit closes the message. At the end
// of the block it reports the Block Message header A + C + N (N = number of
// messages) with the group the block belongs to.
// Timing: one edge in per clock while in_ready; an entry leaves one edge
// later (one-edge look-ahead decides `last`). After a block's last edge the
// held entry is flushed on the next cycle, with the header, and in_ready is
// low for that cycle. The look-ahead/flush scheme is this design's choice.
module index_compressor
  import gcn_pkg::*;
(
  input  logic         clk,
  input  logic         rst_n,
  input  logic         in_valid,
  input  logic [9:0]   in_row,
  input  logic [9:0]   in_col,
  input  logic [31:0]  in_val,
  input  logic         in_last,     // last edge of the block
  input  logic [1:0]   in_group,
  output logic         in_ready,
  output logic         bm_valid,
  output bm_entry_t    bm_entry,
  output logic         hdr_valid,
  output logic [1:0]   hdr_group,
  output cid_t         hdr_dst,     // A
  output cid_t         hdr_src,     // C
  output logic [6:0]   hdr_n        // N
);
  bm_entry_t  held, dec;
  logic       held_v, flush;
  logic [6:0] n_cnt;
  logic [1:0] grp_q;
  logic       new_msg;

  always_comb begin
    dec.dst_core = in_row[9:6];
    dec.agg_id   = in_row[5:0];
    dec.src_core = in_col[9:6];
    dec.nb_id    = in_col[5:0];
    dec.val      = in_val;
    dec.last     = 1'b0;
    new_msg      = !held_v || (held.agg_id != dec.agg_id);
  end

  assign in_ready = !flush;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      held <= '0; held_v <= 1'b0; n_cnt <= '0; flush <= 1'b0; grp_q <= '0;
      bm_valid <= 1'b0; bm_entry <= '0; hdr_valid <= 1'b0;
      hdr_group <= '0; hdr_dst <= '0; hdr_src <= '0; hdr_n <= '0;
    end else begin
      bm_valid  <= 1'b0;
      hdr_valid <= 1'b0;
      if (flush) begin
        bm_valid <= 1'b1;
        bm_entry <= held;
        bm_entry.last <= 1'b1;
        hdr_valid <= 1'b1; hdr_group <= grp_q;
        hdr_dst <= held.dst_core; hdr_src <= held.src_core; hdr_n <= n_cnt;
        n_cnt <= '0; held_v <= 1'b0; flush <= 1'b0;
      end else if (in_valid) begin
        if (held_v) begin
          bm_valid <= 1'b1;
          bm_entry <= held;
          bm_entry.last <= new_msg;
        end
        held <= dec; held_v <= 1'b1;
        n_cnt <= n_cnt + (new_msg ? 7'd1 : 7'd0);
        if (in_last) begin flush <= 1'b1; grp_q <= in_group; end
      end
    end
  end

  // A block's edges must share A and C (they come from one 64x64 block).
  always_ff @(posedge clk)
    if (rst_n && in_valid && in_ready && held_v)
      assert (dec.dst_core == held.dst_core && dec.src_core == held.src_core)
        else $error("index_compressor: edge outside the current block");
endmodule
