// msg_start_gen: the Message Start Point Generator of Router-St (paper
// Sec. 4.3.3, Fig. 6(a), Fig. 8(a)). It holds, for each of the GROUPS groups
// and each destination core d (column d of Fig. 8(a)), the source core id of
// that block (S1..S16) and N, the number of Block Messages the block still
// has to send. On `gen` each column does what Fig. 6(a) prints: if N>0,
// output = S, Valid = 1, N = N-1; else Valid = 0. The outputs form the
// 64-entry start point vector of one routing round, message m = g*16 + d with
// destination core d. Within a group the sources are distinct (one diagonal
// block per core), so no core starts more than GROUPS = 4 messages.
// N is N_W bits wide: the paper prints N as [5:0], but a 64-node block can
// need 64 messages, so 7 bits are used. Outputs are registered: out_valid
// follows gen by one cycle. any_left is combinational.
module msg_start_gen
  import gcn_pkg::*;
#(
  parameter int unsigned N_W = 7
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 ld,
  input  logic [1:0]           ld_group,
  input  cid_t                 ld_dst,
  input  cid_t                 ld_src,
  input  logic [N_W-1:0]       ld_n,
  input  logic                 gen,
  output logic                 out_valid,
  output cid_t [MSGS-1:0]      start_src,
  output cid_t [MSGS-1:0]      start_dst,
  output logic [MSGS-1:0]      start_valid,
  output logic                 any_left
);
  cid_t           s_tab [MSGS];
  logic [N_W-1:0] n_tab [MSGS];

  always_comb begin
    any_left = 1'b0;
    for (int m = 0; m < MSGS; m++) any_left |= (n_tab[m] != '0);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int m = 0; m < MSGS; m++) begin s_tab[m] <= '0; n_tab[m] <= '0; end
      out_valid <= 1'b0; start_src <= '0; start_dst <= '0; start_valid <= '0;
    end else begin
      out_valid <= gen;
      if (ld) begin
        s_tab[{ld_group, ld_dst}] <= ld_src;
        n_tab[{ld_group, ld_dst}] <= ld_n;
      end else if (gen) begin
        for (int m = 0; m < MSGS; m++) begin
          start_src[m]   <= s_tab[m];
          start_dst[m]   <= cid_t'(m % N_CORES);
          start_valid[m] <= (n_tab[m] != '0);
          if (n_tab[m] != '0) n_tab[m] <= n_tab[m] - 1'b1;
        end
      end
    end
  end
endmodule
