// seq_estimator: the Sequence Estimator (paper Sec. 4.1 and Table 1). It
// chooses the execution order of one GCN layer from the time complexities of
// Table 1 for this design ("Ours"):
//   CoAg (combine first): FP  n'dh + eh,  BP  eh + n'dh + n'dh,  WU hd + bc
//   AgCo (aggregate first): FP ed + ndh, BP  ndh + ed + ndh,     WU hd + bc
// with b batch nodes, n and n' (nbar) sampled nodes of the two stages, d and
// h the input and output feature sizes, e edges and c the Softmax classes.
// Both totals are computed with integer multipliers and compared; the
// smaller one wins (ties choose CoAg). The result is registered: set start,
// read done/agco one clock later. Operand and result widths are this design's
// choice.
module seq_estimator #(
  parameter int unsigned W = 24,
  parameter int unsigned RW = 64
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  input  logic [W-1:0]  b, n, nbar, d, h, e, c,
  output logic          done,
  output logic          agco,       // 1: aggregate then combine
  output logic [RW-1:0] tc_coag,
  output logic [RW-1:0] tc_agco
);
  logic [RW-1:0] nbdh, ndh, eh, ed, hd, bc, t_coag, t_agco;
  always_comb begin
    nbdh = RW'(nbar) * RW'(d) * RW'(h);
    ndh  = RW'(n) * RW'(d) * RW'(h);
    eh   = RW'(e) * RW'(h);
    ed   = RW'(e) * RW'(d);
    hd   = RW'(h) * RW'(d);
    bc   = RW'(b) * RW'(c);
    t_coag = (nbdh + eh) + (eh + nbdh + nbdh) + (hd + bc);
    t_agco = (ed + ndh) + (ndh + ed + ndh) + (hd + bc);
  end
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin done <= 1'b0; agco <= 1'b0; tc_coag <= '0; tc_agco <= '0; end
    else begin
      done <= start;
      if (start) begin
        tc_coag <= t_coag; tc_agco <= t_agco; agco <= (t_agco < t_coag);
      end
    end
  end
endmodule
