// fp32_add: combinational IEEE-754 single-precision adder used as the
// accumulator and adder-tree node of the PE array. Simplified arithmetic, the
// design's own choice where the paper only says "FP32 accumulation units":
// subnormal inputs and results are flushed to zero, results are truncated
// (round toward zero) after three guard bits, an overflow saturates to the
// largest finite value of the right sign, and Inf/NaN are not special-cased.
module fp32_add (
  input  logic [31:0] a,
  input  logic [31:0] b,
  output logic [31:0] y
);
  logic        sa, sb, sl, ss;
  logic [7:0]  ea, eb, el, es;
  logic [23:0] ml, ms;
  logic [7:0]  d;
  logic [26:0] msh;
  logic [27:0] sum;
  logic [4:0]  lz;
  logic [27:0] norm;
  logic signed [9:0] er;

  always_comb begin
    sa = a[31]; sb = b[31];
    ea = a[30:23]; eb = b[30:23];
    // Larger magnitude first; a zero or subnormal operand counts as zero.
    if ({ea, a[22:0]} >= {eb, b[22:0]}) begin
      sl = sa; el = ea; ml = (ea == 8'd0) ? 24'd0 : {1'b1, a[22:0]};
      ss = sb; es = eb; ms = (eb == 8'd0) ? 24'd0 : {1'b1, b[22:0]};
    end else begin
      sl = sb; el = eb; ml = (eb == 8'd0) ? 24'd0 : {1'b1, b[22:0]};
      ss = sa; es = ea; ms = (ea == 8'd0) ? 24'd0 : {1'b1, a[22:0]};
    end
    d   = el - es;
    msh = (d > 8'd26) ? 27'd0 : ({ms, 3'b000} >> d);
    if (sl == ss) sum = {1'b0, ml, 3'b000} + {1'b0, msh};
    else          sum = {1'b0, ml, 3'b000} - {1'b0, msh};
    // Leading-zero count over bits 27..0.
    lz = 5'd28;
    for (int i = 0; i < 28; i++) if (sum[i]) lz = 5'(27 - i);
    norm = sum << lz;                       // hidden bit now at bit 27
    er   = $signed({2'b00, el}) + 10'sd1 - $signed({5'b0, lz});
    if (ml == 24'd0 || sum == 28'd0 || er <= 0) y = 32'd0;
    else if (er >= 10'sd255)                     y = {sl, 8'hfe, 23'h7fffff};
    else                                         y = {sl, er[7:0], norm[26:4]};
  end
endmodule
