// tf32_mul: combinational TF32 multiplier, one PE of the 2D MAC array. Both
// FP32 inputs are cut to TF32 (sign, 8-bit exponent, 10-bit mantissa) by
// dropping the 13 low mantissa bits; the 11x11-bit significand product is
// returned as FP32. The paper gives the format (TF32 multiply, FP32 result);
// the rest is this design's choice: truncation, subnormals flushed to zero,
// overflow saturated to the largest finite value, no Inf/NaN handling.
module tf32_mul (
  input  logic [31:0] a,
  input  logic [31:0] b,
  output logic [31:0] y
);
  logic [10:0] ma, mb;
  logic [21:0] p;
  logic signed [9:0] e;
  logic [22:0] m;
  logic s;

  always_comb begin
    s  = a[31] ^ b[31];
    ma = {1'b1, a[22:13]};
    mb = {1'b1, b[22:13]};
    p  = ma * mb;
    e  = $signed({2'b00, a[30:23]}) + $signed({2'b00, b[30:23]}) - 10'sd127;
    if (p[21]) begin
      m = {p[20:0], 2'b00};
      e = e + 10'sd1;
    end else begin
      m = {p[19:0], 3'b000};
    end
    if (a[30:23] == 8'd0 || b[30:23] == 8'd0 || e <= 0) y = 32'd0;
    else if (e >= 10'sd255)                              y = {s, 8'hfe, 23'h7fffff};
    else                                                 y = {s, e[7:0], m};
  end
endmodule
