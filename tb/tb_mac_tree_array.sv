// tb_mac_tree_array: self-checking test of the 16x16 MAC adder-tree array.
// Random matrix-vector products (tree output) and lane-wise multiply-
// accumulates (direct output, with and without accumulator feedback) are
// compared with a real-number model of TF32-truncated operands. Tolerance is
// relative to the sum of term magnitudes, since the hardware truncates at each
// adder. Also checks the one-cycle latency.
module tb_mac_tree_array;
  localparam int L = 16;
  logic clk = 0, rst_n = 0;
  logic in_valid = 0, tree = 0, acc_en = 0;
  logic [L-1:0][L-1:0][31:0] w;
  logic [L-1:0][31:0] x, c_in, y;
  logic y_valid;
  int checks = 0, failures = 0;

  mac_tree_array #(.LANES(L)) dut (.*);
  always #5 clk = ~clk;
  initial begin repeat (20000) @(posedge clk); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  function automatic real f2r(logic [31:0] f);
    real m;
    if (f[30:23] == 0) return 0.0;
    m = 1.0 + real'(f[22:0]) / 8388608.0;
    m = m * (2.0 ** (real'(f[30:23]) - 127.0));
    return f[31] ? -m : m;
  endfunction
  function automatic logic [31:0] rnd();
    return {1'($urandom), 8'(124 + $urandom_range(0, 5)), 23'($urandom)};
  endfunction
  function automatic logic [31:0] t32(logic [31:0] f); return {f[31:13], 13'd0}; endfunction

  task automatic chk(real got, real exp, real mag, string what);
    checks++;
    if ((got - exp > mag * 1e-5 + 1e-30) || (exp - got > mag * 1e-5 + 1e-30)) begin
      failures++; $display("FAIL %s got %g exp %g", what, got, exp);
    end
  endtask

  real ex[L], mg[L];
  initial begin
    repeat (2) @(posedge clk); rst_n = 1;
    // Tree mode: y = W x + c
    for (int t = 0; t < 20; t++) begin
      for (int r = 0; r < L; r++) begin
        x[r] = rnd(); c_in[r] = (t % 2) ? rnd() : 32'd0;
        for (int c = 0; c < L; c++) w[r][c] = rnd();
      end
      for (int r = 0; r < L; r++) begin
        ex[r] = f2r(c_in[r]); mg[r] = (ex[r] < 0) ? -ex[r] : ex[r];
        for (int c = 0; c < L; c++) begin
          real p; p = f2r(t32(w[r][c])) * f2r(t32(x[c]));
          ex[r] += p; mg[r] += (p < 0) ? -p : p;
        end
      end
      tree = 1; acc_en = 0; in_valid = 1;
      @(posedge clk); #1 in_valid = 0;
      checks++; if (!y_valid) begin failures++; $display("FAIL latency"); end
      for (int r = 0; r < L; r++) chk(f2r(y[r]), ex[r], mg[r], "tree");
    end
    // Direct mode with accumulation over 8 steps: acc_i = sum_k w_k[i][0]*x_k[i]
    for (int r = 0; r < L; r++) begin ex[r] = 0; mg[r] = 0; end
    for (int k = 0; k < 8; k++) begin
      for (int r = 0; r < L; r++) begin
        w[r][0] = rnd(); x[r] = rnd(); c_in[r] = rnd();
        for (int c = 1; c < L; c++) w[r][c] = rnd();
      end
      for (int r = 0; r < L; r++) begin
        real p; p = f2r(t32(w[r][0])) * f2r(t32(x[r]));
        if (k == 0) begin ex[r] = f2r(c_in[r]); mg[r] = (ex[r] < 0) ? -ex[r] : ex[r]; end
        ex[r] += p; mg[r] += (p < 0) ? -p : p;
      end
      tree = 0; acc_en = (k != 0); in_valid = 1;
      @(posedge clk); #1 in_valid = 0;
      for (int r = 0; r < L; r++) chk(f2r(y[r]), ex[r], mg[r]*4, "direct");
    end
    // Exact cases: 1.0*2.0 + 0.5 = 2.5 in direct mode; zero operand gives c.
    for (int r = 0; r < L; r++) begin w[r][0] = 32'h3f800000; x[r] = 32'h40000000; c_in[r] = 32'h3f000000; end
    w[3][0] = 32'd0;
    tree = 0; acc_en = 0; in_valid = 1; @(posedge clk); #1 in_valid = 0;
    for (int r = 0; r < L; r++) begin
      checks++;
      if (y[r] !== ((r == 3) ? 32'h3f000000 : 32'h40200000)) begin failures++; $display("FAIL exact lane %0d %h", r, y[r]); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
