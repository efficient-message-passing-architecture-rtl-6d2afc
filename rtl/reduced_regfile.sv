// reduced_regfile: the Reduced Register File on the "Des ID = Tile ID" (Y)
// side of a core's switch. Up to four packets may reach their destination core
// in one network cycle (one per incoming hypercube link, the receive limit the
// paper gives), plus one locally produced packet whose destination is the
// core itself. They are written into a small circular store in one cycle and
// handed on one per cycle (first-word fall-through) to the aggregation path.
// Depth and ordering (lower port first) are this design's choice. `overflow`
// is a sticky flag raised if arrivals ever exceed the free space.
module reduced_regfile #(
  parameter int unsigned NPORT = 5,
  parameter int unsigned WIDTH = 518,
  parameter int unsigned DEPTH = 16
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic [NPORT-1:0]            wr_valid,
  input  logic [NPORT-1:0][WIDTH-1:0] wr_data,
  input  logic                        pop,
  output logic                        valid,
  output logic [WIDTH-1:0]            rd_data,
  output logic                        overflow,
  output logic [$clog2(DEPTH):0]      count
);
  localparam int unsigned AW = $clog2(DEPTH);
  logic [WIDTH-1:0] mem [DEPTH];
  logic [AW-1:0] wp, rp;
  logic [$clog2(NPORT+1)-1:0] nwr;

  assign valid   = (count != 0);
  assign rd_data = mem[rp];

  always_comb begin
    nwr = '0;
    for (int i = 0; i < NPORT; i++) nwr += wr_valid[i] ? 1'b1 : 1'b0;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp <= '0; rp <= '0; count <= '0; overflow <= 1'b0;
    end else begin
      wp    <= wp + AW'(nwr);
      if (pop && valid) rp <= rp + 1'b1;
      count <= count + ($clog2(DEPTH)+1)'(nwr) - ((pop && valid) ? 1'b1 : 1'b0);
      if (32'(count) + 32'(nwr) > DEPTH) overflow <= 1'b1;
    end
  end

  always_ff @(posedge clk) begin
    logic [AW-1:0] p;
    p = wp;
    for (int i = 0; i < NPORT; i++)
      if (wr_valid[i]) begin
        mem[p] <= wr_data[i];
        p = p + 1'b1;
      end
  end
endmodule
