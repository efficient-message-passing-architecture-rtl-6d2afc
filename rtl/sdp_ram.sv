// sdp_ram: simple dual-port RAM (one write port, one read port, one clock)
// with a one-cycle registered read. It models the block RAM behind a core's
// Feature Buffer, Neighbor Buffer, Aggregate Buffer, Data Output Buffer and
// Block Message buffer. The paper names these buffers; the port structure and
// read latency are this design's choice. A read and a write to the same
// address in one cycle return the old data. Contents are not reset.
module sdp_ram #(
  parameter int unsigned WIDTH = 512,
  parameter int unsigned DEPTH = 64
) (
  input  logic                     clk,
  input  logic                     we,
  input  logic [$clog2(DEPTH)-1:0] waddr,
  input  logic [WIDTH-1:0]         wdata,
  input  logic                     re,
  input  logic [$clog2(DEPTH)-1:0] raddr,
  output logic [WIDTH-1:0]         rdata
);
  logic [WIDTH-1:0] mem [DEPTH];
  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    if (re) rdata <= mem[raddr];
  end
endmodule
