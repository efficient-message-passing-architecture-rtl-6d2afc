// xor_array: the XOR Array of the routing computation (Algorithm 1, lines 1
// and 17). For each of the P messages it XORs the current position with the
// destination core id. Every 1 bit k of the result is a dimension the message
// still has to cross, so the single-step path set is {pos ^ (1<<k)}: it is
// returned as a DIMS-bit mask of usable links. The step length is the number
// of 1 bits, the least number of cycles to the destination (paper Fig. 8(b):
// a=1010, b=0001 gives 1011, step 3, next hops 0010, 1000, 1011).
// Invalid messages get an empty set and step 0. Combinational.
module xor_array
  import gcn_pkg::*;
#(
  parameter int unsigned P = MSGS
) (
  input  cid_t [P-1:0]           pos,
  input  cid_t [P-1:0]           dst,
  input  logic [P-1:0]           valid,
  output logic [P-1:0][DIMS-1:0] pset,
  output logic [P-1:0][2:0]      step
);
  always_comb begin
    for (int m = 0; m < P; m++) begin
      pset[m] = valid[m] ? (pos[m] ^ dst[m]) : '0;
      step[m] = '0;
      for (int k = 0; k < DIMS; k++) step[m] += {2'b00, pset[m][k]};
    end
  end
endmodule
