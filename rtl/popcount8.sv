// popcount8: number of set sector bits, i.e. the length of a variable-length
// burst in beats.
//
// Both the DRAM chip and the memory controller count the sector bits of the
// bank that a READ or WRITE targets, so that both sides agree on the burst
// length before the burst starts. The count is a purely combinational adder
// tree (pairs, then nibbles, then the byte); the paper cites a 34-gate
// implementation, this one is the plain adder form of the same function.
// Interface: in = sector bits, count = 0..8. No clock, no latency.
module popcount8 (
  input  logic [7:0] in,
  output logic [3:0] count
);
  logic [1:0] p0, p1, p2, p3;   // population of each bit pair
  logic [2:0] n0, n1;           // population of each nibble

  always_comb begin
    p0 = {1'b0, in[0]} + {1'b0, in[1]};
    p1 = {1'b0, in[2]} + {1'b0, in[3]};
    p2 = {1'b0, in[4]} + {1'b0, in[5]};
    p3 = {1'b0, in[6]} + {1'b0, in[7]};
    n0 = {1'b0, p0} + {1'b0, p1};
    n1 = {1'b0, p2} + {1'b0, p3};
    count = {1'b0, n0} + {1'b0, n1};
  end
endmodule
