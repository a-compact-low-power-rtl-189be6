// talu_addr_gen: address generator of the posit-decode path.
//
// The Q-function comparisons T >= 2^(p-1) - 2^i produce a thermometer code V:
// the number of ones in V is the length of the run of identical leading
// regime bits that the compared byte contains.  This block counts the ones
// (a thermometer-to-binary conversion) and prefixes the regime polarity
// (P[n-2]), forming the address {pol, count} of the regime look-up table.
// Combinational.  Counting the ones is this design's choice; the published
// design only says V is turned into a LUT address.
module talu_addr_gen
  import talu_pkg::*;
(
  input  logic [NQ-1:0] v,
  input  logic          pol,
  output logic [4:0]    addr
);

  logic [3:0] cnt;

  always_comb begin
    cnt = '0;
    for (int i = 0; i < NQ; i++) cnt += 4'(v[i]);
    addr = {pol, cnt};
  end

endmodule
