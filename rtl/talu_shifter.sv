// talu_shifter: shifter of the posit-decode path (Find_E_and_F).
//
// Given the posit word, its size (8 or 16 bits), the exponent size e and the
// regime value K, it left-shifts the body P[n-2:0] past the regime run and
// its stop bit, i.e. by K+2 for K >= 0 and by 1-K for K < 0 (run length plus
// one).  The first e bits of the shifted body are the exponent E (returned
// right-aligned); the bits after them are the mantissa F, returned
// left-aligned in 16 bits (an 8-bit posit's mantissa sits in f[15:8]).  Bits
// shifted in are zero, so exponent bits cut off by a long regime read as 0.
// The sign is P[n-1].  Combinational.  Shifting by K+2 follows the published
// algorithm; the shift for negative K and the output alignment are this
// design's reading of it.  Like the published algorithm, it extracts the
// fields of the bit pattern as stored (no two's complement of negative
// posits, no special case for 0 and NaR).
module talu_shifter (
  input  logic [15:0]       pword,  // 8-bit posit in [7:0]
  input  logic              n16,
  input  logic [1:0]        es,
  input  logic              pol,
  input  logic signed [7:0] k,
  output logic              s,
  output logic [2:0]        e,
  output logic [15:0]       f
);

  logic [14:0] body, shifted, after_e;
  logic [4:0]  sh;

  always_comb begin
    s       = n16 ? pword[15] : pword[7];
    body    = n16 ? pword[14:0] : {pword[6:0], 8'h00};
    sh      = pol ? 5'(k + 8'sd2) : 5'(8'sd1 - k);
    shifted = body << sh;
    e       = 3'(shifted[14:12] >> (3 - es));
    after_e = shifted << es;
    f       = {after_e, 1'b0};
  end

endmodule
