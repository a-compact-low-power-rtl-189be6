// talu_combiner: combiner of the posit-decode path.
//
// It chooses which cluster's comparison vector V goes to the address
// generator and merges the two regime look-ups of a 16-bit posit.
//   * 8-bit posit, and first look-up of a 16-bit posit (hi_phase): V comes
//     from the primary cluster (Q0..Q6 compared T[n-2:n-8]); k_out is the
//     LUT value.  In hi_phase that value is also stored in k_hi.
//   * second look-up of a 16-bit posit (lo_phase, the next cycle): V comes
//     from the secondary cluster (Q0..Q7 compared T[7:0]).  If the upper
//     seven bits were all one run (K_hi = 6 for ones, -7 for zeros) the run
//     continues into the low byte and k_out = K_hi + K_lo + 1 (ones) or
//     K_hi + K_lo (zeros); otherwise k_out = K_hi.
// The sequential look-up and the "logically combined" merge follow the
// published description; the merge formula is this design's working of it.
module talu_combiner
  import talu_pkg::*;
(
  input  logic              clk,
  input  logic              rst_n,
  input  logic              hi_phase,  // first look-up of a 16-bit posit
  input  logic              lo_phase,  // second look-up of a 16-bit posit
  input  logic              pol,       // regime polarity of the posit in lo_phase
  input  logic [NQ-1:0]     pc_q,
  input  logic [NQ-1:0]     sc_q,
  input  logic signed [7:0] k_lut,     // LUT value for the address of v_sel
  output logic [NQ-1:0]     v_sel,
  output logic signed [7:0] k_out
);

  logic signed [7:0] k_hi;
  logic              sat;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)        k_hi <= '0;
    else if (hi_phase) k_hi <= k_lut;
  end

  always_comb begin
    v_sel = lo_phase ? sc_q : {1'b0, pc_q[NQ-2:0]};
    sat   = pol ? (k_hi == 8'sd6) : (k_hi == -8'sd7);
    if (!lo_phase)  k_out = k_lut;
    else if (!sat)  k_out = k_hi;
    else if (pol)   k_out = k_hi + k_lut + 8'sd1;
    else            k_out = k_hi + k_lut;
  end

endmodule
