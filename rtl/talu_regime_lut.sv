// talu_regime_lut: look-up table of precomputed regime values K.
//
// Address {pol, cnt}: cnt is the run length of identical regime bits seen in
// one byte, pol the regime polarity.  The table holds
//     K = cnt - 1   for pol = 1 (a run of ones),
//     K = -cnt      for pol = 0 (a run of zeros),
// so an 8-bit posit reads K in -7..6 directly, and the two reads of a 16-bit
// posit are combined by the combiner.  The table is computed at elaboration
// from that formula; entries with cnt above 8 are never addressed.  One
// combinational read port.  K = cnt-1 and K = -cnt follow the posit
// definition; the table layout is this design's choice.
module talu_regime_lut (
  input  logic [4:0]        addr,
  output logic signed [7:0] k
);

  function automatic logic [31:0][7:0] fill();
    logic [31:0][7:0] t;
    for (int a = 0; a < 32; a++) begin
      if (a >= 16) t[a] = 8'(a - 16 - 1);
      else         t[a] = 8'(-a);
    end
    return t;
  endfunction

  localparam logic [31:0][7:0] TABLE = fill();

  assign k = signed'(TABLE[addr]);

endmodule
