// talu_clock_gate: gated clocks clk_pc and clk_sc for the two compute
// clusters of a TALU.
//
// Each output is a standard latch-based integrated clock gate: the enable is
// captured by a latch that is transparent while clk is low and the clock is
// ANDed with the latched enable, so a gated clock never glitches and only
// pulses in cycles whose enable was high before the rising edge.  The
// enables come from the TALU's issue control, which derives them from the
// opcodes in flight (the primary cluster is clocked when a micro-op issues,
// the secondary when a two-step operation reaches its second step or a
// 16-bit decode issues).  The published design shows a clock gate driven by
// the opcode producing clk_pc and clk_sc; the latch-and-AND structure is the
// usual cell and this design's choice.  The two latches are intended: they
// are the gate cells, not inferred by mistake.
module talu_clock_gate (
  input  logic clk,
  input  logic pc_en,
  input  logic sc_en,
  output logic clk_pc,
  output logic clk_sc
);

  logic pc_en_l, sc_en_l;

  always_latch begin
    if (!clk) begin
      pc_en_l = pc_en;
      sc_en_l = sc_en;
    end
  end

  assign clk_pc = clk & pc_en_l;
  assign clk_sc = clk & sc_en_l;

endmodule
