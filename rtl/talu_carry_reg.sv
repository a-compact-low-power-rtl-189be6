// talu_carry_reg: the carry register of a TALU.
//
// When an ADD or SUB finishes its carry step, the carry out of the operand
// width (Carry_8, or Carry_4 for a 4-bit integer) is held here.  A following
// ADD/SUB with use_carry takes it as its carry-in C0, which chains 8-bit
// additions into 16-bit (or wider) integer additions.  The published design
// shows a "Carry" block feeding the input generator; what it holds and when
// it loads are this design's reading of it.
//
// Timing: load is asserted in the cycle after the carry step (when the
// primary cluster's outputs pc_q hold Carry_1..Carry_8); the value is
// visible from the next cycle.  Reset clears it.
module talu_carry_reg
  import talu_pkg::*;
(
  input  logic          clk,
  input  logic          rst_n,
  input  logic          load,
  input  logic          w4,     // 4-bit operation: keep Carry_4
  input  logic [NQ-1:0] pc_q,   // pc_q[i] = Carry_{i+1}
  output logic          carry
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)    carry <= 1'b0;
    else if (load) carry <= w4 ? pc_q[3] : pc_q[NQ-1];
  end

endmodule
