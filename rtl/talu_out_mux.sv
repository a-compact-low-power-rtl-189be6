// talu_out_mux: the TALU output multiplexer.
//
// Each cycle it selects which cluster's result leaves the TALU on 'out' and
// is written back into the register file: the primary cluster's outputs for
// a one-step operation (AND, OR, NOT, COMP) that finished its step in the
// previous cycle, or the secondary cluster's outputs for a two-step
// operation (ADD, SUB, XOR, XNOR) that finished step 2 in the previous
// cycle.  The selection follows the opcode, as in the published design; the
// issue control guarantees that both never occur in one cycle (the primary
// result takes precedence if they did).  Combinational.
module talu_out_mux
  import talu_pkg::*;
(
  input  logic            pc_done,  // a one-step op's result is in pc_q
  input  logic [RA_W-1:0] pc_rd,
  input  logic            sc_done,  // a two-step op's result is in sc_q
  input  logic [RA_W-1:0] sc_rd,
  input  logic [NQ-1:0]   pc_q,
  input  logic [NQ-1:0]   sc_q,
  output logic            we,
  output logic [RA_W-1:0] waddr,
  output logic [P-1:0]    out
);

  always_comb begin
    we    = pc_done | sc_done;
    waddr = pc_done ? pc_rd : sc_rd;
    out   = pc_done ? pc_q : (sc_done ? sc_q : '0);
  end

endmodule
