// talu_pipe_reg: the pipeline register between the primary and the secondary
// cluster of a TALU.
//
// On each rising clock edge it captures the stage-0 word built by the input
// generator (operation, destination, operands A and B, carry-in, posit
// fields).  In the next cycle the secondary cluster completes step 2 of an
// ADD/SUB/XOR/XNOR from this word and the primary cluster's step-1 outputs,
// and the write-back and posit-decode paths read their destination and
// posit word from it.  A register here is what the published design shows;
// its contents are this design's choice.  Reset clears the valid bit.
module talu_pipe_reg
  import talu_pkg::*;
(
  input  logic   clk,
  input  logic   rst_n,
  input  stage_t d,
  output stage_t q
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) q <= '0;
    else        q <= d;
  end

endmodule
