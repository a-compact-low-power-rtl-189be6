// talu_issue_ctrl: micro-operation issue control of a TALU.
//
// Micro-operations are offered with uop_valid and taken in a cycle where
// uop_ready is high.  Every operation occupies fixed resources at fixed
// offsets (cycles) after issue:
//     AND/OR/NOT/COMP     PC@0                       write-back@1
//     ADD/SUB/XOR/XNOR    PC@0 SC@1                  write-back@2
//     PDEC, 8-bit         PC@0 LUT@1                 write-back@2
//     PDEC, 16-bit        PC@0 SC@0,1 LUT@1,2        write-back@3
// (SC@1 of a 16-bit decode holds the low-byte comparison until its look-up.)
// A reservation table records, per resource, which of the next cycles are
// taken; a micro-op whose pattern overlaps it stalls (uop_ready low) until
// it fits, e.g. a one-step op right behind a two-step op waits one cycle for
// the write-back port.  Back-to-back two-step ops pipeline through PC and SC
// without a stall.  A PDEC while posit_en is low is taken and discarded
// (posit operations are only performed in posit mode).  The resource
// patterns reproduce the published step counts (one cycle for logic and
// compare, two for ADD/XOR, two for an 8-bit decode); the stall mechanism and
// the 16-bit decode schedule are this design's choices.
//
// Outputs: issue marks an accepted micro-op that will execute; pc_en/sc_en
// are the enables of the cluster clock gates for this cycle.
module talu_issue_ctrl
  import talu_pkg::*;
(
  input  logic   clk,
  input  logic   rst_n,
  input  logic   posit_en,
  input  logic   uop_valid,
  input  uop_t   uop,
  input  stage_t s1,          // pipeline register (op issued last cycle)
  output logic   uop_ready,
  output logic   issue,
  output logic   pc_en,
  output logic   sc_en,
  output logic   stall        // a valid micro-op is held back this cycle
);

  logic [3:0] res_sc, res_lut, res_wb;     // bit k: taken k cycles from now
  logic [3:0] need_sc, need_lut, need_wb;
  logic       active, conflict;

  always_comb begin
    need_sc = '0; need_lut = '0; need_wb = '0;
    active  = 1'b1;
    if (one_cluster(uop.op)) begin
      need_wb = 4'b0010;
    end else if (two_cluster(uop.op)) begin
      need_sc = 4'b0010; need_wb = 4'b0100;
    end else if (uop.op == OP_PDEC && posit_en) begin
      if (uop.n16) begin
        need_sc = 4'b0011; need_lut = 4'b0110; need_wb = 4'b1000;
      end else begin
        need_lut = 4'b0010; need_wb = 4'b0100;
      end
    end else begin
      active = 1'b0;   // NOP, or PDEC outside posit mode
    end
    conflict  = |(need_sc & res_sc) | |(need_lut & res_lut) | |(need_wb & res_wb);
    uop_ready = !conflict;
    issue     = uop_valid && !conflict && active;
    stall     = uop_valid && conflict;
    pc_en     = issue;
    sc_en     = (issue && uop.op == OP_PDEC && uop.n16)
              || (s1.valid && two_cluster(s1.op));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      res_sc <= '0; res_lut <= '0; res_wb <= '0;
    end else begin
      res_sc  <= (res_sc  | (issue ? need_sc  : 4'b0)) >> 1;
      res_lut <= (res_lut | (issue ? need_lut : 4'b0)) >> 1;
      res_wb  <= (res_wb  | (issue ? need_wb  : 4'b0)) >> 1;
    end
  end

endmodule
