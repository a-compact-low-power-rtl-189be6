// talu_trf: the TALU register file (TRF).
//
// DEPTH registers of 8 bits.  Two combinational read ports supply operands
// A (rs1) and B (rs2) to the input generator.  Three write sources:
//   * the external port (ext_en, ext_rw = 0 writes, ext_rw = 1 reads; the
//     read data ext_rdata is combinational), through which a host register
//     file loads operands and collects results;
//   * the ALU write-back of the output multiplexer (we/waddr/wdata);
//   * the posit-decode write-back, which stores K, {S,E}, F[15:8] and, for a
//     16-bit posit, F[7:0] into rd, rd+1, rd+2, rd+3 (addresses wrap).
// Writes happen on the rising clock edge; if several target one register in
// the same cycle, the decode write wins over the ALU write, which wins over
// the external write (the TALU's issue control never lets the two internal
// ones coincide).  The depth, the port set and the field layout are this
// design's choices: the published design names the TRF (and a quire) but
// gives no size.  Reset clears all registers.
module talu_trf
  import talu_pkg::*;
#(
  parameter int unsigned DEPTH = talu_pkg::TRF_DEPTH,
  localparam int unsigned AW = $clog2(DEPTH)
) (
  input  logic          clk,
  input  logic          rst_n,
  // operand read ports
  input  logic [AW-1:0] ra1,
  input  logic [AW-1:0] ra2,
  output logic [P-1:0]  rd1,
  output logic [P-1:0]  rd2,
  // external port
  input  logic          ext_en,
  input  logic          ext_rw,      // 1 read, 0 write
  input  logic [AW-1:0] ext_addr,
  input  logic [P-1:0]  ext_wdata,
  output logic [P-1:0]  ext_rdata,
  // ALU write-back
  input  logic          we,
  input  logic [AW-1:0] waddr,
  input  logic [P-1:0]  wdata,
  // posit-decode write-back
  input  logic          dec_we,
  input  logic          dec_n16,
  input  logic [AW-1:0] dec_rd,
  input  logic [3:0][P-1:0] dec_data  // [0] -> rd, [1] -> rd+1, ...
);

  logic [DEPTH-1:0][P-1:0] regs;

  assign rd1       = regs[ra1];
  assign rd2       = regs[ra2];
  assign ext_rdata = regs[ext_addr];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      regs <= '0;
    end else begin
      if (ext_en && !ext_rw) regs[ext_addr] <= ext_wdata;
      if (we)                regs[waddr]    <= wdata;
      if (dec_we) begin
        for (int j = 0; j < 4; j++) begin
          if (j < 3 || dec_n16) regs[AW'(dec_rd + AW'(j))] <= dec_data[j];
        end
      end
    end
  end

endmodule
