// talu_v: TALU-V, a vector of N transprecision ALUs.
//
// One micro-operation and one posit_en are broadcast to all N TALU lanes,
// which execute it in lock step on their own register files (SIMD).  The
// vector port moves one 8-bit register of every lane at once: with N = 128
// that is 1024 bits, the whole 32 x 32-bit register file of the host RISC-V
// core, lane i holding bits [8i+7:8i] (byte i%4 of host register i/4).
// vec_rw = 0 writes vec_wdata into register vec_addr of every lane,
// vec_rw = 1 reads it on vec_rdata (combinational).  Because all lanes see
// the same micro-ops they stall together; uop_ready and stall are lane 0's.
// The lane count N = 128 and the 1024-bit host connection follow the
// published design; the port protocol is this design's choice, the host
// core, its register file and the micro-operation memories being outside.
module talu_v
  import talu_pkg::*;
#(
  parameter int unsigned N = 128
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 posit_en,
  // broadcast micro-operation
  input  logic                 uop_valid,
  input  uop_t                 uop,
  output logic                 uop_ready,
  output logic                 stall,
  // vector port to the host register file
  input  logic                 vec_en,
  input  logic                 vec_rw,      // 1 read, 0 write
  input  logic [RA_W-1:0]      vec_addr,
  input  logic [N-1:0][P-1:0]  vec_wdata,
  output logic [N-1:0][P-1:0]  vec_rdata,
  // lane results
  output logic                 out_valid,
  output logic [N-1:0][P-1:0]  out,
  output logic                 dec_valid
);

  logic [N-1:0] ready_l, stall_l, ov_l, dv_l;

  for (genvar i = 0; i < N; i++) begin : g_lane
    talu u_talu (
      .clk, .rst_n, .posit_en,
      .uop_valid, .uop, .uop_ready(ready_l[i]), .stall(stall_l[i]),
      .ext_en(vec_en), .ext_rw(vec_rw), .ext_addr(vec_addr),
      .ext_wdata(vec_wdata[i]), .ext_rdata(vec_rdata[i]),
      .out_valid(ov_l[i]), .out(out[i]), .dec_valid(dv_l[i])
    );
  end

  assign uop_ready = ready_l[0];
  assign stall     = stall_l[0];
  assign out_valid = ov_l[0];
  assign dec_valid = dv_l[0];

  // All lanes share the micro-op stream, so their control must agree.
  a_lockstep: assert property (@(posedge clk) disable iff (!rst_n)
                               (ready_l == {N{ready_l[0]}}) && (ov_l == {N{ov_l[0]}}));

endmodule
