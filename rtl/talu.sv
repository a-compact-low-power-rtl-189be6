// talu: one transprecision ALU (TALU) lane.
//
// All arithmetic, logic and posit-decode work is done by two identical
// clusters of eight Q-function threshold blocks, the primary (PC) and the
// secondary (SC).  A micro-operation reads operands A = TRF[rs1] and
// B = TRF[rs2]; the input generator maps them onto the Q arguments.
//   * AND, OR, NOT, COMP: one step in the PC.  The result is on 'out' and
//     written to TRF[rd] one cycle after issue.
//   * ADD, SUB, XOR, XNOR: step 1 in the PC (carries, or A&B), then through
//     the pipeline register step 2 in the SC (sum, or XOR).  Result on 'out'
//     and written back two cycles after issue.  ADD/SUB leave their carry
//     out in the carry register, where an ADD/SUB with use_carry picks it up
//     as carry-in: a 16-bit add is two byte adds, 4 cycles.
//   * PDEC (posit mode only, posit_en = 1): the PC compares the
//     regime-normalised posit against the thresholds 2^7-2^i, giving the
//     thermometer vector V; the next cycle the combiner, address generator,
//     regime LUT and shifter turn V into K, E and F, which are written to
//     TRF[rd..rd+2] (K, {S,0000,E}, F[15:8]).  A 16-bit posit compares its
//     low byte in the SC in the same cycle, looks the two vectors up one
//     after the other and also writes F[7:0] to TRF[rd+3].
// Issue timing: uop_valid/uop_ready handshake; the issue control stalls a
// micro-op whose write-back or cluster use would collide with one in flight.
// Posit-field layout in the TRF, the stall rule, SUB/XNOR and the 16-bit
// decode schedule are this design's choices; the cluster mappings, the two
// cluster steps and the decode algorithm follow the published design.
//
// The external TRF port (ext_*, RW: 1 read / 0 write) loads operands and
// reads results.  'out' is valid when out_valid is high.
module talu
  import talu_pkg::*;
(
  input  logic            clk,
  input  logic            rst_n,
  input  logic            posit_en,
  // micro-operation
  input  logic            uop_valid,
  input  uop_t            uop,
  output logic            uop_ready,
  output logic            stall,
  // external register-file port
  input  logic            ext_en,
  input  logic            ext_rw,
  input  logic [RA_W-1:0] ext_addr,
  input  logic [P-1:0]    ext_wdata,
  output logic [P-1:0]    ext_rdata,
  // result
  output logic            out_valid,
  output logic [P-1:0]    out,
  output logic            dec_valid   // decoded posit fields written this cycle
);

  logic [P-1:0]      rd_a, rd_b;
  logic              issue, pc_en, sc_en, clk_pc, clk_sc;
  q_arg_t [NQ-1:0]   pc_args, sc_args;
  logic   [NQ-1:0]   pc_q, sc_q;
  stage_t            s1_next, s1, s2, d2;
  logic              carry;
  logic              mux_we;
  logic [RA_W-1:0]   mux_waddr;
  // decode path
  logic              d1, hi_phase, lo_phase, pol_cur;
  stage_t            dsrc;
  logic [NQ-1:0]     v_sel;
  logic [4:0]        lut_addr;
  logic signed [7:0] k_lut, k_fin;
  logic              dec_s;
  logic [2:0]        dec_e;
  logic [15:0]       dec_f;
  dec_result_t       dec_res;

  talu_issue_ctrl u_ctrl (
    .clk, .rst_n, .posit_en, .uop_valid, .uop, .s1,
    .uop_ready, .issue, .pc_en, .sc_en, .stall
  );

  talu_trf u_trf (
    .clk, .rst_n,
    .ra1(uop.rs1), .ra2(uop.rs2), .rd1(rd_a), .rd2(rd_b),
    .ext_en, .ext_rw, .ext_addr, .ext_wdata, .ext_rdata,
    .we(mux_we), .waddr(mux_waddr), .wdata(out),
    .dec_we(dec_res.valid), .dec_n16(dec_res.n16), .dec_rd(dec_res.rd),
    .dec_data({dec_res.f[7:0], dec_res.f[15:8],
               {dec_res.s, 4'b0000, dec_res.e}, dec_res.k})
  );

  talu_input_gen u_igen (
    .issue, .uop, .rd_a, .rd_b, .carry, .s1, .pc_q,
    .pc_args, .sc_args, .s1_next
  );

  talu_clock_gate u_cg (.clk, .pc_en, .sc_en, .clk_pc, .clk_sc);

  q_cluster u_pc (.clk(clk_pc), .rst_n, .args(pc_args), .q(pc_q));
  q_cluster u_sc (.clk(clk_sc), .rst_n, .args(sc_args), .q(sc_q));

  // PC -> SC pipeline register, then the second-step and second-look-up
  // stage words (same register, different contents).
  talu_pipe_reg u_s1 (.clk, .rst_n, .d(s1_next), .q(s1));
  talu_pipe_reg u_s2 (.clk, .rst_n,
                      .d((s1.valid && two_cluster(s1.op)) ? s1 : '0), .q(s2));
  talu_pipe_reg u_d2 (.clk, .rst_n,
                      .d((s1.valid && s1.op == OP_PDEC && s1.n16) ? s1 : '0),
                      .q(d2));

  talu_carry_reg u_carry (
    .clk, .rst_n,
    .load(s1.valid && (s1.op inside {OP_ADD, OP_SUB})),
    .w4(s1.w4), .pc_q, .carry
  );

  // ---------------- posit decode: combiner, address, LUT, shifter --------
  always_comb begin
    d1       = s1.valid && s1.op == OP_PDEC;
    hi_phase = d1 && s1.n16;
    lo_phase = d2.valid;
    dsrc     = lo_phase ? d2 : s1;
    pol_cur  = dsrc.n16 ? dsrc.pword[14] : dsrc.pword[6];
  end

  talu_combiner u_comb (
    .clk, .rst_n, .hi_phase, .lo_phase, .pol(pol_cur),
    .pc_q, .sc_q, .k_lut, .v_sel, .k_out(k_fin)
  );

  talu_addr_gen u_agen (.v(v_sel), .pol(pol_cur), .addr(lut_addr));

  talu_regime_lut u_lut (.addr(lut_addr), .k(k_lut));

  talu_shifter u_shift (
    .pword(dsrc.pword), .n16(dsrc.n16), .es(dsrc.es), .pol(pol_cur),
    .k(k_fin), .s(dec_s), .e(dec_e), .f(dec_f)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      dec_res <= '0;
    end else begin
      dec_res.valid <= (d1 && !s1.n16) || lo_phase;
      dec_res.rd    <= dsrc.rd;
      dec_res.n16   <= dsrc.n16;
      dec_res.s     <= dec_s;
      dec_res.k     <= k_fin;
      dec_res.e     <= dec_e;
      dec_res.f     <= dec_f;
    end
  end

  // ---------------- output multiplexer and write-back -------------------
  talu_out_mux u_mux (
    .pc_done(s1.valid && one_cluster(s1.op)), .pc_rd(s1.rd),
    .sc_done(s2.valid), .sc_rd(s2.rd),
    .pc_q, .sc_q, .we(mux_we), .waddr(mux_waddr), .out
  );

  assign out_valid = mux_we;
  assign dec_valid = dec_res.valid;

  // The issue control must keep the two write-back sources apart, and the
  // primary and secondary results from finishing in the same cycle.
  a_one_writer: assert property (@(posedge clk) disable iff (!rst_n)
                                 !(mux_we && dec_res.valid));
  a_one_result: assert property (@(posedge clk) disable iff (!rst_n)
                                 !(s1.valid && one_cluster(s1.op) && s2.valid));

endmodule
