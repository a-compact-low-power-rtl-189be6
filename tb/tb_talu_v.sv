// tb_talu_v: end-to-end test of the TALU-V vector unit (reduced to N = 4
// lanes to keep the run short; every lane is identical).
//
// Operand vectors are written into the lanes' register files through the
// vector port (as the host register file would), a micro-op program is
// broadcast, and the results are read back through the vector port and
// compared with a per-lane reference.  The program exercises every
// mechanism of the design and counts it:
//   * integer ADD, SUB, XOR, XNOR (two cluster steps, pipelined back to back)
//   * AND, OR, NOT, COMP (one step)
//   * a stall (a one-step op directly behind a two-step op)
//   * carry chaining (16-bit addition from two byte additions)
//   * 8-bit and 16-bit posit decodes, and a mode switch: a decode issued
//     while posit_en is low must leave the register file unchanged.
// Each mechanism must have happened at least once.
module tb_talu_v;
  import talu_pkg::*;
  localparam int N = 4;

  logic clk = 0, rst_n = 0, posit_en = 0;
  logic uop_valid = 0, uop_ready, stall, out_valid, dec_valid;
  uop_t uop = '0;
  logic vec_en = 0, vec_rw = 1;
  logic [3:0] vec_addr = 0;
  logic [N-1:0][7:0] vec_wdata = '0, vec_rdata, out;

  talu_v #(.N(N)) dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int n_stall = 0, n_two = 0, n_one = 0, n_chain = 0, n_dec8 = 0, n_dec16 = 0, n_mode = 0;
  logic [7:0] m [N][16];

  task automatic chk(string what, logic [63:0] got, logic [63:0] exp);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s got=%h exp=%h", what, got, exp);
    end
  endtask

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(negedge clk) if (stall) n_stall++;

  task automatic vwrite(int addr);
    @(negedge clk);
    vec_en = 1; vec_rw = 0; vec_addr = 4'(addr);
    for (int l = 0; l < N; l++) begin vec_wdata[l] = 8'($urandom); m[l][addr] = vec_wdata[l]; end
    @(posedge clk); #1 vec_en = 0; vec_rw = 1;
  endtask

  task automatic send(opcode_e op, int rd, int rs1, int rs2, bit uc = 0, bit n16 = 0, int es = 0);
    @(negedge clk);
    uop = '0; uop.op = op; uop.rd = 4'(rd); uop.rs1 = 4'(rs1); uop.rs2 = 4'(rs2);
    uop.use_carry = uc; uop.n16 = n16; uop.es = 2'(es);
    uop_valid = 1;
    forever begin
      @(posedge clk);
      if (uop_ready) break;
      @(negedge clk);
    end
    #1 uop_valid = 0; uop = '0;
  endtask

  function automatic void ref_decode(logic [15:0] w, bit w16, int ee, output logic [3:0][7:0] d);
    int n = w16 ? 16 : 8, run = 0, idx, kk;
    logic p; logic [2:0] ex = 0; logic [15:0] fr = 0;
    p = w[n-2];
    idx = n - 2;
    while (idx >= 0 && w[idx] == p) begin run++; idx--; end
    idx--;
    kk = p ? run - 1 : -run;
    for (int j = 0; j < ee; j++) begin
      ex = ex << 1;
      if (idx >= 0) begin ex[0] = w[idx]; idx--; end
    end
    for (int j = 15; j >= 0 && idx >= 0; j--) begin fr[j] = w[idx]; idx--; end
    d = {fr[7:0], fr[15:8], {w[n-1], 4'b0000, ex}, 8'(kk)};
  endfunction

  initial begin
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    for (int r = 0; r < 16; r++) vwrite(r);
    // lane 0 gets the worked posit example in r4, lane 1 a long regime
    @(negedge clk);
    vec_en = 1; vec_rw = 0; vec_addr = 4;
    for (int l = 0; l < N; l++) vec_wdata[l] = m[l][4];
    vec_wdata[0] = 8'b01110100; vec_wdata[1] = 8'b01111111;
    m[0][4] = vec_wdata[0]; m[1][4] = vec_wdata[1];
    @(posedge clk); #1 vec_en = 0;

    // --- integer phase (posit_en low) ---
    send(OP_ADD, 8, 0, 1);   n_two++;
    send(OP_XOR, 9, 0, 1);   n_two++;   // pipelined behind ADD
    send(OP_AND, 10, 2, 3);  n_one++;   // stalls behind XOR
    send(OP_SUB, 11, 2, 3);  n_two++;
    send(OP_COMP, 12, 0, 2); n_one++;
    repeat (3) @(posedge clk);
    // 16-bit addition {r1,r0} + {r3,r2} -> {r14,r13}
    send(OP_ADD, 13, 0, 2);
    send(OP_OR, 15, 0, 1);   n_one++;   // independent op in the gap
    send(OP_ADD, 14, 1, 3, 1); n_chain++;
    repeat (3) @(posedge clk);
    for (int l = 0; l < N; l++) begin
      automatic logic [15:0] s16 = {m[l][1], m[l][0]} + {m[l][3], m[l][2]};
      logic [7:0] cmp;
      for (int i = 0; i < 8; i++) cmp[i] = (32'(m[l][0]) % (1 << (i + 1))) >= (32'(m[l][2]) % (1 << (i + 1)));
      m[l][8]  = m[l][0] + m[l][1];
      m[l][9]  = m[l][0] ^ m[l][1];
      m[l][10] = m[l][2] & m[l][3];
      m[l][11] = m[l][2] - m[l][3];
      m[l][12] = cmp;
      m[l][13] = s16[7:0];
      m[l][14] = s16[15:8];
      m[l][15] = m[l][0] | m[l][1];
    end
    // a decode in integer mode is ignored
    send(OP_PDEC, 0, 4, 5, 0, 0, 2); n_mode++;
    repeat (4) @(posedge clk);
    for (int r = 0; r < 16; r++) begin
      @(negedge clk); vec_en = 1; vec_rw = 1; vec_addr = 4'(r); #1;
      for (int l = 0; l < N; l++) chk($sformatf("int lane %0d r%0d", l, r), 64'(vec_rdata[l]), 64'(m[l][r]));
    end
    vec_en = 0;

    // --- posit phase: switch mode, decode P(8,2) and P(16,2) ---
    @(negedge clk) posit_en = 1; n_mode++;
    send(OP_PDEC, 0, 4, 5, 0, 0, 2);  n_dec8++;
    send(OP_PDEC, 8, 4, 5, 0, 1, 2);  n_dec16++;
    send(OP_XNOR, 12, 6, 7); n_two++;
    repeat (5) @(posedge clk);
    for (int l = 0; l < N; l++) begin
      logic [3:0][7:0] d8, d16;
      automatic logic [7:0] w4 = m[l][4], w5 = m[l][5], w6 = m[l][6], w7 = m[l][7];
      ref_decode({8'h00, w4}, 0, 2, d8);
      ref_decode({w4, w5}, 1, 2, d16);
      for (int j = 0; j < 3; j++) m[l][j] = d8[j];
      for (int j = 0; j < 4; j++) m[l][8 + j] = d16[j];
      m[l][12] = ~(w6 ^ w7);
    end
    chk("worked example K", 64'(m[0][0]), 2);
    chk("worked example E", 64'(m[0][1]), 2);
    for (int r = 0; r < 16; r++) begin
      @(negedge clk); vec_en = 1; vec_rw = 1; vec_addr = 4'(r); #1;
      for (int l = 0; l < N; l++) chk($sformatf("posit lane %0d r%0d", l, r), 64'(vec_rdata[l]), 64'(m[l][r]));
    end
    vec_en = 0;

    $display("stalls=%0d two_step=%0d one_step=%0d carry_chains=%0d dec8=%0d dec16=%0d mode_switches=%0d",
             n_stall, n_two, n_one, n_chain, n_dec8, n_dec16, n_mode);
    chk("stall happened", 64'(n_stall > 0), 1);
    chk("two-step ops happened", 64'(n_two > 0), 1);
    chk("one-step ops happened", 64'(n_one > 0), 1);
    chk("carry chain happened", 64'(n_chain > 0), 1);
    chk("8-bit decode happened", 64'(n_dec8 > 0), 1);
    chk("16-bit decode happened", 64'(n_dec16 > 0), 1);
    chk("mode switch happened", 64'(n_mode > 1), 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
