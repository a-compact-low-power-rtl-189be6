// tb_talu: self-checking test of one TALU lane.
//
// A reference model of the register file, the carry register and every
// micro-op runs beside the TALU.  Random micro-ops are offered back to back
// through the uop_valid/uop_ready handshake; the test only picks registers
// that no operation in flight will still write, so the model may compute
// each result at issue.  For every accepted micro-op it checks
//   * the result on 'out' in exactly the cycle the schedule gives (issue+1
//     for AND/OR/NOT/COMP, issue+2 for ADD/SUB/XOR/XNOR) and no result in
//     other cycles;
//   * decoded posit fields (dec_valid at issue+2 for 8-bit, issue+3 for
//     16-bit) by reading the register file back at the end;
//   * that a PDEC offered with posit_en low changes nothing;
//   * the published cycle counts: INT8 and INT4 addition 2 cycles, INT16
//     addition (two chained byte additions) 4 cycles, 8-bit posit decode
//     2 cycles.
// Finally the whole register file is read through the external port and
// compared with the model.  Stalls, carry chaining, 16-bit decodes and
// ignored decodes are counted and each must have happened.
module tb_talu;
  import talu_pkg::*;

  logic clk = 0, rst_n = 0, posit_en = 1;
  logic uop_valid = 0, uop_ready, stall, out_valid, dec_valid;
  uop_t uop;
  logic ext_en = 0, ext_rw = 1;
  logic [3:0] ext_addr = 0;
  logic [7:0] ext_wdata = 0, ext_rdata, out;

  talu dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int cycle = 0;
  always @(posedge clk) cycle <= cycle + 1;

  task automatic chk(string what, logic [63:0] got, logic [63:0] exp);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL @%0d %s got=%h exp=%h", cycle, what, got, exp);
    end
  endtask

  initial begin : watchdog
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------- reference model ----------------
  logic [7:0] mregs [16];
  logic       mcarry;
  int         pend_until [16];   // last cycle in which a write to it is due
  int         carry_ok;          // first cycle the model carry may be used
  logic [7:0] exp_out [int];     // expected 'out' by cycle
  bit         exp_dec [int];     // expected dec_valid by cycle
  int n_stall = 0, n_chain = 0, n_dec16 = 0, n_dec8 = 0, n_blocked = 0, n_b2b = 0;

  function automatic void ref_decode(logic [15:0] w, logic w16, logic [1:0] ee,
                                     output logic [3:0][7:0] d);
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
    d[0] = 8'(kk);
    d[1] = {w[n-1], 4'b0000, ex};
    d[2] = fr[15:8];
    d[3] = fr[7:0];
  endfunction

  // Model of one micro-op issued in cycle c.  Returns the write-back cycle.
  function automatic int model_issue(uop_t u, int c);
    logic [7:0] a = mregs[u.rs1], b = mregs[u.rs2], r = 0, bb;
    logic c0;
    logic [8:0] s9;
    int wb = c;
    case (u.op)
      OP_AND:  begin r = a & b;  wb = c + 1; end
      OP_OR:   begin r = a | b;  wb = c + 1; end
      OP_NOT:  begin r = ~b;     wb = c + 1; end
      OP_COMP: begin
        for (int i = 0; i < 8; i++) r[i] = (32'(a) % (1 << (i + 1))) >= (32'(b) % (1 << (i + 1)));
        wb = c + 1;
      end
      OP_ADD, OP_SUB: begin
        bb = (u.op == OP_SUB) ? ~b : b;
        c0 = u.use_carry ? mcarry : (u.op == OP_SUB);
        s9 = 9'(a) + 9'(bb) + 9'(c0);
        r  = s9[7:0];
        mcarry = u.w4 ? ((5'(a[3:0]) + 5'(bb[3:0]) + 5'(c0)) >> 4) != 0 : s9[8];
        carry_ok = c + 2;
        wb = c + 2;
      end
      OP_XOR:  begin r = a ^ b;    wb = c + 2; end
      OP_XNOR: begin r = ~(a ^ b); wb = c + 2; end
      OP_PDEC: begin
        logic [3:0][7:0] d;
        if (!posit_en) return -1;
        ref_decode(u.n16 ? {a, b} : {8'h00, a}, u.n16, u.es, d);
        wb = c + (u.n16 ? 3 : 2);
        for (int j = 0; j < 4; j++) if (j < 3 || u.n16) begin
          mregs[4'(u.rd + 4'(j))] = d[j];
          pend_until[4'(u.rd + 4'(j))] = wb;
        end
        exp_dec[wb] = 1;
        return wb;
      end
      default: return -1;
    endcase
    mregs[u.rd] = r;
    pend_until[u.rd] = wb;
    exp_out[wb] = r;
    return wb;
  endfunction

  // cycle-by-cycle result monitor (sampled mid-cycle)
  bit monitor_on = 0;
  always @(negedge clk) if (monitor_on) begin
    if (exp_out.exists(cycle)) begin
      chk($sformatf("out_valid @%0d", cycle), 64'(out_valid), 1);
      chk($sformatf("out @%0d", cycle), 64'(out), 64'(exp_out[cycle]));
    end else begin
      chk("no result", 64'(out_valid), 0);
    end
    chk("dec_valid", 64'(dec_valid), 64'(exp_dec.exists(cycle)));
    if (stall) n_stall++;
  end

  function automatic bit is_free(logic [3:0] r, int c);
    return pend_until[r] < c;
  endfunction

  // Offer one micro-op; wait for acceptance; update the model.
  task automatic send(uop_t u, output int issue_cycle);
    @(negedge clk);
    uop = u; uop_valid = 1;
    forever begin
      @(posedge clk);
      if (uop_ready) break;
      @(negedge clk);
    end
    issue_cycle = cycle;            // value before this edge's update
    void'(model_issue(u, issue_cycle));
    #1 uop_valid = 0; uop = '0;
  endtask

  task automatic idle(int n);
    repeat (n) @(posedge clk);
  endtask

  function automatic uop_t mk(opcode_e op, int rd, int rs1, int rs2);
    uop_t u = '0;
    u.op = op; u.rd = 4'(rd); u.rs1 = 4'(rs1); u.rs2 = 4'(rs2);
    return u;
  endfunction

  task automatic ext_write(int addr, logic [7:0] v);
    @(negedge clk);
    ext_en = 1; ext_rw = 0; ext_addr = 4'(addr); ext_wdata = v;
    @(posedge clk); #1 ext_en = 0; ext_rw = 1;
    mregs[addr] = v;
  endtask

  int last_op_two = 0, last_issue = -10;

  initial begin
    int ic, ic2;
    uop = '0;
    foreach (mregs[i]) begin mregs[i] = 0; pend_until[i] = -1; end
    mcarry = 0; carry_ok = 0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    for (int i = 0; i < 16; i++) ext_write(i, 8'($urandom));
    monitor_on = 1;

    // ---- published cycle counts ----
    ext_write(0, 8'hC8); ext_write(1, 8'h5A); ext_write(2, 8'h7F); ext_write(3, 8'h93);
    send(mk(OP_ADD, 4, 0, 1), ic); idle(3);
    chk("INT8 add: 2 cycles", 64'(pend_until[4] - ic), 2);
    begin uop_t u = mk(OP_ADD, 5, 0, 1); u.w4 = 1; send(u, ic); idle(3);
      chk("INT4 add: 2 cycles", 64'(pend_until[5] - ic), 2); end
    // INT16: {r2,r0} + {r3,r1} -> {r7,r6}
    send(mk(OP_ADD, 6, 0, 1), ic);
    begin uop_t u = mk(OP_ADD, 7, 2, 3); u.use_carry = 1;
      while (cycle < carry_ok) begin @(posedge clk); #1; end
      send(u, ic2); n_chain++; end
    idle(4);
    chk("INT16 add: 4 cycles", 64'(pend_until[7] - ic), 4);
    chk("INT16 add value", 64'({mregs[7], mregs[6]}), 64'(16'(16'h7FC8 + 16'h935A)));
    // worked example: P(8,2) = 01110100 -> K = 2, E = 2, F = 0
    ext_write(8, 8'b01110100);
    begin uop_t u = mk(OP_PDEC, 9, 8, 0); u.es = 2; send(u, ic); n_dec8++; end
    idle(4);
    chk("P(8,2) decode: 2 cycles", 64'(pend_until[9] - ic), 2);
    chk("example K", 64'(mregs[9]), 2);
    chk("example E", 64'(mregs[10]), 2);
    // ignored decode outside posit mode
    @(negedge clk) posit_en = 0;
    begin uop_t u = mk(OP_PDEC, 12, 8, 0); u.es = 2; send(u, ic); n_blocked++; end
    idle(4);
    @(negedge clk) posit_en = 1;
    // a one-step op right behind a two-step op must stall one cycle
    send(mk(OP_XOR, 13, 0, 1), ic);
    send(mk(OP_AND, 14, 2, 3), ic2);
    chk("stall: AND behind XOR delayed", 64'(ic2 - ic), 2);
    idle(4);

    // ---- random back-to-back micro-ops ----
    for (int t = 0; t < 4000; t++) begin
      uop_t u = '0;
      int c;
      opcode_e ops [10] = '{OP_NOP, OP_AND, OP_OR, OP_NOT, OP_COMP, OP_ADD, OP_SUB, OP_XOR, OP_XNOR, OP_PDEC};
      u.op = ops[$urandom_range(1, 9)];
      if ($urandom_range(0, 30) == 0) begin
        @(negedge clk) posit_en = ~posit_en;
      end
      u.rs1 = 4'($urandom); u.rs2 = 4'($urandom); u.rd = 4'($urandom);
      u.use_carry = (u.op inside {OP_ADD, OP_SUB}) && $urandom_range(0, 2) == 0;
      u.w4 = 1'($urandom);
      u.n16 = 1'($urandom); u.es = 2'($urandom);
      c = cycle;       // a micro-op offered now issues at the earliest in this cycle
      // hazards: wait until sources and destinations are written back
      while (!(is_free(u.rs1, c) && is_free(u.rs2, c) && is_free(u.rd, c)
               && (u.op != OP_PDEC || (is_free(4'(u.rd + 1), c) && is_free(4'(u.rd + 2), c)
                                       && is_free(4'(u.rd + 3), c)))
               && (!u.use_carry || c >= carry_ok))) begin
        @(posedge clk); #1; c = cycle;
      end
      if (u.op == OP_PDEC && posit_en) begin if (u.n16) n_dec16++; else n_dec8++; end
      if (u.op == OP_PDEC && !posit_en) n_blocked++;
      if (u.use_carry) n_chain++;
      send(u, ic);
      if (two_cluster(u.op) && last_op_two && ic == last_issue + 1) n_b2b++;
      last_op_two = two_cluster(u.op); last_issue = ic;
    end
    idle(6);
    monitor_on = 0;

    // ---- read the whole register file back ----
    for (int i = 0; i < 16; i++) begin
      @(negedge clk); ext_en = 1; ext_rw = 1; ext_addr = 4'(i); #1;
      chk($sformatf("TRF[%0d]", i), 64'(ext_rdata), 64'(mregs[i]));
    end
    ext_en = 0;

    $display("stalls=%0d carry_chains=%0d dec8=%0d dec16=%0d blocked=%0d back_to_back_two_step=%0d",
             n_stall, n_chain, n_dec8, n_dec16, n_blocked, n_b2b);
    chk("stall happened", 64'(n_stall > 0), 1);
    chk("carry chain happened", 64'(n_chain > 0), 1);
    chk("8-bit decode happened", 64'(n_dec8 > 0), 1);
    chk("16-bit decode happened", 64'(n_dec16 > 0), 1);
    chk("ignored decode happened", 64'(n_blocked > 0), 1);
    chk("pipelined two-step ops happened", 64'(n_b2b > 0), 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
