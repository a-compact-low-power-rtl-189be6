// tb_matmul_p8_front: front end of a 3x3 posit P(8,2) matrix multiplication
// on a full-size TALU-V (128 lanes).
//
// C = A x B needs the 27 products a_ik * b_kj.  Lane 9i+3j+k holds a_ik in
// r0 and b_kj in r1 (loaded through the vector port).  One micro-op program,
// broadcast to all lanes, decodes both posits and forms the two parts of a
// posit product that need no multiplier:
//     scale = 4*K_a + E_a + 4*K_b + E_b     (the product is 2^scale * (1+Fa)(1+Fb))
//     sign  = S_a xor S_b
// using only PDEC, AND, ADD and XOR.  The mantissa product and the final
// rounding and encoding need micro-op sequences that are not part of this
// design, so the test stops here.  Each lane is checked against a
// reference that converts the posit to a real number and takes floor(log2)
// of it; operands are positive, non-zero posits.  The program's cycle count
// is printed.  The design has no data interlock, so the program itself
// leaves two cycles after an operation whose result is read next.
module tb_matmul_p8_front;
  import talu_pkg::*;
  localparam int N = 128;

  logic clk = 0, rst_n = 0, posit_en = 1;
  logic uop_valid = 0, uop_ready, stall, out_valid, dec_valid;
  uop_t uop = '0;
  logic vec_en = 0, vec_rw = 1;
  logic [3:0] vec_addr = 0;
  logic [N-1:0][7:0] vec_wdata = '0, vec_rdata, out;

  talu_v dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0, cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;
  logic [7:0] pa [N], pb [N];

  task automatic chk(string what, logic [63:0] got, logic [63:0] exp);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s got=%h exp=%h", what, got, exp);
    end
  endtask

  initial begin : watchdog
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // real value of a positive P(8,2) posit, by the posit definition
  function automatic real posit_value(logic [7:0] p);
    int run = 0, i = 6, k, e = 0, m = 0, fbits = 0;
    real frac;
    while (i >= 0 && p[i] == p[6]) begin run++; i--; end
    i--;                                        // stop bit
    k = p[6] ? run - 1 : -run;
    for (int j = 0; j < 2; j++) begin e = e * 2; if (i >= 0) begin e += int'(p[i]); i--; end end
    while (i >= 0) begin m = m * 2 + int'(p[i]); fbits++; i--; end
    frac = 1.0 + real'(m) / real'(1 << fbits);
    return (2.0 ** (4 * k + e)) * frac;
  endfunction

  function automatic int floor_log2(real v);
    return int'($floor($ln(v) / $ln(2.0) + 1e-9));
  endfunction

  task automatic vload(int addr, logic [7:0] v [N]);
    @(negedge clk);
    vec_en = 1; vec_rw = 0; vec_addr = 4'(addr);
    for (int l = 0; l < N; l++) vec_wdata[l] = v[l];
    @(posedge clk); #1 vec_en = 0; vec_rw = 1;
  endtask

  task automatic op(opcode_e o, int rd, int rs1, int rs2, int es = 0, int wait_cycles = 0);
    @(negedge clk);
    uop = '0; uop.op = o; uop.rd = 4'(rd); uop.rs1 = 4'(rs1); uop.rs2 = 4'(rs2); uop.es = 2'(es);
    uop_valid = 1;
    forever begin @(posedge clk); if (uop_ready) break; @(negedge clk); end
    #1 uop_valid = 0; uop = '0;
    repeat (wait_cycles) @(posedge clk);
  endtask

  initial begin
    logic [7:0] c7 [N], z [N];
    int t0, t1;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    // A and B: random positive non-zero P(8,2) posits
    for (int l = 0; l < N; l++) begin
      pa[l] = {1'b0, 7'($urandom_range(1, 127))};
      pb[l] = {1'b0, 7'($urandom_range(1, 127))};
      c7[l] = 8'h07; z[l] = 8'h00;
    end
    // lane 9i+3j+k: a_ik, b_kj (matrices kept as the lanes' operands)
    for (int i = 0; i < 3; i++) for (int j = 0; j < 3; j++) for (int k = 0; k < 3; k++) begin
      pa[9*i + 3*j + k] = pa[3*i + k];
      pb[9*i + 3*j + k] = pb[64 + 3*k + j];
    end
    vload(0, pa); vload(1, pb); vload(15, c7);

    t0 = cyc;
    op(OP_PDEC, 2, 0, 0, 2);           // r2 = Ka, r3 = {Sa,E_a}, r4 = Fa
    op(OP_PDEC, 5, 1, 0, 2, 2);        // r5 = Kb, r6 = {Sb,E_b}, r7 = Fb
    op(OP_AND, 8, 3, 15);              // r8  = Ea
    op(OP_AND, 9, 6, 15);              // r9  = Eb
    op(OP_ADD, 10, 2, 2);              // r10 = 2Ka
    op(OP_ADD, 11, 5, 5, 0, 2);        // r11 = 2Kb
    op(OP_ADD, 10, 10, 10);            // r10 = 4Ka
    op(OP_ADD, 11, 11, 11, 0, 2);      // r11 = 4Kb
    op(OP_ADD, 10, 10, 8);             // r10 = 4Ka + Ea
    op(OP_ADD, 11, 11, 9, 0, 2);       // r11 = 4Kb + Eb
    op(OP_ADD, 12, 10, 11);            // r12 = scale
    op(OP_XOR, 13, 3, 6, 0, 2);        // r13 bit 7 = Sa ^ Sb
    t1 = cyc;
    $display("product front end: %0d cycles for 27 products in parallel", t1 - t0);

    for (int r = 12; r <= 13; r++) begin
      @(negedge clk); vec_en = 1; vec_rw = 1; vec_addr = 4'(r); #1;
      for (int l = 0; l < 27; l++) begin
        if (r == 12) begin
          automatic int exp_scale = floor_log2(posit_value(pa[l])) + floor_log2(posit_value(pb[l]));
          chk($sformatf("scale lane %0d (a=%h b=%h)", l, pa[l], pb[l]), 64'(vec_rdata[l]), {56'b0, 8'(exp_scale)});
        end else begin
          chk($sformatf("sign lane %0d", l), 64'(vec_rdata[l][7]), 64'(pa[l][7] ^ pb[l][7]));
        end
      end
    end
    vec_en = 0;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
