// tb_talu_shifter: self-checking test of the decode shifter.
// For random 8- and 16-bit posits and e = 0..3 a bit-by-bit reference walks
// past the sign, the regime run and its stop bit, and collects the exponent
// and the left-aligned mantissa; the shifter, given the reference K, must
// return the same sign, E and F.  Includes the worked example 01110100,
// e = 2 (K = 2, E = 2, F = 0).
module tb_talu_shifter;
  logic [15:0] pword; logic n16, pol, s; logic [1:0] es;
  logic signed [7:0] k; logic [2:0] e; logic [15:0] f;
  talu_shifter dut (.*);
  int checks = 0, failures = 0;
  task automatic chk(string what, logic [63:0] got, logic [63:0] exp);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s got=%h exp=%h", what, got, exp);
    end
  endtask
  initial begin : watchdog
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  task automatic ref_check(logic [15:0] w, logic w16, logic [1:0] ee);
    int n = w16 ? 16 : 8, run = 0, idx, kk;
    logic p; logic [2:0] ex = 0; logic [15:0] fr = 0;
    p = w[n-2];
    idx = n - 2;
    while (idx >= 0 && w[idx] == p) begin run++; idx--; end
    idx--;                                   // stop bit
    kk = p ? run - 1 : -run;
    for (int j = 0; j < ee; j++) begin
      ex = ex << 1;
      if (idx >= 0) begin ex[0] = w[idx]; idx--; end
    end
    for (int j = 15; j >= 0 && idx >= 0; j--) begin fr[j] = w[idx]; idx--; end
    pword = w; n16 = w16; es = ee; pol = p; k = 8'(kk);
    #1;
    chk("sign", 64'(s), 64'(w[n-1]));
    chk($sformatf("E w=%h n16=%0d e=%0d", w, w16, ee), 64'(e), 64'(ex));
    chk($sformatf("F w=%h n16=%0d e=%0d", w, w16, ee), 64'(f), 64'(fr));
  endtask
  initial begin
    ref_check(16'h0074, 0, 2'd2);
    chk("example E", 64'(e), 64'(2));
    chk("example F", 64'(f), 64'(0));
    for (int t = 0; t < 3000; t++) ref_check(16'($urandom), 1'($urandom), 2'($urandom));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
