// tb_talu_addr_gen: self-checking test of the decode address generator.
// Every thermometer vector (and random other vectors) with both polarities:
// the address must be {pol, number of ones}.
module tb_talu_addr_gen;
  logic [7:0] v; logic pol; logic [4:0] addr;
  talu_addr_gen dut (.v, .pol, .addr);
  int checks = 0, failures = 0;
  task automatic chk(string what, logic [63:0] got, logic [63:0] exp);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s got=%h exp=%h", what, got, exp);
    end
  endtask
  initial begin : watchdog
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    for (int r = 0; r <= 8; r++) for (int p = 0; p < 2; p++) begin
      v = 8'(unsigned'((1 << r) - 1) << (8 - r)); pol = 1'(p); #1;
      chk($sformatf("therm r=%0d pol=%0d", r, p), 64'(addr), 64'(p * 16 + r));
    end
    for (int t = 0; t < 300; t++) begin
      automatic int ones = 0;
      v = 8'($urandom); pol = 1'($urandom);
      for (int i = 0; i < 8; i++) if (v[i]) ones++;
      #1 chk("random", 64'(addr), 64'(int'(pol) * 16 + ones));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
