// tb_talu_regime_lut: self-checking test of the regime look-up table.
// For run lengths 0..8 the table must give K = run-1 for a run of ones and
// K = -run for a run of zeros (the posit regime definition).
module tb_talu_regime_lut;
  logic [4:0] addr; logic signed [7:0] k;
  talu_regime_lut dut (.addr, .k);
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
    for (int r = 0; r <= 8; r++) begin
      addr = 5'(16 + r); #1 chk($sformatf("ones run %0d", r), 64'(signed'(k)), 64'(r - 1));
      addr = 5'(r);      #1 chk($sformatf("zeros run %0d", r), 64'(signed'(k)), 64'(-r));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
