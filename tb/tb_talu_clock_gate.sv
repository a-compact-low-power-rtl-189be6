// tb_talu_clock_gate: self-checking test of the cluster clock gates.
// Enables change at random while the clock is low (as the issue control
// drives them); each gated clock must pulse in exactly the cycles whose
// enable was high, and never while its enable was low.
module tb_talu_clock_gate;
  logic clk = 0, pc_en = 0, sc_en = 0, clk_pc, clk_sc;
  int pc_pulses = 0, sc_pulses = 0;
  talu_clock_gate dut (.clk, .pc_en, .sc_en, .clk_pc, .clk_sc);
  always #5 clk = ~clk;
  always @(posedge clk_pc) pc_pulses++;
  always @(posedge clk_sc) sc_pulses++;
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
  initial begin
    int exp_pc = 0, exp_sc = 0;
    for (int t = 0; t < 500; t++) begin
      @(negedge clk); #1;
      pc_en = 1'($urandom); sc_en = 1'($urandom);
      exp_pc += int'(pc_en); exp_sc += int'(sc_en);
      @(posedge clk); #1;
      // glitch check: change enables while clk is high, must not matter
      pc_en = ~pc_en; sc_en = ~sc_en;
      chk("clk_pc pulses", 64'(pc_pulses), 64'(exp_pc));
      chk("clk_sc pulses", 64'(sc_pulses), 64'(exp_sc));
      chk("clk_pc level", 64'(clk_pc), 64'(!pc_en));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
