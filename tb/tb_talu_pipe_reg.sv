// tb_talu_pipe_reg: self-checking test of the PC->SC pipeline register.
// Random stage words must appear on q exactly one rising edge after d, and
// reset must clear the register.
module tb_talu_pipe_reg;
  import talu_pkg::*;
  logic clk = 0, rst_n = 0;
  stage_t d, q;
  talu_pipe_reg dut (.clk, .rst_n, .d, .q);
  always #5 clk = ~clk;
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
    d = '1;
    #7 chk("reset", 64'(q), 64'(0));
    #5 rst_n = 1;
    for (int t = 0; t < 200; t++) begin
      @(negedge clk);
      d = stage_t'({$urandom, $urandom});
      @(posedge clk); #1;
      chk("captured", 64'(q), 64'(d));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
