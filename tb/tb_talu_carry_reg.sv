// tb_talu_carry_reg: self-checking test of the carry register.
// It must load Carry_8 (pc_q[7]) or, for 4-bit operations, Carry_4
// (pc_q[3]) when load is high, and hold its value otherwise.
module tb_talu_carry_reg;
  import talu_pkg::*;
  logic clk = 0, rst_n = 0, load, w4, carry;
  logic [7:0] pc_q;
  talu_carry_reg dut (.clk, .rst_n, .load, .w4, .pc_q, .carry);
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
    logic model;
    load = 0; w4 = 0; pc_q = 8'hff;
    #7 chk("reset", 64'(carry), 0);
    #5 rst_n = 1; model = 0;
    for (int t = 0; t < 500; t++) begin
      @(negedge clk);
      load = 1'($urandom); w4 = 1'($urandom); pc_q = 8'($urandom);
      if (load) model = w4 ? pc_q[3] : pc_q[7];
      @(posedge clk); #1;
      chk("carry", 64'(carry), 64'(model));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
