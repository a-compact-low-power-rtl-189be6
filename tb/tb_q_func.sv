// tb_q_func: self-checking test of one Q-function block.
// Random and corner arguments {Z0, X, Z1, Y}; after each rising edge the
// registered output must equal (Z0 + X >= Z1 + Y), computed here with plain
// integer arithmetic.  Also checks the reset value.
module tb_q_func;
  import talu_pkg::*;
  logic clk = 0, rst_n = 0;
  q_arg_t arg;
  logic q;
  int checks = 0, failures = 0;

  q_func dut (.clk, .rst_n, .arg, .q);

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic apply(q_arg_t a);
    int l, r;
    arg = a;
    @(posedge clk); #1;
    l = int'(a.z0) + int'(a.x);
    r = int'(a.z1) + int'(a.y);
    checks++;
    if (q !== (l >= r)) begin
      failures++;
      $display("FAIL z0=%0d x=%0d z1=%0d y=%0d q=%0b", a.z0, a.x, a.z1, a.y, q);
    end
  endtask

  initial begin
    arg = '0;
    #12;
    checks++; if (q !== 1'b0) failures++;
    rst_n = 1;
    apply('{z0:1'b0, x:8'd255, z1:1'b1, y:8'd255});
    apply('{z0:1'b1, x:8'd255, z1:1'b1, y:8'd255});
    apply('{z0:1'b1, x:8'd0,   z1:1'b0, y:8'd1});
    apply('{z0:1'b0, x:8'd0,   z1:1'b1, y:8'd0});
    apply('{z0:1'b1, x:8'd127, z1:1'b0, y:8'd128});
    for (int i = 0; i < 3000; i++) begin
      q_arg_t a;
      a.z0 = 1'($urandom); a.z1 = 1'($urandom);
      a.x = 8'($urandom); a.y = 8'($urandom);
      if (i % 3 == 0) a.y = a.x + 8'($urandom_range(0, 2)) - 8'd1;
      apply(a);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
