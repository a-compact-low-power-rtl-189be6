// tb_q_cluster: self-checking test of a compute cluster (eight Q-functions).
// Each Q_i gets independent random arguments; after a rising edge every
// output bit must equal its own threshold comparison, so a swapped, shared
// or missing Q block is caught.
module tb_q_cluster;
  import talu_pkg::*;
  logic clk = 0, rst_n = 0;
  q_arg_t [NQ-1:0] args;
  logic [NQ-1:0] q;
  int checks = 0, failures = 0;

  q_cluster dut (.clk, .rst_n, .args, .q);

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    args = '0;
    #12 rst_n = 1;
    for (int t = 0; t < 2000; t++) begin
      logic [NQ-1:0] expct;
      for (int i = 0; i < NQ; i++) begin
        args[i].z0 = 1'($urandom); args[i].z1 = 1'($urandom);
        args[i].x  = 8'($urandom); args[i].y  = 8'($urandom);
        if ($urandom_range(0, 1) == 1) args[i].y = args[i].x;
        expct[i] = (int'(args[i].z0) + int'(args[i].x)) >= (int'(args[i].z1) + int'(args[i].y));
      end
      @(posedge clk); #1;
      checks++;
      if (q !== expct) begin
        failures++;
        $display("FAIL t=%0d q=%b exp=%b", t, q, expct);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
