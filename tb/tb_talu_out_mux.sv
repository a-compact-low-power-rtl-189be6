// tb_talu_out_mux: self-checking test of the output multiplexer.
// A finished one-step op must put the PC result and its rd on the write
// port, a finished two-step op the SC result, neither: no write.
module tb_talu_out_mux;
  logic pc_done, sc_done, we; logic [3:0] pc_rd, sc_rd, waddr;
  logic [7:0] pc_q, sc_q, out;
  talu_out_mux dut (.*);
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
    for (int t = 0; t < 500; t++) begin
      automatic int sel = $urandom_range(0, 2);
      pc_done = (sel == 1); sc_done = (sel == 2);
      pc_rd = 4'($urandom); sc_rd = 4'($urandom); pc_q = 8'($urandom); sc_q = 8'($urandom);
      #1;
      chk("we", 64'(we), 64'(sel != 0));
      if (sel == 1) begin chk("pc out", 64'(out), 64'(pc_q)); chk("pc rd", 64'(waddr), 64'(pc_rd)); end
      if (sel == 2) begin chk("sc out", 64'(out), 64'(sc_q)); chk("sc rd", 64'(waddr), 64'(sc_rd)); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
