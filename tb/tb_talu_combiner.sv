// tb_talu_combiner: self-checking test of the decode combiner.
// Checks the V selection (PC Q0..Q6 normally, SC Q0..Q7 in the second
// look-up) and the merge of two look-ups for every upper/lower run length
// of a 16-bit posit: the final K must be that of the total run.
module tb_talu_combiner;
  logic clk = 0, rst_n = 0, hi_phase = 0, lo_phase = 0, pol = 0;
  logic [7:0] pc_q, sc_q, v_sel;
  logic signed [7:0] k_lut, k_out;
  talu_combiner dut (.*);
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
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    pc_q = 0; sc_q = 0; k_lut = 0;
    #12 rst_n = 1;
    for (int t = 0; t < 50; t++) begin
      @(negedge clk);
      pc_q = 8'($urandom); sc_q = 8'($urandom); lo_phase = 1'($urandom); #1;
      chk("v_sel", 64'(v_sel), lo_phase ? 64'(sc_q) : 64'({1'b0, pc_q[6:0]}));
    end
    lo_phase = 0;
    for (int p = 0; p < 2; p++)
      for (int rh = 1; rh <= 7; rh++)
        for (int rl = 0; rl <= 8; rl++) begin
          automatic int total = (rh == 7) ? 7 + rl : rh;
          automatic int k_exp = p ? total - 1 : -total;
          @(negedge clk);
          pol = 1'(p); hi_phase = 1; lo_phase = 0;
          k_lut = 8'(p ? rh - 1 : -rh);
          #1 chk("pass-through", 64'(k_out), 64'(k_lut));
          @(negedge clk);
          hi_phase = 0; lo_phase = 1;
          k_lut = 8'(p ? rl - 1 : -rl);
          #1 chk($sformatf("merge pol=%0d hi=%0d lo=%0d", p, rh, rl), 64'(signed'(k_out)), 64'(k_exp));
        end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
