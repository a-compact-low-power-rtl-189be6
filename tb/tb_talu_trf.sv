// tb_talu_trf: self-checking test of the TALU register file.
// A reference array tracks external writes, ALU write-backs and 3- or
// 4-register decode write-backs (with address wrap-around); all three read
// ports are compared with it after every cycle, and RW = 1 must not write.
module tb_talu_trf;
  import talu_pkg::*;
  logic clk = 0, rst_n = 0;
  logic [3:0] ra1, ra2, ext_addr, waddr, dec_rd;
  logic [7:0] rd1, rd2, ext_wdata, ext_rdata, wdata;
  logic ext_en, ext_rw, we, dec_we, dec_n16;
  logic [3:0][7:0] dec_data;
  logic [7:0] model [16];
  talu_trf dut (.*);
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
    ext_en = 0; ext_rw = 1; we = 0; dec_we = 0; dec_n16 = 0;
    ra1 = 0; ra2 = 0; ext_addr = 0; waddr = 0; dec_rd = 0; ext_wdata = 0; wdata = 0; dec_data = '0;
    foreach (model[i]) model[i] = 0;
    #12 rst_n = 1;
    for (int t = 0; t < 2000; t++) begin
      @(negedge clk);
      ext_en = 1'($urandom); ext_rw = 1'($urandom); ext_addr = 4'($urandom); ext_wdata = 8'($urandom);
      we = ($urandom_range(0, 3) == 0); waddr = 4'($urandom); wdata = 8'($urandom);
      dec_we = !we && ($urandom_range(0, 5) == 0); dec_n16 = 1'($urandom); dec_rd = 4'($urandom);
      dec_data = {$urandom};
      if (ext_en && !ext_rw) model[ext_addr] = ext_wdata;
      if (we) model[waddr] = wdata;
      if (dec_we) for (int j = 0; j < 4; j++) if (j < 3 || dec_n16) model[4'(dec_rd + 4'(j))] = dec_data[j];
      @(posedge clk); #1;
      ext_en = 0; we = 0; dec_we = 0;
      ra1 = 4'($urandom); ra2 = 4'($urandom); ext_addr = 4'($urandom);
      #1;
      chk("rd1", 64'(rd1), 64'(model[ra1]));
      chk("rd2", 64'(rd2), 64'(model[ra2]));
      chk("ext_rdata", 64'(ext_rdata), 64'(model[ext_addr]));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
