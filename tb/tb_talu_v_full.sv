// tb_talu_v_full: TALU-V at its full size (128 lanes, 1024-bit vector port).
// Loads two 1024-bit operand vectors, runs one vector addition, one XOR
// pipelined behind it and one P(8,2) posit decode, reads the results back
// through the vector port and checks every lane against a reference.  The
// addition result must appear on 'out' two cycles after issue.
module tb_talu_v_full;
  import talu_pkg::*;
  localparam int N = 128;

  logic clk = 0, rst_n = 0, posit_en = 1;
  logic uop_valid = 0, uop_ready, stall, out_valid, dec_valid;
  uop_t uop = '0;
  logic vec_en = 0, vec_rw = 1;
  logic [3:0] vec_addr = 0;
  logic [N-1:0][7:0] vec_wdata = '0, vec_rdata, out;

  talu_v dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  logic [7:0] a [N], b [N];

  task automatic chk(string what, logic [63:0] got, logic [63:0] exp);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s got=%h exp=%h", what, got, exp);
    end
  endtask

  initial begin : watchdog
    repeat (2000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic signed [7:0] ref_k(logic [7:0] w);
    int run = 0;
    for (int i = 6; i >= 0; i--) if (w[i] == w[6]) run++; else break;
    return w[6] ? 8'(run - 1) : 8'(-run);
  endfunction

  initial begin
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    for (int l = 0; l < N; l++) begin a[l] = 8'($urandom); b[l] = 8'($urandom); end
    @(negedge clk); vec_en = 1; vec_rw = 0; vec_addr = 0;
    for (int l = 0; l < N; l++) vec_wdata[l] = a[l];
    @(negedge clk); vec_addr = 1;
    for (int l = 0; l < N; l++) vec_wdata[l] = b[l];
    @(negedge clk); vec_en = 0; vec_rw = 1;
    // ADD r2 = r0 + r1, then XOR r3 = r0 ^ r1 in the next cycle
    uop = '0; uop.op = OP_ADD; uop.rd = 2; uop.rs1 = 0; uop.rs2 = 1; uop_valid = 1;
    @(negedge clk);
    chk("ADD accepted", 64'(uop_ready), 1);
    uop.op = OP_XOR; uop.rd = 3;
    @(negedge clk);
    chk("ADD result on out after 2 cycles", 64'(out_valid), 1);
    for (int l = 0; l < N; l++) chk("out", 64'(out[l]), 64'(8'(a[l] + b[l])));
    uop = '0; uop.op = OP_PDEC; uop.rd = 8; uop.rs1 = 0; uop.es = 2;
    @(negedge clk);
    uop_valid = 0; uop = '0;
    repeat (4) @(negedge clk);
    vec_en = 1; vec_rw = 1;
    vec_addr = 2; #1;
    for (int l = 0; l < N; l++) chk("sum", 64'(vec_rdata[l]), 64'(8'(a[l] + b[l])));
    vec_addr = 3; #1;
    for (int l = 0; l < N; l++) chk("xor", 64'(vec_rdata[l]), 64'(a[l] ^ b[l]));
    vec_addr = 8; #1;
    for (int l = 0; l < N; l++) chk("posit K", 64'(vec_rdata[l]), 64'(8'(unsigned'(ref_k(a[l])))));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
