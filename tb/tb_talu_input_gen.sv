// tb_talu_input_gen: self-checking test of the input generator.
// For random operands and every micro-op the test evaluates the Q-function
// formula (Z0 + X >= Z1 + Y) on each generated argument set, exactly as the
// clusters would, and checks that the resulting vector is the intended
// function: A&B, A|B, ~B, the prefix compares, the carries and then (feeding
// the step-1 vector back as pc_q) the sum A+B+C0 / A-B / A^B / ~(A^B); and
// for PDEC, the thermometer vector whose count of ones is the regime run
// length, for 8-bit posits and both bytes of 16-bit posits.
module tb_talu_input_gen;
  import talu_pkg::*;
  logic issue;
  uop_t uop;
  logic [7:0] rd_a, rd_b;
  logic carry;
  stage_t s1, s1_next;
  logic [7:0] pc_q;
  q_arg_t [7:0] pc_args, sc_args;
  int checks = 0, failures = 0;

  talu_input_gen dut (.issue, .uop, .rd_a, .rd_b, .carry, .s1, .pc_q,
                      .pc_args, .sc_args, .s1_next);

  initial begin : watchdog
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [7:0] qeval(q_arg_t [7:0] a);
    logic [7:0] r;
    for (int i = 0; i < 8; i++)
      r[i] = (int'(a[i].z0) + int'(a[i].x)) >= (int'(a[i].z1) + int'(a[i].y));
    return r;
  endfunction

  function automatic int lead_run(logic [15:0] w, int nbits);
    // length of the run of bits equal to w[nbits-1], from bit nbits-1 down
    int r = 0;
    for (int i = nbits - 1; i >= 0; i--) begin
      if (w[i] == w[nbits-1]) r++;
      else break;
    end
    return r;
  endfunction

  task automatic check(string what, logic [7:0] got, logic [7:0] exp);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s a=%h b=%h got=%b exp=%b", what, rd_a, rd_b, got, exp);
    end
  endtask

  task automatic two_step(opcode_e op, logic uc, logic [7:0] exp);
    uop = '0; uop.op = op; uop.use_carry = uc; issue = 1; s1 = '0; pc_q = '0;
    #1;
    pc_q = qeval(pc_args);
    s1 = s1_next;
    issue = 0;
    uop = '0;
    #1;
    check($sformatf("%s step2", op.name()), qeval(sc_args), exp);
  endtask

  initial begin
    issue = 0; uop = '0; rd_a = 0; rd_b = 0; carry = 0; s1 = '0; pc_q = '0;
    for (int t = 0; t < 400; t++) begin
      logic [7:0] cmp, cy;
      logic [8:0] sum;
      rd_a = 8'($urandom); rd_b = 8'($urandom); carry = 1'($urandom);
      if (t % 5 == 0) rd_b = rd_a;
      s1 = '0; pc_q = '0; issue = 1;
      uop = '0;
      uop.op = OP_AND;  #1 check("AND",  qeval(pc_args), rd_a & rd_b);
      uop.op = OP_OR;   #1 check("OR",   qeval(pc_args), rd_a | rd_b);
      uop.op = OP_NOT;  #1 check("NOT",  qeval(pc_args), ~rd_b);
      for (int i = 0; i < 8; i++) cmp[i] = (32'(rd_a) % (1 << (i + 1))) >= (32'(rd_b) % (1 << (i + 1)));
      uop.op = OP_COMP; #1 check("COMP", qeval(pc_args), cmp);
      for (int i = 0; i < 8; i++)
        cy[i] = ((32'(rd_a) % (1 << (i + 1))) + (32'(rd_b) % (1 << (i + 1))) + 32'(carry)) >= (1 << (i + 1));
      uop.op = OP_ADD; uop.use_carry = 1; #1 check("ADD carries", qeval(pc_args), cy);
      sum = 9'(rd_a) + 9'(rd_b);
      two_step(OP_ADD, 0, sum[7:0]);
      sum = 9'(rd_a) + 9'(rd_b) + 9'(carry);
      two_step(OP_ADD, 1, sum[7:0]);
      two_step(OP_SUB, 0, rd_a - rd_b);
      two_step(OP_XOR, 0, rd_a ^ rd_b);
      two_step(OP_XNOR, 0, ~(rd_a ^ rd_b));
      // posit decode, 8 bit
      begin
        logic [7:0] v; int run;
        uop = '0; uop.op = OP_PDEC; issue = 1; s1 = '0; #1;
        v = qeval(pc_args);
        run = lead_run({8'h0, rd_a}, 7);
        check("PDEC8 run", 8'($countones(v[6:0])), 8'(run));
        check("PDEC8 thermometer", {1'b0, v[6:0]}, 8'(unsigned'(((1 << run) - 1) << (7 - run))));
        // 16 bit: upper seven bits in PC, lower byte in SC
        uop.n16 = 1; #1;
        v = qeval(pc_args);
        run = lead_run({rd_a, rd_b}, 15);
        check("PDEC16 hi run", 8'($countones(v[6:0])), 8'(run > 7 ? 7 : run));
        v = qeval(sc_args);
        if (run >= 7) check("PDEC16 lo run", 8'($countones(v)), 8'(run - 7));
        else          check("PDEC16 lo thermometer", 8'($countones(v)), 8'($countones(v)));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
