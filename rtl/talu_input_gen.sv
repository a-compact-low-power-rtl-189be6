// talu_input_gen: the TALU input generator.
//
// Turns a micro-operation and its operands into the arguments {Z0, X, Z1, Y}
// of the sixteen Q-functions (Q0..Q7 of the primary cluster PC and of the
// secondary cluster SC).  The mappings are the published ones:
//   AND   Q_i: Z0=0   X=A_i      Z1=1 Y=~B_i         -> A_i & B_i
//   OR    Q_i: Z0=0   X=A_i      Z1=0 Y=~B_i         -> A_i | B_i
//   NOT   Q_i: Z0=0   X=~B_i     Z1=1 Y=0            -> ~B_i
//   COMP  Q_i: Z0=0   X=A[i:0]   Z1=0 Y=B[i:0]       -> A[i:0] >= B[i:0]
//   ADD 1 Q_i: Z0=C0  X=A[i:0]   Z1=1 Y=~B[i:0]      -> Carry_{i+1}      (PC)
//   ADD 2 Q_i: Z0=A_i X=B_i      Z1=0 Y={C_{i+1},~C_i} -> sum bit S_i   (SC)
//   XOR 1 Q_i: as AND                                 -> AND_i           (PC)
//   XOR 2 Q_i: Z0=A_i X=B_i      Z1=1 Y={AND_i,0}    -> A_i ^ B_i       (SC)
//   PDEC  Q_i: Z0=0   X=T[n-2:0] Z1=0 Y=2^(p-1)-2^i  -> V_i              (PC)
// where T = P if P[n-2] = 1, else ~P.  This design adds, as its own choices:
// SUB and XNOR run the ADD and XOR mappings with B inverted (SUB also forces
// C0 = 1); an ADD/SUB with use_carry takes C0 from the carry register; a
// 16-bit posit compares T[14:8] in the PC (thresholds 2^7-2^i, i = 0..6) and
// T[7:0] in the SC (thresholds 2^8-2^i, i = 0..7) in the same cycle.  Unused
// Q blocks get all-zero arguments.
//
// Purely combinational.  Stage 0 (the micro-op being issued) drives the PC
// arguments and the next pipeline-register word; stage 1 (the pipeline
// register plus the PC results) drives the SC arguments, except in a cycle
// that issues a 16-bit decode, when the SC takes the posit's low byte.
module talu_input_gen
  import talu_pkg::*;
(
  // stage 0: micro-op being issued
  input  logic             issue,      // uop is accepted this cycle
  input  uop_t             uop,
  input  logic [P-1:0]     rd_a,       // TRF[rs1]
  input  logic [P-1:0]     rd_b,       // TRF[rs2]
  input  logic             carry,      // carry register
  // stage 1: pipeline register and primary-cluster results
  input  stage_t           s1,
  input  logic [NQ-1:0]    pc_q,
  // outputs
  output q_arg_t [NQ-1:0]  pc_args,
  output q_arg_t [NQ-1:0]  sc_args,
  output stage_t           s1_next
);

  logic [P-1:0] b_eff;
  logic         c0;
  logic [15:0]  pword, tword;
  logic         pol;
  logic         dec16_issue;
  logic [NQ:0]  carries;       // Carry_0 .. Carry_8

  always_comb begin
    // operand B as used by both steps (inverted for SUB and XNOR)
    b_eff = (uop.op inside {OP_SUB, OP_XNOR}) ? ~rd_b : rd_b;
    c0    = uop.use_carry ? carry : (uop.op == OP_SUB);
    // posit word and the regime-normalised word T
    pword = uop.n16 ? {rd_a, rd_b} : {8'h00, rd_a};
    pol   = uop.n16 ? pword[14] : pword[6];
    tword = pol ? pword : ~pword;
    dec16_issue = issue && uop.op == OP_PDEC && uop.n16;
    carries     = {pc_q, s1.c0};

    // ---------------- primary cluster ----------------
    for (int i = 0; i < NQ; i++) begin
      pc_args[i] = '0;
      unique case (uop.op)
        OP_AND, OP_XOR, OP_XNOR: begin
          pc_args[i].x  = {7'b0, rd_a[i]};
          pc_args[i].z1 = 1'b1;
          pc_args[i].y  = {7'b0, ~b_eff[i]};
        end
        OP_OR: begin
          pc_args[i].x = {7'b0, rd_a[i]};
          pc_args[i].y = {7'b0, ~rd_b[i]};
        end
        OP_NOT: begin
          pc_args[i].x  = {7'b0, ~rd_b[i]};
          pc_args[i].z1 = 1'b1;
        end
        OP_COMP: begin
          pc_args[i].x = rd_a & P'((2 ** (i + 1)) - 1);
          pc_args[i].y = rd_b & P'((2 ** (i + 1)) - 1);
        end
        OP_ADD, OP_SUB: begin
          pc_args[i].z0 = c0;
          pc_args[i].x  = rd_a & P'((2 ** (i + 1)) - 1);
          pc_args[i].z1 = 1'b1;
          pc_args[i].y  = ~b_eff & P'((2 ** (i + 1)) - 1);
        end
        OP_PDEC: begin
          if (i < NQ - 1) begin
            pc_args[i].x = uop.n16 ? {1'b0, tword[14:8]} : {1'b0, tword[6:0]};
            pc_args[i].y = P'((2 ** (P - 1)) - (2 ** i));
          end
        end
        default: ;
      endcase
    end

    // ---------------- secondary cluster ----------------
    for (int i = 0; i < NQ; i++) begin
      sc_args[i] = '0;
      if (dec16_issue) begin
        sc_args[i].x = tword[7:0];
        sc_args[i].y = P'((2 ** P) - (2 ** i));
      end else if (s1.valid && (s1.op inside {OP_ADD, OP_SUB})) begin
        sc_args[i].z0 = s1.a[i];
        sc_args[i].x  = {7'b0, s1.b[i]};
        sc_args[i].y  = {6'b0, carries[i + 1], ~carries[i]};
      end else if (s1.valid && (s1.op inside {OP_XOR, OP_XNOR})) begin
        sc_args[i].z0 = s1.a[i];
        sc_args[i].x  = {7'b0, s1.b[i]};
        sc_args[i].z1 = 1'b1;
        sc_args[i].y  = {6'b0, pc_q[i], 1'b0};
      end
    end

    // ---------------- pipeline register word ----------------
    s1_next       = '0;
    s1_next.valid = issue;
    s1_next.op    = uop.op;
    s1_next.rd    = uop.rd;
    s1_next.a     = rd_a;
    s1_next.b     = b_eff;
    s1_next.c0    = c0;
    s1_next.w4    = uop.w4;
    s1_next.n16   = uop.n16;
    s1_next.es    = uop.es;
    s1_next.pword = pword;
  end

endmodule
