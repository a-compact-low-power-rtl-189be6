// talu_pkg: types and constants shared by the transprecision ALU (TALU) and
// its vector array (TALU-V).
//
// The TALU computes every operation with banks of Q-function threshold
// blocks (Q(p,Z0,X,Z1,Y) = Z0 + X >= Z1 + Y, p = 8).  The micro-operation
// encoding, the register-file depth and the field layout of a decoded posit
// are this design's own choices; the operation set, the operand width p = 8
// and the vector width of 128 lanes follow the published description.
package talu_pkg;

  // Operand width of one Q-function (p) and of one TALU lane.
  localparam int unsigned P = 8;
  // Q-functions per compute cluster (Q0..Q7).
  localparam int unsigned NQ = 8;
  // Depth of the TALU register file (assumed, not published).
  localparam int unsigned TRF_DEPTH = 16;
  localparam int unsigned RA_W = $clog2(TRF_DEPTH);

  // Micro-operations.  AND/OR/NOT/COMP use the primary cluster only; ADD,
  // SUB, XOR and XNOR use the primary cluster (step 1) and then the secondary
  // cluster (step 2); PDEC is the posit decode.
  typedef enum logic [3:0] {
    OP_NOP  = 4'd0,
    OP_AND  = 4'd1,
    OP_OR   = 4'd2,
    OP_NOT  = 4'd3,
    OP_COMP = 4'd4,
    OP_ADD  = 4'd5,
    OP_SUB  = 4'd6,
    OP_XOR  = 4'd7,
    OP_XNOR = 4'd8,
    OP_PDEC = 4'd9
  } opcode_e;

  // One micro-operation as issued to a TALU.
  //   rd        destination register (PDEC writes rd .. rd+3)
  //   rs1, rs2  sources (A = rs1, B = rs2; PDEC: rs1 = posit MSB byte,
  //             rs2 = posit LSB byte when n16 is set)
  //   use_carry ADD/SUB take their carry-in from the carry register
  //   w4        4-bit integer: the carry register keeps Carry_4, not Carry_8
  //   n16       PDEC on a 16-bit posit (otherwise 8-bit)
  //   es        exponent size e of the posit, 0..3
  typedef struct packed {
    opcode_e         op;
    logic [RA_W-1:0] rd;
    logic [RA_W-1:0] rs1;
    logic [RA_W-1:0] rs2;
    logic            use_carry;
    logic            w4;
    logic            n16;
    logic [1:0]      es;
  } uop_t;

  // Arguments of one Q-function: Z0 + X >= Z1 + Y.
  typedef struct packed {
    logic         z0;
    logic [P-1:0] x;
    logic         z1;
    logic [P-1:0] y;
  } q_arg_t;

  // What the pipeline register carries from the primary to the secondary
  // stage.
  typedef struct packed {
    logic            valid;
    opcode_e         op;
    logic [RA_W-1:0] rd;
    logic [P-1:0]    a;      // operand A
    logic [P-1:0]    b;      // operand B, already inverted for SUB/XNOR
    logic            c0;     // carry-in (Carry_0)
    logic            w4;
    logic            n16;
    logic [1:0]      es;
    logic [15:0]     pword;  // posit bits (8-bit posit in [7:0])
  } stage_t;

  // A decoded posit as written back into the register file.
  typedef struct packed {
    logic            valid;
    logic [RA_W-1:0] rd;
    logic            n16;
    logic            s;      // sign bit
    logic signed [7:0] k;    // regime value K
    logic [2:0]      e;      // exponent bits, right-aligned
    logic [15:0]     f;      // mantissa bits, left-aligned (8-bit posit: [15:8])
  } dec_result_t;

  function automatic logic two_cluster(opcode_e op);
    return op inside {OP_ADD, OP_SUB, OP_XOR, OP_XNOR};
  endfunction

  function automatic logic one_cluster(opcode_e op);
    return op inside {OP_AND, OP_OR, OP_NOT, OP_COMP};
  endfunction

endpackage
