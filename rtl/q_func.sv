// q_func: one Q-function threshold block (Q_i of a compute cluster).
//
// Every rising clock edge it registers
//     q = (Z0 + sum_j 2^j X_j) >= (Z1 + sum_j 2^j Y_j)
// for p-bit vectors X, Y and single bits Z0, Z1.  With the argument mappings
// produced by the input generator this one template gives AND, OR, NOT,
// magnitude compare, the carry and the sum bit of an adder, the two halves of
// XOR, and the regime comparisons of the posit decode.
//
// The comparison is written as a (p+1)-bit adder and comparator, which is the
// functional description of the block; the transistor-level threshold cell a
// full-custom version would use is not reproduced.  Reset (asynchronous,
// active low, to 0) is this design's choice.
//
// Interface: clk is the cluster's gated clock; arg = {z0, x, z1, y}; q is the
// registered result, valid one clock after arg.
module q_func
  import talu_pkg::*;
(
  input  logic   clk,
  input  logic   rst_n,
  input  q_arg_t arg,
  output logic   q
);

  logic [P:0] lhs, rhs;

  always_comb begin
    lhs = {1'b0, arg.x} + {{P{1'b0}}, arg.z0};
    rhs = {1'b0, arg.y} + {{P{1'b0}}, arg.z1};
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) q <= 1'b0;
    else        q <= (lhs >= rhs);
  end

endmodule
