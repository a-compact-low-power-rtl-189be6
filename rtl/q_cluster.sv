// q_cluster: a compute cluster of NUM_Q independent Q-function blocks.
//
// The TALU holds two identical clusters, the primary (PC) and the secondary
// (SC).  Each Q_i gets its own arguments from the input generator, so an
// array of NUM_Q blocks yields an NUM_Q-bit result per clock: a bitwise logic
// result, the carry vector of an addition, the sum vector, or the
// thermometer vector V of the posit regime comparisons.
//
// Interface: clk is the cluster's gated clock (clk_pc or clk_sc); args[i]
// feeds Q_i; q[i] is Q_i's registered output, one clock after args.
module q_cluster
  import talu_pkg::*;
#(
  parameter int unsigned NUM_Q = talu_pkg::NQ
) (
  input  logic            clk,
  input  logic            rst_n,
  input  q_arg_t [NUM_Q-1:0] args,
  output logic   [NUM_Q-1:0] q
);

  for (genvar i = 0; i < NUM_Q; i++) begin : g_q
    q_func u_q (
      .clk  (clk),
      .rst_n(rst_n),
      .arg  (args[i]),
      .q    (q[i])
    );
  end

endmodule
