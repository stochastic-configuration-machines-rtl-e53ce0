// output_summation: adds the real outputs of one hidden layer's nodes to the
// running model output.
//
// In a single-layer SCM the running value entering here is the mechanism
// model output; in a deep SCM the summations are chained, each layer's block
// taking the result of the previous one (mechanism -> layer 1 -> layer 2 ...).
// To keep the adder depth short, the node outputs are first summed in groups
// of GROUP nodes (twenty in the paper's 60-node example), then the group sums
// and acc_in are added.
//
// Timing (free running): y is registered into group sums on the first edge;
// on the second edge acc_out = acc_in + sum of group sums, so acc_in must be
// presented one cycle after the y it belongs to. Q7.25, wrapping at 32 bits.
module output_summation
  import scm_pkg::*;
#(
  parameter int  N_NODES = 60,
  parameter int  GROUP   = 20,
  localparam int NG      = (N_NODES + GROUP - 1) / GROUP
) (
  input  logic clk,
  input  fx_t  y [N_NODES],
  input  fx_t  acc_in,
  output fx_t  acc_out
);

  fx_t grp_q [NG];

  always_ff @(posedge clk) begin
    for (int g = 0; g < NG; g++) begin
      fx_t s;
      s = '0;
      for (int i = g * GROUP; i < (g + 1) * GROUP && i < N_NODES; i++) s += y[i];
      grp_q[g] <= s;
    end
  end

  always_ff @(posedge clk) begin
    fx_t s;
    s = acc_in;
    for (int g = 0; g < NG; g++) s += grp_q[g];
    acc_out <= s;
  end

endmodule
