// scm_node: one hidden node of a stochastic configuration machine.
//
// Computes, without a multiplier,
//   pre = (x . w) * lambda + bias,   bit = (pre >= 0),
//   y   = bit ? beta : (ACT == ACT_SIGN ? -beta : 0)
// where x is the node input vector, w its binary weights, lambda = 2^shift
// the node's scaling factor and beta its output weight. With IN_SIGNED = 1
// the inputs are {-1,+1} (stored as 0/1) and the dot product is an XNOR-count
// (xnor_count); with IN_SIGNED = 0 the inputs are {0,1}, coming from a
// step-activated layer, and the flag-vector count of zero_one_dot is used.
// bit is the node's input to the next layer; y feeds the output summation.
// Sign activation gives +beta/-beta (-beta as the two's complement of beta),
// step activation beta/0.
//
// Pipeline, following the paper's cycle-by-cycle list for a single-layer
// model: XNOR (or flag vectors) -> counts -> difference -> left shift by
// lambda -> bias add -> threshold and beta select. Latency from x to
// bit/y is 5 + ADD_STAGES cycles (6 with the default single-cycle counts).
// w, shift, bias and beta are static model parameters and are not pipelined.
//
// Own choices: the threshold is "pre < 0 gives 0, else 1" (the paper's
// figure and cycle list; its activation text says "greater than 0"); the
// bias is Q7.25 and the bias add is done at a width wide enough that no
// overflow occurs.
module scm_node
  import scm_pkg::*;
#(
  parameter int   N_IN       = 25,
  parameter bit   IN_SIGNED  = 1'b1,
  parameter act_e ACT        = ACT_SIGN,
  parameter int   ADD_STAGES = 1,
  localparam int  DOT_W      = $clog2(N_IN + 1) + 1
) (
  input  logic            clk,
  input  logic [N_IN-1:0] x,
  input  logic [N_IN-1:0] w,
  input  lambda_t         shift,
  input  fx_t             bias,
  input  fx_t             beta,
  output logic            bit_out,
  output fx_t             y
);

  localparam int SH_W  = DOT_W + 7;                 // dot * 128 at most
  localparam int ACC_W = ((SH_W + FX_FRAC > FX_W) ? SH_W + FX_FRAC : FX_W) + 1;

  logic signed [DOT_W-1:0] dot;
  logic signed [SH_W-1:0]  sh_q;
  logic signed [ACC_W-1:0] pre_q;

  if (IN_SIGNED) begin : g_xnor
    xnor_count #(.N_IN(N_IN), .ADD_STAGES(ADD_STAGES)) u_dot (
      .clk(clk), .x(x), .w(w), .dot(dot));
  end else begin : g_01
    zero_one_dot #(.N_IN(N_IN), .ADD_STAGES(ADD_STAGES)) u_dot (
      .clk(clk), .x(x), .w(w), .dot(dot));
  end

  always_ff @(posedge clk) begin
    sh_q    <= SH_W'(dot) <<< shift;
    pre_q   <= (ACC_W'(sh_q) <<< FX_FRAC) + ACC_W'(bias);
    bit_out <= ~pre_q[ACC_W-1];
    if (!pre_q[ACC_W-1])    y <= beta;
    else if (ACT == ACT_SIGN) y <= -beta;
    else                    y <= '0;
  end

endmodule
