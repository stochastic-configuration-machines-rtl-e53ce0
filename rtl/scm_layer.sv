// scm_layer: one hidden layer of an SCM, all N_NODES nodes evaluated in
// parallel on the same input vector, together with the layer's parameter
// store (binary weights, lambda shifts, biases and output weights).
//
// Each node produces one bit for the next layer and one Q7.25 value for the
// output summation (see scm_node). IN_SIGNED tells whether the inputs are
// {-1,1} (the encoded model inputs, or a sign-activated previous layer) or
// {0,1} (a step-activated previous layer); ACT is this layer's activation.
// Latency from x to bits/y: 5 + ADD_STAGES cycles. The cfg_* port writes the
// parameter store (see layer_param_mem).
module scm_layer
  import scm_pkg::*;
#(
  parameter int   N_IN       = 25,
  parameter int   N_NODES    = 60,
  parameter bit   IN_SIGNED  = 1'b1,
  parameter act_e ACT        = ACT_SIGN,
  parameter int   ADD_STAGES = 1
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               cfg_we,
  input  fld_e               cfg_field,
  input  logic [13:0]        cfg_index,
  input  logic [31:0]        cfg_wdata,
  input  logic [N_IN-1:0]    x,
  output logic [N_NODES-1:0] bits,
  output fx_t                y [N_NODES]
);

  logic [N_IN-1:0] w     [N_NODES];
  lambda_t         shift [N_NODES];
  fx_t             bias  [N_NODES];
  fx_t             beta  [N_NODES];

  layer_param_mem #(.N_IN(N_IN), .N_NODES(N_NODES)) u_mem (
    .clk(clk), .rst_n(rst_n), .we(cfg_we), .field(cfg_field),
    .index(cfg_index), .wdata(cfg_wdata),
    .w(w), .shift(shift), .bias(bias), .beta(beta));

  for (genvar n = 0; n < N_NODES; n++) begin : g_node
    scm_node #(.N_IN(N_IN), .IN_SIGNED(IN_SIGNED), .ACT(ACT),
               .ADD_STAGES(ADD_STAGES)) u_node (
      .clk(clk), .x(x), .w(w[n]), .shift(shift[n]), .bias(bias[n]),
      .beta(beta[n]), .bit_out(bits[n]), .y(y[n]));
  end

endmodule
