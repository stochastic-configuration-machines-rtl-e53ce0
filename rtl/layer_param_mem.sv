// layer_param_mem: model parameters of one hidden SCM layer.
//
// For each of the N_NODES nodes it stores
//   - the N_IN binary hidden weights ('0' = -1, '1' = +1),
//   - the scaling factor lambda as a 3-bit left-shift amount (lambda = 2^s,
//     s = 0..7, i.e. lambda in {1,2,...,128}),
//   - the bias, Q7.25,
//   - the output weight beta, Q7.25.
// Storing the weights as bits and lambda once per node, rather than the
// scaled real weights, is what gives the SCM its small memory footprint.
// All nodes are evaluated in parallel, so every parameter is read at once;
// the store is therefore built from registers, not a block RAM.
//
// Write port (this design's own interface; the paper does not say how the
// trained model reaches the FPGA): when we = 1, field/index/wdata write one
// 32-bit word on the rising clock edge. Weight words are addressed as
// {node, word}: weight j of a node is bit j%32 of its word j/32. Writes to
// nodes or words that do not exist are ignored. Reset (active low,
// asynchronous) clears every parameter.
module layer_param_mem
  import scm_pkg::*;
#(
  parameter int  N_IN    = 25,
  parameter int  N_NODES = 60,
  localparam int WPN     = (N_IN + 31) / 32,             // words per node
  localparam int WB      = (WPN > 1) ? $clog2(WPN) : 1   // word index bits
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              we,
  input  fld_e              field,
  input  logic [13:0]       index,
  input  logic [31:0]       wdata,
  output logic [N_IN-1:0]   w     [N_NODES],
  output lambda_t           shift [N_NODES],
  output fx_t               bias  [N_NODES],
  output fx_t               beta  [N_NODES]
);

  logic [WPN*32-1:0] wmem [N_NODES];

  wire [13:0]   node_w = index >> WB;        // node of a weight word
  wire [WB-1:0] word_w = index[WB-1:0];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int n = 0; n < N_NODES; n++) begin
        wmem[n]  <= '0;
        shift[n] <= '0;
        bias[n]  <= '0;
        beta[n]  <= '0;
      end
    end else if (we) begin
      // Decode by comparing against every node number, so no index is
      // truncated to the array width.
      for (int n = 0; n < N_NODES; n++) begin
        case (field)
          FLD_WEIGHT:
            if (32'(node_w) == n)
              for (int k = 0; k < WPN; k++)
                if (32'(word_w) == k) wmem[n][32*k +: 32] <= wdata;
          FLD_LAMBDA: if (32'(index) == n) shift[n] <= wdata[LAMBDA_W-1:0];
          FLD_BIAS:   if (32'(index) == n) bias[n]  <= wdata;
          default:    if (32'(index) == n) beta[n]  <= wdata;
        endcase
      end
    end
  end

  always_comb
    for (int n = 0; n < N_NODES; n++) w[n] = wmem[n][N_IN-1:0];

endmodule
