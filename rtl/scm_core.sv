// scm_core: pipelined evaluation of a single-layer or deep stochastic
// configuration machine,
//   Y = P(X) + sum_k  beta_k . H_k(X),   H_k = phi(lambda_k * W_k^T H_{k-1} + b_k)
// on binary (encoded) inputs X, with no multipliers.
//
// Structure: an input register feeds the mechanism model and hidden layer 1
// in parallel. Layer k+1 takes layer k's activation bits. The output
// summations form a chain: the mechanism output is added to layer 1's node
// outputs, that result to layer 2's, and so on; the last sum is the model
// output. Each layer's summation overlaps the next layer's node evaluation.
//
// Timing, counting the clock edge that loads the input as cycle 1 (the
// paper's cycle list for one layer): cycles 2-7 node pipeline (XNOR, count,
// difference, shift, bias, activation), 8 group sums, 9 final sum. One more
// cycle per count/mechanism sum with ADD_STAGES = 2. In general
//   LATENCY = 3 + N_LAYERS * (5 + ADD_STAGES)
// which gives the paper's 9 (ADD_STAGES = 1) and 10 (ADD_STAGES = 2) cycles
// for single-layer models. For deep models the paper reports 18-19 (two
// layers) and 23-24 (three layers) cycles without giving the stage split;
// this pipeline needs 15 or 17 (two layers) and 21 or 24 (three layers)
// with ADD_STAGES = 1 or 2. The pipeline accepts a new input every
// cycle; out_valid marks each result.
//
// Configuration (own choice of interface): cfg_addr[19:16] selects the
// target (0 = mechanism model, k = hidden layer k); see scm_pkg for the rest
// of the address map.
//
// Each layer's activation bits go into a common array, lbits. The last
// layer's entry has no reader, because nothing follows the last layer, and
// lint tools report it as unused. Synthesis removes it.
module scm_core
  import scm_pkg::*;
#(
  parameter int   N_IN       = 25,                 // binary inputs
  parameter int   N_LAYERS   = 1,                  // 1..3
  parameter int   NODES [3]  = '{60, 60, 60},      // nodes per layer
  parameter act_e ACT   [3]  = '{ACT_SIGN, ACT_SIGN, ACT_SIGN},
  parameter int   ADD_STAGES = 1,
  parameter int   GROUP      = 20,
  localparam int  LAT_LAYER  = 5 + ADD_STAGES,
  localparam int  LATENCY    = 3 + N_LAYERS * LAT_LAYER
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              cfg_we,
  input  logic [CFG_AW-1:0] cfg_addr,
  input  logic [31:0]       cfg_wdata,
  input  logic              in_valid,
  input  logic [N_IN-1:0]   in_bits,
  output logic              out_valid,
  output fx_t               out_y
);

  localparam int MAXN = (NODES[0] > NODES[1]) ?
                        ((NODES[0] > NODES[2]) ? NODES[0] : NODES[2]) :
                        ((NODES[1] > NODES[2]) ? NODES[1] : NODES[2]);

  // ---- input register (cycle 1) and valid pipeline -------------------
  logic [N_IN-1:0]    x_q;
  logic [LATENCY-1:0] vld_q;

  always_ff @(posedge clk) x_q <= in_bits;

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) vld_q <= '0;
    else        vld_q <= {vld_q[LATENCY-2:0], in_valid};

  assign out_valid = vld_q[LATENCY-1];

  // ---- configuration decode -------------------------------------------
  wire [3:0] cfg_tgt = cfg_addr[19:16];

  // ---- mechanism model --------------------------------------------------
  fx_t mech_y, mech_al;

  mechanism_model #(.N_IN(N_IN), .ADD_STAGES(ADD_STAGES)) u_mech (
    .clk(clk), .rst_n(rst_n), .we(cfg_we && cfg_tgt == 4'd0),
    .index(cfg_addr[15:0]), .wdata(cfg_wdata), .x(x_q), .p_out(mech_y));

  // mechanism result ready at edge 2+ADD; layer-1 summation needs it at
  // edge 2+LAT_LAYER
  pipe_delay #(.W(FX_W), .D(LAT_LAYER - ADD_STAGES)) u_mech_dly (
    .clk(clk), .d(mech_y), .q(mech_al));

  // ---- hidden layers and chained output summations -----------------------
  logic [MAXN-1:0] lbits [N_LAYERS];
  fx_t             acc   [N_LAYERS];

  for (genvar k = 0; k < N_LAYERS; k++) begin : g_layer
    localparam int   NI  = (k == 0) ? N_IN : NODES[k-1];
    localparam int   NN  = NODES[k];
    localparam bit   SIN = (k == 0) ? 1'b1 : (ACT[k-1] == ACT_SIGN);

    logic [NI-1:0] lx;
    logic [NN-1:0] b;
    fx_t           y [NN];
    fx_t           acc_in;

    if (k == 0) begin : g_in0
      assign lx     = x_q;
      assign acc_in = mech_al;
    end else begin : g_ink
      assign lx = lbits[k-1][NI-1:0];
      // previous summation result ready at edge 3+k*LAT, needed at 2+(k+1)*LAT
      pipe_delay #(.W(FX_W), .D(LAT_LAYER - 1)) u_acc_dly (
        .clk(clk), .d(acc[k-1]), .q(acc_in));
    end

    scm_layer #(.N_IN(NI), .N_NODES(NN), .IN_SIGNED(SIN), .ACT(ACT[k]),
                .ADD_STAGES(ADD_STAGES)) u_layer (
      .clk(clk), .rst_n(rst_n),
      .cfg_we(cfg_we && cfg_tgt == 4'(k + 1)),
      .cfg_field(fld_e'(cfg_addr[15:14])), .cfg_index(cfg_addr[13:0]),
      .cfg_wdata(cfg_wdata), .x(lx), .bits(b), .y(y));

    assign lbits[k] = MAXN'(b);

    output_summation #(.N_NODES(NN), .GROUP(GROUP)) u_sum (
      .clk(clk), .y(y), .acc_in(acc_in), .acc_out(acc[k]));
  end

  assign out_y = acc[N_LAYERS-1];

endmodule
