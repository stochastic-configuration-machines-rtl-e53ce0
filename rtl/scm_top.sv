// scm_top: FPGA inference engine for a stochastic configuration machine (SCM).
//
// Data path: the host writes each input sample as decimal digits; the input
// encoder turns every feature into a group of binary inputs (scheme 1 or 2
// unary codes) that are stored in the input buffer. On start, the sequencer
// runs every stored sample through the model core - mechanism model plus one
// to three hidden layers of binary-weight nodes with chained output
// summations - and sends each 32-bit Q7.25 output to the host through the
// UART; the same value also appears on res_valid / res_y.
//
// The model itself (binary weights, lambda shifts, biases, output weights,
// mechanism weights and intercept) is trained offline and written through
// the cfg_* port before start; see scm_pkg for the address map.
//
// Default parameters are the paper's main worked example: one feature
// encoded with scheme 2 V2 (25 binary inputs), one hidden layer of 60
// sign-activated nodes, output sums in groups of 20, nine-cycle evaluation,
// a 300-sample buffer (the benchmark's test-set size). Deep models set
// N_LAYERS, NODES and ACT; wide models set ADD_STAGES = 2. Encoding on the
// chip, the host interfaces and the UART framing are this design's choices.
//
// rst_n is an asynchronous active-low reset for every register. Lint tools
// may also report it as a synchronous signal; that comes from the
// "disable iff" of the assertion in uart_tx and creates no logic.
module scm_top
  import scm_pkg::*;
#(
  parameter int   N_FEAT       = 1,
  parameter enc_e SCHEME       = ENC_S2V2,
  parameter int   PLACES       = 3,                 // scheme 1 only
  parameter int   N_LAYERS     = 1,
  parameter int   NODES [3]    = '{60, 60, 60},
  parameter act_e ACT   [3]    = '{ACT_SIGN, ACT_SIGN, ACT_SIGN},
  parameter int   ADD_STAGES   = 1,
  parameter int   GROUP        = 20,
  parameter int   DEPTH        = 300,
  parameter int   CLKS_PER_BIT = 868,
  localparam int  NP           = enc_places(SCHEME, PLACES),
  localparam int  N_IN         = N_FEAT * enc_bits(SCHEME, PLACES),
  localparam int  AW           = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic              clk,
  input  logic              rst_n,
  // model parameter writes
  input  logic              cfg_we,
  input  logic [CFG_AW-1:0] cfg_addr,
  input  logic [31:0]       cfg_wdata,
  // sample writes (decimal digits, digit 0 = ones place)
  input  logic              smp_we,
  input  logic [AW-1:0]     smp_addr,
  input  logic [3:0]        smp_digits [N_FEAT][NP+1],
  // run control
  input  logic              start,
  input  logic [AW-1:0]     n_samples,
  output logic              busy,
  output logic              done,
  // results
  output logic              res_valid,
  output fx_t               res_y,
  output logic              uart_txd,
  output logic [31:0]       stall_cycles
);

  logic [N_IN-1:0] enc_bits_w, buf_rdata;
  logic [AW-1:0]   raddr;
  logic            core_in_valid, core_out_valid;
  fx_t             core_out_y;
  logic            tx_valid, tx_ready;
  logic [7:0]      tx_data;

  input_encoder #(.N_FEAT(N_FEAT), .SCHEME(SCHEME), .PLACES(PLACES)) u_enc (
    .digits(smp_digits), .bits(enc_bits_w));

  input_buffer #(.WIDTH(N_IN), .DEPTH(DEPTH)) u_buf (
    .clk(clk), .we(smp_we), .waddr(smp_addr), .wdata(enc_bits_w),
    .raddr(raddr), .rdata(buf_rdata));

  scm_core #(.N_IN(N_IN), .N_LAYERS(N_LAYERS), .NODES(NODES), .ACT(ACT),
             .ADD_STAGES(ADD_STAGES), .GROUP(GROUP)) u_core (
    .clk(clk), .rst_n(rst_n), .cfg_we(cfg_we), .cfg_addr(cfg_addr),
    .cfg_wdata(cfg_wdata), .in_valid(core_in_valid), .in_bits(buf_rdata),
    .out_valid(core_out_valid), .out_y(core_out_y));

  sample_sequencer #(.AW(AW)) u_seq (
    .clk(clk), .rst_n(rst_n), .start(start), .n_samples(n_samples),
    .busy(busy), .done(done), .raddr(raddr),
    .core_in_valid(core_in_valid), .core_out_valid(core_out_valid),
    .core_out_y(core_out_y), .res_valid(res_valid), .res_y(res_y),
    .tx_valid(tx_valid), .tx_data(tx_data), .tx_ready(tx_ready),
    .stall_cycles(stall_cycles));

  uart_tx #(.CLKS_PER_BIT(CLKS_PER_BIT)) u_uart (
    .clk(clk), .rst_n(rst_n), .valid(tx_valid), .data(tx_data),
    .ready(tx_ready), .txd(uart_txd));

endmodule
