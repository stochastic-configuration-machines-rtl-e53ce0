// input_buffer: on-chip store of the encoded input samples.
//
// The SCM keeps its inputs on the FPGA in encoded binary form (one bit per
// binary input, 25 bits per sample for a one-feature scheme-2 V2 model
// instead of a 64-bit real), and the model is then evaluated on them.
// DEPTH defaults to 300, the test-set size of the paper's first benchmark.
//
// A simple dual-port memory written as an array: one write port and one
// read port with synchronous read (rdata is valid the cycle after raddr),
// so it maps onto a block RAM. Contents are not reset.
module input_buffer #(
  parameter int  WIDTH = 25,
  parameter int  DEPTH = 300,
  localparam int AW    = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic             clk,
  input  logic             we,
  input  logic [AW-1:0]    waddr,
  input  logic [WIDTH-1:0] wdata,
  input  logic [AW-1:0]    raddr,
  output logic [WIDTH-1:0] rdata
);

  logic [WIDTH-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we && 32'(waddr) < DEPTH) mem[waddr] <= wdata;
    rdata <= mem[raddr];
  end

endmodule
