// uart_tx: asynchronous serial transmitter that carries the model outputs to
// the host PC.
//
// Frame: one start bit (0), eight data bits LSB first, one stop bit (1), no
// parity ("8N1"). Each bit lasts CLKS_PER_BIT clock cycles; the default 868
// gives 115200 baud from a 100 MHz clock. The frame format and baud rate are
// this design's choices; the paper only states that outputs go to the PC
// over a UART.
//
// Handshake: a byte is accepted on a clock edge where valid and ready are
// both 1. ready is 1 while the transmitter is idle; txd idles high.
//
// The handshake assertion at the end is disabled during reset, so lint
// tools see rst_n used both as the asynchronous reset and as a synchronous
// signal. That use is simulation-only and creates no logic.
module uart_tx #(
  parameter int CLKS_PER_BIT = 868
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       valid,
  input  logic [7:0] data,
  output logic       ready,
  output logic       txd
);

  localparam int CW = (CLKS_PER_BIT > 1) ? $clog2(CLKS_PER_BIT) : 1;

  logic [8:0]    shreg;     // {stop, data[7:0]}, shifted out LSB first
  logic [3:0]    nbits;     // bits left in the frame
  logic [CW-1:0] cnt;

  assign ready = (nbits == 4'd0);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      shreg <= '1;
      nbits <= '0;
      cnt   <= '0;
      txd   <= 1'b1;
    end else if (nbits == 4'd0) begin
      txd <= 1'b1;
      if (valid) begin
        shreg <= {1'b1, data};
        nbits <= 4'd10;
        cnt   <= '0;
        txd   <= 1'b0;                       // start bit goes out at once
      end
    end else if (32'(cnt) == CLKS_PER_BIT - 1) begin
      cnt   <= '0;
      nbits <= nbits - 4'd1;
      shreg <= {1'b1, shreg[8:1]};
      txd   <= (nbits == 4'd1) ? 1'b1 : shreg[0];
    end else begin
      cnt <= cnt + 1'b1;
    end
  end

  // an accepted byte starts a frame: the transmitter is busy next cycle
  assert property (@(posedge clk) disable iff (!rst_n)
                   (valid && ready) |=> !ready);

endmodule
