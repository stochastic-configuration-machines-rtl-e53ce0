// uart_rx_model: behavioural 8N1 serial receiver for testbenches. Waits for
// a falling edge, samples each bit in its middle (CLKS_PER_BIT clocks per
// bit) and reports each byte with a one-cycle valid pulse; frame_err is set
// when a stop bit is 0.
module uart_rx_model #(
  parameter int CLKS_PER_BIT = 4
) (
  input  logic       clk,
  input  logic       rxd,
  output logic       valid,
  output logic [7:0] data,
  output int         frame_err
);
  initial begin
    valid = 0; frame_err = 0; data = '0;
    forever begin
      @(posedge clk);
      if (rxd == 1'b0) begin
        logic [7:0] b;
        repeat (CLKS_PER_BIT / 2) @(posedge clk);
        if (rxd != 1'b0) continue;                 // glitch, not a start bit
        for (int i = 0; i < 8; i++) begin
          repeat (CLKS_PER_BIT) @(posedge clk);
          b[i] = rxd;
        end
        repeat (CLKS_PER_BIT) @(posedge clk);
        if (rxd != 1'b1) frame_err++;
        data = b; valid = 1;
        @(posedge clk); valid = 0;
      end
    end
  end
endmodule
