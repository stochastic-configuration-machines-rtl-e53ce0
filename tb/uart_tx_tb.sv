// uart_tx_tb: sends 60 random bytes through the transmitter (5 clocks per
// bit), offered as soon as ready allows, and checks with an independent
// receiver model that every byte arrives intact and framed, that ready drops
// while a frame is sent, and that a frame lasts 10 bit times.
module uart_tx_tb;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  localparam int CPB = 5;
  logic valid = 0, ready, txd; logic [7:0] data;
  logic rx_valid; logic [7:0] rx_data; int frame_err;

  uart_tx #(.CLKS_PER_BIT(CPB)) dut (.clk(clk), .rst_n(rst_n), .valid(valid), .data(data),
                                     .ready(ready), .txd(txd));
  uart_rx_model #(.CLKS_PER_BIT(CPB)) u_rx (.clk(clk), .rxd(txd), .valid(rx_valid),
                                            .data(rx_data), .frame_err(frame_err));

  logic [7:0] sent [$];
  int nrx = 0;

  always @(posedge clk) if (rx_valid) begin
    checks++; nrx++;
    if (sent.size() == 0 || rx_data !== sent[0]) begin
      failures++; $display("FAIL received %h", rx_data);
    end
    if (sent.size() != 0) void'(sent.pop_front());
  end

  initial begin
    repeat (3) @(posedge clk); #1 rst_n = 1;
    checks++;
    if (txd !== 1'b1 || ready !== 1'b1) begin failures++; $display("FAIL idle state"); end
    for (int t = 0; t < 60; t++) begin
      int busy;
      data = 8'($urandom); valid = 1;
      while (!ready) begin @(posedge clk); #1; end
      sent.push_back(data);
      @(posedge clk); #1; valid = 0;
      busy = 0;               // edges from the accepting edge until ready returns
      while (!ready) begin @(posedge clk); #1; busy++; end
      checks++;
      if (busy != 10 * CPB) begin failures++; $display("FAIL frame of %0d cycles", busy); end
      if ($urandom_range(0, 3) == 0) repeat ($urandom_range(1, 20)) @(posedge clk);
      #1;
    end
    repeat (4 * CPB) @(posedge clk);
    checks += 2;
    if (nrx != 60) begin failures++; $display("FAIL %0d bytes received", nrx); end
    if (frame_err != 0) begin failures++; $display("FAIL %0d framing errors", frame_err); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
