// sample_sequencer_tb: runs the sequencer against a behavioural input buffer
// (one-cycle read), a behavioural model core (fixed 9-cycle latency, output
// = a hash of the sample) and a UART sink whose ready is random. Checks that
// samples are issued in order, one at a time, each result appears on the
// result port and as four bytes LSB first, done pulses once after the last
// byte, busy is low again, and the stall counter equals the cycles a byte
// waited. Two runs, of 7 samples and of 1 sample.
module sample_sequencer_tb;
  import scm_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  localparam int AW = 5, LAT = 9;
  logic start = 0; logic [AW-1:0] n_samples; logic busy, done;
  logic [AW-1:0] raddr; logic core_in_valid, core_out_valid; fx_t core_out_y;
  logic res_valid; fx_t res_y; logic tx_valid, tx_ready; logic [7:0] tx_data;
  logic [31:0] stall_cycles;

  sample_sequencer #(.AW(AW)) dut (
    .clk(clk), .rst_n(rst_n), .start(start), .n_samples(n_samples), .busy(busy), .done(done),
    .raddr(raddr), .core_in_valid(core_in_valid), .core_out_valid(core_out_valid),
    .core_out_y(core_out_y), .res_valid(res_valid), .res_y(res_y), .tx_valid(tx_valid),
    .tx_data(tx_data), .tx_ready(tx_ready), .stall_cycles(stall_cycles));

  // behavioural buffer and core
  logic [AW-1:0] rd_q;
  logic [LAT-1:0] vpipe;
  fx_t ypipe [LAT];
  function automatic fx_t hash(logic [AW-1:0] a);
    return fx_t'(32'h9E37_79B9 * (32'(a) + 1));
  endfunction
  always_ff @(posedge clk) begin
    rd_q <= raddr;
    vpipe <= rst_n ? {vpipe[LAT-2:0], core_in_valid} : '0;
    ypipe[0] <= hash(rd_q);
    for (int i = 1; i < LAT; i++) ypipe[i] <= ypipe[i-1];
  end
  assign core_out_valid = vpipe[LAT-1];
  assign core_out_y = ypipe[LAT-1];

  // UART sink
  always_ff @(posedge clk) tx_ready <= ($urandom_range(0, 3) == 0);

  logic [7:0] bytes [$];
  fx_t results [$];
  int waited = 0, issued = 0, dones = 0, inflight = 0;
  always @(posedge clk) if (rst_n) begin
    if (tx_valid && tx_ready) bytes.push_back(tx_data);
    if (tx_valid && !tx_ready) waited++;
    if (res_valid) results.push_back(res_y);
    if (done) dones++;
    if (core_in_valid) begin
      issued++; inflight++;
      if (inflight > 1) begin failures++; $display("FAIL two samples in flight"); end
    end
    if (core_out_valid) inflight--;
  end

  task automatic run(int n);
    bytes.delete(); results.delete(); issued = 0; dones = 0;
    n_samples = AW'(n); start = 1;
    @(posedge clk); #1; start = 0;
    while (!done) begin @(posedge clk); #1; end
    repeat (3) @(posedge clk); #1;
    checks += 4;
    if (issued != n) begin failures++; $display("FAIL issued %0d of %0d", issued, n); end
    if (dones != 1) begin failures++; $display("FAIL done pulses %0d", dones); end
    if (busy) begin failures++; $display("FAIL still busy"); end
    if (bytes.size() != 4 * n || results.size() != n) begin
      failures++; $display("FAIL %0d bytes %0d results", bytes.size(), results.size());
    end else
      for (int s = 0; s < n; s++) begin
        fx_t e = hash(AW'(s));
        checks += 2;
        if (results[s] !== e) begin failures++; $display("FAIL result %0d: %h vs %h (n=%0d)", s, results[s], e, n); end
        if ({bytes[4*s+3], bytes[4*s+2], bytes[4*s+1], bytes[4*s]} !== e) begin
          failures++; $display("FAIL bytes of sample %0d", s);
        end
      end
  endtask

  initial begin
    repeat (3) @(posedge clk); #1 rst_n = 1;
    run(7);
    run(1);
    checks += 2;
    if (stall_cycles != 32'(waited)) begin failures++; $display("FAIL stall count %0d vs %0d", stall_cycles, waited); end
    if (waited == 0) begin failures++; $display("FAIL no stall seen"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
