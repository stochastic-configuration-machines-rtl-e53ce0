// scm_top_full_tb: one complete operation of the engine at its default size:
// one feature encoded with scheme 2 V2 (25 binary inputs), 60 sign-activated
// nodes, a 300-sample buffer and a 115200-baud UART at 100 MHz. A random
// model is loaded, all 300 samples are written as decimal digits (four
// places), the whole buffer is run, and every output is checked against the
// reference model on the result port and on the UART line. Also checks the
// nine-cycle evaluation latency from the sample entering the model to its
// result.
module scm_top_full_tb;
  import scm_pkg::*;
  import scm_ref_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;                        // 100 MHz

  localparam int NB = 25, NS = 300, AW = 9, CPB = 868;

  logic cfg_we = 0; logic [CFG_AW-1:0] cfg_addr; logic [31:0] cfg_wdata;
  logic smp_we = 0; logic [AW-1:0] smp_addr; logic [3:0] smp_digits [1][5];
  logic start = 0; logic [AW-1:0] n_samples; logic busy, done;
  logic res_valid; fx_t res_y; logic uart_txd; logic [31:0] stall_cycles;

  scm_top dut (
    .clk(clk), .rst_n(rst_n), .cfg_we(cfg_we), .cfg_addr(cfg_addr), .cfg_wdata(cfg_wdata),
    .smp_we(smp_we), .smp_addr(smp_addr), .smp_digits(smp_digits), .start(start),
    .n_samples(n_samples), .busy(busy), .done(done), .res_valid(res_valid), .res_y(res_y),
    .uart_txd(uart_txd), .stall_cycles(stall_cycles));

  logic rx_valid; logic [7:0] rx_data; int frame_err;
  uart_rx_model #(.CLKS_PER_BIT(CPB)) u_rx (.clk(clk), .rxd(uart_txd), .valid(rx_valid),
                                            .data(rx_data), .frame_err(frame_err));

  scm_model m;
  int unsigned addrs [$], data [$];
  int expv [NS];
  fx_t results [$];
  logic [7:0] bytes [$];
  int lat_min = 1000, lat_max = 0, cyc_in = 0, cyc = 0;

  always @(posedge clk) begin
    cyc++;
    if (res_valid) results.push_back(res_y);
    if (rx_valid) bytes.push_back(rx_data);
    // latency: edge that loads the sample into the model -> edge that
    // registers its output (out_valid high after it)
    if (dut.u_core.in_valid) cyc_in = cyc;
    if (rst_n && dut.u_core.out_valid) begin
      automatic int l = cyc - cyc_in;
      if (l < lat_min) lat_min = l;
      if (l > lat_max) lat_max = l;
    end
  end

  initial begin
    m = new(NB, 1, 60, 0, 0, 0, 0, 0);
    m.random_model(5);
    m.cfg_words(addrs, data);
    repeat (3) @(posedge clk); #1 rst_n = 1;
    foreach (addrs[i]) begin
      cfg_addr = addrs[i][CFG_AW-1:0]; cfg_wdata = data[i]; cfg_we = 1;
      @(posedge clk); #1; cfg_we = 0;
    end
    for (int s = 0; s < NS; s++) begin
      int dg [5];
      int wd [5] = '{1, 9, 9, 4, 2};
      string code;
      bit xin [MAXI];
      dg[0] = (s == 17) ? 1 : 0;
      for (int k = 1; k < 5; k++) dg[k] = dg[0] ? 0 : $urandom_range(0, 9);
      for (int k = 0; k < 5; k++) smp_digits[0][k] = 4'(dg[k]);
      code = "";
      for (int k = 0; k < 5; k++) code = {code, enc_digit(wd[k], dg[k])};
      for (int c = 0; c < NB; c++) xin[NB - 1 - c] = (code[c] == "1");
      expv[s] = m.eval(xin);
      smp_addr = AW'(s); smp_we = 1; @(posedge clk); #1; smp_we = 0;
    end
    n_samples = AW'(NS); start = 1; @(posedge clk); #1; start = 0;
    while (!done) begin @(posedge clk); #1; end
    repeat (12 * CPB) @(posedge clk); #1;
    checks++;
    if (results.size() != NS || bytes.size() != 4 * NS) begin
      failures++; $display("FAIL %0d results, %0d bytes", results.size(), bytes.size());
    end else
      for (int s = 0; s < NS; s++) begin
        checks += 2;
        if (results[s] !== expv[s]) begin failures++; $display("FAIL sample %0d: %h vs %h", s, results[s], expv[s]); end
        if ({bytes[4*s+3], bytes[4*s+2], bytes[4*s+1], bytes[4*s]} !== expv[s]) begin
          failures++; $display("FAIL uart bytes of sample %0d", s);
        end
      end
    checks += 3;
    if (lat_min != 9 || lat_max != 9) begin failures++; $display("FAIL latency %0d..%0d", lat_min, lat_max); end
    if (frame_err != 0) begin failures++; $display("FAIL framing errors"); end
    if (m.n_neg_sign == 0 || m.n_pos == 0) begin failures++; $display("FAIL one node outcome never seen"); end
    $display("INFO latency %0d cycles, stall cycles %0d", lat_max, stall_cycles);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (12_000_000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
