// scm_top_tb: end-to-end test of the whole engine in a deep configuration
// (two features encoded with scheme 1, three decimal places -> 56 binary
// inputs; three hidden layers of 40 nodes with sign, step and sign
// activation; two-cycle additions; 4 clocks per UART bit to keep the run
// short). A random model is written through the configuration port, 24
// samples are written as decimal digits, and a run is started. Every result
// is checked twice against the reference model (encoding + evaluation): on
// the result port and as the four bytes received from the UART line. The
// mechanisms the design has must all occur: values equal to 1 (ones bit),
// -beta outputs of sign nodes, 0 outputs of step nodes, {0,1}-input dot
// products (layer after a step layer), UART back-pressure stalls, and a
// second run over part of the buffer.
module scm_top_tb;
  import scm_pkg::*;
  import scm_ref_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  localparam int NF = 2, PL = 3, NB = 28, NI = NF * NB, DEPTH = 32, AW = 5, CPB = 4;
  localparam int NS = 24;

  logic cfg_we = 0; logic [CFG_AW-1:0] cfg_addr; logic [31:0] cfg_wdata;
  logic smp_we = 0; logic [AW-1:0] smp_addr; logic [3:0] smp_digits [NF][PL+1];
  logic start = 0; logic [AW-1:0] n_samples; logic busy, done;
  logic res_valid; fx_t res_y; logic uart_txd; logic [31:0] stall_cycles;

  scm_top #(.N_FEAT(NF), .SCHEME(ENC_S1), .PLACES(PL), .N_LAYERS(3), .NODES('{40, 40, 40}),
            .ACT('{ACT_SIGN, ACT_STEP, ACT_SIGN}), .ADD_STAGES(2), .GROUP(20),
            .DEPTH(DEPTH), .CLKS_PER_BIT(CPB)) dut (
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
  int n_ones = 0;
  fx_t results [$];
  logic [7:0] bytes [$];

  always @(posedge clk) begin
    if (res_valid) results.push_back(res_y);
    if (rx_valid) bytes.push_back(rx_data);
  end

  task automatic run_and_check(int n);
    results.delete(); bytes.delete();
    n_samples = AW'(n); start = 1; @(posedge clk); #1; start = 0;
    while (!done) begin @(posedge clk); #1; end
    repeat (12 * CPB) @(posedge clk); #1;
    checks++;
    if (results.size() != n || bytes.size() != 4 * n) begin
      failures++; $display("FAIL run of %0d: %0d results, %0d bytes", n, results.size(), bytes.size());
    end else
      for (int s = 0; s < n; s++) begin
        checks += 2;
        if (results[s] !== expv[s]) begin failures++; $display("FAIL sample %0d: %h vs %h", s, results[s], expv[s]); end
        if ({bytes[4*s+3], bytes[4*s+2], bytes[4*s+1], bytes[4*s]} !== expv[s]) begin
          failures++; $display("FAIL uart bytes of sample %0d", s);
        end
      end
  endtask

  initial begin
    m = new(NI, 3, 40, 40, 40, 0, 1, 0);
    m.random_model(5);
    m.cfg_words(addrs, data);
    repeat (3) @(posedge clk); #1 rst_n = 1;
    foreach (addrs[i]) begin
      cfg_addr = addrs[i][CFG_AW-1:0]; cfg_wdata = data[i]; cfg_we = 1;
      @(posedge clk); #1; cfg_we = 0;
    end
    // samples as digits; reference encoding from the printed codes
    for (int s = 0; s < NS; s++) begin
      string code;
      bit xin [MAXI];
      for (int f = 0; f < NF; f++) begin
        int dg [PL+1];
        dg[0] = ($urandom_range(0, 7) == 0) ? 1 : 0;
        if (dg[0] == 1) n_ones++;
        for (int k = 1; k <= PL; k++) dg[k] = dg[0] ? 0 : $urandom_range(0, 9);
        for (int k = 0; k <= PL; k++) smp_digits[f][k] = 4'(dg[k]);
        code = enc_digit(1, dg[0]);
        for (int k = 1; k <= PL; k++) code = {code, enc_digit(9, dg[k])};
        for (int c = 0; c < NB; c++) xin[f*NB + NB - 1 - c] = (code[c] == "1");
      end
      expv[s] = m.eval(xin);
      smp_addr = AW'(s); smp_we = 1; @(posedge clk); #1; smp_we = 0;
    end
    run_and_check(NS);
    run_and_check(5);
    // mechanisms
    checks += 6;
    if (n_ones == 0)         begin failures++; $display("FAIL no value of 1 encoded"); end
    if (m.n_neg_sign == 0)   begin failures++; $display("FAIL no -beta output"); end
    if (m.n_zero_step == 0)  begin failures++; $display("FAIL no zero step output"); end
    if (m.n_pos == 0)        begin failures++; $display("FAIL no active node"); end
    if (stall_cycles == 0)   begin failures++; $display("FAIL no UART stall"); end
    if (frame_err != 0)      begin failures++; $display("FAIL UART framing errors"); end
    $display("INFO ones %0d, -beta %0d, zero-step %0d, active %0d, stall cycles %0d",
             n_ones, m.n_neg_sign, m.n_zero_step, m.n_pos, stall_cycles);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
