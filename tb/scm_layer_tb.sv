// scm_layer_tb: loads a random 25-input, 24-node sign-activated layer
// through its configuration port and checks every node's output bit and
// real output against the reference model for 200 back-to-back inputs
// (latency 6 cycles).
module scm_layer_tb;
  import scm_pkg::*;
  import scm_ref_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  localparam int NI = 25, NN = 24;
  logic cfg_we = 0; fld_e cfg_field; logic [13:0] cfg_index; logic [31:0] cfg_wdata;
  logic [NI-1:0] x; logic [NN-1:0] bits; fx_t y [NN];

  scm_layer #(.N_IN(NI), .N_NODES(NN), .IN_SIGNED(1), .ACT(ACT_SIGN), .ADD_STAGES(1)) dut (
    .clk(clk), .rst_n(rst_n), .cfg_we(cfg_we), .cfg_field(cfg_field), .cfg_index(cfg_index),
    .cfg_wdata(cfg_wdata), .x(x), .bits(bits), .y(y));

  scm_model m;
  int unsigned addrs [$], data [$];
  logic [NI-1:0] xq [$];

  initial begin
    m = new(NI, 1, NN, 0, 0, 0, 0, 0);
    m.random_model(5);
    m.cfg_words(addrs, data);
    repeat (2) @(posedge clk); #1 rst_n = 1;
    foreach (addrs[i]) if (addrs[i] >> 16 == 1) begin
      cfg_field = fld_e'(addrs[i][15:14]); cfg_index = addrs[i][13:0]; cfg_wdata = data[i];
      cfg_we = 1; @(posedge clk); #1; cfg_we = 0;
    end
    for (int t = 0; t < 200 + 6; t++) begin
      x = NI'($urandom); xq.push_back(x);
      @(posedge clk); #1;
      if (t >= 5 && t - 5 < 200) begin
        bit xin [MAXI];
        for (int i = 0; i < NI; i++) xin[i] = xq[t-5][i];
        for (int n = 0; n < NN; n++) begin
          int ey; bit eb;
          eb = m.node(0, n, xin, ey);
          checks++;
          if (bits[n] !== eb || y[n] !== ey) begin
            failures++;
            $display("FAIL t%0d node %0d: bit %0b/%0b y %h/%h", t, n, bits[n], eb, y[n], ey);
          end
        end
      end
    end
    checks++;
    if (m.n_pos == 0 || m.n_neg_sign == 0) begin failures++; $display("FAIL only one activation outcome seen"); end
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
