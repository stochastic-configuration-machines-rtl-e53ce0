// scm_core_check: drives one scm_core configuration with a random model and
// checks it against the reference model. Used by scm_core_tb, once per
// configuration.
//
// Sequence: load the model through the configuration port; send one isolated
// input and measure the cycles from the edge that loads it to out_valid
// (must equal EXP_LAT); then stream N_VEC inputs back to back (one per
// cycle, with some idle cycles) and compare every output, in order, with the
// reference. Reports checks/failures and the activation outcomes seen.
module scm_core_check
  import scm_pkg::*;
  import scm_ref_pkg::*;
#(
  parameter int   N_IN       = 25,
  parameter int   N_LAYERS   = 1,
  parameter int   NODES [3]  = '{60, 60, 60},
  parameter act_e ACT   [3]  = '{ACT_SIGN, ACT_SIGN, ACT_SIGN},
  parameter int   ADD_STAGES = 1,
  parameter int   EXP_LAT    = 9,
  parameter int   N_VEC      = 100,
  parameter int   BIAS_RANGE = 5
) (
  input  logic clk,
  output int   checks,
  output int   failures,
  output int   n_neg_sign,
  output int   n_zero_step,
  output bit   done
);
  logic rst_n = 0;
  logic cfg_we = 0; logic [CFG_AW-1:0] cfg_addr; logic [31:0] cfg_wdata;
  logic in_valid = 0; logic [N_IN-1:0] in_bits; logic out_valid; fx_t out_y;

  scm_core #(.N_IN(N_IN), .N_LAYERS(N_LAYERS), .NODES(NODES), .ACT(ACT),
             .ADD_STAGES(ADD_STAGES)) dut (
    .clk(clk), .rst_n(rst_n), .cfg_we(cfg_we), .cfg_addr(cfg_addr), .cfg_wdata(cfg_wdata),
    .in_valid(in_valid), .in_bits(in_bits), .out_valid(out_valid), .out_y(out_y));

  scm_model m;
  int unsigned addrs [$], data [$];
  int expq [$];
  int n_out = 0;

  function automatic int ref_eval(logic [N_IN-1:0] v);
    bit xin [MAXI];
    for (int i = 0; i < N_IN; i++) xin[i] = v[i];
    return m.eval(xin);
  endfunction

  // output monitor: compare in order
  always @(posedge clk) if (rst_n && out_valid) begin
    checks++;
    n_out++;
    if (expq.size() == 0) begin
      failures++; $display("FAIL %m: unexpected output");
    end else begin
      automatic int e = expq.pop_front();
      if (out_y !== e) begin failures++; $display("FAIL %m: got %h expected %h", out_y, e); end
    end
  end

  initial begin
    int lat;
    checks = 0; failures = 0; done = 0;
    m = new(N_IN, N_LAYERS, NODES[0], NODES[1], NODES[2],
            ACT[0] == ACT_STEP, ACT[1] == ACT_STEP, ACT[2] == ACT_STEP);
    m.random_model(BIAS_RANGE);
    m.cfg_words(addrs, data);
    repeat (3) @(posedge clk); #1 rst_n = 1;
    foreach (addrs[i]) begin
      cfg_addr = addrs[i][CFG_AW-1:0]; cfg_wdata = data[i]; cfg_we = 1;
      @(posedge clk); #1; cfg_we = 0;
    end
    // isolated input: latency
    in_bits = {(N_IN + 31) / 32 {$urandom}};
    expq.push_back(ref_eval(in_bits));
    in_valid = 1;
    @(posedge clk); #1; in_valid = 0;
    lat = 1;
    while (!out_valid && lat < 100) begin @(posedge clk); #1; lat++; end
    checks++;
    if (lat != EXP_LAT) begin failures++; $display("FAIL %m: latency %0d, expected %0d", lat, EXP_LAT); end
    else $display("INFO %m: latency %0d cycles", lat);
    @(posedge clk); #1;
    // streaming
    for (int t = 0; t < N_VEC; t++) begin
      in_bits = {(N_IN + 31) / 32 {$urandom}};
      in_valid = ($urandom_range(0, 7) != 0);
      if (in_valid) expq.push_back(ref_eval(in_bits));
      @(posedge clk); #1;
    end
    in_valid = 0;
    repeat (EXP_LAT + 2) @(posedge clk);
    #1;
    checks++;
    if (expq.size() != 0) begin failures++; $display("FAIL %m: %0d outputs missing", expq.size()); end
    n_neg_sign = m.n_neg_sign; n_zero_step = m.n_zero_step;
    done = 1;
  end
endmodule
