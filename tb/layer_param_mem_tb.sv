// layer_param_mem_tb: writes random weights, lambda shifts, biases and
// output weights into a 40-input, 20-node store (two weight words per node)
// and reads every node back; also checks that reset clears the store and
// that writes to nodes or words that do not exist change nothing.
module layer_param_mem_tb;
  import scm_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  localparam int NI = 40, NN = 20;
  logic we = 0; fld_e field; logic [13:0] index; logic [31:0] wdata;
  logic [NI-1:0] w [NN]; lambda_t shift [NN]; fx_t bias [NN]; fx_t beta [NN];

  layer_param_mem #(.N_IN(NI), .N_NODES(NN)) dut (
    .clk(clk), .rst_n(rst_n), .we(we), .field(field), .index(index), .wdata(wdata),
    .w(w), .shift(shift), .bias(bias), .beta(beta));

  logic [63:0] ew [NN]; int es [NN]; int eb [NN]; int ep [NN];

  task automatic wr(fld_e f, int idx, logic [31:0] d);
    field = f; index = 14'(idx); wdata = d; we = 1;
    @(posedge clk); #1; we = 0;
  endtask

  task automatic check_all(string what);
    for (int n = 0; n < NN; n++) begin
      checks++;
      if (w[n] !== ew[n][NI-1:0] || int'(shift[n]) != es[n] || bias[n] !== eb[n] || beta[n] !== ep[n]) begin
        failures++;
        $display("FAIL %s node %0d: w %h/%h s %0d/%0d b %h/%h beta %h/%h", what, n,
                 w[n], ew[n][NI-1:0], shift[n], es[n], bias[n], eb[n], beta[n], ep[n]);
      end
    end
  endtask

  initial begin
    for (int n = 0; n < NN; n++) begin ew[n] = 0; es[n] = 0; eb[n] = 0; ep[n] = 0; end
    repeat (2) @(posedge clk); #1 rst_n = 1;
    check_all("after reset");
    for (int n = 0; n < NN; n++) begin
      ew[n] = {$urandom, $urandom}; es[n] = $urandom_range(0, 7);
      eb[n] = $urandom; ep[n] = $urandom;
      wr(FLD_WEIGHT, (n << 1) | 0, ew[n][31:0]);
      wr(FLD_WEIGHT, (n << 1) | 1, ew[n][63:32]);
      wr(FLD_LAMBDA, n, 32'(es[n]) | 32'hFFFF_FFF8);    // only 3 bits are kept
      wr(FLD_BIAS, n, eb[n]);
      wr(FLD_BETA, n, ep[n]);
    end
    check_all("after writes");
    // writes outside the store
    wr(FLD_BIAS, NN, 32'hDEAD_BEEF);
    wr(FLD_BETA, NN + 5, 32'hDEAD_BEEF);
    wr(FLD_WEIGHT, (NN << 1), 32'hDEAD_BEEF);
    check_all("after out-of-range writes");
    // reset clears
    rst_n = 0; #1;
    for (int n = 0; n < NN; n++) begin ew[n] = 0; es[n] = 0; eb[n] = 0; ep[n] = 0; end
    check_all("in reset");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
