// mechanism_model_tb: loads random linear weights p and intercept u and
// checks P = u + sum_k (x_k ? p_k : -p_k) (32-bit wrapping) for random
// inputs on a 25-input model (latency 2) and a 56-input model with the
// two-cycle sum (latency 3), one new input every cycle.
module mechanism_model_tb;
  import scm_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic wea = 0, web = 0; logic [15:0] index; fx_t wdata;
  logic [24:0] xa; logic [55:0] xb; fx_t ya, yb;
  int pa [25], pb [56], ua, ub;

  mechanism_model #(.N_IN(25), .ADD_STAGES(1)) u_a (
    .clk(clk), .rst_n(rst_n), .we(wea), .index(index), .wdata(wdata), .x(xa), .p_out(ya));
  mechanism_model #(.N_IN(56), .ADD_STAGES(2)) u_b (
    .clk(clk), .rst_n(rst_n), .we(web), .index(index), .wdata(wdata), .x(xb), .p_out(yb));

  function automatic int ref_a(logic [24:0] x);
    int s = ua;
    for (int k = 0; k < 25; k++) s += x[k] ? pa[k] : -pa[k];
    return s;
  endfunction
  function automatic int ref_b(logic [55:0] x);
    int s = ub;
    for (int k = 0; k < 56; k++) s += x[k] ? pb[k] : -pb[k];
    return s;
  endfunction

  int ea [$], eb [$];

  initial begin
    repeat (2) @(posedge clk); #1 rst_n = 1;
    for (int k = 0; k < 25; k++) pa[k] = $urandom;
    for (int k = 0; k < 56; k++) pb[k] = $urandom;
    ua = $urandom; ub = $urandom;
    for (int k = 0; k <= 25; k++) begin
      index = 16'(k); wdata = (k == 25) ? ua : pa[k]; wea = 1; @(posedge clk); #1; wea = 0;
    end
    for (int k = 0; k <= 56; k++) begin
      index = 16'(k); wdata = (k == 56) ? ub : pb[k]; web = 1; @(posedge clk); #1; web = 0;
    end
    for (int t = 0; t < 300; t++) begin
      xa = 25'($urandom); xb = {$urandom, $urandom};
      if (t == 10) begin xa = '0; xb = '0; end
      if (t == 11) begin xa = '1; xb = '1; end
      ea.push_back(ref_a(xa)); eb.push_back(ref_b(xb));
      @(posedge clk); #1;
      if (t >= 1) begin
        checks++;
        if (ya !== ea[t-1]) begin failures++; $display("FAIL a t%0d got %h exp %h", t, ya, ea[t-1]); end
      end
      if (t >= 2) begin
        checks++;
        if (yb !== eb[t-2]) begin failures++; $display("FAIL b t%0d got %h exp %h", t, yb, eb[t-2]); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
