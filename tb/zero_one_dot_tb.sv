// zero_one_dot_tb: checks the {0,1}-input dot product. First the worked
// example (inputs 1,0,1,1 and weights -1,1,-1,1 give -1, the remaining
// inputs are 0 and contribute nothing), then random vectors for a 60-input
// unit with single-cycle counts and a 40-input unit with two-cycle counts.
// Expected values are sums of x*w with x in {0,1}, w in {-1,1}; latency 3
// and 4 cycles.
module zero_one_dot_tb;
  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;

  logic [59:0] xa, wa;  logic signed [6:0] da;
  logic [39:0] xb, wb;  logic signed [6:0] db;

  zero_one_dot #(.N_IN(60), .ADD_STAGES(1)) u_a (.clk(clk), .x(xa), .w(wa), .dot(da));
  zero_one_dot #(.N_IN(40), .ADD_STAGES(2)) u_b (.clk(clk), .x(xb), .w(wb), .dot(db));

  function automatic int ref_dot(logic [63:0] x, logic [63:0] w, int n);
    int s = 0;
    for (int i = 0; i < n; i++) s += (x[i] ? 1 : 0) * (w[i] ? 1 : -1);
    return s;
  endfunction

  int exp_a [$], exp_b [$];
  int cyc = 0;

  initial begin
    for (int t = 0; t < 300; t++) begin
      xa = {$urandom, $urandom}; wa = {$urandom, $urandom};
      xb = 40'({$urandom, $urandom}); wb = 40'({$urandom, $urandom});
      if (t == 0) begin
        xa = '0; wa = '1;
        xa[3:0] = 4'b1011;        // inputs 1,0,1,1 (first input is bit 3)
        wa[3:0] = 4'b0101;        // weights -1,1,-1,1
      end
      if (t % 50 == 7) begin xa = '1; wa = '0; xb = '1; wb = '1; end
      exp_a.push_back(ref_dot(64'(xa), 64'(wa), 60));
      exp_b.push_back(ref_dot(64'(xb), 64'(wb), 40));
      @(posedge clk); #1;
      cyc++;
      if (cyc >= 3) begin
        automatic int e = exp_a[cyc-3];
        checks++;
        if (da != e) begin failures++; $display("FAIL a cyc %0d got %0d exp %0d", cyc, da, e); end
      end
      if (cyc >= 4) begin
        automatic int e = exp_b[cyc-4];
        checks++;
        if (db != e) begin failures++; $display("FAIL b cyc %0d got %0d exp %0d", cyc, db, e); end
      end
    end
    checks++;
    if (exp_a[0] != -1) begin failures++; $display("FAIL worked example reference"); end
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
