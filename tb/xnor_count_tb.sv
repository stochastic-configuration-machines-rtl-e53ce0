// xnor_count_tb: checks the XNOR-count dot product. First the worked example
// (inputs -1,1,1,-1 and weights -1,1,-1,-1 give 2), then random vectors for a
// 25-input unit with single-cycle counts and a 56-input unit with two-cycle
// counts. Expected values are sums of +-1 products; the latency (3 and 4
// cycles) is checked by comparing each result with the vector applied that
// many cycles earlier.
module xnor_count_tb;
  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;

  logic [24:0] xa, wa;  logic signed [5:0] da;
  logic [55:0] xb, wb;  logic signed [6:0] db;

  xnor_count #(.N_IN(25), .ADD_STAGES(1)) u_a (.clk(clk), .x(xa), .w(wa), .dot(da));
  xnor_count #(.N_IN(56), .ADD_STAGES(2)) u_b (.clk(clk), .x(xb), .w(wb), .dot(db));

  function automatic int ref_dot(logic [63:0] x, logic [63:0] w, int n);
    int s = 0;
    for (int i = 0; i < n; i++) s += ((x[i] ? 1 : -1) * (w[i] ? 1 : -1));
    return s;
  endfunction

  int exp_a [$], exp_b [$];
  int cyc = 0;

  initial begin
    for (int t = 0; t < 300; t++) begin
      if (t == 0) begin
        // inputs -1,1,1,-1 -> 0,1,1,0 ; weights -1,1,-1,-1 -> 0,1,0,0
        xa = '0; wa = '0;
        xa[3:0] = 4'b0110; wa[3:0] = 4'b0100;
        xa[24:4] = 21'h0; wa[24:4] = 21'h1FFFFF;   // 21 more products of -1
        xb = {$urandom, $urandom}; wb = {$urandom, $urandom};
      end else begin
        xa = 25'($urandom); wa = 25'($urandom);
        xb = {$urandom, $urandom}; wb = {$urandom, $urandom};
        if (t % 50 == 1) begin xb = '1; wb = '1; xa = '0; wa = '0; end   // extremes
      end
      exp_a.push_back(ref_dot(64'(xa), 64'(wa), 25));
      exp_b.push_back(ref_dot(64'(xb), 64'(wb), 56));
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
    // worked example: the 4-input part gives 2, the 21 padding products (-1)(+1) add -21
    checks++;
    if (exp_a[0] != 2 - 21) begin failures++; $display("FAIL reference example"); end
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
