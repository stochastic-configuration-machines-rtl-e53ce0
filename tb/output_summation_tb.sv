// output_summation_tb: feeds random node outputs of a 60-node layer (three
// groups of 20) and of a 25-node layer (groups of 20 and 5) every cycle,
// with the running input one cycle later, and checks
// acc_out = acc_in + sum(y) (32-bit wrapping) two cycles after y.
module output_summation_tb;
  import scm_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;

  fx_t ya [60], yb [25];
  fx_t acc_a, acc_b, oa, ob;

  output_summation #(.N_NODES(60), .GROUP(20)) u_a (.clk(clk), .y(ya), .acc_in(acc_a), .acc_out(oa));
  output_summation #(.N_NODES(25), .GROUP(20)) u_b (.clk(clk), .y(yb), .acc_in(acc_b), .acc_out(ob));

  int sa [$], sb [$], ia [$], ib [$];

  initial begin
    for (int t = 0; t < 300; t++) begin
      int s;
      s = 0; for (int i = 0; i < 60; i++) begin ya[i] = $urandom; s += ya[i]; end
      sa.push_back(s);
      s = 0; for (int i = 0; i < 25; i++) begin yb[i] = $urandom; s += yb[i]; end
      sb.push_back(s);
      ia.push_back($urandom); ib.push_back($urandom);
      // running input belongs to the y of the previous cycle
      acc_a = (t >= 1) ? ia[t-1] : 0;
      acc_b = (t >= 1) ? ib[t-1] : 0;
      @(posedge clk); #1;
      if (t >= 2) begin
        checks += 2;
        if (oa !== sa[t-1] + ia[t-1]) begin failures++; $display("FAIL a t%0d", t); end
        if (ob !== sb[t-1] + ib[t-1]) begin failures++; $display("FAIL b t%0d", t); end
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
