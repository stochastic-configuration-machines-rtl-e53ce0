// scm_node_tb: checks single hidden nodes against an integer model of
//   pre = (x . w) * 2^shift + bias,  bit = pre >= 0,
//   y = bit ? beta : (sign ? -beta : 0).
// Three nodes run side by side: {-1,1} inputs with sign activation, {-1,1}
// inputs with step activation (both 25 inputs, 6-cycle latency) and {0,1}
// inputs with sign activation (40 inputs, two-cycle counts, 7-cycle
// latency). Parameters change every 24 vectors, with the pipeline flushed in
// between. Both outcomes of the threshold must be seen.
module scm_node_tb;
  import scm_pkg::*;
  int checks = 0, failures = 0;
  int n_one = 0, n_zero = 0;
  logic clk = 0;
  always #5 clk = ~clk;

  logic [24:0] xa; logic [39:0] xc;
  logic [24:0] wa, wb; logic [39:0] wc;
  lambda_t sa, sb, sc;
  fx_t ba, bb, bc, pa, pb, pc;      // bias, beta
  logic oa, ob, oc;
  fx_t ya, yb, yc;

  scm_node #(.N_IN(25), .IN_SIGNED(1), .ACT(ACT_SIGN), .ADD_STAGES(1)) u_a (
    .clk(clk), .x(xa), .w(wa), .shift(sa), .bias(ba), .beta(pa), .bit_out(oa), .y(ya));
  scm_node #(.N_IN(25), .IN_SIGNED(1), .ACT(ACT_STEP), .ADD_STAGES(1)) u_b (
    .clk(clk), .x(xa), .w(wb), .shift(sb), .bias(bb), .beta(pb), .bit_out(ob), .y(yb));
  scm_node #(.N_IN(40), .IN_SIGNED(0), .ACT(ACT_SIGN), .ADD_STAGES(2)) u_c (
    .clk(clk), .x(xc), .w(wc), .shift(sc), .bias(bc), .beta(pc), .bit_out(oc), .y(yc));

  function automatic longint dotp(logic [63:0] x, logic [63:0] w, int n, bit pm);
    longint s = 0;
    for (int i = 0; i < n; i++) s += (x[i] ? 1 : (pm ? -1 : 0)) * (w[i] ? 1 : -1);
    return s;
  endfunction

  function automatic fx_t ref_y(longint dot, int sh, fx_t bias, fx_t beta, bit step,
                                output bit b);
    longint pre = dot * (longint'(1) << sh) * (longint'(1) << 25) + longint'(bias);
    b = (pre >= 0);
    if (b) return beta;
    return step ? 0 : -beta;
  endfunction

  task automatic cmp(string n, bit gb, fx_t gy, bit eb, fx_t ey);
    checks++;
    if (gb !== eb || gy !== ey) begin
      failures++;
      $display("FAIL %s: got bit %0b y %0d, expected bit %0b y %0d", n, gb, gy, eb, ey);
    end
    if (eb) n_one++; else n_zero++;
  endtask

  function automatic fx_t rnd_bias();
    return fx_t'(($urandom_range(0, 16) - 8) * (1 << 25) + $urandom_range(0, (1 << 25) - 1));
  endfunction

  initial begin
    for (int set = 0; set < 40; set++) begin
      logic [24:0] xq [$]; logic [39:0] xcq [$];
      xq.delete(); xcq.delete();
      wa = 25'($urandom); wb = 25'($urandom); wc = 40'({$urandom, $urandom});
      sa = 3'($urandom_range(0, 2)); sb = 3'($urandom_range(0, 2)); sc = 3'($urandom_range(0, 2));
      ba = rnd_bias(); bb = rnd_bias(); bc = rnd_bias();
      pa = fx_t'($urandom); pb = fx_t'($urandom); pc = fx_t'($urandom);
      if (set == 5) begin sa = 3'd7; ba = 32'h7fff_ffff; end     // largest shift and bias
      for (int t = 0; t < 24 + 7; t++) begin
        xa = 25'($urandom); xc = 40'({$urandom, $urandom});
        xq.push_back(xa); xcq.push_back(xc);
        @(posedge clk); #1;
        if (t >= 5 && t - 5 < 24) begin
          bit eb; fx_t ey;
          ey = ref_y(dotp(64'(xq[t-5]), 64'(wa), 25, 1), sa, ba, pa, 0, eb); cmp("sign", oa, ya, eb, ey);
          ey = ref_y(dotp(64'(xq[t-5]), 64'(wb), 25, 1), sb, bb, pb, 1, eb); cmp("step", ob, yb, eb, ey);
        end
        if (t >= 6 && t - 6 < 24) begin
          bit eb; fx_t ey;
          ey = ref_y(dotp(64'(xcq[t-6]), 64'(wc), 40, 0), sc, bc, pc, 0, eb); cmp("01in", oc, yc, eb, ey);
        end
      end
    end
    checks++;
    if (n_one == 0 || n_zero == 0) begin failures++; $display("FAIL threshold outcomes not both seen"); end
    $display("INFO outputs 1: %0d, outputs 0: %0d", n_one, n_zero);
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
