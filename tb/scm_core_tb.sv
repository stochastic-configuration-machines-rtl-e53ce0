// scm_core_tb: end-to-end checks of the model core in five configurations
// modelled on the paper's experiments, each with a random model, checking
// every output against the reference model and the evaluation latency:
//   A  25 inputs, 60 sign nodes                      9 cycles (paper: 9)
//   B  56 inputs, 60 step nodes, two-cycle adds     10 cycles (paper: 10)
//   C  25 inputs, 60-60 step-step                   15 cycles (paper: 18)
//   D  56 inputs, 40-40-40 sign-sign-sign, 2-cycle  24 cycles (paper: 24)
//   E  576 inputs, 20-20 sign-step, 2-cycle adds    17 cycles (paper: 19)
// Also requires that negative sign outputs (-beta) and zero step outputs
// occurred.
module scm_core_tb;
  import scm_pkg::*;
  logic clk = 0;
  always #5 clk = ~clk;

  int c [5], f [5], ns [5], nz [5];
  bit d [5];

  scm_core_check #(.N_IN(25), .N_LAYERS(1), .NODES('{60, 0, 0}),
    .ACT('{ACT_SIGN, ACT_SIGN, ACT_SIGN}), .ADD_STAGES(1), .EXP_LAT(9)) u_a (
    .clk(clk), .checks(c[0]), .failures(f[0]), .n_neg_sign(ns[0]), .n_zero_step(nz[0]), .done(d[0]));
  scm_core_check #(.N_IN(56), .N_LAYERS(1), .NODES('{60, 0, 0}),
    .ACT('{ACT_STEP, ACT_SIGN, ACT_SIGN}), .ADD_STAGES(2), .EXP_LAT(10)) u_b (
    .clk(clk), .checks(c[1]), .failures(f[1]), .n_neg_sign(ns[1]), .n_zero_step(nz[1]), .done(d[1]));
  scm_core_check #(.N_IN(25), .N_LAYERS(2), .NODES('{60, 60, 0}),
    .ACT('{ACT_STEP, ACT_STEP, ACT_SIGN}), .ADD_STAGES(1), .EXP_LAT(15)) u_c (
    .clk(clk), .checks(c[2]), .failures(f[2]), .n_neg_sign(ns[2]), .n_zero_step(nz[2]), .done(d[2]));
  scm_core_check #(.N_IN(56), .N_LAYERS(3), .NODES('{40, 40, 40}),
    .ACT('{ACT_SIGN, ACT_SIGN, ACT_SIGN}), .ADD_STAGES(2), .EXP_LAT(24)) u_d (
    .clk(clk), .checks(c[3]), .failures(f[3]), .n_neg_sign(ns[3]), .n_zero_step(nz[3]), .done(d[3]));
  scm_core_check #(.N_IN(576), .N_LAYERS(2), .NODES('{20, 20, 0}),
    .ACT('{ACT_SIGN, ACT_STEP, ACT_SIGN}), .ADD_STAGES(2), .EXP_LAT(17), .N_VEC(40), .BIAS_RANGE(20)) u_e (
    .clk(clk), .checks(c[4]), .failures(f[4]), .n_neg_sign(ns[4]), .n_zero_step(nz[4]), .done(d[4]));

  initial begin
    int checks, failures, neg, zero;
    wait (d[0] && d[1] && d[2] && d[3] && d[4]);
    checks = 0; failures = 0; neg = 0; zero = 0;
    for (int i = 0; i < 5; i++) begin
      checks += c[i]; failures += f[i]; neg += ns[i]; zero += nz[i];
    end
    checks += 2;
    if (neg == 0)  begin failures++; $display("FAIL no -beta sign output seen"); end
    if (zero == 0) begin failures++; $display("FAIL no zero step output seen"); end
    $display("INFO sign -beta outputs %0d, step zero outputs %0d", neg, zero);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int checks, failures;
    repeat (200000) @(posedge clk);
    checks = 0; failures = 1;
    for (int i = 0; i < 5; i++) begin checks += c[i]; failures += f[i]; end
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
