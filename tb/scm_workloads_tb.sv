// scm_workloads_tb: runs the model core in the remaining network shapes of
// the published evaluation, each with a random model of that shape. Every
// output is checked against the reference model, and so is the evaluation
// latency. The shapes that scm_core_tb already covers are not repeated.
//
//   DB  inputs  nodes     activation      adds    cycles here (published)
//   1     25    60        step            1 cyc    9  (9)
//   1     25    18        sign            1 cyc    9  (-, SCN comparison)
//   1     25    40-40-40  sign-sign-sign  1 cyc   21  (23)
//   2     56    40-40-40  step-step-step  2 cyc   24  (24)
//   3    576    20        sign            2 cyc   10  (10)
//   3    576    20-20-20  sign-sign-sign  2 cyc   24  (24)
//   4    224    25        step            2 cyc   10  (10)
//   4    224    20-8      sign-sign       2 cyc   17  (19)
//   4    224    20-18     step-step       2 cyc   17  (19)
//
// Input widths are the encoded widths: 1 feature x 25 bits (scheme 2 V2),
// 2 x 28 (scheme 1, three places), 36 x 16 and 14 x 16 (scheme 2 V1).
// "2 cyc" is ADD_STAGES = 2, the two-cycle addition used for wide inputs.
module scm_workloads_tb;
  import scm_pkg::*;
  localparam int N = 9;
  logic clk = 0;
  always #5 clk = ~clk;

  int c [N], f [N], ns [N], nz [N];
  bit d [N];

  scm_core_check #(.N_IN(25), .N_LAYERS(1), .NODES('{60, 0, 0}),
    .ACT('{ACT_STEP, ACT_SIGN, ACT_SIGN}), .ADD_STAGES(1), .EXP_LAT(9)) u_db1_step (
    .clk(clk), .checks(c[0]), .failures(f[0]), .n_neg_sign(ns[0]), .n_zero_step(nz[0]), .done(d[0]));
  scm_core_check #(.N_IN(25), .N_LAYERS(1), .NODES('{18, 0, 0}),
    .ACT('{ACT_SIGN, ACT_SIGN, ACT_SIGN}), .ADD_STAGES(1), .EXP_LAT(9)) u_db1_18 (
    .clk(clk), .checks(c[1]), .failures(f[1]), .n_neg_sign(ns[1]), .n_zero_step(nz[1]), .done(d[1]));
  scm_core_check #(.N_IN(25), .N_LAYERS(3), .NODES('{40, 40, 40}),
    .ACT('{ACT_SIGN, ACT_SIGN, ACT_SIGN}), .ADD_STAGES(1), .EXP_LAT(21)) u_db1_deep (
    .clk(clk), .checks(c[2]), .failures(f[2]), .n_neg_sign(ns[2]), .n_zero_step(nz[2]), .done(d[2]));
  scm_core_check #(.N_IN(56), .N_LAYERS(3), .NODES('{40, 40, 40}),
    .ACT('{ACT_STEP, ACT_STEP, ACT_STEP}), .ADD_STAGES(2), .EXP_LAT(24)) u_db2_step3 (
    .clk(clk), .checks(c[3]), .failures(f[3]), .n_neg_sign(ns[3]), .n_zero_step(nz[3]), .done(d[3]));
  scm_core_check #(.N_IN(576), .N_LAYERS(1), .NODES('{20, 0, 0}),
    .ACT('{ACT_SIGN, ACT_SIGN, ACT_SIGN}), .ADD_STAGES(2), .EXP_LAT(10), .N_VEC(40), .BIAS_RANGE(20)) u_db3 (
    .clk(clk), .checks(c[4]), .failures(f[4]), .n_neg_sign(ns[4]), .n_zero_step(nz[4]), .done(d[4]));
  scm_core_check #(.N_IN(576), .N_LAYERS(3), .NODES('{20, 20, 20}),
    .ACT('{ACT_SIGN, ACT_SIGN, ACT_SIGN}), .ADD_STAGES(2), .EXP_LAT(24), .N_VEC(40), .BIAS_RANGE(20)) u_db3_deep (
    .clk(clk), .checks(c[5]), .failures(f[5]), .n_neg_sign(ns[5]), .n_zero_step(nz[5]), .done(d[5]));
  scm_core_check #(.N_IN(224), .N_LAYERS(1), .NODES('{25, 0, 0}),
    .ACT('{ACT_STEP, ACT_SIGN, ACT_SIGN}), .ADD_STAGES(2), .EXP_LAT(10), .N_VEC(60), .BIAS_RANGE(15)) u_db4 (
    .clk(clk), .checks(c[6]), .failures(f[6]), .n_neg_sign(ns[6]), .n_zero_step(nz[6]), .done(d[6]));
  scm_core_check #(.N_IN(224), .N_LAYERS(2), .NODES('{20, 8, 0}),
    .ACT('{ACT_SIGN, ACT_SIGN, ACT_SIGN}), .ADD_STAGES(2), .EXP_LAT(17), .N_VEC(60), .BIAS_RANGE(15)) u_db4_ss (
    .clk(clk), .checks(c[7]), .failures(f[7]), .n_neg_sign(ns[7]), .n_zero_step(nz[7]), .done(d[7]));
  scm_core_check #(.N_IN(224), .N_LAYERS(2), .NODES('{20, 18, 0}),
    .ACT('{ACT_STEP, ACT_STEP, ACT_SIGN}), .ADD_STAGES(2), .EXP_LAT(17), .N_VEC(60), .BIAS_RANGE(15)) u_db4_tt (
    .clk(clk), .checks(c[8]), .failures(f[8]), .n_neg_sign(ns[8]), .n_zero_step(nz[8]), .done(d[8]));

  function automatic bit all_done();
    for (int i = 0; i < N; i++) if (!d[i]) return 0;
    return 1;
  endfunction

  initial begin
    int checks, failures, neg, zero;
    while (!all_done()) @(posedge clk);
    checks = 0; failures = 0; neg = 0; zero = 0;
    for (int i = 0; i < N; i++) begin
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
    for (int i = 0; i < N; i++) begin checks += c[i]; failures += f[i]; end
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
