// tb_viper_top: end-to-end test of the precoder.
// Instance A is the main configuration (8 users, 8 antennas, 8 paths, 8 PEs,
// 64-QAM). Instance B is overloaded (8 users on 4 antennas, 4-QAM) and
// evaluates 16 paths on 8 PEs, so the PE array is folded into two rounds.
// viper_checker checks every precoded vector against a floating-point
// regularised zero-forcing reference and counts the mechanisms; each must
// have happened at least once.
module tb_viper_top;
  import viper_pkg::*;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  // ---- instance A: defaults ----
  logic a_rst_n, a_pre_start, a_pre_done, a_pre_ready, a_post_start, a_post_ready, a_out_valid, a_fin;
  cplx_t a_h [8][8]; word_t a_lambda; logic [2:0] a_perm [8];
  cplx_t a_v [8]; log2tau_t a_log2tau; cplx_t a_x [8]; pow_t a_gamma; tsym_t a_t [8];
  logic [2:0] a_kbest; logic [1:0] a_rounds;
  int a_checks, a_failures, a_sorted, a_pert, a_nfirst, a_folded, a_vec, a_ch;

  viper_top dut_a (
    .clk, .rst_n(a_rst_n), .pre_start(a_pre_start), .h(a_h), .lambda(a_lambda), .pre_done(a_pre_done),
    .pre_ready(a_pre_ready), .perm(a_perm), .post_start(a_post_start), .v(a_v), .log2tau(a_log2tau),
    .post_ready(a_post_ready), .out_valid(a_out_valid), .x(a_x), .gamma(a_gamma), .t(a_t),
    .kbest(a_kbest), .rounds(a_rounds));

  viper_checker #(.NR(8), .NT(8), .K(8), .NPE(8), .NCH(4), .NVEC(6), .LOG2TAU(4), .QHALF(4), .LAMBDA(128)) chk_a (
    .clk, .rst_n(a_rst_n), .pre_start(a_pre_start), .h(a_h), .lambda(a_lambda), .pre_done(a_pre_done),
    .pre_ready(a_pre_ready), .perm(a_perm), .post_start(a_post_start), .v(a_v), .log2tau(a_log2tau),
    .post_ready(a_post_ready), .out_valid(a_out_valid), .x(a_x), .gamma(a_gamma), .t(a_t),
    .kbest(a_kbest), .rounds(a_rounds), .finished(a_fin), .checks(a_checks), .failures(a_failures),
    .n_sorted(a_sorted), .n_perturbed(a_pert), .n_not_first(a_nfirst), .n_folded(a_folded),
    .n_vectors(a_vec), .n_channels(a_ch));

  // ---- instance B: overloaded, folded ----
  logic b_rst_n, b_pre_start, b_pre_done, b_pre_ready, b_post_start, b_post_ready, b_out_valid, b_fin;
  cplx_t b_h [8][4]; word_t b_lambda; logic [2:0] b_perm [8];
  cplx_t b_v [8]; log2tau_t b_log2tau; cplx_t b_x [4]; pow_t b_gamma; tsym_t b_t [8];
  logic [3:0] b_kbest; logic [1:0] b_rounds;
  int b_checks, b_failures, b_sorted, b_pert, b_nfirst, b_folded, b_vec, b_ch;

  viper_top #(.NR(8), .NT(4), .K(16), .NPE(8)) dut_b (
    .clk, .rst_n(b_rst_n), .pre_start(b_pre_start), .h(b_h), .lambda(b_lambda), .pre_done(b_pre_done),
    .pre_ready(b_pre_ready), .perm(b_perm), .post_start(b_post_start), .v(b_v), .log2tau(b_log2tau),
    .post_ready(b_post_ready), .out_valid(b_out_valid), .x(b_x), .gamma(b_gamma), .t(b_t),
    .kbest(b_kbest), .rounds(b_rounds));

  viper_checker #(.NR(8), .NT(4), .K(16), .NPE(8), .NCH(4), .NVEC(6), .LOG2TAU(2), .QHALF(1), .LAMBDA(128)) chk_b (
    .clk, .rst_n(b_rst_n), .pre_start(b_pre_start), .h(b_h), .lambda(b_lambda), .pre_done(b_pre_done),
    .pre_ready(b_pre_ready), .perm(b_perm), .post_start(b_post_start), .v(b_v), .log2tau(b_log2tau),
    .post_ready(b_post_ready), .out_valid(b_out_valid), .x(b_x), .gamma(b_gamma), .t(b_t),
    .kbest(b_kbest), .rounds(b_rounds), .finished(b_fin), .checks(b_checks), .failures(b_failures),
    .n_sorted(b_sorted), .n_perturbed(b_pert), .n_not_first(b_nfirst), .n_folded(b_folded),
    .n_vectors(b_vec), .n_channels(b_ch));

  task automatic need(input int n, input string what);
    checks++;
    $display("mechanism %-40s happened %0d times", what, n);
    if (n == 0) begin failures++; $display("FAIL mechanism never happened: %s", what); end
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks + a_checks + b_checks, failures + a_failures + b_failures + 1);
    $finish;
  end

  initial begin
    #1;
    wait (a_fin && b_fin);
    need(a_sorted + b_sorted, "user sorting (non-identity permutation)");
    need(a_pert + b_pert, "non-zero perturbation selected");
    need(a_nfirst + b_nfirst, "winning path other than the first");
    need(b_folded, "folded PE array (two rounds)");
    need(a_folded == 0 ? 1 : 0, "single round with one PE per path");
    need(b_vec, "overloaded precoding (8 users, 4 antennas)");
    need((a_vec > a_ch) ? 1 : 0, "several vectors per channel");
    need((a_ch > 1) ? 1 : 0, "channel replaced (new preprocessing)");
    $display("TB_RESULT checks=%0d failures=%0d", checks + a_checks + b_checks, failures + a_failures + b_failures);
    $finish;
  end
endmodule
