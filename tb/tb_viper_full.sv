// tb_viper_full: the precoder at its default size (8 users, 8 antennas,
// 8 most promising paths, 8 PEs) with no parameter changed, taken through
// complete operations: 10 channels, each preprocessed once and then used for
// 10 64-QAM information vectors. Every precoded vector is checked against
// the floating-point regularised zero-forcing reference in viper_checker.
module tb_viper_full;
  import viper_pkg::*;
  logic clk = 0;
  always #5 clk = ~clk;

  logic rst_n, pre_start, pre_done, pre_ready, post_start, post_ready, out_valid, fin;
  cplx_t h [8][8]; word_t lambda; logic [2:0] perm [8];
  cplx_t v [8]; log2tau_t log2tau; cplx_t x [8]; pow_t gamma; tsym_t t [8];
  logic [2:0] kbest; logic [1:0] rounds;
  int checks, failures, n_sorted, n_pert, n_nfirst, n_folded, n_vec, n_ch;

  viper_top dut (.*);

  viper_checker #(.NR(8), .NT(8), .K(8), .NPE(8), .NCH(10), .NVEC(10), .LOG2TAU(4), .QHALF(4), .LAMBDA(128)) chk (
    .clk, .rst_n, .pre_start, .h, .lambda, .pre_done, .pre_ready, .perm, .post_start, .v, .log2tau,
    .post_ready, .out_valid, .x, .gamma, .t, .kbest, .rounds, .finished(fin), .checks, .failures,
    .n_sorted, .n_perturbed(n_pert), .n_not_first(n_nfirst), .n_folded, .n_vectors(n_vec), .n_channels(n_ch));

  initial begin
    repeat (500000) @(posedge clk);
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  initial begin
    #1;
    wait (fin);
    $display("channels %0d, vectors %0d, sorted %0d, perturbed %0d, winner not first path %0d",
             n_ch, n_vec, n_sorted, n_pert, n_nfirst);
    $display("TB_RESULT checks=%0d failures=%0d", checks + 1, failures + ((n_vec == 100) ? 0 : 1));
    $finish;
  end
endmodule
