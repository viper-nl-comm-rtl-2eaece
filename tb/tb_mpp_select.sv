// tb_mpp_select: self-checking test of the K-best Metric-of-Promise search.
// A reference model in the testbench enumerates, level by level, all children
// of the current survivors in generation order, ranks them with a stable
// selection sort and keeps K. Paths and final metrics must match exactly; the
// metric of every returned path is also recomputed from its position vector,
// the list must be ascending, and the fixed latency NR*(9K+1) is checked.
// Cases include equal weights (many ties) and a zero weight.
module tb_mpp_select;
  import viper_pkg::*;
  localparam int NR = 8, K = 8;
  logic clk = 0, rst_n = 0, start = 0, busy, done;
  cplx_t rinv_diag [NR];
  pidx_t paths [K][NR];
  pow_t  mop [K];
  int checks = 0, failures = 0;

  mpp_select #(.NR(NR), .K(K)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  longint w [NR];
  longint sm [K], cm [K*9];
  int     sp [K][NR], cp [K*9][NR];
  bit     sv [K], cv [K*9];

  task automatic reference();
    for (int l = 0; l < NR; l++)
      w[l] = longint'(rinv_diag[l].re) * rinv_diag[l].re + longint'(rinv_diag[l].im) * rinv_diag[l].im;
    for (int e = 0; e < K; e++) begin
      sv[e] = (e == 0);
      sm[e] = 0;
      for (int l = 0; l < NR; l++) sp[e][l] = 0;
    end
    for (int l = 0; l < NR; l++) begin
      automatic int n = 0;
      for (int s = 0; s < K; s++)
        for (int c = 0; c < 9; c++) begin
          cv[n] = sv[s];
          cm[n] = sm[s] + w[l] * c;
          for (int q = 0; q < NR; q++) cp[n][q] = (q == l) ? c : sp[s][q];
          n++;
        end
      // stable selection of the K smallest valid children
      for (int e = 0; e < K; e++) begin
        automatic int best = -1;
        for (int n2 = 0; n2 < K * 9; n2++)
          if (cv[n2] && (best < 0 || cm[n2] < cm[best])) best = n2;
        if (best >= 0) begin
          sv[e] = 1;
          sm[e] = cm[best];
          for (int q = 0; q < NR; q++) sp[e][q] = cp[best][q];
          cv[best] = 0;
        end else sv[e] = 0;
      end
    end
  endtask

  task automatic run();
    automatic int cyc = 0;
    @(negedge clk);
    start = 1;
    @(negedge clk);
    start = 0;
    while (!done) begin @(negedge clk); cyc++; end
    reference();
    checks++;
    if (cyc != NR * (9 * K + 1)) begin failures++; $display("FAIL latency %0d", cyc); end
    for (int e = 0; e < K; e++) begin
      automatic longint m = 0;
      for (int l = 0; l < NR; l++) m += w[l] * paths[e][l];
      checks++;
      if (longint'(mop[e]) != m) begin failures++; $display("FAIL mop[%0d] %0d recomputed %0d", e, mop[e], m); end
      checks++;
      if (longint'(mop[e]) != sm[e]) begin failures++; $display("FAIL mop[%0d] %0d ref %0d", e, mop[e], sm[e]); end
      for (int l = 0; l < NR; l++) begin
        checks++;
        if (int'(paths[e][l]) != sp[e][l]) begin failures++; $display("FAIL path[%0d][%0d]=%0d ref %0d", e, l, paths[e][l], sp[e][l]); end
      end
      if (e > 0) begin
        checks++;
        if (mop[e] < mop[e-1]) begin failures++; $display("FAIL order %0d", e); end
      end
    end
  endtask

  initial begin
    for (int l = 0; l < NR; l++) rinv_diag[l] = '{re: 16'd256, im: '0};
    repeat (3) @(negedge clk);
    rst_n = 1;
    run();                      // all weights equal: many ties
    rinv_diag[3] = '0;          // one zero weight
    run();
    for (int t = 0; t < 20; t++) begin
      for (int l = 0; l < NR; l++)
        rinv_diag[l] = '{re: word_t'($urandom_range(16, 2048)), im: word_t'($signed($urandom_range(0, 64)) - 32)};
      run();
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
