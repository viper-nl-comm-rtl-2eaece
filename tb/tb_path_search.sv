// tb_path_search: self-checking test of the PE array. Two instances see the
// same inputs: one with a PE per path (NPE=K=8, one round) and one folded
// onto three PEs (three rounds). For random inputs it checks that both give
// identical results for every path, that z = ytilde - tau*Rinv*t and
// d = ||z||^2 hold for each path (floating point, from the reported t), that
// the rounds and the latency ceil(K/NPE)+NR+1 are as specified (the rounds
// stream into the pipelined PEs on consecutive cycles).
module tb_path_search;
  import viper_pkg::*;
  localparam int NR = 8, K = 8;
  logic clk = 0, rst_n = 0, start = 0;
  pidx_t paths [K][NR];
  cplxw_t ytilde [NR];
  cplx_t rinv [NR][NR];
  word_t rdiag [NR];
  log2tau_t log2tau;
  logic busy_a, done_a, busy_b, done_b;
  tsym_t t_a [K][NR], t_b [K][NR];
  cplxw_t z_a [K][NR], z_b [K][NR];
  pow_t d_a [K], d_b [K];
  logic [1:0] rounds_a;
  logic [2:0] rounds_b;
  int checks = 0, failures = 0;

  path_search #(.NR(NR), .K(K), .NPE(8)) dut_a (.clk, .rst_n, .start, .paths, .ytilde, .rinv, .rdiag, .log2tau,
    .busy(busy_a), .done(done_a), .t_all(t_a), .z_all(z_a), .d_all(d_a), .rounds(rounds_a));
  path_search #(.NR(NR), .K(K), .NPE(3)) dut_b (.clk, .rst_n, .start, .paths, .ytilde, .rinv, .rdiag, .log2tau,
    .busy(busy_b), .done(done_b), .t_all(t_b), .z_all(z_b), .d_all(d_b), .rounds(rounds_b));
  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic real rw(input word_t a);
    return real'(a);
  endfunction
  function automatic real rt(input logic signed [7:0] a);
    return real'(a);
  endfunction
  function automatic real absr(input real a);
    return a < 0 ? -a : a;
  endfunction
  task automatic chk(input bit ok, input string s);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", s); end
  endtask

  initial begin
    log2tau = 3;
    for (int r = 0; r < NR; r++) begin
      ytilde[r] = '0; rdiag[r] = 16'd256;
      for (int c = 0; c < NR; c++) rinv[r][c] = '0;
    end
    for (int k = 0; k < K; k++) for (int l = 0; l < NR; l++) paths[k][l] = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int trial = 0; trial < 30; trial++) begin
      automatic int ca = 0, cb = 0, cyc = 0;
      for (int r = 0; r < NR; r++) begin
        for (int c = 0; c < NR; c++)
          rinv[r][c] = (c < r) ? '{re: word_t'($signed($urandom_range(0, 255)) - 128), im: word_t'($signed($urandom_range(0, 255)) - 128)} : '0;
        rinv[r][r] = '{re: word_t'($urandom_range(128, 512)), im: '0};
        rdiag[r] = word_t'((65536 + rinv[r][r].re / 2) / rinv[r][r].re);
        ytilde[r] = '{re: acc_t'($signed($urandom_range(0, 4095)) - 2048), im: acc_t'($signed($urandom_range(0, 4095)) - 2048)};
      end
      for (int k = 0; k < K; k++) for (int l = 0; l < NR; l++) paths[k][l] = pidx_t'($urandom_range(0, 8));
      @(negedge clk);
      start = 1;
      @(negedge clk);
      start = 0;
      while (!(ca > 0 && cb > 0)) begin
        cyc++;
        if (done_a) ca = cyc;
        if (done_b) cb = cyc;
        @(negedge clk);
      end
      chk(ca == 1 + NR + 1, $sformatf("latency NPE=8: %0d", ca));
      chk(cb == 3 + NR + 1, $sformatf("latency NPE=3: %0d", cb));
      chk(rounds_a == 1 && rounds_b == 3, "rounds");
      for (int k = 0; k < K; k++) begin
        automatic real dref = 0.0;
        chk(t_a[k] == t_b[k] && z_a[k] == z_b[k] && d_a[k] == d_b[k], $sformatf("folded result differs, path %0d", k));
        for (int l = 0; l < NR; l++) begin
          automatic real zr = real'(ytilde[l].re) / 256.0, zi = real'(ytilde[l].im) / 256.0;
          for (int c = 0; c <= l; c++) begin
            zr -= 8.0 * (rw(rinv[l][c].re) * rt(t_a[k][c].re) - rw(rinv[l][c].im) * rt(t_a[k][c].im)) / 256.0;
            zi -= 8.0 * (rw(rinv[l][c].re) * rt(t_a[k][c].im) + rw(rinv[l][c].im) * rt(t_a[k][c].re)) / 256.0;
          end
          dref += zr * zr + zi * zi;
          chk(absr(real'(z_a[k][l].re) / 256.0 - zr) < 0.02 && absr(real'(z_a[k][l].im) / 256.0 - zi) < 0.02,
              $sformatf("z[%0d][%0d]", k, l));
        end
        chk(absr(real'(d_a[k]) / 65536.0 - dref) < 0.01 * dref + 0.05, $sformatf("d[%0d]", k));
        // identical position vectors must give identical symbols
        for (int k2 = 0; k2 < k; k2++)
          if (paths[k2] == paths[k]) chk(t_a[k2] == t_a[k], "same path, different symbols");
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
