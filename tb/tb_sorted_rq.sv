// tb_sorted_rq: self-checking test of the improved sorted RQ decomposition.
// For random channels it checks, against a floating-point run of the same
// algorithm: the permutation, the diagonal of Rbar, the lower part of Rbar and
// every entry of Qbar; and, independently of any reference, that
// P*[H lambda*I] = Rbar*Qbar and that the rows of Qbar are orthonormal.
// It also checks the cycle count from start to done.
module tb_sorted_rq;
  import viper_pkg::*;
  localparam int NR = 8, NT = 8, NC = NR + NT;
  localparam int IW = $clog2(NR);
  logic clk = 0, rst_n = 0, start = 0, busy, done;
  cplx_t h [NR][NT];
  word_t lambda;
  cplx_t qbar [NR][NC];
  word_t rdiag [NR];
  cplx_t rlow [NR][NR];
  logic [IW-1:0] perm [NR];
  int checks = 0, failures = 0;

  sorted_rq #(.NR(NR), .NT(NT)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic real fx(input word_t w);
    return real'(w) / 256.0;
  endfunction

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s", what);
    end
  endtask

  function automatic real absr(input real a);
    return a < 0 ? -a : a;
  endfunction

  // floating-point reference of the algorithm
  real qr [NR][NC], qi [NR][NC], rr [NR][NR], ri [NR][NR], nrm [NR];
  int  pr [NR];
  bit  near_tie;  // reference pivot choice within rounding distance of another

  task automatic reference(input real lam);
    near_tie = 0;
    for (int r = 0; r < NR; r++) begin
      for (int c = 0; c < NT; c++) begin
        qr[r][c] = fx(h[r][c].re);
        qi[r][c] = fx(h[r][c].im);
      end
      for (int c = 0; c < NR; c++) begin
        qr[r][NT+c] = (c == r) ? lam : 0.0;
        qi[r][NT+c] = 0.0;
        rr[r][c] = 0.0;
        ri[r][c] = 0.0;
      end
      pr[r] = r;
      nrm[r] = 0.0;
      for (int c = 0; c < NC; c++) nrm[r] += qr[r][c] ** 2 + qi[r][c] ** 2;
    end
    for (int i = 0; i < NR; i++) begin
      int p = i;
      real s;
      for (int j = i + 1; j < NR; j++) if (nrm[j] < nrm[p]) p = j;
      for (int j = i; j < NR; j++) if (j != p && nrm[j] - nrm[p] < 0.05) near_tie = 1;
      for (int c = 0; c < NC; c++) begin
        real t;
        t = qr[i][c]; qr[i][c] = qr[p][c]; qr[p][c] = t;
        t = qi[i][c]; qi[i][c] = qi[p][c]; qi[p][c] = t;
      end
      for (int c = 0; c < NR; c++) begin
        real t;
        t = rr[i][c]; rr[i][c] = rr[p][c]; rr[p][c] = t;
        t = ri[i][c]; ri[i][c] = ri[p][c]; ri[p][c] = t;
      end
      begin int t; t = pr[i]; pr[i] = pr[p]; pr[p] = t; end
      begin real t; t = nrm[i]; nrm[i] = nrm[p]; nrm[p] = t; end
      s = $sqrt(nrm[i]);
      rr[i][i] = s;
      for (int c = 0; c < NC; c++) begin
        qr[i][c] /= s;
        qi[i][c] /= s;
      end
      for (int j = i + 1; j < NR; j++) begin
        automatic real dr = 0.0, di = 0.0;
        for (int c = 0; c < NC; c++) begin
          dr += qr[j][c] * qr[i][c] + qi[j][c] * qi[i][c];
          di += qi[j][c] * qr[i][c] - qr[j][c] * qi[i][c];
        end
        rr[j][i] = dr;
        ri[j][i] = di;
        for (int c = 0; c < NC; c++) begin
          real a, b;
          a = qr[j][c] - (dr * qr[i][c] - di * qi[i][c]);
          b = qi[j][c] - (dr * qi[i][c] + di * qr[i][c]);
          qr[j][c] = a;
          qi[j][c] = b;
        end
        nrm[j] -= dr * dr + di * di;
      end
    end
  endtask

  initial begin
    lambda = 16'd128;  // 0.5
    for (int r = 0; r < NR; r++) for (int c = 0; c < NT; c++) h[r][c] = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int trial = 0; trial < 20; trial++) begin
      automatic int cyc = 0;
      real lam;
      lambda = word_t'($urandom_range(64, 256));   // 0.25 .. 1.0
      lam = fx(lambda);
      for (int r = 0; r < NR; r++)
        for (int c = 0; c < NT; c++) begin
          h[r][c].re = word_t'($signed($urandom_range(0, 1023)) - 512);  // -2 .. 2
          h[r][c].im = word_t'($signed($urandom_range(0, 1023)) - 512);
        end
      @(negedge clk);
      start = 1;
      @(negedge clk);
      start = 0;
      while (!done) begin @(negedge clk); cyc++; end
      reference(lam);
      check(cyc == NC + NR * (NITER_EXP + 3) + (NR - 1) * (NC + 1), $sformatf("latency %0d", cyc));
      for (int i = 0; i < NR && !near_tie; i++) begin
        check(int'(perm[i]) == pr[i], $sformatf("perm[%0d]=%0d ref %0d", i, perm[i], pr[i]));
        check(absr(fx(rdiag[i]) - rr[i][i]) < 0.03 * rr[i][i] + 0.02, $sformatf("rdiag[%0d] %f ref %f", i, fx(rdiag[i]), rr[i][i]));
        for (int j = 0; j < i; j++)
          check(absr(fx(rlow[i][j].re) - rr[i][j]) < 0.06 && absr(fx(rlow[i][j].im) - ri[i][j]) < 0.06,
                $sformatf("rlow[%0d][%0d]", i, j));
        for (int c = 0; c < NC; c++)
          check(absr(fx(qbar[i][c].re) - qr[i][c]) < 0.04 && absr(fx(qbar[i][c].im) - qi[i][c]) < 0.04,
                $sformatf("qbar[%0d][%0d] %f ref %f", i, c, fx(qbar[i][c].re), qr[i][c]));
      end
      // reconstruction P*Hbar = Rbar*Qbar and orthonormal rows
      for (int i = 0; i < NR; i++) begin
        for (int c = 0; c < NC; c++) begin
          automatic real er = 0.0, ei = 0.0; real hr, hi;
          for (int k = 0; k <= i; k++) begin
            real ar, ai;
            ar = (k == i) ? fx(rdiag[i]) : fx(rlow[i][k].re);
            ai = (k == i) ? 0.0 : fx(rlow[i][k].im);
            er += ar * fx(qbar[k][c].re) - ai * fx(qbar[k][c].im);
            ei += ar * fx(qbar[k][c].im) + ai * fx(qbar[k][c].re);
          end
          if (c < NT) begin
            hr = fx(h[perm[i]][c].re);
            hi = fx(h[perm[i]][c].im);
          end else begin
            hr = (c - NT == int'(perm[i])) ? lam : 0.0;
            hi = 0.0;
          end
          check(absr(er - hr) < 0.08 && absr(ei - hi) < 0.08, $sformatf("reconstruct [%0d][%0d]", i, c));
        end
        for (int k = 0; k < NR; k++) begin
          automatic real dr = 0.0, di = 0.0;
          for (int c = 0; c < NC; c++) begin
            dr += fx(qbar[i][c].re) * fx(qbar[k][c].re) + fx(qbar[i][c].im) * fx(qbar[k][c].im);
            di += fx(qbar[i][c].im) * fx(qbar[k][c].re) - fx(qbar[i][c].re) * fx(qbar[k][c].im);
          end
          check(absr(dr - ((i == k) ? 1.0 : 0.0)) < 0.05 && absr(di) < 0.05, $sformatf("orthonormal %0d %0d", i, k));
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  localparam int NITER_EXP = 4;
endmodule
