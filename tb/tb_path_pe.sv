// tb_path_pe: self-checking test of one pipelined path-evaluation PE.
// Random lower-triangular Rinv (real positive diagonal), Rbar diagonal =
// 1/Rinv_ll, 16-QAM data (tau = 8) and, per trial, NP random position vectors
// streamed into the PE on consecutive cycles. For every result and level the
// testbench recomputes, in floating point and from the symbols the PE chose
// at the levels above, the accumulated value and the effective point, and
// checks that the chosen symbol is the p-th entry of the neighbourhood sorted
// by distance to the region's representative point (levels whose effective
// point lies within 1/64 of a region border are not judged). It then checks
// z = ytilde - tau*Rinv*t and d = ||z||^2 against floating point, that each
// result appears exactly NR cycles after its path entered, in order, and that
// the PE takes one path per cycle.
module tb_path_pe;
  import viper_pkg::*;
  localparam int NR = 8;
  logic clk = 0, rst_n = 0, in_valid = 0, out_valid;
  localparam int NP = 5;
  pidx_t pq [NP][NR];
  pidx_t path [NR];
  cplxw_t ytilde [NR];
  cplx_t rinv [NR][NR];
  word_t rdiag [NR];
  log2tau_t log2tau;
  tsym_t t [NR];
  cplxw_t z [NR];
  pow_t d;
  int checks = 0, failures = 0, judged = 0;

  path_pe #(.NR(NR)) dut (.*);
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

  // expected offset of rank k for fractional offset (xr, xi)
  task automatic expect_off(input real xr, input real xi, input int k, output int ox, output int oy);
    automatic real rr, ri;
    automatic int ord [9];
    automatic bit swp = absr(xi) > absr(xr);
    rr = swp ? 0.15 : 0.3;
    ri = swp ? 0.3 : 0.15;
    if (xr < 0) rr = -rr;
    if (xi < 0) ri = -ri;
    for (int n = 0; n < 9; n++) ord[n] = n;
    for (int a = 0; a < 9; a++)
      for (int b = a + 1; b < 9; b++)
        if ((rr - (ord[b] % 3 - 1)) ** 2 + (ri - (ord[b] / 3 - 1)) ** 2 <
            (rr - (ord[a] % 3 - 1)) ** 2 + (ri - (ord[a] / 3 - 1)) ** 2) begin
          automatic int tmp = ord[a];
          ord[a] = ord[b];
          ord[b] = tmp;
        end
    ox = ord[k] % 3 - 1;
    oy = ord[k] / 3 - 1;
  endtask

  // check one result against the path that produced it
  task automatic check_path(input pidx_t pth [NR]);
    automatic real dref = 0.0;
    for (int l = 0; l < NR; l++) begin
      automatic real ar = real'(ytilde[l].re) / 256.0, ai = real'(ytilde[l].im) / 256.0;
      automatic real sr, si, fr, fi, zr, zi;
      automatic int cr, ci, ox, oy;
      for (int k = 0; k < l; k++) begin
        ar -= 8.0 * (rw(rinv[l][k].re) * rt(t[k].re) - rw(rinv[l][k].im) * rt(t[k].im)) / 256.0;
        ai -= 8.0 * (rw(rinv[l][k].re) * rt(t[k].im) + rw(rinv[l][k].im) * rt(t[k].re)) / 256.0;
      end
      sr = ar * real'(rdiag[l]) / 256.0 / 8.0;
      si = ai * real'(rdiag[l]) / 256.0 / 8.0;
      cr = $rtoi($floor(sr + 0.5));
      ci = $rtoi($floor(si + 0.5));
      fr = sr - cr;
      fi = si - ci;
      if (absr(absr(fr) - 0.5) > 0.02 && absr(absr(fi) - 0.5) > 0.02 && absr(fr) > 0.02 && absr(fi) > 0.02 &&
          absr(absr(fr) - absr(fi)) > 0.02) begin
        expect_off(fr, fi, int'(pth[l]), ox, oy);
        judged++;
        chk(rt(t[l].re) == real'(cr + ox) && rt(t[l].im) == real'(ci + oy),
            $sformatf("t[%0d] (%f,%f) expected (%0d,%0d)", l, rt(t[l].re), rt(t[l].im), cr + ox, ci + oy));
      end
      zr = ar - 8.0 * rw(rinv[l][l].re) * rt(t[l].re) / 256.0;
      zi = ai - 8.0 * rw(rinv[l][l].re) * rt(t[l].im) / 256.0;
      dref += zr * zr + zi * zi;
      chk(absr(real'(z[l].re) / 256.0 - zr) < 0.02 && absr(real'(z[l].im) / 256.0 - zi) < 0.02,
          $sformatf("z[%0d] %f ref %f", l, real'(z[l].re) / 256.0, zr));
    end
    chk(absr(real'(d) / 65536.0 - dref) < 0.01 * dref + 0.05, $sformatf("d %f ref %f", real'(d) / 65536.0, dref));
  endtask

  initial begin
    log2tau = 3;
    for (int r = 0; r < NR; r++) begin
      path[r] = '0; ytilde[r] = '0; rdiag[r] = 16'd256;
      for (int c = 0; c < NR; c++) rinv[r][c] = '0;
    end
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int trial = 0; trial < 200; trial++) begin
      automatic int got = 0;
      automatic real vr [NR], vi [NR];
      for (int r = 0; r < NR; r++) begin
        for (int c = 0; c < NR; c++)
          if (c < r) rinv[r][c] = '{re: word_t'($signed($urandom_range(0, 255)) - 128), im: word_t'($signed($urandom_range(0, 255)) - 128)};
          else if (c > r) rinv[r][c] = '0;
        rinv[r][r] = '{re: word_t'($urandom_range(128, 512)), im: '0};
        rdiag[r] = word_t'((65536 + rinv[r][r].re / 2) / rinv[r][r].re);
        vr[r] = 2 * $signed($urandom_range(0, 3)) - 3;
        vi[r] = 2 * $signed($urandom_range(0, 3)) - 3;
      end
      for (int r = 0; r < NR; r++) begin
        automatic real ar = 0.0, ai = 0.0;
        for (int c = 0; c <= r; c++) begin
          ar += (rw(rinv[r][c].re) * vr[c] - rw(rinv[r][c].im) * vi[c]) / 256.0;
          ai += (rw(rinv[r][c].re) * vi[c] + rw(rinv[r][c].im) * vr[c]) / 256.0;
        end
        ytilde[r] = '{re: acc_t'($rtoi(ar * 256.0)), im: acc_t'($rtoi(ai * 256.0))};
      end
      for (int q = 0; q < NP; q++) for (int l = 0; l < NR; l++) pq[q][l] = pidx_t'($urandom_range(0, 8));
      // stream NP paths on consecutive cycles; a result must appear NR
      // cycles after its path entered
      for (int n = 0; n < NP + NR + 3; n++) begin
        @(negedge clk);
        if (out_valid) begin
          chk(n - NR == got, $sformatf("result at cycle %0d, expected path %0d", n, got));
          if (got < NP) check_path(pq[got]);
          got++;
        end
        in_valid = (n < NP);
        if (n < NP) path = pq[n];
      end
      chk(got == NP, $sformatf("%0d results for %0d paths", got, NP));
    end
    chk(judged > 800, $sformatf("too few judged decisions %0d", judged));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
