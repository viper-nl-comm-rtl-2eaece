// viper_checker: stimulus and checks for one viper_top instance, shared by the
// end-to-end testbenches.
//
// For NCH random channels (entries uniform in +-1.5 per component) it runs
// preprocessing, then NVEC random QAM vectors (2^QBITS points per axis pair,
// odd-integer grid, tau = 2^LOG2TAU). Each precoded vector x is checked
// against a floating-point regularised zero-forcing reference built from the
// perturbation t the design reported:
//     u = v - tau*t,  x_ref = H^H (H H^H + lambda^2 I)^-1 u,
//     gamma_ref = ||x_ref||^2,  x == x_ref / sqrt(gamma_ref)
// (the reference solves the NR x NR system by Gaussian elimination; it uses
// no factorisation from the design). Also checked: ||x|| = 1, that the
// reported perm is a permutation sorted as the decomposition defines
// (first user has the smallest regularised row norm), that t is within the
// perturbation range, and the exact preprocessing and postprocessing
// latencies.
// It counts how often the design's mechanisms occurred: non-identity user
// sorting, a non-zero perturbation, a winning path other than the first,
// folded rounds of the PE array and repeated vectors per channel.
module viper_checker
  import viper_pkg::*;
#(
  parameter int NR = 8,
  parameter int NT = 8,
  parameter int K = 8,
  parameter int NPE = 8,
  parameter int NCH = 3,
  parameter int NVEC = 4,
  parameter int LOG2TAU = 4,         // 64-QAM: tau = 16
  parameter int QHALF = 4,           // points per half axis (64-QAM: 4)
  parameter int LAMBDA = 128,        // Q8.8
  parameter int MAXPOST = 400,       // latency bound per vector, cycles
  localparam int IW = (NR > 1) ? $clog2(NR) : 1,
  localparam int KW = (K > 1) ? $clog2(K) : 1,
  localparam int RW = $clog2((K + NPE - 1) / NPE + 1),
  // expected latencies: sum of the stage latencies plus the controllers'
  // hand-over cycles (reciprocal square root with 4 Newton steps)
  localparam int NITER = 4,
  localparam int NC = NT + NR,
  localparam int PRELAT = (NC + NR * (NITER + 3) + (NR - 1) * (NC + 1)) + (NITER + 2) +
                          NR * (9 * K + 1) + 4,
  localparam int POSTLAT = 1 + (NR + 1) + ((K + NPE - 1) / NPE + NR + 1) + (K + 1) +
                           (NR + 1) + (NT + 1) + (NITER + 3) + 1
) (
  input  logic          clk,
  output logic          rst_n,
  output logic          pre_start,
  output cplx_t         h [NR][NT],
  output word_t         lambda,
  input  logic          pre_done,
  input  logic          pre_ready,
  input  logic [IW-1:0] perm [NR],
  output logic          post_start,
  output cplx_t         v [NR],
  output log2tau_t      log2tau,
  input  logic          post_ready,
  input  logic          out_valid,
  input  cplx_t         x [NT],
  input  pow_t          gamma,
  input  tsym_t         t [NR],
  input  logic [KW-1:0] kbest,
  input  logic [RW-1:0] rounds,
  output logic          finished,
  output int            checks,
  output int            failures,
  output int            n_sorted, n_perturbed, n_not_first, n_folded, n_vectors, n_channels
);

  function automatic real absr(input real a);
    return a < 0 ? -a : a;
  endfunction
  function automatic real rw(input word_t a);
    return real'(a);
  endfunction
  function automatic real rt(input logic signed [7:0] a);
    return real'(a);
  endfunction

  task automatic chk(input bit ok, input string s);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL [%0dx%0d] %s", NR, NT, s);
    end
  endtask

  real hr [NR][NT], hi [NR][NT];

  // floating-point RZF reference for perturbed vector u
  task automatic rzf(input real ur [NR], input real ui [NR], input real lam, output real xr [NT], output real xi [NT]);
    real ar [NR][NR+1], ai [NR][NR+1];
    real yr [NR], yi [NR];
    // A = H H^H + lam^2 I, augmented with u
    for (int r = 0; r < NR; r++) begin
      for (int c = 0; c < NR; c++) begin
        ar[r][c] = (r == c) ? lam * lam : 0.0;
        ai[r][c] = 0.0;
        for (int k = 0; k < NT; k++) begin
          ar[r][c] += hr[r][k] * hr[c][k] + hi[r][k] * hi[c][k];
          ai[r][c] += hi[r][k] * hr[c][k] - hr[r][k] * hi[c][k];
        end
      end
      ar[r][NR] = ur[r];
      ai[r][NR] = ui[r];
    end
    // Gaussian elimination (A is Hermitian positive definite: no pivoting)
    for (int p = 0; p < NR; p++)
      for (int r = p + 1; r < NR; r++) begin
        real den, fr, fi;
        den = ar[p][p] ** 2 + ai[p][p] ** 2;
        fr = (ar[r][p] * ar[p][p] + ai[r][p] * ai[p][p]) / den;
        fi = (ai[r][p] * ar[p][p] - ar[r][p] * ai[p][p]) / den;
        for (int c = p; c <= NR; c++) begin
          real nr_, ni_;
          nr_ = ar[r][c] - (fr * ar[p][c] - fi * ai[p][c]);
          ni_ = ai[r][c] - (fr * ai[p][c] + fi * ar[p][c]);
          ar[r][c] = nr_;
          ai[r][c] = ni_;
        end
      end
    for (int r = NR - 1; r >= 0; r--) begin
      real sr, si, den;
      sr = ar[r][NR];
      si = ai[r][NR];
      for (int c = r + 1; c < NR; c++) begin
        sr -= ar[r][c] * yr[c] - ai[r][c] * yi[c];
        si -= ar[r][c] * yi[c] + ai[r][c] * yr[c];
      end
      den = ar[r][r] ** 2 + ai[r][r] ** 2;
      yr[r] = (sr * ar[r][r] + si * ai[r][r]) / den;
      yi[r] = (si * ar[r][r] - sr * ai[r][r]) / den;
    end
    // x = H^H y
    for (int k = 0; k < NT; k++) begin
      xr[k] = 0.0;
      xi[k] = 0.0;
      for (int r = 0; r < NR; r++) begin
        xr[k] += hr[r][k] * yr[r] + hi[r][k] * yi[r];
        xi[k] += hr[r][k] * yi[r] - hi[r][k] * yr[r];
      end
    end
  endtask

  initial begin
    checks = 0; failures = 0; finished = 0;
    n_sorted = 0; n_perturbed = 0; n_not_first = 0; n_folded = 0; n_vectors = 0; n_channels = 0;
    rst_n = 0; pre_start = 0; post_start = 0;
    lambda = word_t'(LAMBDA);
    log2tau = log2tau_t'(LOG2TAU);
    for (int r = 0; r < NR; r++) begin
      v[r] = '0;
      for (int c = 0; c < NT; c++) h[r][c] = '0;
    end
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    for (int ch = 0; ch < NCH; ch++) begin
      automatic int prel;
      automatic real lam = real'(LAMBDA) / 256.0;
      automatic real nrm [NR];
      automatic bit ident = 1;
      automatic bit seen [NR];
      for (int r = 0; r < NR; r++)
        for (int c = 0; c < NT; c++) begin
          h[r][c] = '{re: word_t'($signed($urandom_range(0, 767)) - 384), im: word_t'($signed($urandom_range(0, 767)) - 384)};
          hr[r][c] = rw(h[r][c].re) / 256.0;
          hi[r][c] = rw(h[r][c].im) / 256.0;
        end
      pre_start = 1;
      @(negedge clk);
      pre_start = 0;
      prel = 1;
      while (!pre_done) begin @(negedge clk); prel++; end
      chk(prel == PRELAT, $sformatf("preprocessing latency %0d, expected %0d", prel, PRELAT));
      n_channels++;
      // perm must be a permutation, and its first user the one of smallest norm
      for (int r = 0; r < NR; r++) begin
        seen[r] = 0;
        nrm[r] = lam * lam;
        for (int c = 0; c < NT; c++) nrm[r] += hr[r][c] ** 2 + hi[r][c] ** 2;
      end
      for (int r = 0; r < NR; r++) begin
        seen[perm[r]] = 1;
        if (int'(perm[r]) != r) ident = 0;
      end
      for (int r = 0; r < NR; r++) chk(seen[r], "perm is not a permutation");
      for (int r = 0; r < NR; r++) chk(nrm[perm[0]] <= nrm[r] + 0.02, "first sorted user is not the weakest");
      if (!ident) n_sorted++;
      for (int vec = 0; vec < NVEC; vec++) begin
        automatic real ur [NR], ui [NR], xr [NT], xi [NT];
        automatic real g = 0.0, p = 0.0, tau = real'(1 << LOG2TAU), err = 0.0;
        automatic int cyc = 0;
        automatic bit nz = 0;
        while (!post_ready) @(negedge clk);
        for (int r = 0; r < NR; r++) begin
          v[r].re = word_t'((2 * $signed($urandom_range(0, 2 * QHALF - 1)) - (2 * QHALF - 1)) * 256);
          v[r].im = word_t'((2 * $signed($urandom_range(0, 2 * QHALF - 1)) - (2 * QHALF - 1)) * 256);
        end
        post_start = 1;
        @(negedge clk);
        post_start = 0;
        while (!out_valid) begin @(negedge clk); cyc++; end
        n_vectors++;
        chk(cyc < MAXPOST, $sformatf("postprocessing took %0d cycles", cyc));
        chk(cyc + 1 == POSTLAT, $sformatf("postprocessing latency %0d, expected %0d", cyc + 1, POSTLAT));
        for (int r = 0; r < NR; r++) begin
          chk(absr(rt(t[r].re)) <= 4 && absr(rt(t[r].im)) <= 4, "perturbation out of range");
          if (t[r] != '0) nz = 1;
          ur[r] = rw(v[r].re) / 256.0 - tau * rt(t[r].re);
          ui[r] = rw(v[r].im) / 256.0 - tau * rt(t[r].im);
        end
        if (nz) n_perturbed++;
        if (kbest != '0) n_not_first++;
        if (rounds > 1) n_folded++;
        rzf(ur, ui, lam, xr, xi);
        for (int k = 0; k < NT; k++) g += xr[k] ** 2 + xi[k] ** 2;
        chk(absr(real'(gamma) / 65536.0 - g) < 0.1 * g + 0.1, $sformatf("gamma %f ref %f", real'(gamma) / 65536.0, g));
        for (int k = 0; k < NT; k++) begin
          automatic real er = xr[k] / $sqrt(g), ei = xi[k] / $sqrt(g);
          automatic real dr = rw(x[k].re) / 8192.0, di = rw(x[k].im) / 8192.0;
          p += dr * dr + di * di;
          err += (dr - er) ** 2 + (di - ei) ** 2;
        end
        chk(absr(p - 1.0) < 0.01, $sformatf("output power %f", p));
        chk(err < 0.01, $sformatf("precoded vector error %f (squared, relative to unit power)", err));
      end
    end
    finished = 1;
  end
endmodule
