// tb_tri_inversion: self-checking test of the descaling that yields Rbar^-1.
// Random extended-Q contents, permutations and lambdas are applied; every
// entry on and below the diagonal must equal Q2[r][perm[c]]/lambda (computed
// in floating point) and every entry above it must be zero. The latency of
// NITER+2 cycles is checked as well.
module tb_tri_inversion;
  import viper_pkg::*;
  localparam int NR = 8, NT = 8, NC = NR + NT, IW = $clog2(NR);
  logic clk = 0, rst_n = 0, start = 0, busy, done;
  cplx_t qbar [NR][NC];
  logic [IW-1:0] perm [NR];
  word_t lambda;
  cplx_t rinv [NR][NR];
  int checks = 0, failures = 0;

  tri_inversion #(.NR(NR), .NT(NT)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic real absr(input real a);
    return a < 0 ? -a : a;
  endfunction

  initial begin
    lambda = 16'd256;
    for (int r = 0; r < NR; r++) begin
      perm[r] = IW'(r);
      for (int c = 0; c < NC; c++) qbar[r][c] = '0;
    end
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int trial = 0; trial < 30; trial++) begin
      automatic int cyc = 0;
      automatic real lam;
      lambda = word_t'($urandom_range(32, 512));
      lam = real'(lambda) / 256.0;
      for (int r = 0; r < NR; r++) begin
        perm[r] = IW'(r);
        for (int c = 0; c < NC; c++) begin
          qbar[r][c].re = word_t'($signed($urandom_range(0, 255)) - 128);   // +-0.5
          qbar[r][c].im = word_t'($signed($urandom_range(0, 255)) - 128);
        end
      end
      for (int r = NR - 1; r > 0; r--) begin  // random permutation
        automatic int j = $urandom_range(0, r);
        automatic logic [IW-1:0] t = perm[r];
        perm[r] = perm[j];
        perm[j] = t;
      end
      @(negedge clk);
      start = 1;
      @(negedge clk);
      start = 0;
      while (!done) begin @(negedge clk); cyc++; end
      checks++;
      if (cyc != 4 + 2) begin failures++; $display("FAIL latency %0d", cyc); end
      for (int r = 0; r < NR; r++)
        for (int c = 0; c < NR; c++) begin
          checks++;
          if (c > r) begin
            if (rinv[r][c] != '0) begin failures++; $display("FAIL upper %0d %0d", r, c); end
          end else begin
            automatic real er = real'(qbar[r][NT+int'(perm[c])].re) / 256.0 / lam;
            automatic real ei = real'(qbar[r][NT+int'(perm[c])].im) / 256.0 / lam;
            if (er > 127.0) er = 127.99;
            if (er < -128.0) er = -128.0;
            if (ei > 127.0) ei = 127.99;
            if (ei < -128.0) ei = -128.0;
            if (absr(real'(rinv[r][c].re) / 256.0 - er) > 0.01 + 0.002 * absr(er) ||
                absr(real'(rinv[r][c].im) / 256.0 - ei) > 0.01 + 0.002 * absr(ei)) begin
              failures++;
              $display("FAIL rinv[%0d][%0d] %f ref %f", r, c, real'(rinv[r][c].re) / 256.0, er);
            end
          end
        end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
