// tb_vp_vector: self-checking test of ytilde = Rinv * vs. Random
// lower-triangular Rinv and QAM-like vectors; the result is compared with a
// floating-point matrix-vector product (within rounding of the Q8.8
// products), and the NR+1 cycle latency is checked.
module tb_vp_vector;
  import viper_pkg::*;
  localparam int NR = 8;
  logic clk = 0, rst_n = 0, start = 0, busy, done;
  cplx_t vs [NR];
  cplx_t rinv [NR][NR];
  cplxw_t ytilde [NR];
  int checks = 0, failures = 0;

  vp_vector #(.NR(NR)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic real absr(input real a);
    return a < 0 ? -a : a;
  endfunction

  initial begin
    for (int r = 0; r < NR; r++) begin
      vs[r] = '0;
      for (int c = 0; c < NR; c++) rinv[r][c] = '0;
    end
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 50; t++) begin
      automatic int cyc = 0;
      for (int r = 0; r < NR; r++) begin
        vs[r].re = word_t'((2 * $signed($urandom_range(0, 7)) - 7) * 256);  // 64-QAM grid
        vs[r].im = word_t'((2 * $signed($urandom_range(0, 7)) - 7) * 256);
        for (int c = 0; c < NR; c++)
          rinv[r][c] = (c > r) ? '0 : '{re: word_t'($signed($urandom_range(0, 1023)) - 512),
                                        im: word_t'($signed($urandom_range(0, 1023)) - 512)};
      end
      @(negedge clk);
      start = 1;
      @(negedge clk);
      start = 0;
      while (!done) begin @(negedge clk); cyc++; end
      checks++;
      if (cyc + 1 != NR + 1) begin failures++; $display("FAIL latency %0d", cyc + 1); end
      for (int r = 0; r < NR; r++) begin
        automatic real er = 0.0, ei = 0.0;
        for (int c = 0; c <= r; c++) begin
          er += (real'(rinv[r][c].re) * vs[c].re - real'(rinv[r][c].im) * vs[c].im) / 65536.0;
          ei += (real'(rinv[r][c].re) * vs[c].im + real'(rinv[r][c].im) * vs[c].re) / 65536.0;
        end
        checks++;
        if (absr(real'(ytilde[r].re) / 256.0 - er) > 0.02 || absr(real'(ytilde[r].im) / 256.0 - ei) > 0.02) begin
          failures++;
          $display("FAIL ytilde[%0d] %f ref %f", r, real'(ytilde[r].re) / 256.0, er);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
