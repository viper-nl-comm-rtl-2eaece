// tb_channel_inversion: self-checking test of w = Q1^H z. A random extended Q
// is loaded, then several z vectors are applied; w is compared with a
// floating-point conjugate-transpose product. A second load must replace
// the stored matrix. Latency NR+1 is checked.
module tb_channel_inversion;
  import viper_pkg::*;
  localparam int NR = 8, NT = 8, NC = NR + NT;
  logic clk = 0, rst_n = 0, load = 0, start = 0, busy, done;
  cplx_t qbar [NR][NC], qkeep [NR][NC];
  cplxw_t z [NR];
  cplxw_t w [NT];
  int checks = 0, failures = 0;

  channel_inversion #(.NR(NR), .NT(NT)) dut (.*);
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
    for (int r = 0; r < NR; r++) begin
      z[r] = '0;
      for (int c = 0; c < NC; c++) qbar[r][c] = '0;
    end
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int ch = 0; ch < 5; ch++) begin
      for (int r = 0; r < NR; r++)
        for (int c = 0; c < NC; c++)
          qbar[r][c] = '{re: word_t'($signed($urandom_range(0, 511)) - 256), im: word_t'($signed($urandom_range(0, 511)) - 256)};
      qkeep = qbar;
      load = 1;
      @(negedge clk);
      load = 0;
      for (int r = 0; r < NR; r++) for (int c = 0; c < NC; c++) qbar[r][c] = '0;  // must not matter now
      for (int vec = 0; vec < 10; vec++) begin
        automatic int cyc = 0;
        for (int r = 0; r < NR; r++)
          z[r] = '{re: acc_t'($signed($urandom_range(0, 8191)) - 4096), im: acc_t'($signed($urandom_range(0, 8191)) - 4096)};
        start = 1;
        @(negedge clk);
        start = 0;
        while (!done) begin @(negedge clk); cyc++; end
        checks++;
        if (cyc + 1 != NR + 1) begin failures++; $display("FAIL latency %0d", cyc + 1); end
        for (int j = 0; j < NT; j++) begin
          automatic real er = 0.0, ei = 0.0;
          for (int i = 0; i < NR; i++) begin
            // conj(q[i][j]) * z[i]
            er += (real'(qkeep[i][j].re) * real'(z[i].re) + real'(qkeep[i][j].im) * real'(z[i].im)) / 65536.0;
            ei += (real'(qkeep[i][j].re) * real'(z[i].im) - real'(qkeep[i][j].im) * real'(z[i].re)) / 65536.0;
          end
          checks++;
          if (absr(real'(w[j].re) / 256.0 - er) > 0.02 || absr(real'(w[j].im) / 256.0 - ei) > 0.02) begin
            failures++;
            $display("FAIL w[%0d] %f ref %f", j, real'(w[j].re) / 256.0, er);
          end
        end
        @(negedge clk);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
