// tb_pv_gen: self-checking test of x = w / sqrt(gamma). Random w with gamma
// computed in the testbench as ||w||^2; each output sample (Q3.13) is
// compared with floating point, the output power must be one, and the
// latency NITER+3 is checked.
module tb_pv_gen;
  import viper_pkg::*;
  localparam int NT = 8;
  logic clk = 0, rst_n = 0, start = 0, busy, done;
  pow_t gamma;
  cplxw_t w [NT];
  cplx_t x [NT];
  int checks = 0, failures = 0;

  pv_gen #(.NT(NT)) dut (.*);
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
    gamma = '0;
    for (int j = 0; j < NT; j++) w[j] = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int trial = 0; trial < 200; trial++) begin
      automatic int cyc = 0;
      automatic real g = 0.0, p = 0.0;
      automatic int rng = $urandom_range(50, 5000);
      for (int j = 0; j < NT; j++) begin
        w[j] = '{re: acc_t'($signed($urandom_range(0, 2 * rng)) - rng), im: acc_t'($signed($urandom_range(0, 2 * rng)) - rng)};
        g += (real'(w[j].re) ** 2 + real'(w[j].im) ** 2) / 65536.0;
      end
      gamma = pow_t'($rtoi(g * 65536.0));
      @(negedge clk);
      start = 1;
      @(negedge clk);
      start = 0;
      while (!done) begin @(negedge clk); cyc++; end
      checks++;
      if (cyc + 1 != 4 + 3) begin failures++; $display("FAIL latency %0d", cyc + 1); end
      for (int j = 0; j < NT; j++) begin
        automatic real er = real'(w[j].re) / 256.0 / $sqrt(g), ei = real'(w[j].im) / 256.0 / $sqrt(g);
        automatic real xr = real'(x[j].re) / 8192.0, xi = real'(x[j].im) / 8192.0;
        p += xr * xr + xi * xi;
        checks++;
        if (absr(xr - er) > 0.001 || absr(xi - ei) > 0.001) begin
          failures++;
          $display("FAIL x[%0d] %f ref %f", j, xr, er);
        end
      end
      checks++;
      if (absr(p - 1.0) > 0.005) begin failures++; $display("FAIL power %f", p); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
