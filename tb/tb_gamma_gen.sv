// tb_gamma_gen: self-checking test of gamma = ||w||^2. Random vectors,
// including ones large enough to saturate; gamma is compared with an exact
// integer sum (saturated to 32 bits), w_out with w, and the latency NT+1.
module tb_gamma_gen;
  import viper_pkg::*;
  localparam int NT = 8;
  logic clk = 0, rst_n = 0, start = 0, busy, done;
  cplxw_t w [NT], w_out [NT];
  pow_t gamma;
  int checks = 0, failures = 0;

  gamma_gen #(.NT(NT)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int j = 0; j < NT; j++) w[j] = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int trial = 0; trial < 200; trial++) begin
      automatic int cyc = 0;
      automatic longint g = 0;
      automatic int range_ = (trial % 10 == 9) ? 30000 : 3000;
      for (int j = 0; j < NT; j++) begin
        w[j] = '{re: acc_t'($signed($urandom_range(0, 2 * range_)) - range_), im: acc_t'($signed($urandom_range(0, 2 * range_)) - range_)};
        g += longint'(w[j].re) * w[j].re + longint'(w[j].im) * w[j].im;
      end
      if (g > 64'hffff_ffff) g = 64'hffff_ffff;
      @(negedge clk);
      start = 1;
      @(negedge clk);
      start = 0;
      for (int j = 0; j < NT; j++) w[j] = '0;   // captured at start
      while (!done) begin @(negedge clk); cyc++; end
      checks++;
      if (cyc + 1 != NT + 1) begin failures++; $display("FAIL latency %0d", cyc + 1); end
      checks++;
      if (longint'(gamma) != g) begin failures++; $display("FAIL gamma %0d ref %0d", gamma, g); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
