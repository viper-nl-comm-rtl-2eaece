// tb_min_select: self-checking test of the minimum-distance selection.
// Random distances (including forced ties and a minimum at the last index)
// are applied; the chosen index must be the first index of the smallest
// distance, and t, z, d must be that path's. Latency K+1 is checked.
module tb_min_select;
  import viper_pkg::*;
  localparam int NR = 8, K = 8;
  logic clk = 0, rst_n = 0, start = 0, busy, done;
  tsym_t t_all [K][NR];
  cplxw_t z_all [K][NR];
  pow_t d_all [K];
  logic [2:0] kbest;
  tsym_t t_sel [NR];
  cplxw_t z_sel [NR];
  pow_t d_sel;
  int checks = 0, failures = 0;

  min_select #(.NR(NR), .K(K)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int k = 0; k < K; k++) begin
      d_all[k] = '0;
      for (int l = 0; l < NR; l++) begin t_all[k][l] = '0; z_all[k][l] = '0; end
    end
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int trial = 0; trial < 300; trial++) begin
      automatic int cyc = 0, kb = 0;
      for (int k = 0; k < K; k++) begin
        d_all[k] = pow_t'($urandom_range(0, (trial % 3 == 0) ? 3 : 100000));  // small range: ties
        for (int l = 0; l < NR; l++) begin
          t_all[k][l] = tsym_t'($urandom);
          z_all[k][l] = cplxw_t'({$urandom, $urandom});
        end
      end
      if (trial % 7 == 0) d_all[K-1] = '0;
      for (int k = 1; k < K; k++) if (d_all[k] < d_all[kb]) kb = k;
      @(negedge clk);
      start = 1;
      @(negedge clk);
      start = 0;
      while (!done) begin @(negedge clk); cyc++; end
      checks++;
      if (cyc + 1 != K + 1) begin failures++; $display("FAIL latency %0d", cyc + 1); end
      checks++;
      if (int'(kbest) != kb || d_sel != d_all[kb] || t_sel != t_all[kb] || z_sel != z_all[kb]) begin
        failures++;
        $display("FAIL kbest %0d expected %0d", kbest, kb);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
