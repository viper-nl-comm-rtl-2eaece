// tb_sorter: self-checking test of the information-vector reordering. Random
// vectors and random permutations are streamed back to back; each output must
// equal v[perm[i]] one cycle after its input.
module tb_sorter;
  import viper_pkg::*;
  localparam int NR = 8, IW = $clog2(NR);
  logic clk = 0, rst_n = 0, in_valid = 0, out_valid;
  cplx_t v [NR], vs [NR], vexp [NR];
  logic [IW-1:0] perm [NR];
  int checks = 0, failures = 0;

  sorter #(.NR(NR)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < NR; i++) begin perm[i] = IW'(i); v[i] = '0; end
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 200; t++) begin
      if (t % 10 == 0)
        for (int r = NR - 1; r > 0; r--) begin
          automatic int j = $urandom_range(0, r);
          automatic logic [IW-1:0] tmp = perm[r];
          perm[r] = perm[j];
          perm[j] = tmp;
        end
      for (int i = 0; i < NR; i++) v[i] = cplx_t'($urandom);
      for (int i = 0; i < NR; i++) vexp[i] = v[perm[i]];
      in_valid = 1;
      @(negedge clk);
      checks++;
      if (!out_valid) begin failures++; $display("FAIL valid"); end
      for (int i = 0; i < NR; i++) begin
        checks++;
        if (vs[i] != vexp[i]) begin failures++; $display("FAIL vs[%0d]", i); end
      end
    end
    in_valid = 0;
    @(negedge clk);
    checks++;
    if (out_valid) begin failures++; $display("FAIL valid stays"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
