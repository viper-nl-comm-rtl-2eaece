// tb_rsr: self-checking test of the reciprocal square root unit. Drives
// operands spread over the whole Q16.16 range, compares 1/sqrt(x) with a
// floating-point reference (relative error below 2^-12 plus one LSB) and checks
// the latency of NITER+2 cycles from start to done.
module tb_rsr;
  import viper_pkg::*;
  logic clk = 0, rst_n = 0, start = 0, busy, done;
  pow_t x, y;
  int checks = 0, failures = 0;
  localparam int NITER = 4;

  rsr #(.NITER(NITER)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run(input pow_t xv);
    int cyc = 0;
    real ref_y, got, err;
    @(negedge clk);
    x = xv; start = 1;
    @(negedge clk);
    start = 0;
    while (!done) begin @(negedge clk); cyc++; end
    ref_y = 1.0 / $sqrt(real'(xv) / 65536.0);
    got   = real'(y) / 65536.0;
    err   = (got > ref_y) ? got - ref_y : ref_y - got;
    checks++;
    if (err > ref_y / 4096.0 + 2.0 / 65536.0) begin
      failures++;
      $display("FAIL x=%h y=%f ref=%f", xv, got, ref_y);
    end
    checks++;
    if (cyc + 1 != NITER + 2) begin
      failures++;
      $display("FAIL latency %0d", cyc + 1);
    end
  endtask

  initial begin
    x = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    run(32'h0001_0000);   // 1.0
    run(32'h0004_0000);   // 4.0
    run(32'h0000_4000);   // 0.25
    run(32'h0002_0000);   // 2.0
    run(32'h0000_0001);   // 2^-16
    run(32'hffff_0000);
    run(32'h0000_0123);
    for (int i = 0; i < 300; i++) begin
      pow_t v;
      v = pow_t'($urandom) >> ($urandom_range(0, 31));
      if (v == 0) v = 1;
      run(v);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
