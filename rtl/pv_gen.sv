// pv_gen: precoded-vector generation, x = w / sqrt(gamma).
//
// The reciprocal square root of gamma is obtained from a Newton-Raphson unit
// (rsr) and multiplied into every antenna sample of w, so that the precoded
// vector has unit total power (||x||^2 = 1). Scaling to the actual transmit
// power P_T is left to the radio chain, which the text does not place in the
// accelerator. The output uses 13 fractional bits (Q3.13), the precision
// the authors found best for the 16-bit format.
// Latency: NITER+3 cycles from start to done (7 with the default rsr).
//
// Interface: pulse start with gamma (Q16.16) and w (Q24.8) valid and held until
// done. done pulses one cycle with x valid; x stays valid until the next
// start.
module pv_gen
  import viper_pkg::*;
#(
  parameter int unsigned NT = 8
) (
  input  logic   clk,
  input  logic   rst_n,
  input  logic   start,
  input  pow_t   gamma,
  input  cplxw_t w    [NT],
  output logic   busy,
  output logic   done,
  output cplx_t  x    [NT]
);

  logic rsr_busy, rsr_done, waiting;
  pow_t r;

  rsr u_rsr (.clk, .rst_n, .start(start && !waiting), .x(gamma), .busy(rsr_busy), .done(rsr_done), .y(r));

  assign busy = waiting;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      waiting <= 1'b0;
      done    <= 1'b0;
      for (int j = 0; j < NT; j++) x[j] <= '0;
    end else begin
      done <= 1'b0;
      if (start && !waiting) waiting <= 1'b1;
      if (waiting && rsr_done) begin
        // Q.8 * Q16.16 = Q.24 -> Q.13
        for (int j = 0; j < NT; j++) begin
          x[j].re <= sat_w(rshift_round(64'(w[j].re) * 64'(r), FRAC + 16 - OFRAC));
          x[j].im <= sat_w(rshift_round(64'(w[j].im) * 64'(r), FRAC + 16 - OFRAC));
        end
        waiting <= 1'b0;
        done    <= 1'b1;
      end
    end
  end

endmodule
