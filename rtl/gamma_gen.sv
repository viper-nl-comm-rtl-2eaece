// gamma_gen: transmit-power normalisation factor gamma = ||w||^2 of the
// unnormalised precoded vector w.
//
// The squared magnitudes of the NT antenna samples are accumulated one per
// cycle. w is latched at start and handed on unchanged with gamma, so the
// precoded-vector stage reuses it instead of recomputing it.
// Latency: NT+1 cycles from start to done (9 for NT=8).
//
// Interface: pulse start with w (Q24.8) valid; it is captured. done pulses one
// cycle with gamma (Q16.16, saturating) and w_out valid; both stay valid
// until the next start.
module gamma_gen
  import viper_pkg::*;
#(
  parameter int unsigned NT = 8
) (
  input  logic   clk,
  input  logic   rst_n,
  input  logic   start,
  input  cplxw_t w     [NT],
  output logic   busy,
  output logic   done,
  output pow_t   gamma,
  output cplxw_t w_out [NT]
);

  localparam int unsigned JW = (NT > 1) ? $clog2(NT) : 1;
  logic          run;
  logic [JW-1:0] j;

  assign busy = run;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      run   <= 1'b0;
      done  <= 1'b0;
      j     <= '0;
      gamma <= '0;
      for (int a = 0; a < NT; a++) w_out[a] <= '0;
    end else begin
      done <= 1'b0;
      if (start && !run) begin
        run   <= 1'b1;
        j     <= '0;
        gamma <= '0;
        w_out <= w;
      end else if (run) begin
        gamma <= sat_p(64'(gamma) + mag2(w_out[j]));
        if (32'(j) == NT - 1) begin
          run  <= 1'b0;
          done <= 1'b1;
        end
        j <= j + 1'b1;
      end
    end
  end

endmodule
