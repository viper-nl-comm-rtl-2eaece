// min_select: final selection of the perturbation, k* = argmin_k d_k.
//
// The K evaluated paths are scanned one per cycle and the one with the
// smallest Euclidean distance d is kept (on equal distances the lower path
// index wins). Its perturbation t, its vector z = Rinv*(P*v - tau*t) and its
// distance are presented to the power-normalisation stages; z is reused
// there, so no second pass over the data is needed.
// Latency: K+1 cycles from start to done (9 for K=8).
//
// Interface: pulse start with t_all, z_all and d_all valid and held until
// done. done pulses one cycle with kbest, t_sel, z_sel and d_sel valid; they
// stay valid until the next start.
module min_select
  import viper_pkg::*;
#(
  parameter int unsigned NR = 8,
  parameter int unsigned K  = 8,
  localparam int unsigned KW = (K > 1) ? $clog2(K) : 1
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  input  tsym_t         t_all [K][NR],
  input  cplxw_t        z_all [K][NR],
  input  pow_t          d_all [K],
  output logic          busy,
  output logic          done,
  output logic [KW-1:0] kbest,
  output tsym_t         t_sel [NR],
  output cplxw_t        z_sel [NR],
  output pow_t          d_sel
);

  logic          run;
  logic [KW-1:0] k;
  logic [KW-1:0] best;
  pow_t          best_d;

  assign busy = run;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      run    <= 1'b0;
      done   <= 1'b0;
      k      <= '0;
      best   <= '0;
      best_d <= '0;
      kbest  <= '0;
      d_sel  <= '0;
      for (int l = 0; l < NR; l++) begin
        t_sel[l] <= '0;
        z_sel[l] <= '0;
      end
    end else begin
      done <= 1'b0;
      if (start && !run) begin
        run    <= 1'b1;
        k      <= '0;
        best   <= '0;
        best_d <= '1;
      end else if (run) begin
        if (k == '0 || d_all[k] < best_d) begin
          best   <= k;
          best_d <= d_all[k];
        end
        if (32'(k) == K - 1) begin
          run  <= 1'b0;
          done <= 1'b1;
          // result of the scan, including the last comparison
          if (k == '0 || d_all[k] < best_d) begin
            kbest <= k;
            t_sel <= t_all[k];
            z_sel <= z_all[k];
            d_sel <= d_all[k];
          end else begin
            kbest <= best;
            t_sel <= t_all[best];
            z_sel <= z_all[best];
            d_sel <= best_d;
          end
        end
        k <= k + 1'b1;
      end
    end
  end

endmodule
