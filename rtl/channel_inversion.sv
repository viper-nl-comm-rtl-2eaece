// channel_inversion: applies the transmit part of the regularised channel
// inverse without ever forming it.
//
// With P*[H lambda*I] = Rbar*Qbar, the regularised pseudo-inverse is
// Hbar^+ = Qbar^H * Rbar^-1 * P, and its first NT rows, Q1^H * Rbar^-1 * P
// (Q1 = first NT columns of Qbar), map a perturbed data vector to the NT
// antenna signals. The postprocessing already holds z = Rbar^-1*(P*v - tau*t),
// so this block only stores Q1^H and computes w = Q1^H * z, a successive
// transformation as the paper describes, instead of building H^+.
//
// Operation: a load pulse (preprocessing, once per channel) copies Q1,
// conjugate-transposed, into the block's own matrix store. A start pulse
// (postprocessing, per vector) computes w row-parallel, one column of Q1^H
// per cycle. Latency of start to done: NR+1 cycles (9 for NR=8).
//
// Interface: qbar is read in the load cycle. z must be held from start until
// done; w (Q24.8) is valid from done until the next start.
module channel_inversion
  import viper_pkg::*;
#(
  parameter int unsigned NR = 8,
  parameter int unsigned NT = 8,
  localparam int unsigned NC = NR + NT
) (
  input  logic   clk,
  input  logic   rst_n,
  input  logic   load,
  input  cplx_t  qbar [NR][NC],
  input  logic   start,
  input  cplxw_t z    [NR],
  output logic   busy,
  output logic   done,
  output cplxw_t w    [NT]
);

  localparam int unsigned IW = (NR > 1) ? $clog2(NR) : 1;

  cplx_t         qh [NT][NR];   // Q1^H
  logic          run;
  logic [IW-1:0] i;

  cplxw_t prod [NT];
  always_comb
    for (int j = 0; j < NT; j++) prod[j] = cmul_w(widen(qh[j][i]), z[i], 1'b0);

  assign busy = run;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      run  <= 1'b0;
      done <= 1'b0;
      i    <= '0;
      for (int j = 0; j < NT; j++) begin
        w[j] <= '0;
        for (int r = 0; r < NR; r++) qh[j][r] <= '0;
      end
    end else begin
      done <= 1'b0;
      if (load)
        for (int j = 0; j < NT; j++)
          for (int r = 0; r < NR; r++)
            qh[j][r] <= '{re: qbar[r][j].re, im: sat_w(-64'(qbar[r][j].im))};
      if (start && !run) begin
        run <= 1'b1;
        i   <= '0;
        for (int j = 0; j < NT; j++) w[j] <= '0;
      end else if (run) begin
        for (int j = 0; j < NT; j++)
          w[j] <= '{re: sat_a(64'(w[j].re) + 64'(prod[j].re)), im: sat_a(64'(w[j].im) + 64'(prod[j].im))};
        if (32'(i) == NR - 1) begin
          run  <= 1'b0;
          done <= 1'b1;
        end
        i <= i + 1'b1;
      end
    end
  end

endmodule
