// tri_inversion: inverse of the triangular factor without a matrix inversion.
//
// Because the sorted RQ decomposition factorises the extended channel
// [H lambda*I], its last NR columns satisfy P*lambda*I = Rbar*Q2, so
//     Rinv = Rbar^-1 = (1/lambda) * Q2 * P^T.
// The paper calls this a "descaling" of the regularisation part of Q. Here
// 1/lambda is formed once per channel by the reciprocal-square-root unit
// applied to lambda^2, every entry of Q2 is multiplied by it, and the columns
// are gathered back through the permutation (column c of Rinv is column
// perm[c] of Q2), which the text leaves implicit. The result is lower
// triangular; entries above the diagonal, which are zero up to rounding, are
// forced to zero.
//
// Interface: pulse start with qbar, perm and lambda (Q8.8, > 0) valid and held
// until done. done pulses one cycle when rinv (Q8.8) is valid; it stays valid
// until the next start. Latency: NITER+2 cycles (6 with the default rsr). The
// entries above the diagonal are constant zero outputs by construction.
module tri_inversion
  import viper_pkg::*;
#(
  parameter int unsigned NR = 8,
  parameter int unsigned NT = 8,
  localparam int unsigned NC = NR + NT,
  localparam int unsigned IW = (NR > 1) ? $clog2(NR) : 1
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  input  cplx_t         qbar [NR][NC],
  input  logic [IW-1:0] perm [NR],
  input  word_t         lambda,
  output logic          busy,
  output logic          done,
  output cplx_t         rinv [NR][NR]
);

  logic rsr_busy, rsr_done, waiting;
  pow_t inv_lambda;
  pow_t lambda_sq;

  assign lambda_sq = pow_t'(32'(lambda) * 32'(lambda));   // Q8.8^2 = Q16.16

  rsr u_rsr (.clk, .rst_n, .start(start && !waiting), .x(lambda_sq),
             .busy(rsr_busy), .done(rsr_done), .y(inv_lambda));

  assign busy = waiting;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      waiting <= 1'b0;
      done    <= 1'b0;
      for (int r = 0; r < NR; r++)
        for (int c = 0; c < NR; c++) rinv[r][c] <= '0;
    end else begin
      done <= 1'b0;
      if (start && !waiting) waiting <= 1'b1;
      if (waiting && rsr_done) begin
        for (int r = 0; r < NR; r++)
          for (int c = 0; c < NR; c++) begin
            if (c > r) rinv[r][c] <= '0;
            else begin
              rinv[r][c].re <= sat_w(rshift_round(64'(qbar[r][NT+int'(perm[c])].re) * 64'(inv_lambda), 16));
              rinv[r][c].im <= sat_w(rshift_round(64'(qbar[r][NT+int'(perm[c])].im) * 64'(inv_lambda), 16));
            end
          end
        waiting <= 1'b0;
        done    <= 1'b1;
      end
    end
  end

endmodule
