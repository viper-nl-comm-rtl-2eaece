// sorted_rq: improved sorted RQ decomposition of the regularised channel.
//
// The channel H (NR users x NT antennas) is extended with the Tikhonov term,
// Hbar = [H  lambda*I], and factorised row by row, Gram-Schmidt style, as
//     P * Hbar = Rbar * Qbar
// with Qbar (NR x (NR+NT)) having orthonormal rows, Rbar lower triangular with
// a real positive diagonal, and P a row permutation. At every step the
// remaining row with the smallest squared norm is taken next (the sorting),
// so the weakest users are placed first. The steps follow the algorithm of
// the paper ("Improved sorted RQ decomposition"):
//   norm_j = ||q_j||^2 for all rows
//   for i: pick p = argmin_{j>=i} norm_j, swap rows i and p (Q, R, P, norm),
//          R_ii = sqrt(norm_i), q_i = q_i / R_ii,
//          for j>i: R_ji = q_j . q_i^H, q_j -= R_ji q_i, norm_j -= |R_ji|^2.
// The algorithm as printed does not show the normalisation of q_i; the norm
// downdate it does show needs it, so it is done here with the shared
// reciprocal-square-root unit (R_ii = norm_i * rsqrt(norm_i)). The last NR
// columns of Qbar hold lambda * Rbar^-1 * P (see tri_inversion).
//
// Datapath: row-parallel and column-serial. Norms and the NR-1 dot products
// of one step are accumulated one column per cycle; a swap, a row
// normalisation and a row update each take one cycle.
// Latency: NC + NR*(NITER+3) + (NR-1)*(NC+1) cycles from start to done, with
// NC = NR+NT and NITER the rsr iteration count (191 cycles for 8x8).
//
// Interface: pulse start with H and lambda (Q8.8, > 0) valid; they are read in
// the start cycle. done pulses for one cycle when Qbar, rdiag, rlow and perm
// are valid; they stay valid until the next start. perm[i] is the original
// user index placed at sorted position i. rlow[j][i] holds Rbar_ji for j>i
// (zero elsewhere); rdiag[i] holds Rbar_ii.
module sorted_rq
  import viper_pkg::*;
#(
  parameter int unsigned NR = 8,
  parameter int unsigned NT = 8,
  localparam int unsigned NC = NR + NT,
  localparam int unsigned IW = (NR > 1) ? $clog2(NR) : 1
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            start,
  input  cplx_t           h     [NR][NT],
  input  word_t           lambda,
  output logic            busy,
  output logic            done,
  output cplx_t           qbar  [NR][NC],
  output word_t           rdiag [NR],
  output cplx_t           rlow  [NR][NR],
  output logic [IW-1:0]   perm  [NR]
);

  typedef enum logic [2:0] {S_IDLE, S_NORM, S_PIVOT, S_RSR, S_DOT, S_UPD} state_t;
  state_t st;

  pow_t                  norm [NR];
  logic signed [63:0]    dot_re [NR];
  logic signed [63:0]    dot_im [NR];
  logic [$clog2(NC)-1:0] col;
  logic [IW-1:0]         i_q;

  // rsr unit
  logic rsr_start, rsr_busy, rsr_done;
  pow_t rsr_x, rsr_y;
  rsr u_rsr (.clk, .rst_n, .start(rsr_start), .x(rsr_x), .busy(rsr_busy), .done(rsr_done), .y(rsr_y));

  // pivot search over rows i..NR-1
  logic [IW-1:0] piv;
  always_comb begin
    piv = i_q;
    for (int j = 0; j < NR; j++)
      if (j > int'(i_q) && norm[j] < norm[piv]) piv = IW'(j);
  end

  assign rsr_start = (st == S_PIVOT);
  assign rsr_x     = norm[piv];
  assign busy      = (st != S_IDLE);

  // R_ji from the accumulated dot product (Q.16 -> Q.8, rounded, saturated)
  function automatic cplx_t dot_to_r(input logic signed [63:0] re, input logic signed [63:0] im);
    return '{re: sat_w(rshift_round(re, FRAC)), im: sat_w(rshift_round(im, FRAC))};
  endfunction

  // R_ji of the current step, one per row
  cplx_t rji [NR];
  always_comb
    for (int r = 0; r < NR; r++) rji[r] = dot_to_r(dot_re[r], dot_im[r]);

  // a - b, saturated to a stored word
  function automatic cplx_t sub_w(input cplx_t a, input cplxw_t b);
    return '{re: sat_w(64'(a.re) - 64'(b.re)), im: sat_w(64'(a.im) - 64'(b.im))};
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st   <= S_IDLE;
      done <= 1'b0;
      col  <= '0;
      i_q  <= '0;
      for (int r = 0; r < NR; r++) begin
        norm[r]   <= '0;
        dot_re[r] <= '0;
        dot_im[r] <= '0;
        rdiag[r]  <= '0;
        perm[r]   <= IW'(r);
        for (int c = 0; c < NC; c++) qbar[r][c] <= '0;
        for (int c = 0; c < NR; c++) rlow[r][c] <= '0;
      end
    end else begin
      done <= 1'b0;
      unique case (st)
        S_IDLE: if (start) begin
          for (int r = 0; r < NR; r++) begin
            for (int c = 0; c < NT; c++) qbar[r][c] <= h[r][c];
            for (int c = 0; c < NR; c++) begin
              qbar[r][NT+c] <= '{re: (c == r) ? lambda : '0, im: '0};
              rlow[r][c]    <= '0;
            end
            norm[r]  <= '0;
            rdiag[r] <= '0;
            perm[r]  <= IW'(r);
          end
          col <= '0;
          i_q <= '0;
          st  <= S_NORM;
        end
        S_NORM: begin
          for (int r = 0; r < NR; r++)
            norm[r] <= sat_p(64'(norm[r]) + mag2(widen(qbar[r][col])));
          if (32'(col) == NC - 1) st <= S_PIVOT;
          col <= col + 1'b1;
        end
        S_PIVOT: begin
          // swap rows i and piv of Q, R, P and norm
          if (piv != i_q) begin
            for (int c = 0; c < NC; c++) begin
              qbar[i_q][c] <= qbar[piv][c];
              qbar[piv][c] <= qbar[i_q][c];
            end
            for (int c = 0; c < NR; c++) begin
              rlow[i_q][c] <= rlow[piv][c];
              rlow[piv][c] <= rlow[i_q][c];
            end
            perm[i_q] <= perm[piv];
            perm[piv] <= perm[i_q];
            norm[i_q] <= norm[piv];
            norm[piv] <= norm[i_q];
          end
          st <= S_RSR;
        end
        S_RSR: if (rsr_done) begin
          // R_ii = norm * rsqrt(norm): Q16.16 * Q16.16 -> Q.8
          rdiag[i_q] <= sat_w(rshift_round(64'(norm[i_q]) * 64'(rsr_y), 24));
          for (int c = 0; c < NC; c++) begin
            qbar[i_q][c].re <= sat_w(rshift_round(64'(qbar[i_q][c].re) * 64'(rsr_y), 16));
            qbar[i_q][c].im <= sat_w(rshift_round(64'(qbar[i_q][c].im) * 64'(rsr_y), 16));
          end
          for (int r = 0; r < NR; r++) begin
            dot_re[r] <= '0;
            dot_im[r] <= '0;
          end
          col <= '0;
          if (32'(i_q) == NR - 1) begin
            st   <= S_IDLE;
            done <= 1'b1;
          end else begin
            st <= S_DOT;
          end
        end
        S_DOT: begin
          // dot_j += q_j[col] * conj(q_i[col])
          for (int r = 0; r < NR; r++) begin
            if (r > int'(i_q)) begin
              dot_re[r] <= dot_re[r] + 64'(qbar[r][col].re) * 64'(qbar[i_q][col].re)
                                     + 64'(qbar[r][col].im) * 64'(qbar[i_q][col].im);
              dot_im[r] <= dot_im[r] + 64'(qbar[r][col].im) * 64'(qbar[i_q][col].re)
                                     - 64'(qbar[r][col].re) * 64'(qbar[i_q][col].im);
            end
          end
          if (32'(col) == NC - 1) st <= S_UPD;
          col <= col + 1'b1;
        end
        S_UPD: begin
          for (int r = 0; r < NR; r++) begin
            if (r > int'(i_q)) begin
              rlow[r][i_q] <= rji[r];
              for (int c = 0; c < NC; c++)
                qbar[r][c] <= sub_w(qbar[r][c], cmul_w(widen(rji[r]), widen(qbar[i_q][c]), 1'b0));
              norm[r] <= sat_p(64'(norm[r]) - mag2(widen(rji[r])));
            end
          end
          i_q <= i_q + 1'b1;
          st  <= S_PIVOT;
        end
        default: st <= S_IDLE;
      endcase
    end
  end

endmodule
