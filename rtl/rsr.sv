// rsr: reciprocal square root unit, y = 1/sqrt(x), by Newton-Raphson iteration.
//
// The precoder needs 1/sqrt() in two places: to normalise each new row of the
// sorted RQ decomposition (R_ii = sqrt(norm), q_i = q_i / R_ii) and to scale the
// precoded vector by 1/sqrt(gamma). Both share this unit type.
//
// How it works. The operand is first written as x = m * 4^k with m in [1,4) by
// an even shift found from the leading one. Newton-Raphson steps
//     y <- y * (3 - m*y^2) / 2
// then refine 1/sqrt(m) in Q2.30 from a two-value seed (0.85 for m<2, 0.6
// otherwise); each step squares the relative error, so NITER=4 steps reach the
// 30-bit working precision. The result is shifted back by k.
// The text names a "scaling-less" Newton-Raphson unit without giving its
// insides; the even-shift normalisation used here is this design's own choice.
//
// Interface: x and y are unsigned Q16.16. Pulse start with x valid; y is valid
// while done is high (one cycle), NITER+2 cycles after start. x=0 returns the
// largest code. busy is high from start until done.
module rsr
  import viper_pkg::*;
#(
  parameter int unsigned NITER = 4
) (
  input  logic clk,
  input  logic rst_n,
  input  logic start,
  input  pow_t x,
  output logic busy,
  output logic done,
  output pow_t y
);

  typedef enum logic [1:0] {S_IDLE, S_ITER, S_OUT} state_t;
  state_t st;

  logic [63:0] m_q;        // mantissa in Q2.30
  logic [63:0] y_q;        // estimate in Q2.30
  int          k_q;        // exponent: x = m * 4^k
  logic        zero_q;
  logic [$clog2(NITER+1)-1:0] it;

  // leading-one position of the operand
  function automatic int msb_pos(input pow_t val);
    int p = 0;
    for (int i = 0; i < PW; i++) if (val[i]) p = i;
    return p;
  endfunction

  // one Newton-Raphson step in Q2.30
  function automatic logic [63:0] nr_step(input logic [63:0] m, input logic [63:0] yy);
    logic [63:0] y2, my2, t3;
    logic [127:0] prod;
    y2   = (yy * yy) >> 30;
    my2  = (m * y2) >> 30;
    t3   = (64'd3 << 30) - my2;
    prod = 128'(yy) * 128'(t3);
    return 64'(prod >> 31);
  endfunction

  // operand normalisation x = m * 4^k (combinational, used in S_IDLE)
  int          k_in;
  logic [63:0] m_in;
  always_comb begin
    int e;
    e    = msb_pos(x) - 16;                      // floor(log2 x)
    k_in = (e >= 0) ? e / 2 : -((1 - e) / 2);    // floor(e/2)
    m_in = 64'(x) << (14 - 2 * k_in);
  end

  // result shifted back by k
  logic [63:0] y_out;
  assign y_out = (y_q + (64'd1 << (13 + k_q))) >> (14 + k_q);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st     <= S_IDLE;
      m_q    <= '0;
      y_q    <= '0;
      k_q    <= 0;
      zero_q <= 1'b0;
      it     <= '0;
      done   <= 1'b0;
      y      <= '0;
    end else begin
      done <= 1'b0;
      unique case (st)
        S_IDLE: if (start) begin
          k_q    <= k_in;
          zero_q <= (x == '0);
          m_q    <= m_in;
          // seed: m < 2  <=>  bit 31 of the Q2.30 mantissa clear
          y_q    <= (m_in[63:31] == '0) ? 64'd912680550   // 0.85
                                        : 64'd644245094;  // 0.60
          it     <= '0;
          st     <= S_ITER;
        end
        S_ITER: begin
          y_q <= nr_step(m_q, y_q);
          it  <= it + 1'b1;
          if (32'(it) == NITER - 1) st <= S_OUT;
        end
        S_OUT: begin
          y    <= zero_q ? '1 : ((y_out > 64'hffff_ffff) ? '1 : pow_t'(y_out));
          done <= 1'b1;
          st   <= S_IDLE;
        end
        default: st <= S_IDLE;
      endcase
    end
  end

  assign busy = (st != S_IDLE);

endmodule
