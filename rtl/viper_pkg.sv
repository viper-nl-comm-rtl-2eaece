// viper_pkg: number formats, types and small arithmetic helpers shared by the
// vector-perturbation (VP) precoder.
//
// Formats. Matrix and vector entries are stored as signed 16-bit fixed point
// with 8 fractional bits (Q8.8), the internal format reported for the
// accelerator. Dot products and partial sums are kept in 32-bit words with the
// same 8 fractional bits (Q24.8) so that they cannot overflow. Squared
// magnitudes (norms, partial Euclidean distances, the power gamma) are unsigned
// 32-bit words with 16 fractional bits (Q16.16). The precoded output uses 13
// fractional bits (Q3.13), the precision the authors found best; its magnitude
// is at most one after power normalisation.
//
// Perturbation symbols t are small Gaussian integers held as two signed bytes.
// A path position index p (1..9 in the text, branching factor (2B+1)^2 with
// B=1) is stored here as p-1 in 4 bits.
package viper_pkg;

  localparam int unsigned DW      = 16;  // stored word width
  localparam int unsigned FRAC    = 8;   // fractional bits of stored words
  localparam int unsigned AW      = 32;  // accumulator width (FRAC fractional bits)
  localparam int unsigned PW      = 32;  // power word width (2*FRAC fractional bits)
  localparam int unsigned OFRAC   = 13;  // fractional bits of the precoded output
  localparam int unsigned BOUND   = 1;   // perturbation bound B
  localparam int unsigned NBRANCH = (2 * BOUND + 1) * (2 * BOUND + 1);  // 9 children per node

  typedef logic signed [DW-1:0] word_t;
  typedef logic signed [AW-1:0] acc_t;
  typedef logic        [PW-1:0] pow_t;
  typedef logic        [3:0]    pidx_t;   // p-1, 0..8
  typedef logic        [3:0]    log2tau_t;

  typedef struct packed {
    word_t re;
    word_t im;
  } cplx_t;

  typedef struct packed {
    acc_t re;
    acc_t im;
  } cplxw_t;

  typedef struct packed {
    logic signed [7:0] re;
    logic signed [7:0] im;
  } tsym_t;

  // Saturate a 64-bit value to a 16-bit word.
  function automatic word_t sat_w(input logic signed [63:0] x);
    if (x > 64'sd32767)       return word_t'(16'sh7fff);
    else if (x < -64'sd32768) return word_t'(16'sh8000);
    else                      return word_t'(x[15:0]);
  endfunction

  // Saturate a 64-bit value to a 32-bit accumulator.
  function automatic acc_t sat_a(input logic signed [63:0] x);
    if (x > 64'sd2147483647)       return acc_t'(32'sh7fffffff);
    else if (x < -64'sd2147483648) return acc_t'(32'sh80000000);
    else                           return acc_t'(x[31:0]);
  endfunction

  // Saturate a non-negative 64-bit value to an unsigned 32-bit power word.
  function automatic pow_t sat_p(input logic signed [63:0] x);
    if (x < 0)                    return '0;
    else if (x > 64'sd4294967295) return '1;
    else                          return pow_t'(x[31:0]);
  endfunction

  // Widen a stored word to an accumulator word (same binary point).
  function automatic cplxw_t widen(input cplx_t a);
    cplxw_t r;
    r.re = acc_t'(a.re);
    r.im = acc_t'(a.im);
    return r;
  endfunction

  // Full-precision complex product a*b (or a*conj(b)) of two Q.FRAC values,
  // rescaled to Q.FRAC with rounding, as a 64-bit pair.
  function automatic logic signed [63:0] rshift_round(input logic signed [63:0] x, input int unsigned s);
    if (s == 0) return x;
    return (x + (64'sd1 <<< (s - 1))) >>> s;
  endfunction

  function automatic cplxw_t cmul_w(input cplxw_t a, input cplxw_t b, input logic conj_b);
    logic signed [63:0] ar, ai, br, bi, pr, pi;
    ar = 64'(a.re); ai = 64'(a.im); br = 64'(b.re);
    bi = conj_b ? -64'(b.im) : 64'(b.im);
    pr = ar * br - ai * bi;
    pi = ar * bi + ai * br;
    return '{re: sat_a(rshift_round(pr, FRAC)), im: sat_a(rshift_round(pi, FRAC))};
  endfunction

  // |a|^2 of a Q.FRAC value as a Q.(2*FRAC) 64-bit integer.
  function automatic logic signed [63:0] mag2(input cplxw_t a);
    return 64'(a.re) * 64'(a.re) + 64'(a.im) * 64'(a.im);
  endfunction

  function automatic cplx_t narrow(input cplxw_t a);
    return '{re: sat_w(64'(a.re)), im: sat_w(64'(a.im))};
  endfunction

endpackage
