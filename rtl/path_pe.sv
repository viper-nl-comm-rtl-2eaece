// path_pe: pipelined processing element that evaluates most-promising paths.
//
// Given the search vector ytilde = Rinv*P*v, the lower-triangular Rinv, the
// diagonal of Rbar and a position vector p, it walks the tree from level 1
// to level NR. At level l:
//   acc_l  = ytilde_l - tau * sum_{k<l} Rinv_lk t_k        (interference)
//   shat_l = acc_l * Rbar_ll / tau                         (effective point)
//   t_l    = demap(shat_l, p_l)                            (LUT demapper)
//   z_l    = acc_l - tau * Rinv_ll t_l
//   d     += |z_l|^2
// so that at the end z = Rinv*(P*v - tau*t) and d = ||z||^2 is the path's
// Euclidean distance, the quantity the final selection minimises. The
// division by the diagonal of Rinv is replaced, as the paper describes, by a
// multiplication with the diagonal of Rbar (Rinv_ll = 1/Rbar_ll), and tau is
// restricted to a power of two (4, 8, 16, 32 for QPSK to 256-QAM with the
// odd-integer constellation grid), so the division by tau is a shift.
//
// As in the paper, the PE is fully pipelined and streams paths: it accepts
// one path per cycle and delivers one result per cycle once the pipeline is
// full. The pipeline has one stage per level (the paper does not give the
// PE's insides; the stage split is this design's choice). Stage l holds
// l complex multipliers of a Q8.8 Rinv entry by a small integer symbol for
// the interference sum, one for the effective point and one for z_l, and
// carries the path, the symbols decided so far, z and the running d to the
// next stage. The interference sum is formed in 64 bits and saturated once.
//
// Interface: in_valid with path valid enters a path; ytilde, rinv, rdiag and
// log2tau are shared by all paths in flight and must be held while they are.
// out_valid pulses exactly NR cycles after in_valid, with t, z (Q24.8) and d
// (Q16.16, saturating) of that path; they stay valid until the next result.
module path_pe
  import viper_pkg::*;
#(
  parameter int unsigned NR = 8
) (
  input  logic     clk,
  input  logic     rst_n,
  input  logic     in_valid,
  input  pidx_t    path   [NR],
  input  cplxw_t   ytilde [NR],
  input  cplx_t    rinv   [NR][NR],
  input  word_t    rdiag  [NR],
  input  log2tau_t log2tau,
  output logic     out_valid,
  output tsym_t    t      [NR],
  output cplxw_t   z      [NR],
  output pow_t     d
);

  // tau * r * s for an integer symbol s, full width, Q.8
  function automatic logic signed [63:0] tau_r_t_re(input cplx_t r, input tsym_t s, input log2tau_t lt);
    return (64'(r.re) * 64'(s.re) - 64'(r.im) * 64'(s.im)) <<< lt;
  endfunction
  function automatic logic signed [63:0] tau_r_t_im(input cplx_t r, input tsym_t s, input log2tau_t lt);
    return (64'(r.re) * 64'(s.im) + 64'(r.im) * 64'(s.re)) <<< lt;
  endfunction

  // stage registers: bank s holds the state after level s
  logic   bv [NR];
  pidx_t  bp [NR][NR];
  tsym_t  bt [NR][NR];
  cplxw_t bz [NR][NR];
  pow_t   bd [NR];

  // inputs of each stage (stage 0 takes the module inputs)
  logic   sv [NR];
  pidx_t  sp [NR][NR];
  tsym_t  st [NR][NR];
  cplxw_t sz [NR][NR];
  pow_t   sd [NR];

  always_comb begin
    for (int l = 0; l < NR; l++) begin
      if (l == 0) begin
        sv[l] = in_valid;
        sd[l] = '0;
        for (int k = 0; k < NR; k++) begin
          sp[l][k] = path[k];
          st[l][k] = '0;
          sz[l][k] = '0;
        end
      end else begin
        sv[l] = bv[l-1];
        sd[l] = bd[l-1];
        for (int k = 0; k < NR; k++) begin
          sp[l][k] = bp[l-1][k];
          st[l][k] = bt[l-1][k];
          sz[l][k] = bz[l-1][k];
        end
      end
    end
  end

  // level l: interference cancellation and effective point
  cplxw_t acc  [NR];
  cplxw_t shat [NR];
  always_comb begin
    for (int l = 0; l < NR; l++) begin
      logic signed [63:0] ar, ai, sr, si;
      ar = 64'(ytilde[l].re);
      ai = 64'(ytilde[l].im);
      for (int k = 0; k < l; k++) begin
        ar = ar - tau_r_t_re(rinv[l][k], st[l][k], log2tau);
        ai = ai - tau_r_t_im(rinv[l][k], st[l][k], log2tau);
      end
      acc[l] = '{re: sat_a(ar), im: sat_a(ai)};
      sr = rshift_round(64'(acc[l].re) * 64'(rdiag[l]), FRAC + 32'(log2tau));
      si = rshift_round(64'(acc[l].im) * 64'(rdiag[l]), FRAC + 32'(log2tau));
      shat[l] = '{re: sat_a(sr), im: sat_a(si)};
    end
  end

  // level l: decision from the region look-up table
  tsym_t tl [NR];
  for (genvar l = 0; l < NR; l++) begin : g_demap
    demap_lut u_demap (.shat(shat[l]), .p(sp[l][l]), .t(tl[l]));
  end

  // level l: residual and distance
  cplxw_t zl [NR];
  pow_t   dl [NR];
  always_comb begin
    for (int l = 0; l < NR; l++) begin
      zl[l] = '{re: sat_a(64'(acc[l].re) - tau_r_t_re(rinv[l][l], tl[l], log2tau)),
                im: sat_a(64'(acc[l].im) - tau_r_t_im(rinv[l][l], tl[l], log2tau))};
      dl[l] = sat_p(64'(sd[l]) + rshift_round(mag2(zl[l]), 0));
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int l = 0; l < NR; l++) begin
        bv[l] <= 1'b0;
        bd[l] <= '0;
        for (int k = 0; k < NR; k++) begin
          bp[l][k] <= '0;
          bt[l][k] <= '0;
          bz[l][k] <= '0;
        end
      end
    end else begin
      for (int l = 0; l < NR; l++) begin
        bv[l] <= sv[l];
        if (sv[l]) begin
          bd[l] <= dl[l];
          for (int k = 0; k < NR; k++) begin
            bp[l][k] <= sp[l][k];
            bt[l][k] <= (k == l) ? tl[l] : st[l][k];
            bz[l][k] <= (k == l) ? zl[l] : sz[l][k];
          end
        end
      end
    end
  end

  assign out_valid = bv[NR-1];
  assign t = bt[NR-1];
  assign z = bz[NR-1];
  assign d = bd[NR-1];

endmodule
