// viper_top: vector-perturbation precoder with channel-only path preselection.
//
// The precoder maps an information vector v of NR QAM symbols (one per
// single-antenna user) to NT antenna samples x such that user i receives
// v_i - tau*t_i scaled, where t is a Gaussian-integer perturbation chosen to
// minimise the transmit power; each user removes tau*t_i with a modulo. Work
// is split as in the paper into
//
//  preprocessing, once per channel (pre_start):
//    sorted_rq      P*[H lambda*I] = Rbar*Qbar, sorted by increasing row norm
//    tri_inversion  Rinv = Rbar^-1 = Q2*P^T/lambda (no matrix inversion)
//    mpp_select     K most promising position vectors by K-best on the
//                   Metric of Promise (uses only diag(Rinv))
//    channel_inversion (load)  stores Q1^H, the transmit part of Qbar^H
//
//  postprocessing, once per information vector (post_start):
//    sorter         vs = P*v
//    vp_vector      ytilde = Rinv*vs
//    path_search    NPE PEs evaluate the K paths: t, z = Rinv*(vs - tau*t), d = ||z||^2
//    min_select     k* = argmin d
//    channel_inversion (apply)  w = Q1^H * z
//    gamma_gen      gamma = ||w||^2
//    pv_gen         x = w / sqrt(gamma)
//
// The stages run one after another under two small controllers; a new
// vector is accepted when the previous one has left (post_ready). Inside the
// path search the PEs are pipelined as in the paper, but the stages around
// them are not overlapped across vectors or subcarriers as the paper's
// interleaved architecture does: the blocks and their order follow the
// paper, the scheduling and the handshakes are this design's own.
//
// Interface (all ports plain signals):
//  - pre_start pulse with h (Q8.8) and lambda (Q8.8, the Tikhonov weight
//    sigma/E|s|) valid in that cycle; pre_done pulses when the channel is
//    ready. pre_start must not be given while postprocessing is busy.
//  - post_start pulse with v (Q8.8, odd-integer QAM grid) and log2tau
//    (tau = 2^log2tau) valid, accepted when post_ready is high.
//    out_valid pulses with x (Q3.13, ||x|| = 1), gamma (Q16.16), t (the
//    perturbation, in the users' original order) and kbest (winning path).
//  - perm shows the user order chosen by the sorted decomposition.
// Latencies (defaults): preprocessing 785 cycles from pre_start to pre_done
// (191 + 6 + 584 + 4 hand-over cycles); postprocessing 55 cycles from
// post_start to out_valid (1 + 9 + 10 + 9 + 9 + 9 + 7 + 1).
module viper_top
  import viper_pkg::*;
#(
  parameter int unsigned NR  = 8,
  parameter int unsigned NT  = 8,
  parameter int unsigned K   = 8,
  parameter int unsigned NPE = 8,
  localparam int unsigned NC = NR + NT,
  localparam int unsigned IW = (NR > 1) ? $clog2(NR) : 1,
  localparam int unsigned KW = (K > 1) ? $clog2(K) : 1,
  localparam int unsigned RW = $clog2((K + NPE - 1) / NPE + 1)
) (
  input  logic          clk,
  input  logic          rst_n,
  // preprocessing
  input  logic          pre_start,
  input  cplx_t         h      [NR][NT],
  input  word_t         lambda,
  output logic          pre_done,
  output logic          pre_ready,
  output logic [IW-1:0] perm   [NR],
  // postprocessing
  input  logic          post_start,
  input  cplx_t         v      [NR],
  input  log2tau_t      log2tau,
  output logic          post_ready,
  output logic          out_valid,
  output cplx_t         x      [NT],
  output pow_t          gamma,
  output tsym_t         t      [NR],
  output logic [KW-1:0] kbest,
  output logic [RW-1:0] rounds
);

  // ---------------- preprocessing ----------------
  typedef enum logic [2:0] {P_IDLE, P_SRQ, P_TRI, P_MPP, P_READY} pre_state_t;
  pre_state_t pst;

  word_t  lambda_q;
  cplx_t  qbar  [NR][NC];
  word_t  rdiag [NR];
  cplx_t  rlow  [NR][NR];
  cplx_t  rinv  [NR][NR];
  cplx_t  rinv_diag [NR];
  pidx_t  paths [K][NR];
  pow_t   mop   [K];
  logic   srq_busy, srq_done, tri_busy, tri_done, mpp_busy, mpp_done;

  sorted_rq #(.NR(NR), .NT(NT)) u_srq (
    .clk, .rst_n, .start(pre_start && pst != P_SRQ && pst != P_TRI && pst != P_MPP), .h, .lambda,
    .busy(srq_busy), .done(srq_done), .qbar, .rdiag, .rlow, .perm);

  tri_inversion #(.NR(NR), .NT(NT)) u_tri (
    .clk, .rst_n, .start(srq_done), .qbar, .perm, .lambda(lambda_q),
    .busy(tri_busy), .done(tri_done), .rinv);

  always_comb
    for (int l = 0; l < NR; l++) rinv_diag[l] = rinv[l][l];

  mpp_select #(.NR(NR), .K(K)) u_mpp (
    .clk, .rst_n, .start(tri_done), .rinv_diag, .busy(mpp_busy), .done(mpp_done), .paths, .mop);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pst      <= P_IDLE;
      lambda_q <= '0;
      pre_done <= 1'b0;
    end else begin
      pre_done <= 1'b0;
      unique case (pst)
        P_IDLE, P_READY: if (pre_start) begin
          lambda_q <= lambda;
          pst      <= P_SRQ;
        end
        P_SRQ: if (srq_done) pst <= P_TRI;
        P_TRI: if (tri_done) pst <= P_MPP;
        P_MPP: if (mpp_done) begin
          pst      <= P_READY;
          pre_done <= 1'b1;
        end
        default: pst <= P_IDLE;
      endcase
    end
  end

  assign pre_ready = (pst == P_READY);

  // ---------------- postprocessing ----------------
  typedef enum logic [3:0] {Q_IDLE, Q_SORT, Q_VP, Q_SEARCH, Q_SEL, Q_CHINV, Q_GAMMA, Q_PV} post_state_t;
  post_state_t qst;

  log2tau_t log2tau_q;
  logic   sort_valid;
  cplx_t  vs [NR];
  cplxw_t ytilde [NR];
  tsym_t  t_all [K][NR];
  cplxw_t z_all [K][NR];
  pow_t   d_all [K];
  tsym_t  t_sel [NR];
  cplxw_t z_sel [NR];
  pow_t   d_sel;
  logic [KW-1:0] kbest_i;
  cplxw_t w [NT];
  cplxw_t w_g [NT];
  pow_t   gamma_i;
  logic   vp_busy, vp_done, ps_busy, ps_done, ms_busy, ms_done, ci_busy, ci_done;
  logic   gg_busy, gg_done, pv_busy, pv_done;

  sorter #(.NR(NR)) u_sorter (
    .clk, .rst_n, .in_valid(post_start && post_ready), .v, .perm, .out_valid(sort_valid), .vs);

  vp_vector #(.NR(NR)) u_vp (
    .clk, .rst_n, .start(sort_valid), .vs, .rinv, .busy(vp_busy), .done(vp_done), .ytilde);

  path_search #(.NR(NR), .K(K), .NPE(NPE)) u_search (
    .clk, .rst_n, .start(vp_done), .paths, .ytilde, .rinv, .rdiag, .log2tau(log2tau_q),
    .busy(ps_busy), .done(ps_done), .t_all, .z_all, .d_all, .rounds);

  min_select #(.NR(NR), .K(K)) u_sel (
    .clk, .rst_n, .start(ps_done), .t_all, .z_all, .d_all,
    .busy(ms_busy), .done(ms_done), .kbest(kbest_i), .t_sel, .z_sel, .d_sel);

  channel_inversion #(.NR(NR), .NT(NT)) u_chinv (
    .clk, .rst_n, .load(tri_done), .qbar, .start(ms_done), .z(z_sel),
    .busy(ci_busy), .done(ci_done), .w);

  gamma_gen #(.NT(NT)) u_gamma (
    .clk, .rst_n, .start(ci_done), .w, .busy(gg_busy), .done(gg_done), .gamma(gamma_i), .w_out(w_g));

  pv_gen #(.NT(NT)) u_pv (
    .clk, .rst_n, .start(gg_done), .gamma(gamma_i), .w(w_g), .busy(pv_busy), .done(pv_done), .x);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      qst       <= Q_IDLE;
      log2tau_q <= '0;
      out_valid <= 1'b0;
      gamma     <= '0;
      kbest     <= '0;
      for (int i = 0; i < NR; i++) t[i] <= '0;
    end else begin
      out_valid <= 1'b0;
      unique case (qst)
        Q_IDLE:   if (post_start && post_ready) begin
          log2tau_q <= log2tau;
          qst       <= Q_SORT;
        end
        Q_SORT:   qst <= Q_VP;
        Q_VP:     if (vp_done) qst <= Q_SEARCH;
        Q_SEARCH: if (ps_done) qst <= Q_SEL;
        Q_SEL:    if (ms_done) begin
          // perturbation back in the users' original order
          for (int i = 0; i < NR; i++) t[perm[i]] <= t_sel[i];
          kbest <= kbest_i;
          qst   <= Q_CHINV;
        end
        Q_CHINV:  if (ci_done) qst <= Q_GAMMA;
        Q_GAMMA:  if (gg_done) begin
          gamma <= gamma_i;
          qst   <= Q_PV;
        end
        Q_PV:     if (pv_done) begin
          out_valid <= 1'b1;
          qst       <= Q_IDLE;
        end
        default:  qst <= Q_IDLE;
      endcase
    end
  end

  assign post_ready = pre_ready && (qst == Q_IDLE);

  // a new channel may not replace the one in use
  a_pre_while_post: assert property (@(posedge clk) disable iff (!rst_n) pre_start |-> qst == Q_IDLE)
    else $error("viper_top: pre_start while postprocessing is busy");

endmodule
