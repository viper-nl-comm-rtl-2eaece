// mpp_select: most-promising-path selection by a K-best search on the Metric
// of Promise (MoP).
//
// Before any data arrives, the precoder decides which K tree paths it will
// evaluate. A path is a position vector p (p_l-1 in 0..8 here: the rank of the
// perturbation symbol among the 9 candidates at level l). Its metric is
//     MoP(p) = sum_l |Rinv_ll|^2 * (p_l - 1),
// a channel-only lower bound on the path's partial Euclidean distance. The
// search is breadth first: starting from the root, every survivor of level
// l-1 is expanded into its 9 children, the children's partial MoPs are ranked
// and the K smallest survive. After NR levels the K survivors are the most
// promising paths, in ascending MoP order.
//
// Implementation (own choice; the text gives the algorithm, not its
// hardware): one child is generated per cycle and dropped into a K-entry
// insertion list kept sorted by metric. Equal metrics keep generation order
// (survivor index, then child index), so the result is deterministic. At the
// end of a level the list becomes the survivor set. Invalid survivors (fewer
// than K exist at the first levels) generate nothing but still take their
// cycles, so the latency is fixed: NR*(9*K+1) cycles (584 for NR=K=8).
//
// Interface: pulse start with rinv_diag valid and held until done. done
// pulses one cycle when paths and mop (Q16.16) are valid; they stay valid
// until the next start.
module mpp_select
  import viper_pkg::*;
#(
  parameter int unsigned NR = 8,
  parameter int unsigned K  = 8
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  start,
  input  cplx_t rinv_diag [NR],
  output logic  busy,
  output logic  done,
  output pidx_t paths [K][NR],
  output pow_t  mop   [K]
);

  localparam int unsigned LW = (NR > 1) ? $clog2(NR) : 1;
  localparam int unsigned SW = (K > 1) ? $clog2(K) : 1;

  typedef struct packed {
    logic  valid;
    pow_t  metric;
  } entry_t;

  typedef enum logic [1:0] {S_IDLE, S_EXPAND, S_NEXT} state_t;
  state_t st;

  entry_t         surv  [K];
  pidx_t          spath [K][NR];
  entry_t         nxt   [K];
  pidx_t          npath [K][NR];
  logic [LW-1:0]  lvl;
  logic [SW-1:0]  sidx;
  pidx_t          cidx;

  // level weight |Rinv_ll|^2 in Q16.16
  pow_t weight;
  assign weight = sat_p(mag2(widen(rinv_diag[lvl])));

  // candidate child of survivor sidx
  entry_t cand;
  assign cand.valid  = surv[sidx].valid;
  assign cand.metric = sat_p(64'(surv[sidx].metric) + 64'(weight) * 64'(cidx));

  // insertion position: first entry that is invalid or has a larger metric
  logic [SW:0] pos;
  always_comb begin
    pos = (SW+1)'(K);
    for (int e = K - 1; e >= 0; e--)
      if (!nxt[e].valid || nxt[e].metric > cand.metric) pos = (SW+1)'(e);
  end

  assign busy = (st != S_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st   <= S_IDLE;
      done <= 1'b0;
      lvl  <= '0;
      sidx <= '0;
      cidx <= '0;
      for (int e = 0; e < K; e++) begin
        surv[e] <= '0;
        nxt[e]  <= '0;
        mop[e]  <= '0;
        for (int l = 0; l < NR; l++) begin
          spath[e][l] <= '0;
          npath[e][l] <= '0;
          paths[e][l] <= '0;
        end
      end
    end else begin
      done <= 1'b0;
      unique case (st)
        S_IDLE: if (start) begin
          for (int e = 0; e < K; e++) begin
            surv[e] <= '{valid: (e == 0), metric: '0};   // the root
            nxt[e]  <= '0;
            for (int l = 0; l < NR; l++) spath[e][l] <= '0;
          end
          lvl  <= '0;
          sidx <= '0;
          cidx <= '0;
          st   <= S_EXPAND;
        end
        S_EXPAND: begin
          if (cand.valid && pos < (SW+1)'(K)) begin
            for (int e = K - 1; e >= 0; e--) begin
              if (e > int'(pos)) begin
                nxt[e]   <= nxt[e-1];
                npath[e] <= npath[e-1];
              end else if (e == int'(pos)) begin
                nxt[e] <= cand;
                for (int l = 0; l < NR; l++)
                  npath[e][l] <= (l == int'(lvl)) ? cidx : spath[sidx][l];
              end
            end
          end
          if (cidx == pidx_t'(NBRANCH - 1)) begin
            cidx <= '0;
            if (32'(sidx) == K - 1) begin
              sidx <= '0;
              st   <= S_NEXT;
            end else sidx <= sidx + 1'b1;
          end else cidx <= cidx + 1'b1;
        end
        S_NEXT: begin
          for (int e = 0; e < K; e++) begin
            surv[e]  <= nxt[e];
            spath[e] <= npath[e];
            nxt[e]   <= '0;
          end
          if (32'(lvl) == NR - 1) begin
            for (int e = 0; e < K; e++) begin
              paths[e] <= npath[e];
              mop[e]   <= nxt[e].metric;
            end
            done <= 1'b1;
            st   <= S_IDLE;
          end else begin
            lvl <= lvl + 1'b1;
            st  <= S_EXPAND;
          end
        end
        default: st <= S_IDLE;
      endcase
    end
  end

endmodule
