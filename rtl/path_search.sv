// path_search: the "search over N_MPP paths" stage, NPE pipelined path PEs
// shared by K most-promising paths.
//
// The K paths are dealt out in rounds: in round r, PE e receives path
// r*NPE + e. Because each PE is fully pipelined (see path_pe), one round is
// issued per cycle, so the ceil(K/NPE) rounds enter back to back and leave
// NR cycles later in the same order (the folding of the paper: with
// K <= NPE every path has its own PE and there is a single round). The
// per-path results t, z and d are collected into arrays indexed by path
// number for the selection stage.
// Latency: ceil(K/NPE) + NR + 1 cycles from start to done (10 for
// NR=K=NPE=8).
//
// Interface: pulse start with paths, ytilde, rinv, rdiag and log2tau valid and
// held until done. done pulses one cycle with t_all, z_all and d_all valid;
// they stay valid until the next start. rounds counts the rounds the last
// run took (an observation port).
module path_search
  import viper_pkg::*;
#(
  parameter int unsigned NR  = 8,
  parameter int unsigned K   = 8,
  parameter int unsigned NPE = 8,
  localparam int unsigned NROUND = (K + NPE - 1) / NPE,
  localparam int unsigned RW = $clog2(NROUND + 1)
) (
  input  logic     clk,
  input  logic     rst_n,
  input  logic     start,
  input  pidx_t    paths  [K][NR],
  input  cplxw_t   ytilde [NR],
  input  cplx_t    rinv   [NR][NR],
  input  word_t    rdiag  [NR],
  input  log2tau_t log2tau,
  output logic     busy,
  output logic     done,
  output tsym_t    t_all  [K][NR],
  output cplxw_t   z_all  [K][NR],
  output pow_t     d_all  [K],
  output logic [RW-1:0] rounds
);

  typedef enum logic [1:0] {S_IDLE, S_FEED, S_WAIT} state_t;
  state_t st;
  logic [RW-1:0] rnd;    // round being issued
  logic [RW-1:0] orn;    // round being collected

  logic   pe_in_valid;
  logic   pe_out_valid [NPE];
  tsym_t  pe_t [NPE][NR];
  cplxw_t pe_z [NPE][NR];
  pow_t   pe_d [NPE];
  pidx_t  pe_path [NPE][NR];

  for (genvar e = 0; e < NPE; e++) begin : g_pe
    // path issued to this PE in the current round (unused slots get path 0)
    always_comb begin
      int kk;
      kk = int'(rnd) * NPE + e;
      for (int l = 0; l < NR; l++) pe_path[e][l] = (kk < K) ? paths[kk][l] : '0;
    end
    path_pe #(.NR(NR)) u_pe (
      .clk, .rst_n, .in_valid(pe_in_valid), .path(pe_path[e]), .ytilde, .rinv, .rdiag, .log2tau,
      .out_valid(pe_out_valid[e]), .t(pe_t[e]), .z(pe_z[e]), .d(pe_d[e]));
  end

  assign pe_in_valid = (st == S_FEED);
  assign busy        = (st != S_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st     <= S_IDLE;
      done   <= 1'b0;
      rnd    <= '0;
      orn    <= '0;
      rounds <= '0;
      for (int k = 0; k < K; k++) begin
        d_all[k] <= '0;
        for (int l = 0; l < NR; l++) begin
          t_all[k][l] <= '0;
          z_all[k][l] <= '0;
        end
      end
    end else begin
      done <= 1'b0;
      // issue one round per cycle
      unique case (st)
        S_IDLE: if (start) begin
          rnd <= '0;
          orn <= '0;
          st  <= S_FEED;
        end
        S_FEED: if (32'(rnd) == NROUND - 1) st <= S_WAIT;
                else rnd <= rnd + 1'b1;
        S_WAIT: ;
        default: st <= S_IDLE;
      endcase
      // collect the rounds in issue order (all PEs run in lockstep)
      if (st != S_IDLE && pe_out_valid[0]) begin
        for (int e = 0; e < NPE; e++)
          for (int k = 0; k < K; k++)
            if (k == int'(orn) * NPE + e) begin
              t_all[k] <= pe_t[e];
              z_all[k] <= pe_z[e];
              d_all[k] <= pe_d[e];
            end
        if (32'(orn) == NROUND - 1) begin
          st     <= S_IDLE;
          done   <= 1'b1;
          rounds <= orn + 1'b1;
        end else begin
          orn <= orn + 1'b1;
        end
      end
    end
  end

  // the PEs have a fixed latency, so they run and finish in lockstep
  for (genvar e = 1; e < NPE; e++) begin : g_lockstep
    a_lockstep: assert property (@(posedge clk) disable iff (!rst_n)
      pe_out_valid[e] == pe_out_valid[0])
      else $error("path_search: PEs out of step");
  end

endmodule
