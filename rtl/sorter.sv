// sorter: applies the user ordering chosen by the sorted RQ decomposition to
// the information vector, vs = P*v, i.e. vs[i] = v[perm[i]].
//
// The decomposition reorders the users (rows of the channel); every
// information vector must be reordered the same way before the lattice
// search. This is an NR-way crossbar with a register at its output.
//
// Interface: in_valid with v valid; out_valid and vs follow one cycle later.
// perm must be stable while vectors flow. Throughput: one vector per cycle.
module sorter
  import viper_pkg::*;
#(
  parameter int unsigned NR = 8,
  localparam int unsigned IW = (NR > 1) ? $clog2(NR) : 1
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          in_valid,
  input  cplx_t         v    [NR],
  input  logic [IW-1:0] perm [NR],
  output logic          out_valid,
  output cplx_t         vs   [NR]
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      for (int i = 0; i < NR; i++) vs[i] <= '0;
    end else begin
      out_valid <= in_valid;
      if (in_valid)
        for (int i = 0; i < NR; i++) vs[i] <= v[perm[i]];
    end
  end

endmodule
