// vp_vector: forms the vector the lattice search works on,
//     ytilde = Rinv * P * v,
// from the sorted information vector vs = P*v and the lower-triangular
// Rinv = Rbar^-1. Every candidate path shares it: each PE then subtracts the
// perturbation term tau*Rinv*t level by level.
//
// Datapath: row-parallel, column-serial; in cycle c every row r >= c adds
// Rinv[r][c]*vs[c]. The sums are kept at full accumulator width (Q24.8).
// Latency: NR+1 cycles from start to done (9 for NR=8).
//
// Interface: pulse start with vs and rinv valid and held until done; done
// pulses one cycle when ytilde is valid; ytilde stays until the next start.
module vp_vector
  import viper_pkg::*;
#(
  parameter int unsigned NR = 8
) (
  input  logic   clk,
  input  logic   rst_n,
  input  logic   start,
  input  cplx_t  vs   [NR],
  input  cplx_t  rinv [NR][NR],
  output logic   busy,
  output logic   done,
  output cplxw_t ytilde [NR]
);

  localparam int unsigned IW = (NR > 1) ? $clog2(NR) : 1;
  logic [IW-1:0] col;
  logic          run;

  // products of the current column
  cplxw_t prod [NR];
  always_comb
    for (int r = 0; r < NR; r++) prod[r] = cmul_w(widen(rinv[r][col]), widen(vs[col]), 1'b0);

  assign busy = run;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      run  <= 1'b0;
      done <= 1'b0;
      col  <= '0;
      for (int r = 0; r < NR; r++) ytilde[r] <= '0;
    end else begin
      done <= 1'b0;
      if (start && !run) begin
        run <= 1'b1;
        col <= '0;
        for (int r = 0; r < NR; r++) ytilde[r] <= '0;
      end else if (run) begin
        for (int r = 0; r < NR; r++)
          if (r >= int'(col))
            ytilde[r] <= '{re: sat_a(64'(ytilde[r].re) + 64'(prod[r].re)),
                           im: sat_a(64'(ytilde[r].im) + 64'(prod[r].im))};
        if (32'(col) == NR - 1) begin
          run  <= 1'b0;
          done <= 1'b1;
        end
        col <= col + 1'b1;
      end
    end
  end

endmodule
