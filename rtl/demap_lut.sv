// demap_lut: turns a path position index into a perturbation symbol.
//
// At tree level l a path says "take the p-th nearest lattice point" to the
// effective point shat (in units of the perturbation interval tau, so the
// lattice is the Gaussian integers). Rather than sorting distances, the point
// is split into its nearest lattice centre c = round(shat) and an offset
// f = shat - c inside the unit square around c. The sign of f.re, the sign
// of f.im and whether |f.im| > |f.re| select one of 8 symmetric regions. A
// single 9-entry table of neighbour offsets, written for the region
// f.re >= f.im >= 0, is mapped to the other regions by swapping and
// negating the coordinates; its p-th entry added to c is the symbol t.
// The table holds the 3x3 neighbourhood (bound B=1, 9 = (2B+1)^2 candidates)
// in the order of distance from the region's typical point f = (0.3, 0.15):
//     (0,0) (1,0) (0,1) (1,1) (0,-1) (-1,0) (1,-1) (-1,1) (-1,-1)
// The text only says that a region index addresses such a table, as in the
// FlexCore enumeration; the region split and this table are this design's
// own reconstruction.
//
// Interface: purely combinational. shat is Q24.8, p is p-1 (0..8), t is the
// Gaussian-integer symbol (saturated to 8 bits per component).
module demap_lut
  import viper_pkg::*;
(
  input  cplxw_t shat,
  input  pidx_t  p,
  output tsym_t  t
);

  typedef logic signed [1:0] off_t;
  localparam off_t DX [NBRANCH] = '{2'sd0, 2'sd1, 2'sd0, 2'sd1, 2'sd0, -2'sd1, 2'sd1, -2'sd1, -2'sd1};
  localparam off_t DY [NBRANCH] = '{2'sd0, 2'sd0, 2'sd1, 2'sd1, -2'sd1, 2'sd0, -2'sd1, 2'sd1, -2'sd1};

  acc_t        c_re, c_im;      // nearest lattice centre (integers)
  acc_t        f_re, f_im;      // offset from the centre, Q.8
  logic        neg_re, neg_im, swap;
  off_t        dx, dy, ox, oy;
  pidx_t       pi;

  always_comb begin
    c_re   = (shat.re + acc_t'(1 << (FRAC - 1))) >>> FRAC;
    c_im   = (shat.im + acc_t'(1 << (FRAC - 1))) >>> FRAC;
    f_re   = shat.re - (c_re <<< FRAC);
    f_im   = shat.im - (c_im <<< FRAC);
    neg_re = f_re[AW-1];
    neg_im = f_im[AW-1];
    swap   = (neg_im ? -f_im : f_im) > (neg_re ? -f_re : f_re);
    pi     = (p < pidx_t'(NBRANCH)) ? p : '0;
    dx     = DX[pi];
    dy     = DY[pi];
    ox     = swap ? dy : dx;
    oy     = swap ? dx : dy;
    if (neg_re) ox = -ox;
    if (neg_im) oy = -oy;
    t.re   = sat8(c_re + acc_t'(ox));
    t.im   = sat8(c_im + acc_t'(oy));
  end

  function automatic logic signed [7:0] sat8(input acc_t x);
    if (x > 127)       return 8'sd127;
    else if (x < -128) return -8'sd128;
    else               return x[7:0];
  endfunction

endmodule
