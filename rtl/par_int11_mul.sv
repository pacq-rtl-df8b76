// par_int11_mul: parallel INT11 multiplier of PacQ (paper Fig. 5(c), Table 1
// "Parallel INT11 MUL: 12 INT16 adders").
//
// It multiplies one 11-bit significand a (hidden bit included) by every
// unsigned weight packed in the 16-bit word w, all in one cycle: four 4-bit
// weights (INT4) or eight 2-bit weights (INT2). Each weight bit gates a copy
// of a (the AND in the figure) and the gated copies are summed by a shared
// two-level adder tree:
//   level 1, eight adders: s1[j] = (a & w[2j]) + ((a & w[2j+1]) << 1)
//   level 2, four adders:  s2[q] = s1[2q] + (s1[2q+1] << 2)
// In INT2 mode the level-1 sums are the eight products; in INT4 mode the
// level-2 sums are the four products. The count of 12 adders is the paper's;
// the regular 8+4 arrangement is this design's own, because the multiplexer
// wiring of the figure (which lets the same adders also serve a full 11x11
// product) is not spelled out in the text. Only the parallel mode is built.
//
// Interface: combinational; lane q of i is the product for weight lane q
// (lanes 0-3 used for INT4, 0-7 for INT2, lane 0 in the low bits of w).
module par_int11_mul
  import pacq_pkg::*;
(
  input  logic [10:0] a,
  input  logic [15:0] w,
  input  prec_e       prec,
  output logic [14:0] i [MAX_LANES]
);

  logic [12:0] s1 [8];
  logic [14:0] s2 [4];

  always_comb begin
    for (int j = 0; j < 8; j++)
      s1[j] = 13'(a & {11{w[2*j]}}) + (13'(a & {11{w[2*j+1]}}) << 1);
    for (int q = 0; q < 4; q++)
      s2[q] = 15'(s1[2*q]) + (15'(s1[2*q+1]) << 2);
    for (int l = 0; l < MAX_LANES; l++) begin
      if (prec == PREC_INT2) i[l] = 15'(s1[l]);
      else                   i[l] = (l < 4) ? s2[l] : 15'd0;
    end
  end

endmodule
