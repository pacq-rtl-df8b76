// fpint_mul: parallel FP-INT-16 multiplier of PacQ (paper Sec. IV, Fig. 5(b)
// and 5(d), Table 1 "Parallel FP-INT-16 MUL").
//
// One FP16 activation A is multiplied by every weight of a packed 16-bit word
// in the same cycle. Each weight is stored as the unsigned value y = B+8
// (INT4) or y = B+2 (INT2), and the multiplier computes A * (1024 + y): the
// FP16 form of 1024+y always has exponent 11001 and significand
// 1.000000yyyy, so
//   * the common sign is sign(A) XOR 0,
//   * the common exponent is e_A + 10 (the figure's "5'b10" input),
//   * each significand product is {A_m, 10'b0} + A_m * y, where A_m * y comes
//     from the 12-adder parallel INT11 multiplier (par_int11_mul).
// As in Fig. 5(d) the product is assembled from three parts: the low 10 bits
// of i = A_m * y, a 6-bit adder that adds the top bits of i to A_m[5:0], and
// A_m[10:6] on top. Departures, each needed for exact results:
//   * A_m * y needs 15 bits, so i[14:10] (5 bits, not the figure's 4) enter
//     the 6-bit adder, and its carry increments A_m[10:6].
//   * (1.m_A)(1 + y/1024) can reach 2.0, so each lane has a one-position
//     normaliser. The text says no normalisation is needed; Table 1 lists a
//     normalisation unit in this multiplier; the table is followed.
//   * There are eight assembly/rounding lanes so that INT2 finishes in one
//     cycle as the text says; Table 1 counts four rounding units and four
//     INT6 adders (INT4 uses lanes 0-3 only).
// Rounding is to nearest even, to 10 fraction bits. A with exponent 0 gives
// +0, exponent overflow gives +/-infinity (this design's choices).
//
// Interface: combinational; p[l] is the product for weight lane l.
module fpint_mul
  import pacq_pkg::*;
(
  input  fp16_t       a,
  input  logic [15:0] w,
  input  prec_e       prec,
  output fp16_t       p [MAX_LANES]
);

  logic [10:0] am;
  logic [14:0] i [MAX_LANES];

  par_int11_mul u_mul (.a(am), .w(w), .prec(prec), .i(i));

  assign am = {1'b1, a[9:0]};

  logic [6:0]  mid   [MAX_LANES];
  logic [5:0]  hi    [MAX_LANES];
  logic [21:0] mfull [MAX_LANES];
  logic [10:0] sig   [MAX_LANES];
  logic        g     [MAX_LANES];
  logic        st    [MAX_LANES];
  logic [11:0] sig_r [MAX_LANES];
  int          e_res [MAX_LANES];
  logic [5:0]  e_base;

  // the single INT5 exponent adder shared by all lanes (Table 1): e_A + 10
  assign e_base = {1'b0, a[14:10]} + 6'd10;

  always_comb begin
    for (int l = 0; l < MAX_LANES; l++) begin
      mid[l]   = {1'b0, am[5:0]} + {2'b0, i[l][14:10]};   // 6-bit adder + carry
      hi[l]    = {1'b0, am[10:6]} + {5'b0, mid[l][6]};
      mfull[l] = {hi[l], mid[l][5:0], i[l][9:0]};
      e_res[l] = int'(e_base);
      if (mfull[l][21]) begin                               // normalise
        sig[l] = mfull[l][21:11]; g[l] = mfull[l][10]; st[l] = |mfull[l][9:0];
        e_res[l] = e_res[l] + 1;
      end else begin
        sig[l] = mfull[l][20:10]; g[l] = mfull[l][9];  st[l] = |mfull[l][8:0];
      end
      sig_r[l] = {1'b0, sig[l]} + {11'b0, g[l] & (st[l] | sig[l][0])};
      if (sig_r[l][11]) e_res[l] = e_res[l] + 1;
      if (a[14:10] == 5'd0 || (prec == PREC_INT4 && l >= 4))
        p[l] = FP16_ZERO;
      else if (e_res[l] >= 31)
        p[l] = {a[15], FP16_INF[14:0]};
      else
        p[l] = {a[15], 5'(e_res[l]), sig_r[l][11] ? sig_r[l][10:1] : sig_r[l][9:0]};
    end
  end

endmodule
