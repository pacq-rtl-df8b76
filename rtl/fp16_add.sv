// fp16_add: combinational IEEE-754 binary16 adder, round to nearest even.
//
// This is the "FP16 adder" the PacQ DP-4 adder trees, A-sum accumulators and
// post-processing are built from. The paper names the unit but does not
// describe it, so this is a plain textbook adder of this design's own making:
// the smaller operand is aligned into a 25-bit field {1.m, 13 zero bits,
// sticky}, added or subtracted, renormalised with a leading-one search and
// rounded to 11 significant bits (round to nearest, ties to even).
//
// Special values (this design's choice; the paper only treats normalised
// numbers): exponent-0 inputs (zero and subnormals) are read as zero; results
// below the smallest normal flush to +0; results above the largest finite
// value become +/-infinity; exponent-31 inputs are not treated specially. An
// exact zero result is +0.
//
// Interface: a, b in, y out, no clock; the result is valid in the same cycle.
module fp16_add
  import pacq_pkg::*;
(
  input  fp16_t a,
  input  fp16_t b,
  output fp16_t y
);

  localparam int unsigned W = 25;  // 11 significand + 13 extra + 1 sticky

  logic        sa, sb, sx, sy, sub;
  logic [4:0]  ea, eb, ex, ey;
  logic [10:0] ma, mb, mx, my;
  logic [4:0]  d;
  logic [W-1:0] xf, yf, yshift;
  logic        sticky;
  logic [W:0]  sum;
  int          pos;
  logic [W:0]  norm;
  logic [10:0] sig;
  logic        g, st, rnd;
  logic [11:0] sig_r;
  int          e_res;

  always_comb begin
    sa = a[15]; ea = a[14:10]; ma = {1'b1, a[9:0]};
    sb = b[15]; eb = b[14:10]; mb = {1'b1, b[9:0]};
    y  = FP16_ZERO;
    // order by magnitude: x is the larger
    if ({ea, a[9:0]} >= {eb, b[9:0]}) begin
      sx = sa; ex = ea; mx = ma; sy = sb; ey = eb; my = mb;
    end else begin
      sx = sb; ex = eb; mx = mb; sy = sa; ey = ea; my = ma;
    end
    sub    = sx ^ sy;
    d      = ex - ey;
    xf     = {mx, 14'b0};
    yf     = {my, 14'b0};
    yshift = (d >= 5'd25) ? '0 : (yf >> d);
    sticky = 1'b0;
    for (int i = 0; i < W; i++)
      if (i < int'(d) && yf[i]) sticky = 1'b1;
    if (d >= 5'd25) sticky = 1'b1;
    yshift[0] = yshift[0] | sticky;
    sum = sub ? ({1'b0, xf} - {1'b0, yshift}) : ({1'b0, xf} + {1'b0, yshift});

    pos = -1;
    for (int i = 0; i <= W; i++)
      if (sum[i]) pos = i;

    norm  = '0;
    sig   = '0;
    g     = 1'b0;
    st    = 1'b0;
    rnd   = 1'b0;
    sig_r = '0;
    e_res = 0;
    if (ea == 5'd0 && eb == 5'd0) begin
      y = FP16_ZERO;
    end else if (eb == 5'd0) begin
      y = a;
    end else if (ea == 5'd0) begin
      y = b;
    end else if (pos < 0) begin
      y = FP16_ZERO;
    end else begin
      norm  = sum << (W - pos);          // leading one at bit W
      sig   = norm[W -: 11];
      g     = norm[W-11];
      st    = |norm[W-12:0];
      rnd   = g & (st | sig[0]);
      sig_r = {1'b0, sig} + {11'b0, rnd};
      // the leading one of x sits at bit W-1 of sum
      e_res = int'(ex) + pos - (W - 1);
      if (sig_r[11]) e_res = e_res + 1;
      if (e_res <= 0)
        y = FP16_ZERO;
      else if (e_res >= 31)
        y = {sx, FP16_INF[14:0]};
      else
        y = {sx, 5'(e_res), sig_r[11] ? sig_r[10:1] : sig_r[9:0]};
    end
  end

endmodule
