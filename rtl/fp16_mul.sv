// fp16_mul: combinational standard FP16 multiplier (the paper's baseline FP16
// MUL, Fig. 5(a)): the sign is the XOR of the signs, the exponents are added,
// the 11-bit significands (hidden bit included) are multiplied, the 22-bit
// product is normalised by at most one position and rounded to nearest even.
// The structure follows the paper; the rounding mode and the handling of
// special values are this design's choices and match fp16_add: exponent-0
// inputs read as zero, underflow flushes to +0, overflow gives +/-infinity.
//
// In PacQ this unit is not inside the tensor core: it is the ordinary FP
// multiplier used by the post-processing (times 1032, times scale s).
//
// Interface: a, b in, y out, combinational.
module fp16_mul
  import pacq_pkg::*;
(
  input  fp16_t a,
  input  fp16_t b,
  output fp16_t y
);

  logic        s;
  logic [21:0] p;
  logic [10:0] sig;
  logic        g, st, rnd;
  logic [11:0] sig_r;
  int          e_res;

  always_comb begin
    s     = a[15] ^ b[15];
    p     = {1'b1, a[9:0]} * {1'b1, b[9:0]};
    e_res = int'(a[14:10]) + int'(b[14:10]) - 15;
    if (p[21]) begin
      sig = p[21:11]; g = p[10]; st = |p[9:0];
      e_res = e_res + 1;
    end else begin
      sig = p[20:10]; g = p[9];  st = |p[8:0];
    end
    rnd   = g & (st | sig[0]);
    sig_r = {1'b0, sig} + {11'b0, rnd};
    if (sig_r[11]) e_res = e_res + 1;
    if (a[14:10] == 5'd0 || b[14:10] == 5'd0 || e_res <= 0)
      y = FP16_ZERO;
    else if (e_res >= 31)
      y = {s, FP16_INF[14:0]};
    else
      y = {s, 5'(e_res), sig_r[11] ? sig_r[10:1] : sig_r[9:0]};
  end

endmodule
