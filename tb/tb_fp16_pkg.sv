// tb_fp16_pkg: reference FP16 arithmetic for the testbenches, written with
// SystemVerilog real (double) numbers instead of bit manipulation, so that it
// is independent of the RTL. Every FP16 sum or product is exact in double;
// rounding back to FP16 is to nearest even on 11 significant bits, followed
// by the same special-value rules as the RTL: exponent-0 inputs read as zero,
// results below the smallest normal flush to +0, results above the largest
// finite value become infinity.
package tb_fp16_pkg;

  function automatic real fp_to_real(logic [15:0] h);
    real m;
    int  e;
    if (h[14:10] == 5'd0) return 0.0;
    m = 1.0 + real'(h[9:0]) / 1024.0;
    e = int'(h[14:10]) - 15;
    while (e > 0) begin m = m * 2.0; e--; end
    while (e < 0) begin m = m / 2.0; e++; end
    return h[15] ? -m : m;
  endfunction

  function automatic logic [15:0] real_to_fp(real r);
    logic s;
    real  m, fl, rem;
    int   e, be;
    if (r == 0.0) return 16'h0000;
    s = (r < 0.0);
    m = s ? -r : r;
    e = 0;
    while (m >= 2.0) begin m = m / 2.0; e++; end
    while (m < 1.0)  begin m = m * 2.0; e--; end
    fl  = $floor(m * 1024.0);
    rem = m * 1024.0 - fl;
    if (rem > 0.5 || (rem == 0.5 && ($rtoi(fl) % 2 == 1))) fl = fl + 1.0;
    if (fl >= 2048.0) begin fl = fl / 2.0; e++; end
    be = e + 15;
    if (be <= 0)  return 16'h0000;
    if (be >= 31) return {s, 15'h7C00};
    return {s, 5'(be), 10'($rtoi(fl) - 1024)};
  endfunction

  function automatic logic [15:0] ref_add(logic [15:0] a, logic [15:0] b);
    return real_to_fp(fp_to_real(a) + fp_to_real(b));
  endfunction

  function automatic logic [15:0] ref_mul(logic [15:0] a, logic [15:0] b);
    return real_to_fp(fp_to_real(a) * fp_to_real(b));
  endfunction

  // A * (1024 + y): the parallel FP-INT product of one lane
  function automatic logic [15:0] ref_fpint(logic [15:0] a, int y);
    return real_to_fp(fp_to_real(a) * real'(1024 + y));
  endfunction

  // random normal FP16 with exponent in [emin, emax]
  function automatic logic [15:0] rand_fp(int emin, int emax);
    logic [15:0] h;
    h[15]    = 1'($urandom);
    h[14:10] = 5'(emin + int'($urandom % 32'(emax - emin + 1)));
    h[9:0]   = 10'($urandom);
    return h;
  endfunction

endpackage
