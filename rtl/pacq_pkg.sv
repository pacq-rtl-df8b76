// pacq_pkg: types and constants shared by the PacQ hyper-asymmetric GEMM datapath.
//
// Number formats: activations, partial sums and scales are IEEE-754 binary16
// (FP16). Weights are signed INT4 or INT2, stored offset to unsigned (B+8 or
// B+2) and packed along the output-feature (n) dimension, four INT4 or eight
// INT2 per 16-bit word; the lowest lane sits in the lowest bits. The weight
// offset constant (1032 for INT4, i.e. 1024+8) follows the paper; the INT2
// value 1026 (1024+2) is this design's extension of the same rule.
package pacq_pkg;

  typedef logic [15:0] fp16_t;

  // Weight precision of the packed B operand.
  typedef enum logic {PREC_INT4 = 1'b0, PREC_INT2 = 1'b1} prec_e;

  localparam int unsigned MAX_LANES = 8;   // weights per packed 16-bit word (INT2)
  localparam int unsigned DP_K      = 4;   // elements per dot product (DP-4)

  // FP16 encodings of the offsets 1024 + 2^(bits-1).
  localparam fp16_t FP16_1032 = 16'h6408;  // 1.0000001000b x 2^10
  localparam fp16_t FP16_1026 = 16'h6402;  // 1.0000000010b x 2^10
  localparam fp16_t FP16_ZERO = 16'h0000;
  localparam fp16_t FP16_INF  = 16'h7C00;

  function automatic int unsigned lanes_of(prec_e p);
    return (p == PREC_INT4) ? 4 : 8;
  endfunction

  function automatic fp16_t offset_of(prec_e p);
    return (p == PREC_INT4) ? FP16_1032 : FP16_1026;
  endfunction

endpackage
