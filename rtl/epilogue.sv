// epilogue: post-processing of PacQ results (paper Fig. 6, general core,
// steps 1-3, and Eq. 1).
//
// The tensor core returns C' = sum_k A_k (B_k + off) with off = 1032 (INT4)
// or 1026 (INT2), together with S = sum_k A_k. This unit computes, for four
// outputs in parallel (one register-file word),
//     step 1: t = off * S          (FP16 multiply)
//     step 2: u = C' - t           (FP16 subtract)
//     step 3: y = u * s            (FP16 multiply by the group scale)
// and, when acc is set, y + prev, which adds the contribution of an earlier
// quantisation group along k. In the paper these steps are instructions on
// the unmodified general-purpose cores; here they are a fixed pipeline of
// standard FP16 units so the design can be simulated end to end. The final
// accumulation across groups is this design's addition.
//
// Timing: one register stage; inputs presented with in_valid give y and
// out_valid in the next cycle.
module epilogue
  import pacq_pkg::*;
(
  input  logic  clk,
  input  logic  rst_n,
  input  logic  in_valid,
  input  fp16_t off,
  input  fp16_t asum,
  input  fp16_t c    [4],
  input  fp16_t s    [4],
  input  fp16_t prev [4],
  input  logic  acc,
  output logic  out_valid,
  output fp16_t y    [4]
);

  fp16_t t1;
  fp16_t u [4], v [4], z [4], yc [4];

  fp16_mul u_m1 (.a(asum), .b(off), .y(t1));

  for (genvar j = 0; j < 4; j++) begin : g_lane
    fp16_add u_sub (.a(c[j]), .b({~t1[15], t1[14:0]}), .y(u[j]));
    fp16_mul u_m3  (.a(u[j]), .b(s[j]), .y(v[j]));
    fp16_add u_acc (.a(v[j]), .b(prev[j]), .y(z[j]));
    assign yc[j] = acc ? z[j] : v[j];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      for (int j = 0; j < 4; j++) y[j] <= FP16_ZERO;
    end else begin
      out_valid <= in_valid;
      if (in_valid) y <= yc;
    end
  end

endmodule
