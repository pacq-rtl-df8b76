// asum_acc: activation-sum accumulator of the PacQ GEMM core (paper Sec. IV,
// Eq. 1: sum_k A_k (B_k - 1032) = sum_k A_k B_k - 1032 * sum_k A_k).
//
// The multipliers work on offset weights B+1032, so the true dot product is
// recovered later by subtracting 1032 times the sum of the activations of the
// row. This unit builds that sum next to the DP-4 while the same activations
// are being reused across the packed weights. The paper names "small
// accumulators" and shows one adder with a feedback register; this design
// uses exactly that: one FP16 adder that adds the four activations of a
// fetched A chunk one per cycle, in order a[0], a[1], a[2], a[3].
//
// Interface: clr sets the sum to +0; in_valid with in_ready loads a chunk of
// four FP16 values; the chunk is added over the next four cycles and in_ready
// is low meanwhile; sum holds the running total.
module asum_acc
  import pacq_pkg::*;
(
  input  logic  clk,
  input  logic  rst_n,
  input  logic  clr,
  input  logic  in_valid,
  output logic  in_ready,
  input  fp16_t a [DP_K],
  output fp16_t sum
);

  fp16_t      buf_q [DP_K];
  logic [2:0] left;       // elements still to add
  logic [1:0] idx;
  fp16_t      nxt;

  fp16_add u_add (.a(sum), .b(buf_q[idx]), .y(nxt));

  assign in_ready = (left == 3'd0);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sum  <= FP16_ZERO;
      left <= '0;
      idx  <= '0;
      for (int k = 0; k < DP_K; k++) buf_q[k] <= FP16_ZERO;
    end else if (clr) begin
      sum  <= FP16_ZERO;
      left <= '0;
      idx  <= '0;
    end else begin
      if (left != 3'd0) begin
        sum  <= nxt;
        idx  <= idx + 2'd1;
        left <= left - 3'd1;
      end
      if (in_valid && in_ready) begin
        buf_q <= a;
        idx   <= '0;
        left  <= 3'(DP_K);
      end
    end
  end

endmodule
