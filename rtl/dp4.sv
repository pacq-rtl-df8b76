// dp4: parallel FP-INT-16 DP-4 unit of PacQ (paper Sec. IV "Overall
// Architecture", Table 1 "Parallel FP-INT-16 DP-4: 4 parallel FP-INT-16 MUL,
// 8 FP16 adders").
//
// One input is four FP16 activations a[k] (k = 0..3, consecutive along the
// inner dimension) and four packed weight words w[k]; word w[k] holds the
// weights of row k for 4 (INT4) or 8 (INT2) consecutive output columns. The
// unit returns, for every column lane l,
//     c_out[l] = c_in[l] + ((p0 + p1) + (p2 + p3)),   pk = a[k] * (1024+y_k,l)
// i.e. a 4-element dot product with the offset weights plus the running
// partial sum. The offset is removed later with the activation sum (Eq. 1).
//
// Pipeline (three register stages, which reproduces the paper's cycle counts
// of 19 cycles for 32 INT4 outputs and 35 for 64 INT2 outputs):
//   stage 1: the four fpint_mul units form all 16 (32) products at once;
//   stage 2: DUP adder trees of three FP16 adders each reduce DUP lanes per
//            cycle, stepping over the lanes in LANES/DUP cycles;
//   stage 3: one accumulate adder per tree adds c_in.
// With DUP = 2 (the paper's duplication factor, 2 x 4 = 8 FP16 adders) an
// INT4 input takes 2 cycles and an INT2 input 4 cycles; a new input is
// accepted in the cycle the previous one enters its last tree step, so the
// trees stay busy with back-to-back inputs. The order of the additions is
// this design's choice (the paper draws a tree but gives no order).
//
// Interface: valid/ready input handshake; outputs come without backpressure,
// DUP lanes per cycle, with out_lane the first lane of the group and out_tag
// the tag given with the input.
module dp4
  import pacq_pkg::*;
#(
  parameter int unsigned DUP   = 2,   // adder-tree duplication (paper: 2)
  parameter int unsigned TAG_W = 8
)(
  input  logic              clk,
  input  logic              rst_n,
  input  logic              in_valid,
  output logic              in_ready,
  input  prec_e             prec,
  input  fp16_t             a     [DP_K],
  input  logic [15:0]       w     [DP_K],
  input  fp16_t             c_in  [MAX_LANES],
  input  logic [TAG_W-1:0]  tag,
  output logic              out_valid,
  output logic [2:0]        out_lane,
  output fp16_t             out_c [DUP],
  output logic [TAG_W-1:0]  out_tag
);

  // ---------------- stage 1: parallel FP-INT multipliers ----------------
  fp16_t prod_c [DP_K][MAX_LANES];
  fp16_t prod_q [DP_K][MAX_LANES];
  fp16_t cin_q  [MAX_LANES];
  logic  s1_v;
  prec_e s1_prec;
  logic [TAG_W-1:0] s1_tag;
  logic [2:0] step;
  logic [2:0] last_step;

  for (genvar k = 0; k < DP_K; k++) begin : g_mul
    fpint_mul u_mul (.a(a[k]), .w(w[k]), .prec(prec), .p(prod_c[k]));
  end

  assign last_step = 3'((lanes_of(s1_prec) / DUP) - 1);
  assign in_ready  = !s1_v || (step == last_step);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s1_v    <= 1'b0;
      step    <= '0;
      s1_prec <= PREC_INT4;
      s1_tag  <= '0;
      for (int k = 0; k < DP_K; k++)
        for (int l = 0; l < MAX_LANES; l++) prod_q[k][l] <= FP16_ZERO;
      for (int l = 0; l < MAX_LANES; l++) cin_q[l] <= FP16_ZERO;
    end else begin
      if (s1_v) step <= (step == last_step) ? 3'd0 : step + 3'd1;
      if (in_valid && in_ready) begin
        s1_v    <= 1'b1;
        step    <= '0;
        s1_prec <= prec;
        s1_tag  <= tag;
        prod_q  <= prod_c;
        cin_q   <= c_in;
      end else if (s1_v && step == last_step) begin
        s1_v <= 1'b0;
      end
    end
  end

  // ---------------- stage 2: DUP adder trees ----------------
  fp16_t t_l0 [DUP], t_l1 [DUP], t_sum [DUP];
  fp16_t s2_sum [DUP], s2_cin [DUP];
  logic  s2_v;
  logic [2:0] s2_lane;
  logic [TAG_W-1:0] s2_tag;

  for (genvar t = 0; t < DUP; t++) begin : g_tree
    logic [2:0] ln;
    assign ln = 3'(step * DUP + t);
    fp16_add u_a0 (.a(prod_q[0][ln]), .b(prod_q[1][ln]), .y(t_l0[t]));
    fp16_add u_a1 (.a(prod_q[2][ln]), .b(prod_q[3][ln]), .y(t_l1[t]));
    fp16_add u_a2 (.a(t_l0[t]),       .b(t_l1[t]),       .y(t_sum[t]));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s2_v    <= 1'b0;
      s2_lane <= '0;
      s2_tag  <= '0;
      for (int t = 0; t < DUP; t++) begin
        s2_sum[t] <= FP16_ZERO;
        s2_cin[t] <= FP16_ZERO;
      end
    end else begin
      s2_v    <= s1_v;
      s2_lane <= 3'(step * DUP);
      s2_tag  <= s1_tag;
      for (int t = 0; t < DUP; t++) begin
        s2_sum[t] <= t_sum[t];
        s2_cin[t] <= cin_q[3'(step * DUP + t)];
      end
    end
  end

  // ---------------- stage 3: accumulate adders ----------------
  fp16_t acc_c [DUP];
  for (genvar t = 0; t < DUP; t++) begin : g_acc
    fp16_add u_acc (.a(s2_sum[t]), .b(s2_cin[t]), .y(acc_c[t]));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_lane  <= '0;
      out_tag   <= '0;
      for (int t = 0; t < DUP; t++) out_c[t] <= FP16_ZERO;
    end else begin
      out_valid <= s2_v;
      out_lane  <= s2_lane;
      out_tag   <= s2_tag;
      out_c     <= acc_c;
    end
  end

endmodule
