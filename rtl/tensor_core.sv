// tensor_core: the PacQ GEMM core (paper Sec. III-IV, Fig. 3(d), Fig. 4(c),
// Fig. 6, Table 1 "Tensor Core: 4 parallel FP-INT-16 DP-4").
//
// It computes one output tile C[M_T x NCOL] = A[M_T x K] * (B[K x NCOL] + off)
// with FP16 activations A and INT4/INT2 weights B packed along the output
// dimension n (the paper's P(B4)_n / P(B8)_n packing), and the activation sum
// S[m] = sum_k A[m,k] of every row. The epilogue later forms
// (C - off*S) * scale.
//
// Organisation (Fig. 3(d)): N_DP = 4 DP-4 units share one B buffer (a packed
// chunk of four 16-bit words, one per k; here it is the output register of
// the register-file bank, which holds the word until the next read, so the
// chunk is issued in the cycle after its fetch) and each has its own A buffer (four
// FP16 activations of one row); each A buffer feeds an activation-sum
// accumulator (asum_acc). The partial sums stay in the core (output
// stationary) in an M_T x NCOL array of FP16 accumulators.
//
// Loop order (this design's reading of Fig. 4(c) and of "output stationary
// for both tile movement and tile computation"):
//   for rg  in row groups of N_DP rows        (one row per DP-4)
//     for kc in K/4 chunks
//       fetch A[rg rows, kc]  -> A buffers, add to S      (4 reads)
//       for wc in NW word columns                         (A reused NW times)
//         fetch B word chunk [kc, wc] -> B buffer          (1 read)
//         issue to all DP-4: C[row, wc lanes] += A.(B+off)
// The activations fetched once are reused across all NW packed word columns
// with no refetch, which is the register-file saving the paper claims for
// n-packing. A small scoreboard (one bit per word column) holds an issue
// while the previous update of the same accumulators is still in a DP-4; at
// the default sizes it never stalls.
//
// Register-file layout (this design's choice; 64-bit words):
//   A: row m, chunk kc at a_base + m*k_chunks + kc, element j = bits 16j+:16
//   B: word column wc, chunk kc at b_base + wc*k_chunks + kc, row k = bits 16k+:16;
//      each 16-bit word holds 4 INT4 (or 8 INT2) weights of consecutive n,
//      lane 0 in the low bits; column n = wc*lanes + lane.
//
// Timing: start (one cycle, while idle) begins a tile; busy stays high until
// done pulses. The register-file read port has one cycle of latency. Per
// chunk of a row group: 4 A-read cycles, then NW issues of 2 (INT4) or 4
// (INT2) cycles. After done, rd_c/rd_asum read the results combinationally:
// rd_c[j] is accumulator column rd_col+j of row rd_row, where the accumulator
// column of output n is wc*8 + lane (so INT4 tiles use columns 0-3, 8-11, ...).
module tensor_core
  import pacq_pkg::*;
#(
  parameter int unsigned M_T  = 16,   // tile rows
  parameter int unsigned NW   = 4,    // packed word columns per tile
  parameter int unsigned N_DP = 4,    // DP-4 units (paper: 4)
  parameter int unsigned DUP  = 2,    // adder-tree duplication (paper: 2)
  parameter int unsigned AW   = 12,   // register-file address width
  parameter int unsigned KCW  = 8,    // width of the k-chunk count
  localparam int unsigned NCOL = NW * MAX_LANES,
  localparam int unsigned RW   = $clog2(M_T),
  localparam int unsigned CW   = $clog2(NCOL)
)(
  input  logic            clk,
  input  logic            rst_n,
  input  logic            start,
  input  prec_e           prec,
  input  logic [KCW-1:0]  k_chunks,   // K/4, at least 1
  input  logic [AW-1:0]   a_base,
  input  logic [AW-1:0]   b_base,
  output logic            busy,
  output logic            done,
  output logic            rf_rd_en,
  output logic [AW-1:0]   rf_rd_addr,
  input  logic [63:0]     rf_rd_data,
  input  logic [RW-1:0]   rd_row,
  input  logic [CW-1:0]   rd_col,
  output fp16_t           rd_c [4],
  output fp16_t           rd_asum
);

  localparam int unsigned RG = M_T / N_DP;
  localparam int unsigned WW = (NW > 1) ? $clog2(NW) : 1;
  localparam int unsigned TAG_W = RW + WW;

  typedef enum logic [2:0] {S_IDLE, S_ARD, S_BRD, S_ISSUE, S_DRAIN, S_DONE} state_e;
  state_e state;

  prec_e          prec_q;
  logic [KCW-1:0] kc_n, kc;
  logic [AW-1:0]  a_base_q, b_base_q;
  logic [RW-1:0]  rg;
  logic [$clog2(N_DP)-1:0] d;
  logic [WW-1:0]  wc;

  fp16_t       abuf [N_DP][DP_K];
  fp16_t       c_acc [M_T][NCOL];
  fp16_t       asum_row [M_T];
  logic [NW-1:0] sb_pend;

  logic                     pend_v, pend_a;
  logic [$clog2(N_DP)-1:0]  pend_idx;

  // unpack the register-file word
  fp16_t       rf_fp [DP_K];
  logic [15:0] rf_w  [DP_K];
  always_comb
    for (int j = 0; j < DP_K; j++) begin
      rf_fp[j] = rf_rd_data[16*j +: 16];
      rf_w[j]  = rf_rd_data[16*j +: 16];
    end

  // ---------------- activation-sum accumulators ----------------
  logic        asum_clr;
  logic [N_DP-1:0] asum_v, asum_rdy;
  fp16_t       asum_s [N_DP];
  for (genvar j = 0; j < N_DP; j++) begin : g_asum
    asum_acc u_asum (.clk, .rst_n, .clr(asum_clr), .in_valid(asum_v[j]),
                     .in_ready(asum_rdy[j]), .a(rf_fp), .sum(asum_s[j]));
    assign asum_v[j] = pend_v && pend_a && (pend_idx == j);
  end

  // ---------------- DP-4 units ----------------
  logic            dp_v;
  logic [N_DP-1:0] dp_rdy, dp_ov;
  fp16_t           dp_cin [N_DP][MAX_LANES];
  logic [TAG_W-1:0] dp_tag [N_DP], dp_otag [N_DP];
  logic [2:0]      dp_olane [N_DP];
  fp16_t           dp_oc [N_DP][DUP];

  for (genvar j = 0; j < N_DP; j++) begin : g_dp
    logic [RW-1:0] row;
    assign row = RW'(rg * N_DP + j);
    assign dp_tag[j] = {row, wc};
    always_comb
      for (int l = 0; l < MAX_LANES; l++)
        dp_cin[j][l] = c_acc[row][CW'(wc * MAX_LANES + l)];
    dp4 #(.DUP(DUP), .TAG_W(TAG_W)) u_dp (
      .clk, .rst_n, .in_valid(dp_v), .in_ready(dp_rdy[j]), .prec(prec_q),
      .a(abuf[j]), .w(rf_w), .c_in(dp_cin[j]), .tag(dp_tag[j]),
      .out_valid(dp_ov[j]), .out_lane(dp_olane[j]), .out_c(dp_oc[j]), .out_tag(dp_otag[j]));
  end

  // ---------------- sequencer ----------------
  logic rd_a_go, rd_b_go, issue_go;
  logic [2:0] last_lane;
  assign last_lane = 3'(lanes_of(prec_q) - DUP);

  always_comb begin
    rd_a_go  = (state == S_ARD) && !(d == 0 && !(&asum_rdy));
    rd_b_go  = (state == S_BRD) && !sb_pend[wc];
    issue_go = (state == S_ISSUE) && (&dp_rdy);
    dp_v     = (state == S_ISSUE);
    asum_clr = (state == S_IDLE && start) || (rd_a_go && d == 0 && kc == 0);
    rf_rd_en = rd_a_go || rd_b_go;
    if (state == S_ARD)
      rf_rd_addr = AW'(a_base_q + AW'((rg * N_DP + d) * kc_n) + AW'(kc));
    else
      rf_rd_addr = AW'(b_base_q + AW'(wc * kc_n) + AW'(kc));
  end

  assign busy    = (state != S_IDLE);
  always_comb
    for (int j = 0; j < 4; j++) rd_c[j] = c_acc[rd_row][CW'(rd_col + CW'(j))];
  assign rd_asum = asum_row[rd_row];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state    <= S_IDLE;
      done     <= 1'b0;
      prec_q   <= PREC_INT4;
      kc_n     <= '0;
      kc       <= '0;
      a_base_q <= '0;
      b_base_q <= '0;
      rg       <= '0;
      d        <= '0;
      wc       <= '0;
      pend_v   <= 1'b0;
      pend_a   <= 1'b0;
      pend_idx <= '0;
      sb_pend  <= '0;
      for (int j = 0; j < N_DP; j++)
        for (int k = 0; k < DP_K; k++) abuf[j][k] <= FP16_ZERO;
      for (int m = 0; m < M_T; m++) begin
        asum_row[m] <= FP16_ZERO;
        for (int n = 0; n < NCOL; n++) c_acc[m][n] <= FP16_ZERO;
      end
    end else begin
      done <= 1'b0;

      // read data capture
      pend_v <= rf_rd_en;
      pend_a <= rd_a_go;
      pend_idx <= d;
      if (pend_v && pend_a) abuf[pend_idx] <= rf_fp;

      // DP-4 write-back
      for (int j = 0; j < N_DP; j++)
        if (dp_ov[j])
          for (int t = 0; t < DUP; t++)
            c_acc[dp_otag[j][TAG_W-1 -: RW]][CW'(dp_otag[j][WW-1:0] * MAX_LANES + dp_olane[j] + t)] <= dp_oc[j][t];
      if (dp_ov[0] && dp_olane[0] == last_lane)
        sb_pend[dp_otag[0][WW-1:0]] <= 1'b0;

      unique case (state)
        S_IDLE: if (start) begin
          prec_q   <= prec;
          kc_n     <= k_chunks;
          a_base_q <= a_base;
          b_base_q <= b_base;
          rg <= '0; kc <= '0; d <= '0; wc <= '0;
          sb_pend <= '0;
          for (int m = 0; m < M_T; m++) begin
            asum_row[m] <= FP16_ZERO;
            for (int n = 0; n < NCOL; n++) c_acc[m][n] <= FP16_ZERO;
          end
          state <= S_ARD;
        end
        S_ARD: if (rd_a_go) begin
          // a new row group starts: keep the finished sums of the last one
          if (d == 0 && kc == 0 && rg != 0)
            for (int j = 0; j < N_DP; j++) asum_row[RW'((rg - 1) * N_DP + j)] <= asum_s[j];
          if (d == N_DP - 1) begin
            d <= '0; wc <= '0;
            state <= S_BRD;
          end else d <= d + 1'b1;
        end
        S_BRD: if (rd_b_go) state <= S_ISSUE;
        S_ISSUE: if (issue_go) begin
          sb_pend[wc] <= 1'b1;
          if (wc != WW'(NW - 1)) begin
            wc <= wc + 1'b1;
            state <= S_BRD;
          end else begin
            wc <= '0;
            if (kc != kc_n - 1'b1) begin
              kc <= kc + 1'b1;
              state <= S_ARD;
            end else begin
              kc <= '0;
              if (rg == RW'(RG - 1)) state <= S_DRAIN;
              else begin
                rg <= rg + 1'b1;
                state <= S_ARD;
              end
            end
          end
        end
        S_DRAIN: if (sb_pend == '0 && (&asum_rdy) && !pend_v) begin
          for (int j = 0; j < N_DP; j++) asum_row[RW'((RG - 1) * N_DP + j)] <= asum_s[j];
          state <= S_DONE;
        end
        S_DONE: begin
          done  <= 1'b1;
          state <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // the DP-4 units run in lock step, and an issue never overtakes an
  // outstanding update of the same accumulators
  a_lockstep: assert property (@(posedge clk) disable iff (!rst_n)
    dp_v |-> (dp_rdy == '0 || &dp_rdy));
  a_no_overtake: assert property (@(posedge clk) disable iff (!rst_n)
    dp_v |-> !sb_pend[wc]);

endmodule
