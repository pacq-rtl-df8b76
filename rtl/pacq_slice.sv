// pacq_slice: one tensor core of the PacQ streaming multiprocessor together
// with its register-file bank and the post-processing of its results.
//
// A command computes one output tile
//     Y[m, n] = (sum_k A[m,k] * (B[k,n] + off) - off * sum_k A[m,k]) * s[n]
//               (+ Y_prev[m, n] when acc is set)
// for M_T = 16 rows and 16 (INT4) or 32 (INT2) columns, K = 4*k_chunks. The
// tensor core produces the offset dot products and the activation sums
// (Eq. 1 of the paper); the epilogue applies the paper's general-core steps
// 1-3 (times off, subtract, times the group scale). Splitting K into
// quantisation groups along k is done by issuing one command per group with
// acc set on all but the first, so the scale may change per group.
//
// Register-file layout (64-bit words; addresses are word addresses):
//   A, B: see tensor_core;
//   scales: s_base + ow holds s[4ow .. 4ow+3] (FP16, lane j in bits 16j+:16);
//   output: o_base + m*OW + ow holds Y[m, 4ow .. 4ow+3], OW = 4 (INT4) or 8 (INT2).
// The result write-back is sequential, one output word every four cycles
// (read scale, read previous result, compute, write); the paper does not
// describe this path, and it is kept simple.
//
// Host port: while the slice is idle, hw_* writes and hr_* reads (one cycle
// read latency) the bank. start (while idle) runs the command; busy stays
// high until done pulses.
module pacq_slice
  import pacq_pkg::*;
#(
  parameter int unsigned M_T   = 16,
  parameter int unsigned NW    = 4,
  parameter int unsigned DEPTH = 4096,   // 32 KB per bank, 8 banks = 256 KB
  parameter int unsigned AW    = $clog2(DEPTH),
  parameter int unsigned KCW   = 8
)(
  input  logic           clk,
  input  logic           rst_n,
  input  logic           hw_en,
  input  logic [AW-1:0]  hw_addr,
  input  logic [63:0]    hw_data,
  input  logic           hr_en,
  input  logic [AW-1:0]  hr_addr,
  output logic [63:0]    hr_data,
  input  logic           start,
  input  prec_e          prec,
  input  logic [KCW-1:0] k_chunks,
  input  logic [AW-1:0]  a_base,
  input  logic [AW-1:0]  b_base,
  input  logic [AW-1:0]  s_base,
  input  logic [AW-1:0]  o_base,
  input  logic           acc,
  output logic           busy,
  output logic           done
);

  localparam int unsigned RW = $clog2(M_T);
  localparam int unsigned CW = $clog2(NW * MAX_LANES);
  localparam int unsigned OWW = $clog2(NW * 2);      // output words per row, INT2

  typedef enum logic [2:0] {P_IDLE, P_TC, P_E0, P_E1, P_E2, P_E3, P_DONE} phase_e;
  phase_e ph;

  prec_e         prec_q;
  logic          acc_q;
  logic [AW-1:0] s_base_q, o_base_q;
  logic [RW-1:0] r;
  logic [OWW-1:0] ow, ow_last;
  fp16_t         s_q [4];

  // ---------------- register-file bank ----------------
  logic          rf_rd_en, rf_wr_en;
  logic [AW-1:0] rf_rd_addr, rf_wr_addr;
  logic [63:0]   rf_rd_data, rf_wr_data;

  rf_bank #(.DEPTH(DEPTH), .AW(AW)) u_rf (
    .clk, .rd_en(rf_rd_en), .rd_addr(rf_rd_addr), .rd_data(rf_rd_data),
    .wr_en(rf_wr_en), .wr_addr(rf_wr_addr), .wr_data(rf_wr_data));

  // ---------------- tensor core ----------------
  logic          tc_start, tc_busy, tc_done, tc_rd_en;
  logic [AW-1:0] tc_rd_addr;
  logic [CW-1:0] tc_col;
  fp16_t         tc_c [4];
  fp16_t         tc_asum;

  tensor_core #(.M_T(M_T), .NW(NW), .AW(AW), .KCW(KCW)) u_tc (
    .clk, .rst_n, .start(tc_start), .prec, .k_chunks, .a_base, .b_base,
    .busy(tc_busy), .done(tc_done),
    .rf_rd_en(tc_rd_en), .rf_rd_addr(tc_rd_addr), .rf_rd_data(rf_rd_data),
    .rd_row(r), .rd_col(tc_col), .rd_c(tc_c), .rd_asum(tc_asum));

  // output word ow covers n = 4ow..4ow+3; accumulator column of n is
  // (n / lanes)*8 + n % lanes
  assign tc_col  = (prec_q == PREC_INT4) ? CW'(ow * 8) : CW'(ow * 4);
  assign ow_last = OWW'((prec_q == PREC_INT4) ? NW - 1 : 2 * NW - 1);

  // ---------------- epilogue ----------------
  logic  ep_v, ep_ov;
  fp16_t ep_prev [4], ep_y [4];
  always_comb
    for (int j = 0; j < 4; j++) ep_prev[j] = rf_rd_data[16*j +: 16];

  epilogue u_ep (
    .clk, .rst_n, .in_valid(ep_v), .off(offset_of(prec_q)), .asum(tc_asum),
    .c(tc_c), .s(s_q), .prev(ep_prev), .acc(acc_q), .out_valid(ep_ov), .y(ep_y));

  logic [AW-1:0] o_addr;
  assign o_addr = AW'(o_base_q + AW'(r * (32'(ow_last) + 1)) + AW'(ow));

  // ---------------- port arbitration ----------------
  always_comb begin
    tc_start   = (ph == P_IDLE) && start;
    ep_v       = (ph == P_E2);
    rf_rd_en   = 1'b0;
    rf_rd_addr = hr_addr;
    rf_wr_en   = 1'b0;
    rf_wr_addr = hw_addr;
    rf_wr_data = hw_data;
    unique case (ph)
      P_IDLE: begin
        rf_rd_en = hr_en;
        rf_wr_en = hw_en;
      end
      P_TC: begin
        rf_rd_en   = tc_rd_en;
        rf_rd_addr = tc_rd_addr;
      end
      P_E0: begin
        rf_rd_en   = 1'b1;
        rf_rd_addr = AW'(s_base_q + AW'(ow));
      end
      P_E1: begin
        rf_rd_en   = 1'b1;
        rf_rd_addr = o_addr;
      end
      P_E3: begin
        rf_wr_en   = 1'b1;
        rf_wr_addr = o_addr;
        rf_wr_data = {ep_y[3], ep_y[2], ep_y[1], ep_y[0]};
      end
      default: ;
    endcase
  end

  assign hr_data = rf_rd_data;
  assign busy    = (ph != P_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ph       <= P_IDLE;
      done     <= 1'b0;
      prec_q   <= PREC_INT4;
      acc_q    <= 1'b0;
      s_base_q <= '0;
      o_base_q <= '0;
      r        <= '0;
      ow       <= '0;
      for (int j = 0; j < 4; j++) s_q[j] <= FP16_ZERO;
    end else begin
      done <= 1'b0;
      unique case (ph)
        P_IDLE: if (start) begin
          prec_q   <= prec;
          acc_q    <= acc;
          s_base_q <= s_base;
          o_base_q <= o_base;
          r  <= '0;
          ow <= '0;
          ph <= P_TC;
        end
        P_TC: if (tc_done) ph <= P_E0;
        P_E0: ph <= P_E1;
        P_E1: begin
          for (int j = 0; j < 4; j++) s_q[j] <= rf_rd_data[16*j +: 16];
          ph <= P_E2;
        end
        P_E2: ph <= P_E3;
        P_E3: begin
          if (ow == ow_last) begin
            ow <= '0;
            if (r == RW'(M_T - 1)) ph <= P_DONE;
            else begin
              r  <= r + 1'b1;
              ph <= P_E0;
            end
          end else begin
            ow <= ow + 1'b1;
            ph <= P_E0;
          end
        end
        P_DONE: begin
          done <= 1'b1;
          ph   <= P_IDLE;
        end
        default: ph <= P_IDLE;
      endcase
    end
  end

  a_tc_idle: assert property (@(posedge clk) disable iff (!rst_n)
    (ph == P_IDLE) |-> !tc_busy);
  a_ep_result: assert property (@(posedge clk) disable iff (!rst_n)
    (ph == P_E3) |-> ep_ov);

endmodule
