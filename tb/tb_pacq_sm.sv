// tb_pacq_sm: end-to-end test of the PacQ multiprocessor at its default size
// (8 tensor-core slices, 8 x 32 KB register file). The host loads a different
// tile of activations, n-packed weights and group scales into every bank,
// runs commands and reads the results back; every output is compared with a
// real-number model that performs the same FP16 operations in the same order.
//
// Sequence: an INT4 m16n16k32 GEMM split into two quantisation groups of
// k = 16 (the second command accumulates onto the first), then an INT2
// m16n32k16 GEMM (a precision switch). Mechanisms counted, each must occur:
// activation reuse across packed weights, INT4 and INT2 operation, the switch
// between them, accumulation across k groups, normalisation in the parallel
// FP-INT multiplier, and zero activations.
module tb_pacq_sm;
  import pacq_pkg::*;
  import tb_fp16_pkg::*;

  localparam int NTC = 8, M_T = 16, NW = 4;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic        hw_en, hr_en, start, acc, busy, done;
  logic [2:0]  hw_sel, hr_sel;
  logic [11:0] hw_addr, hr_addr, a_base, b_base, s_base, o_base;
  logic [63:0] hw_data, hr_data;
  prec_e       prec;
  logic [7:0]  k_chunks;

  pacq_sm dut (.*);

  int checks = 0, failures = 0, cyc = 0;
  always @(negedge clk) cyc++;

  // mechanism counters
  int n_reuse = 0, n_int4 = 0, n_int2 = 0, n_switch = 0, n_accgrp = 0, n_norm = 0, n_zero = 0;
  prec_e last_prec = PREC_INT4;
  always @(posedge clk) if (rst_n) begin
    // an issue to the DP-4 units without an A fetch in the cycle before
    if (dut.g_tc[0].u_slice.u_tc.dp_v && &dut.g_tc[0].u_slice.u_tc.dp_rdy &&
        dut.g_tc[0].u_slice.u_tc.wc != 0) n_reuse++;
  end

  // model state: per slice
  fp16_t A  [NTC][M_T][64];
  int    Y  [NTC][64][32];
  fp16_t S  [NTC][32];
  fp16_t Yo [NTC][M_T][32];

  task automatic hwrite(int t, int addr, logic [63:0] v);
    @(negedge clk);
    hw_en = 1; hw_sel = 3'(t); hw_addr = 12'(addr); hw_data = v;
    @(negedge clk);
    hw_en = 0;
  endtask

  task automatic hread(int t, int addr, output logic [63:0] v);
    @(negedge clk);
    hr_en = 1; hr_sel = 3'(t); hr_addr = 12'(addr);
    @(negedge clk);
    hr_en = 0;
    v = hr_data;
  endtask

  // one command on all slices: K = 4*kch, results to o_base
  task automatic command(prec_e p, int kch, int ab, int bb, int sb, int ob, logic accumulate);
    int lanes, ncol, ow_n, t0;
    fp16_t c, sum, pr [4], t1, u, v, y;
    logic [63:0] word;
    lanes = lanes_of(p); ncol = NW * lanes; ow_n = ncol / 4;
    if (p != last_prec) n_switch++;
    last_prec = p;
    if (p == PREC_INT4) n_int4++; else n_int2++;
    if (accumulate) n_accgrp++;
    for (int t = 0; t < NTC; t++) begin
      for (int m = 0; m < M_T; m++)
        for (int k = 0; k < 4 * kch; k++) begin
          A[t][m][k] = ($urandom % 10 == 0) ? 16'h0000 : rand_fp(9, 15);
          if (A[t][m][k] == 16'h0000) n_zero++;
        end
      for (int k = 0; k < 4 * kch; k++)
        for (int n = 0; n < ncol; n++) begin
          Y[t][k][n] = $urandom % (1 << (16 / lanes));
          if (A[t][0][k] != 0 && (1024 + int'(A[t][0][k][9:0])) * (1024 + Y[t][k][n]) >= 2 * 1024 * 1024) n_norm++;
        end
      for (int n = 0; n < ncol; n++) S[t][n] = rand_fp(10, 14);
      for (int m = 0; m < M_T; m++)
        for (int c4 = 0; c4 < kch; c4++)
          hwrite(t, ab + m * kch + c4, {A[t][m][4*c4+3], A[t][m][4*c4+2], A[t][m][4*c4+1], A[t][m][4*c4]});
      for (int wc = 0; wc < NW; wc++)
        for (int c4 = 0; c4 < kch; c4++) begin
          for (int kk = 0; kk < 4; kk++) begin
            logic [15:0] wd;
            wd = 0;
            for (int l = 0; l < lanes; l++) wd |= 16'(Y[t][4*c4+kk][wc*lanes+l]) << (l * 16 / lanes);
            word[16*kk +: 16] = wd;
          end
          hwrite(t, bb + wc * kch + c4, word);
        end
      for (int ow = 0; ow < ow_n; ow++)
        hwrite(t, sb + ow, {S[t][4*ow+3], S[t][4*ow+2], S[t][4*ow+1], S[t][4*ow]});
    end
    @(negedge clk);
    prec = p; k_chunks = 8'(kch); a_base = 12'(ab); b_base = 12'(bb); s_base = 12'(sb);
    o_base = 12'(ob); acc = accumulate; start = 1;
    @(negedge clk); start = 0; t0 = cyc;
    while (!done) @(negedge clk);
    $display("command %s K=%0d acc=%0d: %0d cycles", p == PREC_INT4 ? "INT4" : "INT2", 4 * kch, accumulate, cyc - t0);
    // model and compare
    for (int t = 0; t < NTC; t++)
      for (int m = 0; m < M_T; m++) begin
        sum = 0;
        for (int k = 0; k < 4 * kch; k++) sum = ref_add(sum, A[t][m][k]);
        t1 = ref_mul(sum, offset_of(p));
        for (int ow = 0; ow < ow_n; ow++) begin
          hread(t, ob + m * ow_n + ow, word);
          for (int j = 0; j < 4; j++) begin
            int n;
            n = 4 * ow + j;
            c = 0;
            for (int c4 = 0; c4 < kch; c4++) begin
              for (int kk = 0; kk < 4; kk++) pr[kk] = ref_fpint(A[t][m][4*c4+kk], Y[t][4*c4+kk][n]);
              c = ref_add(ref_add(ref_add(pr[0], pr[1]), ref_add(pr[2], pr[3])), c);
            end
            u = ref_add(c, {~t1[15], t1[14:0]});
            v = ref_mul(u, S[t][n]);
            y = accumulate ? ref_add(v, Yo[t][m][n]) : v;
            Yo[t][m][n] = y;
            checks++;
            if (word[16*j +: 16] !== y) begin
              failures++;
              if (failures < 10) $display("FAIL slice %0d Y[%0d][%0d]: %h expected %h", t, m, n, word[16*j +: 16], y);
            end
          end
        end
      end
  endtask

  task automatic need(string what, int n);
    checks++;
    if (n == 0) begin failures++; $display("FAIL mechanism never exercised: %s", what); end
    else $display("mechanism %-28s %0d", what, n);
  endtask

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    hw_en = 0; hr_en = 0; start = 0; acc = 0; hw_sel = 0; hr_sel = 0; hw_addr = 0; hr_addr = 0;
    hw_data = 0; prec = PREC_INT4; k_chunks = 1; a_base = 0; b_base = 0; s_base = 0; o_base = 0;
    repeat (3) @(posedge clk); rst_n = 1;
    // INT4 m16n16k32 as two k groups of 16, each with its own scales
    command(PREC_INT4, 4, 0,    1024, 1536, 2048, 1'b0);
    command(PREC_INT4, 4, 256,  1100, 1540, 2048, 1'b1);
    // INT2 m16n32k16
    command(PREC_INT2, 4, 512,  1200, 1600, 3000, 1'b0);
    need("A reuse across packed B", n_reuse);
    need("INT4 command", n_int4);
    need("INT2 command", n_int2);
    need("precision switch", n_switch);
    need("k-group accumulation", n_accgrp);
    need("multiplier normalisation", n_norm);
    need("zero activation", n_zero);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
