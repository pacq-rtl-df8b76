// tb_tensor_core: runs whole output tiles through the GEMM core, INT4 and
// INT2, with a behavioural register file, and compares every accumulator and
// every activation sum with a real-number model that performs the same FP16
// operations in the same order. It also checks the fetch counts (each A chunk
// fetched once and reused for all packed word columns) and the tile cycle
// count of this implementation: 12 cycles per row group and k chunk for INT4
// (4 A reads, then 4 issues of 2 cycles) plus 6, and 18 per chunk plus 8 for
// INT2, where the DP-4 needs 4 cycles per issue.
module tb_tensor_core;
  import pacq_pkg::*;
  import tb_fp16_pkg::*;

  localparam int M_T = 16, NW = 4, NCOL = NW * 8;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic start, busy, done, rf_rd_en;
  prec_e prec;
  logic [7:0]  k_chunks;
  logic [11:0] a_base, b_base, rf_rd_addr;
  logic [63:0] rf_rd_data;
  logic [3:0]  rd_row;
  logic [4:0]  rd_col;
  fp16_t       rd_c [4];
  fp16_t       rd_asum;

  tensor_core dut (.*);

  logic [63:0] mem [4096];
  always_ff @(posedge clk) if (rf_rd_en) rf_rd_data <= mem[rf_rd_addr];

  int checks = 0, failures = 0;
  int a_rd = 0, b_rd = 0, issues = 0, cyc = 0;
  always @(negedge clk) cyc++;
  always @(posedge clk) if (rst_n) begin
    if (rf_rd_en && dut.state == 3'd1) a_rd++;
    if (rf_rd_en && dut.state == 3'd2) b_rd++;
    if (dut.dp_v && &dut.dp_rdy) issues++;
  end

  fp16_t A [M_T][64];
  int    Y [64][NCOL];   // offset weights y = B + 2^(bits-1), logical column

  task automatic run_tile(prec_e p, int kch, int emax);
    int lanes, K, t0, t1, steps, exp_cyc;
    fp16_t c, s, pr [4];
    logic [15:0] word;
    lanes = lanes_of(p); K = 4 * kch;
    a_base = 12'd100; b_base = 12'd2000;
    for (int m = 0; m < M_T; m++)
      for (int k = 0; k < K; k++) A[m][k] = ($urandom % 8 == 0) ? 16'h0000 : rand_fp(8, emax);
    for (int k = 0; k < K; k++)
      for (int n = 0; n < NW * lanes; n++) Y[k][n] = $urandom % (1 << (16 / lanes));
    for (int m = 0; m < M_T; m++)
      for (int c4 = 0; c4 < kch; c4++)
        mem[a_base + m * kch + c4] = {A[m][4*c4+3], A[m][4*c4+2], A[m][4*c4+1], A[m][4*c4]};
    for (int wc = 0; wc < NW; wc++)
      for (int c4 = 0; c4 < kch; c4++) begin
        logic [63:0] v;
        for (int kk = 0; kk < 4; kk++) begin
          word = 0;
          for (int l = 0; l < lanes; l++) word |= 16'(Y[4*c4+kk][wc*lanes+l]) << (l * 16 / lanes);
          v[16*kk +: 16] = word;
        end
        mem[b_base + wc * kch + c4] = v;
      end
    a_rd = 0; b_rd = 0; issues = 0;
    prec = p; k_chunks = 8'(kch);
    @(negedge clk) start = 1;
    @(negedge clk) start = 0; t0 = cyc;
    while (!done) @(negedge clk);
    t1 = cyc;
    // reference
    for (int m = 0; m < M_T; m++) begin
      s = 0;
      for (int k = 0; k < K; k++) s = ref_add(s, A[m][k]);
      rd_row = 4'(m); #1;
      checks++;
      if (rd_asum !== s) begin failures++; $display("FAIL asum row %0d: %h expected %h", m, rd_asum, s); end
      for (int col = 0; col < NCOL; col++) begin
        int wc, l;
        wc = col / 8; l = col % 8;
        c = 0;
        if (l < lanes)
          for (int c4 = 0; c4 < kch; c4++) begin
            for (int kk = 0; kk < 4; kk++) pr[kk] = ref_fpint(A[m][4*c4+kk], Y[4*c4+kk][wc*lanes+l]);
            c = ref_add(ref_add(ref_add(pr[0], pr[1]), ref_add(pr[2], pr[3])), c);
          end
        rd_col = 5'(col & ~3); #1;
        checks++;
        if (rd_c[col % 4] !== c) begin
          failures++;
          if (failures < 10) $display("FAIL C[%0d][%0d]: %h expected %h", m, col, rd_c[col % 4], c);
        end
      end
    end
    // A fetched once per (row, chunk) and reused across all NW word columns
    checks++;
    if (a_rd != M_T * kch || b_rd != (M_T / 4) * kch * NW || issues != (M_T / 4) * kch * NW) begin
      failures++; $display("FAIL fetch counts a=%0d b=%0d issues=%0d", a_rd, b_rd, issues);
    end
    // timing: per row group and chunk, 4 A reads then NW issues of 2 (INT4)
    // or 4 (INT2) cycles; plus start, pipeline drain and done
    steps = lanes / 2;
    exp_cyc = (steps == 2) ? (M_T / 4) * kch * (4 + NW * 2) + 6 : (M_T / 4) * kch * 18 + 8;
    checks++;
    if (t1 - t0 != exp_cyc) begin failures++; $display("FAIL cycles %0d expected %0d", t1 - t0, exp_cyc); end
    $display("%s K=%0d: %0d cycles busy, %0d A reads, %0d issues (A reuse %0dx)",
             p == PREC_INT4 ? "INT4" : "INT2", K, t1 - t0, a_rd, issues, issues * 4 / a_rd);
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    start = 0; prec = PREC_INT4; k_chunks = 1; a_base = 0; b_base = 0; rd_row = 0; rd_col = 0;
    repeat (3) @(posedge clk); rst_n = 1;
    run_tile(PREC_INT4, 4, 16);    // m16n16k16
    run_tile(PREC_INT2, 4, 16);    // m16n32k16
    run_tile(PREC_INT4, 1, 14);
    run_tile(PREC_INT2, 8, 12);
    run_tile(PREC_INT4, 32, 10);   // one 128-wide k group
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
