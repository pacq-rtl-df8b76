// tb_dp4: drives the parallel FP-INT DP-4 with back-to-back inputs and checks
// every output lane against c_in + ((p0+p1)+(p2+p3)) computed with the real-
// number reference. It also measures the paper's DP-4 cycle counts for the
// m2n4k4 workload: eight packed inputs give 32 INT4 outputs in 19 cycles and
// 64 INT2 outputs in 35 cycles.
module tb_dp4;
  import pacq_pkg::*;
  import tb_fp16_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic        in_valid, in_ready, out_valid;
  prec_e       prec;
  fp16_t       a [DP_K];
  logic [15:0] w [DP_K];
  fp16_t       c_in [MAX_LANES];
  logic [7:0]  tag, out_tag;
  logic [2:0]  out_lane;
  fp16_t       out_c [2];

  dp4 #(.DUP(2), .TAG_W(8)) dut (.*);

  int checks = 0, failures = 0;
  fp16_t exp_c [256][MAX_LANES];
  int cyc = 0, first_acc, last_out, n_out;
  always @(negedge clk) cyc++;

  // scoreboard
  always @(posedge clk) if (rst_n && out_valid) begin
    for (int t = 0; t < 2; t++) begin
      checks++;
      if (out_c[t] !== exp_c[out_tag][out_lane + 3'(t)]) begin
        failures++;
        if (failures < 10) $display("FAIL tag %0d lane %0d: %h expected %h", out_tag, out_lane + 3'(t), out_c[t], exp_c[out_tag][out_lane + 3'(t)]);
      end
    end
    last_out = cyc; n_out += 2;
  end

  task automatic burst(prec_e p, int n_ops, int tag0, int emax);
    int y;
    fp16_t pr [DP_K];
    for (int op = 0; op < n_ops; op++) begin
      for (int k = 0; k < DP_K; k++) begin a[k] = rand_fp(1, emax); w[k] = 16'($urandom); end
      for (int l = 0; l < MAX_LANES; l++) c_in[l] = rand_fp(1, emax + 10);
      for (int l = 0; l < lanes_of(p); l++) begin
        for (int k = 0; k < DP_K; k++) begin
          y = (p == PREC_INT4) ? int'(w[k][4*l +: 4]) : int'(w[k][2*l +: 2]);
          pr[k] = ref_fpint(a[k], y);
        end
        exp_c[tag0 + op][l] = ref_add(ref_add(ref_add(pr[0], pr[1]), ref_add(pr[2], pr[3])), c_in[l]);
      end
      tag = 8'(tag0 + op); prec = p; in_valid = 1;
      @(posedge clk);
      while (!in_ready) @(posedge clk);
      if (op == 0) first_acc = cyc;
      #1;
    end
    in_valid = 0;
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    in_valid = 0; prec = PREC_INT4; tag = 0;
    for (int k = 0; k < DP_K; k++) begin a[k] = 0; w[k] = 0; end
    for (int l = 0; l < MAX_LANES; l++) c_in[l] = 0;
    repeat (3) @(posedge clk); #1 rst_n = 1;
    @(posedge clk); #1;
    // INT4, m2n4k4: 8 packed inputs, 32 outputs
    n_out = 0;
    burst(PREC_INT4, 8, 0, 12);
    repeat (10) @(posedge clk); #1;
    checks++;
    if (n_out != 32 || last_out - first_acc + 1 != 19) begin
      failures++; $display("FAIL INT4 timing: %0d outputs in %0d cycles", n_out, last_out - first_acc + 1);
    end else $display("INT4: %0d outputs in %0d cycles", n_out, last_out - first_acc + 1);
    // INT2, m2n4k4: 8 packed inputs, 64 outputs
    n_out = 0;
    burst(PREC_INT2, 8, 8, 12);
    repeat (10) @(posedge clk); #1;
    checks++;
    if (n_out != 64 || last_out - first_acc + 1 != 35) begin
      failures++; $display("FAIL INT2 timing: %0d outputs in %0d cycles", n_out, last_out - first_acc + 1);
    end else $display("INT2: %0d outputs in %0d cycles", n_out, last_out - first_acc + 1);
    // random mix with mode switches
    for (int r = 0; r < 30; r++) begin
      burst(($urandom % 2) ? PREC_INT2 : PREC_INT4, 8, 16 + r * 8, 14);
      repeat ($urandom % 3) @(posedge clk);
      #1;
    end
    repeat (10) @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
