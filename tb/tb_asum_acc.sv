// tb_asum_acc: loads chunks of four activations back to back and checks the
// running sum against the real-number model (one FP16 addition per element,
// in order), the four-cycle busy time per chunk, and clearing.
module tb_asum_acc;
  import pacq_pkg::*;
  import tb_fp16_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic clr, in_valid, in_ready;
  fp16_t a [DP_K];
  fp16_t sum;
  asum_acc dut (.*);

  int checks = 0, failures = 0;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    fp16_t expv;
    int busy_cycles;
    clr = 0; in_valid = 0;
    for (int k = 0; k < DP_K; k++) a[k] = 0;
    repeat (2) @(posedge clk); #1 rst_n = 1;
    for (int g = 0; g < 200; g++) begin
      @(negedge clk) clr = 1;
      @(negedge clk) clr = 0;
      expv = 0;
      for (int c = 0; c < 1 + $urandom % 8; c++) begin
        for (int k = 0; k < DP_K; k++) begin
          a[k] = ($urandom % 6 == 0) ? 16'h0000 : rand_fp(5, 20);
          expv = ref_add(expv, a[k]);
        end
        while (!in_ready) @(negedge clk);
        in_valid = 1;
        @(negedge clk) in_valid = 0;
        busy_cycles = 0;
        while (!in_ready) begin busy_cycles++; @(negedge clk); end
        checks++;
        if (busy_cycles != 4) begin failures++; $display("FAIL busy %0d cycles", busy_cycles); end
      end
      checks++;
      if (sum !== expv) begin failures++; $display("FAIL sum %h expected %h", sum, expv); end
    end
    @(negedge clk) clr = 1;
    @(negedge clk) clr = 0;
    checks++;
    if (sum !== 16'h0000) begin failures++; $display("FAIL clear"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
