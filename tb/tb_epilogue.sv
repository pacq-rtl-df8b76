// tb_epilogue: checks the post-processing (C - off*S) * s (+ prev) for INT4
// and INT2 offsets, with and without accumulation, against the real-number
// model, including its one-cycle latency. A directed case checks that the
// offset is really removed: four activations of 1.0 against weights
// B = 0, 1, -8, 7 give C = 4*(1032+B), and the result must be 4*B*s.
module tb_epilogue;
  import pacq_pkg::*;
  import tb_fp16_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic  in_valid, acc, out_valid;
  fp16_t off, asum;
  fp16_t c [4], s [4], prev [4], y [4];
  epilogue dut (.*);

  int checks = 0, failures = 0;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    fp16_t e [4], t1;
    in_valid = 0; acc = 0; off = FP16_1032; asum = 0;
    for (int j = 0; j < 4; j++) begin c[j] = 0; s[j] = 0; prev[j] = 0; end
    repeat (2) @(posedge clk); #1 rst_n = 1;
    // directed: A = 1.0 for 4 elements, weights B = -8..: C = 4*(1024+y)
    @(negedge clk);
    off = FP16_1032; asum = 16'h4400;                    // S = 4
    c[0] = real_to_fp(4.0 * 1032); c[1] = real_to_fp(4.0 * 1033);
    c[2] = real_to_fp(4.0 * 1024); c[3] = real_to_fp(4.0 * 1039);
    for (int j = 0; j < 4; j++) s[j] = 16'h3800;         // s = 0.5
    acc = 0; in_valid = 1;
    @(negedge clk) in_valid = 0;
    checks += 5;
    if (!out_valid) failures++;
    if (y[0] !== 16'h0000) failures++;                   // B = 0  -> 0
    if (y[1] !== real_to_fp(2.0)) failures++;            // B = 1  -> 4*1*0.5
    if (y[2] !== real_to_fp(-16.0)) failures++;          // B = -8 -> 4*-8*0.5
    if (y[3] !== real_to_fp(14.0)) failures++;           // B = 7  -> 4*7*0.5
    for (int i = 0; i < 5000; i++) begin
      @(negedge clk);
      off  = ($urandom % 2) ? FP16_1032 : FP16_1026;
      asum = rand_fp(10, 19);
      acc  = 1'($urandom);
      t1   = ref_mul(asum, off);
      for (int j = 0; j < 4; j++) begin
        c[j] = rand_fp(20, 29); s[j] = rand_fp(8, 16); prev[j] = rand_fp(8, 20);
        e[j] = ref_mul(ref_add(c[j], {~t1[15], t1[14:0]}), s[j]);
        if (acc) e[j] = ref_add(e[j], prev[j]);
      end
      in_valid = 1;
      @(negedge clk) in_valid = 0;
      for (int j = 0; j < 4; j++) begin
        checks++;
        if (y[j] !== e[j]) begin
          failures++;
          if (failures < 10) $display("FAIL lane %0d: %h expected %h", j, y[j], e[j]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
