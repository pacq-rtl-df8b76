// tb_fp16_add: checks the FP16 adder against the real-number reference on
// directed corner cases (cancellation, ties, overflow, underflow, zeros) and
// on random operands over the whole exponent range.
module tb_fp16_add;
  import tb_fp16_pkg::*;
  logic [15:0] a, b, y;
  int checks = 0, failures = 0;

  fp16_add dut (.a(a), .b(b), .y(y));

  task automatic check(logic [15:0] x, logic [15:0] z);
    logic [15:0] exp;
    a = x; b = z; #1;
    exp = ref_add(x, z);
    checks++;
    if (y !== exp) begin
      failures++;
      if (failures < 10) $display("FAIL add %h + %h = %h expected %h", x, z, y, exp);
    end
  endtask

  initial begin
    #200000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    check(16'h3C00, 16'h3C00);   // 1+1
    check(16'h3C00, 16'hBC00);   // 1-1
    check(16'h3C00, 16'h0000);
    check(16'h0000, 16'hC000);
    check(16'h7BFF, 16'h7BFF);   // overflow
    check(16'h3C00, 16'h1400);   // 1 + 2^-10
    check(16'h3C00, 16'h1000);   // tie
    check(16'h3C01, 16'h1000);   // tie, odd
    check(16'h3C00, 16'h8C00);   // 1 - tiny
    check(16'h0400, 16'h8401);   // underflow to zero
    check(16'h6408, 16'hE400);
    for (int n = 0; n < 20000; n++) check(rand_fp(1, 30), rand_fp(1, 30));
    for (int n = 0; n < 20000; n++) begin
      logic [15:0] x;
      x = rand_fp(5, 25);
      check(x, {~x[15], x[14:10] - 5'(n % 3), 10'($urandom)});
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
