// tb_fp16_mul: checks the standard FP16 multiplier against the real-number
// reference on corner cases and random operands.
module tb_fp16_mul;
  import tb_fp16_pkg::*;
  logic [15:0] a, b, y;
  int checks = 0, failures = 0;

  fp16_mul dut (.a(a), .b(b), .y(y));

  task automatic check(logic [15:0] x, logic [15:0] z);
    logic [15:0] exp;
    a = x; b = z; #1;
    exp = ref_mul(x, z);
    checks++;
    if (y !== exp) begin
      failures++;
      if (failures < 10) $display("FAIL mul %h * %h = %h expected %h", x, z, y, exp);
    end
  endtask

  initial begin
    #200000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    check(16'h3C00, 16'h3C00);
    check(16'h3E00, 16'hC200);   // 1.5 * -3
    check(16'h3BFF, 16'h3BFF);
    check(16'h7BFF, 16'h4000);   // overflow
    check(16'h0400, 16'h3800);   // underflow
    check(16'h0000, 16'h4000);
    check(16'h6408, 16'h3555);
    for (int n = 0; n < 30000; n++) check(rand_fp(1, 30), rand_fp(1, 30));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
