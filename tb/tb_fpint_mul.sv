// tb_fpint_mul: checks each lane of the parallel FP-INT multiplier against
// round(A * (1024 + y)) computed with real numbers, for INT4 and INT2 packed
// words, including significands near 2.0 that need the normalisation step.
module tb_fpint_mul;
  import pacq_pkg::*;
  import tb_fp16_pkg::*;
  fp16_t       a;
  logic [15:0] w;
  prec_e       prec;
  fp16_t       p [MAX_LANES];
  int checks = 0, failures = 0, normalised = 0;

  fpint_mul dut (.a(a), .w(w), .prec(prec), .p(p));

  task automatic run(fp16_t x, logic [15:0] word, prec_e pr);
    fp16_t exp;
    int    y;
    a = x; w = word; prec = pr; #1;
    for (int l = 0; l < 8; l++) begin
      if (pr == PREC_INT4) exp = (l < 4) ? ref_fpint(x, int'(word[4*l +: 4])) : 16'h0000;
      else                 exp = ref_fpint(x, int'(word[2*l +: 2]));
      y = (pr == PREC_INT4) ? int'(word[4*(l%4) +: 4]) : int'(word[2*l +: 2]);
      if (l < 4 || pr == PREC_INT2)
        if ((1024 + int'(x[9:0])) * (1024 + y) >= 2 * 1024 * 1024) normalised++;
      checks++;
      if (p[l] !== exp) begin
        failures++;
        if (failures < 10) $display("FAIL A=%h w=%h lane %0d: %h expected %h", x, word, l, p[l], exp);
      end
    end
  endtask

  initial begin
    #200000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    run(16'h3C00, 16'h0000, PREC_INT4);
    run(16'h3FFF, 16'hFFFF, PREC_INT4);   // needs normalisation
    run(16'hBFFF, 16'hFFFF, PREC_INT2);
    run(16'h0000, 16'h1234, PREC_INT4);   // zero activation
    run(16'h5400, 16'h8888, PREC_INT4);   // overflow to infinity
    for (int n = 0; n < 5000; n++) run(rand_fp(1, 20), 16'($urandom), PREC_INT4);
    for (int n = 0; n < 5000; n++) run(rand_fp(1, 20), 16'($urandom), PREC_INT2);
    for (int n = 0; n < 1000; n++) run({1'($urandom), 5'(5 + $urandom % 10), 5'h1F, 5'($urandom)}, 16'($urandom), PREC_INT4);
    if (normalised == 0) begin failures++; $display("FAIL normalisation never exercised"); end
    $display("normalised lanes: %0d", normalised);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
