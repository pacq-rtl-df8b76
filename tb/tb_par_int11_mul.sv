// tb_par_int11_mul: checks every lane of the parallel INT11 multiplier
// against an integer product, in INT4 and INT2 modes, exhaustively over the
// weight values and randomly over the 11-bit operand.
module tb_par_int11_mul;
  import pacq_pkg::*;
  logic [10:0] a;
  logic [15:0] w;
  prec_e       prec;
  logic [14:0] i [MAX_LANES];
  int checks = 0, failures = 0;

  par_int11_mul dut (.a(a), .w(w), .prec(prec), .i(i));

  task automatic run(logic [10:0] x, logic [15:0] word, prec_e p);
    int exp;
    a = x; w = word; prec = p; #1;
    for (int l = 0; l < 8; l++) begin
      if (p == PREC_INT4) exp = (l < 4) ? int'(x) * int'(word[4*l +: 4]) : 0;
      else                exp = int'(x) * int'(word[2*l +: 2]);
      checks++;
      if (int'(i[l]) != exp) begin
        failures++;
        if (failures < 10) $display("FAIL a=%0d w=%h lane %0d: %0d expected %0d", x, word, l, i[l], exp);
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
    run(11'h7FF, 16'hFFFF, PREC_INT4);
    run(11'h7FF, 16'hFFFF, PREC_INT2);
    for (int y = 0; y < 16; y++)
      for (int n = 0; n < 50; n++) run(11'($urandom) | 11'h400, 16'($urandom) & ~16'hF | 16'(y), PREC_INT4);
    for (int n = 0; n < 3000; n++) run(11'($urandom) | 11'h400, 16'($urandom), PREC_INT4);
    for (int n = 0; n < 3000; n++) run(11'($urandom) | 11'h400, 16'($urandom), PREC_INT2);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
