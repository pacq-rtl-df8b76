// tb_rf_bank: writes random words to random addresses of a register-file
// bank, reads them back and compares with a shadow copy; checks the one-cycle
// read latency, that the read data holds between reads, and read-during-write
// returning the old word.
module tb_rf_bank;
  logic clk = 0;
  always #5 clk = ~clk;
  logic rd_en = 0, wr_en = 0;
  logic [11:0] rd_addr = 0, wr_addr = 0;
  logic [63:0] rd_data, wr_data = 0;
  rf_bank dut (.*);

  logic [63:0] shadow [4096];
  bit          known  [4096];
  int checks = 0, failures = 0;

  task automatic chk(logic [63:0] got, logic [63:0] exp, string what);
    checks++;
    if (got !== exp) begin failures++; $display("FAIL %s: %h expected %h", what, got, exp); end
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int a;
    logic [63:0] old;
    for (int i = 0; i < 3000; i++) begin
      @(negedge clk);
      a = $urandom % 4096;
      wr_en = 1; wr_addr = 12'(a); wr_data = {$urandom, $urandom};
      shadow[a] = wr_data; known[a] = 1;
    end
    @(negedge clk) wr_en = 0;
    for (int i = 0; i < 3000; i++) begin
      a = $urandom % 4096;
      if (!known[a]) continue;
      @(negedge clk); rd_en = 1; rd_addr = 12'(a);
      @(negedge clk); rd_en = 0;
      chk(rd_data, shadow[a], "read");
      @(negedge clk);
      chk(rd_data, shadow[a], "hold");
    end
    // read during write of the same address returns the old word
    a = 7;
    @(negedge clk); wr_en = 1; wr_addr = 12'(a); wr_data = 64'h1111_2222_3333_4444; rd_en = 1; rd_addr = 12'(a);
    old = known[a] ? shadow[a] : 64'h0;
    shadow[a] = wr_data;
    @(negedge clk); wr_en = 0; rd_en = 0;
    if (known[a]) chk(rd_data, old, "read during write");
    @(negedge clk); rd_en = 1;
    @(negedge clk); rd_en = 0;
    chk(rd_data, 64'h1111_2222_3333_4444, "after write");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
