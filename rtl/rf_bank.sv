// rf_bank: one bank of the register file that feeds a tensor core.
//
// The paper gives the register-file capacity of the streaming multiprocessor
// (256 KB, the Volta value) and shows operands flowing from the register file
// into the A and B buffers and partial sums flowing back. Its organisation
// is not described; this design splits the 256 KB into one bank per tensor
// core (8 x 32 KB) of 64-bit words, so that one read returns four FP16
// activations, four packed weight words or four FP16 results. The array has
// one synchronous read port and one write port.
//
// Timing: rd_data is registered: it shows the word addressed in the cycle of
// rd_en one cycle later, and holds it until the next read. A write and a read
// of the same address in one cycle return the old word.
module rf_bank #(
  parameter int unsigned DEPTH = 4096,          // 4096 x 64 bit = 32 KB
  parameter int unsigned AW    = $clog2(DEPTH)
)(
  input  logic          clk,
  input  logic          rd_en,
  input  logic [AW-1:0] rd_addr,
  output logic [63:0]   rd_data,
  input  logic          wr_en,
  input  logic [AW-1:0] wr_addr,
  input  logic [63:0]   wr_data
);

  logic [63:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (wr_en) mem[wr_addr] <= wr_data;
    if (rd_en) rd_data <= mem[rd_addr];
  end

endmodule
