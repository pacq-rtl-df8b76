// pacq_sm: top level, the tensor-core side of one PacQ streaming
// multiprocessor (paper Table 1: 8 tensor cores, 256 KB register file;
// Fig. 6).
//
// PacQ keeps low-precision weights packed along the output dimension from
// memory all the way into the tensor cores, multiplies one FP16 activation by
// four INT4 (or eight INT2) weights per multiplier per cycle, and removes the
// weight offset afterwards with a per-row activation sum. This top holds
// NUM_TC = 8 slices; each slice is one tensor core (4 parallel FP-INT DP-4
// units), a 32 KB register-file bank and the post-processing pipeline. All
// slices execute the same command on their own banks at the same time, so
// the host tiles a GEMM by placing a different tile in each bank.
//
// The parts of the multiprocessor that PacQ leaves unchanged and the paper
// does not describe (general cores, L1 cache, warp scheduling, the network to
// L2 and DRAM) are not built; their role is taken by the host port, which
// loads and reads the register-file banks directly.
//
// Host port: hw_* writes one 64-bit word into bank hw_sel; hr_* reads one
// word from bank hr_sel, returned on hr_data one cycle later; both only while
// idle. start (while idle) broadcasts a command (see pacq_slice for the
// fields and the memory layout); busy is high until done pulses, when every
// slice has finished.
module pacq_sm
  import pacq_pkg::*;
#(
  parameter int unsigned NUM_TC = 8,     // tensor cores per SM (paper: 8)
  parameter int unsigned M_T    = 16,
  parameter int unsigned NW     = 4,
  parameter int unsigned DEPTH  = 4096,  // words per bank: 8 x 4096 x 8 B = 256 KB
  parameter int unsigned AW     = $clog2(DEPTH),
  parameter int unsigned KCW    = 8,
  parameter int unsigned SW     = (NUM_TC > 1) ? $clog2(NUM_TC) : 1
)(
  input  logic           clk,
  input  logic           rst_n,
  input  logic           hw_en,
  input  logic [SW-1:0]  hw_sel,
  input  logic [AW-1:0]  hw_addr,
  input  logic [63:0]    hw_data,
  input  logic           hr_en,
  input  logic [SW-1:0]  hr_sel,
  input  logic [AW-1:0]  hr_addr,
  output logic [63:0]    hr_data,
  input  logic           start,
  input  prec_e          prec,
  input  logic [KCW-1:0] k_chunks,
  input  logic [AW-1:0]  a_base,
  input  logic [AW-1:0]  b_base,
  input  logic [AW-1:0]  s_base,
  input  logic [AW-1:0]  o_base,
  input  logic           acc,
  output logic           busy,
  output logic           done
);

  logic [NUM_TC-1:0] sl_busy, sl_done, fin;
  logic [63:0]       sl_hr [NUM_TC];
  logic [SW-1:0]     hr_sel_q;

  for (genvar t = 0; t < NUM_TC; t++) begin : g_tc
    pacq_slice #(.M_T(M_T), .NW(NW), .DEPTH(DEPTH), .AW(AW), .KCW(KCW)) u_slice (
      .clk, .rst_n,
      .hw_en(hw_en && hw_sel == SW'(t)), .hw_addr, .hw_data,
      .hr_en(hr_en && hr_sel == SW'(t)), .hr_addr, .hr_data(sl_hr[t]),
      .start, .prec, .k_chunks, .a_base, .b_base, .s_base, .o_base, .acc,
      .busy(sl_busy[t]), .done(sl_done[t]));
  end

  assign hr_data = sl_hr[hr_sel_q];
  assign busy    = |sl_busy || |fin;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      hr_sel_q <= '0;
      fin      <= '0;
      done     <= 1'b0;
    end else begin
      if (hr_en) hr_sel_q <= hr_sel;
      done <= 1'b0;
      if (&(fin | sl_done)) begin
        fin  <= '0;
        done <= (|(fin | sl_done));
      end else begin
        fin <= fin | sl_done;
      end
    end
  end

endmodule
