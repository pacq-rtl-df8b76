# PacQ tensor core: FP16 x packed-INT GEMM without dequantisation

Large language models are often deployed with weight-only quantisation:
weights are stored as INT4 or INT2, activations stay in FP16. On a GPU-style
(SIMT) machine the packed weights are normally unpacked and converted back to
FP16 before the tensor cores see them, so the cost of the GEMM itself does not
go down. PacQ keeps the weights packed all the way into the tensor core. Two
ideas make this work:

1. **Pack along the output dimension n, not along k.** A 16-bit word holds
   four INT4 (or eight INT2) weights of the *same* k and consecutive n. One
   fetched FP16 activation `A[m,k]` then meets every weight in the word, so a
   fetched activation is reused for all packed weights and is never evicted
   and refetched.
2. **Multiply one FP16 number by several small integers in one multiplier.**
   A weight `B` in `[-8, 7]` is stored as `y = B + 8` in `[0, 15]`. The number
   `1024 + y` has an FP16 exponent of 10 (biased 11001) and a significand
   `1.000000yyyy`. So `A * (1024 + y)` needs only:
   * the sign of A,
   * the exponent of A plus 10,
   * the significand product `{A_m, 10'b0} + A_m * y`, where `A_m * y` is an
     11-bit x 4-bit product.
   Four (or eight) such products share the adder array of one 11x11 multiplier.

The true result is recovered afterwards. Let `off = 1032` for INT4 (`1026` for
INT2). Then

    sum_k A[m,k] * B[k,n] = sum_k A[m,k] * (B[k,n] + off) - off * sum_k A[m,k]

The first term comes from the tensor core. The second needs only the
activation sum of each row, which a small accumulator builds while the
activations are in the core. A per-group scale `s` then restores the weight
range.

This repository holds synthesizable SystemVerilog for the tensor-core side of
one streaming multiprocessor (SM) built this way. It has eight tensor cores,
each with four parallel FP-INT dot-product units, and a 256 KB register file.
The arithmetic, the unit counts and the DP-4 cycle counts follow the PacQ
design. The sequencing, memory layout, host interface and numeric corner cases
are this implementation's own; they are listed under "Departures and own
choices" below.

## Number formats and packing

| operand | format | register-file word (64 bit) |
|---|---|---|
| activations A | FP16 | four consecutive k of one row, element j in bits `16j+:16` |
| weights B | `y = B+8` (INT4) or `y = B+2` (INT2) | four 16-bit words, one per consecutive k; each word holds lanes 0..3 (4 bits each) or 0..7 (2 bits each) of consecutive n, lane 0 in the low bits |
| scales s | FP16, one per output column | four consecutive columns |
| results Y | FP16 | four consecutive columns of one row |

The signed-to-unsigned offset is applied offline when the weights are packed.
The hardware never sees a signed weight.

## Parallel FP-INT multiplier (`par_int11_mul`, `fpint_mul`)

`par_int11_mul` takes the 11-bit significand `A_m` (hidden 1 included) and one
packed word. Each weight bit gates a copy of `A_m`. Twelve adders reduce the
gated copies:

* **level 1, eight adders:** `s1[j] = (A_m & w[2j]) + ((A_m & w[2j+1]) << 1)`.
  In INT2 mode these are the eight products.
* **level 2, four adders:** `s2[q] = s1[2q] + (s1[2q+1] << 2)`. In INT4 mode
  these are the four products.

`fpint_mul` builds each lane's 22-bit significand product from three parts:

* the low 10 bits of `i = A_m * y`;
* a 6-bit adder that adds `i[14:10]` to `A_m[5:0]`;
* `A_m[10:6]` on top, incremented by that adder's carry.

The lane then normalises by at most one position and rounds to nearest even.
The exponent is `e_A + 10`, plus one when the lane normalised. All lanes share
the sign of A. The unit is combinational; it is the first pipeline stage of the
DP-4.

## Dot-product unit (`dp4`)

One input carries:

* four FP16 activations `a[0..3]` at consecutive k;
* four packed words `w[0..3]`, one per k;
* the running partial sums `c_in` for every lane.

Four `fpint_mul` units form all 16 (INT4) or 32 (INT2) products in one cycle
and register them. Two adder trees follow (duplication factor `DUP = 2`). Each
tree has three adders that reduce one lane's four products, and one adder that
adds `c_in`:

    c_out[l] = c_in[l] + ((p0 + p1) + (p2 + p3))

The trees handle two lanes per cycle. An INT4 input therefore occupies the
trees for 2 cycles and an INT2 input for 4. The next input is accepted in the
cycle the previous one enters its last tree step, so back-to-back inputs keep
the trees busy. The pipeline has three register stages: products, tree sums and
accumulated outputs. With eight back-to-back inputs (the m2n4k4 case),
32 INT4 outputs take 19 cycles and 64 INT2 outputs take 35 cycles. These are
the counts given for the PacQ DP-4, and `tb_dp4` checks them.

## GEMM core dataflow (`tensor_core`, `asum_acc`)

A tensor core computes one tile of `M_T = 16` rows by `NW = 4` packed word
columns. That is 16 INT4 columns or 32 INT2 columns. The inner dimension is
`K = 4 * k_chunks`. The four DP-4 units share the B operand. Each DP-4 works
on its own row and has its own A buffer. The loop is:

    for rg in 0 .. 3                 # four rows at a time, one per DP-4
      for kc in 0 .. k_chunks-1
        read A[4rg+d, kc] into A buffer d      (4 register-file reads)
        add the four activations into asum_acc d
        for wc in 0 .. 3             # packed word columns: A is reused 4 times
          read B chunk [kc, wc]                  (1 read, shared by the 4 DP-4)
          issue: C[row_d, wc lanes] += A_d . (B + off)

Partial sums stay in a 16 x 32 FP16 accumulator array inside the core: the
tile is output-stationary. They are read at issue and written back by the
DP-4 outputs. The output register of the register-file bank serves as the
B buffer: it holds the fetched chunk while it is issued.

A small scoreboard has one bit per word column. It holds back an issue while
an earlier update of the same accumulators is still inside a DP-4. At the
default sizes the distance between two updates of one accumulator is at least
12 cycles, so the scoreboard never stalls.

Each A chunk is fetched exactly once and used for four issues. Per row group
and k chunk the core spends 12 cycles in INT4 (4 A reads, then 4 issues of
2 cycles) and 18 cycles in INT2. A 16 x 16 x 16 INT4 tile takes 198 cycles.

`asum_acc` is one FP16 adder with a feedback register. It adds a chunk's four
activations one per cycle, in k order. It finishes long before the next chunk
of the same row arrives.

## Removing the offset and applying the scale (`epilogue`, `pacq_slice`)

For every output the epilogue computes, with standard FP16 units:

    t = off * S[m]          (multiply)
    u = C[m,n] - t          (subtract)
    y = u * s[n]            (multiply by the group scale)
    y = y + Y_prev[m,n]     (only when the command's acc flag is set)

In a GPU these three steps would run as ordinary instructions on the
general-purpose cores. Here they form a small fixed pipeline, so the design
can be simulated end to end. The final addition handles K that spans several
quantisation groups along k: the host runs one command per k group, sets `acc`
on all but the first, and supplies that group's scales. Groups that span
several columns, such as 32 k by 4 n, are handled by writing the same scale
into the columns that share it.

`pacq_slice` wraps one tensor core, its 32 KB register-file bank (`rf_bank`)
and the epilogue. After the tensor core is done it walks the outputs one
64-bit word (four results) at a time, in 4 cycles per word: read the scales,
read the previous result, compute, write. Write-back of a 16 x 16 INT4 tile
takes 258 cycles, which is more than the 198 the tensor core needs. The write-back path is
not part of the PacQ proposal and is kept simple.

## Top level (`pacq_sm`) and how to drive it

`pacq_sm` holds eight slices (`NUM_TC = 8`), so the register file totals
8 x 4096 x 64 bit = 256 KB. All slices execute the same command at the same
time on their own banks. The host tiles a GEMM by placing a different tile in
each bank.

| port | use |
|---|---|
| `hw_en, hw_sel, hw_addr, hw_data` | write one word into bank `hw_sel` (only while idle) |
| `hr_en, hr_sel, hr_addr` / `hr_data` | read one word; data appear one cycle later |
| `start, prec, k_chunks, a_base, b_base, s_base, o_base, acc` | command; `start` is a one-cycle pulse while idle |
| `busy`, `done` | `busy` high while any slice works; `done` pulses once when all have finished |

Register-file addresses are word addresses within a bank:

* `A[m, 4kc..4kc+3]` is at `a_base + m*k_chunks + kc`;
* B chunk `(kc, wc)` is at `b_base + wc*k_chunks + kc`;
* scales for columns `4ow..4ow+3` are at `s_base + ow`;
* results for row m, columns `4ow..4ow+3` are at `o_base + m*OW + ow`, with `OW = 4` (INT4) or `8` (INT2).

Reset is asynchronous and active low. All state clears to zero.

## Numerical behaviour: read this before trusting results

The arithmetic is exact in its structure, but every product and partial sum is
rounded to FP16 *while it still contains the offset*. A product
`A * (1032 + B)` is about `1032 |A|`. Its rounding error can reach `|A| / 2`,
which is comparable to the wanted `A * B` itself. Cancelling `off * S` in the
epilogue does not recover the lost bits. Large activations also overflow:
`|A| >= 64` already pushes a product past the FP16 range, and a 16-term sum of
offset products overflows for `|sum A|` of about 63. So the design reproduces
the proposed datapath faithfully, but its results differ noticeably from an
exact GEMM unless the adders carry more precision than FP16. One measurement
used 2000 random INT4 dot products with k = 16 and activations of magnitude
2^-6 to 2, carried through this exact FP16 operation sequence. The RMS error of
the offset-corrected result was about equal to the RMS of the exact result. The testbenches
therefore compare against a bit-exact model of the same FP16 operation
sequence, not against exact arithmetic.

Special values are simplified:

* inputs with exponent 0 (zero and subnormals) are read as zero;
* results below the smallest normal number flush to +0;
* results above the largest finite number become infinity;
* NaN is not produced or propagated;
* rounding is to nearest, ties to even.

## Departures and own choices

* **6-bit mantissa adder.** The assembly drawing shows four bits of `i`
  entering the adder and no carry into `A_m[10:6]`. But `A_m * y` needs
  15 bits, and the sum can carry. This design adds `i[14:10]` and propagates
  the carry. Without it, roughly 7 % of the random products in the testbench
  come out wrong.
* **Normalisation.** The description states that the products need no
  normalisation, while the unit list includes a normaliser. The product
  `(1.m_A)(1 + y/1024)` can reach 2.0, so each lane normalises by one position.
* **Lane count.** Eight assembly/rounding lanes make the INT2 case
  single-cycle as described. The unit list counts four rounding units and four
  6-bit adders.
* **Multiplier wiring.** The 12 adders of the INT11 multiplier are a regular
  8 + 4 tree. The original drawing multiplexes some adders so that the same
  array can also do a full 11 x 11 product. That mode is not built, because
  every FP16 multiplier in the tensor core is replaced.
* **INT2 offset.** The INT2 offset is `1026 = 1024 + 2`, following the INT4
  rule.
* **Buffers.** The tensor-core buffer budget is given as 2 x 3072 bits. The
  buffers here are four 64-bit A buffers and the 64-bit register-file output
  register as the B buffer, plus the 8192-bit accumulator array.
* **Register file.** The register file is split evenly into one bank per
  tensor core. All tensor cores execute one broadcast command.
* **Not built.** The general cores, L1 (96 KB), L2, DRAM, on-chip network and
  warp scheduling are unchanged GPU parts and are not built. The host port
  stands in for them. The post-processing is a fixed pipeline instead of
  general-core instructions.

## Workloads

* **m16n16k16.** This tile is the unit of work of one slice command.
* **DP-4 m2n4k4.** Its cycle counts (19 cycles for INT4, 35 for INT2) are
  reproduced exactly.
* **Llama2-7B FFN, m16n4096k4096 with 16 batches.** This needs 128 KB of
  activations and 8 MB of INT4 weights. That does not fit into the 256 KB
  register file at once. It runs as a sequence of 1024 commands (256 n-tiles
  over 8 slices, 32 k groups of 128), each about 1800 cycles per slice. The
  host reloads the banks between commands. `tb_ffn_workload` runs a scaled piece of it
  on the full-size top: m16 x n128 x k256 with INT4 weights and g[32,4]
  groups (k groups of 32, one scale per 4 columns). It issues 8 accumulated
  commands of 649 cycles each and checks every output after every command.

## Verification

Each module has a self-checking testbench in `tb/`. The FP16 reference model
in `tb/tb_fp16_pkg.sv` computes in double precision and rounds explicitly, so
it shares no code with the RTL.

| testbench | what it checks |
|---|---|
| `tb_fp16_add`, `tb_fp16_mul` | 40 000 / 30 000 random and corner-case operations |
| `tb_par_int11_mul` | every lane, INT4 and INT2, against integer products |
| `tb_fpint_mul` | every lane against `round(A*(1024+y))`, including normalising cases |
| `tb_dp4` | all outputs, INT4/INT2 switching, 19- and 35-cycle counts |
| `tb_asum_acc` | sums, 4-cycle chunk time, clear |
| `tb_tensor_core` | all accumulators and activation sums for 5 tiles; fetch counts (A reused 4x); cycle counts |
| `tb_rf_bank` | read-back, read latency, hold, read-during-write |
| `tb_epilogue` | offset removal (directed), random INT4/INT2 with and without accumulation |
| `tb_pacq_slice` | five commands through one slice, including k = 128 |
| `tb_pacq_sm` | full default size, 8 slices: two accumulated INT4 k groups, then INT2; counts that A reuse, both precisions, a precision switch, group accumulation, multiplier normalisation and zero activations all occur |
| `tb_ffn_workload` | full default size, a scaled Llama2 FFN piece: m16 x n128 x k256 INT4, g[32,4] group scales, 8 accumulated commands; also prints the FP16 error against the exact GEMM |

Each testbench prints `TB_RESULT checks=N failures=F` and has a watchdog.

To run one with Verilator 5, from the repository root:

    verilator --binary --timing --assert -Wno-fatal -Irtl -Itb \
      tb/tb_fp16_pkg.sv rtl/pacq_pkg.sv rtl/*.sv tb/tb_pacq_sm.sv \
      --top-module tb_pacq_sm -Mdir obj && obj/Vtb_pacq_sm

`tb_pacq_sm` runs the top at its default parameters. It builds in about a
minute and simulates in under a second.

## Files

* `rtl/pacq_pkg.sv`: shared types (`fp16_t`, `prec_e`) and constants.
* `rtl/fp16_add.sv`, `rtl/fp16_mul.sv`: standard FP16 units.
* `rtl/par_int11_mul.sv`, `rtl/fpint_mul.sv`: the parallel FP-INT multiplier.
* `rtl/dp4.sv`: the dot-product unit.
* `rtl/asum_acc.sv`: the activation-sum accumulator.
* `rtl/tensor_core.sv`: the GEMM core.
* `rtl/rf_bank.sv`: the register-file bank.
* `rtl/epilogue.sv`: the post-processing pipeline.
* `rtl/pacq_slice.sv`: one tensor core with its bank and epilogue.
* `rtl/pacq_sm.sv`: the top level.
