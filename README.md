# PINTA: a precision-scalable accelerator for quantized PINN training

Physics-informed neural networks (PINNs) solve a PDE by training a network
whose loss contains the PDE residual. The publication *Tensor-Compressed and
Fully-Quantized Training of Neural PDE Solvers* makes that training cheap
enough for edge hardware by combining three ideas:

* **Stein's estimator** replaces automatic differentiation. Derivatives come
  from forward passes on perturbed inputs `x ± δ`, so no backward pass through
  the derivative graph is needed.
* **Tensor-train (TT) layers** replace dense weight matrices. The "partial
  reconstruction" order first contracts the output-side cores into a matrix
  `A` (R x M) and the input-side cores into a matrix `B` (N x R). The layer is
  then `Y = X B A`: two ordinary matrix products with short error paths.
* **Fully quantized training** in the square-block MX format (SMX). Every 4x4
  block of a tensor shares one power-of-two exponent, and elements are INT8
  (weights, activations) or INT12 (gradients). Because a block is square, the
  same stored block serves a matrix and its transpose, so forward and backward
  passes need no re-quantized copy. The perturbation `δ` is far smaller than
  one quantization step of `X`, so it is quantized on its own ("DiffQuant"):
  `Y+ = Q(X) W^T + Q(δ) W^T`. The next layer's perturbation is the difference
  `tanh(Y+) - tanh(Y)`.

PINTA is the hardware for this flow. The RTL here implements it: a Tensor
Contraction Unit (TCU) of 8x8 Block Matrix Engines, a 32-lane vector unit, a
partial-sum buffer and 384 KB of on-chip operand memory. All of it is
synthesizable SystemVerilog with a self-checking testbench per block.

## Arithmetic: SMX blocks, slices and the bit-serial product

An SMX block (`smx_block_t`, one 256-bit memory word) holds 16 elements
`m[4*i+j]` in 12-bit two's-complement containers, plus an 8-bit signed
exponent `e`. It represents the values `m * 2^e`. Precision is given per
operand by the command: INT4, INT8 or INT12.

The multipliers are only 4 bits wide. A wider element is cut into 4-bit
slices, `x = sum_s slice_s * 16^s`. The most significant slice in use is
signed and the lower ones are unsigned. Every pair of slices (one from the
activation, one from the weight) is one **beat**. A beat's products carry the
exponent

    Eo = Ea + Ew + 4*(sa + sw)

so the bit-serial recombination is done by the floating-point conversion and
needs no shifter. An INT8 x INT8 block product takes 2x2 = 4 beats, INT12 x
INT8 takes 6, and INT4 x INT4 takes 1.

Partial sums are FP32. The adder truncates, flushes results below the normal
range to zero and saturates instead of producing infinity. The same
conversion and add functions (`pinta_pkg`) are used in the DPEs and the VPU.

## Dot-Product Engine (`dpe`) and Block Matrix Engine (`bme`)

A DPE handles one beat of one dot product per cycle, in this order:

1. It multiplies four slice pairs.
2. It adds the four products in a two-level tree.
3. The FP generator turns the integer sum into a float scaled by `2^Eo`.
4. It adds that float to its accumulator.

In front of the accumulator sits a mux. It selects either the accumulator's
own value or the value of the DPE to its west. This lets the DPEs of a row
act as a shift chain, which loads initial partial sums and drains results.

A BME is a 4x4 grid of DPEs fed by one activation block and one weight block.
DPE(i,j) accumulates `sum_k A'[i][k] * W'[j][k]`, which is 64 MACs per beat
(`C += A' W'^T`). The flag `trans` travels with each beat and selects `A` or
`A^T` (likewise for `W`). This is how the array serves the three products of
training from one stored copy:

* forward `X W^T`;
* error propagation `E W`;
* weight gradient `E^T X`.

The BME adds `Ea + Ew` once for all 16 DPEs. It registers its operands and
passes them east and south.

## Tensor Contraction Unit (`tcu`): dataflow and timing

The array is output-stationary. Each of the 1024 DPEs owns one element of a
32x32 output tile. One `OP_GEMM` command computes

    C[4r+i][4c+j] = C0 + sum_kb sum_k A'_(r,kb)[i][k] W'_(c,kb)[j][k] 2^(Ea+Ew)

where block `A_(r,kb)` is read from row bank `r` at address `a_addr+kb`, and
`W_(c,kb)` from column bank `c` at address `w_addr+kb`. `C0` is zero, or a
tile from the partial-sum buffer when `acc_load` is set (for reductions split
over several commands). A command runs in these phases:

| phase   | cycles            | what happens |
|---------|-------------------|--------------|
| INIT    | 33 (acc_load only) | 32 shifts load C0 from the buffer into the west end of the chains |
| COMPUTE | kblocks x na x nw | one beat per cycle: all 16 banks are read, the feeder cuts slices, row r is delayed r cycles and column c is delayed c cycles so the two operands meet in BME(r,c) |
| FLUSH   | 17                | the last beat crosses the array |
| DRAIN   | 32                | the tile shifts east into the buffer, 32 floats per cycle, while zeros shift in |

`done` pulses `[33] + kblocks*na*nw + 50` cycles after `start` at the default
size. With INT8 operands and 8 block steps, the compute phase is 32 of 82
cycles, so the array is busy only during long reductions. The drain is not
overlapped with the next tile's compute, which is a simplification of this
design.

The buffer layout follows from the drain: entry `base+col` of row bank `r`
holds `C[4r+i][col]` in lane `i`.

## Memories

* `onchip_mem` has 16 banks of 768 x 256-bit words, which is 384 KB. Banks
  0-7 feed the array rows (A operands) and banks 8-15 the columns (W
  operands). Reads have one cycle of latency and all banks of a side are read
  at one address. Writes use per-bank enables with a shared address. Software
  places each block in the bank of the row or column that consumes it.
* `psum_buffer` has 8 banks (one per array row) of 256 entries x 4 FP32 =
  32 KB. It has two read ports and one write port, and one entry is 32 floats,
  the VPU width.

## Vector unit (`vpu`)

The VPU has 32 FP32 lanes that read and write the partial-sum buffer. Its
operations are:

* `ADD`, `SUB`, `MUL` and `TANH`, at one entry per cycle;
* `QUANT`, which reads 4 entries (8 blocks of 4x4) and writes 8 SMX blocks
  into the A or W banks.

`QUANT` implements `e = floor(log2 max|x|) - emax` with `emax = b-2`, then
`q = round(x / 2^e)`, rounding half away from zero and clamping to
`±(2^(b-1)-1)`. `TANH` is piecewise linear over 32 segments on |x| < 4, with
`T[k] = round(65536 tanh(k/8))`. It returns x for |x| < 2^-8 and the last
table value for |x| ≥ 4. Its maximum error is about 1.5e-3.

## Top level (`pinta_top`) and a DiffQuant layer step

`pinta_top` accepts one command at a time (`cmd_valid`/`cmd_ready`) and pulses
`cmd_done` when the command finishes. A command (`pinta_cmd_t`) is either a
TCU tile (`tcu_cmd_t`) or a vector operation (`vpu_cmd_t`). The `host_*`
ports stand in for the off-chip HBM2 side. They write SMX blocks into memory
and write or read buffer entries, and are meant for use while the accelerator
is idle.

One layer of the DiffQuant forward pass is the following sequence (it is
what `tb_pinta_top` runs):

    GEMM  Y  = Xq W^T          GEMM  D = dq W^T
    ADD   Y+ = Y + D           TANH  Z = tanh(Y), Z+ = tanh(Y+)
    SUB   d' = Z+ - Z          QUANT Z -> A banks, d' -> W or A banks

A TT layer under partial reconstruction is a chain of such GEMMs: first the
core contractions that form `A` and `B`, then `X B` and `(X B) A`.
Sequencing them, and laying the blocks out in the banks, is left to software.

## How far the RTL follows the publication

Taken from the publication: 8x8 BMEs of 4x4 DPEs; 4 INT4 multipliers per
DPE, an adder tree, an FP generator fed by `Eo = Ew + Ea`, and an
accumulator with an input mux; 64 MACs per BME per beat; bit-serial
precision scaling with INT8xINT8 in 4 cycles; 4x4 SMX blocks with the
quantization formula; INT8/INT12 precisions; a 32-way VPU for activation and
quantization; a partial-sum buffer; 384 KB of on-chip memory; tanh as the
activation.

Choices of this design, where the publication gives no detail:

* FP32 partial sums with truncating arithmetic.
* The slice encoding (signed top slice).
* Output-stationary dataflow with shift-chain drain. The publication calls
  the array "transposable" without describing it; here transposition is a
  per-beat operand flag inside the BME.
* The bank organisation and a 12-bit container per element. INT8 data
  therefore takes 2 bytes in memory, where a tighter packing would take 1.
* The partial-sum buffer size (32 KB) and the assumption that it lies outside
  the 384 KB.
* The VPU operation set, the tanh approximation, and rounding and clamping in
  quantization.
* The command set, sequencer and host ports. The publication describes no
  control or off-chip interface.

Not reproduced:

* The 1 GHz / 7 nm implementation figures.
* The energy model.
* The throughput of the publication's cycle-accurate simulator. The phases
  here are not overlapped.

The publication's text and its DiffQuant figure disagree on the sign
convention of `δ-`. The VPU has both `ADD` and `SUB`, so either convention
can be run.

Capacity at default size, judged per layer at batch 128 with 2-byte
elements:

* A 256-wide layer (Poisson, Heat) needs 3 x 64 KB of activations plus
  32 KB of TT factors at rank 32. That is 224 KB and fits.
* A 512-wide layer (HJB) needs 384 KB of activations alone, so it fits only
  at batch 64.

## Simulating

Every testbench in `tb/` checks its outputs against a model written
independently in the testbench (real arithmetic, library `tanh`). Each ends
by printing `TB_RESULT checks=N failures=M`, and each has a watchdog.

| testbench | block | what it covers |
|-----------|-------|----------------|
| `tb_dpe` | dpe | exact small cases, signed and unsigned slices, random accumulation, shift |
| `tb_bme` | bme | INT4/8/12 block products with random transposes, beat counts, forwarding, chain |
| `tb_tcu` | tcu (2x3 array) | three tiles: INT8, transposed INT12xINT4 with reload, INT4; latencies |
| `tb_onchip_mem` | onchip_mem | full 384 KB fill, random reads and writes on both sides |
| `tb_psum_buffer` | psum_buffer | random traffic on both read ports and the write port |
| `tb_vpu` | vpu | all five operations, QUANT to both bank groups, latencies |
| `tb_pinta_top` | pinta_top, default size | the DiffQuant layer step above, a reloaded transposed INT12 GEMM and MUL; counts that every mechanism occurred |
| `tb_prs_layer` | pinta_top, default size | workload: the input contraction `Y = Q(X B) A` of a 256x256 TT layer of rank 8 at batch 128, 36 GEMMs and 4 QUANTs, every tile checked |

`tb_prs_layer` reports 1,276 cycles for `X B` plus quantization and 1,856
cycles for `Tq A`, which is 3,132 cycles (3.1 us at 1 GHz) for one layer's
input contraction over a batch of 128. The reconstruction of `A` and `B`
from the TT cores needs reshapes between contractions, which this RTL leaves
to software, so it is not part of that test.

With Verilator 5, from the directory that holds `rtl/` and `tb/`:

    verilator --binary --timing --assert -Irtl -Itb \
      rtl/pinta_pkg.sv tb/tb_util_pkg.sv rtl/dpe.sv rtl/bme.sv rtl/tcu.sv \
      rtl/onchip_mem.sv rtl/psum_buffer.sv rtl/vpu.sv rtl/pinta_top.sv \
      tb/tb_pinta_top.sv --top-module tb_pinta_top -o sim
    ./obj_dir/sim

For a single block, list only the files it uses. The full-size top takes
about a minute to build and a few seconds to run.

To change the array size, set `ROWS`/`COLS` on `pinta_top` (the tile becomes
`4*ROWS x 4*COLS`, and QUANT needs `COLS >= ROWS`). Memory and buffer depths
are parameters too. Address widths are fixed in `pinta_pkg` (`MEM_AW`,
`PSB_AW`), so deeper memories need those raised.
