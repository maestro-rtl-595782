# Maestro cluster: a vector unit with an embedded tensor engine and a mixed-precision FFT accelerator

Wearable ultrasound processing mixes two kinds of work. The signal chain (gain, filtering, envelope
detection) needs FFTs on long complex vectors in floating point. The gesture classifier after it is a
small CNN whose work is almost all matrix multiplication. This cluster serves both through one
shared 128 KiB L1 memory and three engines:

* a **RISC-V style vector unit** with a 32 x 512-bit register file and four functional units
  (arithmetic, load/store, slide, tensor);
* a **tensor unit (VTU)**: a 12 x 4 grid of FP16 multiply-add elements. It has no operand memory of
  its own. It reads its matrices from the vector register file and writes the result back there;
* a **memory-coupled FFT accelerator (MP-FFT)**: radix-2, FP16 complex (C32) or FP32 complex (C64)
  samples. It works directly on L1 memory, with no sample buffer beyond eight 64-bit registers.

The main idea is the coupling. The tensor engine borrows two of the vector register file's ports,
so its operand buffers can be small. The FFT engine borrows the L1 interconnect, so it needs no
frame memory. This RTL models the cluster as one clock domain. The scalar core, the DMA engine
and the host domain are outside it; their traffic arrives through ports.

## Vector register file and who gets which port

The register file holds 32 registers of 512 bits. It is built from four banks of 256-bit words.
Register `r` holds global words `2r` and `2r+1`; global word `g` is in bank `g % 4`, row `g / 4`.
An LMUL = 8 group (8 registers, 16 words) therefore covers four rows of every bank.

Each bank has three read ports and one write port. A fixed priority decides every bank port in
every cycle. A requester that loses keeps its request and sees `gnt` low.

| bank port | first | second |
|---|---|---|
| read 0 | VAU vs2 | VLSU store data |
| read 1 | VAU vs1 (tensor unit in tensor mode) | VSLDU source |
| read 2 | VAU vd (VFMACC accumulator) | VLSU second port (unused here) |
| write | VAU (tensor unit in tensor mode) | VLSU, then VSLDU |

Reads are served in the same cycle as the grant. Writes land at the clock edge, with 32 byte
enables per word.

The **tensor CSR (TCSR)** holds four unit clock enables and a tensor-mode bit. In tensor mode the
VS1 read path and the VAU write port are switched to the tensor unit. In that mode the VTU enable
is forced on. The VAU is frozen while the tensor unit is busy, because the tensor unit then owns
its ports. Clock gating is modelled as clock enables.

## Tensor unit: how 48 multipliers are kept busy from one read port

A job computes `Z[12][16] = Y[12][16] + X[12][N] * W[N][16]` with `N = 4 * n_groups`, up to 16.
The instruction names four register groups. The usual choice is V0 for X, V8 for Y, V16 for W and
V24 for Z. Data layout in the register file:

* **X:** word `3g + q` holds rows `4q..4q+3` and columns `4g..4g+3`. Element `4*(row-4q) + (col-4g)`
  sits at bits `16e`. One word fills a 4 x 4 block of compute elements.
* **Y, W, Z:** word `r` holds row `r`, element `k` at bits `16k`.

**The grid.** Row `i` of the grid works on row `i` of Z. Column `h` holds `x[i][4g+h]` for 16
cycles. Meanwhile row `4g+h` of W streams past it, one element per cycle, from W shift register `h`.

**Circulating partial sums.** Each compute element is a fused FP16 multiply-add with a 4-cycle
pipeline. So column `h+1` receives column `h`'s partial sums four cycles later. The four columns
therefore start 0, 4, 8 and 12 cycles apart. The output of column 3 for Z column `k` returns to
column 0 after exactly 16 cycles, the moment group `g+1` starts on `k` (4 columns x 4 cycles =
16 Z columns). Partial sums thus circulate without an accumulator memory.

**Feeding it from one port.** In every 16-cycle window the unit reads:

* four W rows, at window cycles 0, 4, 8 and 12;
* the three X words of the next group, at cycles 13, 14 and 15.

A second register per compute element holds the next X value until its column switches. This is
why the X buffer is 2 x 16 bit per element.

**Job timing.** A job takes `15 + 16*n_groups + 17 + 12` cycles:

* 15 cycles: load 12 Y words and the first 3 X words;
* `16*n_groups + 17` cycles: compute and drain;
* 12 cycles: write Z.

For N = 16 that is 108 cycles for 3072 multiply-adds. The testbench checks these counts exactly.

**Rounding.** Results are rounded once per multiply-add (RNE). Each Z element is the sequential
FMA chain over `j = 0..N-1`, and the testbenches compare it bit for bit.

Buffers: W is 4 x 16 x 16 bit, Y/Z is 12 x 16 x 16 bit, X is 2 x 48 x 16 bit. A refused read
would stall the whole unit. This cannot happen in tensor mode: an assertion watches for it, and a
counter counts it.

## MP-FFT

The accelerator is programmed through five registers (word offsets):

| offset | name | meaning |
|---|---|---|
| 0 | TRIGGER | write 1 to start |
| 1 | STATUS | bit 0 = busy |
| 2 | SRC | source byte address |
| 3 | DST | destination byte address |
| 4 | CFG | `[3:0]` log2 N, `[4]` C32, `[5]` inverse |

Sample formats: C32 is `{im[31:16], re[15:0]}` in 32 bits, two samples per 64-bit word. C64 is
`{im[63:32], re[31:0]}`.

**Algorithm.** Radix-2 decimation in time on natural-order input. Stage `s` pairs samples that are
`h = N >> (s+1)` apart. The twiddle is `W_N^(h * bitrev_s(b / h))`. Intermediate stages work in
place at SRC. The last stage writes each result to its bit-reversed position at DST, so the output
is in natural order.

**Memory ports.** There are four 64-bit L1 ports: two read (left and right wings) and two write.
Each step reads one group of butterflies, computes it and writes it back:

* C64: 2 butterflies per group;
* C32: 4 butterflies per group; two of them run in parallel, on the FP16 engine and on the FP32
  engine in its narrow mode.

**The bit-reversal stall.** Scattered writes in the final stage can store only two samples per
cycle. For C64 that is the full output rate. For C32 the group needs four write cycles instead of
two, so the pipeline stalls. `stall_cycles_o` counts these cycles.

**Twiddles.** Each twiddle table stores one octant of the unit circle and folds the other seven by
symmetry:

* C32 tables: 129 entries (N up to 1024);
* C64 table: 65 entries (N up to 512).

The entries are computed at elaboration time with a Taylor series and rounded to the format.
There is no data file.

**Inverse transform.** The inverse uses conjugated twiddles and does not scale by 1/N.

**Clock gating.** `fft_clk_en_i` is the cluster-level clock gate. The accelerator is idle except
for its register port until it is triggered.

### The arithmetic core: dual-output sum of dot products

Each butterfly engine is built from two DO-SDOTP units. One unit computes
`E + (A*B ± C*D)` and `E - (A*B ± C*D)` together, fused, with a single rounding. A MOD input
selects the sign of the second product.

* The real unit uses MOD = 1 on `(c, e, d, f, a)` and gives `Re(XL ± W*XR)`.
* The imaginary unit uses MOD = 0 on `(c, f, d, e, b)` and gives `Im(XL ± W*XR)`.

The same generic fused core (`fp_fused_sum`) also serves three other places: the VTU compute
elements (FP16), the VAU lanes (FP32, or FP16 through a narrow mode) and the FP16 butterfly engine.

How the core works:

* products are exact, at double width;
* the three terms are aligned to the largest exponent in a window of `2(M+1)+3` bits plus a
  sticky bit;
* one adder, one normalisation and one RNE rounding follow;
* subnormals are handled;
* a NaN result is the canonical quiet NaN.

One known limit: if two large terms cancel to far below a third term that was shifted out of the
window, the result can be off in the last place.

## Vector functional units and the controller

**Controller.** It accepts one pre-decoded instruction per cycle (valid/ready). The instruction is
a struct `maestro_pkg::vinstr_t`: op, element width, LMUL, vd, vs1, vs2, rs1, rs2. The controller
sends the instruction to a free unit. Its scoreboard keeps a 32-bit read mask and a 32-bit write
mask of registers per unit in flight. An instruction waits if it would read a group being written
(RAW), or write a group being read or written (WAR, WAW). There is no chaining. A TCSR write waits
until every unit is idle.

**VAU.** Processes one 256-bit word per cycle: 16 FP16 lanes or 8 FP32 lanes of fused
multiply-add.

* VFADD is computed as `vs2*1.0 + vs1`, so it is exactly rounded.
* VFMUL and VFMACC (`vd += vs1*vs2`) use the same lanes.
* VADD and VMUL work on 8-, 16- and 32-bit integers.

Each word needs all of its operand grants and its write grant in the same cycle, or it is retried.

**VLSU.** Unit-stride VLE and VSE. rs1 is the base address, 32-byte aligned. Each 256-bit register
word becomes four 64-bit L1 accesses on four ports.

**VSLDU.** VSLIDEUP, VSLIDEDOWN and VMV over a whole group, with the element width taken into
account. It first reads the source group into a 512-byte buffer, then writes.

* Slide-up keeps the elements below the offset (their byte enables are off).
* Slide-down fills with zeros.

## L1 memory and interconnect

The L1 is 16 banks of 1024 x 64 bit (128 KiB). Banks are word-interleaved: byte address bits
`[6:3]` select the bank and bits `[16:7]` the row. Each bank grants one master per cycle, round
robin. Losers hold their request. Read data return one cycle after the grant.

The top has 17 masters:

| masters | agent |
|---|---|
| 0-3 | VLSU |
| 4-7 | MP-FFT |
| 8-16 | external ports: scalar core, and the 512-bit DMA as 8 x 64 bit |

## Top level: `maestro_cluster`

Ports:

* the vector instruction handshake;
* the MP-FFT register port, clock enable and done event;
* the external TCDM masters, as arrays of `maestro_pkg::tcdm_req_t` plus `gnt`/`rvalid`/`rdata`;
* event counters: TCDM bank conflicts, cycles with a refused VRF request, FFT stall cycles, VTU
  stall cycles, instructions issued per unit, and cycles the controller held a valid instruction.

## Where this departs from the published design

* **One clock domain.** The host domain, the scalar core, the DMA, the instruction cache, the AXI
  crossbars, the CDC FIFOs and the FLLs are not part of this RTL. Their connections are top-level
  ports.
* **VAU subset.** Only FP16 and FP32 add/mul/FMA and integer add/mul. There is no FP64, BF16 or
  FP8, no widening dot product and no FPU pipeline.
* **VLSU subset.** Unit-stride accesses only; no strided or indexed accesses.
* **Controller.** There is no FPU sequencer and no vl/vtype CSRs. LMUL and element width come with
  each instruction.
* **VRF storage.** Flip-flops, not latches.
* **X buffer.** 192 B, smaller than the published 288 B. The register-file schedule above only
  needs the current value and the next one.
* **VTU jobs.** The load, compute and write phases of a job run one after the other. Jobs do not
  overlap.
* **Own choices.** The TCSR bit layout, the FFT register map and the instruction encoding are this
  design's own.

## Verification

Every testbench is self-checking and ends with a `TB_RESULT checks=... failures=...` line.

| testbench | what it checks |
|---|---|
| `tb_do_sdotp` | fused dual output against a double-precision reference, FP16 and FP32 |
| `tb_fft_butterfly_unit` | C64 and two-lane C32 butterflies |
| `tb_twiddle_lut` | every index of the 1024-point FP16 and 512-point FP32 tables |
| `tb_mp_fft` | C32 and C64 transforms (8 to 1024 points, forward and inverse) against a DFT, with a random-grant memory; stall presence; cycles per job |
| `tb_vtu` | VTU on the real register file; bit-exact Z; exact cycle count |
| `tb_tcsr` | every CSR value |
| `tb_tcdm_interconnect` | 13 random masters against a reference memory; one grant per bank; no starvation beyond 13 cycles; conflict counter |
| `tb_maestro_cluster` | end to end at default parameters; see below |

`tb_maestro_cluster` runs at the default parameters. It loads data through an external port and
runs a tensor MatMul (VLE, TCSR, TENSOR, TCSR, VSE). It then runs VAU, slide and move
instructions, and a C32 256-point FFT with vector traffic on the same banks, followed by a C64
FFT. Every result is checked. It counts, and requires at least once:

* tensor jobs and mode switches;
* FFT jobs and bit-reversal stalls;
* TCDM bank conflicts;
* VRF port refusals;
* scoreboard holds.

Measured:

* 12x16x16 VTU job: 108 cycles.
* 512-point C64 FFT: 13125 cycles.
* 1024-point C32 FFT: 15071 cycles, 402 of them bit-reversal stalls.
* Relative error against a double-precision DFT: about 1e-7 (C64) and 8e-4 (C32).

To simulate, for example:

```
verilator --binary --timing --assert -Wno-fatal -y rtl rtl/maestro_pkg.sv tb/fp_ref_pkg.sv \
    tb/tb_maestro_cluster.sv --top-module tb_maestro_cluster -o sim && ./obj_dir/sim
```
