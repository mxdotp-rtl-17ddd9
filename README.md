# MXDOTP: an MXFP8 dot-product instruction for a Snitch-style RISC-V cluster

Microscaling (MX) formats store a tensor as blocks of 32 small floating-point
elements that share one power-of-two scale. In MXFP8 the elements are FP8
(E5M2 or E4M3) and the shared scale is an 8-bit exponent (E8M0). A matrix
multiplication on such data needs, for every block pair, the dot product of
the elements, multiplied by both block scales and added into an FP32
accumulator. On a plain RISC-V core with an FPU this becomes a long sequence of
FP8-to-FP32 conversions, multiply-adds and explicit scaling.

This RTL implements a single instruction that does all of it:

    mxdotp rd, rs1, rs2, rs3, sl
    C' = C + 2^(XA-127) * 2^(XB-127) * sum_{i=0..7} A_i * B_i

Here `rs1` and `rs2` each hold eight FP8 elements in one 64-bit FP register, and
`rd` holds the FP32 accumulator C. `rs3` holds four pairs of scales
(XA, XB), and the 2-bit immediate `sl` selects one pair. The unit gives one
result per cycle with a latency of three cycles. It is integrated into the FP
side of a Snitch-style core, where three stream semantic registers (SSRs)
supply the A, B and scale operands straight from the shared L1 memory. An FREP
hardware loop replays the instruction block, so the core issues one
`mxdotp` per cycle without load, store or branch instructions. Eight such cores
share a 128 KiB, 32-bank L1 scratchpad.

## The dot-product datapath (`mxdotp_unit`)

### Exact early accumulation in a 95-bit frame

The unit never rounds an intermediate value. The eight products and the
scaled accumulator are added as integers in one fixed-point frame, and only
that sum is rounded to FP32.

1. **Unpacking (`mxdotp_fp8_decode`).** Each FP8 element becomes a common
   FP9 value: 5-bit exponent with bias 15, 4-bit significand including the
   hidden bit.
   - E5M2 maps directly.
   - E4M3 is re-biased by +8, and its 3 mantissa bits fill the significand.
   - Subnormals get exponent 1 and a clear hidden bit, so both formats share
     one multiplier.
   - E4M3 has no infinity; S.1111.111 is its NaN.
2. **Products (`mxdotp_product_lane`, eight lanes).**
   - The 4x4-bit significands are multiplied to an 8-bit product.
   - The exponents are added; their sum `e` lies in 2..60.
   - The product is written as `{prod, 58 zeros} >> (60 - e)`: an exact
     integer in units of 2^-34. This is the frame anchor: 34 fractional bits
     cover the smallest product, two subnormal E5M2 values (2^-16 * 2^-16 *
     2^-2 granularity).
   - The lane result is 67-bit two's complement.
3. **Accumulator alignment (`mxdotp_acc_align`).** The FP32 C must be placed
   in the same frame, but the frame's unit is scaled by 2^(XA+XB-254).
   - The shift is `sh = e_C + 138 - (XA + XB)`, a 10-bit signed value. 138 is
     the anchor 34, plus 254 for the two scale biases, minus 150 for the
     FP32 bias and the 23 fraction bits.
   - **0 <= sh <= 70:** the 24-bit significand is shifted left. This is
     exact, and the largest placement still fits in 95 bits with the sign.
   - **sh < 0:** C has bits below the frame's unit. The significand is
     shifted right, and the lost bits are ORed into a sticky bit.
   - **sh > 70:** C is so large that the products cannot reach its rounding
     position, so C is returned as it is. Each product is below 2^66 frame
     units, so the sum of eight is below 2^69. C's last bit then weighs at
     least 2^71 units, so adding the products moves C by less than a quarter
     of its unit in the last place. Round-to-nearest then gives C back.
4. **Sum (stage 2).** The eight sign-extended products and the signed aligned
   accumulator are added into a 95-bit two's-complement value.
5. **Normalisation and rounding (`mxdotp_norm_round`).**
   - Take the magnitude and find the leading one at position L.
   - The FP32 exponent is `L + (XA + XB) - 161`.
   - If it falls below 1, the rounding position moves up (gradual underflow).
   - Round to nearest, ties to even, with guard, round and sticky bits taken
     from the frame. The accumulator's sticky bit takes part too.
   - A result that rounds past the largest finite value becomes infinity.

When the sticky bit is set and C has the opposite sign to the sum, one frame
unit is subtracted from the magnitude before rounding. This is the standard
trick that keeps the rounding direction correct while the true value lies
strictly between two frame points.

### Where results can differ from infinitely precise rounding

The frame is fixed at 95 bits. Consider a small accumulator, far below the
products' grid, added to products that almost cancel. The exact result can
then need bits below 2^-34 of the scaled unit, and its rounding position can
fall inside the frame's last unit.

- When C was shifted right (sticky set) and the final magnitude is below
  2^25 frame units, the result is **faithful** (one of the two neighbouring
  FP32 values) but not always the correctly rounded one.
- In every other case the unit is correctly rounded.

The reference model in the testbenches computes exactly, with a 640-bit
integer. It marks these cases and checks them for faithfulness instead of
equality. Random tests with realistic scales rarely produce them.

### Special values

| Condition                                                   | Result                      |
|-------------------------------------------------------------|-----------------------------|
| any NaN element or NaN C, a scale of 0xFF, Inf x 0, +Inf and -Inf together | quiet NaN `0x7FC00000` |
| otherwise any Inf product or Inf C                          | Inf of that sign            |
| every product is zero (or an element is zero)               | C unchanged (keeps -0)      |
| exact zero sum                                              | +0                          |
| magnitude rounds past FP32 max                              | Inf                         |

No exception flags are raised.

### Pipeline

| Stage | Work                                                                  |
|-------|-----------------------------------------------------------------------|
| 1     | decode elements, 8 products, scale add, accumulator alignment, special-value detection |
| 2     | 95-bit sum                                                            |
| 3     | leading-one search, rounding, result selection                        |

`valid_i` with `opa_i` (eight A elements), `opb_i` (eight B elements),
`opc_i` and a tag enters stage 1. The result and tag appear with `valid_o`
exactly three cycles later (`NUM_PIPE_REGS` cycles in general). A new
operation may enter every cycle. There is
no back-pressure: the consumer must take every result.

## Operands: the merged third input (`mxdotp_opc_merge`)

A standard FPU operation takes three 64-bit operands. MXDOTP needs four
values: A, B, C and the scales. The scales are small (16 bits per pair), so
the core packs the selected pair into the upper part of the third operand,
next to the FP32 accumulator:

    opc = {16'b0, XA[7:0], XB[7:0], C[31:0]}     // XA at bits 47:40, XB at 39:32

The pair is chosen from `rs3` by `sl`: pair k is bits `[16k+15:16k]`, with XA in
the upper byte. The packing and the in-pair order are this design's own
choice; the merge itself is the only change the FP datapath interface needs.

## Instruction and format selection

| Bits   | 31-27 | 26-25 | 24-20 | 19-15 | 14-12   | 11-7 | 6-0       |
|--------|-------|-------|-------|-------|---------|------|-----------|
| Field  | rs3   | sl    | rs2   | rs1   | ignored | rd   | `1110111` |

`mxdotp_decoder` extracts the fields. The FP8 format is not encoded in the
instruction; it comes from a one-bit CSR (`mxdotp_fmt_csr`):

- The CSR is at address `0x800`, and bit 0 = 1 selects E4M3.
- Reset gives E5M2.
- It accepts csrrw, csrrs and csrrc.

The address and bit assignment are this design's own choices.

## Feeding one instruction per cycle

### Core complex (`mxdotp_core_complex`)

The register file has only three read ports, but an `mxdotp` reads four
registers (rs1, rs2, rs3, rd). At least one source must therefore come from a
stream.

- When streaming is enabled (`ssr_en_i`), registers ft0, ft1 and ft2 are
  not read from the register file. Reading them pops the head of SSR0, SSR1
  and SSR2.
- Register-file port 0 reads rs1, or rs3 if rs1 is streamed.
- Port 1 reads rs2, or rs3 if rs2 is streamed.
- Port 2 always reads rd, the accumulator.
- An `mxdotp` with no streamed operand cannot be served. It is dropped and
  counted (`rejected_o`).
- Instructions with another opcode belong to the rest of the FPU, which is
  not part of this design. They are dropped and counted (`unsupported_o`).

The typical kernel issues `mxdotp c0..c7, ft0, ft1, ft2, 0`: A, B and the scale
word all arrive from streams, and the scale pair is always pair 0 of the
streamed word.

An instruction waits (is not issued) in two cases:

- **a streamed operand is not yet available** (`stall_ssr_o` counts these
  cycles);
- **read-after-write:** a source register or rd is still being computed by
  an earlier `mxdotp` in the three-cycle pipeline. A pending-register
  scoreboard detects this, and `stall_raw_o` counts the cycles.

With eight independent accumulators and latency 3, the kernel never waits on
a result. With a single accumulator, every instruction waits two cycles.

Results are written back NaN-boxed (`{32'hFFFFFFFF, result}`), as the RISC-V
D extension stores single-precision values. The integer core is not part of
this design. An external write port (`ext_*`) stands in for the loads that
initialise accumulators; it yields to result write-back. A read port stands
in for the stores of final results.

### Stream semantic registers (`mxdotp_ssr`)

Each SSR walks a four-level affine address pattern:

    addr = base + sum_{d=0..3} idx_d * stride_d,   0 <= idx_d <= bound_d

- Level 0 is the innermost loop.
- Bounds are written as the iteration count minus one, and strides in bytes.
- Writing the base register starts the stream.
- The SSR keeps at most four words requested or buffered (`FIFO_DEPTH`). A
  new request is made only when a FIFO slot is guaranteed.
- Data returns one cycle after the L1 grant, in order.

Only read streams are built, which is all the kernel needs. Write
(store) streams are left out: the only FP instruction here, `mxdotp`, also
reads its destination as the accumulator, so nothing could feed one. Assertions check
that no data is popped from an empty FIFO and that no data arrives without a
request.

### FP repetition (`mxdotp_frep`)

An FREP command gives the body length (minus one) and the repeat count
(minus one). The next `max_inst+1` FP instructions pass through and are
captured. The block is then replayed `max_rpt` more times from the buffer,
while new instructions are held off. This is the outer-loop form (`frep.o`):
the whole block repeats. The buffer holds 16 instructions, an assumed size;
the kernel uses 8.

## Shared L1 memory (`mxdotp_tcdm`)

The L1 is 32 banks of 512 x 64-bit words, 128 KiB in total.

- **Bank selection:** the bank is word-address bits [7:3] (`addr[7:3]`);
  consecutive words go to consecutive banks.
- **Arbitration:** every bank can grant one of the masters requesting it in
  the same cycle. It uses round-robin, starting from the master after the
  last one granted.
- **Timing:** read data returns exactly one cycle after the grant. Byte
  enables apply to writes.
- **Conflicts:** a master that loses arbitration keeps its request and
  retries. `conflicts_o` counts the requests refused in the current cycle.
- **Masters (33 ports):** SSR k of core c is port 3c+k. Ports 24..31 are
  the cores' load/store ports, and port 32 is the DMA port.

Each bank is its own array with one access per cycle, so a synthesis tool
can map it onto a single-port SRAM. In the paper's chip these are SRAM macros.

## Cluster (`mxdotp_cluster`)

Eight core complexes and the L1 form the top level. All of each core's control
interfaces appear as per-core arrays of top-level ports:

- instruction offload and FREP command;
- CSR access and SSR configuration;
- register-file access and statistics counters;
- the load/store L1 port.

The DMA engine's L1 port is a top-level port too. The integer cores,
instruction caches, DMA engine and system crossbars are not part of this
RTL.

## Parameters

| Module                | Parameter        | Default | Note                                   |
|-----------------------|------------------|---------|----------------------------------------|
| `mxdotp_cluster`      | `NUM_CORES`      | 8       | cores sharing the L1                   |
|                       | `NUM_BANKS`      | 32      | L1 banks                               |
|                       | `WORDS_PER_BANK` | 512     | 64-bit words per bank (128 KiB total)  |
|                       | `FREP_DEPTH`     | 16      | FREP buffer (assumed)                  |
| `mxdotp_core_complex` | `SSR_FIFO`       | 4       | SSR buffer depth (assumed)             |
| `mxdotp_unit`         | `TAG_W`          | 5       | tag width (destination register)       |
|                       | `NUM_PIPE_REGS`  | 3       | pipeline levels = latency in cycles    |
| `mxdotp_pkg`          | `SUM_W`, `ANCHOR`| 95, 34  | fixed-point frame                      |

## Departures and limits

- **Rounding:** the result can be faithful rather than correctly rounded in
  the narrow case described above.
- **Pipeline depth:** `NUM_PIPE_REGS` of `mxdotp_unit` sets the latency
  (default 3, the evaluated configuration). Levels beyond three are plain
  output registers, left for a synthesis tool to retime into the datapath.
  Fewer than three levels are not supported. The core's scoreboard works
  for any latency.
- **Scale encoding:** scales are treated as E8M0 exponents (value
  2^(X-127), 0xFF = NaN), as the MX specification defines them, not as plain
  signed integers.
- **Specials and flags:** no IEEE exception flags. Special values use the
  canonical NaN.
- **FPU scope:** only the MXDOTP operation group of the FPU is built.
- **Stream direction:** SSRs only read.
- **FREP form:** only the outer-loop form, with no register staggering.
- **Scale words:** scale pairs are consumed from pair `sl` of each streamed
  64-bit word. How a kernel lays scales out in L1 is up to software. For a
  64x64 output with inner dimension 256, one 64-bit word per `mxdotp` for all
  rows would take 256 KiB. The scales must therefore be staged row by row,
  for example by DMA, which is not built here.
- **Not built:** the integer cores, instruction caches, DMA engine,
  crossbars and physical implementation.

## Verification and simulation

Every module has a self-checking testbench in `tb/`. Each prints
`TB_RESULT checks=N failures=M` and has a watchdog.

- `mxdotp_ref_pkg` is an independent reference model. It uses exact big
  integer arithmetic, then FP32 round-to-nearest-even.
- `tb_mxdotp_unit` checks over 6000 random and directed operations, in both
  formats, with results chained through the accumulator. It also checks the
  latency of three cycles, and it compares a five-level instance against
  the default one.
- `tb_mxdotp_fp8_decode` covers all 256 codes of both formats.
- `tb_mxdotp_core_complex` runs a 1x8 output, K = 64 kernel on one core. It
  checks that 64 `mxdotp` issue in at most 72 cycles (measured: 71, with no
  stream stalls), the scale selection by `sl`, the read-after-write stall
  and the rejection path.
- `tb_mxdotp_cluster` runs the default-size cluster end to end:
  - an 8x64 by 64x16 MXFP8 matrix product, one output row per core;
  - streams, FREP, a format switch and overflow to infinity;
  - bank conflicts, read-after-write stalls, a rejected instruction and a
    load/store access.

  Each of these mechanisms is counted, and it fails if any never happens.

To simulate with Verilator 5, for example:

    verilator --binary --timing -Wno-fatal rtl/mxdotp_pkg.sv tb/mxdotp_ref_pkg.sv \
        $(ls rtl/*.sv | grep -v _pkg) tb/tb_mxdotp_cluster.sv \
        --top-module tb_mxdotp_cluster -o sim
    ./obj_dir/sim

The packages are listed first. Any other testbench runs the same way; the
reference package is needed only by the datapath, core and cluster tests. The
cluster test builds and runs in well under a minute.
