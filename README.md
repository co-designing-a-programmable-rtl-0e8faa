# An eight-core streaming FP32 cluster for MPC power and thermal control

A many-core processor can be kept inside its power and temperature limits by a
small on-die controller that, every few hundred microseconds, solves a model
predictive control (MPC) problem: predict the temperature of every processing
element over a short horizon and choose the frequencies that keep them under the
limits. The optimisation behind MPC is a sparse quadratic program, solved with an
ADMM method (OSQP). Almost all of its time goes into two sparse triangular solves
per iteration, `L y = b` and `L^T x = y`, whose work is irregular (index arrays,
data-dependent addresses) and full of dependencies between columns.

This RTL is the accelerator side of such a controller: a cluster of eight small
compute cores built to run those sparse kernels at high FPU utilisation. Each core
has an FP32 unit that is fed not by loads and stores but by *stream registers*
(SSRs) that fetch arrays, including gathers through 16-bit index arrays, straight
into FP registers, and by a *hardware loop* (FREP) that repeats a short FP
instruction sequence without the integer core. The cores share a 1 MiB scratchpad
(L1) of 32 banks, and a DMA engine moves data between that scratchpad and the
128 KiB memory (L2) of the controller's manager core. A solver schedule computed
ahead of time splits each triangular solve into tiles that the eight cores work
through with few synchronisations; that schedule is software and is not part of
this RTL.

## Block diagram

```
             acc_*[c], cfg_*[c]  (from the integer cores, c = 0..7)
                    |
   +----------------v-----------------+  x8
   | snitch_cc_fp                     |
   |  frep_sequencer -> decode/issue  |
   |   FP regs (32x32)   fp32_fpu     |
   |  sssr_streamer x3 (lanes 0,1     |
   |  indirect-capable, lane 2 affine)|
   +---|----------|----------|--------+
       | master 3c | 3c+1     | 3c+2
   +---v----------v----------v--------------------------+   master 24
   | tcdm_interconnect (25 masters x 32 banks, 1 cycle) |<------------+
   +---|-------------------------------------------|----+             |
   spm_bank 0 ... spm_bank 31 (8192 x 32 bit each = 1 MiB L1)   cluster_dma
                                                                     |
   l2_req_i / l2_rsp_o (manager side, priority) ---> L2 spm_bank (32768 x 32 bit)
```

`pmca_cluster` is the top. The integer cores that drive each core's FP offload
port, the manager core and the system interconnect are not in this RTL; their
connections are ports of the top.

## Memory protocol

Every memory port uses one request/response pair (`tcdm_req_t`, `tcdm_rsp_t` in
`pmca_pkg`):

* request: `valid`, `we`, `be[3:0]`, byte `addr`, `wdata`;
* response: `gnt` in the same cycle as an accepted request, and for reads
  `rvalid` with `rdata` exactly one cycle after the grant.

A master holds its request until it sees `gnt`. Writes get no response. Read
latency is therefore one cycle without conflicts; a conflict costs one cycle per
master served before.

## The L1 interconnect and banks

Addresses are word-interleaved: bits [1:0] select the byte, bits [6:2] the bank,
and the bits above the row in the bank. Consecutive words thus fall in different
banks, and eight cores walking through arrays at unit stride rarely collide. Each
bank has its own round-robin arbiter over the 25 masters (24 SSR lanes, one DMA),
so up to 32 requests are served per cycle. The banks are single-port arrays with
byte enables and a registered read port; they stand in for SRAM macros.

## Stream registers (SSRs)

A lane is configured with a few register writes (`cfg_*` ports; register map in
`pmca_pkg`):

| index | register | meaning |
|---|---|---|
| 0..3 | BOUND_d | iterations - 1 of loop dimension d |
| 4..7 | STRIDE_d | byte stride of dimension d |
| 8 | IDX_CFG | [1:0] log2 of index size (0: 8 bit .. 3: 64 bit), [6:4] left shift applied to an index, [8] indirect mode |
| 9 | IDX_BASE | byte address of the index array |
| 16..19 | RPTR_d | write the base address here to start a read stream of d+1 dimensions |
| 24..27 | WPTR_d | same for a write stream |

An affine stream walks up to four nested loops; the address is the base plus the
sum of each counter times its stride, kept as one running pointer per dimension so
that no multiplier is needed. An indirect stream (lanes 0 and 1 only) is one
dimensional: element k is at `base + (idx[k] << shift)`. Reads gather, writes
scatter. The lane fetches index *words*, so with 16-bit indices one fetch serves
two elements. A read lane runs ahead of the core by up to `Depth` (4) elements and
counts credits so that its buffer never overflows, whatever the bank conflicts.

In the core, once streaming is enabled (`cfg_ssr_i = 3`, address 0, bit 0), FP
registers f0, f1 and f2 are the three lanes. Naming f0 as a source pops the next
element of lane 0; naming f2 as the destination pushes the result into lane 2's
write stream. An instruction stalls until every stream it reads has data and the
stream it writes has room. That is the only flow control a kernel needs: a sparse
dot product is

```
frep  n-1, 1 instruction, outer           # repeat the next instruction n times
fmadd f3, f0, f1, f3                      # f0 = x[idx[k]] (gather), f1 = val[k]
fmv   f2, f3   (fsgnj.s f2, f3, f3)       # push the result to the write stream
```

## The FREP hardware loop

`frep` uses the custom-0 opcode `0001011`. Bits [31:20] hold the body length
minus one, bit 7 selects the order, and the integer operand that travels with the
instruction (the value of rs1) is the repetition count minus one. The next body
instructions are first captured into a 16-entry buffer, then issued from it:
*outer* order repeats the whole body, *inner* order repeats each instruction before
the next one. While it replays, the sequencer stops taking offloaded instructions
(`acc_ready_o` is low); the integer core has handed the body over once and can do
integer work meanwhile instead of re-issuing it.
Capturing the body before issuing costs one cycle per body instruction; the replays
then issue one instruction per cycle.

## The FPU

FP32 only, with round-to-nearest-even, subnormals flushed to zero, and the
canonical NaN for invalid results. The multiply-add forms round the product before
adding, so they are not fused and may differ from IEEE `fma` in the last bit. The
unit is combinational: a result is written at the end of its issue cycle, and
back-to-back dependent instructions issue every cycle. A real implementation at
500 MHz would pipeline it and need the register-dependency checks this design
omits.

## The DMA

A command gives source and destination byte addresses, a length in 32-bit words
and a direction (0: L2 to L1, 1: L1 to L2). Reads run ahead of writes through a
4-entry FIFO, so a transfer moves one word per cycle when neither side is blocked
(64 words take 67 cycles). `done_o` pulses once at the end; one command runs at a
time. On L2 the manager port always wins, so the manager can read results while a
transfer is running; the DMA simply waits.

## Simulating

Each block has a self-checking testbench in `tb/` named `tb_<block>`; all print
`TB_RESULT checks=<n> failures=<n>`. With Verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb rtl/pmca_pkg.sv \
  $(ls rtl/*.sv | grep -v pmca_pkg) tb/tb_pmca_cluster.sv --top-module tb_pmca_cluster
./obj_dir/Vtb_pmca_cluster
```

(`tb/tb_fp_pkg.sv`, the FP32 reference helpers, is found through `-Itb`.)
`tb_pmca_cluster` runs the top at its full default size: the manager loads a
sparse matrix with 16-bit indices, a vector and bounds into L2 while reading L2
itself, the DMA copies them into L1, all eight cores compute their rows' sparse
dot products (indirect gathers, FREP), then after a barrier project the results
onto bounds (a dense ADMM-style update that reads other cores' results) and
scatter them through a 16-bit permutation index, and the DMA copies the results
back for checking. It counts bank-conflict stalls, index fetches, scattered
writes, FREP replays, DMA transfers in both directions, L2 priority stalls and
FPU issues per core, and fails if any of them never happens.

`tb_pmca_sptrsv` runs the solver's dominant kernel, a sparse unit lower-triangular
solve, on the full-size cluster, for two systems: 192 unknowns (the smallest MPC
problem, a 3x3 grid with a two-step horizon, has 95 variables and 97 constraints)
and 2622 unknowns (a size also quoted for that problem). The sparsity patterns are
random. Unknowns are grouped into levels that depend only on earlier levels;
within a level the rows are split evenly among the eight cores, and levels are
separated by barriers. Each row is `fmv.w.x` of the right-hand side, one
FREP-repeated `fnmsub` over the row's non-zeros with `x` gathered through 16-bit
indices, and a push of the result into a write stream. It prints the cycle count,
the number of barriers and the FPU utilisation of each solve: about 20% for the
small system, where each core gets two or three short rows per level and stream
setup dominates, and about 36% for the large one (38 levels, 4.5k cycles).

## How far it goes, and where it departs

What follows the source design: eight cores, three SSRs per core of which two are
indirect-capable, 4-D affine streams, 8/16/32/64-bit index arrays, FREP with a
loop buffer, a 32-bank L1 of 1 MiB behind a single-cycle interconnect, a DMA
between L1 and the 128 KiB L2, and FP32 arithmetic.

This design's own choices: the memory protocol, the bank interleaving and
round-robin arbitration, the SSR register map, the FREP encoding and buffer depth,
the FPU's rounding and subnormal handling, the non-fused multiply-add, the
combinational FPU, and the DMA's single linear transfers.

Not built: the integer cores (so no FP loads/stores, compares, conversions or
division; data enter the FPU through the SSRs or `fmv.w.x`), the instruction
caches, the manager core, its peripherals and system interconnect (replaced by one
L2 port), the FP64 and SIMD modes of the FPU, and FREP register staggering.

How much to trust it: every block has a randomised self-checking testbench
(the FPU against a double-precision reference over tens of thousands of operand
triples, the interconnect under all-master conflict, the SSR lanes in every
dimension count and index width), and each of these testbenches was shown to fail
on a deliberately broken copy of its block. The design has not been synthesised to
a technology: the FPU is one combinational path from the register file through
multiply, align, add and round back into the register file, far too long for the
500 MHz target, and the integer-core side of every kernel is played by testbenches.
Triangular solves of up to 2622 unknowns have been simulated, with random sparsity
patterns rather than those of real KKT factors.

Sizing against the solver workloads: with FP32 data and 16-bit indices, the MPC
problems for 3x3, 6x6, 9x9 and 12x12 grids of processing elements need roughly
20, 90, 255 and under 550 KiB of scratchpad, all within the 1 MiB L1; the 12x12
problem in FP64 (about 1080 KiB) would not fit, and this datapath is FP32 only.
