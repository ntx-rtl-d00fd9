# NTX cluster: a streaming floating-point reduction engine

Most of the arithmetic in neural network training, in dense linear algebra,
and in stencil codes has the same shape: a handful of nested loops that walk
regular address patterns and reduce products into a sum. A general-purpose
core spends most of its instructions on loads, stores, address arithmetic and
loop bookkeeping around such a reduction. NTX moves all of that bookkeeping
into hardware. The core writes a short description of the loop nest into a
few memory-mapped registers:

- the loop bounds,
- three base pointers, each with one stride per loop,
- the operation and where it initialises and stores its accumulator.

The co-processor then streams operands out of the shared scratchpad. It does
one fused multiply-accumulate per cycle for thousands of cycles, with no help
from the core.

This RTL builds one cluster of that architecture. The cluster has:

- eight NTX co-processors;
- a 64 kB scratchpad of 32 word-interleaved banks (the TCDM, tightly coupled
  data memory);
- a single-cycle crossbar that connects every master to every bank;
- a 2-D DMA engine on a 64-bit AXI port;
- the control core's data bus, which includes a broadcast alias for all NTX;
- a 2 kB instruction cache with linear prefetch.

The control core is a RISC-V RV32IMC core from elsewhere and is not included.
Its data port and its instruction-fetch port are ports of the top module
`ntx_cluster`, and the testbenches play its part.

Everything is SystemVerilog-2017. It runs on one clock and has one
active-low asynchronous reset (`rst_ni`). Shared types and constants live
in `rtl/ntx_pkg.sv`.

## The loop nest an NTX executes

An NTX command always executes this program, where `L = outer_level`
(1 to 5):

```
for i4 in 0..max4:                         # only loops < outer_level exist
 ...
  for i1 in 0..max1:
   for i0 in 0..max0:
     if all(i_k == 0      for k < init_level):  x = init        # 0.0 or a memory word
     x = f(x, a, b)                                            # the command
     if all(i_k == max_k  for k < store_level): mem[p2] = x    # optional ReLU
     step AGUs
```

The two trigger rules are the key to using the engine.

- **Init rule.** `init_level = 1` re-initialises the accumulator at the
  start of every loop-0 pass, which gives a dot product per row.
- **Store rule.** `store_level = 1` writes the result at the end of every
  loop-0 pass.
- **Level 0.** `init_level = store_level = 0` initialises and stores in
  every iteration, which is what the element-wise commands need.

Each iteration needs two operands, `a` and `b`. The command word says where
each one comes from:

- `a` is read through AGU0, AGU1 or AGU2.
- `b` is read through AGU1, or is the constant 0.0 or 1.0.
- `init` is a word read through an AGU, or 0.0.

The store address always comes from AGU2.

The hardware loops (`ntx_hwloops`) are five cascaded 16-bit counters. Loop
*i* runs from 0 to its programmed maximum, so it makes `max+1` passes. When
it wraps to 0 it carries into loop *i+1*. A loop at index ≥ `outer_level`
is disabled and counts as "always at its maximum". The nest ends when every
enabled loop is at its maximum.

For each step the counters report the **level**: the index of the outermost
loop that increments in that step.

## Address generation

Each of the three AGUs (`ntx_agu`) is a 32-bit address register, an adder
and five stride registers. In every iteration the address moves by the
stride of the loop that increments in that iteration (the level above):

```
addr += stride[level]
```

It is not the sum of several strides. A stride is therefore the full jump
from the last element of the inner loops to the first element of the next
outer iteration, and the software folds the "rewind" of the inner loops into
it.

Example: matrix-vector product `y = A·x`, with `A` being M×N row-major.

| | loop 0 (N-1) | loop 1 (M-1) |
|---|---|---|
| AGU0 → A | +4 | +4 |
| AGU1 → x | +4 | −4·(N−1) |
| AGU2 → y | 0 | +4 |

The command for this example is MAC, with `outer_level=2`,
`init_level=1`, `store_level=1` and init 0.0.

The outer product uses the same AGUs in a different way. OUTERP reads `b`
only when loop 0 is at 0 and holds it for the whole loop-0 pass.

Addresses are byte addresses in the TCDM. Only bits [15:2] reach the banks.

## Commands

The datapath (`ntx_fpu`) holds `x` in one of two places. For the
arithmetic commands `x` lives in the wide accumulator. For the others it
lives in a 32-bit ALU register. A 16-bit index counter numbers the
iterations since the last initialisation.

| opcode | command | per iteration |
|---|---|---|
| 1 | MAC | `x += a·b` (`neg`: `x -= a·b`) |
| 2 | VADDSUB | `x = a ± b` (two cycles) |
| 3 | VMULT | `x = a·b` |
| 4 | OUTERP | `x = a·b`, with `b` held over a loop-0 pass |
| 5 | MAXMIN | `x = cmp(a, x) ? a : x`; with `alt` the index of the winner is stored |
| 6 | THTST | `x = cmp(a, b) ? 1.0 : 0.0` |
| 7 | MASK | `x = cmp(a, 0) ? b : 0.0` |
| 8 | MASKMAC | `x += cmp(a, 0) ? a·b : 0` |
| 9 | COPY | `x = a`, or with `alt` `x = b` (memset with b = constant) |

Here `cmp` is one of `>`, `≥`, `<`, `≤`, `=`, `≠`.

If the `relu` flag is set, negative results are stored as 0.0.

The command word is what the core writes to the CMD register. Its fields
are (bit positions are this implementation's):

```
[24] alt  [23:21] cmp  [20] neg  [19] relu  [18:17] b_src  [16:15] a_src
[14:13] init_src  [12:10] store_level  [9:7] init_level  [6:4] outer_level  [3:0] opcode
```

The encodings are the `*_e` enums in `ntx_pkg`.

## The wide accumulator

`ntx_fmac` multiplies two fp32 numbers exactly, giving a 48-bit significand
product. It adds the product without rounding to a 300-bit two's complement
fixed-point register whose least significant bit weighs 2^-150. Every fp32
product of normal numbers, and every sum of them, is therefore exact until
the result leaves the register. Rounding happens once, to nearest-even, when
the value is converted back to fp32.

This makes long reductions more accurate than a chain of fp32 additions,
and the result does not depend on the order of the terms. For example,
adding a large value, many tiny ones and the large value negated keeps
every tiny term. An fp32 adder would lose all of them.

Departures from the original design:

- The original accumulator is split into two partial carry-save segments that are
  reduced in a pipeline, which keeps the adder short. This RTL
  uses one 300-bit adder and a combinational normaliser. The numbers it
  computes are the same, but timing closure at that frequency would need
  the segmented form.
- Subnormal inputs are treated as zero.
- Infinities and NaNs are not handled.
- Overflow gives infinity and underflow flushes to zero.

## Inside one NTX: queues and ports

```
 core ─► ntx_regif ──start/cfg──► ntx_controller ──uops──► [Cmd FIFO 5] ─► ntx_fpu
          (staging)               (hwloops, 3 AGUs)                          │   ▲
                                     │ raddr0 raddr1 staddr                  │   │ rd0 rd1
                                     ▼                                      std  │
                           ntx_interleaver: [RAddr 5][RAddr 5][ST addr 7][STD 5][RD0 5][RD1 5]
                                     │ port 0        │ port 1
                                     ▼               ▼
                                 TCDM crossbar (one request per port per cycle)
```

The controller (`ntx_controller`) walks the nest at one iteration per
cycle. For each iteration it pushes:

- the read addresses,
- the store address, if any,
- a micro-instruction (init / clear / pop a / pop b / store) for the
  datapath.

The controller runs ahead of the datapath by as much as the FIFOs allow.
This hides the one-cycle memory latency and absorbs bank conflicts. The
FIFO depths are the ones of the original design. They were sized there for
a one-cycle TCDM read latency.

An initialisation from memory costs one extra issue cycle, because the init
word is read through the a-port ahead of the iteration.

The writeback interleaver (`ntx_interleaver`) shares the two 32-bit TCDM
ports between three streams:

- Operand-a reads use port 0.
- Operand-b reads use port 1.
- A store uses a port whose read stream is idle in that cycle. When both
  read streams are busy, stores alternate between the two ports.

This spreads an element-wise command's three accesses per element evenly
over the two ports.

A read is only issued when its data FIFO has room for it and for every
read still in flight. Read data can therefore always be accepted without
back-pressure on the TCDM.

A request that loses a bank conflict stays on its port until it is granted.
This is the only way the memory system stalls an NTX.

A command is done when three conditions hold:

- the loop nest has ended;
- every FIFO is empty;
- the datapath is idle, so its last store has been written.

## Kernels and their rates on one NTX

`tb_ntx_workloads` maps a set of linear-algebra and stencil kernels onto
one NTX and checks every output. Its memory model has two ports and 64 kB.
The kernels are:

- AXPY;
- matrix-vector and matrix-matrix products;
- 3×3, 5×5 and 7×7 convolutions;
- Laplace operators in 1-D, 2-D and 3-D;
- a horizontal-diffusion stencil with a flux limiter.

The mappings show how the loop nest is used in practice:

- **GEMM.** Three loops (k, j, i). The A pointer rewinds by a row on every
  j step. The B pointer jumps back to the top of the next column.
- **Convolution.** Four loops (kx, ky, ox, oy).
- **3-D Laplacian.** It needs six loops, one more than the hardware has. It
  therefore runs one five-loop command per output plane.
- **AXPY.** A MAC that initialises its accumulator from `y` in every
  iteration. The scalar is fetched through an AGU with all strides 0.
- **Diffusion.** Twelve commands chain through memory. The limiter uses MASK
  on the product of flux and gradient.

Measured cycles without memory stalls:

| kernel | iterations | cycles | iterations/cycle |
|---|---|---|---|
| GEMV 16×16 | 256 | 269 | 0.95 |
| GEMM 16 | 4096 | 4229 | 0.97 |
| GEMM 32 | 32768 | 33285 | 0.98 |
| CONV 3×3 / 5×5 / 7×7 (24×24 image) | 4356 / 10000 / 15876 | 4603 / 10205 / 16043 | 0.95 / 0.98 / 0.99 |
| LAP1D, 512 points | 1530 | 1789 | 0.86 |
| LAP3D, one 8×8 plane | 972 | 995 | 0.98 |
| VMULT / MASK, 143 elements | 143 | 218 | 0.66 |
| VADDSUB, 143 elements | 143 | 291 | 0.49 |
| AXPY, 2048 | 2048 | 4102 | 0.50 |

The rates are set by the two memory ports and by the datapath:

- **Reductions.** Their only loss is the store of each result, so a
  reduction of n taps costs about n+1/2 cycles.
- **VMULT and MASK.** These read two words and write one per element. That
  is three accesses on two ports, so they run at 2/3 element per cycle.
- **VADDSUB.** It needs two datapath cycles per element, so it runs at 1/2.
- **AXPY.** Its init from memory costs an extra issue cycle per element.

Each kernel is repeated with 13 % of all port requests refused at random.
That is roughly the bank-conflict rate of a fully loaded cluster. Under
these stalls the reductions drop to about 0.8 iterations per cycle, and the
results do not change.

## Programming an NTX

Register offsets within one NTX window (32-bit words):

| offset | register |
|---|---|
| 0x00 | STATUS: bit 0 busy, bit 1 interrupt pending |
| 0x04 | CMD: writing launches the staged configuration with this command word |
| 0x08 | IRQ: bit 0 pending; write 1 to clear |
| 0x10 + 4·i | maximum count of loop i (i = 0..4) |
| 0x40 + 0x20·j | base address of AGU j (j = 0..2) |
| 0x44 + 0x20·j + 4·k | stride k of AGU j |

The registers are a staging area. A CMD write copies the whole
configuration into the controller in one cycle. The core can then at once
start to write the next command's configuration while the current one runs.

A second CMD write that arrives while the NTX is still busy is not lost.
The bus grant is withheld until the controller is idle. The core simply
stalls on that store.

When a command finishes, its interrupt bit is set.

Cluster address map (`cluster_bus`; all of it is this implementation's
choice):

| address | target |
|---|---|
| 0x1000_0000 + [0, 64 kB) | TCDM |
| 0x1020_0000 + 0x100·i | NTX i |
| 0x1020_0800 | all NTX (broadcast) |
| 0x1020_1000 | DMA |

Broadcast writes:

- Writes to the broadcast window reach all eight NTX in the same cycle.
- This is how common values (loop counts, strides, the weight pointer) are
  set once for all of them.
- A broadcast write is only issued when every NTX can accept it. A
  broadcast command write therefore starts all NTX together, or waits.

A broadcast read returns the OR of all NTX. Reading STATUS there gives
"any NTX busy".

## Scratchpad and crossbar

The TCDM has 32 banks (`tcdm_bank`) of 512 × 32 bit. Each bank has byte
enables and gives its read data in the cycle after the request. Word
addresses are interleaved: bank = byte address bits [6:2], row = bits
[15:7].

The crossbar (`tcdm_interconnect`) has 19 masters:

- two ports per NTX;
- the core;
- two DMA ports.

In every cycle each bank grants one of the masters that request it. The
choice is round-robin, starting after the master served last. Requests to
different banks are all served in the same cycle. A master's read data
arrives one cycle after its grant, whichever bank it came from.

The worst case has all 19 masters hammering one bank. Round-robin keeps
each wait below 19 cycles, and the testbench checks that bound.

## DMA

`cluster_dma` moves a 2-D block in one command. The block is `NUM_ROWS`
rows of `ROW_LEN` bytes. Rows start `EXT_STRIDE` bytes apart on the AXI
side and `TCDM_STRIDE` bytes apart in the TCDM.

This is how tiles of large matrices and images are cut out and put back.
The intended flow is double buffering: the DMA fills one half of the TCDM
while the NTX work on the other.

| offset | register |
|---|---|
| 0x00 | EXT_ADDR |
| 0x04 | TCDM_ADDR |
| 0x08 | ROW_LEN |
| 0x0c | NUM_ROWS |
| 0x10 | EXT_STRIDE |
| 0x14 | TCDM_STRIDE |
| 0x18 | CTRL (write starts; bit 0 = 1 means TCDM → AXI) |
| 0x1c | STATUS (bit 0 busy) |

Each row is split into AXI INCR bursts of up to 16 beats of 64 bits. A beat
is two TCDM words, which are moved through the DMA's two crossbar ports in
the same cycle. One burst is outstanding at a time.

Constraints:

- Addresses and lengths must be multiples of 8 bytes. An assertion reports
  a violation.
- A burst must not cross a 4 kB boundary.

## Instruction cache

`icache` is 2 kB, direct-mapped, with 16-byte lines. Its fetch side is a
request/grant interface, and the fetched word arrives one cycle after the
grant on a hit. Its refill side asks for whole lines.

Linear prefetch: when the fetch stream enters a new line, the cache fetches
the following line in the background. A straight-line instruction stream
therefore misses only at its start.

## Clocking

The original cluster runs the NTX and the TCDM at twice the frequency of
the core and the rest of the cluster:

- the text gives 1.25 GHz and 625 MHz;
- the block diagram labels give 1.5 GHz and 750 MHz.

This RTL has one clock. The 2:1 ratio and the clock-domain crossing between
the core side and the NTX side are not modelled. As a result, in this RTL:

- the DMA moves one 64-bit beat per cluster clock;
- the DMA's AXI port has the same clock as the NTX.

## How far to trust it

Every block has its own self-checking testbench in `tb/`. Each compares the
block against a reference computed independently inside the testbench:

- a double-precision model of the floating-point results;
- a reference memory for the crossbar;
- a software walk of the loop nest for the counters and AGUs.

Results of the testbenches:

- `tb_ntx_fmac`: random dot products, sums with cancellation, negated
  products, rounding cases and the one-cycle latency.
- `tb_ntx_hwloops` and `tb_ntx_agu`: the carry cascade and the stride
  selection, against an exhaustive software nest over random configurations.
- `tb_ntx_fpu`: every command against a reference, plus the MAC rate
  (one per cycle) and the VADDSUB rate (one per two cycles).
- `tb_ntx`: one complete NTX, driven through its registers, with data in a
  two-port memory model that can inject random grant stalls (standing in
  for bank conflicts). It runs:
  - a matrix-vector product, with its cycle count checked;
  - the same product under stalls;
  - a 3×3 convolution with four loops and a bias initialised from memory;
  - VADDSUB, argmax, thresholding and memset;
  - a second command written while the first runs, and the interrupt.

  It checks every stored word. It also covers the register interface, the
  controller and the interleaver.
- `tb_tcdm_interconnect`: random traffic with a reference memory, plus the
  fairness bound.
- `tb_cluster_dma`: 2-D transfers in both directions against an AXI memory
  model with random wait states.
- `tb_cluster_bus`, `tb_icache` and `tb_tcdm_bank`: the smaller blocks.
- `tb_ntx_cluster`: the whole cluster at its default size (8 NTX, 64 kB). It
  runs a double-buffered, tiled 3×3 convolution with ReLU. The DMA loads
  and unloads tiles while all eight NTX compute, configured through
  broadcast and per-NTX writes. It checks every output, and it counts:
  - bank conflicts;
  - broadcast writes;
  - cycles in which a command waited in staging;
  - DMA/NTX overlap cycles;
  - interrupts;
  - prefetch hits.

  At this size the eight NTX reach about 0.6 MAC per cycle each, with the
  core's programming time and the bank conflicts included.

- `tb_ntx_workloads`: the kernels above, under both memory conditions.

`tb/tb_axi_mem.sv` is the behavioural AXI memory used by the DMA and cluster
testbenches, and `tb/tb_fp_pkg.sv` holds the real↔fp32 helpers.

To run a testbench with Verilator 5:

```
verilator --binary --timing --assert -Wno-fatal --top-module tb_ntx_cluster \
  -y rtl -y tb +libext+.sv rtl/ntx_pkg.sv tb/tb_fp_pkg.sv tb/tb_ntx_cluster.sv
./obj_dir/Vtb_ntx_cluster
```

Every testbench ends by printing `TB_RESULT checks=<n> failures=<m>`. Each
has a watchdog that turns a hang into a failure.

## Departures from the original design

- **Accumulator.** A single wide adder and combinational rounding are used
  instead of the segmented, pipelined carry-save accumulator. The arithmetic
  result is identical.
- **Special values.** There is no IEEE special-value handling: subnormals
  are flushed, and inf/NaN are not propagated.
- **Crossbar.** It is a flat full crossbar with round-robin arbitration per
  bank. The original uses a logarithmic tree with the same single-cycle
  behaviour.
- **Clocking.** There is one clock domain, not 2:1.
- **Own choices.** The architecture does not specify these, and they are
  this implementation's own:
  - the register maps, the command-word encoding and the address map;
  - the exact semantics of THTST, MASK and MASKMAC;
  - the interleaver's port policy;
  - the stall-on-busy behaviour of CMD writes.
- **Not included.** The control core, the SoC interconnect, the L2 memory
  and the memory-cube infrastructure around the cluster are not part of this
  RTL. Their connections are ports of `ntx_cluster`.
