# A complex-bfloat16 vector processor with a systolic array and a CNN engine for massive MIMO

Massive-MIMO base stations spend most of their baseband effort on small
dense linear algebra: Gramian matrices of the channel (H·Hᴴ), matrix
products, Cholesky factorisations and FFTs, all on complex data. This design
puts that work on a programmable processor rather than on fixed-function
hardware. It pairs three engines that share one wide memory:

- a **16-lane complex-bfloat16 vector core** for the irregular parts of the
  algorithms;
- a **16 × 16 systolic array** that multiplies matrices in memory on its own
  once it is started;
- a **fixed-point CNN accelerator** that estimates user position from the
  channel matrix.

All arithmetic in the vector core and the systolic array is bfloat16: 8
exponent bits and 7 fraction bits, which is the upper half of an IEEE
float32. A complex number takes 32 bits, with the real part in the upper
half. A vector is 16 complex numbers (512 bits). That is the width of the
vector core, of one row of the systolic array and of one memory word.

The RTL covers the vector side of the processor. It does not include the
scalar RISC-V core or its two small memories. That core's instruction stream
enters the top level as decoded vector operations and as configuration
pulses for the accelerators (see *Top level*).

```
            decoded vector ops / sys.* / DMA / CNN configuration (from the scalar core)
                 │             │              │                 │
          ┌──────▼─────┐  ┌────▼──────────┐   │          ┌──────▼──────────┐
          │ vector     │  │ systolic array│   │          │ CNN accelerator │
          │ core       │  │ 16 x 16 PEs   │   │          │ (3-PU engine)   │
          └──────┬─────┘  └────┬──────────┘   │          └──────┬──────────┘
                 │ proc_req    │ sa_req       │                 │
          ┌──────▼─────────────▼──────────────▼──┐  cnn_req ┌────▼──────────┐
 host ───►│ memory controller: arbiter,          ├─────────►│ CNN vector    │◄── host
          │ data shuffler, copy-and-split DMA    │          │ memory 614 kB │
          └──────────────────┬───────────────────┘          └───────────────┘
                       ┌─────▼──────────────────┐
                       │ parallel vector memory │  16 banks, 512 kB
                       └────────────────────────┘
```

## Rows and columns in one access: the skewed vector memory

Matrix kernels need whole rows and whole columns of a matrix, and both should
take one memory cycle. The parallel vector memory is therefore made of 16
banks, each one complex element wide (`parallel_vector_memory`). The data
shuffler (`data_shuffler`) decides which element goes into which bank.

**Matrix layout.** Matrices are stored as 16 × 16 blocks. For an R × C
matrix at vector address `base`, block (bi, bj) starts at
`base + 16·(bj·R/16 + bi)`, so the blocks are in column-major order. Block
starting addresses must be multiples of 16.

**Skew.** Element (r, c) of the block numbered b (b = address / 16) is kept
in bank `(r + c) mod 16`, at bank address `16·b + r`. With this layout:

- **Row mode (mode 0).** An access to address a reads row r = a mod 16. Every
  bank is addressed at `a`. Lane l gets bank `(l + r) mod 16`.
- **Column mode (mode 1).** An access to address a reads column c = a mod 16.
  Bank k serves lane `l = (k − c) mod 16`, at address `16·b + l`.

In both modes, every lane hits a different bank, so the access takes one
cycle. The shuffler turns a request `{mode, addr, mask, wdata}` into
per-bank enables, addresses and rotated data. It remembers the rotation for
one cycle, so it can put read data back into lane order.

A store can be masked per lane. Read data is available on the cycle after
the request.

## The systolic array and its schedule

`systolic_array` computes C = A·B on complex bfloat16 matrices in the vector
memory. M, N and P are multiples of 16 and at most 1008. The array is
configured by three instructions:

- `sys.sz` gives the sizes, in 16-blocks;
- `sys.des` gives the result address;
- `sys.mul` gives the operand addresses and the mode, and starts the array.

While the array runs, `busy` is high. `done` pulses once at the end.

**Structure.** There are 16 × 16 `systolic_pe` cells. Each one holds:

- an inner A register, passed to the right;
- an inner B register, passed down;
- each with a valid tag;
- one complex accumulator, which keeps its output element (output
  stationary).

Operands come from two banks of outer registers. On the left, 16 registers
hold rows of A. On the top, 16 registers hold columns of B.

A small scheduler controls the array. It is made of a slot counter, two
output-block counters (bi, bj) and a launch bit shifter. The shifter
releases outer register i into the array i cycles after register 0, which
gives the classic diagonal skew.

**One output block.** These are the cycle numbers for one 16 × 16 block of C,
counted from its first slot:

1. Each 16-wide slice of N takes 32 memory cycles: 16 reads of A rows in row
   mode, alternating with 16 reads of B columns in column mode.
2. An outer register starts shifting into the array as soon as its vector has
   arrived. The next slice loads behind it.
3. After the last launch, the wave needs 32 more cycles to reach PE (15, 15).
4. The 16 result rows are then written back, one per cycle.

An output block therefore takes `32·N/16 + 34` cycles. The memory is idle
during the drain and write-back phases.

**Gramian mode.** With `mul_gramian` set, B = Aᴴ is not read from memory.
Row j of A is loaded, conjugated, into the top registers. On a diagonal
block, the A row and the B column are the same vector, so one read feeds
both sides. That block takes `16·N/16 + 34` cycles.

**Cycle counts against the published figures.** The testbenches check these
cycle counts exactly.

| product | this RTL | published |
|---|---|---|
| 16×16 · 16×16 | 66 | 73 |
| 32×32 · 32×32 | 392 | 400 |
| 64×64 · 64×64 | 2592 | 2632 |
| 16×128 · 128×16 | 290 | 304 |
| H(16×128)·Hᴴ | 162 | 168 |

The remaining difference, a few cycles per block, is the instruction overhead
of the scalar core. That core is not modelled here.

**Arithmetic order.** Each PE computes `acc ← acc + a·b`, in the order
k = 0 … N−1. The products and sums are rounded as described under
*Arithmetic*. The testbenches compute the same order with an independent
reference, and the results are bit-exact.

The array never waits for memory. The memory controller gives it the
highest priority, and the top level asserts that it is never refused.

## The vector core pipeline

`vector_core` has four stages, which follow the scalar core's pipeline
depth.

- **Decode.**
  - The first operand is a register, its conjugate, or zero.
  - The second operand is one of:
    - a register or its conjugate;
    - element `vr2[s]` broadcast to all lanes, where s is the low four bits of
      a scalar register;
    - the conjugate of that element, broadcast;
    - a complex scalar register, broadcast.
- **Execute.** Lane-wise add, subtract or complex multiply. It also does the
  indexed write, which replaces element `xr` of the first vector with a
  scalar register. The memory request of a load or store is issued here, in
  row or column mode, with an optional lane mask taken from a scalar
  register.
- **Post Execute.**
  - Load data arrives here.
  - MAC adds a third register `vr3` to the result.
  - The dot-product adder tree reduces the 16 lanes to 4 partial sums.
- **Writeback.**
  - The vector result is written to the register file.
  - The dot product is reduced from 4 partial sums to 1 and written to a
    scalar register.
  - An indexed read sends element `xr` to the RISC-V register file (`xw`).

**Hazards.** The register file writes in Writeback and reads in Decode. A
result written in Writeback is visible to the instruction in Decode in the
same cycle, through a write-first bypass.

A source register that is still being produced in Execute or Post Execute
holds the instruction in Decode. This costs two bubbles for back-to-back
dependent instructions, and the testbench checks that count.

The whole pipeline freezes in two cases:

- `ext_stall` is high (a stall from the scalar core);
- a memory request is refused, for example while the systolic array owns the
  memory.

There are 8 vector registers and 8 complex scalar registers. The operation
arrives already decoded (`vop_t` in `asip_pkg`), so the instruction bit
encoding is outside this RTL.

## Memory controller and the copy-and-split DMA

`memory_controller` wraps the data shuffler and the DMA. It gives the one
vector-memory access per cycle by fixed priority:

1. systolic array;
2. vector core;
3. DMA;
4. host port.

The grant is combinational. Read data returns one cycle later on a shared
`rdata` bus, and the requester that was granted takes it.

The positioning CNN works on real fixed-point planes, but the channel
matrix is complex bfloat16 in the vector memory. `dma` bridges the two. Once
started, it walks the source matrix block by block. For each 16-element row
(or column, when transposed) it:

- reads one vector;
- converts the real parts to 16-bit fixed point, with 8 fraction bits,
  truncation toward zero and saturation;
- writes them to the real plane;
- writes the imaginary parts to the imaginary plane.

The planes are row-major, with COLS/16 words per row. A vector takes 4
cycles when the DMA is not refused.

## CNN accelerator

The CNN memory (`cnn_vector_memory`, 614 kB = 19648 words of 16 × 16-bit
values) belongs to the accelerator. It has one access per cycle, given in
this order:

1. DMA;
2. accelerator;
3. host port.

**Convolution engine** (`cnn_conv_engine`). The dataflow is row stationary:

- Three processing units each hold one row of a 3 × 3 filter.
- Each unit is a row of 16 PEs. A PE has three multipliers and an adder.
- Unit k receives one activation row of 18 entries: 16 pixels plus one halo
  pixel on each side. The halo pixel is zero at the image border, which is
  the padding.
- PE p forms `Σt w[k][t]·act[k][p+t]`.
- The three unit outputs of each PE column are added to an incoming
  partial-sum row.

One call thus adds one input plane's contribution to 16 output pixels, with
one cycle of latency.

**Layer scheduler** (`cnn_accelerator`). It runs one layer per `start` pulse.

- **Feature maps.** Pixel (c, y, x) of a map with C planes, H rows and
  W = 16·WW columns is in lane x mod 16 of word
  `base + (c·H + y)·WW + x/16`.
- **Convolution** (3 × 3, same size, optional ReLU). For each output word
  and each input plane, the scheduler reads the 3 × 3 neighbourhood of
  words, skipping reads outside the image. It also reads the coefficient
  word, which holds taps (ky, kx) in lane 3·ky + kx, at
  `w_base + co·cin + ci`. It then runs the engine. After the last plane, the
  32-bit sums (16 fraction bits) are shifted right by 8, passed through ReLU
  and saturated to 16 bits.
- **2 × 2 max pooling**, stride 2. It takes four reads and one write per
  output word. WW must be even.

The network this hardware serves has these stages:

1. input 64 × 128 × 2;
2. four 3 × 3 convolution layers of 16 filters, with ReLU and 2 × 2 max
   pooling after layers 2–4, giving 64 × 128 × 16, then 32 × 64 × 16, then
   16 × 32 × 16, then 8 × 16 × 16;
3. a fully connected layer with 2 outputs.

All these maps fit in the CNN memory. The fully connected layer is **not**
in this RTL (see *Departures and limits*).

## Inverse square root

`rsqrt_unit` is the scalar core's bfloat16 `1/√x` execution unit. It has two
pipeline stages and accepts one operand per cycle.

The operand is written as x = s·2^(2h), with s in [1, 4). The unit finds
r = 1/√s by Newton–Raphson, `r ← r(3 − s·r²)/2`:

- Stage 1 starts from a linear seed on each octave and does the first
  iteration.
- Stage 2 does the second iteration, then normalises and rounds.

The result is within one unit in the last place. Special cases: zero gives
+∞, and a negative input gives NaN 0x7FC0.

## Arithmetic

The functions in `asip_pkg` work as follows:

- Subnormals are flushed to zero. Results are rounded to nearest-even.
  Exponent overflow gives infinity.
- A complex product rounds each real product and each sum:
  `(a+jb)(c+jd) = rnd(rnd(ac) − rnd(bd)) + j·rnd(rnd(ad) + rnd(bc))`.
- The conversion to the CNN format truncates toward zero and saturates to
  ±32767.

The testbench reference package `tb_ref_pkg` computes the same operations
with `real` numbers, independently of the bit-level code.

## Top level

`asip_top` connects all of the blocks. Its ports are plain signals and
packed structs:

- **Vector core:** the vector-operation handshake (`v_op` / `v_op_ready`),
  the scalar stall (`v_stall`), and the write ports back to the scalar side
  (`xw*`, `sw*`, `s_*`).
- **Systolic array:** the configuration pulses `sz_*`, `des_*` and `mul_*`.
- **DMA and CNN accelerator:** the `dma_*` and `cnn_*` configuration and
  status ports.
- **Inverse square root:** `rs_*`.
- **Host ports:** two request/grant ports (`host_*` and `cnn_host_*`), for
  loading inputs and reading results.

Configuration inputs are sampled on the rising edge of their `*_we` or
`*_start` pulse. A vector load issued while the systolic array is running
simply waits for a free memory cycle.

## Verification

Every block has a self-checking testbench in `tb/`. Each one ends with
`TB_RESULT checks=N failures=M` and has a watchdog. The simulations are
two-state, with random stimulus from `$urandom`.

| testbench | what it checks |
|---|---|
| `tb_rsqrt_unit` | 6000 operands over the whole exponent range, ≤ 1 ulp; latency 2 |
| `tb_parallel_vector_memory` | per-bank writes and reads, latency |
| `tb_data_shuffler` | row and column mode, aligned to the skew, against an element model |
| `tb_vector_core` | every operand select, add/sub/mul, MAC, dot product, indexed read and write, masked store, two-bubble hazard, external and memory stalls |
| `tb_systolic_array` | 16³, 32³, 16×64×32, Gramian 16×128 and 32×32; bit-exact results and exact cycle counts |
| `tb_dma` | plain and transposed copy-and-split, with refused cycles; 4 cycles per vector |
| `tb_memory_controller` | priority of all requesters, data of random row/column traffic, and a DMA run |
| `tb_cnn_vector_memory`, `tb_cnn_conv_engine`, `tb_cnn_accelerator` | memory; engine against direct sums; a conv + ReLU layer and a max-pool layer against a reference, with refused cycles |
| `tb_asip_top` | end to end at full size: host load, vector row/column loads, hazard, scalar stall, indexed read, GEMM and Gramian on the array while the vector core is stalled by it, transposed DMA, CNN convolution and pooling, rsqrt. It counts each of these mechanisms and fails if one never occurred. |

To run one testbench with Verilator, for example the end-to-end test:

```
verilator --binary --timing --assert -Irtl rtl/asip_pkg.sv tb/tb_ref_pkg.sv \
    rtl/*.sv tb/tb_asip_top.sv --top-module tb_asip_top
./obj_dir/Vtb_asip_top
```

Most block testbenches need only their own module and its sub-modules, plus
`asip_pkg.sv` and `tb_ref_pkg.sv`.

**Two-state simulation.** Verilator does not apply a named type's
signedness to a variable-index select of a packed array of that type.
Because of this, the RTL uses `$signed()` on such selects. The testbenches
read fixed-point lanes through a flat vector, for the same reason.

## Departures and limits

- **Not built:** the scalar RISC-V core with its bfloat16 extensions, and its
  2 kB instruction and scalar memories. The top level exposes the interface
  that core would drive.
- **Not built:** the CNN's fully connected output layer. Its size and its
  implementation in the accelerator are not specified.
- **The inverse square root** uses Newton–Raphson instead of harmonized
  parabolic synthesis, whose coefficients are not available. The latency is
  the same two stages.
- **The convolution engine's PE count.** Here a processing unit has 16 PEs
  and 18 activation entries, so that one result row is one memory word. The
  reference drawing numbers PE 0–16 with entries 0–17.
- **The CNN schedule** reads each input neighbourhood again for every output
  word. The second layer of the model therefore takes about 2.9 M cycles,
  more than the roughly 2 M cycles per position estimate that was published.
- **A matrix of 256 × 256** fits the memory twice, not three times, so
  A·B → C at that size cannot be held all at once.
- **These are this design's own choices:** the bank skew, the arbitration
  orders, the host ports, the DMA's fixed-point format (Q7.8), the CNN
  memory layouts and the register-file sizes.
- **Vector core stall:** `ext_stall` must not rise in the cycle right after
  a granted vector load, or the load data is lost.
- **Large modules in synthesis:** the systolic array holds 256 complex
  multiply-accumulate units, and the vector core 16 complex multipliers.
  Elaboration is quick, but coarse synthesis of these modules takes a long
  time.
