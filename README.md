# A streaming FP32 matrix-multiply engine for non-quantized CNN inference

Most FPGA accelerators for convolutional networks get their speed by
quantizing weights and activations to a few bits. This engine does not. Every
value stays IEEE-754 single precision (FP32). The speed comes from two things
instead:

- many floating-point multiply-adds per clock;
- a memory schedule that keeps one operand on chip and streams the other two
  past it.

Convolutional and deconvolutional layers are lowered by host software to
matrix products (im2col style). The engine computes those products. Other
layers stay on the CPU.

The RTL follows the architecture of *Energy-Efficient FPGA Framework for
Non-Quantized Convolutional Neural Networks* (Athanasiadis, Tampouratzis,
Papaefstathiou). In that paper the engine is written in high-level synthesis
(HLS). This is an independent register-transfer implementation of the
structure the paper shows. The paper gives the structure and names of the
blocks, but not their insides. The sizes, protocols, pipeline and number format
details below are this implementation's own. The section "Where this follows
the paper" lists which is which.

## What it computes

```
C[M][N] += A[M][K] * B[K][N]          all FP32, row-major, in external memory
```

This is Darknet's GEMM with both scale factors equal to 1. To get a plain
product, clear C first. Matrices are addressed in 512-bit *beats* of sixteen
FP32 words. Word `j` of a beat sits in bits `[32j+31:32j]`. Element `(r,c)` of
a matrix with `W` columns is word `(r*W+c) mod 16` of beat
`base + (r*W+c)/16`. N and K must be multiples of 16, so that every row starts
on a beat. M may be any value.

## Tiles and passes

B is cut into tiles of `BUFF_K` rows by `BUFF_N` columns. The defaults are 128
by 16. A 16-column tile row is exactly one beat. The engine walks the tiles
with the column block `n0` in the outer loop and the k slice `k0` in the inner
loop. Each tile costs one **pass**:

```
          +---------+      +--------+
 bank B ->| read_b  |----->| bram_b |  (1) load the BUFF_K x BUFF_N tile, then
          +---------+      +--------+
                               | row k, BUFF_N words per clock
          +---------+  Stream_A  v   +------------+  Stream_C_out  +---------+
 bank A ->| read_a  |---------->|hls_kernel |--------------->|         |
          +---------+            +------------+                |         |
          +---------+  Stream_C_in                             | write_c |-> bank C
 bank C ->| read_c  |----------------------------------------->|         |
          +---------+                                          +---------+
                         (2) the dataflow region: all four run concurrently
```

1. `read_b` copies the tile into `bram_b`. Nothing else runs during this step.
2. Four processes then run at once, joined by FIFO streams:
   - `read_a` sends `A[m][k0 .. k0+BUFF_K-1]` for every row `m` of A.
   - `hls_kernel` multiplies each such slice by the tile, giving `BUFF_N`
     partial sums per row.
   - `read_c` sends the current `C[m][n0 .. n0+BUFF_N-1]`.
   - `write_c` adds the old C values to the partial sums and writes them back
     to the same addresses.

The pass ends when `write_c` has written row `M-1`. The next tile is loaded
after that. So when the next pass reads C back, it sees the sums just written.
Each k slice thus adds its contribution to C in turn. After the last slice of a
column block, that block of C holds its full result.

Only the B tile must fit on chip: 8 KiB at the defaults. A and C are streamed
whole, so M can be any size. B is read exactly once in total. A is read once
per column block, and C is read and written once per k slice.

At the right and bottom edges of B a tile can be narrower. This happens when N
is not a multiple of `BUFF_N` or K is not a multiple of `BUFF_K`. The
controller then passes shorter lengths, in beats, to all five blocks:

- `read_b` loads only the valid part of the tile.
- `read_a` sends shorter rows.
- The kernel stops its sum early and emits fewer beats.
- `read_c` and `write_c` touch only the valid columns.

## The kernel

The kernel is the part that does the arithmetic. It has `BUFF_N` lanes, one per
column of the tile. Each lane has one FP32 multiplier and one FP32 adder. Every
clock, all lanes take the same `a[m][k]` and their own `B[k][n]`, and
accumulate. One k step therefore costs one clock for the whole row slice, which
is `BUFF_N` multiplies and `BUFF_N` adds per clock. A row of A costs `BUFF_K`
clocks.

The pipeline has three stages:

| stage    | what happens                                                         |
|----------|----------------------------------------------------------------------|
| issue    | pick word `j` of the held A beat as `a[m][k]`; present `k` to `bram_b` |
| multiply | `bram_b`'s registered row `k` meets `a[m][k]`; `BUFF_N` products are registered |
| add      | `acc[n] = (k == 0) ? p[n] : acc[n] + p[n]`; on the last `k`, the sums also go to the output buffer |

Details that matter when you change this block:

- **A beats.** A Stream_A beat carries 16 consecutive k values. The kernel holds
  one beat and takes the next in the same clock that it issues the 16th word.
  A row therefore streams with no bubble.
- **Summation order.** Sums are built strictly in increasing k:
  `((p0 + p1) + p2) + ...`. Every product and every sum is rounded to FP32.
  Results can differ in the last bits from an implementation that uses a
  different order, such as an adder tree.
- **Output buffer.** A finished row waits in the output buffer, `BUFF_N` words,
  while it drains as `BUFF_N/16` beats into Stream_C_out. The next row
  accumulates meanwhile. Nothing inside the pipeline can stall. Instead, the
  *last* k of a row is not issued until the output buffer is empty. Up to that
  point the pipeline only fills the accumulators, which are free. This
  one-cycle check is the only back-pressure point in the kernel. An assertion
  checks that a finished row never overwrites an undrained one.
- **Rate.** When A arrives in time and Stream_C_out has room, R rows take
  `R * BUFF_K` clocks plus the pipeline depth of 3.

## Streams and flow control

Each stream (`hls_stream`) is a FIFO with valid/ready handshakes on both
sides. A word moves on a clock edge where valid and ready are both high. The
output is first-word fall-through. A producer that has raised valid must hold
valid and its data until the word is taken, and an assertion checks this. The
default depths are 8 for Stream_A, 8 for Stream_C_in and 4 for Stream_C_out.

The memory read ports cannot be stalled on the response side. So `read_a` and
`read_c` only issue a request while

    words in the stream + requests in flight  <  stream depth

The stream therefore always has room for every response. The engine asserts
this. When the kernel is slow, the stream fills and the reader simply stops
asking.

`write_c` consumes one beat from each of its two streams in the same clock,
namely the clock in which the memory accepts the write.

## Floating point

`fp32_mul` and `fp32_add` are combinational IEEE-754 single-precision units
with round-to-nearest-even:

- The multiplier forms the 48-bit significand product, normalises it by at
  most one place, and rounds on a guard bit and a sticky bit.
- The adder orders the operands by magnitude and aligns the smaller one in a
  51-bit field, folding every bit shifted out below that field into a sticky
  bit. It then adds or subtracts, normalises with a leading-one search, and
  rounds.

Like most FPGA floating-point operators, both units read subnormal inputs as
zero and flush subnormal results to a signed zero. Infinities propagate. NaN
inputs, `0 * inf` and `inf - inf` give the quiet NaN `0x7FC00000`. An exact
cancellation gives `+0`.

## Interfaces of the engine (`compute_engine`)

Control:

- Set `cfg_m`, `cfg_n`, `cfg_k` and the beat addresses `base_a`, `base_b`,
  `base_c`.
- Pulse `start`. The inputs are sampled at that start pulse.
- `busy` stays high until `done` pulses for one clock.
- Shapes with `cfg_n` or `cfg_k` equal to zero or not a multiple of 16 are
  refused. `done` then follows at once with `cfg_error` high, and memory is not
  touched.
- `cfg_m = 0` finishes at once without error.

Memory: each matrix has its own set of 512-bit banks: `A_BANKS` for A,
`B_BANKS` for B and `C_BANKS` for C. Every memory port of the engine is
therefore an array with one entry per bank.

- **Bank layout.** Addresses count beats. `base_a`, `base_b` and `base_c` are
  global beat addresses. Beat `a` of a matrix sits in bank `a mod X_BANKS` at
  local address `a div X_BANKS`, so a reader walking consecutive beats uses
  every bank in turn.
- **Splitting.** One `mem_bank_split` per matrix sends each request of the
  engine to its bank. It queues the bank numbers in issue order and holds each
  bank's responses in a small FIFO, so the data reaches the engine in request
  order even when the banks have different latencies. `BANK_OUT` bounds the
  requests in flight, so a bank's response always finds room.
- **A, B and C read ports (per bank):** `*_req_valid/_ready/_addr` for requests, and
  `*_resp_valid/_data` for responses. Responses come back in request order, at
  any latency, one per clock at most, and must be accepted.
- **C write port (per bank):** `c_wr_valid/_ready/_addr/_data`. An accepted write must be
  visible to any later read of the same bank. The engine relies on this, since
  the next pass reads C back.

Reset is asynchronous and active low (`rst_n`). All blocks run from one clock.

### Parameters

| parameter | default | meaning |
|-----------|---------|---------|
| `BUFF_K`  | 128 | rows of the B tile = k values per pass; multiple of 16 |
| `BUFF_N`  | 16  | columns of the B tile = kernel lanes; multiple of 16 |
| `A_DEPTH`, `CI_DEPTH`, `CO_DEPTH` | 8, 8, 4 | depths of Stream_A, Stream_C_in, Stream_C_out |
| `A_BANKS`, `B_BANKS`, `C_BANKS` | 1, 1, 1 | memory banks holding A, B and C |
| `BANK_OUT` | 16 | most reads in flight per matrix across its banks |
| `ADDR_W`  | 32  | beat-address width (2^32 beats = 256 GiB) |
| `DIM_W`   | 32  | width of M, N, K |

The paper names `BUFF_K` and `BUFF_N` but gives no values. The defaults above
are choices: `BUFF_N = 16` makes a tile row exactly one beat. The paper makes
the bank count a parameter but gives no number, so the default is one bank per
matrix. A platform with several banks per matrix, such as HBM channels, sets
the counts higher. Raising `BUFF_N`
adds lanes, which means more multiply-adds per clock and a wider `bram_b` read
port. Raising `BUFF_K` makes the tile, and so the reuse of each A beat, larger.

## Performance model

A pass costs about `max(M * BUFF_K, memory time) + BUFF_K * BUFF_N / 16`
clocks. The first term is the dataflow region. The second is the B tile load,
which is not overlapped with compute. Over a whole product this gives about
`M*N*K / BUFF_N` clocks of kernel time.

The paper evaluates one product: M = 2048, K = 4096, N = 16384 in FP32. With
the default engine, this works out as follows:

- **Shape.** The engine accepts it, in 1024 column blocks times 32 k slices.
- **Work.** 1.37e11 multiply-adds at 16 per clock come to 8.6e9 clocks.
- **Storage.** A (32 MiB), B (256 MiB) and C (128 MiB) are all off chip.
- **Traffic.** A is streamed 1024 times (32 GiB), C is read and written 32
  times each (8 GiB), and B is read once.

The paper reports its measured times only as bars, so no cycle-level
comparison to it is possible.

## Where this follows the paper and where it does not

Taken from the paper:

- Every value is FP32, with no quantization.
- The engine is used for the convolutional and deconvolutional layers, which
  are computed as matrix products.
- The blocks and their connections are those of the paper's Figure 2:
  - Read B fills an on-chip buffer BRAM_B before the dataflow region.
  - Inside the region, Read A feeds Stream_A into the kernel.
  - Read C feeds Stream_C_in directly to Write C, bypassing the kernel.
  - The kernel feeds Stream_C_out to Write C.
- The tile names `BUFF_K` and `BUFF_N`, and the tile shapes drawn in that
  figure.
- 512-bit data transfers.
- Spreading transfers over a parameterizable number of memory banks.
- Several arithmetic operations per clock.

This design's own choices:

- all parameter values;
- the valid/ready and request/response protocols;
- the credit rule;
- beat interleaving across banks, and the bank counts;
- the reading that Write C *adds* the two streams, which makes the engine
  accumulate C across k slices. The figure shows only that both streams enter
  Write C;
- the loop order;
- the three-stage kernel pipeline and its summation order;
- flush-to-zero arithmetic;
- the control interface;
- reset behaviour.

Departures and gaps:

- **Matrix shapes.** The paper says any shape of matrix is handled. Here N and
  K must be multiples of 16. Other shapes must be zero-padded by the host.
- **Multiple SLRs.** The paper's large-FPGA result is labelled with three SLRs
  (the dies of a multi-die FPGA). How work would be shared between dies is not
  described, and this RTL is a single engine.
- **No overlap of tile load and compute.** The B tile load is not
  double-buffered against the pass, which matches the figure, where Read B sits
  outside the dataflow region.
- **Outside this RTL.** The host framework (network parsing, layer lowering,
  the CPU layers), the host link and the memory controllers are not part of
  this RTL.

## Files

`rtl/`:

- `ce_pkg.sv`: shared constants and the FP32 field struct.
- `fp32_mul.sv`, `fp32_add.sv`: FP32 arithmetic.
- `hls_stream.sv`: stream FIFO.
- `bram_b.sv`: the B tile buffer.
- `read_b.sv`, `read_a.sv`, `read_c.sv`: the memory readers.
- `hls_kernel.sv`: the kernel.
- `write_c.sv`: the write-back.
- `mem_bank_split.sv`: spreads one memory port over several banks.
- `compute_engine.sv`: the top level, including the tile-loop controller.

`tb/`:

- One self-checking testbench per block (`tb_<block>.sv`), plus
  `tb_fp32_arith.sv` for the arithmetic units.
- `tb_compute_engine.sv`: the end-to-end test at reduced tile sizes.
- `tb_compute_engine_full.sv`: the same test with every parameter at its
  default.
- `tb_gemm_workload.sv`: the evaluated product scaled down by 16 in each
  dimension, with random FP32 data, at the default parameters.
- `tb_mem_model.sv`: a behavioural memory bank with random stalls.
- `tb_pkg.sv`: conversion helpers.

Each testbench prints `TB_RESULT checks=<n> failures=<n>`.

## How it was verified

- **Arithmetic.** Products and sums are checked against a double-precision
  reference rounded to FP32. For the random add cases the double sum is exact.
  Directed cases cover ties, cancellation, overflow, underflow, infinities and
  NaN.
- **Exact expected values.** The kernel, write-back and engine tests use small
  integers, so every FP32 result is exact and the expected C is formed in
  integer arithmetic.
- **Memory stalls.** The memory model stalls requests and writes at random.
- **Banks.** The splitter test uses three banks with different latencies. It
  checks that every response returns in request order with the right data,
  and that writes land in the right bank. With banks that each take one
  request per three clocks, 300 consecutive reads must finish in fewer than
  600 clocks, where one bank alone would need 900. The end-to-end test spreads
  A and C over two banks each.
- **Mechanisms.** The end-to-end test counts each mechanism and fails if one
  never occurs:
  - B tile reloads;
  - passes that accumulate onto a partial C;
  - moving to the next column block;
  - narrow edge tiles;
  - a full Stream_A (the reader throttling);
  - a full Stream_C_out (write-back holding the kernel);
  - memory stalls;
  - a refused shape;
  - an empty run;
  - reads reaching every bank of A and C.
- **Real floating-point data.** The workload test runs M = 128, K = 256,
  N = 1024 with random FP32 values at the default parameters. Its reference
  rounds exactly as the engine does: every product, every add in increasing k
  order, and one add of each slice's sum to C. All 131,072 results match bit
  for bit. The run takes 2,123,013 clocks against a kernel-bound minimum of
  2,097,152, so the kernel is busy 98% of the time. The test fails if the run
  exceeds that minimum plus the tile loads by more than 25%.
- **Kernel rate.** The kernel test checks that R rows take no more than
  `R * BUFF_K + 6` clocks at full rate.

Not verified: timing closure or resource use on a real FPGA, and the paper's
full-size product, which is far too long to simulate (8.6e9 clocks); the
workload test runs it at 1/16 scale instead.

## Simulating

With Verilator 5, from the directory that holds `rtl/` and `tb/`:

```
verilator --binary --timing --assert -Wno-fatal -Irtl -Itb -y rtl -y tb +libext+.sv \
    rtl/ce_pkg.sv tb/tb_pkg.sv tb/tb_compute_engine.sv --top-module tb_compute_engine
./obj_dir/Vtb_compute_engine
```

Replace `tb_compute_engine` with any other testbench name. `-Wno-fatal` keeps
the testbenches' width warnings from stopping the build. Uninitialised
state is randomised by `+verilator+rand+reset+2`, and every block resets what
it reads.
