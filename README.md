# A bit-serial matrix multiplication overlay

This is SystemVerilog RTL for a precision-scalable integer matrix multiplier.
The design is the BISMO overlay (Umuroglu, Rasnayake and Själander, "BISMO: A
Scalable Bit-Serial Matrix Multiplication Overlay for Reconfigurable
Computing"). The authors built their version in Chisel for Xilinx FPGAs. This
code was written from the published description. It is not the authors' code,
and where the description stops, the choices made here are listed below.

## The idea: a product of integers as a sum of binary products

Write an `l`-bit matrix `L` as a sum of bit planes, `L = sum_i 2^i L[i]`. Each
`L[i]` is a 0/1 matrix. Do the same for an `r`-bit matrix `R`. Then

    P = L * R = sum_i sum_j  w(i,j) * (L[i] * R[j]),     w(i,j) = ±2^(i+j)

In two's complement the top bit plane has a negative weight. So `w(i,j)` is
negative when exactly one of `i`, `j` is a top plane. A binary matrix product
needs only AND and popcount. The dot product of two `k`-bit rows is
`popcount(a & b)`.

The hardware therefore has one fixed datapath, a large array of binary dot
product units, and runs it `l*r` times. Each pass applies a different shift,
and negates the result when the weight is negative. An 8-bit by 8-bit product
costs 64 passes, a 2-bit by 1-bit product costs 2. The same hardware handles
any precision, signed or unsigned. Lower precision finishes sooner. The
precision is a property of the instruction stream, not of the hardware.

## Architecture

```
            main memory (read, F bits)                     main memory (write, R bits)
                   |                                                 ^
             +-----v------+    +----------------+    +-----+   +-----+-------+   +--------------+
             | fetch      |--->| matrix buffers |--->| DPA |-->|result buffer|-->| result stage |
             | stage      |    | DM LHS, DN RHS |    |DMxDN|   |  BR entries |   |(stream writer|
             +-----^------+    +----------------+    +--^--+   +-------------+   +------^-------+
                   |                                    |                             |
             fetch controller <==tokens==> execute controller <==tokens==> result controller
                   ^                                    ^                             ^
             instruction queue                  instruction queue              instruction queue
```

The overlay is a three-stage pipeline at the level of whole operations:

* **Fetch** (`fetch_stage`) reads bit-plane data from main memory. It writes
  that data into `DM` left-hand-side (LHS) and `DN` right-hand-side (RHS)
  matrix buffers.
* **Execute** (`execute_stage`) streams `DK`-bit words out of all buffers at
  once. Those words go through the `DM x DN` dot product array (`dpa`). When
  it is told to, it copies the accumulators into the result buffer.
* **Result** (`result_stage`) writes one result-buffer entry (a `DM x DN` tile)
  to main memory.

The stages share data only through the buffers. They never wait for each
other implicitly. Each stage has its own instruction queue (`fifo`) and
controller (`stage_controller`), and runs its queue in order. Four token FIFOs
(`token_fifo`) link neighbouring stages, one per direction. `SIGNAL` puts a
token in and blocks while the FIFO is full. `WAIT` takes one out and blocks
while it is empty. Tokens carry no data. The program decides what they mean,
usually "the buffers you need are now full" or "the buffers you filled are now
free". This is the only synchronization. If the program gets it wrong, a stage
overwrites a buffer that another stage is still reading.

Top-level ports of `bismo_top`:

| port group | signals | protocol |
|---|---|---|
| instruction queues | `fetch_instr_*`, `exec_instr_*`, `result_instr_*` | valid/ready push; a transfer happens on a clock edge with both high |
| memory read | `rd_req_valid/ready/addr`, `rd_resp_valid/data` | one request per `F`-bit word, byte address; responses in request order, never stalled by the overlay |
| memory write | `wr_valid/ready/addr/data` | one `R`-bit word per request, byte address; a write is complete when accepted |
| status | `idle` | all queues empty and no stage busy |

Clock `clk`, synchronous active-low reset `rst_n`.

## The dot product unit and the array

`dpu` follows the source's DPU diagram stage for stage:

    lhs & rhs -> popcount -> << shift -> negate? -> + acc -> acc

There are three register stages. The first registers the popcount. The second
registers the shifted and possibly negated contribution. The third is the
accumulator. Operands presented in cycle `t` show up in `acc` from cycle `t+3`.
One operand pair can be accepted every cycle. With `acc_clear`, the
accumulator loads the contribution instead of adding it; this starts a new
dot product. Arithmetic wraps at `A` bits.

`dpa` instantiates `DM x DN` DPUs. DPU `(i,j)` sees LHS buffer `i` and RHS
buffer `j`, so each buffer's word is broadcast along a row or a column. Shift,
negate, clear and valid are common to the whole array. At the default size one
cycle performs 64 binary dot products of 256 bits each. That is
2·256·64 = 32768 binary operations per cycle, counting AND and popcount as one
operation per bit each.

## Fetch: where the words go

`stream_reader` is a DMA engine and a route generator. A `RunFetch` describes
`num_blocks` blocks of `block_size` bytes. The blocks start `block_offset`
bytes apart, so an offset larger than the size gives a strided read. The reader
issues one read request per 64-bit word.

Every response gets a destination: a buffer id and an address inside that
buffer. Buffer ids run `0..DM-1` for the LHS buffers, then `DM..DM+DN-1` for
the RHS buffers. Counting responses `i = 0, 1, ...` and writing
`W = words_per_buf`:

    buffer  = buf_start + (i / W) mod buf_range
    address = buf_offset + (i / (W * buf_range)) * W + (i mod W)      (in F-bit words)

So `W` words go to one buffer, then the next `W` to the next buffer, cyclically
over `buf_range` buffers. After each full round the address moves on by `W`.
With bit-packed, row-major planes, one instruction does the following: it
fetches `DM` rows of every bit plane of `L` (one block per plane, strided by
the plane size), and leaves row `r` of plane `p` in buffer `r` at address
`p*W`.

Packets then travel through `fetch_interconnect`. This is two chains of router
nodes (`fetch_router`), one along the LHS buffers and one along the RHS
buffers. Each node registers the packet, passes it on, and writes it into its
buffer when the id matches. The chains are as wide as the memory channel, so
fetching runs at one word per cycle. There is no backpressure anywhere after
the read request. The program must only start a fetch into buffers that are
free, which is what the tokens are for. `fetch_stage` reports done
`max(DM,DN)+1` cycles after the last response, once the last word has been
written.

`matrix_buffer` is a simple dual-port RAM. It has an `F`-bit write port and a
`DK`-bit read port. `F`-bit word `a` lands in `DK`-bit word `a / (DK/F)`, at
bit `(a mod (DK/F))*F`. So the addresses in a fetch instruction count 64-bit
words, while those in an execute instruction count `DK`-bit words.

## Execute: one instruction, one weighted binary product

A `RunExecute` reads `num_words` consecutive words, starting at `lhs_offset`
from every LHS buffer and at `rhs_offset` from every RHS buffer. A single
address counter feeds both sides. All `DM x DN` accumulators are updated with
weight `(negate ? -1 : 1) * 2^shift`.

To compute one output tile of an `l x r`-bit product, issue `l*r`
instructions. Each one picks the plane offsets of `L[i]` and `R[j]` and sets
`shift = i+j`. For signed operands it also sets `negate`. `acc_clear` goes on
the first instruction and `write_en` (with a result-buffer entry) on the last.

Timing: with `start` in cycle `t`, reads go out in cycles `t+1 .. t+N`. Done,
and the result-buffer write, come in cycle `t+N+4`: one cycle of buffer read
plus three DPU stages. The next instruction starts only after that. Each
instruction therefore costs about `N + 5` cycles for `N` words of useful work.
Short rows use the array poorly and long rows approach one word per cycle. The
source reports the same effect and names this drain as the cause.

## Result: tiles back to memory

`result_buffer` holds `BR` (default 2) complete tiles in registers. With two
entries, the execute stage can compute the next tile while the result stage
writes out the previous one.

`result_stage` reads an entry and narrows it with a `downsizer` (2048 bits in,
64 bits out, least significant word first). It then writes tile row `i` to
`base_addr + offset + i*row_stride`. Each row is `DN` accumulators, column 0
in the low bits, so `DN*A/R` words per row. With `row_stride` = the byte width
of a full result row and `offset` = the tile's position, a large result matrix
is assembled tile by tile.

## Instruction formats

The three queues take packed structs from `bismo_pkg`. Every instruction has
`op` (`OP_RUN`, `OP_WAIT`, `OP_SIGNAL`) and `chan`. `chan` matters only to the
execute stage: 0 selects the fetch FIFOs and 1 the result FIFOs. The `run`
fields are listed below, most significant first.

| stage | `run` fields (bits) |
|---|---|
| fetch (`fetch_run_t`, 144 b) | `base_addr` 32, `block_size` 16 (bytes), `block_offset` 32 (bytes), `num_blocks` 16, `buf_offset` 16 (64-bit words), `buf_start` 8, `buf_range` 8, `words_per_buf` 16 |
| execute (`exec_run_t`, 61 b) | `lhs_offset` 16, `rhs_offset` 16 (DK-bit words), `num_words` 16, `shift` 6, `negate` 1, `acc_clear` 1, `write_en` 1, `write_addr` 4 |
| result (`result_run_t`, 100 b) | `base_addr` 32, `offset` 32, `row_stride` 32, `rb_addr` 4 |

A tiled schedule that keeps all three stages busy, in outline. This is what
`tb/bismo_e2e_driver.sv` issues. Tile `t` covers `DM` rows of `L` and `DN`
columns of `R`:

```
fetch : [WAIT]  RUN(L rows, all planes)  RUN(R cols, all planes)  SIGNAL
exec  : WAIT(fetch)  [WAIT(result) if t >= BR]  RUN x l*r  [SIGNAL(fetch)]  SIGNAL(result)
result: WAIT  RUN(entry t mod BR, offset of tile t)  [SIGNAL if tile t+BR exists]
```

## Parameters

| parameter | default | meaning | origin |
|---|---|---|---|
| `DM`, `DN` | 8, 8 | DPU rows / columns | largest evaluated instance (6.5 binary TOPS at 200 MHz) |
| `DK` | 256 | bits per DPU operand (popcount width) | same instance |
| `BM`, `BN` | 1024 | depth of LHS / RHS buffers in `DK`-bit words | not given; inferred from the published block-RAM count of that instance |
| `BR` | 2 | result buffer entries | given |
| `A` | 32 | accumulator width | given |
| `F`, `R` | 64, 64 | memory read / write channel width | given |
| `IQ_DEPTH` | 16 | instruction queue depth | not given |
| `SQ_DEPTH` | 8 | token FIFO depth | not given (the source's drawing shows eight slots) |

Constraints: `DK` must be a multiple of `F`, `DN*A` a multiple of `R`, and
`BR <= 16`. `DM+DN` must be at most 256, and a buffer at most 65536 64-bit
words (the widths of the instruction fields).

## Where this RTL departs from or adds to the source

* **Added instruction fields.** The published instruction summary gives the
  execute stage only an offset, a weight and an accumulator reset. Here it
  also has separate LHS/RHS offsets (the text says the two sides use "different
  offsets"), a length, and a result-buffer write flag and entry. The result
  stage gets a row stride and a result-buffer entry in addition to base
  address and offset. Without them the operations described cannot be
  expressed.
* **Buffer numbering.** The source enumerates buffers "from zero to
  `D_m·D_n−1`", but its datapath drawing has `D_m+D_n` buffers. The drawing is
  followed.
* **Placement rule** of the route generator, **pipeline register positions**
  in the DPU, **one-word memory requests**, the **handshakes**, field
  **widths** and **reset** behaviour are this design's choices.
* **Popcount** is written as a plain sum. The source only characterizes the
  cost of the one it used.
* **Execute efficiency.** The source reports the execute stage of the 256-bit
  instance at 64% of peak for rows of 8192 bits. This RTL measures 91% there
  (32 words in 35 cycles, see below). The source's pipeline is deeper (it
  mentions registers added for timing closure), and that depth is not
  reproduced. For the same reason the multi-bit runtimes here are a few
  cycles per instruction above `w*a` times the binary runtime. The source
  measured slightly below that, on a different instance and with a pipeline
  that is not described.
* **Stage overlap.** On the source's overlap experiment, the schedule used
  here gains 1.79x. The source reports 2.2x (121133 against 266510 cycles).
  The source does not give its schedule, so the two cannot be compared cycle
  for cycle.
* **Not built:** main memory and the host CPU, whose software generates the
  instruction streams. The testbenches contain a memory model and write the
  instruction streams themselves. Resource and power figures from the source
  (LUT cost model, BRAM counts, power) have not been measured on this RTL.

## Verification

Every module has a self-checking testbench `tb/tb_<module>.sv`. Each compares
against a model computed independently in the testbench. Each has a watchdog
and prints `TB_RESULT checks=N failures=M`. Latency is checked where it is
specified above: DPU 3 cycles, execute `N+4`, interconnect hop counts, and
buffer read latency.

End-to-end tests run the whole overlay against `tb/main_memory_model.sv`. That
model randomly withholds `ready` on requests and returns reads after a fixed
latency. `tb/bismo_e2e_driver.sv` generates random matrices, bit-packs them,
builds the three instruction streams, checks every element of `P`, and counts
that each mechanism happened at least once. The mechanisms are:

* blocking `WAIT` in every stage;
* a blocking `SIGNAL`;
* memory backpressure on reads and writes;
* a full instruction queue;
* accumulator clear, shift and negation;
* both result-buffer entries;
* writes to every matrix buffer.

* `tb_bismo_top`: a 3x2 array of 128-bit DPUs computes a signed 6x512x4
  product of 3-bit by 2-bit operands in four tiles.
* `tb_bismo_full`: the default configuration computes an unsigned 16x1024x16
  product of 2-bit by 3-bit operands in four 8x8 tiles, in about 3900 cycles.
  It finishes in well under a minute of simulation.

## Measured behaviour

Three further testbenches run the experiments the design was evaluated with
and print their measurements.

**The 2x2 example schedule** (`tb_bismo_example`). `L = [2 0; 1 3]` times
`R = [0 1; 1 2]`, both 2-bit, on a 2x2 array. The three queues hold exactly
this program:

```
fetch : RUN L0, RUN R0, SIGNAL, RUN L1, SIGNAL, WAIT, RUN R1 (over R0), SIGNAL
exec  : WAIT, RUN L0.R0, WAIT, RUN 2*L1.R0, SIGNAL, WAIT, RUN 2*L0.R1, RUN 4*L1.R1 + write, SIGNAL(result)
result: WAIT, RUN
```

Only three of the four planes fit, so `R1` is written over `R0`. The test
checks `P = [0 2; 3 7]`. It also checks that the fetch stage blocks on its
`WAIT`, and that `R1` reaches the buffer only after the instruction still
reading `R0` has finished. The whole program takes 87 cycles.

**Execute runtime** (`tb_bismo_runtime`, default configuration, 8 x k x 8).
Runtime is counted from the first word into the array to the result-buffer
write. Memory is not on this path. For binary operands:

| k | 256 | 1024 | 2048 | 4096 | 8192 | 16384 | 32768 | 131072 |
|---|---|---|---|---|---|---|---|---|
| words per row | 1 | 4 | 8 | 16 | 32 | 64 | 128 | 512 |
| cycles | 4 | 7 | 11 | 19 | 35 | 67 | 131 | 515 |
| efficiency | 25% | 57% | 73% | 84% | 91% | 96% | 98% | 99% |

With `w x a`-bit operands the cost grows linearly: 11, 24, 37, 50 cycles for
1, 2, 3, 4 bit products at k = 2048, and 67, 136, 205, 274 at k = 16384. Each
extra instruction costs 5 cycles beyond its words (one to start, four to
drain the pipeline). The test checks every result element and these bounds.

**Other array shapes** (`tb_bismo_instances`). Six array shapes `DM x DK x DN`
are built side by side: 8x64x8, 8x128x8, 8x256x8, 4x256x4, 8x256x4 and 4x512x4.
These are the configurations the design was evaluated in. Each computes a
signed 2-bit tile of width `4*DK` with random memory stalls. Each takes the
same 34 execute cycles: 4 instructions of 4 words, plus the drain. Their peak
rates, `2*DM*DN*DK` binary operations per cycle, are 1638.4 to 6553.6 GOPS at
200 MHz.

**Stage overlap** (`tb_bismo_overlap`). A 256 x 4096 x 256 binary product runs
on an 8x8 array of 64-bit DPUs with 1024-word buffers. Each operand is 128 KiB,
twice what the buffers on its side hold. The buffer depth of 1024 is chosen so that the
two operands together are twice the on-chip buffer storage, which is how the
experiment is described. The block-RAM count published for that instance
does not decode into a whole number of 1024-word buffers. One half of `R`'s columns stays
resident in the RHS buffers. The row bands of `L` stream through two LHS
slots. The same product is then run twice:

* With the stages overlapped (double-buffered `L`, two result entries), it
  takes 90360 cycles.
* With each stage waiting for the previous one to finish, it takes 161323
  cycles.

The speedup is 1.79x. The DPA is busy for 65536 cycles in both runs. The test
checks all 65536 elements of both results. The schedule is in
`tb/bismo_sched_run.sv`.

To run one with Verilator:

```
verilator --binary --timing --assert -Wno-fatal -y rtl -y tb +libext+.sv \
    rtl/bismo_pkg.sv tb/tb_bismo_full.sv --top-module tb_bismo_full
./obj_dir/Vtb_bismo_full
```

Two-state simulators start undriven state at random values. All control state
is reset, while the buffer contents are not. A program must fill a buffer
before reading it.
