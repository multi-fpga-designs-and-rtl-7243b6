# HPC Challenge kernels for FPGAs linked by direct serial channels

Multi-FPGA benchmarks usually move data through the host: FPGA to CPU over PCIe, CPU to
CPU over MPI, and back down. On boards with serial ports wired into a circuit-switched
optical network, the kernels can instead push data straight into a neighbouring FPGA,
one wide word per clock, as part of their own pipelines. This RTL implements the
communication-heavy HPC Challenge kernels in that style, following the multi-FPGA
extension of the HPCC FPGA suite by Meyer, Kenter and Plessl (Paderborn University):

* **b_eff**: a ring of send/receive kernel pairs that measures latency and bandwidth of
  the links;
* **PTRANS**: the distributed transpose-and-add `C = B + A^T`, where the transposed blocks
  of `A` travel over the links;
* **RandomAccess**: the scalable table-update kernel, whose many random-number
  generators are serialised by a valid-tagged shift register.

The four kernels of distributed LINPACK (LU, top, left, inner matrix multiply and the
torus network kernels) are not included; see *What is not here*.

## The node

`hpcc_node` is one FPGA. Its outside world is four full-duplex serial channels and one
global-memory bank per kernel replication.

```
            ch 0..3 tx/rx (256-bit valid/ready)
                 │            ▲
        ┌────────┴─ bench_sel ┴────────┐
        │                              │
  b_eff pair 0 (ch 0,1)          PTRANS pair 0..3 (ch r)
  b_eff pair 1 (ch 2,3)            send: A ─► transpose ─► ch r
   send ◄─exchange─ recv           recv: ch r + B ─► C
   │                 │               │          │
   └─ validation write               └─ A, B, C memory ports
                                   RandomAccess 0..3 ─► table memory ports
```

On the boards used for the benchmark each kernel set is its own bitstream. Here they sit
in one module so that a single top holds the whole design; `bench_sel` gives the channels
either to b_eff or to PTRANS, and the other set sees no data and no ready. RandomAccess
does not use the channels (its table is split between FPGAs by address, and only the
host exchanges results).

Default sizes are those of the Stratix 10 (BittWare 520N) direct-channel build: 2 b_eff
pairs, 4 PTRANS pairs with 512 x 512 blocks and 8 floats per channel word, 4
RandomAccess replications with 32 generators spaced 5 cells apart.

### Conventions

* One clock, synchronous active-high reset.
* Every stream (channel, exchange channel, memory requests, memory writes) is
  valid/ready: a word moves on a rising edge where both are high; a producer keeps valid
  and data stable until then (checked by assertions in the kernels).
* Memory read ports return responses in request order, any number of cycles later, and
  the kernel always accepts them. Addresses are word addresses.
* A kernel starts on a one-cycle `start` pulse that also samples its run parameters,
  raises `busy`, and pulses `done` when its last output has been accepted.
* A channel word is 32 bytes. For PTRANS, value `k` of a word is bits `[32k+31:32k]`.

## b_eff: the exchange loop

A message of `L = 2^msg_size_log` bytes is sent as `ceil(L / 64)` transfers on each of
two channels; one transfer carries a 64-byte *message chunk*, lower half on the first
channel, upper half on the second. The chunk content is what makes the test
self-validating:

1. The first message repeats a generated chunk in which every byte equals
   `msg_size_log` (the binary logarithm of the message size, mod 256).
2. The receive kernel keeps the last word of each channel. Once both channels have
   delivered the whole message it hands the chunk to its own send kernel over an
   internal exchange channel. The send kernel waits for this hand-over before it starts
   the next message, so a message leaves only after the previous one has fully arrived
   at this FPGA.
3. After the last message the receive kernel writes the chunk once to a validation
   buffer instead. If every link passed the data intact, that word still holds the
   generated bytes.

With two FPGAs (or a longer ring) the chunk circulates: FPGA 0 sends, FPGA 1 receives and
forwards to its send kernel, which sends back. The time for `i` messages is then about
`ceil(L/64 B) * i` cycles of the channel clock plus `i` channel latencies, the model the
benchmark uses (`b_L = 2L / (ceil(L/64 B) * 6.4 ns + 520 ns)` at 156.25 MHz). The send
and receive kernels count the two channels separately, so one channel may run ahead of
the other within a message.

Channel width: the board's channel IP is 32 bytes wide and the bandwidth model divides
by 64 B = 2 x 32 B, so `CHANNEL_WIDTH` defaults to 32 bytes. The benchmark's published
build table lists `CHANNEL_WIDTH = 8` for this kernel; that value is not used here.

## PTRANS: transposing a block at one word per cycle

Matrices are split into 512 x 512 blocks, distributed over a square P x P grid of FPGAs
by the host; block `(i, j)` of `A` has to meet block `(j, i)` of `B`, which sits on the
partner FPGA. Each PTRANS pair owns one channel.

### Send kernel (`ptrans_transpose_send`)

The kernel reads a block of `A` row by row from global memory, eight values per word,
and must emit it column by column, eight values per word. An ordinary memory cannot
return eight values of one column in one cycle, so the block memory is split into eight
banks with a diagonal skew:

* element `(i, j)` is stored in bank `(i + j) mod 8`, at address `i*64 + j/8`
  (64 = words per row);
* a row write of columns `8c .. 8c+7` touches banks `(i + 8c + k) mod 8`, all different;
* a column read of rows `8c .. 8c+7` of column `r` touches banks `(r + k) mod 8`, all
  different, each at its own address `(8c + k)*64 + r/8`;
* the eight values read are rotated by `r mod 8` back into row order.

There are two such block memories (double buffering): while one is filled from global
memory, the other is drained into the channel. A block memory is released the cycle its
last word is read, and a fill starts as soon as a memory is free, so after the first fill
the channel sees one word per cycle as long as memory keeps up. The read has one cycle of
latency; the output register doubles as the stall buffer, so the memory read is simply
not advanced while the channel refuses.

Per replication this is 2 x 512 x 512 x 32 bits = 16 Mbit of block memory, 64 Mbit for
the four pairs of a node. The skewed banking is this implementation's own way of
providing what the benchmark only describes as "read transposed from local memory".

### Receive kernel (`ptrans_recv_add`)

Transposed words arrive already in the row-major order of `C`, so the receive kernel
needs no block memory: for each arriving word it takes the matching word of `B` and
writes `B + A^T` to `C` at the same position. Reads of `B` are issued ahead into a
16-word prefetch FIFO; a read is only issued if the FIFO can hold its answer, so a
response never needs to be refused. The sum is registered: a word of `C` leaves one cycle
after its channel word was accepted.

### Float adder (`fp32_add`)

Eight combinational single-precision adders do the addition: align to the larger
exponent with guard, round and sticky bits, add or subtract, normalise by leading-zero
count, round to nearest even. Subnormals are flushed to zero (inputs and outputs);
infinities and NaNs behave as in IEEE 754. The adder is one long combinational path; a
build for 300 MHz would pipeline it.

## RandomAccess: many generators, one update per cycle

The table (8 GB of 64-bit words per FPGA, a power-of-two total over all FPGAs) is split
evenly; replication `q` of the whole system owns words `q * 2^local_size_log` onward.
Every replication on every FPGA walks the *whole* random sequence and keeps only the
numbers whose address (`number mod 2^total_size_log`) falls in its own part. With one
generator, a replication would find a usable number only once every `R` cycles for `R`
replications in the system, so the generator is replicated.

`ra_kernel` has `2^RNG_COUNT_LOG` generators (`ra_rng`, the HPC Challenge recurrence
`x' = 2x XOR (x[63] ? 7 : 0)`), each seeded by the host at its own point of the
sequence. They feed a shift register of `RNG_COUNT * RNG_DISTANCE` cells, each with a
valid flag, that moves one cell per cycle toward the update logic. Generator `k` may
write cell `k * RNG_DISTANCE` counted from the far end:

* a number outside this replication's range is dropped, and the generator moves on;
* a usable number is inserted if its cell is empty after this cycle's shift;
* otherwise the generator stalls, keeping its number, until the cell is free.

The near-end cell issues a table read; the answer is XORed with the number and written
back. Up to 16 updates are in flight in an in-order queue. When the read port refuses,
the whole shift register holds (generators can still fill empty cells). As in the Stratix
10 build of the benchmark, a read is not checked against updates still in flight, so two
updates to the same word close together can lose one; the benchmark's rules accept up
to 1 % wrong table words. `updates` and `rng_stalls` count what happened.

Only the order of updates differs from the single-generator benchmark; the set of
updates is the same.

## Parameters

| module / parameter | default | origin |
|---|---|---|
| `hpcc_node.NUM_CHANNELS` | 4 | channels of the board |
| `BEFF_REPLICATIONS` | 2 | build table (b_eff) |
| `BEFF_CHANNEL_WIDTH` | 32 bytes | board channel width; the build table says 8 |
| `PTRANS_REPLICATIONS` | 4 | build table (PTRANS) |
| `PTRANS_BLOCK_SIZE` | 512 | build table |
| `PTRANS_CHANNEL_WIDTH` | 8 floats | build table |
| `RA_REPLICATIONS` | 4 | build table (RandomAccess) |
| `RA_RNG_COUNT_LOG` | 5 | build table |
| `RA_RNG_DISTANCE` | 5 | build table |
| `RA_LOCAL_ADDR_W` | 28 | 8 GB / 8 B / 4 replications |
| `ptrans_recv_add.B_FIFO_DEPTH` | 16 (power of two) | own choice |
| `ra_kernel.MAX_PENDING` | 16 (power of two) | own choice |

Run-time inputs cover what the host chooses per run: message size (2^0 to 2^20 bytes)
and count, number and base addresses of PTRANS blocks, table sizes, replication index
and seeds for RandomAccess.

## What is not here

* **LINPACK.** The distributed blocked LU decomposition (LU, top and left kernels, the
  three network kernels that route L/U rows and columns through a 2D torus, and the
  8 x 8 register-blocked matrix-multiply kernels) is described in the benchmark only at
  the level of data flow. It would need single-precision multiply and divide units and a
  schedule of its own; it is not part of this RTL.
* **STREAM, FFT, GEMM.** Unchanged single-FPGA kernels from earlier work.
* **Host side.** Seeds, block placement (the diagonal P x P distribution), result
  validation and all PCIe/MPI transfers of the host-based variants are software.
* **Board IP.** The serial channel IP and the DDR memory controllers are vendor parts;
  their signals are the node's ports. The testbenches model them.

## Own choices, in one place

* Sharing one top between b_eff and PTRANS, with a channel select.
* The 64-byte b_eff chunk split over two channels; not forwarding after the last message.
* The skewed eight-bank block memory for the transpose.
* The prefetch FIFO in the PTRANS receive kernel, the queue depth in RandomAccess.
* The valid/ready handshakes, in-order memory responses and word addressing.
* The adder's flush-to-zero of subnormals.
* The RandomAccess range rule (`owner = address >> local_size_log`) and the insertion
  point of each generator (generator 0 at the far end, spacing
  `RNG_DISTANCE`).

## Simulation

All testbenches are self-checking and print `TB_RESULT checks=N failures=M`.

| testbench | what it checks |
|---|---|
| `tb_fp32_add` | 20 000 random sums and special cases against a double-precision reference |
| `tb_beff_send` | word counts, chunk contents, exchange hand-over, cycles per message |
| `tb_beff_recv` | exchange and validation data, no overrun into the next message |
| `tb_ptrans_transpose_send` | every word against the transposed block, stalls, rate |
| `tb_ptrans_recv_add` | every value of C against B + A^T, rate |
| `tb_ra_rng` | the recurrence against arithmetic |
| `tb_ra_kernel` | every write is an expected update, counts, 1 % rule, stalls |
| `tb_hpcc_node` | two nodes back to back at default sizes: b_eff ring timing and validation, two 512 x 512 PTRANS blocks per replication on both nodes, RandomAccess over 8 replications, and that the exchange, back-pressure, fill/drain overlap, generator stall, dropped numbers and the channel select each occurred |

`tb/mem_model.sv` (latency, random stalls, sparse contents) and
`tb/ext_channel_model.sv` (fixed latency, 82 cycles = 520 ns at 156.25 MHz by default)
stand in for the board. `tb/fp32_ref_pkg.sv` holds the float reference conversions.

To run one, for example the node test (about 30 s to build, a few seconds to run):

```
verilator --binary --timing --assert -Wno-fatal -y rtl -y tb +libext+.sv \
  --top-module tb_hpcc_node rtl/hpcc_pkg.sv tb/fp32_ref_pkg.sv tb/tb_hpcc_node.sv
./obj_dir/Vtb_hpcc_node
```

Any other testbench works the same way with its own `--top-module` and file. The
simulator is two-state; everything that is read is reset or loaded by `start`.

## How far to trust it

Each block is checked against references computed independently in the testbench, and
each testbench was shown to fail on a deliberately broken copy of its block. Timing is
checked against the bandwidth models where the benchmark gives one. Nothing has been
through FPGA place and route: the 300 MHz-class clock rates of the original builds are
not claimed, and the combinational float adder in particular would need pipelining.
Memory and channel behaviour rests on the simple models described above, not on the
vendor IP.
