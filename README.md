# Chimera transformer cluster and QoS-aware shared L2: RTL

Transformer models on a microcontroller need two things that pull in
opposite directions. The accelerator needs bulk bandwidth: an int8 GEMM engine
doing 1024 MACs per cycle has to be fed with 128 bytes per cycle from its local
memory. That local memory is refilled from a shared L2 that several such
clusters use at the same time. The host core, meanwhile, needs to reach the
same L2 for short control messages with a latency it can rely on, even while
the clusters stream.

This RTL implements the data path that resolves that conflict:

* a **transformer accelerator** (16 processing elements, each a 64-way int8
  dot product, with requantization, ReLU/GeLU and a streaming softmax engine
  for attention);
* the **cluster memory** it works from: 128 KiB in 32 banks, shared with the
  cluster's cores through a single-cycle crossbar, plus a 512-bit port for the
  DMA;
* a **cluster DMA** that moves 64-byte lines between L2 and the cluster memory
  with AXI4 bursts;
* a **256 KiB L2 memory island** with five 512-bit AXI4 ports (one per
  cluster), one 32-bit AXI4 port (host), two address-interleaved wide banks
  and a per-bank **QoS arbiter** that lets latency-critical 32-bit accesses
  overtake bulk traffic, with an optional bound so that bulk traffic cannot
  starve.

`chimera_top` joins one accelerator cluster to the memory island. The other
parts of the full chip appear as ports of the top:
* the host core's 32-bit port into the L2;
* the wide ports of the four other clusters;
* the cluster cores' memory ports;
* the accelerator's configuration port;
* the DMA start interface.

All sizes are the chip's own:
* 16 PEs × 64-wide int8 dot products, with a 22-bit dot product and a 26-bit
  accumulator;
* a 64 × 16 × 26-bit partial-sum buffer and a 2 × 1 KiB weight buffer;
* 16 × 64-bit accelerator ports;
* a 128 KiB cluster memory in 32 banks;
* a 256 KiB L2 built as 2 × 16 banks of 2048 × 32 bits;
* five 512-bit ports and one 32-bit port.

## Block hierarchy

```
chimera_top
├── tac_accel                 transformer accelerator
│   ├── tac_streamer  ×2      A: input lines (ports 0-7); B: weights/bias/output (ports 8-15)
│   ├── tac_weight_buffer     2 × 1 KiB ping-pong weight store
│   ├── tac_psum_buffer       64 rows × 16 × 26-bit partial sums
│   ├── tac_pe        ×16     64-way dot product, accumulate, requantize
│   │   └── tac_act           identity / ReLU / GeLU
│   └── tac_softmax           running max / sum per row, 64-wide normalisation
├── cluster_tcdm              128 KiB, 32 × (512 × 64 bit) banks
│   ├── log_xbar              25 masters → 32 banks, round robin
│   └── sram_bank     ×32
├── cluster_dma               L2 ⇄ cluster memory, 512-bit AXI4 master
└── mem_island                256 KiB shared L2
    ├── mi_axi_to_mem ×5 (512 bit) + ×1 (32 bit)
    ├── log_xbar              10 wide streams → 2 wide banks
    ├── log_xbar              2 narrow streams → 32 word banks
    ├── mi_qos_arbiter ×2     wide/narrow arbitration + split into 16 words
    └── sram_bank     ×32     2048 × 32 bit
```

Shared constants, the activation and QoS mode enums, the requantization
struct and the accelerator register map are in `rtl/chimera_pkg.sv`.

## The transformer accelerator

### Dataflow

The accelerator computes `O = act(requant(I·W + B))` on int8 matrices that
live in the cluster memory.

Each cycle one 64-byte chunk of an input row, `I[m, 64k .. 64k+63]`, is
broadcast to all 16 PEs. PE `j` holds the 64 weights of output column
`16n + j` for the same k range. One cycle therefore produces one 64-term
partial product for 16 output elements: 1024 MACs, or 2048 operations.

The controller's loops, outermost first, are:

| loop | step | bound |
|---|---|---|
| m-tile | 64 rows | M |
| n-tile | 16 columns | N |
| k-tile | 64 | K |
| row m | 1 | 64 (or the rest of M) |

For a given (n, k) tile the same weights serve all 64 rows. They are loaded
once into one half of the weight buffer. The partial sums of those 64 rows ×
16 columns stay in the partial-sum buffer from one k-tile to the next:
* on the first k-tile the PE adds the bias instead of a partial sum;
* on the last k-tile it requantizes, applies the activation and the 16 result
  bytes go to the output FIFO.

While the PEs work on one tile, the next tile's weights are fetched into the
other half of the weight buffer. The PEs therefore stall only when input data
is late or the output FIFO is full. A 64 × 256 × 16 GEMM has 256 compute
cycles; it takes 280 cycles from start to done, including bias fetch, the
first weight load and output drain.

**Memory layout.** All addresses are TCDM byte addresses, 8-byte aligned.
* `I` is row-major M × K.
* `W` is stored transposed (N × K, row-major), so the 64 weights of one PE
  are contiguous.
* `B` is N int32 values. Only the low 26 bits enter the accumulator.
* `O` is row-major M × N int8.

K must be a multiple of 64 and N a multiple of 16.

### Requantization and activation

The 26-bit accumulator value is multiplied by an 8-bit factor and shifted
right arithmetically with rounding (`+2^(shift−1)` before the shift). Then an
int8 offset is added and the result saturates to int8. The activation is
applied last:
* **ReLU** clamps negative values to zero.
* **GeLU** uses an integer polynomial approximation of `x·Φ(x)`. The input
  scale is taken as 1/16, so `x = 16` means 1.0. With `u = (|x|·181) >> 8`
  (|x|/√2) and `d = 28 − min(u, 28)`, erf is `(256 − (74·d²) >> 8)/256`.
  The output is `(x·(256 ± erf)) >>> 9`, with the sign of x. It stays within
  ±2 LSB of the real function over all 256 inputs.

The multiplier, shift and offset are one register (`REQUANT`) shared by all
PEs.

### Streams and port sharing

The accelerator has 16 64-bit ports into the cluster crossbar, 128 bytes per
cycle in total. Two `tac_streamer` instances use them:

* **A** (ports 0–7): prefetches input chunks. Its 4-line response FIFO
  decouples TCDM grants from the compute loop.
* **B** (ports 8–15): is shared, in priority order, by output writes (one
  16-byte result row per command), the bias fetch at the start of
  each n-tile, and weight lines (one PE's 64 bytes per line).

A streamer issues a line as up to eight independent word requests. The
crossbar may grant them in different cycles. The line is accepted in the
cycle its last word is granted, so with no conflicts a streamer moves one
line per cycle (64 lines in 65 cycles in the block test). Read requests are
only sent when the response FIFO has room, so a stalled consumer never blocks
a memory bank.

### Attention and the softmax engine

A single attention head `softmax(Q·Kᵀ)·V` runs as two GEMM passes that
share the softmax engine's per-row state:

1. **Q·Kᵀ with `MODE[2]` (accumulate).** As each output row of 16 logits
   leaves the PEs, the softmax engine updates that row's entry in the *max
   buffer* and *sum buffer*. The update happens concurrently with compute.
   The logits themselves are written out as int8 as usual.
2. **A·V with `MODE[3]` (normalise).** The logits are the input matrix of
   this pass. Each 64-byte input chunk is replaced by its 64 probabilities
   before it reaches the PEs. That is one row of 64 softmax values per
   cycle.

The exponential is a power of two, `p(d) = 256 >> floor(d/8)` for a distance
`d = max − x` to the row maximum, and 0 beyond 8 halvings. When a later group
of logits raises the row maximum by Δ, the sum so far is divided by
`2^floor(Δ/8)`. Normalisation multiplies `p` by a reciprocal `65536/sum` and
scales so that 128 stands for 1.0, saturating at 127.

Accuracy against the real softmax:
* Outputs match the integer algorithm bit for bit (checked).
* Against the real softmax of the same logits, the per-entry error stays
  within 32/128.
* Each row's probabilities sum to between 0.375 and 1.25. The widest
  deviation occurs when the maximum grows late in a row, because flooring
  Δ/8 can leave the earlier sum up to 2× too large.

Rows are indexed within a 64-row tile. Attention passes therefore need a
sequence length of at most 64, and `N` = sequence length in the first pass
must be a multiple of 16.

### Programming

| index | register | meaning |
|---|---|---|
| 0 | CTRL | write bit 0 = 1 to start |
| 1 | STATUS | bit 0 busy, bit 1 done |
| 2–5 | I_BASE, W_BASE, B_BASE, O_BASE | byte addresses in the TCDM |
| 6–8 | M, K, N | matrix sizes |
| 9 | REQUANT | [7:0] multiplier, [12:8] shift, [23:16] signed offset |
| 10 | MODE | [1:0] activation (0 identity, 1 ReLU, 2 GeLU), [2] softmax accumulate, [3] softmax normalise |

The register port is a simple request/write-enable bus with a combinational
read. Writes are ignored while a job runs. `done_o` pulses for one cycle at
the end of a job.

## Cluster memory and DMA

**`cluster_tcdm`** is 128 KiB in 32 banks of 512 × 64 bits.
* Addresses are word-interleaved: bank = `addr[7:3]`, row = `addr[16:8]`.
* Twenty-five 64-bit masters (9 cores and the 16 accelerator ports) reach the
  banks through a `log_xbar`. It grants a request in the same cycle and
  returns read data one cycle later, with round-robin arbitration per bank.
* Groups of eight banks form four super banks. One super bank holds a whole
  64-byte line, so the 512-bit DMA port reads or writes a line in one access.
* The wide port always wins its super bank. The narrow masters keep working
  in the other three super banks during that cycle.

**`cluster_dma`** copies `len` bytes (a multiple of 64) between an L2 address
and a TCDM address, in either direction.
* It cuts the copy into AXI4 INCR bursts of at most 64 beats that never cross
  a 4 KiB boundary.
* L2 → TCDM: every R beat is written into the TCDM in the cycle it arrives.
* TCDM → L2: lines are read ahead into a 4-entry FIFO that feeds the W
  channel.
* An aligned 4 KiB copy takes 70 cycles with one burst.

## The L2 memory island

### Interleaving

The 256 KiB are two *wide banks* of 128 KiB. Each wide bank is 16 *word
banks* of 2048 × 32 bits, so a wide bank reads or writes one 64-byte line per
cycle. The address map is:

```
word bank = addr[5:2]    wide bank = addr[6]    row = addr[17:7]
```

Consecutive 64-byte lines alternate between the two wide banks. Two ports
that stream through memory fall into step on different banks after at most
one conflict. Together they then reach the peak of 2 × 64 = 128 bytes per
cycle, which is 563 Gb/s at 550 MHz. In the block test, two ports moved 128
lines in 68 cycles.

### Port adapters

Each AXI4 port ends in an `mi_axi_to_mem`, which turns it into two memory
request streams:
* one for reads, issued one beat per cycle at increasing addresses;
* one for writes, where each W beat becomes a request and the grant is
  `w_ready`.

A port can therefore read and write in the same cycle. Read data passes
through a 4-entry FIFO toward the R channel. Requests are only issued while
the FIFO has room, so a slow AXI master never holds a bank.

The wide streams reach the wide banks through a 512-bit `log_xbar` (10
masters, 2 targets). The two narrow streams reach the 32 word banks through
a 32-bit `log_xbar`. A 64-beat burst takes 68 cycles from AR to the last R
beat.

### QoS arbitration

In front of each wide bank, `mi_qos_arbiter` joins the two worlds. A wide
request needs all 16 word banks at once. Narrow requests each need one. The
policy is selected by `qos_mode_i`:

* **Fixed priority (`QOS_FIXED`).** If any narrow request targets this wide
  bank, the narrow requests are served and the wide request waits. This
  gives the host the lowest latency. It relies on narrow traffic being rare.
* **Bounded priority (`QOS_BOUNDED`).** As above, but after `qos_bound_i`
  consecutive refusals the wide request wins for one cycle. A waiting wide
  stream is thus refused at most `qos_bound_i` times in a row, whatever the
  narrow load.

Narrow accesses on different word banks are served in the same cycle. A
narrow read takes 3 cycles from AR to R through the island. In the
end-to-end test, the host's reads stayed at 3 cycles while the DMA and
another cluster streamed through the same region. The bounded mode forced
wide grants during a host burst of writes.

## Top-level interface

`chimera_top` has one clock and an active-low asynchronous reset.

Its ports:

| ports | purpose |
|---|---|
| `oc_*` | AXI4 512-bit slave ports 1–4 of the L2, for the other four clusters. Port 0 belongs to this cluster's DMA. |
| `h_*` | The 32-bit AXI4 slave port of the L2, for the host. |
| `core_*` | Nine 64-bit TCDM master ports, for the cluster's eight compute cores and its DMA-control core. |
| `acc_cfg_*`, `acc_done_o` | The accelerator's register port. |
| `dma_*` | Start, direction, addresses, length, busy and done of the DMA. |
| `qos_mode_i`, `qos_bound_i` | The L2 arbitration policy. |

All AXI4 ports use INCR bursts whose beat size equals the bus width. They
handle one outstanding burst per direction.

## Verification

Every module has a self-checking testbench in `tb/`, named `tb_<module>`.
Each one:
* compares the block with a reference model written inside the testbench;
* has a watchdog;
* prints `TB_RESULT checks=<n> failures=<n>`.

| testbench | what it checks |
|---|---|
| `tb_tac_act` | all 256 inputs in every mode; GeLU against the real function |
| `tb_tac_pe` | dot product, bias/partial-sum selection, requantization, output timing |
| `tb_tac_psum_buffer`, `tb_sram_bank` | random traffic against a model |
| `tb_tac_weight_buffer` | ordering, writing one half while the other is read, back-pressure |
| `tb_tac_softmax` | bit-exact algorithm and distance to the real softmax |
| `tb_tac_streamer` | random grants and consumer stalls; one line per cycle |
| `tb_tac_accel` | see below |
| `tb_log_xbar` | data, one grant per bank, round-robin wait ≤ NM−1 |
| `tb_cluster_tcdm` | byte-exact model with wide and narrow traffic, wide priority |
| `tb_cluster_dma` | random copies both ways; 4 KiB rule and burst length; 4 KiB in ≤ 76 cycles |
| `tb_mi_axi_to_mem` | concurrent random bursts, ids, `r_last`; 64 beats in ≤ 70 cycles |
| `tb_mi_qos_arbiter` | the two policies and their bound, data |
| `tb_mem_island` | interleaving bandwidth, narrow latency under load in both modes |

`tb_tac_accel` runs three jobs:
* a 70 × 128 × 32 GEMM with ReLU, which also exercises the M-tile loop;
* a throughput test;
* a full 64-token attention head against a reference.

**`tb_chimera_top`** runs the whole top at its default parameters:
1. Load operands into L2 through a cluster port.
2. DMA them into the cluster.
3. Run a GEMM while a core hammers the cluster memory and the DMA prefetches
   the next job's input.
4. DMA the result back and check it from the host port.
5. Run an attention head: two passes, with DMA and another cluster's burst
   reads running at the same time, and the host reading the results under
   load.
6. Repeat in bounded QoS mode with a host burst.

It counts the following and fails if any count stays at zero:
* accelerator stalls;
* wide DMA accesses to the TCDM;
* weight prefetch overlapping compute;
* softmax accumulate and normalise steps;
* use of both L2 wide banks;
* QoS contention;
* forced wide grants;
* DMA read and write bursts;
* core stalls;
* a DMA transfer into the TCDM while the accelerator computes (prefetching
  the next job's Q).

**`tb_matmul_workloads`** runs the six matrix sizes of the chip's
single-cluster study on the accelerator and the full 128 KiB cluster memory.
The sizes run from 64 × 128 × 64 to 128 × 512 × 64; the largest uses
104 KiB of operands. The test checks every output byte and requires at least
80 % of the ideal rate. Measured, against `M·K·N/1024` cycles:

| M × K × N | cycles | ideal | utilisation |
|---|---|---|---|
| 64 × 128 × 64 | 613 | 512 | 83 % |
| 64 × 256 × 64 | 1123 | 1024 | 91 % |
| 64 × 512 × 64 | 2147 | 2048 | 95 % |
| 128 × 128 × 64 | 1204 | 1024 | 85 % |
| 128 × 128 × 128 | 2358 | 2048 | 86 % |
| 128 × 512 × 64 | 4271 | 4096 | 95 % |

**`tb_qos_workload`** repeats the chip's QoS experiment on the memory
island. 20,000 host reads of 32 bits go through the narrow port while a
cluster DMA streams burst reads over the same 16 KiB. The burst length is
swept from 64 B to 8192 B, with 2,500 reads at each length. The worst narrow
latency stays at 3 cycles at every length, and the average does not depend
on the burst length.

Each block was also run against a deliberately broken copy, and its
testbench reported failures.

Build and run a test with plain Verilator. The package must come first:

```
verilator --binary --timing --assert -y rtl rtl/chimera_pkg.sv tb/tb_chimera_top.sv \
          --top-module tb_chimera_top -Mdir obj
./obj/Vtb_chimera_top
```

The top-level test builds in about a minute and simulates in under a second.

## Where this RTL departs from the chip

* **Not built.** The following parts appear only as ports of the top:
  * the RISC-V cores (host, eight cluster cores, DMA-control core);
  * the instruction cache, boot ROM and peripherals;
  * the FLLs, pads, debug and interrupt logic;
  * the system-level and cluster-level AXI crossbars;
  * the other four clusters.
* **One clock.** The chip runs the clusters in their own clock domain, with
  AXI clock-domain crossings and clock gates at the cluster boundary. Here
  everything shares one clock.
* **Latency figures.** The chip's 34-cycle worst case for a host access is a
  system figure that includes the core and its interconnect. Through this
  island alone a narrow read takes 3 cycles under load.
* **Accelerator internals** that are this design's own:
  * the requantizer;
  * the GeLU approximation;
  * the softmax's power-of-two exponent and its accuracy;
  * the static split of the 16 ports between the input stream and the
    shared weight/bias/output stream;
  * the register map;
  * the ≤ 64 sequence limit for attention.
* **Memory system choices** that are this design's own:
  * the interleaving bit positions;
  * round-robin arbitration in the crossbars;
  * the wide-port priority in the cluster memory;
  * one burst per direction per AXI port;
  * the DMA as a simple one-dimensional copy engine.
* **Full networks.** MobileBERT, Whisper-Tiny and DINOv2-S need tens of MB of
  weights, streamed from off-chip memory, which is not part of this RTL.
  Their sequences are longer than the 64 keys a softmax row holds here.
