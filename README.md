# A real-time multi-tau correlator array for a 32x32 single-photon camera

Imaging fluorescence correlation spectroscopy needs one intensity
autocorrelation function (ACF) per pixel, over lag times from the frame period
up to about a second. This design produces all 1024 ACFs of a 32x32 SPAD
(single-photon avalanche diode) array in real time. The camera delivers a
binary frame every 10 us (100,000 frames per second); each pixel bit means
"at least one photon in the last frame period". Every pixel gets a multi-tau
correlator with S = 14 blocks of P = 8 lag channels. The lags run from 0 to
122,872 frame periods, about 1.2 s.

The main idea is heavy hardware reuse:

* **Serial correlator.** All 112 lag channels of a correlator share one
  multiply-accumulate (MAC) datapath. The datapath streams through the
  channel states held in a small RAM, four channels in flight at a time.
  This unit is the CorrPE (correlation processing element).
* **Pixel multiplexing.** One CorrPE serves a whole column of 32 pixels by
  switching between per-pixel "contexts". A context is the 128-word RAM image
  of one correlator. 32 CorrPEs run in lock step, one per column.
* **Background context exchange.** Contexts live in a large background
  memory. Each CorrPE's context RAM is double-buffered, so the next row's
  contexts load, and the previous row's results are written back, while the
  CorrPEs compute.

The SystemVerilog is synthesizable. One clock drives everything; at the
assumed 144 MHz a frame period is 1440 cycles.

```
 SPAD array --> data_acq --+--> raw row stream (to host)
                           |
                           v
                     row_reorder (32 row FIFOs x 2048)
                           |
                           v  one FIFO entry = one row, bit x to column x
                  pixel_scheduler ----------------------------+
                           |  start / sample / swap           | exchange start
            +--------------+--------------+                   v
            v              v              v            context_exchange --> result stream (to host)
        corrpe[0]      corrpe[1]  ...  corrpe[31]         ^          ^
            |port A        |              |               | port B   |
        l1_cache[0]    l1_cache[1] ... l1_cache[31] <-----+          v
                                                              context_store
                                                           (1024 x 128 x 64 bit)
```

## 1. Multi-tau correlation in brief

A linear correlator block with P channels holds a delay line of the "local"
input. Channel p accumulates the product of the current "global" input with
the local input delayed by p samples:

    G[p] += g[n] * l[n - p]

A multi-tau correlator chains S such blocks. Block s+1 does not see the raw
samples. It sees sums of two consecutive inputs of block s. For the global
side these are the block's global inputs; for the local side they are the
values leaving the end of block s's delay line. Block s therefore works on
sums over 2^s samples, runs half as often as block s-1, and its channels are
spaced 2^s samples apart. The lag of channel p of block s, in frame periods,
is

    tau(0,p) = p
    tau(s,p) = sum_{i=1}^{s*P+p} 2^floor((i-1)/P)

which gives 0..7, 8, 10, ..., 22, 24, 28, ..., 52, ... for P = 8.

For an ACF both inputs carry the same pixel signal. For a cross-correlation
they carry two different signals. The CorrPE supports both, but the top level
wires the ACF mode.

Besides the accumulators, each correlator keeps a sample counter and two
*monitors*, the plain sums M_g and M_l of the global and local inputs. The
host normalizes each channel after T samples as

    g(tau_sp) = G_sp / 2^s * T / (M_g * M_l * (T - tau_sp) / T)

using one monitor per input rather than one per channel. Normalization is
floating-point work and is not part of the hardware.

## 2. The CorrPE: one MAC unit for 112 channels

### 2.1 The block schedule

The CorrPE runs one block execution per value of a per-pixel counter c.
Block 0 must run for every new sample; block s may only run after block s-1
has run twice since its last run. A fixed schedule satisfies this:

| block  | runs when                 | low bits of c        |
|--------|---------------------------|----------------------|
| 0      | c mod 2 = 0               | `...0`               |
| 1      | c mod 4 = 3               | `...011`             |
| s >= 2 | c mod 2^(s+1) = 2^s - 3   | `...0101`, `...01101`, ... (bit s is 1) |

For c = 0..15 the schedule reads 0 2 0 1 0 3 0 1 0 2 0 1 0 4 0 1. Every even
c belongs to block 0, and the odd values are shared out among the higher
blocks, half of them to block 1, a quarter to block 2, and so on. Values of c
that would select a block s >= S run nothing.

`block_scheduler` implements each rule as one comparison of the low s+1 bits
of c with a constant. It also produces `pair_done`, which says whether this
execution of block s closes a pair for block s+1. A pair is closed by the
execution of block s that comes just before the next execution of block s+1:

* s = 0: when c mod 4 = 2, i.e. bit 1 of c is set;
* s = 1: when c mod 8 = 7, i.e. bit 2 of c is set;
* s >= 2: when bit s+1 of c is clear.

### 2.2 The visit

Every new sample of a pixel starts one *visit* of that pixel's context. A
visit runs block 0 for counter value c and then whichever block the schedule
gives for c+1, and advances c by 2. A sample therefore costs two block slots.
Because each block runs at half the rate of the one before, the second slot
is always enough for all higher blocks together.

One block execution takes 2P+3 = 19 cycles. A visit takes 2(2P+3)+6 = 44
cycles:

| visit cycle t | phase | work                                                 |
|---------------|-------|------------------------------------------------------|
| 0..2          | prologue | read c, M_g, M_l                                  |
| 3..21         | block slot 0 | block 0 on the new sample (g, l)              |
| 22..40        | block slot 1 | block sched(c+1), if that is < S              |
| 41..43        | epilogue | write c+2, M_g+g, M_l+l                           |

Within a block slot, tau = 0..18 counts the cycles. The slot is built as
follows:

| tau      | RAM port                                   |
|----------|--------------------------------------------|
| 0        | read hand-over word *into* this block (s >= 1) |
| 1        | read hand-over word *out of* this block (s < S-1) |
| 2..5     | Load channels 0..3                          |
| 6..9     | Store channels 0..3                         |
| 10..13   | Load channels 4..7                          |
| 14..17   | Store channels 4..7                         |
| 18       | write hand-over word out of this block      |

Each channel passes through five steps one cycle apart: **L**oad, **W**ait
(the RAM has a two-cycle read latency), **M**ultiply, **A**dd, **S**tore.
Channel j is loaded at tau = 2 + 8*(j/4) + j%4. Four channels overlap in the
pipeline, and their four loads and four stores fall in disjoint cycles. One
RAM port therefore serves everything with no conflicts; an assertion in
`corrpe` checks this. For P > 8 the pattern continues in groups of four;
P must be a multiple of 4.

### 2.3 Moving data along the delay line

Each channel word stores the channel's accumulator and its delay register.
The delay register holds the local value that channel used last time. When
channel j reaches Multiply, the CorrPE does the following:

* The value it multiplies, x_j, is the block's local input for j = 0. For
  j > 0 it is the *old* delay register of channel j-1, read in the previous
  Multiply cycle and held in a register (`carry`).
* It computes `g_in * x_j` and adds it to the accumulator in the next cycle.
* x_j becomes the new delay register of channel j.
* The old delay register of channel j is captured into `carry` for channel
  j+1.

After channel P-1, `carry` holds the value that leaves the delay line.
Together with the block's global input, this value goes to the hand-over word
written at tau = 18.

### 2.4 Hand-over words

Word 113+s carries data from block s to block s+1. It holds four 16-bit
fields:

* `part_g` and `part_l`: the first half of a pair that is not yet complete.
* `ready_g` and `ready_l`: the completed pair sums, which block s+1 will use
  as its global and local inputs at its next execution.

At tau = 18 of block s:

* If `pair_done` is set, `ready = part + (g_in, carry)` and the part fields
  are cleared.
* Otherwise `part = (g_in, carry)` and the ready fields are kept.

Block s+1 reads word 113+s at tau = 0 of its own execution. Block 0 takes
its inputs from the sample instead.

After reset, and while a pixel's correlator fills, a block can run before
any real pair has reached it. It then works on zeros, which leaves its
all-zero state unchanged.

### 2.5 Word sizes

* Samples, pair sums and delay registers are 16 bits. This is enough for
  S <= 16 blocks of 1-bit pixels.
* Accumulators, monitors and the counter are 32 bits.
* All sums wrap silently.

For the 1.2 s runs this design targets (131,072 samples), the worst case is:

* counter: 2^18;
* any accumulator: about T * 2^s <= 2^30;
* any pair sum: 2^13.

All of these fit.

## 3. The pixel context

| word     | contents                                                          |
|----------|-------------------------------------------------------------------|
| 0..111   | channel (s, p) at word s*P + p: `{16'b0, delay[15:0], acc[31:0]}` |
| 112      | counter c                                                        |
| 113..125 | hand-over word of block s = 0..12: `{ready_g, ready_l, part_g, part_l}` |
| 126      | global monitor M_g                                                |
| 127      | local monitor M_l                                                 |

The general formula is S*P + S + 2 words; `corr_pkg` defines the addresses
and the two word structs.

An all-zero context is a correlator that has seen no samples. The system
relies on this when it starts.

## 4. Serving 1024 pixels

### 4.1 Frames, rows and the row FIFOs

`data_acq` reads the 32 rows of a frame from the sensor, once every
FRAME_CYCLES = 1440 cycles. Each row (32 bits plus its index) goes to two
places:

* the raw-data stream for the host;
* `row_reorder`, which holds one FIFO per row index, 32 FIFOs of 2048
  entries of 32 bits (256 KB).

The FIFOs exist because the CorrPEs do not follow the camera's row order. All
32 CorrPEs work on one row at a time, CorrPE x on pixel (x, row), and stay on
that row for a batch of many samples. If a row arrives while its FIFO is full,
the row is dropped and `fifo_overflow` pulses. At the default sizes this does
not happen.

### 4.2 The pixel scheduler

`pixel_scheduler` feeds the CorrPEs from the FIFO of the current row
`cur_row`. Each FIFO entry starts one visit, and bit x goes to CorrPE x. The
next entry is prefetched, so visits follow each other without gaps.

The scheduler switches to the next row, in round-robin order, when two
conditions hold:

* the current row's batch is complete, meaning BATCH = 2048 samples have been
  taken or the FIFO has run empty;
* the CorrPEs are idle.

A switch does two things:

1. It pulses `swap`. Every L1 cache exchanges its two buffers, so the
   contexts of the next row, which were loaded in the background, become
   active.
2. It starts the context exchange. The exchange writes back the row just
   left and preloads the row after the next one.

If the previous exchange is still running, the scheduler waits and raises
`sched_stall`.

At start-up the scheduler first loads row 0, swaps it in, and begins loading
row 1.

### 4.3 The L1 caches and the context exchange

`l1_cache` is the double-buffered context RAM of one CorrPE: two buffers of
128 x 64 bits and two ports. Port A, used by the CorrPE, always addresses the
active buffer. Port B, used by the exchange, always addresses the other one.
Both ports have a read latency of two cycles.

`context_exchange` works through the 32 CorrPEs one after the other. For each
one it does two passes:

* a write-back pass: it reads the idle buffer (the row just left) through
  port B and writes it to `context_store` at context number y*32 + x;
* a load pass: it reads the next row's context from the store and writes it
  into the idle buffer.

Some rows have never been written back since reset. For those, the store
holds no context yet, so the load pass writes zeros and the memory never
needs clearing. An exchange takes about 32 * (2*128 + 4) = 8320 cycles.

### 4.4 Why the defaults keep up

Each frame brings 32 samples for every CorrPE, one per row of its column. At
44 cycles per visit that is 1408 of the 1440 cycles of a frame period, a 98%
load.

A row switch costs the CorrPEs only a few cycles. The exchange runs
concurrently with the visits, so it stays hidden as long as a batch lasts at
least 8320 cycles, which is 190 samples. The FIFOs then absorb the backlog
that builds up while one row is being served.

The full-size simulation confirms this: it runs 26,000 frames at the default
sizes, and no row is dropped.

### 4.5 Results

Every word the exchange writes back also appears on the result port:
`res_valid`, `res_ctx` (pixel y*32 + x), `res_word` and `res_data`. This
happens while `res_enable` is high. Each pixel's complete context therefore
reaches the host once per round of row switches. This provides the
intermediate results for a live view and, at the end of a measurement, the
final accumulators, counter and monitors. The port has no back-pressure.

## 5. Top-level interface (`imfcs_top`)

| port | dir | meaning |
|------|-----|---------|
| `clk`, `rst_n` | in | clock, asynchronous active-low reset |
| `acq_enable` | in | start/stop acquisition (at frame boundaries) |
| `res_enable` | in | enable the result stream |
| `spad_rd`, `spad_row` | out | read request for one sensor row |
| `spad_data[31:0]` | in | the requested row's pixels, one cycle after `spad_rd` |
| `raw_valid`, `raw_row`, `raw_data`, `raw_sof` | out | raw row stream; `raw_sof` marks row 0 of a frame |
| `res_valid`, `res_ctx[9:0]`, `res_word[6:0]`, `res_data[63:0]` | out | result word stream |
| `frame_cnt[31:0]` | out | frames acquired |
| `fifo_overflow` | out | a row was dropped |
| `sched_stall` | out | the scheduler is waiting for the exchange |
| `row_switch`, `cur_row` | out | a row switch happened; the row being processed |

Parameters, with their defaults:

* NX = NY = 32
* S = 14
* P = 8
* FIFO_DEPTH = 2048
* BATCH = 2048
* FRAME_CYCLES = 1440

## 6. Where this design departs from the published one

* **Visit length: 44 cycles instead of 38.** The published CorrPE spends
  2(2P+3) = 38 cycles per sample. Here the counter and both monitors are
  stored in the context like all other state, which adds three load cycles
  and three store cycles. At 144 MHz the single-pixel minimum sample period
  is therefore 305.6 ns, not 264 ns. The 32-row multiplexed operation at
  100 kfps still fits.
* **On-chip arrays stand in for external SRAM.** The published system keeps
  the context store and the row FIFOs in two external SRAMs, and splits
  acquisition and correlation over two FPGAs. Here both memories are plain
  synchronous RAM arrays in a single clock domain. The SRAM controllers,
  board partitioning and the two USB 2.0 links are not modelled. Raw and
  result data leave through plain valid-qualified ports.
* **Context store size.** 1024 contexts of 128 x 64 bits take 8 Mbit
  (1 MiB). The published text gives the same product but states it as
  512 KB. This design follows the 128 x 64-bit context layout.
* **Unspecified details chosen here.** The published description does not
  specify the following, so they are choices of this design:
  * the order of the three hand-over cycles within a block;
  * the packing of the hand-over word;
  * the pairing rule (`pair_done`), taken from the published schedule
    diagram;
  * the batch rule and round-robin row order;
  * the zero-fill on first load;
  * the sensor port timing;
  * the result stream format.
* **Cross-correlation.** The CorrPE computes CCFs when its two inputs differ,
  and its testbench exercises this. The top level ties both inputs to the
  pixel, because the published system does not say how pixel pairs would be
  chosen for CCFs.
* **Normalization** is left to the host, as in the published system.

## 7. Verification

Every module has a self-checking testbench in `tb/`. Each prints
`TB_RESULT checks=<n> failures=<n>` and stops itself with a watchdog. Random
stimulus comes from `$urandom`. The expected values come from independent
models, not from the RTL:

| testbench | what it checks |
|-----------|----------------|
| `tb_block_scheduler` | block selection for every c below 2^17 and random 32-bit c, against the modular rules; `pair_done` against its definition (the next run of block s+1 comes before the next run of block s); never two blocks for one c |
| `tb_corrpe` | two contexts interleaved on one L1 cache, one ACF and one CCF, 24,000 samples each. A reference multi-tau model (pair-sum queues between blocks) predicts every channel word, the counter and the monitors. Also checks the 44-cycle visit and that all 14 blocks receive data. |
| `tb_l1_cache` | both ports writing their own buffers, the two-cycle read latency, buffer swaps (each port then sees what the other wrote) |
| `tb_context_store` | random writes and reads on the full-size store against a model, one-cycle latency |
| `tb_row_reorder` | per-row FIFO order, full and empty flags, dropped rows |
| `tb_data_acq` | frame period, row order, start-of-frame flag, enable at frame boundaries |
| `tb_context_exchange` | zero-fill of never-stored rows, write-back and reload of patterns through a real store, result stream contents and `res_en` gating |
| `tb_pixel_scheduler` | start-up sequence, every sample taken in order from the current row's FIFO, batch limit, switches only when CorrPEs and exchange are idle, round-robin order, `stall` exactly while a switch waits, all samples consumed |
| `tb_imfcs_top` | the whole system at 4x4 pixels, S = 6, P = 4, small FIFOs and batches, 600 frames. It compares the last streamed context of every pixel with a per-pixel reference model fed from the raw stream. It counts each mechanism and fails if one never happens: frames, row switches, exchange stalls, batches ended by an empty FIFO and by the batch limit, result words, intermediate updates, data in every block. |
| `tb_imfcs_full` | the same check with every parameter at its default (32x32, S = 14, P = 8), 26,000 frames. All 14 blocks receive data and no row may be dropped. It takes about three minutes. |
| `tb_imfcs_sine` | the LED measurement of the published work: all pixels see light sine-modulated at 2.5 kHz (40 frames per period), full size, 26,000 frames. Besides the bit-exact context check, it normalizes the results as the host would and checks the pixel-averaged ACF, about 1.5 at lag 40 and 0.5 at lag 20 (measured: 1.48 and 0.50), with its highest value among lags 10..60 at lag 40. |

To simulate with Verilator 5, run from the project root (the directory
holding `rtl/` and `tb/`):

```
verilator --binary --timing --assert -Wno-fatal -Irtl -y rtl +libext+.sv \
    rtl/corr_pkg.sv tb/tb_corrpe.sv --top-module tb_corrpe -o sim
./obj_dir/sim
```

For another testbench, replace `tb_corrpe` with its name.

The three system testbenches share one structure and differ in their sizes,
run lengths and sensor models. To try other sizes, change the parameter list on the
`imfcs_top` instance in `tb_imfcs_top.sv` and the matching localparams.

What has been shown is bit-exact agreement with a behavioural multi-tau model,
over random data and at both sizes. The design has not been run on an FPGA or
against real sensor data.
