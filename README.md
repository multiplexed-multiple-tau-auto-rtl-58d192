# A time-multiplexed multiple-tau correlator for FCS / FCCS

Fluorescence correlation spectroscopy measures the correlation function
`g(tau) = <I(t) I(t+tau)> / <I>^2` of a photon stream over lag times from
below a microsecond up to tens of seconds. A *multiple-tau* correlator covers
that range with a chain of S small linear correlators ("blocks") of L
channels each: block 0 works on the raw samples, and every following block
works on samples that are the sum of two samples of the previous block, so
the lag spacing doubles from block to block.

The observation behind this design is that block s only needs to run once
every 2^(s+1) sample periods. If block 0 runs in every other period, all the
other blocks fit into the gaps between its runs (1/2 + 1/4 + ... < 1). So a
**single** correlator unit, with L multiply-accumulate channels, can compute
the whole multiple-tau function when the state of every block is kept in
memory and a scheduler picks the block to run in each period. With two
detectors x and y the same unit is time-shared once more, over four
correlation functions: the two auto-correlations xx, yy and the two
cross-correlations xy, yx.

This repository gives synthesizable SystemVerilog for that correlator
("CorrPE", correlation processing element) in both forms:

| configuration | `NCH` | `S` | functions | slots per cycle | shortest lag at 20 MHz | longest lag (L = 8) |
|---|---|---|---|---|---|---|
| CorrPE-2X (default) | 2 | 23 | xx, yy, xy, yx | 4 | 400 ns | 25.2 s |
| CorrPE-1 | 1 | 25 | xx | 1 | 100 ns | 25.2 s |

The design follows the paper by G. Mocsár, B. Kreith et al., "Multiplexed
multiple-tau auto- and cross-correlators on a single FPGA". The original was
written in LabVIEW for a Virtex-II FPGA on a National Instruments PXI-7833R
card. The algorithm, the scheduler, the block update and the word widths
come from that paper. The cycle-level timing, the memory organisation, the
read-out format and the raw-data packing are this implementation's own
choices. They are marked as such below and in each file's header.

## Block state and the update of one block

Block `s` (for one detector channel) holds:

* `Id[s][0..L+1]`: delayed intensities. The L correlation channels use
  `Id[0..L-1]`. The two extra "interleaved" entries `Id[L]`, `Id[L+1]` hold
  the two oldest samples, which are handed on to block s+1.
* `Iu[s]`: the undelayed intensity, i.e. the newest sample of this block.
  `Iu*[s]` is the previous value of `Iu[s]`.
* `M[s]`: the monitor, the sum of all `Iu[s]`. `T[s]`: the number of runs.
* `G[s][0..L-1]`: the correlation channels, one set per correlation function.

One run of block s (`correlator_unit`) does this in a single clock:

```
G[l]      += Iu_b * Id_a[l]          l = 0..L-1   (function (a,b))
Iu[s+1]    = Iu[s] + Iu*[s]          hand-over of the undelayed sample
Id[s+1][0] = Id[s][L] + Id[s][L+1]   hand-over of the delayed sample
Id[l+1]    = Id[l]                   shift, l = 0..L
Iu*[s]     = Iu[s];  M += Iu[s];  T += 1
```

The hand-over words are written after **every** run of block s. Block s+1
runs exactly once between two runs of block s (see the scheduler), so it
always finds the sum of the last two samples of block s. For block 0 the
undelayed sample and `Id[0][0]` come straight from the photon accumulator.
That accumulator sums the photons of the 2·NF clocks since the previous
block-0 run.

With this ordering, channel l of block s correlates windows of 2^s block-0
samples whose distance is the lag of the paper's Eq. 4:

```
tau(0,l) = l
tau(s,l) = tau(s-1,L-1) + 2^(s-1) * (1 + 2l)       (units of the block-0 period)
```

which gives 0..7, 8, 10, ..., 22, 24, 28, ..., 52, ... for L = 8. The end-to-end
testbench checks every G word against this formula, computed directly from
the photon trace.

For a cross-correlation `G(a,b)` the delayed channel is a and the undelayed
one is b, so `G(x,y)` estimates `<I_x(t) I_y(t+tau)>`.

## The scheduler

The block to run in execution cycle `c` is the number of trailing zero bits
of `c` (Eq. 6 of the paper, in closed form Eq. 7):

```
s_c = log2( ((c XOR (c-1)) + 1) / 2 ),   s_0 = 0
```

`block_index` computes the log2 without a priority encoder. It ANDs the
one-hot value with five masks (bit j of mask i is bit i of j). Each non-zero
result is one bit of `s_c`. Block 0 therefore runs in every odd cycle, block 1
in cycles 2, 6, 10, ..., and block s in every 2^(s+1)-th cycle.

A cycle is *empty* (nothing is written) when

* `s_c >= S`, or `c = 0`;
* `s_c = 0` and `c < 3`: block 0 starts in cycle 3;
* `s_c > 0` and block s-1 has run fewer than L+2 = 10 times, so its delay line
  is not yet full.

This gives the first runs at cycles 3, 22, 60, 136, 304, 608, 1216, ...
(L = 8). The paper's closed form `19·2^s - 16` agrees up to s = 3. For larger
s it names cycles that do not belong to block s, so the fill rule is used
instead. The scheduler keeps its own saturating fill counters, because the
`T` words are cleared by every read-out.

Each execution cycle has NF slots, one clock each: NF = 4 (`c_corr` = 0..3 ->
xx, yy, xy, yx) for CorrPE-2X and NF = 1 for CorrPE-1. All slots of a cycle
work on the same block. The state of channel x (shift, `Iu*`, `M`, `T`,
hand-over) advances in the xy slot, and that of channel y in the yx slot.
Each of these is the last slot that reads that channel's delay line, so all
four functions of a cycle see the same data. In CorrPE-1 the single slot
advances it. One slot per 50 ns clock gives block 0 a period of 2·NF clocks:
400 ns for CorrPE-2X and 100 ns for CorrPE-1.

The counter `c` is 32 bits wide. At 20 MHz it wraps after 859 s (CorrPE-2X)
or 215 s (CorrPE-1). The wrap is harmless: cycle 0 is never executed, and the
block-0 start condition is sticky.

## Memory and the single-clock update

`state_ram` keeps all block state: `G` per function and block, everything
else per channel and block. It uses 64-bit words for G and 32-bit words
otherwise, as in the paper. It is written as arrays with asynchronous read,
so that reading a block, updating it and writing it back fit into one clock,
and one slot really is one execution. In the paper's memory map each G lane,
each `Id` lane, `Iu`/`Iu*` and `M`/`T` is a separate dual-port block RAM. A
block-RAM version of this RTL needs one more pipeline stage, plus forwarding
of the hand-over words. In CorrPE-1, block s+1 can run in the clock right
after block s.

Reset (synchronous, active low) clears all state.

## Read-out

After every run of the last block S-1, `readout_unit` copies `G`, `M` and `T`
of all blocks into a separate read-out memory and clears them in the state
memory. Clearing keeps the 32/64-bit counters from overflowing. The host adds
up the successive copies. The copy of a block happens in one clock, and only
in slot 0 of a cycle, before that cycle touches the block. So every copy
contains whole cycles only, and no run is lost or counted twice. If the
correlator runs the copied block in that same clock, it takes the old G as
zero, and its write wins over the clear.

The copy is then sent as 64-bit words on a valid/ready stream:

```
for s in 0..S-1:
    G[s][0..L-1] of function 0, ..., function NF-1     (NF·L words)
    {M[s], T[s]} of channel 0, ..., channel NCH-1      (M in bits 63:32)
```

This is S·(NF·L+NCH) = 782 words per read-out for CorrPE-2X. A read-out
happens every 2^S cycles: every 1.68 s in both configurations. The
transfer itself takes less than a millisecond. A trigger that arrives while
a copy or a transfer is still running is served afterwards. The state keeps
accumulating in the meantime, so a slow FIFO only delays the data and never
loses any.

The host normalises with the paper's asymmetric estimate
`g(tau_s,l) = (T_s - l) · G_s,l(x,y) / (M_s(x) · M_s(y))`. The `- l` accounts
for the first l runs of block s, in which channel l still sees an empty delay
line.

## Raw photon stream

`raw_packer` forwards the photon trace at full 50 ns resolution. It packs
16 clocks × 2 detectors into each 32-bit word (32 clocks for one detector),
with sample i of channel ch at bit `i·NCH + ch`. A word offered while the
FIFO is not ready is dropped, and this sets the sticky `raw_overflow` flag.

## Files

| file | contents |
|---|---|
| `rtl/corr_pkg.sv` | widths, m = 2, slot-to-channel mapping |
| `rtl/corrpe.sv` | top level: CorrPE-2X (`NCH=2`) or CorrPE-1 (`NCH=1`) |
| `rtl/scheduler.sv`, `rtl/block_index.sv` | cycle/slot counters, Eq. 7, empty-cycle rules |
| `rtl/photon_accumulator.sv` | per-detector photon sum for block 0 |
| `rtl/correlator_unit.sv` | the combinational block update |
| `rtl/state_ram.sv` | block state memory with copy-and-clear port |
| `rtl/readout_unit.sv` | copy, clear and stream of the results |
| `rtl/raw_packer.sv` | raw photon stream |
| `tb/tb_*.sv` | one self-checking testbench per module |
| `tb/corrpe_env.sv` | end-to-end environment with an independent reference |
| `tb/tb_corrpe.sv` | end-to-end test, CorrPE-2X (S = 6) and CorrPE-1 (S = 6) |
| `tb/tb_corrpe_full.sv` | default size, up to the first read-out of all 23 blocks |
| `tb/tb_corrpe1_full.sv` | CorrPE-1 at S = 25, up to the first read-out of all 25 blocks |

Top-level ports of `corrpe`: `clk` (20 MHz), `rst_n`, `apd_cnt[NCH]`
(photons per clock, detector x = 0, y = 1, already synchronised), the
read-out stream `dma_valid/dma_data[63:0]/dma_ready`, and the raw stream
`raw_valid/raw_data[31:0]/raw_ready/raw_overflow`.

## Simulation

Every testbench prints `TB_RESULT checks=N failures=M` and ends. With
Verilator 5:

```
verilator --binary --timing --timescale 1ns/1ps -Irtl -Itb -y rtl -y tb +libext+.sv \
    rtl/corr_pkg.sv tb/tb_corrpe.sv --top-module tb_corrpe -o sim
./obj_dir/sim
```

* `tb_corrpe` drives random photons, and FIFOs that stall at random, into
  CorrPE-2X and CorrPE-1 (S = 6, 8-bit cycle counter, so the counter wraps).
  It adds up all read-outs plus the final memory contents and compares every
  G, M and T with a reference. That reference is built from the recorded
  photon trace, using only the lag formula above, the rule "block s runs in
  cycles with s trailing zeros, after block s-1 has run 10 times", and
  "block s sees block-0 samples up to the run at cycle c - (2^s - 1)". The
  testbench also checks the block-0 period, the first-run cycles and the raw
  words. It counts how often each mechanism occurred (both kinds of empty
  slot, hand-over, read-out copy, deferred read-out, copy of the running
  block, FIFO stall, raw overflow, counter wrap) and fails if one never did.
  It runs in a few seconds.
* `tb_corrpe_full` runs the default CorrPE-2X with a photon in every clock
  until the last block (s = 22) has run for the first time, at cycle
  79 691 776, i.e. 319 million clocks. It then checks the complete read-out
  against closed-form values. It takes about 5 minutes.
* `tb_corrpe1_full` does the same for CorrPE-1 at S = 25. Block 24 first
  runs at cycle 318 767 104, which is again about 319 million clocks.
* `tb_scheduler` checks the execution order against the paper's TABLE I and
  TABLE II, the recursion of Eq. 6 and the first-run cycles.

## Where this RTL departs from, or goes beyond, the paper

* **TABLE I, cycle 34.** The paper's table shows an empty execution where
  `s_34 = 1`, although block 1 already ran at cycles 22, 26 and 30. The RTL
  runs block 1 there, as Eq. 6 and the fill rule require.
* **Eq. 8** (`19·2^s - 16`) holds only for s <= 3. See the scheduler section.
* **Lag 0.** Channel 0 of block 0 correlates the current sample with itself
  (lag 0), as the paper's lag formula Eq. 4 requires. The paper's drawing of
  a plain linear correlator puts a delay in front of the first channel
  instead.
* **Hand-over sum.** The paper's introduction describes the sum handed to
  the next block with m+1 indices (`L-1 .. L+m-1`). Its correlator section,
  followed here, uses the two interleaved channels `L` and `L+1`.
* **Longest lag.** With S = 23 (CorrPE-2X) and S = 25 (CorrPE-1), Eq. 4 gives
  a longest lag of 25.2 s. The paper quotes about 24 s.
* **Single-clock execution with array memories** instead of pipelined block
  RAM. The paper does not describe its pipeline.
* **Read-out timing and format**, the deferral of a read-out, the stream
  handshakes, the raw-word format and the overflow flag are not specified in
  the paper and are this implementation's choices. The paper also says the
  host reads the data "with a period of tau_min·2^s". Here the read-out is
  tied to runs of the last block, as in the paper's description of the copy.
* **Photon input** is one bit per 50 ns clock per detector (`CNT_W = 1`). The
  input synchroniser and edge detection for the APD pulses are outside this
  RTL.
* **Not included:** the detectors, the vendor DMA-FIFOs and the host software
  (accumulation and normalisation). The two stream ports are where the FIFOs
  connect.
* **Resources.** The paper reports 5318 slices, 60 block RAMs and 45
  multipliers on the XC2V3000. This RTL computes L = 8 products of 32×32 bits
  in parallel and keeps its state in registers or distributed memory. Its
  size on a given FPGA will therefore differ.
