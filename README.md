# In-memory spatio-temporal hyperdimensional encoder

This is synthesizable SystemVerilog for a hyperdimensional-computing (HDC) encoder for
multi-channel time series such as EMG or EEG. The architecture follows Karunaratne et al., "Energy
Efficient In-memory Hyperdimensional Encoding for Spatio-temporal Signal Processing" (IEEE
TCAS-II, 2021). The RTL is an independent implementation. Where that description leaves details
open, this design makes its own choices, and the sections below say which ones.

The encoder reads the last *N* quantized samples of each of *M* channels. From them it forms one
*D*-bit binary hypervector, the **N-gram**. A downstream associative memory compares that vector
with stored class prototypes to classify the signal, for example a hand gesture. The default size
is the one the architecture was evaluated with: D = 10,000 dimensions and M = 4 channels, with
N-gram sizes up to 9 and up to 21 quantization levels.

## The encoding, and why it suits a memory array

Classic spatio-temporal HDC encoding needs two tables:

* an item memory of quasi-orthogonal channel vectors `E_m`;
* a continuous item memory `CiM(l)`, in which the Hamming distance between two levels grows in
  proportion to their difference: `HamD(CiM(l_i), CiM(l_j)) = floor(D*|l_i-l_j| / (2*|l_L-l_1|))`.

Each sample is bound to its channel (XOR), the channels are bundled by a per-dimension majority,
and N consecutive spatial vectors are then bound with permutations.

This architecture changes two things so that almost all of the work becomes memory reads:

1. **Pre-computed channel-bound vectors.** `I_m^l = CiM(l) XOR E_m` is computed off line for every
   channel m and level l and stored as one row of a crossbar memory. Encoding never computes an
   XOR between `CiM` and `E`: it selects a row.
2. **Temporal first, spatial last.** Each channel is encoded over time on its own, and only then
   are the channels bundled:

   ```
   T_m = rho^(N-1) I_{1,m}  ^  rho^(N-2) I_{2,m}  ^ ... ^  I_{N,m}     (I_{1,m} is the oldest sample)
   G'  = Majority(T_1, ..., T_M)
   ```

   `rho` is a circular right shift by one dimension: bit j moves to bit j+1, and bit D-1 wraps to
   bit 0. One row of XOR gates and one row of registers, used over and over, can therefore do all
   the binding. Because each channel is handled on its own, each channel may also have its own N
   and its own number of levels L.

The hardware never needs `E_m` or `CiM` at run time. Whoever programs the crossbar builds them.
One way is to draw a random `CiM(l_1)`, then flip about `D / (2(L-1))` fresh positions per level
step, and XOR the result with a random `E_m` per channel.

## Block structure

```
 s_level[m], s_valid[m]        +-------------------+      +------------------+
 ---------------------------->| circular_buffer   |----->| crossbar_array   |  M*L_MAX rows x D
                              |  M regions, wp_m   | row  |  row decoder,    |  row offset_m+l = I_m^l
                              |  one rp, + offset  | addr |  sense amps      |
                              +-------------------+      +--------+---------+
                                        ^                          | D bits
                                        |                 +--------v---------+
 cfg_m, cfg_ch[m] (N, L) --> encoder_controller --------->| binder           |  T_m
                                        |                 |  D x (XOR + reg) |
                                        |                 +--------+---------+
                                        |                          | D bits
                              tiebreak_lfsr --scan chain-->+--------v---------+
                                        +---------------->| bundler          |--> hv_o (N-gram)
                                                          |  D counters, cmp |
                                                          +------------------+
```

| Module | Role |
|---|---|
| `hdc_pkg` | Default sizes (D, M, N_MAX, L_MAX) and the per-channel configuration type `chan_cfg_t`. |
| `circular_buffer` | The last N_m level indices of each channel. It has one write pointer per channel and one read pointer. It adds the channel's row offset to the level it reads. |
| `crossbar_array` | Behavioural stand-in for the phase-change-memory (PCM) crossbar with its row decoder and sense amplifiers. |
| `binder` | D XOR gates and D registers, daisy-chained, which build T_m one row per clock. |
| `bundler` | Per-dimension counters and majority comparators. A scan chain supplies random tie-break bits. |
| `tiebreak_lfsr` | A 16-bit LFSR that feeds the scan chain one bit per clock. |
| `encoder_controller` | Holds the configuration, derives addresses and offsets, and sequences everything. |
| `st_hdc_encoder` | Top level: wires the blocks above together. |

## How one N-gram is produced

This is the part that needs the most care when you change the design.

**Samples and records.** Each channel delivers a level index (0 .. L_m-1) with a one-cycle
`s_valid` strobe. The strobes are synchronous to the encoder clock. Channels may arrive in the
same cycle or at different times. Each channel writes at its own pointer `wp_m`, which runs from
`m*N_MAX` to `m*N_MAX + N_m - 1` and then wraps. Its region therefore always holds the last N_m
samples, and once the region is full `wp_m` points at the oldest one.

A **record** is complete when every active channel has delivered a new sample since the last
record. If some channel still has fewer than N_m samples, the record is dropped: this is the
warm-up after reset or reconfiguration. Otherwise encoding starts.

**Read order.** The single read pointer reads channel 0 from its oldest sample to its newest,
then channel 1, and so on. That is sum(N_m) reads, one per clock and back to back. The first read
of each channel starts at that channel's `wp_m`. Each level read out is added to the channel's row
offset, which is the sum of the L values of the channels before it (m*L when all channels share
one L). The result is the crossbar row of `I_m^level`.

**Pipeline.** Flags travel down the pipeline with each read: first of channel, last of channel,
and last of record. For a read issued in cycle c:

| cycle | event |
|---|---|
| c   | buffer read. On the record's first read, the bundler counters are loaded from the tie-break mux. |
| c+1 | registered row address goes to the crossbar. |
| c+2 | sense-amplifier data is valid. The binder updates: it loads the row on a channel's first read, and otherwise stores `rho(reg) ^ row`. |
| c+3 | after a channel's last read the binder holds T_m, and the bundler adds it to the counters. |
| c+4 | after the record's last read the comparators are latched. |

`hv_valid_o` rises sum(N_m) + 4 cycles after the first read. The first read is issued in the
second cycle after the clock edge that captured the record's last sample. With M = 4 and N = 3
this gives 16 cycles per N-gram; with N = 5 it gives 24, and with N = 9 it gives 40. At the
440 MHz assumed in the published estimate, that is 27.5 M, 18.3 M and 11.0 M N-grams/s. The
published estimate is 31.5 M, 18.9 M and 10.5 M, but it does not give the cycle-level timing
behind it. The pipeline latency is not hidden
by overlapping records, because records arrive at the slow sample rate.

**Overrun.** The encoder clock must run at least sum(N_m) + 4 times faster than the sample rate.
The published design asks for at least N*M times. If an active channel writes while reads are
still being issued, `overrun_o` pulses for one cycle. A write to a channel whose reads are
already done is harmless, and that sample counts towards the next record. A write to a channel
still waiting to be read changes the record.

## Binder

The XOR of dimension j sees the sense amplifier of dimension j and the register of dimension
j-1. An update therefore permutes the stored vector by one position and binds the new row to it.
After N updates, oldest row first, the register holds `T_m`.

The published block drawing ties the chained input of the first dimension to ground. That would
make the shift non-circular. The algorithm defines `rho` as a circular shift, and this design
follows the algorithm: dimension 0 takes dimension D-1. If you need the drawn behaviour, replace
`q_q[D-1]` in the `chain` expression of `binder.sv` with `1'b0`.

## Bundler and tie-breaking

Each dimension counts how many of the active channels' `T_m` have a 1 there. The comparator
reference is `ceil((M+1)/2) - 0.5`, so the output is 1 when `count >= ceil((M+1)/2)`. Here M is
the run-time channel count.

With an even number of channels a tie is possible. In that case each counter starts from a
random bit instead of zero. The bits come from a D-stage scan chain, which shifts in one LFSR bit
per clock while the channel count is even. Because the counter then has M+1 inputs, the same
reference gives a majority with ties broken at random. With an odd channel count, the chain and
the LFSR hold and the counters start from zero.

The counters are `$clog2(M+2)` bits wide: 3 bits for M = 4. The published text asks for log2(M)
bits, which cannot hold a count of M plus a tie-break bit. In the RTL the D counters are stored as
bit-planes: plane b holds bit b of every counter. Increment and compare are then a few D-wide
logic operations. Per dimension this is the same half-adder chain and comparator, but synthesis
handles it much faster than D separate processes.

The LFSR polynomial is x^16 + x^14 + x^13 + x^11 + 1, seeded with 0xACE1. It is this design's
own choice; the published design only names an LFSR.

## Crossbar model

`crossbar_array` stores one bit per cell and returns exactly what was programmed, one clock after
the read. The real part is an analog PCM array. Its conductance variation, drift and
sense-amplifier errors are what degrade accuracy as L grows, and this model includes none of
them. It is written as a plain memory array with a single-row programming port, so it can be
simulated and synthesized. In silicon it would be replaced by the macro.

Row layout: row `offset_m + (l-1)` holds `I_m^l`, where `offset_m` is the sum of the L of the
channels before m. A read of a row past the array returns zeros.

## Interface of `st_hdc_encoder`

| Port | Dir | Width | Meaning |
|---|---|---|---|
| `clk_i`, `rst_ni` | in | 1 | clock; asynchronous active-low reset |
| `cfg_valid_i` | in | 1 | load `cfg_m_i` and `cfg_ch_i`. Only while `busy_o` is low. Also clears the buffer pointers and restarts warm-up. |
| `cfg_m_i` | in | 3 | active channels, 1..M (channels 0..cfg_m-1) |
| `cfg_ch_i[M]` | in | `chan_cfg_t` | per channel `n` (1..N_MAX) and `l` (1..L_MAX) |
| `prog_en_i`, `prog_row_i`, `prog_data_i` | in | 1, 7, D | write one crossbar row |
| `s_valid_i[M]`, `s_level_i[M]` | in | M, 5 each | samples as level indices |
| `hv_valid_o`, `hv_o` | out | 1, D | N-gram pulse and vector. `hv_o` holds until the next N-gram. |
| `busy_o` | out | 1 | reads or pipeline in flight |
| `overrun_o` | out | 1 | sample on an active channel while reads were being issued |

After reset the configuration is: all M channels, N = N_MAX and L = L_MAX.

The ranges are checked by assertions: `cfg_m_i` in 1..M, and configuration only while idle.

## Sizes and configurations

The parameters (`D`, `M`, `N_MAX`, `L_MAX`) default to 10,000, 4, 9 and 21. Each evaluated
setting of the reference design fits at those defaults:

| Setting | Needs | Built |
|---|---|---|
| N = 9, L = 15 (peak accuracy) | 60 rows, 36 buffer entries | 84 rows, 36 entries |
| N = 3..9 at L = 15 | N <= 9 | N_MAX = 9 |
| L = 3..21 at N = 5 | 4L <= 84 rows | 84 rows |
| N in {3,5,9} x L in {3,12,21} | at most 36 entries, 84 rows | 36, 84 |

Classification itself, with 5 gesture classes, needs the associative memory, which is not part of
this RTL.

## Not included, and other departures

* **Not included.** The associative-memory crossbar and the class-prototype training are not
  here. Neither are the EMG front end and the quantizer. `hv_o` is the query vector for the
  associative memory, and the sample inputs are already quantized.
* **Crossbar.** The PCM crossbar is ideal and binary (see "Crossbar model").
* **Circular shift.** The shift in the binder is circular (see "Binder").
* **Counter width.** The counters are wider than log2(M) (see "Bundler and tie-breaking").
* **This design's own choices.**
  * the cycle-level pipeline and the record-complete rule;
  * the overrun flag;
  * the programming port;
  * the reset configuration;
  * the LFSR.
* **Clocks.** The sample strobes must already be synchronous to the encoder clock. No
  clock-domain crossing is included.

## Verification

Every module has a self-checking testbench in `tb/`. Each prints `TB_RESULT checks=… failures=…`.

| Testbench | What it checks |
|---|---|
| `tb_tiebreak_lfsr` | output against a bit-level reference over a full 65,535-step period; hold when disabled |
| `tb_binder` | T for N = 1..9 against an explicit rotate-and-XOR reference (D = 67) |
| `tb_crossbar_array` | programming, random and streamed reads, 1-cycle latency, out-of-range rows |
| `tb_circular_buffer` | random per-channel region sizes and offsets, independent writes with wrap, chronological read order |
| `tb_bundler` | majority for 1..4 channels, threshold, scan-chain contents, ties broken both ways |
| `tb_encoder_controller` | whole read/bind/accumulate/latch schedule cycle by cycle, warm-up, pointer ranges, offsets, overrun |
| `tb_st_hdc_encoder` | end to end at D = 512 against a bit-exact model of the N-gram and its cycle; five configurations |
| `tb_st_hdc_encoder_full` | the same at the default size, D = 10,000, with no parameter overrides |
| `tb_st_hdc_workload_grid` | default size, 4 channels, N in {3,5,9} x L in {3,12,21}. The crossbar is programmed from a generated CiM and item memory. EMG-like random-walk inputs. Every N-gram is checked against the equations evaluated from CiM and E directly, and so are its 4N+4 cycles. |

The end-to-end tests use five configurations: the reset configuration, 3 channels with per-channel
N = 3/5/9 and L = 3/12/21, 4 channels at N = 3, L = 21, 2 channels at N = 5, L = 15, and 1 channel
at N = 9, L = 3. They count, and require at least once: warm-up, tie-breaking, odd and even channel
counts, pointer wrap-around, staggered arrivals, overrun and reconfiguration.

To run a testbench with Verilator 5:

```
verilator --binary --timing --assert -Wno-fatal -Irtl -Itb rtl/hdc_pkg.sv tb/tb_st_hdc_encoder.sv \
          --top-module tb_st_hdc_encoder -Mdir obj -o sim
./obj/sim
```

Replace the testbench name to run another one. `-Irtl` lets Verilator find the other modules by
file name. Expect warnings about replications wider than 8,192 bits, which come from the
10,000-bit vectors.
