# ZAC-DEST: approximate, zero-aware coding of a DDR4 data channel

On a DDR4 bus with Pseudo Open Drain (POD) termination, a data line burns
termination current only while it carries a 1, and switching energy mostly on
1-to-0 transitions. Fewer ones on the pins means less I/O energy. Many
workloads, such as image classifiers, clustering and other machine learning
kernels, can use data that is slightly wrong. ZAC-DEST ("zero aware
configurable data encoding by skipping transfer") exploits this. Each DRAM chip
keeps a table of the 64-bit words it sent recently, and the memory controller
keeps an identical copy. If the word to be sent is close enough to a stored
word, the chip does not send the word at all. It sends the table position of
the stored word as a one-hot code, a single 1 on the data lines, and the
controller uses its own copy of that stored word instead. Accuracy is traded
for energy with three knobs:

* **Similarity limit**: the largest number of differing bits, out of 64, that
  still allows a word to be skipped.
* **Tolerance**: the most significant bits of each value, which must match
  exactly before a word may be skipped.
* **Truncation**: the least significant bits of each value, which are forced to
  zero and never compared.

Words that cannot be skipped still go through an exact coder. This coder sends
either the bitwise difference to the most similar stored word or the raw word,
whichever has fewer ones. All-zero words are sent as they are and never stored.
Dynamic Bus Inversion (DBI) is applied last.

This repository holds synthesizable SystemVerilog for the per-chip sender, the
per-chip receiver, the burst serializer and deserializer between them, and a
rank-level top that connects eight chips to the controller side. It also holds
self-checking testbenches for each of these parts.

## The coding decision

Each of the 8 chips of a rank is an x8 device. Per access, a chip sends one
64-bit word: its byte lane over the 8 beats of a burst. Every chip codes its
word on its own, using its own table. For one word, with settings `cfg`:

1. **Truncate.** Clear the selected low bits. The result, `DCDT`, is the word
   that is actually sent and stored.
2. **Zero check.** If `DCDT == 0`, the data lines carry zeros. There is no
   table search and no table update.
3. **Search.** Find the valid table entry with the fewest bits differing from
   `DCDT`. The comparison ignores the truncated positions, and a tie goes to
   the lowest index. This is the most similar entry (MSE). `MSET` is the MSE
   with its truncated bits cleared, and `X = MSET ^ DCDT`.
4. **Skip (approximate).** The word is skipped if `popcount(X) < limit` and `X`
   is zero at every protected position. The data lines then carry
   `1 << index`, and the receiver takes `MSET`. The table is not updated.
5. **Difference (exact).** Otherwise, if
   `popcount(DCDT) > popcount(X) + popcount(index)`, the data lines carry `X`
   and the index line carries the 6-bit index. The receiver rebuilds `DCDT`.
6. **Raw (exact).** Otherwise the data lines carry `DCDT`.
7. **DBI.** Every byte on the data lines that holds more than four ones is
   inverted, and its flag is set.
8. **Update.** After a difference or raw word, `DCDT` is written into the next
   table slot, round-robin. The receiver writes the same value into the same
   slot.

The table is written only when a word was sent exactly. It therefore never
holds two equal words, and it never holds zero. Both ends write the same value
at the same moment, so the two tables stay identical without any extra
traffic. Exact matches always take the skip path (step 4), because 0
differences is below every limit. This is what keeps duplicates out.

An access flagged as exact (`cfg.approx_en = 0`, for example an instruction
fetch) switches truncation and tolerance off. It sets the limit to 1, so only a
perfect match is skipped, and that loses nothing. In this mode the coder acts
as a lossless difference coder with zero handling and DBI.

### Settings

`zc_cfg_t` (package `zc_pkg`) travels with each access. In a real system it
would ride on the column-address lines that column commands leave unused.

| field | values | meaning |
|---|---|---|
| `approx_en` | 0/1 | 0: exact access (see above) |
| `sim_sel` | `SIM_90` `SIM_80` `SIM_75` `SIM_70` | skip if fewer than 7 / 13 / 16 / 20 of 64 bits differ |
| `tol_sel` | `GRAN_NONE`, `GRAN_<N>_<k>` | the k MSBs of every N-bit value must match |
| `trunc_sel` | `GRAN_NONE`, `GRAN_<N>_<k>` | the k LSBs of every N-bit value are cleared |

`GRAN_<N>_<k>` is one of 64_16, 64_8, 32_8, 32_4, 16_4, 16_2, 8_2 and 8_1. That
is N/4 or N/8 bits per value, for values 64, 32, 16 or 8 bits wide. For
example, "16 bits of tolerance on 8-bit pixels" is `GRAN_8_2`: the top 2 bits
of each byte, mask `0xC0C0_C0C0_C0C0_C0C0`. "16 bits of truncation on 16-bit
values" is `GRAN_16_4`: mask `0x000F_000F_000F_000F`. Bit 0 is the LSB of the
word, and value j occupies bits `[N*j+N-1 : N*j]`.

## What travels on the pins

Per chip and per beat (`zc_beat_t`): `dq[7:0]`, one DBI line, one index line,
and a `strobe` that marks the beats of a burst. Beat b carries byte b of the
coded word, DBI flag b, and bit b of the 8-bit index-line word
`{is_addr, is_diff, idx[5:0]}`:

| coding | data lines (before DBI) | `is_addr` | `is_diff` | `idx` |
|---|---|---|---|---|
| zero | 0 | 0 | 0 | 0 |
| raw | DCDT | 0 | 0 | 0 |
| difference | MSET ^ DCDT | 0 | 1 | binary index |
| skip | one-hot index | 1 | 0 | 0 |

The receiver recognises a zero word because both flags are 0 and the data lines
are 0. A raw word is never zero, since zeros take the zero path. The one-hot
index of a skipped word has at most one 1 per byte, so DBI never inverts it.
Its single 1 costs less than a 6-bit binary index would.

## Blocks

| module | role |
|---|---|
| `zc_pkg` | widths, `gran_e`, `sim_e`, `zc_cfg_t`, `kind_e`, word and beat structs, mask/popcount/DBI functions |
| `zc_truncation` | clears the selected LSBs and gives the truncation mask |
| `zc_zero_checker` | 64-input NOR |
| `zc_mbdc_table` | sender table: ENTRIES x 64-bit words with valid bits, a masked difference count per row, minimum search, one-hot and binary index, replica count (ones of the input), round-robin write |
| `zc_similarity_checker` | 7-bit count of differing bits, compared with the limit selected from `LIMITS = {7,13,16,20}` |
| `zc_tolerance_checker` | NOR of the difference over the protected MSBs |
| `zc_dbi` | per-byte inversion, more than four ones |
| `zc_encoder` | one chip's sender: the steps above, valid/ready in and out, output registered |
| `zc_serializer` | coded word to 8 beats, back-to-back bursts |
| `zc_deserializer` | 8 beats back to a coded word |
| `zc_decoder` | one chip's receiver with its own table copy |
| `zc_cfg_fifo` | remembers the settings of accesses in flight, so each burst is decoded with its own settings |
| `zc_channel` | top: `CHIPS` encoders and serializers, `CHIPS` deserializers and decoders, and the settings queue |

Parameters and their defaults: `CHIPS = 8` and `ENTRIES = 64` (`zc_channel`),
and `ENTRIES = 64` in the table, encoder and decoder. `ENTRIES` may be reduced
to any value from 2 up. It must not exceed 64, because the one-hot index has to
fit on the 64 data lines. The word width is fixed at 64, because the
granularity settings are defined for 64-bit words.

### The data table

This is the largest block and the one that sets the clock rate. Every cycle,
the word to be sent is compared with all 64 stored words. Each row forms
`popcount((entry ^ word) & ~trunc_mask)`, and a minimum search over the 64
counts picks the winner. Invalid rows are skipped, and the first row wins a
tie. The masked positions stand in for the truncation line, which switches off
a content-addressable memory (CAM) cell's comparator. Without that mask,
entries stored under a different truncation setting would look artificially
far away. The same block also produces:

* the one-hot index,
* the 6-bit binary index,
* `MSET` and the difference `X`,
* `popcount(X)`,
* the ones count of the input word itself (the "replica row").

The exact-coding test in step 5 needs that last count. As RTL this is about
4096 storage bits, 64 population counters and a 64-way compare tree. The paper
describes the table as a custom CAM in which the search is a current race on
match lines. This RTL gives the same result; it does not model that circuit.

## Timing

* **Encoder.** It accepts a word when `in_valid_i && in_ready_o`, updates its
  table on the same edge, and presents the coded word on the next cycle. It
  holds the word until `out_ready_i`; an assertion checks that it stays
  stable. The whole decision, including the 64-way search, is one
  combinational path. The paper reports 3.4 ns for its custom circuit.
* **Serializer.** It sends the first beat the cycle after it accepts a word,
  then one beat per cycle. It can accept the next word on the last beat, so
  bursts run back to back.
* **Deserializer.** It pulses `out_valid_o` the cycle after the last beat.
* **Decoder.** It answers one cycle after that.
* **Channel.** With the pins looped back and the channel idle, a line is
  delivered 10 clock edges after it is accepted. At full load it takes one
  line every 8 cycles, which is one burst. `line_ready_o` falls while a word
  waits for its burst slot.

Beats are single data rate here: one beat per clock.

## Where this RTL departs from, or fills in, the source description

* **Skip threshold.** It is strict: a word is skipped if fewer than `limit`
  bits differ. The description is mostly strict ("less than 7"), but one
  passage says "not more than 16 bits" for the 75 % case. The strict reading
  matches 7/13/20 being 90/80/70 % of 64.
* **Difference coding.** A difference word carries `MSET ^ DCDT`, as the
  algorithm states. One block-diagram sentence says the most similar entry
  itself is sent.
* **Zero check input.** The zero check looks at the truncated word, as the
  algorithm states. The block diagram feeds it the untruncated input.
* **"None" settings.** `GRAN_NONE` for truncation and tolerance is an
  addition. The evaluated settings include "0 bits", which the eight-input
  selects cannot express.
* **This design's own choices.** The following are not in the source: the
  flags, the index-line layout, beat order, the strobe, single data rate, DBI
  flag polarity (1 = inverted), round-robin replacement, lowest-index ties,
  the valid/ready handshakes, the exact-access rule, and the settings queue.
* **FP32 weights.** Sign plus exponent is 9 bits per FP32 weight. The
  tolerance settings can protect 8 bits (`GRAN_32_8`) of a 32-bit value in a
  64-bit word. How bytes of a value spread over chips depends on the system's
  byte-lane mapping, so which setting protects the sign and exponent is left
  to the user of the settings.
* **Not modelled.** Energy, area and latency figures are not modelled. These
  are 7.66 pJ per access and a 15 % area increase over a plain difference
  coder in 65 nm.
* **Outside the RTL.** The POD drivers and termination, the DRAM banks and the
  memory controller are not included. `zc_channel` exposes the chip pins as
  `tx_beat_o` (driven by the chips) and `rx_beat_i` (sampled by the
  controller). The line input stands for the banks, and the line output and
  `cfg_i` stand for the controller.

## Verification

Each module has a self-checking testbench in `tb/`. Each one prints
`TB_RESULT checks=N failures=M` and stops itself with a watchdog. The expected
values come from `tb/tb_zc_ref_pkg.sv`, a reference model written separately
from the RTL. It builds masks value by value, counts with `$countones`, keeps
the tables as plain arrays, and provides a word generator with zeros, repeats
and near repeats.

* `tb_zc_truncation` and `tb_zc_tolerance_checker` check all nine settings,
  including the masks for 16 bits over 8- and 16-bit values quoted above.
* `tb_zc_similarity_checker` checks every count 0..64 against every limit.
* `tb_zc_dbi` checks all byte values in all lanes.
* `tb_zc_mbdc_table` checks search results against a brute-force search through
  192 writes, so the round-robin pointer wraps twice.
* `tb_zc_encoder` checks every coded word and its flags under random settings
  and output back pressure, and that all four codings occur.
* `tb_zc_serializer` and `tb_zc_deserializer` check beat order, framing and
  the one-burst-per-8-cycles rate.
* `tb_zc_decoder` checks the rebuilt words for a stream coded by the model.
* `tb_zc_channel` runs the full 8-chip, 64-entry channel for 3000 lines:
  * every chip's rebuilt word is compared with the model;
  * latency and rate are checked;
  * it counts zero, skip, difference and raw words, DBI inversions, truncation
    changing a word, tolerance blocking a skip, exact accesses, table wrap,
    input stalls and idle-start lines, and fails if any count is 0.
* `tb_zc_image_workload` streams a generated 128x96 grayscale image through the
  full channel. It runs once exactly, once at each similarity limit, and once
  each with truncation and with tolerance. It checks every word, that the
  exact run is lossless, and that the ones on the pins do not rise as the limit
  loosens. One run printed the following (ones on data + DBI + index lines;
  the image sent uncoded has 50755 ones):

  | setting | ones | vs exact coding | PSNR |
  |---|---|---|---|
  | exact (difference + zero + DBI) | 22024 | 100 % | lossless |
  | limit 90 % | 21672 | 98.4 % | 55.8 dB |
  | limit 80 % | 14632 | 66.4 % | 43.3 dB |
  | limit 75 % | 11629 | 52.8 % | 36.6 dB |
  | limit 70 % | 8488 | 38.5 % | 27.9 dB |
  | 80 %, truncation `GRAN_8_2` | 6544 | 29.7 % | 29.9 dB |
  | 80 %, tolerance `GRAN_8_2` | 14676 | 66.6 % | 44.6 dB |

  These numbers describe a synthetic image, not the data sets of the original
  evaluation. They show the expected trends: looser limits and truncation save
  more and cost quality, and tolerance wins quality back.

The testbenches use `$urandom` with the simulator's default seed. A broken copy
of each module was also run against its testbench, and each testbench caught
its fault.

## Simulating

With Verilator 5 from the repository root, taking the top-level test as an
example:

```
verilator --binary --timing --assert -Irtl -Itb -y rtl +libext+.sv \
  rtl/zc_pkg.sv tb/tb_zc_ref_pkg.sv tb/tb_zc_channel.sv --top-module tb_zc_channel
./obj_dir/Vtb_zc_channel
```

Replace the last file and the top name for any other testbench. Add
`-Wno-fatal` if a different Verilator version stops on a style warning. The
full channel test builds in a few seconds and runs in about 1 s.

For synthesis, read `rtl/zc_pkg.sv` first and use `zc_channel` as the top.
Each encoder contains the 64 x 64-bit table and its 64-way search, so expect a
large combinational block per chip. The decoder's table is a plain memory with
one read port and one write port.
