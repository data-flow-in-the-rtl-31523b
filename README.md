# Mu3e readout data path: FEB sorting, switching-board time alignment, farm GPU packaging

Mu3e reads its detector out without a trigger. Every hit of every pixel
sensor (MuPix) and timing ASIC (MuTRiG) is sent off the detector, and the
firmware on three layers of FPGA boards has to turn roughly 100 Gbit/s of
unsorted hits into a time-ordered stream that a GPU can reconstruct tracks
from. This RTL implements that chain as one vertical slice:

1. **Front-end board (FEB), fibre detector.** Eight MuTRiG links are
   decoded, their 625 MHz timestamps are converted to the 125 MHz time
   base shared with the pixel detector, and the hits are sorted in time and
   framed into packages.
2. **Switching board (SWB), time alignment.** Eight time-sorted package
   streams are merged into one by a binary tree of two-input merge nodes.
   Each package covers 16.4 us. Inside it, hits are ordered by 8 ns frame.
3. **Farm FPGA, central pixel path.** The four pixel layers' streams are
   converted to global x/y/z floating-point positions. The hits of each
   layer are packed into 256-bit words with a tag per 8 ns frame, then
   multiplexed into GPU packages with a reference table for every frame.

The top level, `mu3e_daq_top`, has one fibre FEB feeding a fibre SWB tree,
four pixel SWB trees (one per central layer, L0-L3) and the farm GPU path.
The parts of the system that are not logic are left out. Their signals are
ports. These parts are the ASICs, the optical and PCIe links, the DDR4
buffer and the GPU.

## Time and data words

Everything is built around one time base: an 8 ns tick of the global
125 MHz clock.

| quantity | bits | meaning |
|---|---|---|
| FEB timestamp | 15 | 125 MHz ticks, wraps at 2^15 (as the MuPix) |
| MuTRiG coarse counter | 15 | 625 MHz ticks, an LFSR with period 2^15-1 |
| package number | 21 (of 32) | timestamp bits [31:11]: one package = 2^11 ticks = 16.384 us |
| sub-header (SUB) | 7 | timestamp bits [10:4]: 128 per package |
| hit time | 4 | timestamp bits [3:0], inside the hit word |

All streams between the FEB and the farm carry `pkt_word_t`, a 2-bit kind
(`W_HIT`, `W_SOP`, `W_SUB`, `W_EOP`) plus 32 data bits:

* SOP: data = package number. Then come 128 SUBs (data = SUB number),
  always all of them, even for empty sub-periods. Then EOP.
* Hit words after a SUB belong to that 16-tick period, ordered by their
  4-bit time `[31:28]`.
* A pixel hit has the fields `[27:19]` chip, `[18:11]` column, `[10:3]` row
  and `[2:0]` ToT.
* A fibre hit has the fields `[27:24]` ASIC, `[23:19]` channel, `[18:16]`
  625 MHz remainder (0-4), `[15:11]` fine time and `[10]` energy flag.

Because every package carries every SUB, a merge node never compares more
than four bits of time. All shared types are in `rtl/mu3e_pkg.sv`.

## FEB: from MuTRiG links to sorted packages (`feb_scifi`)

```
link ─ rx_8b10b ─ async_fifo ─ mutrig_unpacker ─┬─ Switch ─ sync_fifo ─┐
                              dummy_gen ────────┘                       ├ mux2x1 ─ prbs_lut port ─ lapse_cc ─ cc_div5 ─┐
link ─ ...                                                              ┘                                             ├ feb_sorter ─ package stream
(second pair of links) ─────────────────── mux2x1 ─ prbs_lut port ─ lapse_cc ─ cc_div5 ──────────────────────────────┘
```

Links 0-3 form half 0 and links 4-7 form half 1. Each half has two 2:1
multiplexers, one dual-port translation RAM, two lapse correctors, two
dividers and one sorter. Each half gives one output package stream, which
corresponds to one optical link to the SWB.

**Receiver (`rx_8b10b`).** The receiver slides a 10-bit window over two
consecutive deserialiser words. It locks on a bit offset after four K28.5
commas at that offset. After four code or disparity errors it searches
again. It then decodes with the standard 8b/10b tables.

**Unpacker (`mutrig_unpacker`).** A MuTRiG frame is K28.0, then 6-byte
hits, then K28.4. Each hit is a channel (5 bits), the time branch (bad
flag, 15-bit coarse counter, 5-bit fine time) and the energy branch. The
time branch becomes a `rec1_t` record. This frame layout is this design's
choice. The real MuTRiG format is defined elsewhere and would replace this
block.

**Counter translation (`prbs_lut`).** The MuTRiG counts its 625 MHz coarse
time with a 15-stage LFSR (x^15 + x^14 + 1 here). The LFSR states come in a
fixed pseudo-random order. A 2^15 x 15-bit dual-port RAM maps each state
to its position in the sequence, so both streams of a half are translated
in the same cycle. After reset, the RAM fills itself by stepping the LFSR
once per cycle, which takes 32767 cycles (262 us). Until then `init_done`
is low and hits are counted as lost.

**Lapse correction (`lapse_cc`): the subtle part.** A binary MuTRiG count
wraps after 2^15 - 1 ticks, but the rest of the system wraps after 2^15.
Both chips are locked to the global clock and reset together, so the FEB
can mimic the MuTRiG counter: `cc_now` advances by 5 per 125 MHz cycle,
modulo 2^15 - 1. The block counts the wraps n of `cc_now`. The true tick
count is then

    T = n(2^15 - 1) + cc = n·2^15 + cc - n

which is the counter with the overflows subtracted. The block keeps
`base = n(2^15 - 1) mod 5·2^15` and outputs
`c625 = (base + cc) mod 5·2^15`. This is exact for all 15 bits of the later
125 MHz timestamp.

A hit whose counter value is ahead of `cc_now` was taken in the previous
lap, so it uses the previous base. Hits must therefore arrive within one
lap (52 us) of being taken. This is easily met, because the path before
the sorter is a few FIFOs deep.

**Divide by five (`cc_div5`).** This block splits `c625` into the 15-bit
125 MHz timestamp (`c625 / 5`) and the 625 MHz remainder (`c625 % 5`).

**Sorter (`feb_sorter`).**

* **Memory.** The memory has 2^SLOT_BITS slots (1024, i.e. 8.2 us), one per
  8 ns tick, each holding SLOT_DEPTH hits (8). A fill counter goes with
  each slot.
* **Writes.** Both inputs can write in the same cycle, also into the same
  slot. A hit is accepted if its timestamp lies 2 to 1023 ticks ahead of
  the read pointer.
* **Losses.** Hits that arrive too late (`late_cnt`) or find their slot
  full (`full_cnt`) are dropped and counted.
* **Reading.** The read pointer trails the FEB time by DELAY = 512 ticks.
  It emits one word per cycle: SOP, SUB, the slot's hits, EOP. It can skip
  two empty slots in a cycle that needs no header, so after a burst it
  catches up with real time.

`feb_scifi` adds up every loss counter of the FEB into `drop_cnt`. It also
shows `locked` per link and `prbs_ready`. The **Switch** (`dummy_sel`)
replaces a link by `dummy_gen`, which sends valid hit records with LFSR
counter values.

## Switching board: the time alignment tree (`ta_tree`, `ta_merge`)

Each input first goes through a layer-1 FIFO, `async_fifo` with a Gray-code
pointer crossing. The FIFO is 8192 words (32 kB), enough for one package
of a saturated 125 MHz link. It also changes the clock from 125 MHz to
250 MHz. The `in_ready` output is the backpressure towards the FEB.

Seven `ta_merge` nodes then form the binary tree, with a 16-word
`sync_fifo` after each node. The streams are numbered like a heap: leaves
are 0..7 and node k merges streams 2k and 2k+1 into stream 8+k.

A node acts only when both input heads are present, and decides as
follows:

| heads | action |
|---|---|
| SOP / SOP, SUB / SUB, EOP / EOP | one copy forwarded, both popped |
| hit / hit | lower 4-bit time first; input a on a tie |
| hit / marker | the hit first |
| SUB / EOP, any / SOP | the earlier marker first |

This works only because every stream carries the same package and SUB
sequence. An assertion checks that two SUBs met together are equal.

A masked input (`mask[i]`, for an unused or broken link) counts as absent.
Its node passes the other input straight through, and a node whose inputs
are both masked is itself masked. The FIFO of a masked input keeps
accepting words until it is full, but nothing is read from it.

Throughput is one word per 250 MHz cycle at the root. That is a quarter of
eight saturated 125 MHz inputs. The layer-1 FIFOs absorb bursts.

## Farm: from hits to GPU packages (`farm_gpu_path`)

Each layer has its own chain: `coord_trafo` → `injection` → `hit_packer`.
The `gpu_packager` joins the four chains. Everything runs at 250 MHz.

**Coordinate transformation (`coord_trafo`).** The chip number addresses
nine tables, one per vector component. The tables hold the global corner
position s, the column step c and the row step r of the chip. Values are
signed 32-bit fixed point in mm, with 16 fractional bits. The block
computes h = s + col·c + row·r exactly in 42 bits and converts each
component to IEEE single precision, rounding to nearest-even. The
conversion uses a six-stage leading-zero shifter.

The block keeps the current package and SUB, so each output hit carries
its full 32-bit frame number {package, SUB, time}. An EOP becomes an `eop`
marker. Latency is 3 cycles. The tables are written through
`cfg_we/cfg_layer/cfg_chip/cfg_sel/cfg_data`.

**Injection (`injection`).** The host can request a hit at a given position
(`inj_req`, `inj_pos`). The hit is inserted in the first idle cycle of the
stream and stamped with the frame number of the last hit, so time order is
kept. This serves debugging and blinding.

**Tag-FIFO and Hit-FIFO (`hit_packer`).**

* **Packing.** The 96-bit hits {z, y, x} of one 8 ns frame are packed back
  to back into 256-bit words, starting in the low bits. Eight hits fill
  three words. Every frame starts on a new word.
* **Tags.** When a frame ends, its tag goes into the Tag-FIFO. A tag holds
  {eop, frame, hits, words}. An EOP closes the open frame with the `eop`
  bit set, or writes an empty end tag if no frame is open.
* **Sizes.** The Hit-FIFO has 16384 words (0.5 MB) and the Tag-FIFO 2048
  entries.
* **Overload.** If the Hit-FIFO is full, words are dropped, and the tags
  count only stored words. If the Tag-FIFO is nearly full, whole new
  frames are refused. One place is always kept for the end tag. Every
  refused hit is counted in `drop_cnt`.

**GPU packager (`gpu_packager`).** One GPU package is built per SWB
package. It holds four sub-packages, layer 0 to layer 3, and each is laid
out as follows:

```
hit words     all 256-bit words of the layer's frames, in time order
references    one 64-bit entry per frame that has hits, four per word:
              [31:0] frame number, [47:32] offset of its first word, [63:48] hit count
trailer       [255:224] 0x4D553345  [223:216] layer  [215:200] hit words  [199:184] references
```

With the references at the end of each sub-package, the GPU can cut time
windows of any multiple of 8 ns, overlapping ones included, without
copying hits.

The output is a 256-bit valid/ready stream for the DMA engine (256 bit at
250 MHz). `out_sop` and `out_eop` mark the package and `out_layer` gives
the current layer.

## Departures from the paper and own choices

* The MuTRiG link frame, the LFSR polynomial and seed, the word layouts, the
  reference and trailer formats, and the loss handling are this design's
  own. The paper does not give them. The paper's example LFSR values
  (0x1234, ...) are illustrative and not reproduced.
* The paper packs GPU data into 2 MB packages of four 0.5 MB sub-packages.
  Here one GPU package is made per 16.4 us SWB package. 0.5 MB per layer
  is its upper bound, set by the Hit-FIFO.
* The paper puts queues "of the order of 2^10" in the tree. Here only the
  layer-1 FIFOs are large (one package, as the paper also states). The
  inner node FIFOs are 16 words.
* The sorter's slot memory, its 8-hit slots and its 4 us read delay are
  this design's way of "sorting in onboard memory".
* The 10 Gbit/s link from the SWB to the farm is replaced by a direct
  connection on the 250 MHz clock. The DDR4 buffer and its daisy chain are
  not built, and the merged fibre stream leaves through a port.
* The FEB's common part (slow control, optical link framing) is not
  built. The FEB output is the sorted package stream.

## Capacity

The numbers below come from the paper's rates and the defaults above.

* **FEB.** One MuTRiG link carries at most about 15.6 M hits/s. The sorter
  accepts 2 writes and emits 1 word per 125 MHz cycle.
* **SWB tree.** The root moves 250 M words/s. Eight saturated inputs would
  offer 1000 M words/s, which is the 4:1 bottleneck.
* **Central pixel SWB.** It needs at most 56 Gbit/s. Eight links of
  32 bit × 250 MHz give 64 Gbit/s.
* **Farm.** One layer's Hit-FIFO holds 43690 hits, about 21 hits per 8 ns
  frame of a package.

## Verification

Every block has a self-checking testbench `tb/tb_<block>.sv`. Each one
prints `TB_RESULT checks=N failures=M` and has a watchdog. Expected values
are computed independently of the RTL. For example, the float positions are
computed in double precision and rounded to single precision, and the
LFSR position table is built in the testbench. The shared helpers are in
`tb/tb_mu3e_pkg.sv`: an 8b/10b encoder, the LFSR table, a package checker
and a GPU package parser.

| testbench | what it shows |
|---|---|
| `tb_rx_8b10b` | lock at a random bit offset, random data and K codes decoded in order |
| `tb_mutrig_unpacker` | hit records from frames; stray bytes and truncated hits counted |
| `tb_prbs_lut` | 32767-cycle init, both ports translate every LFSR state |
| `tb_lapse_cc`, `tb_cc_div5` | exact 125 MHz timestamps across many counter wraps |
| `tb_feb_sorter` | time order, framing, late and full-slot losses |
| `tb_feb_scifi` | whole FEB at default size: every link hit once, correct time and remainder |
| `tb_ta_merge`, `tb_ta_tree` | one time-sorted stream holding every hit once, masking, random stalls, throughput |
| `tb_coord_trafo` | positions bit-exact against double-precision reference |
| `tb_hit_packer`, `tb_gpu_packager`, `tb_farm_gpu_path` | hits recovered from the DMA stream through tags and references |
| `tb_mu3e_daq_top` | the whole slice at its default parameters |

`tb_mu3e_daq_top` runs the slice at its default parameters. It includes the
32767-cycle table fill and 40 fibre packages, and takes about two minutes.
Along the way it makes every mechanism happen at least once, and it fails
if one never does:

* link lock and counter wraps;
* dummy links;
* SOP/SUB framing;
* masked inputs on both trees;
* a sorter slot overflow, which must show up in the FEB loss counter;
* backpressure on the SWB inputs, and stalls on the DMA and fibre outputs;
* injected hits and several GPU packages.

To simulate a testbench with Verilator 5:

```
verilator --binary --timing --assert -Wno-fatal -Irtl -Itb \
  rtl/mu3e_pkg.sv tb/tb_mu3e_pkg.sv $(ls rtl/*.sv | grep -v mu3e_pkg) \
  tb/tb_mu3e_daq_top.sv --top-module tb_mu3e_daq_top
./obj_dir/Vtb_mu3e_daq_top
```

The module testbenches override sizes only where the default would take
long. For example, `tb_feb_sorter` uses a 64-slot sorter and `tb_ta_tree`
uses 64-word layer-1 FIFOs.

## Files

* `rtl/mu3e_pkg.sv` holds the types and constants.
* `rtl/sync_fifo.sv` and `rtl/async_fifo.sv` are helpers.
* Every other `rtl/<block>.sv` is one block, as named above.
* `tb/` holds the testbenches and `tb/tb_mu3e_pkg.sv`.
