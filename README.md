# A multi-core polar-code decoder in SystemVerilog

Polar codes are decoded bit by bit. Successive cancellation (SC) decodes each bit from
log-likelihood ratios (LLRs) that pass through log2 N stages of a butterfly graph. Each bit
depends on the bits decided before it. SC list decoding (SCL) keeps the L most likely partial
decodings ("paths") instead of one. CRC-aided SCL (CA-SCL) then picks, among the survivors,
the best path whose CRC checks.

This RTL builds a decoder chip around that algorithm. It holds seven decoder cores that share
one input link and one output link:

| index | core | longest code | list size | LLR width inside |
|---|---|---|---|---|
| 0..4 | flexible decoder | N = 2^14 | 1..8, set per frame | 6 bits (7-bit sort keys, 6-bit path metrics) |
| 5 | ultra-reliable decoder | N = 2^11 | 1..32, set per frame | 6 bits; the stage-0 LLR has 7 bits |
| 6 | SC decoder | N = 2^15 | 1 | 7 bits |

Frames come in with their own code length, number of information bits and list size. The
chip works out the frozen-bit pattern itself, so the sender never transmits it. The chip hands
each frame to a free core of the right kind. It returns only the information bits, with a
header that gives the CRC result.

The architecture follows the published 16 nm decoder "A 5.16Gbps decoder ASIC for Polar Code
in 16nm FinFET": the core mix, quantization, serial list processing with address exchange,
good bits, on-chip code construction and recovery of the decoded bits from partial sums come
from there. Its speed-up techniques are not built, and the frame formats, CRC polynomial,
reliability metric and scheduling rules are this design's own; the last section lists the
departures.

The whole chip runs in one clock domain (`clk`, `rst_n`). The clock generator, LVDS links and
SPI configuration bus of a real chip are not part of this RTL. The link data appears directly
as the `in_*` and `out_*` ports of `polar_decoder_chip`.

## Numbers and signs

- Channel LLRs are 6-bit **sign-magnitude** numbers. The top bit is the sign; 1 means
  negative, which favours bit 1. LLRs inside a core keep this format, at `QI` bits
  (`QI0` at stage 0).
- `f(a,b) = sign(a)·sign(b)·min(|a|,|b|)` (min-sum).
- `g(a,b,s) = b + (1-2s)·a`, saturated to the output width.
- `a` is the upper input x_j, `b` the lower input x_(j+half), and `s` the partial sum of the
  upper branch. A zero result is positive (`polar_pe`).
- Path metrics: a path that takes the hard decision of its LLR keeps its metric. The other
  choice adds |LLR|. Candidate metrics are 7 bits. After each sort, the smallest surviving
  metric is subtracted and the results are saturated to 6 bits.

## The frame format

Input (`in_valid` / `in_ready`; a word moves on a rising edge with both high):

1. **Header word** `frame_hdr_t` (from bit 0 up):
   - `sel` [1:0]: 0 flexible, 1 ultra-reliable, 2 SC
   - `nlog` [5:2]: log2 N, from 6
   - `llog` [8:6]: log2 L
   - `crc_en` [9]
   - `tag` [15:10]: returned with the result
2. **Length word** `frame_len_t`:
   - `k` [15:0]: information bits, CRC included
   - `gcount` [31:16]: how many of them are "good bits"
3. **N beats**, each carrying one channel LLR in bits [5:0], in codeword order.

Output:

- A header word with `out_hdr` high. Its fields are `tag` [5:0], log2 N [9:6], core index
  [12:10] and CRC passed [13].
- Then the k decoded information bits, 32 per word, in index order, LSB first.
- `out_last` marks the last word. That word may be partly filled.

The CRC is the 24-bit polynomial 0xB2B117, processed MSB first from a zero register. The
sender puts the 24 CRC bits in the last 24 information positions. The decoder treats a zero
remainder over all k bits as a pass.

## Code construction (`code_construction`)

Which bit indices are frozen is worked out on chip from (N, k, g). The reliability of index i
is its polarization weight: the sum of β^j over the set bits j of i, with β = 2^(1/4). In
hardware this is the sum of `round(256·2^(j/4))` (256, 304, 362, ..., 3444).

- The k indices with the largest weight carry information.
- Of those, the g with the largest weight are **good bits**. The list decoder does not split
  paths on a good bit; it simply takes the hard decision.
- Ties go to the higher index.

The unit does not sort. It finds the k-th largest weight by a binary search over the 16-bit
weight range. Each of the 16 search passes counts, 32 indices per cycle, how many weights lie
at or above a candidate threshold. The search runs for k and for g at the same time. One more
pass counts the indices strictly above each threshold, so that ties can be shared out. A last
pass writes the frozen and good flags, 32 per cycle, straight into the chosen core. Total time:
18·N/32 cycles.

## Inside a decoder core (`scl_decoder`)

One module serves as all three cores. Only its parameters differ. This is the part of the
design that needs the most explanation.

### Memory layout

A memory word holds 32 LLRs. Stage t of the decoding graph has 2^t LLRs, and stage n holds
the channel LLRs.

- **Stages ≥ 6.** For each list slot, stage t occupies 2^(t-5) words, starting at word
  2^(t-5) of that slot's region of the internal LLR memory. So every stage lives in its own
  region.
- **Stage 5.** These 32 LLRs sit in a per-path register bank (`LLR32`).
- **Stages 4..0** are never stored. The **parallel unit** evaluates them combinationally for
  each bit from `LLR32` and the bits already decided in the current 32-bit block.
- **Partial sums.** Those of stages ≥ 5 sit in the PS memory, which uses the same layout with
  one bit per entry. This is L·N bits in all.
- **Pointers.** Every path has one pointer per stage into the LLR memory (`llr_ptr`) and one
  into the PS memory (`ps_ptr`). Each pointer names the list slot whose row holds that stage.

### Decoding one bit

For bit i with index i ≥ 32·b (block b):

1. **Block start** (i is a multiple of 32). The **serial unit** recomputes, path after path,
   the stages from ctz(i) down to 5 (all stages for the first bit decoded). It does one word
   of 32 f or g operations per cycle.
   - Output word w of stage t is built from words w and w + 2^(t-5) of stage t+1. Stage t+1 is
     the channel memory when t+1 = n.
   - A path always writes into its own slot, then points its stage-t pointer at itself.
   - For g, the partial-sum word comes from the PS row of stage t, through `ps_ptr`.
2. **Bit step.** The parallel unit gives each active path its stage-0 LLR. That yields two
   candidate metrics per path; a frozen bit offers only u=0 and a good bit only the hard
   decision.
3. **Sort.** `metric_sorter` ranks all candidates at once; ties go to the lower index. It keeps
   the best `L`, with each parent's first surviving child staying in the parent's slot. A
   second child goes to the lowest free slot.
4. **Copy.** A path that moves into another slot copies only the parent's pointers, 32 decided
   bits, metric and CRC register. No LLRs move. This is the serial list processing with
   address exchange that replaces an LLR crossbar.
5. **Block end.** After the 32nd bit of a block, its partial sums fold into the PS memory row
   of the stage t_s where the block is a left child. This is one word pass per stage from 5 up
   to t_s.

Leading frozen bits are skipped. Decoding begins at the first information bit, with the
partial sums before it known to be zero.

### Decoded-bit recovery (`bit_recovery`)

No u memory is written during decoding. After the last bit, the row of stage t in the PS
memory holds the polar transform of u over the index range [N-2^(t+1), N-2^t). The transform
is its own inverse, so encoding the row again gives those u bits back.

`bit_recovery` encodes each row in two steps:

- It encodes each 32-bit word (`polar_enc32`).
- It then runs butterflies across words (u[w] ^= u[w | 2^s]), one word pair per cycle, in
  place.

The last 32 bits come straight from the path's decided-bit register. The result sits in a u
memory that the output scheduler reads through `rd_addr`.

### Path selection

The winner is the path with the smallest metric among those whose CRC register is zero. If
no path passes, it is the smallest metric overall, and the CRC flag is cleared. Without
`crc_en` (plain SCL, or SC) the smallest metric wins.

## Scheduling (`in_scheduler`, `out_scheduler`, `defrozen_unit`)

`in_scheduler` reads the two header words, then picks a core:

- a flexible frame goes to the lowest-numbered idle flexible core;
- the other two kinds go to their only core.

If that core is busy, the input stalls (`in_ready` low). Otherwise the scheduler starts code
construction for the core. When construction is done, it packs the next N beats 32 per word
into the core's channel memory and pulses the core's start. Up to seven frames are decoded
concurrently.

`out_scheduler` serves the cores that hold a finished frame in round-robin order. For each
frame it:

1. emits the header;
2. streams the u word and frozen word pairs to `defrozen_unit`;
3. releases the core;
4. leaves two idle cycles.

`defrozen_unit` drops frozen positions and repacks the information bits into 32-bit output
words.

## Timing

At block starts, the serial unit costs about the number of words recomputed, summed over
paths. Each bit costs (active paths + 2) cycles. Recovery adds about Σ (t-5)·2^(t-5) cycles.
Measured from the last LLR in to the result header out, with every parameter at its default:

| frame | cycles | information bits per cycle |
|---|---|---|
| SC, N = 2^15, k = 8192 / 16384 / 29127 | 116,968 / 132,056 / 143,368 | 0.070 / 0.124 / 0.203 |
| flexible, N = 2^14, L = 8, k = 4096 / 8192 / 10923 / 12288 / 14564 | 233,480 / 265,726 / 280,266 / 281,640 / 288,664 | 0.018 / 0.031 / 0.039 / 0.044 / 0.050 per core |
| ultra-reliable, N = 2^11, L = 32, k = 512 / 1024 / 1820 | 76,568 / 90,082 / 99,518 | 0.007 / 0.011 / 0.018 |

At a 1 GHz clock, the five flexible cores together reach about 88 Mbps at rate 1/4 and about
252 Mbps at rate 8/9.
These rates are 5 to 25 times below those of a decoder with multi-bit decisions and
special-node shortcuts, which the published chip reports (for example 5.16 Gbps for its five
flexible cores at rate 8/9). The next section lists what is missing.

## Departures from the published design

- **Multi-bit decisions.** Every bit is decided on its own: there are no 4-bit (flexible) or
  2-bit (ultra-reliable) decisions, and no rate-0 or rate-1 node shortcuts.
- **LLR storage reduction.** Every stage from 6 to n-1 is stored. There is no scheme that
  keeps only every third (or fourth) stage and recomputes the others with a deeper PE cascade,
  so the serial unit is one rank of 32 processing elements.
- **Double-package mode.** A core cannot hold two frames so that sorting one overlaps the
  LLR work of the other.
- **Semi-parallel unit.** The ultra-reliable core has none for several paths at once. It uses
  the same serial datapath with L up to 32.
- **Parity-check-aided lists** (PC-SCL).
- **Overlapped recovery.** Recovery does not run while the next frame decodes.
- **SRAM macros.** Memories are plain arrays (`word_ram`) with asynchronous reads. A real
  chip would replace them with SRAM macros and add a pipeline stage.

## Files

- `rtl/polar_pkg.sv`: shared types (frame header and length words), the CRC polynomial and a
  32-bit polar encoder.
- `rtl/polar_pe.sv`, `serial_unit.sv`, `parallel_unit.sv`: the f/g arithmetic.
- `rtl/metric_sorter.sv`, `crc24_step.sv`, `bit_recovery.sv`, `word_ram.sv`,
  `scl_decoder.sv`: a decoder core.
- `rtl/code_construction.sv`, `in_scheduler.sv`, `out_scheduler.sv`, `defrozen_unit.sv`,
  `polar_decoder_chip.sv`: the chip.
- `tb/tb_<module>.sv`: one self-checking testbench per unit.
- `tb/tb_polar_pkg.sv` and `tb/tb_ref_pkg.sv`: shared reference models, covering the encoder,
  CRC, construction, channel noise and a recursive SC LLR model.
- `tb_flexible_decoder`, `tb_ur_decoder` and `tb_sc_decoder` run the core in its three
  configurations against sent codewords.
- `tb_polar_decoder_chip` runs the chip end to end at reduced code lengths. It makes every
  mechanism happen at least once:
  - all five flexible cores busy at once;
  - an input stall;
  - all three core kinds;
  - good bits;
  - list sizes 1 to 8;
  - a frame that fails its CRC.
- `tb_polar_decoder_chip_full` decodes one frame per core kind at the full default sizes.
- `tb_polar_decoder_chip_rates` runs the default chip at code rates 1/4 to 8/9. The five
  flexible cores decode the five rates at once. It prints the cycle counts in the table above.

Every testbench prints `TB_RESULT checks=<n> failures=<n>` and has a watchdog.

## Simulating

With Verilator 5, for example the full-size chip test:

```
verilator --binary --timing -Wno-fatal -Irtl -Itb rtl/polar_pkg.sv tb/tb_polar_pkg.sv \
  tb/tb_ref_pkg.sv $(ls rtl/*.sv | grep -v polar_pkg) tb/tb_polar_decoder_chip_full.sv \
  --top-module tb_polar_decoder_chip_full
./obj_dir/Vtb_polar_decoder_chip_full
```

The packages come first. `-Wno-fatal` keeps the remaining width warnings from stopping the
build; they come from index expressions whose upper bits are known to be zero. The full-size
test takes about 30 seconds to simulate, and the unit tests take seconds.

To change the chip's sizes, use the top's parameters:

- `FLEX_NLOG`, `FLEX_L`
- `UR_NLOG`, `UR_L`
- `SC_NLOG`
- `N_FLEX` (number of flexible cores)

A core's memories scale with L·N.
