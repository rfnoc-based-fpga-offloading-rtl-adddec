# FPGA offload of the 5G NR channel-coding chain, beside the radio

A software-defined-radio base station normally spends most of its processor time
in the physical layer. Here the bit-level procedures of the 5G NR shared channel
are moved into the FPGA of the radio itself, next to the data converters, as two
streaming chains on the radio's on-chip network:

* **encoding chain** (downlink): LDPC-coded bits → rate matching → bit
  interleaving → scrambling → back to the host, which modulates them (keeping
  modulation in software avoids moving 32-bit I/Q samples instead of Qm bits);
* **decoding chain** (uplink): equalised symbols → soft demapping (LLR
  estimation) → descrambling → deinterleaving → HARQ rate unmatching with soft
  combining → LDPC decoder.

The LDPC encoder and decoder are not in this RTL. The decoder is the vendor's
hardened core in the RFSoC. The crossbar, the SFP+ link and the radio are also
outside. What is given here is everything between them. It is written in
SystemVerilog, and every block is tested against a model written from the
definitions.

## Block map

```
                enc_cfg                                   (per code block)
                   |
enc_in (Ncb bits) -> rate_matcher -> interleaver -> scrambler -> enc_out (E bits)
                    792x32 buffer   1024x32 buffer  gold seq., 32 bit/clk

                dec_cfg                                   (per code block)
                   |
sym (2 per clk) -> llr_estimator -> descrambler -> deinterleaver -> rate_unmatcher -> dec_out
                   13-stage pipe    16 LLR/clk     4 sets x 8 bufs   16 HARQ buffers   (to LDPC
                                                   128-bit out       x 1652 x 128 bit   decoder)
```

| file | role |
|---|---|
| `rtl/phy_pkg.sv` | LLR type and saturation, modulation enum, Table-I constants, configuration structs |
| `rtl/bram.sv` | block RAM with one byte-enabled write port and two registered read ports |
| `rtl/gold_seq_gen.sv` | TS 38.211 gold sequence, W bits per clock, variable advance |
| `rtl/rate_matcher.sv` | circular-buffer rate matching (puncturing and repetition) |
| `rtl/interleaver.sv` | row/column bit interleaver |
| `rtl/scrambler.sv` | 32-bit XOR scrambling |
| `rtl/llr_estimator.sv` | piecewise-linear max-log soft demapper, QPSK to 256QAM |
| `rtl/descrambler.sv` | LLR sign flipping |
| `rtl/deinterleaver.sv` | LLR deinterleaver that widens the stream to 128 bits |
| `rtl/rate_unmatcher.sv` | HARQ-combining rate unmatching into 16 virtual buffers |
| `rtl/phy_accel_top.sv` | both chains and their control |

One clock drives all of it. The intended rate is 250 MHz. The LDPC decoder core
runs at 500 MHz behind its own clock crossing, which is not part of this RTL.
Reset is asynchronous and active low. Memories are not reset.

## Number formats and stream conventions

* **Bits** travel in 32-bit words. Stream bit *t* is bit *t* mod 32 of word
  *t*/32, least significant bit first. Every word but the last of a code block is
  full. `nbits` gives the valid count and `last` marks the end.
* **LLRs** are 8-bit two's complement in units of 0.25. Only −31…+31 is used,
  that is ±7.75, which is 6 bits sign-extended to 8. The sign convention is
  log(P(b=1)/P(b=0)): a negative LLR means "probably 0".
* **LLR vectors** are 16 lanes (128 bits, four 32-bit words of four LLRs). A
  `cnt` field gives how many lanes, counted from lane 0, are valid. Partial
  vectors occur at the ends of rows and blocks. No lane is ever shifted to fill
  a gap.
* **Symbols** are signed 16-bit Q3.12 numbers: a unit-energy constellation point
  scaled by 4096.

## Encoding chain

**Rate matcher.** The Ncb coded bits are written into a 792-word circular buffer.
792 × 32 = 25 344 = 66 × 384 bits, the largest circular buffer. E bits are then
read starting at k0, which the host derives from the redundancy version. Reading
wraps at Ncb, so E > Ncb repeats bits. Each memory word gives a chunk of 1 to 32
bits. The chunk is shorter at k0, at the wrap point when Ncb is not a multiple of
32, and at the end of the block. A shifter appends each chunk to a 192-bit
accumulator, and full words leave it at one per clock. A read is issued only when
the accumulator and the chunks already in flight leave room for it. This hides
the two-clock read latency.

**Interleaver.** The E bits form Qm rows of G = E/Qm bits. Output symbol k is
made of bits k + l·G, for l = 0…Qm−1. For each group of 32 symbols, one read per
row fetches two adjacent words through the memory's two read ports and shifts out
the row's 32-bit chunk. The Qm chunks are transposed into Qm output words. These
words are sent while the next group is read, which costs about Qm + 3 clocks per
Qm words. Reading starts only once the scrambler is ready.

**Scrambler.** The scrambler XORs each word with the next 32 bits of the gold
sequence. The generator unrolls both 31-bit LFSRs 32 steps per clock. After
`init` it spends 50 clocks skipping the first Nc = 1600 bits. It then advances by
the number of valid bits in each word, so the partial last word stays aligned.
c_init comes from the host. In TS 38.211 it is n_RNTI·2^15 + n_ID.

## Decoding chain

**LLR estimator.** The max-log LLRs of a Gray-mapped QAM symbol become nested
absolute values on each axis. Bits 0/1 use −r, bits 2/3 use |r| − B, bits 4/5
use ||r| − B| − C, and bits 6/7 use |||r| − B| − C| − D. Each result is
multiplied by S = A/σ². A is 2/√2, 2/√10, 2/√42 or 2/√170 for QPSK…256QAM.
B, C and D are multiples of A: B = A, 2A, 4A; C = A, 2A; D = A.

The host supplies S as unsigned Q8.8, so each bit needs one multiplier. The
product has 20 fractional bits. It is rounded half up to units of 0.25,
saturated to ±31 and sign-extended. Two symbols enter per clock and results
leave exactly 13 clocks later:

* 1 input register;
* 6 stages of negation, absolute value and −B/−C/−D, each saturated to 16 bits;
* 1 stage that selects the value for each bit;
* 1 multiply stage;
* 1 rounding stage;
* 1 stage that saturates to 6 bits;
* 1 packing stage;
* 1 output register.

Symbol 0 fills lanes 0…Qm−1 and symbol 1 fills lanes Qm…2Qm−1.

**Descrambler.** The descrambler has the same structure as the scrambler, with a
16-bit generator: 100 clocks of skipping, then 16 LLRs per clock. It negates
LLR *i* when sequence bit *i* is 1, and advances by the beat's LLR count.

**Deinterleaver.** This is the block that turns the narrow symbol-order stream
into the wide row-order stream the decoder wants.

Storage is four sets of eight 32-bit-wide buffers, each word holding four LLRs.
Buffer *l* of every set holds row *l*, that is bit *l* of every symbol. LLR *k*
of a row is stored in set (*k*/4) mod 4, word *k*/16, byte *k* mod 4. An input
beat carries two symbols with an even *k*, so each buffer sees at most one
byte-enabled write per clock. Reading word *w* of row *l* from all four sets in
the same clock returns LLRs 16*w*…16*w*+15 of that row: a complete 128-bit
vector, with no shifting.

When G is not a multiple of 16, the last vector of each row is partial. This
trades a few part-empty vectors for the absence of any cross-row alignment
logic. Each buffer is 768 words deep, 24 BRAM36 spread over 32 buffers, so a row
may hold up to 12 288 LLRs. The next block can be loaded only after the current
one has been read out. Readout stops when the rate unmatcher's almost-full
signal drops.

**HARQ rate unmatcher.** This is the most involved block. Its memory holds 16
virtual circular buffers of 1652 rows × 16 LLRs. For each code block the host
says which buffer to use and whether the packet is new. A new packet gets a free
buffer. A retransmission gets the buffer its packet used before, so different
packets can be interleaved while they wait for retransmissions.

* *Placement.* LLR *n* goes to position (k0 + *n*) mod Ncb. The memory is split
  into 16 banks of 8 bits. Position *p* lives in bank *p* mod 16, at row
  *p*/16 of the chosen buffer. A beat of up to 16 consecutive positions
  therefore touches each bank once, whatever its alignment. A beat that would
  run past position Ncb−1 is split over two clocks. The `split_stall` output
  shows when this happens.
* *Combining.* Every write is a read-modify-write: read, registered output,
  then add and write back. For a retransmission the LLR is added to the stored
  one, saturating at ±31. For a new packet the first Ncb LLRs overwrite, and any
  repeated ones (E > Ncb) are added. The same position is never written twice
  within three clocks as long as Ncb ≥ 48, an assertion checks this.
* *Readout.* Once all E LLRs are placed, the codeword goes to the decoder:
  2·Zc zeros first, for the always-punctured systematic bits, then the Ncb
  positions. Filler positions are forced to −31 (−7.75, "certainly 0").
  Positions never received in a new packet are 0. The memory is cleared at
  those positions during the same readout, so a later retransmission adds to
  zeros rather than to old data.
* *Flow.* Input vectors pass through an 8-deep FIFO. `in_ready` is an
  almost-full level that leaves room for the two reads the deinterleaver may
  still have in flight.

**Overlap between blocks.** The top accepts a new decoding configuration as soon
as the deinterleaver is idle. It keeps the rate-unmatching part in a one-entry
holding register until the rate unmatcher finishes the previous block. Loading
block *n*+1 therefore overlaps the readout of block *n*. With 256QAM and the
paper's block (K = 8448, Ncb = 26 112, E = 12 672), the end-to-end test
measures 2480 clocks per block in steady state. At 250 MHz that is 851 Mbit/s of
information bits. The published figure for the full chain is about 900 Mbit/s.
The remaining gap comes mostly from the serial HARQ readout (1680 clocks) and
from the descrambler restart at every block.

## Configuration (per code block)

`enc_cfg_t`: `ncb`, `e`, `k0`, `mod`, `c_init`.

`dec_cfg_t`: `mod`, `scale` (A/σ², Q8.8), `c_init`, `e`, `buf_id`, `new_tx`,
`k0`, `ncb`, `zc2` (2·Zc), `fill_start`, `fill_len` (F).

All values are computed by the host. This covers k0 from the redundancy
version, σ² and the choice of HARQ buffer. The encoding chain takes its Ncb
input words after `enc_cfg_ready`. The decoding chain takes exactly G = E/Qm
symbols, two per clock, with `sym_two` low for a final odd symbol.

## Where this departs from the source design or the standard

* The rate matcher does not skip filler bits, which TS 38.212 requires. The
  description it follows does not mention skipping them. The decoder side
  forces filler LLRs to −7.75 wherever they are.
* The stated code dimensions disagree with one another. K = 10·Zc and
  Ncb = 50·Zc are given for BG1 and 22·Zc / 66·Zc for BG2, the reverse of
  TS 38.212. The benchmark block has Ncb = 26 112 = 68·384, which is N rather
  than N − 2Zc. The HARQ buffers (26 432 LLRs) hold 26 112. The encoder's
  792-word buffer holds at most 25 344 bits.
* The shifters are not the 16-bit barrel shifters of the source description:
  the rate matcher uses an accumulator insert and the interleaver a 64-to-32
  extract.
* The soft demapper's "six adders and eight multipliers" are taken per symbol.
  With two symbols per clock, the module has twelve adders and sixteen
  multipliers.
* The HARQ memory follows the stated 16 × 1652 × 128-bit size. That is about
  3.4 Mbit, more than the six UltraRAMs the same description quotes.
* The layer demapper (single layer here) and the RFNoC packet interfaces are
  not modelled. The chains have plain valid/ready-style ports.
* Throughput is about 851 Mbit/s for the benchmark block against about
  900 Mbit/s published (see above).

## Simulating

Each block has a self-checking testbench in `tb/`. Each one ends by printing
`TB_RESULT checks=N failures=M`. `tb/tb_ref_pkg.sv` holds the reference models:
a bit-serial gold sequence and the LLR equations. For example:

```
verilator --binary --timing --assert -y rtl -y tb rtl/phy_pkg.sv tb/tb_ref_pkg.sv \
          tb/tb_phy_accel_top.sv --top-module tb_phy_accel_top
./obj_dir/Vtb_phy_accel_top
```

`tb_phy_accel_top` runs both chains at the default sizes, at the same time. It
includes the benchmark block, a new transmission followed by a retransmission,
and four back-to-back 256QAM blocks. It prints how often each mechanism
occurred:

* repetition;
* scrambler start-up wait;
* symbol hold;
* odd-symbol beat;
* deinterleaver backpressure;
* split beats;
* HARQ combining;
* filler and punctured LLRs.

It also prints the steady-state clocks per block. It finishes in well under a
minute.

`tb_rate_unmatcher` also fills all 16 HARQ buffers with different packets at
once. It then sends two rounds of retransmissions into them in shuffled order
and checks every combined codeword.

Parameters worth changing: `rate_matcher.MEM_WORDS`, `interleaver.MEM_WORDS`,
`deinterleaver.DEPTH`, and `rate_unmatcher.NBUF` / `ROWS`. The LLR estimator's
fixed-point choices are in `phy_pkg` (`a_const` … `d_const`) and in its stage
8–10 shifts.
