# A hybrid hardware/software IEEE 802.15.4 transmitter pipeline

A radio PHY can be built two ways. Fixed-function hardware is efficient, but it can do only what
was designed into it. Pure software radio is flexible, but the CPU must keep up with the sample
rate. This design sits between the two. The transmit chain is a pipeline of small hardware
blocks. Between every pair of blocks sits an *interposer*. An interposer can hand the stream to
the CPU and take a processed stream back. Software can therefore stand in for any contiguous run
of blocks: to fix a block, to replace one that was never built, or to add a stage. The rest of
the chain stays in hardware.

The blocks form one unified pipeline. Six IEEE 802.15.4 PHYs share it (O-QPSK at 2450, 915 and
780 MHz; BPSK at 868 and 915 MHz; GFSK at 920 MHz). Each PHY enables the blocks it needs and
loads its tables. The architecture follows Strachan and Topham, *Integrating HW/SW Functionality
for Flexible Wireless Radio*. That paper gives the block list, the block order, the interposer
structure and the system around them. It does not give widths, encodings, protocols or register
maps. Those are choices made here; the list at the end of this document names them.

```
 packet    0        1     2       3        4      5        6     7      8              ring
 buffer -> Splitter-I-> PN9 -I-> Clock -I-> Diffenc-I-> Chip -I-> Mapper-I-> FIR -I-> Zpad -I-> Offset-I-> buffer -> DAC
                    |         |         |          |        |          |       |        |          |
                    +---------+---------+----------+--- DMA read / write streams, one interposer at a time
```
`I` is an interposer.

## The stream

Every link is a valid/ready stream (`axis_if`) carrying a 32-bit word and a `last` flag on the
final word of a packet. A word moves on a clock edge where `valid` and `ready` are both high. An
assertion in the interface checks that a stalled word stays stable. Symbol stages use the low
bits of the word: a byte, a nibble, a bit, a chip pair or a phase index. Sample stages pack one
complex sample as `{I[15:0], Q[15:0]}`, both two's complement. Every stage honours back-pressure,
so a slow CPU stalls the pipeline and loses no data. Only the DAC runs at a fixed rate, so it is
the only place where a late CPU shows as an error (an underrun).

## The nine blocks

| # | Block (module) | What it does here | Used by |
|---|---|---|---|
| 0 | Splitter (`splitter`) | byte to two nibbles or eight bits, LSB first | all |
| 1 | PN9 (`pn9`) | XOR with the PN9 whitening sequence x^9+x^5+1, seed 0x1FF, restarted per packet | GFSK |
| 2 | Clock (`clock_seq`) | each bit gives `sps` phase indices on a 16-point circle, +step for 1, -step for 0; the phase is continuous | GFSK |
| 3 | Diffenc (`diffenc`) | e(n) = d(n) xor e(n-1), e(-1) = 0 | BPSK |
| 4 | Chip (`chip_seq`) | symbol to a chip sequence of up to 32 chips from a 16-entry table; one chip or one chip pair per word | O-QPSK, BPSK |
| 5 | Mapper (`iq_mapper`) | 16-entry table from symbol to `{I, Q}` | all |
| 6 | FIR (`fir_filter`) | 41-tap filter with programmable coefficients and interpolation by 1-4 | O-QPSK, BPSK |
| 7 | Zpad (`zpad`) | inserts N zero samples after every M samples | O-QPSK |
| 8 | Offset (`q_offset`) | delays Q by N samples, then flushes N samples at packet end | O-QPSK |

A block whose enable bit is clear passes its input straight through. The block-to-PHY usage is
the paper's. The "Used by" column is what the registers select; no hardware ties a block to a
PHY.

Rates multiply along the chain. For O-QPSK 2450 MHz: 31 250 bytes/s become 62 500 nibbles/s.
The Chip block turns these into 1 M chip pairs/s (32 chips per symbol, two per word). The Mapper
keeps the 1 M/s rate, and the FIR brings it to 4 Msample/s. Every block sends at most one word
per clock cycle. Expanding blocks (Splitter, Clock, Chip, FIR) accept a new input in the same
cycle as the last output of the previous one, so a stream runs without bubbles. A clock of at
least 4 MHz therefore meets the fastest PHY. The paper does not name a clock.

**Interpolation sits in the FIR.** The block table calls the FIR a 41-tap shaping filter, and
Zpad "inserts N zeros every M samples". The paper's rate-per-stage plot, however, shows the
fourfold rise in rate at the output of the FIR, for both O-QPSK and BPSK. This design follows the
plot. The FIR runs on a zero-stuffed stream: each input sample enters the delay line followed by
L-1 zeros, and each entry produces one output. Zpad stays a separate zero-insertion stage after
the filter. The paper does not say what N and M O-QPSK uses.

**The Clock block** is described only as generating "(counter)clockwise series of symbols". Here
it is the phase walk of a continuous-phase FSK modulator. The Mapper's cos/sin table then turns
the phase indices into samples. With 4 outputs per bit and a step of 1 on 16 points, each bit
turns the phase by a quarter circle (modulation index 0.5). True Gaussian shaping is not
described, and it is not built.

## Interposers: how software enters the pipeline

Each interposer (`interposer`) has four parts:

* An **input demultiplexer**, selected by `rd_en`. It sends the incoming stream either onward or
  into the read double buffer.
* An **output multiplexer**, selected by `wr_en`. It takes the outgoing stream either from the
  bypass path or from the write double buffer.
* **Two double buffers**, one per direction. Each has two banks of 256 words, so the pipeline
  fills or drains one bank while the DMA drains or fills the other.
* **An interrupt**: `irq = (rd_irq_en & a read bank is waiting) | (wr_irq_en & a write bank is
  free)`.

The paper's "interposer enabled" is `rd_en = wr_en = 1`. Here the two selects are separate, so
that the interposer in front of a software segment reads and the one after it writes. With
`rd_en = 1` and `wr_en = 0`, nothing goes onward: the blocks behind it see no data. With
`rd_en = 0` and `wr_en = 1`, the input is held (ready low).

**Read direction.** Pipeline words fill the current bank. The bank closes when it holds
`BUF_SIZE` words or when a word with `last` arrives. It then goes to the DMA side with its word
count and a packet-end flag, and the pipeline fills the other bank. When both banks wait for the
CPU, the input stalls, and the stall travels back up the pipeline. The DMA read stream sends a
bank with `dma_rd_last` on its final word. `dma_rd_pkt_last` is high on that word if the bank
ends the packet.

**Write direction.** DMA words fill a free bank, and `dma_wr_last` closes it. So the CPU chooses
each chunk's length, up to 256. The length is given by the closing flag on the stream, not by a
size register. A full bank also closes, so a longer transfer simply continues in the next bank. `dma_wr_pkt_last` on the closing word marks the chunk that ends
the packet. The pipeline then sees `last` on that chunk's final word. Closed banks drain into the
pipeline in order.

**One DMA channel.** `dma_router` connects the single pair of DMA streams to one interposer for
reading (`DMA_SEL[3:0]`) and one for writing (`DMA_SEL[11:8]`). This matches a single CPU
handling one contiguous section. The DMA controller itself is outside this RTL: the top module
exposes its two streams.

**A software stage, step by step** (this is what the end-to-end testbench does; here the Mapper
runs in software):

1. Clear `BLOCK_EN[5]`. Set `IP_RD_EN[4]` and `IP_WR_EN[5]`, `DMA_SEL = 0x0504`,
   `BUF_SIZE = 32`, and the read interrupt of interposer 4 in `IRQ_EN`.
2. Write `CTRL.start`. Splitter and Chip run in hardware, and chip pairs collect in interposer 4.
3. On the interrupt, read `IP_STATUS` (bank ready) and `SEL_STATUS` (word count, packet end).
4. Take that many words from the DMA read stream, map them, and write them to the DMA write
   stream as one chunk. Set `dma_wr_pkt_last` if the read bank carried the packet end.
5. Repeat until the packet-end bank has been written. FIR, Zpad and Offset carry on in hardware.
   `STATUS.done` and the done interrupt signal the last sample at the DAC.

## Ring buffer and DAC

A 1024-word FIFO (`ring_buffer`) sits between the last interposer and the DAC. It absorbs
variation in the CPU's response time. The DAC interface (`dac_pacer`) is armed by `start`. It
begins once the ring holds `PREFILL` words or a whole packet. From then on it takes one sample
every `DAC_DIV` clock cycles and strobes it to the DAC. If the ring is empty at a sample instant
before the packet has ended, that is an **underrun**: a zero sample goes out, a sticky flag is
set, and a counter counts it. The paper reports that the minimum buffer size that avoids
underruns grows roughly as rate^0.66. `DAC_DIV`, `PREFILL` and `BUF_SIZE` are the knobs for
reproducing that effect. `dac_model` is a behavioural model of the converter, not
synthesizable. It turns each code into `VFS*code/32768` and holds the level until the next
strobe.

## Registers

Word addresses. A write takes effect on the clock edge; a read returns data on the next cycle.

| Addr | Name | Fields |
|---|---|---|
| 0x000 | CTRL | W: bit 0 start |
| 0x001 | STATUS | R: 0 busy, 1 done (sticky, write 1 to clear), 2 underrun, 31:16 underrun count |
| 0x002 | BLOCK_EN | bit k enables block k (reset 0x1F1: the O-QPSK blocks) |
| 0x003 / 0x004 | IP_RD_EN / IP_WR_EN | bit k: interposer k reads / writes |
| 0x005 | IRQ_EN | 8:0 read, 24:16 write, 31 done |
| 0x006 | BUF_SIZE | read bank size, 1-256 (reset 256) |
| 0x007 | DMA_SEL | 3:0 read interposer, 11:8 write interposer (15 = none) |
| 0x008 | PKT_LEN | bytes |
| 0x009 | SPLIT_CFG | 1 = bits, 0 = nibbles |
| 0x00A | PN9_SEED | reset 0x1FF |
| 0x00B | CLK_CFG | 2:0 outputs per bit (4), 11:8 step (1) |
| 0x00C | CHIP_CFG | 5:0 chips per symbol (32), 8 pair mode (1) |
| 0x00D | FIR_UP | interpolation (4) |
| 0x00E | ZPAD_CFG | 7:0 N, 15:8 M (0: off) |
| 0x00F | OFFSET_N | Q delay (2) |
| 0x010 / 0x011 | DAC_DIV / PREFILL | cycles per sample (1) / start level (64) |
| 0x012 | IP_STATUS | 8:0 read bank ready, 24:16 write bank free |
| 0x013 | SEL_STATUS | 8:0 count of the selected read bank, 16 it ends the packet |
| 0x014 | IRQ_STATUS | 8:0 interposer irqs, 31 done |
| 0x040-0x04F | chip table | chip c0 in bit 0 |
| 0x050-0x05F | mapper table | `{I, Q}` |
| 0x080-0x0A8 | FIR coefficients | signed 16-bit, 15 fraction bits (reset 0) |
| 0x100-0x1FF | packet buffer | one byte per address |

At reset the chip table holds the sixteen 32-chip sequences of the 2450 MHz O-QPSK PHY, and the
mapper holds QPSK (bit 0 gives I, bit 1 gives Q, ±23170). Filter coefficients must be loaded.
Setting up the other PHYs:

* **BPSK:** `SPLIT_CFG = 1`. Enable blocks 0, 3, 4, 5 and 6. Set `CHIP_CFG = 15`. Load the
  15-chip sequence for 0 and its inverse for 1. Set the mapper entries to `{±A, 0}` and load a
  raised-cosine filter.
* **GFSK:** `SPLIT_CFG = 1`. Enable blocks 0, 1, 2 and 5. Set `CLK_CFG = 0x104`. Set mapper entry
  p to `{A cos(2πp/16), A sin(2πp/16)}`.
* **O-QPSK 915/780 MHz:** load the 16-chip sequences and set `CHIP_CFG = 0x110`. Each symbol
  then gives 8 chip pairs instead of 16, which halves the sample rate. 915 MHz keeps the half-sine
  filter. 780 MHz uses a raised cosine with roll-off 0.8.

## Top level and parameters

`radio_tx_top` connects the register bus, the packet buffer, the nine blocks, nine interposers,
the DMA router, the ring buffer, the DAC interface and the DAC model. Its ports are the register
bus, `irq`, the two DMA streams, the DAC codes and strobe, the model's output levels and
`tx_done`. The CPU, its memory and the DMA controller are outside.

| Parameter | Default | Origin |
|---|---|---|
| `IP_DEPTH` | 256 words per bank | the largest buffer size evaluated in the paper |
| `PKT_DEPTH` | 256 bytes | own choice (holds a 127-byte 802.15.4 frame) |
| `RING_DEPTH` | 1024 words | own choice |
| FIR taps | 41 | paper |
| chip table | 16 x 32 chips | lengths 32/16/15 from the paper; table form own choice |

The whole design is synthesizable except `dac_model`, which uses `real` outputs.

## What follows the paper and what does not

From the paper:
* the nine blocks, their order and their one-line functions;
* which PHY uses which block;
* the 41-tap filter and the four samples per symbol;
* the interposer's structure: (de)multiplexer pair, two double buffers, read/write interrupt;
* DMA access to the interposers, a ring buffer before the DAC, and underrun at the DAC;
* buffer sizes up to 256;
* "last"-flagged packets and chunked writes.

Choices made here:
* all widths and encodings, the stream word and the register map;
* the separate read and write selects of an interposer, and its bank hand-over rules;
* write chunk lengths marked by a closing flag on the DMA stream, rather than written to a register;
* the Clock block as a phase walk;
* interpolation inside the FIR;
* the programmable chip and mapper tables;
* the PN9 polynomial and the chip sequences, taken from IEEE 802.15.4;
* the Offset flush at packet end, the FIR tail left unflushed, and the DAC pacing.

Known gaps:
* no Gaussian pulse shaping for GFSK;
* the 16-chip O-QPSK sequences are not in the reset table and must be loaded. The tests build them from symbol 0 by the standard's rotation and inversion rule, not from the standard's printed table;
* the N and M that O-QPSK uses in Zpad are not known;
* the receiver side, which the paper mentions as possible, is not built.

The paper is not consistent on three points. Its abstract speaks of five 802.15.4 variants while
the body lists six; the six are supported. Its rate plot shows the GFSK rate rising at PN9's
output, while the block table puts the fourfold expansion in the Clock block. The block table is
followed. Finally, the per-PHY diagrams draw no zero-insertion stage for O-QPSK, while the
block-usage table marks Zpad as used by O-QPSK. Zpad is therefore optional: `ZPAD_CFG` with M = 0
turns it off, which is its reset state.

## Verification

Each module in `rtl/` has a self-checking testbench `tb/tb_<module>.sv`. The testbench compares
the module against a reference computed in the testbench, with random gaps and stalls on its
streams. It ends by printing `TB_RESULT checks=N failures=M`. `tb_src` and `tb_sink` are shared
stream drivers. The reference values are independent of the RTL:

* the chip tests spell out the standard's sequences as strings;
* the PN9 test checks the first bytes 0xFF 0xE1;
* the filter test uses a direct convolution.

`tb_radio_tx_top` runs the top at its default sizes. It covers O-QPSK in hardware, O-QPSK with
the Mapper in software (by interrupt and DMA), and the same with a slow CPU, so that the pipeline
stalls and the DAC underruns. It also runs O-QPSK with a 16-chip table. It then runs the three
"unique block" cases in software: O-QPSK with Zpad and Offset in software, BPSK with Diffenc in software (with the write interrupt
enabled), and GFSK with PN9 and Clock in software. BPSK and GFSK also run fully in hardware. The
testbench acts as CPU and DMA controller, and it checks every sample the DAC takes against a
model of the full chain. It also counts each mechanism (bypass, interposer read and write,
interrupt, stall, buffer hand-over, zero padding, offset flush, interpolation, underrun, done,
prefill) and fails if any never occurs. It takes about 10 s.

`tb_block_sweep` runs the hybrid workload one block at a time, for O-QPSK 2450 MHz. Each of the
nine blocks in turn is switched off and done in software, at buffer sizes 1, 8, 64 and 256.
Every one of the 36 runs must deliver exactly the all-hardware samples. For the Splitter, which
has no interposer in front of it, interposer 0 both reads the raw bytes and writes the nibbles.
The testbench also prints how many DAC samples underran. The CPU answers each interrupt after
40 cycles and the DAC takes a sample every 8 cycles:

| block in software | buffer 1 | 8 | 64 | 256 |
|---|---|---|---|---|
| 0-4 (Splitter to Chip) | 0 | 0 | 0 | 0 |
| 5 (Mapper) | 143 | 0 | 0 | 0 |
| 6 (FIR) | 185 | 0 | 0 | 0 |
| 7 (Zpad) | 2115 | 0 | 0 | 0 |
| 8 (Offset) | 2156 | 0 | 0 | 0 |

The trend is the one the paper reports: late, fast blocks need larger buffers. The numbers
themselves depend on this simple CPU model.

Both top-level testbenches share `tb_top_env.svh`. It is the CPU, DMA and reference-model
environment, included inside their modules.

To run a testbench with Verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb +libext+.sv \
    rtl/radio_pkg.sv tb/tb_radio_tx_top.sv --top-module tb_radio_tx_top -o sim
./obj_dir/sim
```

Replace `tb_radio_tx_top` with any other testbench name. Lint a module with
`verilator --lint-only -Wall -Irtl -y rtl rtl/radio_pkg.sv rtl/<module>.sv`.
