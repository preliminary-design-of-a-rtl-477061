# Two-channel 1 GSPS FADC readout logic for alpha/beta pulse-shape discrimination

A phoswich scintillator (a ZnS:Ag layer on a plastic scintillator) gives
two kinds of light pulse. Alpha particles stop in the ZnS:Ag layer, which
emits slowly, so an alpha hit looks like a train of pulses spread over
about a microsecond. Beta particles and gammas are seen by the plastic,
which gives one fast pulse. To tell them apart off-line, the electronics
must keep the whole waveform of every hit. Here that means 1.2 us at
1 GSPS with 14-bit samples, on two photomultiplier channels.

This RTL is the programmable-logic half of such a readout. It runs on a
Zynq-class SoC, between two 1 GSPS ADCs and the processor's DDR memory. For
each channel it:

1. deserialises the ADC's 15 DDR lanes,
2. moves the samples into the logic clock domain,
3. triggers on a threshold crossing,
4. keeps a 1200-sample record in one of a pair of block RAMs
   ("ping-pong" buffering: one buffer fills while the other is read out),
5. copies each finished record into a ring in processor memory over a
   64-bit AXI3 port.

Software on the processor then ships the records to a server. A shared SPI
master writes the configuration words of the two clock-synthesiser PLLs
(ADF4360-7) and the front-end DAC (AD5686).

The structure follows the board's published block diagram: per channel,
IDDR (1:2), FIFO (1:2), TRIGGER, ping-pong logic, BRAM 1/2 and a DMA
engine feeding S_AXI_HP0 or S_AXI_HP2, with a link between the two
triggers. The description names these blocks and what they are for, but
says almost nothing about how they work. Everything inside them is
therefore this design's own, and the sections below say where.

## Data path of one channel

```
 ADC lanes[14:0] (DDR, 500 MHz) ─► iddr_1to2 ─► fifo_1to2 ─► trigger ─► pingpong_buffer ─┬─► bram_sdp (buffer 0) ─┐
                                   2 samples/clk  4 samples/clk  1 clk       delay line,   └─► bram_sdp (buffer 1) ─┤
                                   adc_clk domain │ clk domain             record writer                           ▼
                                                  └───────────── clock crossing          logic_cdma ◄── raddr / rdata
                                                                                              │ AXI3 64-bit writes
                                                                                              ▼ processor DDR ring
```

`channel_readout` wires one such chain. `readout_top` holds two of them,
the register bank, the SPI master and a 48-bit timestamp counter.

### Rates and clocks

| point | clock | samples per cycle |
|---|---|---|
| ADC lanes | `adc_clk[c]`, 500 MHz, both edges | 1 per edge |
| IDDR output | `adc_clk[c]` | 2 |
| FIFO output and everything after it | `clk`, 250 MHz | 4 (one 64-bit word) |

So 2 × 500 MHz = 4 × 250 MHz: the FIFO's read side keeps up exactly and
pops whenever a word is present. The two ADC clocks are independent of
each other and of `clk`. The register port and both AXI3 ports all run on
`clk`, which is an assumption of this design (the description gives no
clock plan).

### Lanes and samples

Of the 15 lanes, 14 carry the sample bits. The 15th is carried through as a
flag bit, because what the ADC puts on it is not documented. Each sample is
stored in a 16-bit slot as `{1'b0, flag, code[13:0]}`, and four slots make
one 64-bit word with the earliest sample in bits 15:0. The IDDR treats the
rising-edge bit as the earlier sample of each pair. Which pair of the DDR
stream starts a FIFO word is arbitrary (it depends on reset release). That
is harmless, because triggers and records work on a sample stream, not on
word boundaries.

## Trigger and the channel link

`trigger` looks at the four samples of each word. A sample is beyond the
threshold when its code is above it, or below it with the `negative`
polarity bit set. The trigger fires on a leading edge: a sample beyond the
threshold whose predecessor is not, also across word boundaries.
`trig_pos` gives the index (0–3) of the first crossing in the word, so the
record header pins the crossing down to one sample.

The crossing is also sent straight to the other channel as `local_hit`.
With the register bit `link` set, each channel triggers on its partner's
crossing as well, so a hit seen on either photomultiplier records both
waveforms. A record started only by the partner has `from_partner` set in
its header. The block diagram shows the two triggers connected but not the
rule, so the rule (OR of the two, switchable) is this design's choice.

Changing the threshold or the polarity can itself create a crossing: the
baseline may suddenly lie beyond the new threshold. Software should
therefore clear the channel's `run` bit, change the settings, and then set
`run` again.

## Ping-pong record buffers and dead time

This is the part that sets the dead time. `pingpong_buffer` does four
things:

* **Delay line.** Every word passes through a 50-word (200-sample) delay
  line, so a record can start 200 samples before its trigger. The delay
  line is a small RAM indexed modulo 64. Triggers are refused until 50
  words have entered it after reset, so no record holds stale contents.
* **Record writer.** On a trigger, the writer goes to the buffer after the
  last one it filled. It writes words 1–300 (1200 samples), then writes the
  header into word 0 on the next cycle. It then marks that buffer full and
  moves to the other buffer. The trigger word always lands at address 51
  (`PRE_WORDS + 1`).
* **Ignored triggers.** Triggers while a record is being written are
  ignored; they are part of that hit. Triggers while `run` is off are also
  ignored.
* **Lost triggers.** A trigger in idle that finds its next buffer still
  full (the DMA has not yet emptied it) is dropped and counted in
  `REG_LOST*`. This is the design's only real dead time.

Between two records that both find a free buffer, the writer is blind for
two cycles: one for the header and one to switch buffers. Records leave in
the order they were filled (`rd_sel` alternates). The DMA hands each
buffer back with a one-cycle `rd_done`.

## Record format and the memory ring

Each record is 301 64-bit words. Word 0 is the header (`header_t` in
`readout_pkg`):

| bits | field |
|---|---|
| 63:56 | record number of this channel, modulo 256 |
| 55 | channel |
| 54 | started by the partner channel's trigger |
| 53:52 | sample index of the crossing within the trigger word |
| 51:48 | zero |
| 47:0 | `clk` ticks (4 ns) when the trigger word left the delay line |

Words 1–300 are the 1200 samples, as described above.

Channel *c* writes its record *n* to `BASE_c + (n mod 256) × 4096`. Slots
are 4 KiB aligned and bursts are 16 beats (128 bytes) from the start of a
slot, so no burst crosses a 4 KiB boundary.

Software reads `REG_WCNT_c` (records written so far). It processes the
slots from its own count up to that value, then writes its count to
`REG_HOST_c`. The DMA waits while `WCNT − HOST = 256`. `irq` is high while
either channel has unconsumed records.

## DMA engine (`logic_cdma`)

For each full buffer, the engine sends the address of a burst, then its
data beats, then the address of the next burst. The record takes
18 bursts of 16 beats and one of 13. The engine waits for every write
response before it releases the buffer and bumps `WCNT`.

Buffer reads have a one-cycle latency. A two-entry queue with credit
counting sits in front of the W channel, so a beat can go out on every
cycle that `wready` is high. With a memory that never stalls, a 37-beat
record (3 bursts) takes 47 cycles from request to release. A full record
takes about 345 cycles (1.4 us), roughly the length of the record itself.
The ping-pong pair therefore absorbs bursts of hits, and steady rates up
to about 700 000 hits/s per channel are carried without loss, provided
the memory keeps up. AXI IDs are not used. Error responses are counted in
`REG_BERR` but do not stop the engine.

## Configuration: registers and SPI

`reg_bank` is an AXI4-Lite slave. Each write is taken when address and
data are both valid, and each read answers one cycle after its address.
Byte addresses:

| addr | name | access | contents |
|---|---|---|---|
| 0x00 | CTRL | rw | [0] run ch0, [1] run ch1, [2] link triggers, [3] negative ch0, [4] negative ch1 |
| 0x04 / 0x08 | THR0 / THR1 | rw | 14-bit threshold code |
| 0x0C / 0x10 | BASE0 / BASE1 | rw | ring base address (4 KiB aligned) |
| 0x14 / 0x18 | HOST0 / HOST1 | rw | records consumed by software |
| 0x1C / 0x20 | WCNT0 / WCNT1 | r | records written to memory |
| 0x24 / 0x28 | LOST0 / LOST1 | r | triggers lost, both buffers full |
| 0x2C | SPI | w | [25:24] target (0, 1: PLL of ADC 0/1; 2: DAC), [23:0] word; starts a frame |
| 0x30 | STATUS | r | [0] SPI busy, [1]/[2] FIFO overflow ch0/ch1 (sticky) |
| 0x34 / 0x38 | REC0 / REC1 | r | records written into the buffers |
| 0x3C | BERR | r | AXI error responses, [15:0] ch0, [31:16] ch1 |

`spi_master` shares SCLK and MOSI between the three devices. It sends
24 bits MSB first at `clk`/16 (15.6 MHz). The framing follows the two
parts' data sheets:

* **PLLs.** SCLK idles low and a bit is shifted in on each rising edge.
  After the last bit, the target's `pll_le` pulses high to load the
  register.
* **DAC.** SCLK idles high. `dac_sync_n` goes low half a period before the
  first falling edge, bits are taken on falling edges, and `dac_sync_n`
  returns high at the end.

A frame keeps `busy` high for exactly 50 half periods. A SPI write while
the master is busy is dropped, so software should poll STATUS[0] first.

## What is not here

The following are outside this RTL and appear only as ports:

* the analog front end (current-sensitive pre-amplifier, differential ADC
  driver, HV supply),
* the ADCs, the PLL and DAC chips and the crystal,
* the SoC's own clock PLL, which must supply `clk` and be held in reset
  until it locks,
* the Cortex-A9 processor system with its AXI interconnect, UART and
  Gigabit Ethernet MAC, and the Ethernet PHY.

Baseline subtraction, charge integration and the least-squares
discrimination are done off-line in software. None of them is in the
logic.

## Departures from the published description, and open points

* The description names the ADC both "TLG121G" and "TLG2121G". Only its
  figures (1 GSPS, 14 bits) matter here.
* The block diagram's "FIFO (1:2)" is read as a 1:2 width ratio (two
  samples in, four out). "Logic CDMA" is built as a plain DMA engine.
  Whether the original used vendor IP for either is not stated.
* Several numbers are this design's own, each a parameter:
  the 200-sample pre-trigger (`PRE_WORDS`), the record header, the
  256-slot ring (`N_SLOTS`), the register map, the SPI divider and the
  16-deep FIFO. The 1200-sample record (`RECORD_WORDS` = 300) follows the
  1.2 us hit window at 1 GSPS.
* There is no forced (software) trigger and no run-time pre-trigger length.
  The description mentions neither.
* The IDDR is written as plain flip-flops on both clock edges. On an FPGA
  it would normally map to the vendor's input-DDR primitive, with input
  delay calibration of the 15 lanes, which is not modelled.

## Verification

Each testbench in `tb/` checks itself and prints
`TB_RESULT checks=N failures=M`.

| testbench | what it checks |
|---|---|
| `tb_iddr_1to2` | random data on both edges; pairs out together, rising edge first |
| `tb_fifo_1to2` | 500 MHz in, ~256 MHz out: order and completeness; overflow flag when the reader stops; recovery |
| `tb_trigger` | random words near threshold, random gaps, partner hits, link and polarity against a sample-by-sample reference |
| `tb_bram_sdp` | random traffic against a reference array, read-before-write |
| `tb_pingpong_buffer` | record contents and header for counting data; priming, disabled and in-record triggers ignored; buffer alternation; a lost trigger |
| `tb_logic_cdma` | record layout in memory under random AXI stalls; ring wrap; ring-full stall; copy time of one record |
| `tb_spi_master` | device models for both framings; words, targets and busy time |
| `tb_readout_top` | whole design at default sizes (see below) |
| `tb_workload_hits` | whole design at default sizes, three runs of 150 hits each |

`tb_readout_top` models two ADCs with noisy baselines and programmed
pulses, two processor memories with random stalls and the software.
Every record it reads back is matched sample for sample against the
ADC's log, and the crossing is checked at the position the header gives.
The run covers:

* SPI writes to all three devices;
* local triggers on both channels;
* a linked trigger;
* ping-pong switching;
* a burst of hits that outruns the DMA, so triggers are lost;
* negative-polarity triggering on one channel (a positive pulse must then
  not trigger);
* a stall of the software: the 256-slot ring fills, the DMA must stop
  writing, the two buffers fill and further triggers are lost until the
  ring is drained. Every hit must end as a record or a lost trigger.

The testbench counts each of these mechanisms and fails if one never
happens.

`tb_workload_hits` imitates an alpha-source run, a beta-source run and a
background run. Its pulse shapes are the testbench's own. It checks that
every hit becomes a record or a lost trigger, and that each record's
baseline-subtracted integral separates alpha hits from beta hits.

`axi_mem_model` and `axi_w_checker` hold the AXI assertions and the memory
model.

## Simulating

Everything is SystemVerilog-2017. `readout_pkg.sv` must be compiled first.
For example, with Verilator 5:

```
verilator --binary --timing --assert -Wno-fatal --top-module tb_readout_top \
    -Irtl -y rtl -y tb +libext+.sv rtl/readout_pkg.sv tb/tb_readout_top.sv
./obj_dir/Vtb_readout_top
```

Verilator has two states, so every register that is read is reset.
Memories are not reset. The full-size end-to-end testbench (about 1.3 ms
of simulated time) runs in a few seconds.
To lint one module: `verilator --lint-only -Wall -Irtl -y rtl +libext+.sv
rtl/readout_pkg.sv rtl/<module>.sv`. The only warnings are package
constants a given module does not use.

Sizes are parameters of `readout_top`: `RECORD_WORDS`, `PRE_WORDS` and
`N_SLOTS`. The BRAM depth and address width follow from `RECORD_WORDS`,
and the delay-line depth from `PRE_WORDS`. Slots must stay at least
`(RECORD_WORDS + 1) × 8` bytes, which 4 KiB is up to `RECORD_WORDS` = 511.
