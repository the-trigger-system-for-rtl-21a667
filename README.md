# A three-level trigger for a fixed-target heavy-ion experiment

A fixed-target experiment spreads its detectors (time-of-flight walls, a neutron
wall, a start detector) over a large hall, with their readout electronics in a
dozen or more crates up to about 100 m apart. The trigger has to decide, event by
event, whether the whole detector saw something worth reading out, and tell every
crate in time. This design does that in three levels, joined by optical fibres in
a master–slave star:

1. **Front-end preprocessing** (`fe_preproc`), in every front-end measurement
   module: turns the hits of 16 photomultiplier (PMT) channels into one number,
   how many scintillator bars were hit, and sends it as the *width* of a pulse.
2. **Slave trigger module, STM** (`stm_fpga`, core `stm_trigger`), one per crate:
   sums the hit numbers of the crate's 16 front-end modules and sends a 16-bit
   *sub-trigger* word over its fibre to the master.
3. **Master trigger module, MTM** (`mtm_fpga`, core `mtm_trigger`): collects up
   to 16 sub-trigger words, lines them up in time, checks a pattern of which
   crates fired and whether the total hit number exceeds a threshold, and sends
   the *global trigger* back over all fibres. Each STM then puts it on its
   crate's star trigger bus.

Two things can be changed while running: the contents of the command registers
(input masks, time windows, delays, threshold, pattern selection), and, by
loading a different FPGA image, the whole logic. Both are RTL here: the
registers of each FPGA, and the configuration path of each module
(`fpga_ps_reconfig`) that stores a new image in a serial flash and reloads the
FPGA from it.

Everything is synchronous to one 40 MHz clock shared by all crates. Cycle counts
below are in periods of that clock (25 ns).

`trigger_system` is the top: 16 crates × 16 front-end modules × 16 PMT channels,
plus the MTM. The fibre links themselves (serial transceivers, optical modules,
fibres) are not logic of this design, so each link shows up at the top as a pair
of parallel ports at each end (see *The fibre link*).

## Level 1: meantimer and hit-number pulse (`fe_preproc`)

A bar of plastic scintillator is read out by a PMT at each end. Where the particle
strikes sets the difference of the two arrival times, by up to 17 ns. Each PMT hit
is therefore stretched by a retriggerable one-shot (`pulse_expander`) to one clock
period (25 ns), and the two stretched signals of a bar are ANDed: the bar's
*meantimer* output. Channels 2k and 2k+1 form bar k, so a module has 8 bars and a
hit number of 0 to 8.

The rising edges of the 8 meantimers are added every cycle and accumulated in a
counting window of `win_len` cycles that opens with the first meantimer. When it
closes, `hit_out` goes high for exactly as many cycles as bars were counted.
Zero hits give no pulse. Hits that arrive while the pulse is going out are lost
(dead time of up to 8 cycles).

```
PMT 2k   __|‾|______           window (win_len = 8)
PMT 2k+1 __|‾|______       |<------------->|
meantimer__|‾|______       hit_out  ____________________|‾‾‾‾‾‾‾‾|___
                                                         N cycles = N bars
```

In this synchronous model a bar is seen when both PMTs are sampled in the same
clock cycle. Two hits 17 ns apart can fall on either side of a clock edge. A real
front end would stretch the analogue-timed hits before sampling. Here the
parameter `EXPAND_CYCLES = 2` also accepts a pair one cycle apart. The default
stays at the 25 ns of the original scheme.

Latency: first meantimer in cycle t → `hit_out` high from cycle t + `win_len`.

## Level 2: the slave trigger module (`stm_trigger`, `stm_fpga`)

Inputs: one hit-number pulse per front-end module (16 per crate). A mask
register selects the inputs that take part.

* **sub_trg_flag.** Each selected input is stretched by `expand_len` cycles and
  the 16 results are ORed. The flag means "at least one hit in this crate", and
  its rising edge opens the event.
* **Counters.** One counter per input counts the cycles its pulse is high. That
  recovers the hit number from the pulse width.
* **Enable pulse generator.** `en_delay` cycles after the flag rises, it fires a
  one-cycle enable. On the enable, the adder sums the 16 counters into the
  12-bit `Tsum` and the counters are cleared. Rising edges of the flag during
  that time are ignored.
* **Sub-trigger word.** One cycle later `{4'b0100, Tsum[11:0]}` is handed to the
  link. The tag `0100` marks sub-trigger data in the word stream.

`en_delay` (reset value 12) must exceed the spread of the pulse start times plus
the longest pulse (8), or late pulses are cut. Latency: first hit in cycle t →
enable at t + `en_delay` → word at t + `en_delay` + 1 → on the fibre one register
later.

`stm_fpga` adds these parts around the core:

* the link (`gtp_ctrl` and `gtp_init`);
* the register port;
* 16 pseudo-random test generators (`lfsr_hit_gen`), which replace the
  front-end inputs in test mode;
* a counter of received global triggers, read by the DAQ after each run.

A global trigger word from the MTM becomes a one-cycle pulse on all 16 star
trigger lines of the crate, one cycle after the word is received.

**Test generators.** Each generator is a 16-bit Fibonacci LFSR,
x¹⁶+x¹⁴+x¹³+x¹¹+1, stepped once per test event. Its hit number is
`state[7:0] mod 9`, so 0..8. The generator then drives its input high for that
many cycles. Generator i of STM s is seeded with
`16'hACE1 ^ (s·16'h0B17) ^ (i·16'h1F35)`. The numbers of the last event can be
read back, so an offline program can recompute the expected decisions.

## The fibre link (`gtp_ctrl`, `gtp_init`)

Each link carries 16-bit words both ways at one word per clock: 40 M words/s. The
serial transceiver applies 8B/10B coding, which gives 800 Mbit/s on the fibre. The
fabric side of a transceiver is the struct pair `gtp_out_t` / `gtp_in_t`
(`trig_pkg`):

| gtp_out_t (fabric → transceiver) | gtp_in_t (transceiver → fabric) |
|---|---|
| `txdata[15:0]`, `txcharisk[1:0]` | `rxdata[15:0]`, `rxcharisk[1:0]` |
| `pllreset`, `gttxreset`, `gtrxreset` | `plllock`, `txresetdone`, `rxresetdone` |

The link carries three kinds of word:

| word | TXCHARISK | meaning |
|---|---|---|
| `16'h50BC` = {D16.2, K28.5} | `01` | idle; carries the comma for byte alignment |
| `{4'b0100, Tsum[11:0]}` | `00` | sub-trigger, STM → MTM |
| `{4'b1000, 12'h000}` | `00` | global trigger, MTM → STM |

**Start-up (`gtp_init`).** A link is unusable after power-up until its
transceiver has been reset in order. An initialization runs once after reset and
again on each INIT_PULSE command:

1. PLLRESET is high for 4 cycles. GTTXRESET and GTRXRESET go high at the same
   time.
2. The controller waits for PLLLOCK, then releases both datapath resets.
3. When both RESETDONE signals are high, the link is `ready`.

A lost PLLLOCK restarts the sequence.

**Alignment (`gtp_ctrl`).** The transmitter sends the idle word in every cycle
without data, so the receiver keeps finding the K28.5 comma. The receiver
declares the link synced after 4 idle words in a row with the comma in the low
byte. A K character anywhere else means the bytes are misaligned and drops sync.
Data words are passed on only while synced.

## Level 3: the master trigger module (`mtm_trigger`, `mtm_fpga`)

Each received sub-trigger word on link i becomes a one-cycle flag ST_i and a
12-bit hit number STnum_i. A global trigger GT_OK needs two conditions at once.

**The pattern (GT_OK_tmp).** Crates at different fibre lengths deliver their
words at different times. Each flag therefore passes through its own delay line,
a shift register with a tap chosen by register, of 0 to 15 cycles. Set
`delay_i = max_latency − latency_i`, and the flags of one event leave the delay
lines in the same cycle. That timing must be exact: the pattern is evaluated
cycle by cycle. The 16 aligned flags form four groups:

* A = ST_1..ST_4
* B = ST_5..ST_8
* C = ST_9..ST_12
* D = ST_13..ST_16

Inside a group the function is fixed at build time by the parameter `GROUP_AND`:
bit g = 0 ORs the group's flags, 1 ANDs them. The default ORs every group. A
multiplexer selected by command then picks the pattern:

| mode | GT_OK_tmp |
|---|---|
| 0 | A ∥ B ∥ C ∥ D |
| 1 | A & B & C & D |
| 2 | (A & B) ∥ (C & D) |
| 3 | off |

**The hit sum (GT_eff).** Each STnum_i is loaded when its flag arrives. It is
held for `hold_len` cycles (reset value 32), then cleared. The 16 held values are
added, and GT_eff = (sum > threshold).

Holding the numbers, rather than delaying them with the flags, lets a plain adder
see all crates of one event, however far apart their words arrived. It also sets
two limits:

* `hold_len` must exceed the largest difference in (arrival + delay) between the
  crates of one event, by at least one cycle;
* events closer together than `hold_len` add into each other's sums.

GT_OK = GT_OK_tmp & GT_eff is registered. It is high for one cycle,
`delay_i + 3` cycles after the flag of link i. Each GT_OK does two things:

* it sends the global trigger word on all 16 links;
* it pushes a record of the 16 held STnum values into the data buffer
  (`data_buffer`), a 16-deep FIFO that the DAQ reads through the registers. A
  push into a full buffer is dropped and sets a sticky overflow flag.

## Registers

Both FPGAs have a register port `reg_req_t {addr[7:0], wdata[31:0], we, re}` with
combinational read data `reg_rdata[31:0]`. In the crates this port sits behind
the PXI bus interface.

STM:

| addr | name | access | meaning (reset value) |
|---|---|---|---|
| 0x00 | CTRL | w bit 0 | 1 = INIT_PULSE, restart link initialization |
| | | rw bit 1 | test mode: inputs come from the LFSR generators (0) |
| | | r bits 3:2 | rx synced, link ready |
| 0x01 | MASK | rw | inputs taking part (16'hFFFF) |
| 0x02 | EXPAND | rw | sub_trg_flag expansion, cycles (4) |
| 0x03 | ENDLY | rw | enable pulse delay, cycles (12) |
| 0x04 | GTCNT | r, w clears | global triggers received |
| 0x05 | EVENT | w | one test event on all generators |
| 0x06 | SUBCNT | r, w clears | sub-trigger words sent |
| 0x10+i | RNUM | r | last number of generator i |

MTM:

| addr | name | access | meaning (reset value) |
|---|---|---|---|
| 0x00 | CTRL | w bit 0 | INIT_PULSE to all links |
| | | rw bits 3:2 | pattern mode (0) |
| 0x01 | THRESH | rw | hit-number threshold (0) |
| 0x02 | HOLD | rw | STnum hold time, cycles (32) |
| 0x03 | GTCNT | r, w clears | GT_OK count |
| 0x04 | LINKS | r | [15:0] link ready, [31:16] rx synced |
| 0x05 | BUFST | r | [7:0] buffer entries, [8] overflow |
| | | w | clears overflow |
| 0x06 | POP | w | drop the buffer head |
| 0x10+i | DELAY | rw | delay of ST_i, 0..15 (0) |
| 0x20+i | BUF | r | STnum_i of the buffer head |

## Reloading an FPGA (`fpga_ps_reconfig`)

A new trigger logic that registers cannot express is loaded as a new FPGA image.
On each module a CPLD sits between the crate bus and the FPGA. Its configuration
path does this in two steps: it writes the image into an SPI serial flash, then
clocks it from the flash into the FPGA's passive-serial (PS) configuration port.
The flash is an M25P32 on an STM and an M25P128 on the MTM; both take 24-bit
addresses and 256-byte pages, so one controller serves both. The top has one
instance per module: `cfg_cmd[s]` for STM s, and index 16 for the MTM.

The DAQ side gives one command at a time (`cmd_start`, `cmd_op`, `cmd_addr`,
`cmd_len`). `busy` is high while it runs, `done` pulses at the end, and `error`
comes with `done` after a failed reload. Commands given while busy are ignored.

| cmd_op | command | what happens on the flash pins |
|---|---|---|
| 0 | erase | WREN, SECTOR ERASE at `cmd_addr`, poll RDSR until not busy |
| 1 | program | WREN, PAGE PROGRAM at `cmd_addr` with `cmd_len` bytes (1..256, one page), poll |
| 2 | reload | READ from address 0, `cmd_len` bytes, paced by the PS loader |

Program data come in as a byte stream (`wr_valid`/`wr_data`, taken when
`wr_ready` is high). So a full image is loaded in three passes:

1. erase enough sectors;
2. program it page by page from address 0;
3. issue a reload with the image length.

Two helper modules do the work:

* `spi_flash_ctrl` handles the flash. It uses SPI mode 0 with SCK at half the
  clock, 16 cycles per byte. During a read, SCK stops while the consumer has not
  taken the last byte.
* `ps_loader` handles the FPGA. It pulls nCONFIG low for 8 cycles and waits for
  nSTATUS to come back high. It then sends each byte least significant bit
  first on DATA0, one bit per DCLK at half the clock. After the last byte it
  gives up to 16 more DCLKs for CONF_DONE to rise.

A reload therefore takes about 16 cycles per byte, 2.5 MB/s at 40 MHz: about
0.4 s per megabyte of bitstream. nSTATUS falling during the load, or
CONF_DONE missing at the end, is reported as an error.

## Where this RTL follows the original scheme and where it departs

These parts follow the original scheme:

* the three levels;
* the 25 ns expansion and AND meantimer;
* the hit number as pulse width, at most 8 per module;
* the STM's mask, expanders with OR, enable pulse generator, counters and adder;
* the 16-bit sub-trigger word with the 12-bit Tsum and tag `0100`;
* the K28.5 comma;
* the order of the initialization steps;
* 16 links at the MTM, per-flag delays set by command, four groups;
* the three pattern functions and the command-selected multiplexer;
* adder and comparator, and GT_OK as the AND of both conditions;
* buffering of STnum for the DAQ;
* a global-trigger counter in the STM;
* LFSR test generators with numbers 0..8;
* storing a new FPGA image in the module's serial flash and loading the FPGA
  from it in passive-serial mode.

These are choices of this design:

* **One clock.** The original STM counts pulse widths at 80 MHz from a PLL and
  re-times Tsum into the link clock. Here everything runs at 40 MHz and a pulse
  of N cycles reads as N.
* **Link words.** The idle word and the global trigger word (tag `1000`) are this
  design's. Only the sub-trigger tag is given.
* **Grouping.** ST_1..4 / 5..8 / 9..12 / 13..16, and OR inside every group by
  default. Mode 3 means off.
* **Holding STnum.** The hold time and mechanism, and "exceeds" read as strictly
  greater.
* **Timing rules.** The counting window opens on the first hit. There is dead
  time while the pulse is sent, and a one-cycle enable at a fixed delay.
* **Data buffer.** One record per global trigger, 16 deep, drop on full.
* **Link rules.** Sync after 4 aligned idle words. A single controller resets TX
  and RX together. Initialization also starts by itself after reset.
* **Registers.** The register map and reset values. The bus between the PXI
  interface and the FPGA is not specified.
* **Test generators.** LFSR polynomial, seeds and the mod-9 mapping.
* **Configuration path.** The command set, the image at flash address 0, the
  nCONFIG length and the DCLK rate. The flash commands are the standard
  M25P ones.

Not in the RTL:

* the serial transceivers, with their 8B/10B coding, serialiser, comma
  alignment and PRBS generator;
* the PLL and the optical modules;
* the PXI interface of the CPLD (a PCI core), and the CPLD-to-FPGA register bus;
* the serial flash chips themselves.

In their place, the top brings out:

* the transceiver ports;
* the register ports;
* the configuration command ports;
* the flash SPI pins;
* the PS pins.

## Files

`rtl/`:

* `trig_pkg.sv`: link structs, word constants, register map, pattern-mode enum.
* `pulse_expander.sv`: retriggerable one-shot.
* `fe_preproc.sv`: level 1.
* `stm_trigger.sv`, `lfsr_hit_gen.sv`, `stm_fpga.sv`: level 2.
* `gtp_init.sv`, `gtp_ctrl.sv`: link start-up and word handling.
* `mtm_trigger.sv`, `data_buffer.sv`, `mtm_fpga.sv`: level 3.
* `spi_flash_ctrl.sv`, `ps_loader.sv`, `fpga_ps_reconfig.sv`: the configuration
  path.
* `trigger_system.sv`: the top.

`tb/`: self-checking testbenches named `tb_<module>.sv`, one per module except
the helpers (`pulse_expander`, `spi_flash_ctrl`, `ps_loader`, tested through
their users). There are also three behavioural models. `m25p_model.sv` is an SPI flash. It understands
the five commands, with a busy time after program and erase, and is smaller
than the real parts. `ps_fpga_model.sv` is an FPGA's PS port. It records the
bytes it receives and can be told to fail part-way. `gtp_link_model.sv`
stands for
both transceivers, the optical modules and the fibre of one link:

* it drops and restores PLLLOCK and RESETDONE in response to the resets;
* it delays words by a set latency;
* after each receiver reset it delivers the bytes shifted by one for a while, so
  the alignment logic has something to find.

## Simulating

With Verilator 5 (two-state; every testbench prints
`TB_RESULT checks=N failures=M` and stops itself):

```
verilator --binary --timing --assert --top-module tb_trigger_system \
    -y rtl -y tb rtl/trig_pkg.sv tb/tb_trigger_system.sv -o sim
./obj_dir/sim
```

Replace `tb_trigger_system` with any other `tb_<module>` to test one block.

`tb_trigger_system` runs the top at its default size and takes about half a minute. It
covers:

* random detector events in random sets of crates, with noise hits and a masked
  input, checked for every trigger count, star-trigger pulse and buffered STnum;
* all three pattern modes and threshold rejects;
* link re-initialization by command;
* a buffer overflow;
* the laboratory test: 2 crates × 16 LFSR generators, 50 runs of 100 events,
  pattern (A&B)∥(C&D), threshold 128. The valid-event count of each run, read
  from the STM counters, must equal the count recomputed in the testbench from
  the generator definition. The counts come out between roughly 35 and 65 per
  100 events;
* reloading the MTM FPGA and one STM FPGA at the same time. Each module erases
  its flash, programs a 300-byte image and reloads. The bytes each FPGA model
  received are compared with the image.

The block testbenches check exact latencies and compare against models written
independently of the RTL:

* the meantimer and window rules in `fe_preproc`;
* Tsum and the enable timing in `stm_trigger`;
* the reset order in `gtp_init`;
* the sync rule in `gtp_ctrl`;
* every pattern mode with two group configurations in `mtm_trigger`;
* FIFO behaviour in `data_buffer`;
* the LFSR sequence in `lfsr_hit_gen`;
* erase, program, flash contents, the reloaded bytes, nCONFIG length, the load
  time per byte and the error case in `fpga_ps_reconfig`.

The design uses no vendor primitives and no memories other than the small FIFO
array.
