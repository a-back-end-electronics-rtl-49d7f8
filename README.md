# Fiber back-end readout logic for small and medium physics experiments

Many small detector experiments need the same back-end electronics. It connects a few dozen
front-end boards over optical fiber, distributes triggers and configuration to them, collects
their data, and hands the data to a computer. Test-beam setups also need a trigger logic unit
(TLU) that turns scintillator pulses into numbered triggers for other devices. This repository
holds synthesizable SystemVerilog for the FPGA logic of such a back-end. The logic serves:

* 32 fiber links built from ordinary FPGA I/O pins: 100 Mbps down, 400 Mbps up;
* 16 fiber links on the FPGA's gigabit transceivers ("GTX links"): 16-bit words at 2.4 Gbps;
* a TLU with 10 LEMO inputs, 8 HDMI ports and one RJ45 port;
* the serial interface of a 16-channel threshold DAC;
* a USB 3.0 bridge chip in Slave FIFO mode (32 bits at 100 MHz) towards the host.

The architecture follows the published description of the back-end board used in PandaX-III,
VLAST/HEIC and a muography setup. That description gives the channel structure, the rates, the
line codes, the trigger modes, the TLU signal timing and the USB state flow. It leaves the
message formats, the register map and most widths open. Those are this design's own choices and
are marked as such below.

## Block diagram

```
            host PC
              |  USB 3.0 chip (Slave FIFO, 32 bit, 100 MHz)
        usb_fifo_ctrl ---------------------------------+
          | host words                 upload words ^  |
       cmd_parser --- registers ---+                |  |
          | forward cmd/data       |           data_collector  (97 sources, 16-deep FIFOs,
          v                        v                ^            round robin, drop counter)
   +--------------+          trig_ctrl <---- ext ---+---- SMA input, TLU (40 MHz domain)
   | link fan-out | <-- trigger message              |
   +--------------+                                  |
     |  32 x fiber_dl_link / fiber_ul_link  ---------+  (data words, command replies,
     |  16 x gtx_link (async FIFOs to 120 MHz) -------+   self-trigger requests)
     v
   front-end boards
                              dac_ctrl -> AD5391 (thresholds of the analog LEMO inputs)
```

`backend_top` wires these together. The parts outside the FPGA logic appear as top-level ports:
the I/O serializers and delay lines, the GT transceivers, the USB chip, the DAC and the LVDS
buffers.

## Clock domains

| clock     | rate    | what runs on it |
|-----------|---------|-----------------|
| `clk`     | 100 MHz | everything except the two below |
| `tlu_clk` | 40 MHz  | the TLU, which also forwards this clock to every device on the CLK pair |
| `gt_clk`  | 120 MHz | the transceiver side of each GTX link |

The system clock was picked so that each clock moves one downlink bit, one 4-bit uplink word and
one 32-bit USB word. Crossings between domains:

* Each GTX link has six small asynchronous FIFOs with Gray-coded pointers (`async_fifo`).
* A TLU trigger reaches the system clock through a toggle synchroniser.
* TLU configuration, which changes rarely, passes two-flop synchronisers.

Each domain has its own synchronous reset.

## Normal-I/O fiber links

The front-end boards on these links run on the back-end's clock, which they recover from the
downlink. So the uplink needs no clock recovery, only a phase adjustment of the sampling point.

### Downlink (`fiber_dl_link`)

One bit per system clock, 100 Mbps. The bit stream is shared in time by three channels, in a
fixed four-bit cycle:

```
slot:     0        1        2        3
channel:  trigger  command  trigger  data      -> trigger 50 Mbps, command 25, data 25
```

Each bit is Manchester coded (`manchester_enc`): 0 becomes the symbol pair low-high and 1 becomes
high-low. This keeps the line DC-free for the front end's clock recovery. The two symbols leave
as `sym_o[1]` then `sym_o[0]`, towards an external 2:1 output serializer, so the line runs at
200 Mbaud.

### Uplink (`fiber_ul_link`)

Four bits per system clock, 400 Mbps, from a 1:4 input deserializer (`rx_bits[3]` first).

1. **Alignment.** Software sets a 2-bit `slip` per link, choosing which of the four bit offsets
   starts a word. Sampling phase is set separately by a 5-bit delay tap per link (`fib_dly_tap`),
   which drives the FPGA's input delay line. How the original board aligned words is not known.
2. **Descrambling.** The front end scrambles with a self-synchronous scrambler, which keeps the
   line balanced without code overhead. `descrambler` undoes it with x^58 + x^39 + 1, the
   polynomial of 10GBASE-R; the original polynomial is not published. It locks after 58 bits.
   One line error corrupts three output bits.
3. **Channel split.** Word bit 3 is the trigger channel (100 Mbps), bit 2 the command channel
   (100 Mbps) and bits 1:0 the data channel (200 Mbps).

### Framing inside a channel (`lane_tx`, `lane_rx`)

A channel is a stream of lane words, 1, 2, 4 or 8 bits wide. It idles at zero. A message is a
start word of value 1, followed by the payload MSB first, and then at least one idle word. The
receiver treats any non-zero word seen while idle as a start word. Message sizes:

| direction | channel | payload |
|-----------|---------|---------|
| down | trigger | 20 bits: {type[3:0] = trigger mode, trigger number[15:0]} |
| down | command | 24 bits (free for the front end; the test model echoes it) |
| down | data    | 24 bits |
| up   | trigger | 8 bits: a self-trigger request |
| up   | command | 24 bits: a command reply |
| up   | data    | 16 bits: one data word |

Framing costs two words per message. A fiber data channel therefore carries 16 payload bits
every 10 clocks, which is 160 Mbps or 20 MB/s per board. A downlink trigger message takes
42 clocks (420 ns).

### PRBS test

For bit-error tests, both ends can switch a link to PRBS31 (x^31 + x^28 + 1).

* Downlink: `prbs31_gen` replaces the multiplexed bit before Manchester coding.
* Uplink: `prbs31_chk` checks the descrambled stream. It predicts each bit from the 31 bits
  received before it, so it needs no seed and re-locks by itself.
* Each uplink has a 16-bit saturating error counter. One line error counts three, because the
  descrambler triples it.
* While the uplink check is on, the message decoders are fed idle words. The pattern therefore
  cannot produce false messages.

## GTX links (`gtx_link`)

The GT transceiver (vendor hard IP, outside this logic) moves one 16-bit user word per 120 MHz
clock with 8B/10B coding, 2.4 Gbps on the fiber. The word holds three channels:

```
 15            8 7      4 3      0
[  data (8 bit) | command | trigger ]
```

These are framed as above. Message payloads are the same as on the fiber links. On the system
side the link looks like a fiber link. An uplink message that finds its FIFO full is dropped and
counted in the GT domain. A GTX data channel carries 16 payload bits every 4 words, which is
480 Mbps.

## Triggers

### Trigger control (`trig_ctrl`)

The trigger mode is a register:

* **Off.**
* **Self.** Each front-end request (uplink trigger channel) marks its link for `self_win` clocks.
  When `self_mult` links are marked, a trigger is issued and the marks are cleared. The original
  only says that the back-end counts the triggered boards; the window and threshold are this
  design's reading of that.
* **External.** A rising edge on the SMA input or a TLU trigger, selected by `R_EXT_SRC`.
* **Test.** A trigger every `test_period` system clocks (32 bits, so down to below 10 Hz).

Triggers are numbered from 0. The message `{mode, number}` goes to every link in the same clock.
It waits until the trigger channels of all 48 links are free, so every board gets every trigger.
A trigger arriving while a message still waits is dropped and counted (`R_TRIG_DROP`). At most
one trigger can wait.

### TLU (`tlu`)

On the 40 MHz clock, each LEMO input and each BUSY input passes a two-flop synchroniser and a
rising-edge detector.

* **Trigger condition.** A trigger is formed when at least `level` enabled inputs rise in the
  same clock. Level 1 is an OR; level equal to the number of enabled inputs is a full
  coincidence.
* **Veto.** The trigger is vetoed while any enabled BUSY is high, or while the previous trigger
  ID is still being sent. Vetoed coincidences are counted.

Output timing on the HDMI ports:

```
tlu_clk   _|~|_|~|_|~|_|~|_|~|_ ... _|~|_|~|_
TRIG      __|~~~|________________ ... ________      one clock
TRIG-ID   __________| b15 | b14 | ... | b0 |___     after one gap clock, 16 clocks
```

On the RJ45 port the 16 ID bits follow on the TRIG pair itself. The ID is the number of earlier
triggers, MSB first; that bit order is this design's choice. One trigger occupies 18 clocks
(450 ns), so periodic rates up to 2.2 MHz pass.

The four RJ45 pairs are CLK, TRIG, BUSY and TRIG-ID. Each can be turned into an input through
`R_RJ45_DIR`, because the port sits behind a bidirectional buffer. By default BUSY is the input.

The original text calls the fourth pair "CONT" while its pin table says TRIG-ID; the table is
followed. The CLK pair's data value is unused: the forwarded clock itself is routed outside this
logic.

### Threshold DAC (`dac_ctrl`)

The analog LEMO inputs are discriminated against thresholds set by an AD5391. A write sends the
24-bit word `{0, 0, 00, channel[3:0], 11, value[11:0], 00}` MSB first while SYNC is low. DIN
changes while SCLK is high, and the DAC samples it on the falling edge. SCLK is `clk/(2*DIV)`,
which is 12.5 MHz by default. The word layout comes from the DAC's data sheet; the original only
names the part.

## Host interface

### USB Slave FIFO controller (`usb_fifo_ctrl`)

The controller gives downstream (host-to-board) words priority, so the host can always reach the
board. The state flow is:

1. **Downlink data?** If the downstream buffer flag is up, read one word (SLOE#, SLRD#,
   address 0, 2-clock read latency) and pass it to the command parser.
2. **Empty?** Then check the upload side. If words wait, go to Transmit; otherwise wait
   3 settle clocks and return to 1.
3. **Uplink data?** If words wait (address 3), go to Transmit.
4. **Transmit.** Write up to 256 words. Stop on the burst limit, on the full flag or when the
   source runs dry, then settle 3 clocks and return to 1.

PKTEND# is pulsed when nothing more waits and words were written since the last one. This sends
short replies to the host without waiting for a full buffer.

One burst of 256 words takes 261 clocks. The upload path therefore reaches at most about
392 MB/s on the bus, which is 196 MB/s of payload.

### Host command words (`cmd_parser`)

Every 32-bit word from the host is `{op[1:0], link[5:0], payload[23:0]}`:

| op | meaning |
|----|---------|
| 00 | write local register: payload = {address[7:0], value[15:0]} |
| 01 | send payload as a command to front-end `link` (63 = all links) |
| 10 | send payload as a downlink data word to `link` (63 = all) |
| 11 | read local register `address`; the reply goes up the upload stream |

Links 0-31 are the fiber links and 32-47 the GTX links.

### Register map (`be_pkg`)

| addr | name | contents |
|------|------|----------|
| 00 | TRIG_MODE | 0 off, 1 self, 2 external, 3 test |
| 01/02 | TEST_PER_L/H | test trigger period in 100 MHz clocks |
| 03 | SELF_MULT | self-trigger multiplicity (default 1) |
| 04 | SELF_WIN | self-trigger window in clocks (default 10) |
| 05 | TLU_INEN | [9:0] LEMO input enables |
| 06 | TLU_BUSYEN | [7:0] HDMI BUSY enables, [8] RJ45 BUSY |
| 07 | TLU_LEVEL | coincidence level (default 1) |
| 08 | RJ45_DIR | [3:0] 1 = pair is an output (default 1011) |
| 09 | PRBS | [0] downlink PRBS on, [1] uplink check on, [2] clear counters (write only) |
| 0A | DAC | write {channel[3:0], value[11:0]} to the DAC |
| 0B | EXT_SRC | [0] SMA, [1] TLU (default SMA) |
| 10 | TRIG_CNT | triggers issued (read) |
| 11 | TRIG_DROP | triggers dropped (read) |
| 12 | TLU_CNT | TLU triggers (read) |
| 40+L | LINK L | {slip[1:0], delay tap[4:0]} of fiber link L |
| 80+L | PERR L | PRBS error count of fiber link L (read) |

### Upload words (`data_collector`)

Every word to the host is tagged in its top two bits:

```
01 | link[5:0] | 8'h00       | data[15:0]      front-end data word
10 | link[5:0] | reply[23:0]                    front-end command reply
11 | 6'd0      | addr[7:0]   | value[15:0]     register read reply
```

The 97 sources are each link's data and replies plus the register replies. Each source has a
16-word FIFO. They are merged round-robin, one word per clock. A word that finds its FIFO full is
lost and counted on `up_drop_cnt`. The original names "data receiving and filtering" but gives
no filter, so none is built.

## Limits against the experiments that used the original board

| use | needs | this logic | fits |
|-----|-------|------------|------|
| PandaX-III, 26 fiber boards | 102 MB/s, 3.9 MB/s per board | 196 MB/s upload, 20 MB/s per fiber link | yes |
| muography, fiber boards | ~10 MB/s | as above | yes |
| VLAST, MTPC | 200 MB/s | 196 MB/s upload | no, ~2 % short |
| HEIC beam test, 4 GTX boards | ~2.0 Gbps each | 480 Mbps per GTX link | no |
| TLU rate test | up to 1 MHz | 2.2 MHz | yes |

The data collector holds only 16 words per link. Bursts above the upload rate must therefore be
spread out by the front ends. For example, 26 boards that all send an event at full link speed
after the same trigger offer 2.6 words per clock, and the excess is dropped. The board's SDRAM
could serve as an event buffer, but its use is not described, so this logic does not use it.

The upload limit comes from carrying 16 payload bits in each 32-bit word. The GTX limit comes
from framing the 8-bit data lane. Even the published split of 8 data bits out of 16 at 2.4 Gbps
only gives about 960 Mbps, so the HEIC rate implies a word format not described.

## Where this design departs from or adds to the original

* The downlink text gives both 100 Mbps and 200 Mbps. Here 100 Mbps is the bit rate and
  200 Mbaud the Manchester symbol rate.
* These are this design's own choices, not published:
  * the slot order T-C-T-D;
  * message framing and widths;
  * the uplink bit assignment;
  * the scrambler polynomial;
  * the register map;
  * the command and upload word formats.
* Word alignment by a software slip setting, and the external-source select, are additions.
* The TLU pulse width and the gap before the ID are read from timing diagrams that print no
  numbers. The gap is a parameter (`ID_GAP`).
* The published state chart of the USB controller leaves some branches unlabelled. Here "Empty"
  is read as the upload buffer, and PKTEND# handling is added.
* Not in the logic (external or vendor parts):
  * the GT transceivers and the I/O delay lines and serializers;
  * the clock synthesis and jitter cleaning;
  * the DDR3 SDRAM, whose use is not described;
  * the analog discriminators and the LVDS fan-out.

## Simulating

Each block has a self-checking testbench `tb/tb_<block>.sv`. It prints
`TB_RESULT checks=N failures=M` and stops on a watchdog if it hangs. With Verilator 5:

```
verilator --binary --timing -Irtl -Itb rtl/be_pkg.sv -y rtl -y tb \
          tb/tb_backend_top.sv --top-module tb_backend_top -Mdir obj_top
./obj_top/Vtb_backend_top
```

Replace `tb_backend_top` with any other testbench name. The simulator is two-state, so every
register has a reset.

`tb_backend_top` runs the complete design at its default size: 32 fiber links and 16 GTX links.
It uses behavioural models in `tb/`:

* `fe_fiber_model`: a fiber front-end board with its own scrambler. It uses a different bit
  offset per link and answers triggers with data words.
* `fe_gtx_model`: a GTX front-end board.
* `usb_chip_model`: the USB chip, with a host that can drain slowly.

The test drives everything through host command words:

* register set-up and read-back;
* broadcast and single-link commands with their replies, and downlink data words;
* a DAC write, decoded from the serial pins;
* test, SMA, TLU and self triggers, with every board checked for the same trigger number;
* a dropped trigger;
* TLU IDs on HDMI and RJ45, coincidence and BUSY veto;
* PRBS tests in both directions, with injected errors;
* a final burst that overflows the upload FIFOs while the host drains at a quarter of the rate.
  Here it checks that received plus dropped words equal sent words.

At the end it prints how often each mechanism happened. A mechanism that never happened counts
as a failure. It takes under a minute to build and about a second to run.

Two further testbenches measure rates:

* `tb_readout_rate` runs the full-size design at the PandaX-III load. 26 boards stream 130 MB/s,
  and every word must arrive. It then saturates the upload path and measures the payload rate,
  196.2 MB/s.
* `tb_tlu_rate` drives the TLU at 100 Hz to 1 MHz and checks every trigger and ID. At 2.5 MHz,
  past the limit, it checks that the missing triggers are all counted as vetoes.
