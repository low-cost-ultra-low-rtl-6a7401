# FPGA control logic for a two-DAC ion-trap electrode module

An ion trap needs a few dozen quiet, stable DC voltages on its electrodes, and
some of them must change in step with the experiment (ion transport, trimming
of the trap potential). The module this logic belongs to generates 32 such
voltages with two Texas Instruments DAC81416 converters (16 channels, 16 bits,
±10 V each) and a small Spartan-7 FPGA. The host computer decides what the
voltages should be and ships them over an ordinary USB-to-serial cable; the
FPGA turns each request into a serial write to the right converter. Because
the serial link from the host is slow and has no timing guarantees, writes
that must happen at a defined moment are uploaded ahead of time, held in FPGA
memory, and released by an edge on a dedicated trigger pin.

This repository gives synthesizable SystemVerilog for that FPGA logic, a
behavioural model of the converter's serial interface, and self-checking
testbenches. The block structure (UART receiver/transmitter, one SPI controller
per converter, a trigger input shared by both, a 10 MHz logic clock divided
from a 50 MHz oscillator, configuration of the converters by the SPI
controllers) follows the published description of the module. That
description does not publish the byte format on the serial link, the
converter register values, the memory organisation or any handshake, so those
are choices made here; each is marked below and in the opening comment of the
file concerned.

## Signal path

```
 50 MHz osc ──► clk_rst_gen ──► 10 MHz logic clock + synchronous reset
                                                     ┌──────────────────────────┐
 uart_rx_i ──► uart_rx ──► cmd_decoder ──cmd[0]──►   │ dac_spi_ctrl (SPI_0)     │──► SCLK/SDIN/SYNC of DAC_0
                              │       ──cmd[1]──►    │ dac_spi_ctrl (SPI_1)     │──► SCLK/SDIN/SYNC of DAC_1
 uart_tx_o ◄── uart_tx ◄──────┘ reply byte           │  ├ spi_master (24-bit)   │
 trig_i ─────► trigger_sync ── pulse to both ──────► │  └ cmd_fifo (1024 words) │
                                                     └──────────────────────────┘
```

`vanguard_top` wires these together. Its ports are the board pins: the 50 MHz
clock, a reset, the UART pair, the trigger pin and SCLK/SDIN/SYNC for each
converter (`dac_sclk_o[d]`, `dac_sdi_o[d]`, `dac_cs_no[d]`). The converters'
SDO, LDAC, RESET and CLR pins are not used: the logic never reads the
converters back, and it uses their asynchronous update mode, in which a
channel's output changes as soon as the frame that writes it ends.

## Host commands

Every request is four bytes, and the FPGA answers each with one byte.

| byte | bits | meaning |
|------|------|---------|
| 0 | 7:4 | frame marker, must be `A` |
| 0 | 1 | preload: 0 = write now, 1 = hold until the trigger |
| 0 | 0 | converter: 0 = DAC_0, 1 = DAC_1 |
| 1 | 5:0 | DAC81416 register address; channel *c* is at `0x10 + c` |
| 2 | 7:0 | data bits 15:8 (the 16-bit code) |
| 3 | 7:0 | data bits 7:0 |

Reply: `06h` (ACK) when the command was taken, `15h` (NAK) when it was a
preload for a converter whose buffer was full. The host must wait for the reply
before it sends the next command; a byte that arrives while a command is still
waiting for its controller is dropped. A first byte without the marker is
skipped, and a UART framing error restarts the four-byte collection, so the
decoder finds the next frame after a corrupted one.

The line runs 8N1 at 115200 baud (87 cycles of the 10 MHz clock per bit; the
0.1 % mismatch to a true 115200-baud host is harmless). A command therefore
takes about 350 µs on the wire, which is why anything time-critical goes
through the trigger buffer.

The address byte is passed through unchanged, so the host can write any
converter register, not only the 16 data registers; the four-byte format
covers everything the converter accepts over a write frame.

## Immediate and triggered writes

This is the part of the design with the most interaction, and it lives in
`dac_spi_ctrl`. Each converter has its own controller, so everything below
holds per converter, and the two run independently except that they see the
same trigger pulse.

A controller is in one of four states:

* **INIT** — after reset it sends the seven configuration writes (next
  section). Preloaded commands are already accepted into the buffer; immediate
  commands wait. A trigger edge that arrives now is remembered.
* **READY** — immediate commands go straight to the serial engine whenever it
  is free; preloaded commands go into the buffer while it has room. A trigger
  (or a remembered one) starts playback, unless an immediate write is handed
  to the serial engine in that same cycle, in which case the trigger waits one
  frame.
* **PLAY / PLAY_SEND** — the buffer is emptied to the converter in arrival
  order, frame after frame. Neither kind of command is accepted (the decoder
  simply holds it, and the host waits for its reply); a further trigger edge
  is ignored. When the buffer is empty and the last frame has ended, the
  controller returns to READY.

Timing at the default parameters, in 10 MHz cycles:

| event | time |
|-------|------|
| one serial frame, acceptance to next acceptance | 52 cycles (5.2 µs) |
| chip select low per frame | 49 cycles |
| playback: frame to frame | 53 cycles (5.3 µs) |
| trigger pin rise → pulse inside the FPGA | 2–3 cycles (synchronizer) |
| trigger pulse → first chip-select fall | 2 cycles |
| middle of an immediate command's last stop bit (where the receiver takes the byte) → converter update | about 54 cycles (5.45 µs) |

Both controllers receive the same trigger pulse and, if both have data, start
their first frames in the same clock cycle, so the two converters update
together to within one 100 ns clock. The whole 1024-word buffer plays out in
about 5.4 ms. The converter settles in about 12 µs and the output RC filter
(−3 dB at 48 kHz) is slower still, so the 5.3 µs frame rate is not the limit
for a single channel. Updating all 16 channels of one converter takes 85 µs.

The buffer (`cmd_fifo`) holds 1024 words of 22 bits (address and data) per
converter, 45 kbit for both. That fits the block RAM of the smallest
Spartan-7. The buffer depth is a choice made here; the module description
only says that the data are stored in FPGA memory before the trigger.

## Converter configuration

After reset each controller writes, in this order:

| # | register | address | value | effect |
|---|----------|---------|-------|--------|
| 1 | SPICONFIG | 03h | 0A84h | device out of power-down |
| 2 | GENCONFIG | 04h | 3F00h | internal 2.5 V reference on |
| 3 | DACPWDWN | 09h | 0000h | all 16 channels powered |
| 4–7 | DACRANGE0..3 | 0Ah–0Dh | AAAAh | ±10 V on every channel (4 channels per register) |

The module description lists what the configuration does (power on all
channels, select the range, select single-ended or differential output, use
the internal reference). The addresses and values come from the converter's
data sheet, not from that description. Single-ended output and asynchronous
update are the converter's reset state and are not written. The sequence is a
function in `vanguard_pkg` (`init_write`), so another range or an external
reference is a one-line change. Configuration takes about 36 µs after reset.

With the ±10 V range, code *k* gives V = −10 V + 20 V·*k*/65535: FFFFh is
+10 V, 0000h is −10 V, 7FFFh is −152.59 µV, and one LSB is 305.18 µV.

## Serial frame

`spi_master` sends the converter's 24-bit write frame MSB first: bit 23 = 0
(write), bit 22 = 0, bits 21:16 the address, bits 15:0 the data. SYNC falls,
then SCLK starts low; SDIN changes on each rising edge of SCLK and the
converter samples it on the falling edge. SYNC rises half an SCLK period after
the 24th falling edge and stays high for at least three cycles. SCLK is the
logic clock divided by `2*SCLK_HALF`, 5 MHz by default, a tenth of the
converter's 50 MHz limit. The module description says the logic was kept
slow on purpose to leave wide timing margin; the SCLK rate and the
chip-select gaps here are chosen in the same spirit.

## Clocks and reset

`clk_rst_gen` divides the 50 MHz oscillator by five with a counter. The output
is a register (no glitches), high for two of the five input cycles. All other
logic runs on this 10 MHz clock. The board reset `rst_ni` is asynchronous and
active low. It resets the divider at once. The logic's reset is released two
edges of the 10 MHz clock after `rst_ni` goes high. The UART input and the
trigger pin each pass a two-flop synchronizer. The module description gives
the 50 MHz source and the 10 MHz logic clock made by plain division; the
duty cycle and the reset scheme are choices made here.

## Parameters

| parameter (on `vanguard_top`) | default | meaning |
|---|---|---|
| `CLK_DIV` | 5 | 50 MHz → 10 MHz |
| `CLKS_PER_BIT` | 87 | UART bit time in logic cycles (115200 baud) |
| `BUF_DEPTH` | 1024 | trigger buffer per converter, in writes |
| `SCLK_HALF` | 1 | logic cycles per SCLK half period |
| `CS_HIGH` | 2 | chip select stays high `CS_HIGH + 1` cycles between frames |

Shared constants (register addresses, configuration words, protocol bytes,
the command and write structs) are in `rtl/vanguard_pkg.sv`.

After coarse synthesis the top level comes to about 440 word-level cells,
271 flip-flops and 45,056 memory bits (the two buffers).

## Files

| file | contents |
|------|----------|
| `rtl/vanguard_pkg.sv` | constants, types, frame and configuration functions |
| `rtl/vanguard_top.sv` | top level |
| `rtl/clk_rst_gen.sv` | clock divider and reset synchronizer |
| `rtl/uart_rx.sv`, `rtl/uart_tx.sv` | 8N1 UART |
| `rtl/cmd_decoder.sv` | byte collection, routing to a converter, replies |
| `rtl/trigger_sync.sv` | trigger synchronizer and edge detector |
| `rtl/dac_spi_ctrl.sv` | per-converter controller (configuration, immediate path, buffer playback) |
| `rtl/spi_master.sv` | 24-bit serial frame engine |
| `rtl/cmd_fifo.sv` | trigger buffer (array with registered read, maps to block RAM) |
| `tb/dac81416_model.sv` | behavioural model of the converter's serial interface and registers |
| `tb/tb_*.sv` | one self-checking testbench per module, plus two system tests |

## Simulation

Every testbench prints `TB_RESULT checks=N failures=M` and ends with
`$finish`; it passes when M is 0. With Verilator 5:

```
verilator --binary --timing --assert --timescale 1ns/1ps -Wno-fatal \
  --top-module tb_vanguard_top -y rtl -y tb +libext+.sv -Irtl -Itb \
  rtl/vanguard_pkg.sv tb/tb_vanguard_top.sv -o sim
./obj_dir/sim
```

Replace `tb_vanguard_top` with any other testbench name. Each testbench has a
watchdog that counts a failure and stops the run if it hangs.

* `tb_vanguard_top` — the whole design at its default parameters, with a
  host model at true 115200 baud and two converter models. It covers
  configuration, immediate writes to both converters, the near-zero code sweep,
  full-range steps with a latency bound, a sequence loaded into both buffers
  and released by one trigger edge (both converters must start in the same
  cycle), a corrupted frame followed by a good one, and a 1025-write overflow
  (the last write must get NAK, and the 1024 others must all play). It counts
  each of these mechanisms and fails if one never occurred. It runs in about
  10 s.
* `tb_paper_workloads` — the write patterns of the module's bench
  measurements at default parameters: ten codes from FFFFh to 0000h on one
  channel of each bank of four on both converters, the 7FFFh–8005h step sweep
  on channels 0 and 31, all channels at −10 V, and a full-range step next to a
  channel held at +1 V.
* `tb_<module>` — unit tests. Some shorten the UART bit time or the buffer
  depth to run faster. `tb_cmd_fifo` also fills a default-depth buffer.

The converter model checks frame length and SCLK polarity. It applies writes
when SYNC rises, and it reports a channel's voltage only if the device, the
reference and the channel are powered and the range is ±10 V. A configuration
error therefore shows up as a wrong voltage.

## Departures and limits

* **Host protocol**: the four-byte format, the frame marker, the ACK/NAK
  reply and the one-command-at-a-time flow control are this design's. The
  original host software's format is not published, so this logic will not
  talk to that software unchanged.
* **Trigger use**: the module description says the trigger pin starts
  pre-loaded writes, and elsewhere calls it a way to set the DAC
  configuration. Here configuration runs once after reset, and the trigger
  only releases buffered writes.
* **Readback**: the control diagram draws a return line from each converter,
  but the description says the prototype never reads converter registers. SDO
  is not connected here.
* **Synchronous (LDAC) mode, streaming mode, daisy-chaining, alarms**: the
  description names these as future options. None is implemented.
* **Analog behaviour**: offset, noise, settling and slew of the converters and
  output filters are outside this logic and outside the model.
* **Scale**: one module has 32 channels. A 100-electrode trap needs four
  modules, and there is no module-to-module synchronisation beyond wiring the
  same trigger to each.
