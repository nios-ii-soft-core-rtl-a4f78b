# RPC-DAQ FPGA logic around a NIOS II soft processor

This repository holds the FPGA hardware logic of one RPC-DAQ, written in SystemVerilog. An
RPC-DAQ is the readout unit of one resistive plate chamber in the INO-ICAL detector. It is
built from:

- a Cyclone IV FPGA;
- a NIOS II soft processor;
- a Wiznet W5300 hardwired TCP/IP Ethernet controller.

The processor runs three interrupt routines and a main loop:

- **Event ISR**: reads the latched event and writes it into a hardware FIFO.
- **Command ISR**: handles UDP commands arriving at the W5300.
- **Monitoring ISR**: reads rate scalers on a timer.
- **Main loop**: moves FIFO data into the W5300's TCP socket for event data.

Everything the processor talks to is written here, and so is every piece of logic needed to
make that software scheme work at the rates asked for. The processor core itself is not
(see "Not implemented").

## Structure

```
                  +----------------------------------------------------------+
 strip_hits[128]->| hit_delay -> mask -> event_latch <- rtc <- (preset/sync) |
 trig_in -------->| trigger_ctrl --^   |  busy, irq                         |
                  |        ^ free      v                                     |
                  |        |      irq_ctrl <- mon_timer -> scaler_bank <-----|-- strip_rate[16], fold_in[9]
                  |     sync_fifo <- event_write_ctrl <-+                    |
                  |        |                            |                    |
 processor  <---->|  logic_bridge (32-bit registers) ---+---- spi_master ----|--> HV module
 (av_*, irq[3])   |        |  W5300 window      |            jtag_master ----|--> HPTDC
                  |        v                    v                            |
                  |  w5300_bus_ctrl <------ fifo_to_w5300                    |
                  +--------|-------------------------------------------------+
                           v
                        W5300 (ADDR[9:0], DATA[15:0], CSn, WRn, RDn, INTn)
```

`rpc_daq_top` instantiates all the blocks. The processor's side is brought out as plain
ports:

- a 32-bit memory-mapped data port (`av_address`, `av_read`, `av_write`, `av_writedata`,
  `av_readdata`, `av_waitrequest`);
- three interrupt lines.

The other external devices (W5300 bus, HV SPI link, HPTDC JTAG, detector inputs) are also
top-level ports. `rpc_daq_pkg` holds the shared constants, the interrupt id type and the
register map.

## How an event flows

1. **Delay.** The 128 strip signals pass through `hit_delay`, an 8-clock shift register,
   so the pattern lines up with the trigger decision. Strips that software has marked as
   noisy in the 128-bit strip mask are then cleared from the pattern. The mask does not
   touch the scaler inputs, so a masked strip's noise rate can still be watched.
2. **Trigger gate.** `trigger_ctrl` passes a rising edge of the global trigger only if all
   of these hold:
   - the run is enabled;
   - the event latch is empty;
   - the FIFO has room for a largest event (600 bytes = 150 words).

   Otherwise the trigger is counted as lost. In the original scheme the processor takes
   the allow/block decision after each event. Here the same comparison is done in
   hardware, so the gate reopens by itself as soon as a transfer frees space.
3. **Latch.** `event_latch` stores the delayed hits, the RTC value and an incremented
   event number. It then raises the event interrupt and holds until software ends the
   event.
4. **Event ISR.** The ISR reads the latch through `logic_bridge` and writes the event
   packet, word by word, into `REG_FIFO_DATA`. `event_write_ctrl` forwards a word to
   `sync_fifo` only while CTRL_FLAG is set and the FIFO is not full; any other write is
   dropped and a sticky overflow flag is set. It also counts the words of the current
   event. Writing the "event done" command releases the latch.
5. **Transfer.** The main loop writes `REG_XFER` (number of 16-bit words, socket). From
   then on `fifo_to_w5300` owns the W5300 bus: it pops the FIFO and writes each word as
   two 16-bit writes into the socket's TX FIFO register, upper half first. That register
   is at `0x200 + 0x40*n + 0x2E`, which is 0x26E for socket 1. When done, the software
   writes the write-size register and the SEND command through the W5300 window.

Alternatively, the software can pop FIFO words itself by reading `REG_FIFO_DATA`. This is
the slower all-software path.

## Blocks

| Block | What it does | Timing | Source vs. choice |
|---|---|---|---|
| `rtc` | 64-bit time in 100 ns units; prescaler /5 at 50 MHz. Loaded with a preset by software (LOADRTC) or by the external `rtc_sync`. | Counts every 5th clock; a load restarts the prescaler. | 100 ns precision and start-of-run synchronisation from the description; width and load scheme chosen. |
| `mon_timer` | Programmable periodic pulse (period in clocks, default 10 s = 500,000,000). Drives the monitoring interrupt and the scaler snapshot. | Ticks exactly every P clocks; holds while disabled. | 10 s typical period from the description. |
| `scaler_bank` | 16 strip and 9 fold rising-edge counters. At each monitoring tick they are copied to a readable snapshot and cleared. | Read word is {8-bit channel ID, 24-bit count}; counts saturate. | 16/9 channels and 32-bit words with an 8-bit ID from the description; ID in the top byte and channel order chosen. |
| `hit_delay` | Shift register in front of the latch. | 8 clocks (160 ns). | The figure names only a DELAY block; length chosen. |
| `trigger_ctrl` | Trigger gate, accepted/lost counters. | Gated trigger one clock after the edge. | Gate on FIFO space from the description; done in hardware here. |
| `event_latch` | Holds hits, timestamp and event number; raises the event interrupt. | Busy from trigger until release. | Latched items from the event-format figure. |
| `event_write_ctrl` | CTRL_FLAG-qualified FIFO write, word count, overflow flag, latch release. | Combinational write strobe. | Names from the SCEDA figure; behaviour chosen. |
| `sync_fifo` | 1024 x 32 event FIFO with show-ahead read, count and free space. | Single clock. | Depth chosen (six 600-byte events). |
| `w5300_bus_ctrl` | Drives the W5300 bus for two masters (processor, transfer engine). | 4 clocks per access: setup, strobe x2, hold. This is the 80 ns write cycle. | 80 ns from the description; cycle shape and arbitration chosen. |
| `fifo_to_w5300` | Hardware FIFO-to-W5300 copy engine. | 600 bytes take 300 x 80 ns = 24 us, inside the 35 us reported for the hardware path. | Hardware handover from the description; word order chosen. |
| `irq_ctrl` | Pending, mask and acknowledge for event, command (W5300 INTn, two-flop synchronised, level) and monitoring interrupts, plus the id of the highest pending one. | Pending bit set the clock after the pulse. | Priority event > command > monitoring (see Notes). |
| `spi_master` | 16-bit, mode 0, MSB-first SPI frames to the HV module. | 1 MHz SCLK. | SPI link from the description; frame, mode and rate chosen. |
| `jtag_master` | Shifts up to 32 bits per command on TDI (with an optional TMS exit on the last bit) or on TMS, and returns TDO. Software walks the TAP. | 5 MHz TCK; TMS/TDI change on TCK falling edges and TDO is sampled on rising edges. | JTAG configuration of the HPTDC by the processor from the description; command format and rate chosen. |
| `logic_bridge` | The processor's 32-bit register file, plus a window onto the W5300 registers that inserts wait states. | Registers: no wait state. W5300 window: waits for the bus cycle. | "32-bit logic bridge" from the description; bus protocol and map chosen. |

Every source file starts with a comment giving the same information in more detail.

### Register map (word addresses)

| Addr | Name | Access |
|---|---|---|
| 0x00 | CTRL | [0] run, [1] CTRL_FLAG, [2] monitoring timer on |
| 0x01 | CMD | write-1 pulses: [0] event done, [1] clear event number, [2] clear FIFO, [3] load RTC, [4] clear trigger counters, [5] clear overflow |
| 0x02 | STATUS | [0] latch busy, [1] trigger blocked, [2] overflow, [3] transfer busy, [4] transfer done, [5] SPI busy, [6] JTAG busy, [27:16] FIFO words |
| 0x03 | EVENT_NO | latched event number |
| 0x04/05 | EVT_TS_LO/HI | latched RTC |
| 0x06-09 | HIT0-3 | latched hits, 32 bits each |
| 0x0A | FIFO_DATA | write: push (through event write control); read: pop |
| 0x0B | EVT_WORDS | words written for the current event |
| 0x0C/0D | RTC_LO/HI | read: current time (HI is captured when LO is read); write: preset |
| 0x0E | MON_PERIOD | period in clocks |
| 0x0F | IRQ | read: [2:0] pending, [5:4] highest id; write: 1 acknowledges |
| 0x10 | IRQ_MASK | [2:0] |
| 0x11 | XFER | write: start transfer, [15:0] 16-bit words, [18:16] socket |
| 0x12 | SPI | write: send [15:0]; read: last received frame |
| 0x13/14 | N_ACCEPTED / N_LOST | trigger counters |
| 0x15 | JTAG_CMD | write: start, [4:0] bits-1, [8] TMS mode, [9] TMS on last bit |
| 0x16 | JTAG_DATA | write: bits to shift; read: TDO bits |
| 0x17-1A | MASK0-3 | strip mask, 32 strips each; a 1 removes that strip from latched events (0 after reset) |
| 0x20-0x38 | SCALER0-24 | {ID, count} |
| 0x400-0x5FF | W5300 window | word a reaches W5300 byte address {a[8:0], 0} |

## Not implemented

The following are outside the FPGA logic or have no described logic. The top level brings
their signals out as ports where they meet the design.

- **NIOS II processor**: a vendor core. Its software (ISRs, main loop, command handling)
  is firmware. The top-level testbench plays the processor's part with bus tasks.
- **W5300**: an external chip. A bus model is used only in testbenches.
- **EPCS64 flash, memory controller and reconfiguration controller**: vendor parts used
  for remote firmware upgrade. The upgrade itself runs in software.
- **HPTDC ASIC**: external. Its configuration data come from software. The JTAG port that
  loads them is implemented.
- **Pre-trigger logic and the trigger system**: only named. `trig_in` is a port.
- **HPCI command protocol** (UDP, CRC-16) and **remote firmware upload protocol** (TCP,
  XOR checksum): these are processor software, and the CRC polynomial is not given.
- **Temperature/pressure/humidity sensor**: its interface is not given.

## Notes on interpretation

- **Interrupt priority.** One passage of the description lists event, monitoring, command
  in descending priority. Another gives monitoring priority 3, after event and command.
  The second, more specific statement is followed: event > command > monitoring.
- **Trigger gate.** The allow/block decision is made by hardware on the FIFO's free
  space, not by the ISR. The behaviour seen from outside is the same, without waiting
  for software.
- **Strip masking.** The description says masking commands switch off noisy channels in
  the DAQ, but not where. Here the mask sits between the hit delay and the event latch.
- **Outside numbers.** The W5300 TX FIFO register address and the HPTDC instruction codes
  (used only by the JTAG test model) come from the parts' data sheets, not from the DAQ
  description.

## Dead time and trigger loss

The trigger gate is closed in three cases:

- while an event waits in the latch, from the trigger until the ISR writes "event done";
- while the FIFO lacks room for a 600-byte event;
- while the run is stopped.

The copy to the W5300 and the network transfer both happen behind the FIFO. They
therefore add no dead time unless the FIFO fills. The dead time per event is thus the
event ISR's own run time, plus a few clocks. Losses for randomly arriving triggers follow
the non-extending dead-time law, loss = rD / (1 + rD).

`tb_event_rates` drives the whole design with exponentially spaced triggers averaging
5 kHz. The ISR stand-in is slowed so that a 600-byte event takes 31 us to read and write,
the software time reported for that step. Results over 400 triggers per size, for two
random seeds:

| Event size | Dead time (ISR) | rD/(1+rD) | Simulated loss |
|---|---|---|---|
| 120 B | 7.5 us | 3.6 % | 2.5-3.75 % |
| 408 B | 21.9 us | 9.9 % | 7.5-10.5 % |
| 600 B | 31.5 us | 13.6 % | 14.75-16.5 % |
| 80-600 B, uniform | 19 us | 8.7 % | 7.0-10.25 % |

Other results of the same runs:

- The hardware copy of a 600-byte event writes 300 16-bit words, one every 80 ns, in
  24 us. The software-driven W5300 path is reported at 190 us; the hardware path at 35 us.
- The FIFO never overflowed, and the gate never closed for lack of space at this rate.

The published loss figures for this scheme are far below these: 0.0014 % for 600-byte
events with a 125 us dead time. Purely random 5 kHz triggers cannot produce figures that
low, since 5 kHz x 125 us = 0.625. Those figures must rest on a different trigger model,
and they are not reproduced here. The ISR time above is a software property. With a
faster ISR the loss falls in proportion.

## Capacity

| Case | Arithmetic | Fits |
|---|---|---|
| 2 kHz, 120 B average | 1.92 Mbit/s, inside the 2 Mbit/s needed; 0.96 % of W5300 bus time | yes |
| 5 kHz, 120 B | 4.8 Mbit/s; 2.4 % of bus time | yes |
| 600 B event | 150 words; the FIFO holds 6; hardware copy takes 24 us | yes |
| 10 s monitoring | 5e8 clocks fit the 32-bit period counter (max 85.9 s) | yes |
| Scalers over 10 s | 24-bit counts saturate above 1.68 MHz per channel | yes |
| RTC | 64 bits x 100 ns wraps after about 58,000 years | yes |

## Verification

Each block has a self-checking testbench in `tb/`. Each one:

- drives the block from a random initial state through reset;
- compares against a reference model or exact expected timing;
- prints the number of checks and failures.

The behavioural W5300 bus model (`tb/w5300_model.sv`) and the HPTDC TAP model
(`tb/jtag_tap_model.sv`) stand in for the external chips.

`tb_event_rates` is the rate workload described above.

`tb_rpc_daq_top` runs the whole design at its default parameters for 1000 accepted events.
A processor stand-in performs:

- JTAG configuration of the HPTDC at boot;
- RTC preset and load;
- event ISRs writing 80-600 byte event packets;
- hardware transfers to socket 1 followed by SEND;
- command interrupts from the W5300 that send HV SPI frames;
- monitoring interrupts that check all 25 scaler counts and send a monitoring packet
  through the processor's W5300 window to the Mon socket;
- interrupts served while a hardware transfer runs, so processor W5300 accesses wait for
  the engine to release the bus;
- an event and a monitoring interrupt pending together, to check that the event is served
  first.

At the end it checks:

- every word reaches the W5300 TX FIFO register in order;
- each latched hit pattern and timestamp belongs to its trigger;
- the lost-trigger counter matches the triggers that were dropped.

It also counts each mechanism (trigger accepted, lost while busy, blocked for FIFO space
and reopened, hardware transfer, processor W5300 access with wait states, command and
monitoring interrupts, event served first when event and monitoring are pending together,
SPI frame, RTC load, dropped write, JTAG configuration, processor access held by a
running transfer, monitoring packet, masked strip removed from an event). A mechanism that never happened
counts as a failure.

## Tool notes

Two kinds of Verilator lint message remain, both on purpose:

- `SYNCASYNCNET` comes from assertions that use `disable iff (!rst_n)` with the
  asynchronous reset.
- `PINCONNECTEMPTY` marks two outputs deliberately left open in the top: the RTC tick and
  the SPI done pulse. Software polls the SPI busy bit instead.
