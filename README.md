# TDAQ read-out firmware for a space-borne pixel tracker

This firmware runs in the FPGA of the tracker data-acquisition (TDAQ) board of a satellite particle detector. The tracker (DIR) has three parts:

- 15 **staves**, grouped in 5 **turrets** of 3 staves each.
- 10 monolithic pixel sensors per stave: two masters, each serialising itself and four slaves.
- One clock line and one half-duplex data line per stave. The two masters share them.

The pixel chips have a fast serial output, but it draws too much power for the satellite's budget. This firmware leaves it off. It reads the event data over the chips' slow **control logic bus (CLB)**, at 40 Mbit/s, one character at a time. Three other measures keep the power down:

- **Clock gating.** In data-taking mode a stave's clock runs only from a trigger until that stave's data are in.
- **Parallel read-out.** All 15 staves are read at the same time, so the slow bus does not lengthen the dead time 15-fold.
- **Turret selection.** A trigger can read only the turret hit by a particle, or that turret and its two neighbours, instead of all five.

The RTL covers the fixed-logic part of the firmware:

- the stave controllers and their FIFOs;
- the trigger and busy logic;
- the event builder and the output buffer;
- the register file seen by the data processing unit (DPCU);
- the decoder and buffer that feed the calibration microcontroller.

Four parts are outside the RTL and meet it at plain ports:

- the SpaceWire codec;
- the soft microcontroller and its peripherals;
- the configuration-memory scrubber;
- the board's analog switches and transceivers.

The stave power lines, the service lines and the trigger lines are ports of the top module, `tdaq_top`.

## Block structure

```
 gen_trig_i, bars_i[4:0] ─► trigger_manager ──start[14:0]──► 15 × stave_control ──► 15 × ecc_fifo
        (LUT, event no., time stamp) │                        (clock gate, CLB)          │
                                     │ evt_start                                         ▼
                      busy_manager ◄─┤                                            stave_mux
 busy_o ◄────────────────────────────┘                                                   │
                                                       packager ◄────────────────────────┘
                                            DAQ mode ┌────┴────┐ idle mode
                                                     ▼         ▼
                                       output ecc_fifo       hit_decoder ─► mcu_buffer ─► MCU port
                                           (4096 × 17)
                                                     │
 SpaceWire bytes ◄──────────────────────────► register_file ──► stave power/bias, LUT, CLB commands, MCU tasks
```

The firmware has two modes, held in the register file:

- **Idle mode.** The DPCU may read and write anything: power switches, the trigger LUT, single sensor registers over a stave's CLB, and calibration tasks for the microcontroller. Busy is held high, so the trigger board sends nothing. A software trigger from the microcontroller starts read-outs. Their packets go to the decoder, not to the DPCU.
- **DAQ mode.** Triggers from the trigger board start read-outs. Packets go to the output FIFO for the DPCU. The register file serves only the diagnostic registers, the event-packet window and the "stop" command.

All logic runs on one clock, `clk_i`. It is assumed to be 40 MHz, so one CLB bit lasts one clock. The reset `rst_ni` is the board's reset service line. It is active low and passes through a two-flop synchroniser.

## Stave controller and the control bus

`stave_control` does most of the work, and its timing sets the dead time. There is one per stave.

### Character framing

Each byte on the CLB is a 10-bit character:

- a start bit 0;
- eight data bits, LSB first;
- a stop bit 1.

The line idles high. The controller drives the line (`clb_o`, `clb_oe_o`) while it sends. It releases the line to receive, and samples `clb_i`. Characters are sent back to back, 10 clocks each. The receiver:

- finds the falling edge of a start bit;
- samples one bit per clock;
- checks the stop bit, which gives `rx_frame_err_o`.

The character engine is `clb_char_io`.

### Commands

This design uses three commands, patterned on the control interface of the chip family:

| Command | Bytes sent | Answer from the chip |
|---|---|---|
| Trigger (read-out command), broadcast | `B1` | none |
| Register write | `9C`, chip, addr low, addr high, data low, data high | none |
| Register read | `4E`, chip, addr low, addr high | after a bus turn-around: chip id, data low, data high |

The event data are fetched by repeated register reads of the chip's output-data register, address `0x0100`. Each read returns one 16-bit data word.

### Event read-out sequence

On `start_i` the controller runs these steps:

1. **WAKE.** Raise `clk_en_o` and let the stave clock run for `WAKE_CYCLES` (8).
2. **TRIG.** Send the broadcast read-out command (10 clocks).
3. **STROBE.** Wait `STROBE_DELAY` clocks (200, i.e. 5 µs). The chips' hit lines stay high for a few µs after a particle, so the read-out command must reach them while the hits are still visible. The chips then hold the event in their output buffers. The delay is fixed, so the time between trigger and sampling is fixed too.
4. **READ.** Read master 0, then master 1, one 16-bit word per register read.
   - A read takes 4 characters out, `TURN_CYCLES` of released bus, and 3 characters back: about 76 clocks with the chip model used in the testbenches.
   - The answer's chip id must match the master addressed.
   - "No data" words (`FFFF`) are dropped. Every other word is pushed into the stave FIFO.
   - A master is done after 5 chip-end words (a chip trailer or a chip-empty word), one per chip in its group.
5. **FINISH.** Drop the clock enable (in DAQ mode) and pulse `done_o`.

The read-out stops early, and the event is marked truncated (`truncated_o`), in four cases:

- the stave FIFO is full;
- `READOUT_TIMEOUT` clocks (8000 = 200 µs) have passed since the start;
- a chip has not finished its answer within `RESP_TIMEOUT` clocks;
- an answer carries the wrong chip id.

Truncation bounds the dead time at about 200 µs whatever the event size.

### Timing example

A stave with a 2-pixel cluster on one chip gives 14 words per stave:

- master 0: chip header, region header, 2 hits, trailer, 4 empty chips;
- master 1: 5 empty chips.

That is 14 reads of about 76 clocks, after about 230 clocks of wake-up, command and strobe. All staves run in parallel. The end-to-end simulation measures the busy time from trigger to the packet written in the output FIFO: 1532 clocks, 38 µs.

The read-out command must reach the chips while the particle's hit signals are still above threshold, a few µs. From the trigger input's rising edge to the last bit of the command at the chips takes 23 clocks (575 ns):

- two synchroniser flops;
- the start register;
- the wake-up;
- the 10-bit command.

The end-to-end bench checks this latency.

### Idle-mode register access

In idle mode the stave clock stays on. A single register write or read can be requested on the `cfg_*` port. The result comes back on `cfg_done_o`, `cfg_err_o` and `cfg_rdata_o`. This is how the DPCU configures sensors: commands 0x03 and 0x04 of the register file.

### Chip data words

The controller stores chip words without interpreting them, except for the end-of-master rule. The formats assumed, with the decoder's use of each:

| Word | Meaning |
|---|---|
| `A c bb` | chip header: chip id `c`, bunch counter `bb` |
| `E c bb` | chip empty (counts as a chip end) |
| `B f 00` | chip trailer, flags `f` (counts as a chip end) |
| `110r rrrr 0000 0000` | region header, region `r` (0-31) |
| `01ee eeaa aaaa aaaa` | pixel hit: priority encoder `e` (0-15), address `a` (0-1023) |
| `FFFF` | no data |

## Trigger manager and the turret look-up table

`trigger_manager` synchronises the asynchronous lines with two flops each:

- the general trigger;
- the five bar lines (one scintillator bar of the first trigger plane per turret);
- the time-sync line.

A rising edge of the general trigger is accepted in DAQ mode while busy is low. The bar pattern (5 bits) then indexes a 32-entry LUT whose entry is a 5-bit turret mask. The accepted trigger:

- sends a start pulse to the three controllers of each selected turret (staves 3t, 3t+1, 3t+2);
- increments the event number;
- latches the time stamp (1 µs ticks; the counter is cleared by a rising edge of `time_sync_i`).

From trigger edge to start pulse takes 3 clocks. A trigger edge that arrives while busy is counted as lost.

The LUT resets to "all turrets" for every pattern. The DPCU can write any entry, or fill the whole table in one clock from a mode:

| Mode | Turret mask for bar pattern `p` |
|---|---|
| 0 | all turrets |
| 1 | `p`: only the turrets of hit bars |
| 2 | `p \| p<<1 \| p>>1`: the hit bars and their neighbours, i.e. three turrets centred on a single hit bar |

In modes 1 and 2 an empty pattern reads all turrets.

In idle mode the microcontroller's software trigger (`mcu_soft_trig_i`, `mcu_soft_bars_i`) starts a read-out in the same way, unless an event is still in progress.

## Event packet

The `packager` builds one packet per event. It visits the staves in order 0 to 14, waiting for each selected stave's done pulse. The done pulses are remembered, so staves may finish in any order. It reads the stave's FIFO through `stave_mux`. All words are 16 bits:

| Word(s) | Content |
|---|---|
| 0 | sync `EB90` |
| 1 | event number |
| 2, 3 | trigger time stamp, high then low half (µs) |
| 4 | `{6'b0, bars[4:0], turrets[4:0]}` |
| per selected stave | stave header `{4'hF, stave[3:0], count[7:0]}`, then `count` data words |
| next | `{1'b0, truncated[14:0]}`, one bit per stave |
| last | CRC-16 of all previous words (polynomial 0x1021, initial value 0xFFFF, MSB first, 16 data bits per step) |

The CRC word carries the "last" flag.

A stave that was not selected takes no space. A 2-pixel event on all five turrets is 232 words (464 bytes). On one turret it is 52 words. The largest possible packet, 15 full FIFOs, is `MAX_PKT_WORDS` = 5 + 15 × 129 + 2 = 1942 words.

While the data-hold line `hold_i` is high, the packager does not start writing. In DAQ mode the words go to the output FIFO. In idle mode they go to the decoder.

## Busy, output buffer and data-ready

The output FIFO is 4096 × 17 (word plus "last" flag). The `busy_manager` drives `busy_o` high in five cases:

- outside DAQ mode;
- while `hold_i` is high;
- from the clock a trigger is accepted until its packet is complete;
- while the output FIFO has fewer than 1942 free words, i.e. could not take a maximum-size packet;
- during reset.

So busy comes back down as soon as an event is packed, however slowly the DPCU reads. It stays up only when unread packets have filled the buffer. `busy_o` is registered.

The busy manager also keeps:

- the number of accepted events;
- the length in clocks of the last busy period.

`data_ready_o` is high while at least one complete packet waits in the output FIFO.

## Register file and link protocol

The DPCU reaches the `register_file` through the SpaceWire codec's byte interface (`spw_rx_*`, `spw_tx_*`). The byte framing is this design's own:

| Request | Bytes | Answer |
|---|---|---|
| read | `01`, addr high, addr low | `81`, data high, data low |
| write | `02`, addr high, addr low, data high, data low | `82` |
| refused (DAQ mode) | | `E1` (read) / `E2` (write) |
| unknown opcode | | `EE` |

Register map (16-bit registers):

| Address | Name | Access | Content |
|---|---|---|---|
| 0x0000 | CMD | W/R | command code to execute |
| 0x0001 | CMD_STATUS | R | `{pending, error, 13'b0, done}` |
| 0x0002 | CMD_OUT | R | command output: sensor register value, microcontroller result |
| 0x0010 | STATUS | R | `{daq, busy, data_ready, out_full, evt_active, fsm_error, upset_seen, mcu_pending, 8'b0}` |
| 0x0011 | EVT_COUNT | R | accepted events (low 16 bits) |
| 0x0012 | LOST | R | triggers lost while busy |
| 0x0013 | LAST_BUSY | R | length of the last busy period in clocks |
| 0x0014 | PKT_PEND | R | complete packets in the output FIFO |
| 0x0015 | PWR_GOOD | R | power-good line of each stave |
| 0x0016, 0x0017 | TIME_HI, TIME_LO | R | time-stamp counter |
| 0x0020 | EVT_DATA | R | next word of the first available packet; reading removes it |
| 0x0021 | EVT_FLAGS | R | `{out FIFO empty, 14'b0, last flag of the word just read}` |
| 0x0030-0x0032 | DIG_PWR, ANA_PWR, BIAS | RW | digital power, analog power and bias switch of each stave (bit = stave) |
| 0x0040-0x005F | LUT | RW | turret mask for bar pattern `addr - 0x40` |
| 0x0060-0x0064 | CFG_STAVE, CFG_CHIP, CFG_ADDR, CFG_DATA, LUT_MODE | RW | operands of the commands below |

Commands written to CMD:

| Code | Action |
|---|---|
| 01 | start DAQ mode |
| 02 | stop (back to idle) |
| 03 | write a sensor register over the CLB |
| 04 | read a sensor register over the CLB |
| 05 | fill the LUT from LUT_MODE |
| 06 | clear the upset-seen flag |
| 10-1F | hand the code to the microcontroller and wait for its result |

In DAQ mode only these are served:

- STATUS, the counters, the time and power-good registers;
- EVT_DATA, EVT_FLAGS, CMD_STATUS and CMD_OUT;
- a write of "stop" to CMD.

Every other access gets a refusal byte.

The DPCU's normal loop in DAQ mode:

1. Wait for `data_ready_o`.
2. Read EVT_DATA until the last flag.
3. Check the CRC.

## Calibration path: decoder and microcontroller buffer

In idle mode, packets go to `hit_decoder`. It follows the packet structure: the stave header, then the chip header, which gives the chip id, then the region header. It turns every pixel-hit word into a 32-bit record:

```
{5'b0, stave[3:0], chip[3:0], column[9:0], row[8:0]}
column = {region[4:0], encoder[3:0], a[1] ^ a[0]}    row = a[9:1]
```

It also recomputes the CRC. At the end of the packet it reports the result on `mcu_pkt_done_o` and `mcu_crc_ok_o`.

The records are appended to `mcu_buffer`, a 1024 × 32 RAM. The microcontroller reads it with a one-clock latency and can clear it. A record that arrives while the buffer is full is dropped, and the buffer sets a sticky overflow flag.

The microcontroller itself is not part of the RTL. Its calibration programs, timers, memory controller and watchdog run in software and vendor cores. It sees:

- the task handshake (`mcu_cmd_*`, `mcu_done_i`, `mcu_result_i`);
- the software trigger;
- the buffer read port.

## Protection against single-event upsets

- **State registers.** Every FSM state register (stave controller, packager, register-file link) is a `ham_state_reg`. Its 4 state bits are stored as a 7-bit Hamming(7,4) code word, decoded and corrected combinationally, and re-encoded on every clock. A single flipped bit is corrected within one clock.
- **Undefined states.** A corrected state that is still undefined (for example after a multiple upset) returns the FSM to IDLE. It also sets a sticky error flag, visible in STATUS, so the DPCU can reset the board.
- **Stored words.** The FIFOs and the microcontroller buffer store each 4-bit nibble as a Hamming(7,4) code word and correct on read. A 16-bit word takes 28 stored bits.
- **Reporting.** Corrections are reported as `corrected`/`corr` outputs, which the register file gathers into the upset-seen flag.

For ground tests, the top has two injection inputs:

- `seu_test_sel_i` picks one state register: 1-15 for the stave controllers, 16 for the packager, 17 for the register-file link.
- `seu_test_mask_i` gives the bits to flip in that register's 7-bit code word.

The flips apply for every clock the select is non-zero. Tie both inputs to zero in flight. The FIFO and buffer blocks have their own `upset_*` inputs, which the top ties to zero. The unit benches use them.

## Capacity and rates

| Case | Result at the default parameters |
|---|---|
| 2-pixel cluster on one chip per stave | clock gate 32 µs; busy 34 µs (1 turret), 36 µs (3), 38 µs (5); 52 words for 1 turret, 232 for 5 |
| Maximum event (every stave's read-out cut by the time-out) | clock gate 200 µs, about 105 words per stave; busy about 240 µs, because packing 15 × 105 words follows the time-out |
| 1 kHz triggers | small events: every trigger accepted, packets read in time over the link; large events: the output FIFO fills and some triggers are lost |
| DPCU read-out at 20 Mbit/s with the framing above | about 3 µs per word, so about 1.4 kHz sustained for full 5-turret small events and about 6 kHz for 1-turret events; faster bursts fill the output FIFO, which then raises busy |

## Design choices not fixed by the source description

The block set follows the published firmware description:

- stave controls with FIFOs;
- a multiplexer into an event packager;
- a LUT-mask trigger manager;
- a busy manager;
- an output FIFO into a register file;
- a decoder and buffer for the microcontroller;
- Hamming(7,4) state registers.

So do these behaviours:

- the DAQ/idle modes and their access rules;
- clock gating;
- parallel stave read-out over the CLB;
- the 1- and 3-turret reduced read-out;
- the 200 µs maximum busy;
- the four DPCU service lines: reset, time sync, data hold and data ready.

The following are this design's own:

- the 40 MHz clock;
- the CLB character framing and command bytes;
- the chip data-word formats;
- the 5 µs strobe delay and the other time-outs;
- the master chip ids `00`/`08`;
- the end-of-master rule;
- the packet layout and the CRC polynomial;
- the register map, command codes and link framing;
- the FIFO and buffer sizes;
- the LUT fill modes and the empty-pattern rule;
- the lost-trigger and busy-length counters;
- the nibble-wise ECC, where the source only says "a similar code";
- the decoder's record format.

The timing numbers depend on these choices. The busy time measured on the real hardware for 2-pixel clusters was about 70 µs; this model gives 34-38 µs.

The source gives 200 µs as the maximum busy time. Here that limit is applied to the read-out, i.e. to the clock gate. For the largest events, packing the collected data adds up to about 50 µs of busy after the time-out. To cap the busy line itself at 200 µs, lower `READOUT_TIMEOUT` by the packing time, 1942 clocks at most.

The upset-injection ports are a test addition.

The per-stave 1-wire temperature line is not implemented. The same goes for the hot/cold redundant copy of the board logic.

## Simulation

Every block has a self-checking testbench in `tb/`. Each prints `TB_RESULT checks=<n> failures=<n>` at the end and has a watchdog. With Verilator 5:

```
verilator --binary --timing -Irtl -y rtl -y tb rtl/tdaq_pkg.sv tb/tb_tdaq_top.sv --top-module tb_tdaq_top
./obj_dir/Vtb_tdaq_top
```

Replace the testbench and top-module names to run another bench.

`tb_tdaq_top` runs the whole firmware at its default sizes, with two behavioural master chips on each of the 15 stave buses (`altai_master_model`). It:

1. switches the stave power on;
2. programs 2-pixel test clusters into the chips over the CLB and reads one back;
3. runs an idle-mode calibration event through the decoder into the microcontroller buffer, and a microcontroller task;
4. in DAQ mode, runs:
   - a full read-out;
   - 1-turret and 3-turret read-outs;
   - a time-counter synchronisation, followed by a check of the time stamp of the next event;
   - a trigger lost while busy;
   - a trigger refused during data hold;
   - single-bit upsets injected into three state registers during an event;
   - a double upset that forces the packager into an undefined state, setting the FSM error flag, which the board reset clears;
   - an oversized (truncated) event;
   - an output FIFO filled until busy stays high.

Every packet is read back over the link and checked word by word, CRC included. The bench counts each of these mechanisms and fails if one never happened. It runs in under a second.

`tb_tdaq_workload` also runs at the default sizes. It drives trigger trains at 1 kHz while the DPCU reads packets over a link paced at 20 Mbit/s. The phases:

1. 2-pixel clusters with 1, 3 and 5 turrets;
2. 20-pixel clusters on every chip of every stave's first master. These hit the read-out time-out and fill the output FIFO.

The bench prints the longest busy and clock-gate times of each phase. It checks that:

- every accepted event's packet comes back intact;
- truncation is flagged where it should be;
- accepted plus lost triggers match the triggers sent.

The chip model (`tb/altai_master_model.sv`) answers the CLB commands as this design assumes the chips do:

- It emits the event words of its group of five chips on register reads.
- Register `0x0200` of each of its five chips holds that chip's test-cluster size.
- A chip with a cluster produces that many hits at addresses 100, 101, …, after a region header for region 3 + the chip's index in the group.

Unit benches: `tb_ham_state_reg`, `tb_ecc_fifo`, `tb_stave_control` (which checks the read-out cycle count), `tb_stave_mux`, `tb_trigger_manager` (including the trigger latency), `tb_busy_manager`, `tb_packager` (CRC computed bit-serially in the bench), `tb_hit_decoder`, `tb_mcu_buffer` and `tb_register_file`.

## Files

| File | Content |
|---|---|
| `rtl/tdaq_pkg.sv` | geometry, command bytes, word formats, CRC-16 and Hamming(7,4) functions |
| `rtl/tdaq_top.sv` | top level |
| `rtl/stave_control.sv`, `rtl/clb_char_io.sv` | stave controller and its CLB character engine |
| `rtl/ecc_fifo.sv` | ECC-protected FIFO (stave FIFOs, output FIFO) |
| `rtl/stave_mux.sv` | FIFO multiplexer |
| `rtl/trigger_manager.sv` | trigger synchronisation, LUT, event number, time stamp |
| `rtl/busy_manager.sv` | busy line |
| `rtl/packager.sv` | event builder |
| `rtl/hit_decoder.sv`, `rtl/mcu_buffer.sv` | calibration data path |
| `rtl/register_file.sv` | DPCU register file and link framing |
| `rtl/ham_state_reg.sv` | Hamming-protected state register |
| `tb/` | testbenches and the master-chip model |
