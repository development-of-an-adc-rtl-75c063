# Online SEE detection firmware for a 16-channel ADC under irradiation

When a commercial multi-channel ADC is put in a proton beam, most of what goes
wrong is brief: one sample with a flipped bit, or a few corrupted samples.
Finding those by eye in hours of data does not work. The fix is to feed every
channel a known periodic signal and compare each digitised sample, as it
arrives, with the sample that should have arrived. The first point that is
off by more than a set tolerance marks a single-event effect (SEE). The data
around that point is then frozen in memory for offline analysis. The same
recording path also takes the periodic snapshots used during a total-dose
(TID) test.

This repository holds SystemVerilog RTL for the FPGA-fabric part of that
scheme. It follows the DAQ-board firmware of the ATLAS LAr ADC
radiation-tolerance test system described by Liu et al. ("Development of an
ADC Radiation Tolerance Characterization System for the Upgrade of the ATLAS
LAr Calorimeter"). In that system a Zynq ZC706 board reads a 16-channel ADC
(TI ADS52J90 or ADI AD9249) through an FMC cable. The test signal is a
39.0625 kHz sine, which gives exactly 1024 samples per period at 40 MS/s.
The block set, the numbers 16 / 1024 / 16 thousand / 1024-before-the-event
and the overall data flow come from that description. The internals of every
block are this implementation's own, because the source names the blocks and
their roles but not how they work. The sections below say which is which.

## Block map

```
 LVDS x16 ──► lvds_rx ──┐
                        ├─► adc_data_mux ──ADC data──► seu_checker ──► see_capture ══AXI4 write══► DDR3 (PS)
 JESD x16 ──► jesd_rx ──┘         │                        ▲
 (octets from                     └── adv ──► lut_ram ─────┘ LUT data
  transceivers)                                  ▲
                                          lut_write_ctrl
                                                 ▲
 PS AXI4-Lite ──► axil_bridge ──┬────────────────┘
                                ├──► daq_regs   (threshold, phase, arm, source, status)
                                └──► adc_controller ──► SPI / uWIRE / reset pin of the ADC
 clk_smp (40 MHz) ──► sync_clk_gen ──► 10 MHz SYNC to the signal generator
```

`daq_top` instantiates and wires all of these. The following sit outside it
and appear as its ports:
- the ARM processing system, which runs the TCP/IP stack and turns host
  commands into AXI accesses;
- its DDR3 controller;
- the multi-gigabit transceivers, which de-serialise and 8b/10b-decode the
  JESD204B lanes.

| File | Role |
|---|---|
| `rtl/daq_pkg.sv` | sizes, register-bus struct, register offsets, JESD control characters |
| `rtl/lvds_rx.sv` | 16-lane serial-to-parallel receiver framed by the ADC frame clock |
| `rtl/jesd_rx.sv`, `rtl/jesd_rx_lane.sv` | JESD204B link layer, one converter per lane |
| `rtl/adc_data_mux.sv` | picks LVDS or JESD as the ADC data source |
| `rtl/lut_ram.sv` | per-channel reference waveform tables with phase-offset replay |
| `rtl/lut_write_ctrl.sv` | loads and reads back the tables from the register bus |
| `rtl/seu_checker.sv` | per-channel \|ADC − LUT\| > threshold detector, event bookkeeping |
| `rtl/see_capture.sv`, `rtl/sync_fifo.sv` | ring-buffer recorder into DDR3 over AXI4 |
| `rtl/adc_controller.sv` | SPI (ADS52J90) / uWIRE (AD9249) configuration master, reset pin |
| `rtl/axil_bridge.sv` | AXI4-Lite slave decoding to three register targets |
| `rtl/daq_regs.sv` | control and status registers of the test |
| `rtl/sync_clk_gen.sv` | 40 MHz → 10 MHz SYNC clock |
| `rtl/daq_top.sv` | top level |

## Clocking and data timing

Everything except the SYNC divider runs on one clock, `clk`. Samples move
between blocks as a data word plus a one-cycle `valid` strobe, so the sample
rate is set by how often the interfaces deliver words, not by `clk`:

- LVDS: one bit per cycle with `lvds_bit_en` high, giving one sample per 14
  bit periods.
- JESD: one octet per cycle with `jesd_valid` high, two octets per sample.

This is a simplification. On the real board the LVDS bits arrive on the
ADC's bit clock and the JESD octets on the transceiver's recovered clock, and
each path needs a clock-domain crossing into the fabric clock. Those clocks
and crossings are not modelled.

Latency along the path, in `clk` cycles after the interface's `out_valid`:

| stage | cycle |
|---|---|
| `adc_data_mux` registers the selected word | +1 |
| `lut_ram` reads the table entry for that sample (block RAM) | +2 |
| `seu_checker` compares the pair and registers the result, `trig` | +3 |
| `see_capture` pushes the record into its FIFO | +3 (same edge) |

The ADC word is held inside the checker for one cycle so that it meets the
matching LUT word. This is the "LUT data synchronised with the ADC data" of
the original system.

## The reference table and its phase

This is the part that needs the host's help, and it is the least obvious.

`lut_ram` holds, per channel, 1024 entries: one period of the expected
waveform. On every sample that reaches the checker it reads entry
`(n + PHASE) mod 1024` of all channels, where `n` is a counter that `arm`
clears and that counts checked samples. The signal generator is locked to the
FPGA by the 10 MHz SYNC clock, so the sine does not drift against `n`. Its
phase relative to the moment of `arm` is still arbitrary, and `PHASE` is what
absorbs it.

The procedure that the end-to-end testbench follows, and that host software
would follow:

1. **Record.** Set THRESHOLD to 0x3FFF so nothing triggers, then arm. After
   a while, request a snapshot (CTRL bit 4). Recording starts at ring slot 0
   and the LUT counter starts with it, so the point in ring slot `j` was read
   against table entry `j mod 1024`. This holds because the ring size is a
   multiple of 1024.
2. **Build the table.** Sort the 16384 points of the snapshot by
   `slot mod 1024`, then average the 16 points of each entry per channel.
   Load the results with one PTR write followed by 16 × 1024 DATA writes.
   The pointer auto-increments across channels.
3. **Align.** Re-arm, still at maximum threshold. Each recorded point now
   holds the ADC sample next to the LUT sample read at phase 0. Find the
   shift `p` that best lines up the ADC column with the LUT column, and write
   it to PHASE. PHASE acts at once, without a re-arm.
4. **Check.** Wait at least 1024 samples, so that the pre-trigger window
   holds only aligned points. Then write the real threshold.

Re-arming restarts `n`, so step 3 must be repeated after every arm. This also
covers a change of data source, or a recovery after an event.

## Event detection

`seu_checker` computes `|ADC − LUT|` per channel and compares it with one
14-bit threshold that all channels share. A point is an event if any channel
is strictly above the threshold. After an arm, the first such point:

- raises `see_flag` (also `see_irq`), which stays high until the next arm;
- pulses `trig` on that point;
- latches the mask of the channels over threshold;
- latches the index of the point, counted from the arm;
- increments the event counter.

Further points over threshold do not re-trigger. They are all in the
recorded data.

Classifying the event is left to the operator and the offline analysis, as in
the original test flow:
- an SEU recovers by itself;
- an SEFI-A needs the ADC's reset pin, which `adc_controller` can pulse;
- an SEFI-B needs a power cycle.

## Capture window: the ring buffer

The original system stores 16 thousand points of all channels around an
event, including 1024 points before it. `see_capture` implements this as
follows:

- From `arm` on, every checked point is written to DDR3. Each point is one
  512-bit record: channel `c` in bits `[32c+31:32c]`, with the LUT sample in
  `[29:16]` and the ADC sample in `[13:0]`.
- The records go to a ring of `CAPTURE_DEPTH` = 16384 slots at
  `CAPTURE_BASE` (0x1000_0000), 1 MiB in all. The ring wraps as often as it
  needs to, so the 1024 points before an event are always already in memory.
- On `trig` the engine accepts 16384 − 1024 = 15360 more points, the trigger
  point included. It then stops, and `done` rises once the last write is
  acknowledged.
- TRIG_ADDR is `BASE + ((slot_of_trigger − 1024) mod 16384) × 64`. The host
  reads 16384 records from there, wrapping at the end of the ring. Record
  1024 of that window is the flagged point.

A host **snapshot** (CTRL bit 4) freezes a window in the same way at the
next point, without an SEE event and without raising the flag. This is how
the periodic 16-thousand-point recordings of a TID test are taken, and the
recording from which the reference table is computed.

If an event comes fewer than 1024 points after the arm, the oldest part of
the window holds data from before the arm. FLAG_SMP shows when this has
happened.

The AXI4 side issues INCR bursts of 16 full-width beats, with one burst in
flight at a time. At the end of a capture a final shorter burst writes what
is left. Bursts never cross the ring end or a 4 KiB boundary.

A 64-record FIFO absorbs memory stalls. If the FIFO is full when a point
arrives, the point is dropped and counted in OVERFLOW. The slot index does
not advance for a dropped point, so the window is then shorter in time than
it looks. The engine sustains about one point every 1.2 cycles against a
memory that never stalls.

An `arm` that arrives during a burst waits for the burst to finish.

## JESD204B receiver

The source names a "JESD interface" for 16 CML lanes and gives nothing more.
`jesd_rx_lane` is a minimal link-layer receiver written under these
assumptions:
- one converter per lane;
- F = 2 octets per frame, with the 14-bit sample in the upper bits and two
  tail bits;
- K = 32 frames per multiframe;
- no scrambling;
- 8b/10b decoding is done by the transceiver.

Each lane goes through these steps:
- **Code-group sync.** It holds `sync_n` low until it sees four /K/ (K28.5)
  in a row.
- **ILAS.** From the first other character it skips the 4-multiframe initial
  lane alignment sequence.
- **Data.** It pairs octets into samples. A /F/ (K28.7) or /A/ (K28.3) in
  the last octet of a frame is restored to the previous frame's last octet.
  Any other control character sends the lane back to code-group sync and is
  counted as a link error.

`jesd_rx` releases a sample only when all 16 lanes deliver one on the same
cycle, and counts cycles where they do not. There are no elastic buffers and
no LMFC-based deskew, so the lanes must arrive aligned.

## LVDS receiver

`lvds_rx` shifts each lane MSB-first and restarts its bit count on the rising
edge of the frame clock `fco`, which is high during the MSB. After the 14th
bit it presents all 16 words together.

The real ADCs send two bits per bit-clock period (DDR), and a real design
would need IDELAY/ISERDES primitives and bit-slip training. Those are
device-specific and are not included. Here one `bit_en` stands for one bit.

## ADC configuration

`adc_controller` shifts out a 24-bit frame, MSB first: 8 address bits, then
16 data bits, taken from the ADS52J90 data sheet. The bit period is
2 × `CLK_DIV` cycles. Data changes while the clock is low, and the ADC
samples it on the rising edge.

| CTRL[0] | Port | Framing signal |
|---|---|---|
| 0 | SPI (ADS52J90) | active-low SEN |
| 1 | uWIRE (AD9249) | active-high CS |

The unused port is held idle. CTRL[1] gives a 64-cycle pulse on the ADC's
hardware reset pin. Read-back from the ADC is not supported.

## Register map

All registers are 32-bit words on the AXI4-Lite port. Address bits [13:12]
select the block:

| Address | Register | Meaning |
|---|---|---|
| 0x0000 | ADC FRAME | write starts a 24-bit configuration transfer |
| 0x0004 | ADC CTRL | [0] 0 = SPI, 1 = uWIRE; [1] reset pulse |
| 0x0008 | ADC STATUS | [0] busy, [1] reset active |
| 0x1000 | CTRL | W: [0] arm, [1] source (0 LVDS, 1 JESD), [2] SYNC enable, [3] stop, [4] snapshot. R: [0] enabled, [1] source, [2] SYNC |
| 0x1004 | THRESHOLD | [13:0] in ADC counts (reset value 0x3FFF) |
| 0x1008 | PHASE | [9:0] LUT read offset |
| 0x100C | STATUS | [0] SEE flag, [1] capture done, [2] recording, [3] JESD link up, [4] LVDS frame lock, [5] AXI write error |
| 0x1010 | CH_MASK | channels over threshold at the flagged point |
| 0x1014 | EVENTS | events since reset |
| 0x1018 | TRIG_ADDR | first byte of the 16384-point window |
| 0x101C | FLAG_SMP | index of the flagged point after the arm |
| 0x1020 | OVERFLOW | points dropped in the current capture |
| 0x1024 | JESD_ERR | [31:16] lane-alignment errors, [15:0] link errors |
| 0x2000 | LUT PTR | [19:16] channel, [9:0] index |
| 0x2004 | LUT DATA | write: store [13:0] and advance. Read: entry at PTR, then advance |

Unmapped targets answer with DECERR. Read data is 0xDEAD_BEEF.

## Sizes and how they fit the tests

The defaults are the sizes of the original system:

| Parameter | Value |
|---|---|
| `NUM_CH` | 16 |
| `LUT_DEPTH` | 1024 |
| `CAPTURE_DEPTH` | 16384 |
| `PRE_TRIGGER` | 1024 |
| `SAMPLE_W` | 14 (assumed) |

The source does not give the ADC resolution. 14 bits matches the AD9249
and the 14-bit mode of the ADS52J90.

- **SEE test, ADS52J90, LVDS or JESD204B.** 16 channels × 1024-point tables
  come to 229 kbit of block RAM, which fits. 16384 capture points × 64 B
  come to 1 MiB of DDR3.
- **TID test, 16 thousand points per minute.** One host snapshot per
  minute. Filling the ring takes 16384 / 40 MS/s = 0.41 ms.
- **Rates.** At 40 MS/s the JESD path needs `clk` ≥ 80 MHz (two octets per
  sample). The checker then produces 40 M records/s, 2.56 GB/s, which needs
  the wide AXI port. This is more than one 64-bit Zynq HP port carries, so a
  real build would narrow the record or capture into block RAM first. In
  this single-clock model the LVDS path would need `clk` at the 560 Mb/s lane
  bit rate. That is why the real receiver belongs in the bit-clock domain
  (see above).

## Departures from the source and known limits

- **What is assumed.** The single clock domain, AXI4-Lite for control, the
  register map, the record format, the JESD204B link parameters and the
  LVDS framing are all assumptions. So is reading "DRAM Controller" in the
  firmware block diagram as the block that loads the LUT: it sits between
  the AXI4 bus and the LUT and is not otherwise explained.
- **What is not included.** The processor software, LwIP, the DDR3
  controller, the transceivers and the board-level parts are not RTL here:
  - ADC drivers;
  - clock generator or buffer;
  - signal generator and splitter;
  - power supplies with GPIB;
  - remote power outlet.
- **One threshold for all channels.** The source speaks of "the
  programmable threshold". Per-channel thresholds would be a small change in
  `seu_checker`.

## Simulating

Each block has a self-checking testbench in `tb/`. It prints
`TB_RESULT checks=N failures=M` at the end and has a watchdog. Behavioural
models used by the testbenches:

| Model | Stands for |
|---|---|
| `tb/axi_mem_model.sv` | the DDR3 memory, with random stalls and AXI rule checks |
| `tb/jesd_tx_model.sv` | the ADC's JESD204B transmitter: CGS, ILAS, character replacement |

Example, with Verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb rtl/daq_pkg.sv rtl/*.sv \
    tb/axi_mem_model.sv tb/jesd_tx_model.sv tb/tb_daq_top.sv \
    --top-module tb_daq_top -Mdir obj_top
./obj_top/Vtb_daq_top
```

`tb_daq_top` runs `daq_top` at its default, full size. It takes about
600 k cycles and a few seconds, and goes through:
- a snapshot, then the table build, phase alignment and threshold steps
  above;
- a deviation below threshold, which must not trigger;
- a single-point upset on LVDS after the ring has wrapped;
- a switch to JESD and a two-channel, three-point upset there;
- SPI and uWIRE frames, the reset pulse and the SYNC clock.

Along the way it checks the whole 16384-point window and counts each
mechanism. A mechanism that never occurred counts as a failure.

`tb_tid_workload` runs the TID procedure on the full-size `daq_top`, with
the same models. The ADC model adds uniform noise that grows from one
recording to the next, standing in for a device degrading with dose. For
each of three recordings the host:
- arms the recorder with the threshold at maximum;
- takes a 16384-point snapshot;
- reads it back and computes the SNR of channels 0 and 15.

The SNR is the power in the sine's bin (16 periods in the window) against
the rest of the AC power. It must match the noise that was sent to within
1 dB and fall from one recording to the next. Runtime is a few seconds.

The block testbenches use smaller tables and rings where that shortens the
run (`tb_lut_ram`: 64 entries; `tb_see_capture`: 256-point ring, 64 before
the trigger).
