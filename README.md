# CHEC camera digital electronics in SystemVerilog

A Cherenkov camera has to capture flashes of light only a few nanoseconds
long that land on a few neighbouring pixels. It does this on a 2048-pixel
focal plane while the night sky keeps every pixel busy with single photons.
The camera keeps a rolling analogue record of every pixel in sampling ASICs.
A trigger looks for light in two neighbouring pixel groups at the same
moment, and only then is a short window of that record digitised, packed and
sent off the camera.

This RTL covers the digital part of that chain:

- the backplane trigger FPGA, which makes the camera trigger decision;
- the serial broadcast that tells every module what to read out and keeps
  their clocks aligned;
- the FPGA on each of the 32 front-end modules, which reads the sampling
  ASICs and packs the event;
- the data-acquisition merge that turns 33 packet streams into one;
- the LED flasher controller used for calibration.

The ASICs themselves (the sampling and the trigger chips) are analogue and
mixed-signal parts. They are modelled behaviourally in the testbenches only.

## Time base

Everything runs on one clock, and one tick is one nanosecond. This is the
sampling period of the ASICs at their nominal 1 GSa/s, so a storage cell, a
timestamp unit and a clock cycle are the same thing. The design does not
model the slower array-synchronous clock or a PLL that would multiply it up.
A real FPGA build would run the datapaths at a fraction of this rate, with
wider words.

## Blocks

```
 patch lines (32x16) ──► trigger_fpga ──serial line──► fee_fpga x32 ◄──► sampling ASICs
 1 PPS, ext. trigger ──►  │  coincidence_trigger         │ (event bytes, 1 B / 8 ns)
                          │  timestamp_counter           ▼
                          │  serial_link_tx        xdacq_merger ──► 1 B / ns out
                          └── trigger records ──────────►┘
 led_controller ──► 4 flashers x 10 LEDs
 fee busy lines ──► trigger_fpga (veto)
```

| file | role |
|---|---|
| `rtl/chec_pkg.sv` | constants, message type, camera geometry functions |
| `rtl/chec_camera.sv` | top level: wires everything together |
| `rtl/trigger_fpga.sv` | trigger, event counter, message dispatch, trigger records |
| `rtl/coincidence_trigger.sv` | neighbour coincidence over the 512 patch lines |
| `rtl/timestamp_counter.sv` | ns counter with clear and load |
| `rtl/serial_link_tx.sv`, `rtl/serial_link_rx.sv` | one-wire message link |
| `rtl/fee_fpga.sv` | per-module readout, packing, buffering |
| `rtl/byte_fifo.sv` | first-word fall-through FIFO used for the buffers |
| `rtl/xdacq_merger.sv` | packet merge of the module and trigger streams |
| `rtl/led_controller.sv` | flasher pattern and firing |

## The camera trigger

**Geometry.** The 32 modules sit on a 6x6 grid with the four corners
missing, in rows of 4, 6, 6, 6, 6 and 4 modules. The corners hold the LED
flashers. Modules are numbered row by row, from left to right. Each module
has 8x8 pixels. Its trigger ASICs output one line per 2x2-pixel patch, so a
module has 4x4 patches and the camera has a 24x24 patch grid with empty
corners: 512 lines in all. The functions `patch_at`, `patch_row` and
`patch_col` in the package map a line (module, patch) to a grid position.
Patch k of a module lies at row k/4, column k%4. ASIC a covers pixel rows
2a and 2a+1, and its channel c lies at pixel row 2a + c/8, column c%8.

**Rule.** The rising edge of a patch line opens a window of `COINC_NS`
(8) ticks for that patch. The camera triggers when any two patches that
share an edge both have an open window. This includes pairs that cross a
module boundary, and excludes diagonal pairs. The neighbour lists are built
at elaboration time from the geometry, so the hardware is one AND per
neighbour pair and one wide OR. On a trigger, the 512-bit pattern of open
windows is latched. An external trigger (rising edge) also fires the
camera. After a trigger, new triggers are held off for `HOLDOFF_NS` (16)
ticks. They are also vetoed while the camera is busy (see below).
`coinc_en_i` turns the coincidence trigger off, leaving only external
triggers.

## Readout: from a trigger to a packet

This is the part with the most timing detail.

1. **Message.** The trigger FPGA takes the timestamp T of the trigger tick
   and its 32-bit event number. It broadcasts a READOUT message
   {kind, event id, T} (66 bits) on one serial line to all modules. A frame
   is a start bit, the 66 bits LSB first at `BIT_NS` (4) ticks per bit, and
   a stop bit. Each receiver samples mid-bit. A message is delivered 268
   ticks after the transmitter accepted it (`LINK_LAT`).
2. **Window.** The module reads the window that starts `LOOKBACK_NS` (32)
   cells before T. The window is `WINDOW_BLK` x 32 = 96 cells long, and the
   cell index wraps at 4096. The module's own counter agrees with the
   trigger FPGA's, so the low 12 bits of T are the storage cell written at
   the trigger. At about 300 ns, the latency is far inside the 4096 ns the
   storage ring holds.
3. **Packing.** The module writes a 12-byte header: module id, window
   length, event id (4 bytes), T (4 bytes) and start cell (2 bytes), all
   most significant byte first. Then comes one cell at a time, for all four
   ASICs and 16 channels: 64 samples of 12 bits, each sent as 2 bytes with
   the high byte first. The event is 12 + 96 x 64 x 2 = 12300 bytes.
4. **Buffer and output.** The event goes into a 16 KB buffer. The buffer
   drains at one byte per 8 ticks (1 Gbit/s) with valid/ready and a
   last-byte flag. The module raises busy from the message until the event
   is buffered, and again while the buffer has no room for another whole
   event. A READOUT that arrives while the module is busy is dropped and
   counted (`fee_dropped_o`). This cannot happen in normal operation,
   because busy vetoes the trigger.
5. **Trigger record.** For each trigger, the trigger FPGA sends a 73-byte
   record to the merger: event id, T, a source byte (1 = external) and the
   512-bit pattern.
6. **Merge.** `xdacq_merger` has one store-and-forward buffer per input, 32
   modules plus the trigger record. An input counts as ready once a whole
   packet is in its buffer. A round-robin arbiter then sends whole packets,
   one byte per tick, tagging each byte with its input number. Packets from
   different inputs never interleave (assertion `a_hold`).

**Veto.** New triggers are blocked while any of these holds:

- a message is queued or on the line;
- a trigger record is streaming;
- any module is busy.

The dead time per event is set by the module buffers. A module sustains one
event per 12300 x 8 ns = 98.4 µs, so about 10 kHz.

## Keeping the module counters in step

On the rising edge of the 1 PPS input, the trigger FPGA clears its counter
and queues a RESYNC message. The message carries the counter value V at the
tick the link accepted it. A module loads V + `LINK_LAT` + 1 on the tick it
decodes the message, and from then on counts in step with the trigger FPGA.
If a READOUT is queued at the same time as a RESYNC, the READOUT goes
first.

## LED flashers

`led_controller` drives four flasher units with 10 LEDs each. A pattern
register selects which LEDs fire. A flash happens on a rising edge of
`fire_i`, or every `period_i` ticks when that is non-zero. Each flash
drives the selected LEDs for `PULSE_NS` (4) ticks and is counted.

## Top-level interface (`chec_camera`)

- **Inputs:** the patch lines `[N_MOD][16]`, `coinc_en_i`, `ext_trig_i`,
  `pps_i`, the LED controls, and `dacq_ready_i` for back-pressure on the
  merged output.
- **Outputs:** the camera trigger, the veto and the event count, and
  `time_o`, the trigger FPGA's counter.
- **Per-module ASIC interface:**
  - `asic_wr_cell_o`, the cell being written this tick;
  - a one-tick readout request with its start cell (`asic_req_o`,
    `asic_req_start_o`, `asic_req_blocks_o`);
  - digitised cells returned with `asic_valid_i` / `asic_data_i`, and taken
    with `asic_ready_o`;
  - each module's counter (`fee_time_o`) and its drop count.
- **Merged stream:** `dacq_data_o`, `dacq_valid_o`, `dacq_last_o`, and the
  input number `dacq_src_o`.

## What is taken from the source description and what is this design's own

**Taken from the source description:**

- 32 modules of 64 pixels;
- four 16-channel 12-bit sampling ASICs and four trigger ASICs per module;
- 2x2-pixel trigger patches, 512 trigger lines into one FPGA;
- a camera trigger requiring two neighbouring patches;
- a serial message with a unique event id that starts the readout;
- a 4096 ns storage depth;
- a 96 ns window in 32 ns blocks, placed to the nanosecond;
- a module FPGA that reads, packs and buffers the data;
- 1 Gbit/s module links and a single data-acquisition board that merges
  them;
- a PPS that re-syncs the counters;
- an external trigger;
- four corner flashers with ten LEDs each.

**This design's own choices:**

- the module and patch numbering;
- edge-only neighbours;
- the 8 ns coincidence window and the 16 ns hold-off;
- the message format, bit time and latency compensation;
- the 32 ns look-back;
- the event and trigger-record formats;
- the buffer sizes and the busy/veto scheme;
- round-robin packet merging at 1 byte/ns (8 Gbit/s, standing in for the
  10 Gbit/s fibre);
- the LED pulse length and periodic mode.

**Not built:**

- ASIC configuration registers;
- the slow-signal (DC level) readout;
- SiPM bias trimming;
- the UDP/Ethernet framing and MACs;
- the White Rabbit timing board itself;
- the housekeeping and safety controllers.

## Simulation

The testbenches need nothing but `verilator` (5.x). For example:

```
verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb +libext+.sv \
  --top-module tb_chec_camera rtl/chec_pkg.sv tb/tb_chec_camera.sv
./obj_dir/Vtb_chec_camera
```

Each testbench prints `TB_RESULT checks=N failures=M` and has a watchdog.

- **Unit testbenches:** `tb_timestamp_counter`, `tb_serial_link`,
  `tb_coincidence_trigger`, `tb_trigger_fpga`, `tb_fee_fpga`,
  `tb_xdacq_merger` and `tb_led_controller`.
  - `tb_coincidence_trigger` carries its own model of the camera geometry.
    It compares the trigger, pattern and veto outputs with that model on
    every tick, under random pulses on all 512 lines. Directed cases cover:
    - a pair across a module boundary, which must fire 2 ticks after the
      second edge;
    - a pair too far apart in time;
    - a diagonal pair, which must not fire;
    - a vetoed pair;
    - an external trigger.
- **`tb_chec_camera`** runs the top with the first 4 modules and otherwise
  default parameters. `targetc_model` and `t5tea_model` stand in for the
  ASICs, and every pixel carries a known waveform. The run covers:
  - a neighbour-coincidence trigger across a module boundary;
  - a vetoed trigger;
  - output back-pressure;
  - a byte-exact check of every packet;
  - a PPS re-sync;
  - an external trigger whose window wraps around the storage ring;
  - an LED flash.

  It counts each of these mechanisms and fails if any never happened. It
  takes about 15 s.
- **`tb_chec_camera_full`** runs the same first event at the full 32
  modules with every parameter at its default. It checks 393,673 bytes of
  output. It takes about 3 minutes to build and 1 minute to run.

## Capacity at the default parameters

| quantity | value |
|---|---|
| event per module | 12300 B |
| event per camera | 32 x 12300 + 73 = 393673 B |
| module drain time | 98.4 µs, about 10 kHz sustained |
| module link load at 600 Hz | 59 Mbit/s of 1 Gbit/s |
| merged output load at 600 Hz | 1.9 Gbit/s of 8 Gbit/s |
| storage needed vs held | about 300 ns of 4096 ns |
