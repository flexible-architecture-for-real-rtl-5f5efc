# Synchronizing several free-running video decoders onto one clock

When a system has to combine several live video sources pixel by pixel, for
example to fuse a visible-light camera with a near-infrared one, it runs into
two timing problems. Each source starts its frames at an arbitrary moment
(start-up delay), and each source's frame rate wanders a little over time. After
analog-to-digital decoding both problems are still there. Every decoder delivers
its digital stream with its own sample clock, which a genlock circuit keeps
adjusting, so no two streams share a clock or a frame phase.

The architecture implemented here solves this with one idea. One input is taken
as the reference, and its sample clock becomes the clock of everything
downstream. Every other input is written into a circular frame buffer with its
own clock, starting at location 0 at each of its own frame starts. All buffers
are read with the reference clock, starting at location 0 at each reference
frame start. The bytes that come out of the buffers in the same reference clock
cycle therefore belong to the same spatial position in every video. They may
come from a neighbouring frame in time. The architecture accepts this, because
consecutive video frames are nearly identical.

The RTL covers the logic that would sit in the FPGA of such a system:

```
  decoder 1 ──V1,c1──┐                        ┌─> interface ─> proc_in[0] ─┐
  decoder 2 ──V2,c2──┤ sync_module            │                            │ video processing
     ...             │  K frame start         ├─> interface ─> proc_in[1] ─┤ (application,
  decoder K ──VK,cK──┘  detectors, K-1        │     ...                    │  outside this RTL)
                        circular FIFOs ───────┘                            │
                        c_o = c_REF (c1)                                   │
  encoder h <── vout[h], c_o ── output_formatter <── proc_out[h] ──────────┘
  decoders/encoders <── I2C ── control_module (clk_sys)
```

The default configuration is two inputs (K = 2) and one output (H = 1), with
8-bit ITU-R BT.656 streams and a 720 × 480-byte buffer. The video decoders and
encoders, the application (such as the fusion algorithm), the voltage
regulators and the board are outside the RTL. `mvp_top` brings the ports that
connect to them out to its own ports.

## The BT.656 stream, briefly

All blocks work on BT.656 byte streams. BT.656 carries 4:2:2 YCbCr as
Cb Y Cr Y … at one byte per 27 MHz sample clock. A 525-line frame is
525 × 1716 = 900 900 bytes. Each line starts with an EAV code and blanking, then
an SAV code and 1440 active bytes. EAV and SAV are the four bytes `FF 00 00 XY`.
The status byte `XY` is `1 F V H P3 P2 P1 P0`:

- F is the field bit.
- V is 1 on vertical-blanking lines.
- H is 1 for EAV and 0 for SAV.
- P3..P0 are protection bits: V⊕H, F⊕H, F⊕V and F⊕V⊕H.

`FF` and `00` never occur as data.

## Frame start detection

`frame_start_detector` chains three small blocks:

- `trs_detector` holds the last three bytes and flags the `XY` byte that follows
  `FF 00 00`. The flag appears in the same cycle as that byte.
- `sync_extractor` keeps the V bit of the last **SAV** code as the level
  `v_sync`. It also keeps F from SAV codes and H from both SAV and EAV codes.
- `falling_edge_detector` pulses `start` on a 1→0 transition of `v_sync`.

V falls at the SAV of the first active line after vertical blanking. `v_sync`
changes one clock after that SAV's `XY` byte, and the edge detector is
combinational from it. So `start` is high exactly while the first active byte
(the first Cb) is on the input bus. An interlaced source has a vertical-blanking
interval before each field, so a "frame start" here is really a field start.
The buffers therefore restart twice per frame.

After reset `v_sync` is 1 (blanking) and the edge detector's memory is 0.
Reset never produces a start, and the first active line after reset does.

## The circular buffer and what "synchronized" means

`circular_fifo` is a simple dual-port RAM with two clocks:

- **Write side** (the buffered video's clock `c_i`): `en_w` (that video's frame
  start) writes the current byte to location 0. Each following clock writes the
  next location. The pointer wraps at `DEPTH`.
- **Read side** (reference clock `c_o`): `en_r` (the reference frame start)
  reads location 0, and then one location per clock, also wrapping at `DEPTH`.
  The read data is registered, so it appears one `c_o` cycle after its address.

Every byte is stored, timing codes and blanking included. The buffer output is
therefore again a valid BT.656 stream, with the reference stream's timing.
`sync_module` delays the reference stream by one register, so all K outputs
line up exactly. In each `c_o` cycle, `vout[i]` is the byte that video i
carried at the same raster position as the reference output `vout[REF]`.

The read at offset r returns the last byte written to address r mod DEPTH. That
byte is the buffered video's byte at offset r of its own field only if it has
not been overwritten since. This gives the operating range of the buffer:

- With `DEPTH` ≥ one field (450 450 bytes for 525-line video), the alignment
  holds for any phase. If the buffered video leads the reference, the byte comes
  from the same field. If it lags, the byte comes from the previous field, at the
  same offset.
- With the default `DEPTH` = 720 × 480 = 345 600 bytes, the alignment holds while
  the buffered video's frame start comes **before** the reference's. The lead
  must also be less than one field minus `DEPTH`: 450 450 − 345 600 = 104 850
  bytes, about 61 lines or 3.9 ms. For 625-line video the limit is
  540 000 − 345 600 = 194 400 bytes. Outside that range, parts of the field
  show wrong bytes.

Nothing in the buffer detects or corrects the case where the rates drift the
phase out of this range. If a system cannot keep its phase in that range, set
`DEPTH` to at least one field.

The two clock domains never exchange control signals. Each pointer lives
entirely in its own domain, and only the RAM is shared, so there is no
synchronizer and no full/empty logic. A read of a location in the same instant
as a write to it returns either the old or the new byte. At the operating point
described above, the read and write addresses never meet.

## Interface module and output formatter: the `raw_video_t` bus

The application needs raw pixel values together with the line and frame
timing. `bt656_interface` turns each synchronized stream into one `raw_video_t`
per clock. The type is defined in `mvp_pkg`:

| field    | meaning                                                         |
|----------|-----------------------------------------------------------------|
| `trs`    | byte belongs to an EAV/SAV code                                 |
| `f v h`  | field, vertical-blanking and horizontal-blanking state          |
| `active` | active-video sample (`h = 0`, `v = 0`, not a code)              |
| `luma`   | slot is Y; otherwise chroma                                     |
| `cr`     | chroma slot is Cr; otherwise Cb                                 |
| `sample` | the byte                                                        |

To tag the four code bytes with the F/V/H values of the code they belong to, the
interface delays the stream by three bytes. The `XY` byte then arrives while
`FF` is about to leave. Its output is registered, so the latency is 4 clocks.
The slot type restarts at Cb after every code.

The application is expected to replace `sample` on active slots and keep the
tags. `output_formatter` rebuilds BT.656 from the tags:

- It writes `FF 00 00 XY` over code slots, computing `XY` and its protection bits
  from the slot's F/V/H.
- It writes 80h/10h over blanking slots.
- It passes active samples, clipped to 01h..FEh so that they cannot look like a
  code.

Its latency is 1 clock. Ancillary data in the blanking is not carried through.

From the reference input `vin[REF]` to `proc_in`, the latency is 1 + 4 = 5 `c_o` cycles. From
`proc_out` to `vout`, it is 1 cycle. `c_o` (the reference decoder's clock) is
also the clock the encoders are meant to use.

## Control module

`control_module` walks a table of register writes after reset. Each entry,
`cfg_entry_t`, holds an I2C bus index, a 7-bit device address, a register and a
value. `i2c_master` performs each write as START, address+W, register, data,
STOP, on one of `NBUS` separate buses: by default one bus for each of the two
decoders and one for the encoder. Outputs are open-drain style: 0 drives the
line low, 1 releases it.

- Each bit takes four quarter periods of SCL. With the defaults, `CLK_HZ` =
  50 MHz and `I2C_HZ` = 100 kHz, a quarter period is 125 clocks. A write takes
  116 quarter periods.
- A missing acknowledge stops the transfer after the byte that was not
  acknowledged and sets `cfg_error`. The remaining entries are still written.
- `cfg_done` rises after the last entry.

The default table is only an example: one write to register 00h of each device.
`mvp_top` builds it from K and H. Decoder i is on bus i, at 5Ch or 5Dh
alternately, which are the TVP5150 decoder's addresses. Encoder j is on bus
K+j, at 2Ah, the ADV7171 encoder's address. Replace the table through the
`CFG` parameter of `control_module` with what the board actually needs. There
is no clock stretching and no multi-master arbitration.

## Parameters

| module          | parameter          | default            | meaning                                   |
|-----------------|--------------------|--------------------|-------------------------------------------|
| `mvp_top`       | `K`                | 2                  | number of input videos                    |
|                 | `H`                | 1                  | number of output videos                   |
|                 | `DEPTH`            | 345 600 (720 × 480)| bytes per circular buffer                 |
|                 | `REF`              | 0                  | input whose clock becomes `c_o` (0 = video 1) |
|                 | `CLK_HZ`, `I2C_HZ` | 50 MHz, 100 kHz    | control clock and I2C rate                |
|                 | `NBUS`             | K + H              | I2C buses (`cfg_entry_t.bus` is 4 bits: at most 16) |
| `control_module`| `N_CFG`, `CFG`     | 3, example table   | configuration writes (`mvp_top` passes NBUS entries) |

All streams are 8 bits wide. `circular_fifo`, `trs_detector` and
`frame_start_detector` take a width `W` (at least 8, with the status bits in the
top 8). The interface and formatter are written for 8-bit BT.656.

## Where this follows the source architecture and where it does not

Taken from the architecture as published:

- The four stages: decoding, synchronization, processing, encoding.
- The synchronization module: K frame start detectors and K−1 circular buffers,
  with video 1 as the reference and its clock used as the output clock. The
  source architecture notes that the choice of video 1 loses no generality.
  Here `REF` selects any input as the reference.
- Writing starts at each buffered video's frame start, one byte per clock from
  location 0. Reading starts at the reference frame start, with the reference
  clock.
- The three-stage frame start detector, which uses the V bit of SAV and a
  falling edge.
- The interface module, processing module and output formatter inside the video
  processor.
- A control module configuring decoders and encoders over I2C.
- K = 2, H = 1, 8-bit BT.656, and a 720 × 480-byte buffer.

Choices made here, where the source is silent:

- The one-register delay on the reference path, so it lines up with the buffer's
  read latency.
- Storing every byte (not only active pixels).
- The `raw_video_t` bus, the interface's 4-cycle latency, and the formatter's
  clipping and blanking values.
- All of the I2C transaction format, its rate, its NACK handling and the example
  table.
- Asynchronous active-low reset everywhere.

Differences to be aware of:

- The source gives the buffer as 720 × 480 bytes, "the size of one frame", yet
  also quotes 900 900 samples per decoded frame. This RTL keeps 345 600 as the
  default, so it is subject to the lead range described above.
- The video processing application (visible/near-infrared fusion) is not
  described in enough detail to build. It is left outside, behind `proc_in` and
  `proc_out`.
- Decoders, encoders, crystals, regulators and connectors are physical parts
  with no RTL.

## Files

| file | contents |
|------|----------|
| `rtl/mvp_pkg.sv` | `raw_video_t`, `cfg_entry_t`, BT.656 constants, `xy_code()` |
| `rtl/trs_detector.sv`, `rtl/sync_extractor.sv`, `rtl/falling_edge_detector.sv`, `rtl/frame_start_detector.sv` | frame start detection |
| `rtl/circular_fifo.sv`, `rtl/sync_module.sv` | synchronization |
| `rtl/bt656_interface.sv`, `rtl/output_formatter.sv` | BT.656 ↔ tagged raw video |
| `rtl/i2c_master.sv`, `rtl/control_module.sv` | device configuration |
| `rtl/mvp_top.sv` | top level |
| `tb/tb_video_pkg.sv` | raster description and a byte-exact reference `byte_at()` |
| `tb/bt656_source.sv` | behavioural decoder output (its own clock, start enable) |
| `tb/i2c_slave_model.sv` | behavioural I2C target that ACKs its address and records writes |
| `tb/tb_<block>.sv` | one self-checking testbench per block |
| `tb/tb_sync_module_k3.sv`, `tb/tb_sync_module_ref.sv`, `tb/tb_sync_module_lag.sv` | synchronization with three inputs (reference on input 0, then on input 2), and with a lagging buffered video |
| `tb/tb_mvp_top.sv`, `tb/tb_mvp_top_k3h2.sv`, `tb/tb_mvp_top_full.sv`, `tb/tb_mvp_top_pal.sv`, `tb/tb_mvp_top_body.svh` | end-to-end tests |

## Verification

Every testbench prints `TB_RESULT checks=N failures=M` and has a watchdog.

- The block testbenches compare each output cycle against values computed from
  the stimulus. For the decoder-fed tests, the reference is the raster position.
- `tb_sync_module_k3` runs three inputs through two buffers, with the two
  buffered videos at different leads and clock drifts.
- `tb_sync_module_ref` connects the same three models in reverse order, with
  `REF` = 2, so the reference enters on the last input.
- `tb_sync_module_lag` starts the buffered video after the reference, with a
  buffer of one field. Every output byte must then come from the buffered
  video's previous field, at the same offset.
- The end-to-end tests drive one decoder model per input. Each buffered video
  starts earlier than video 1, and its clock period moves by ±0.05 % over time.
  A stand-in application makes each output the average of video 1 and one
  other synchronized video. The tests check every output byte against the
  reference raster, with active samples replaced by the average, and they check
  one configuration write on every I2C bus.
- `tb_mvp_top` uses a 12-line, 32-byte-per-line raster and a 150-byte buffer, so
  the buffer wraps inside a field. It counts frame starts on both inputs, the
  start-up lead, rate changes, buffer wraps, rebuilt timing codes, fused pixels
  and configuration writes. Any of these that never happens counts as a failure.
- `tb_mvp_top_full` runs the top with all defaults on two full 525-line frames:
  about 1.8 million output bytes, a 30 000-byte lead, 50 MHz control clock. It
  takes a few seconds.
- `tb_mvp_top_pal` does the same on 625-line video: 1728 bytes per line and
  1 080 000 bytes per frame, or 25 frames/s at 27 MHz. No block depends on the
  line count. With the default buffer, the lead must stay under
  540 000 − 345 600 = 194 400 bytes.
- The end-to-end tests also time output 0 on its own: the number of `c_o`
  cycles between successive output frame starts must be one frame of bytes.
  At full size this is 900 900 cycles, or 29.97 frames/s at 27 MHz, which is
  the reference video's rate.
- `tb_mvp_top_k3h2` runs the same checks with three inputs, two outputs and
  five I2C buses.

The RTL also carries concurrent assertions, which stop a simulation run with
`--assert`:

- `bt656_interface`: each timing reference's status byte has its top bit set
  and correct protection bits.
- `circular_fifo`: both pointers stay below `DEPTH`.
- `i2c_master`: SDA changes while SCL is high only for START and STOP, and
  `busy` falls only together with `done`.

What is not tested:

- A buffered video that lags the reference while `DEPTH` is smaller than a
  field. This is outside the operating range described above.
- I2C clock stretching and read transfers. The master does neither.

To simulate a testbench with Verilator, from the directory that holds `rtl/` and
`tb/`:

```
verilator --binary --timing --assert -Wno-fatal --timescale 1ns/1ps -Irtl -Itb -y rtl -y tb +libext+.sv \
    rtl/mvp_pkg.sv tb/tb_video_pkg.sv tb/tb_mvp_top.sv --top-module tb_mvp_top
./obj_dir/Vtb_mvp_top
```

Replace `tb_mvp_top` with any other testbench name. The raster for the models is
chosen with a `raster_t` parameter. `tb_video_pkg` defines `NTSC`, `PAL` and `SMALL`,
and any other raster can be described the same way.
