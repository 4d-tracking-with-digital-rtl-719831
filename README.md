# Readout logic for a 32 × 32 digital SiPM

A silicon photomultiplier (SiPM) is an array of single-photon avalanche diodes
(SPADs). When the SPADs are made in a standard CMOS process, each pixel can
turn its avalanche into a logic pulse on the sensor die itself. Counting,
masking, time-stamping and event selection can then live on the same chip, and
the sensor delivers digital hit maps instead of an analog sum. Such a digital
SiPM can detect charged particles directly, or through the light of a thin
scintillator glued on top. This makes it a candidate for "4D" tracking: about
20–40 µm in space and tens of picoseconds to a nanosecond in time.

This repository holds synthesizable SystemVerilog for the digital part of such
a chip, modelled on the DESY dSiPM prototype in a 150 nm CMOS process. That
prototype has 32 × 32 pixels of about 70 × 76 µm². Each pixel has four SPADs
that share one digitising inverter, a mask and a 2-bit hit counter. The chip
also has four shared TDCs with ~95 ps bins, a frame-based readout of the full
hit map at 3 MHz, and validation logic that selects events. Those facts are all
that has been published of its digital architecture. Everything else here,
such as the clock rate, the way the TDCs are shared, the validation criterion,
the output format and the configuration bus, is this design's own choice. Each
such choice is marked below.

## Block diagram

```
 spad_in[32][32] (digitised pulses, from the analog pixel front ends)
        │
        ▼
 ┌─────────────────────────── pixel_matrix ───────────────────────────┐
 │ 1024 × pixel_logic: synchroniser → edge detect → mask → 2-bit sat. │
 │ counter                                                             │
 │ per quarter: OR of unmasked raw pulses ──────────────┐              │
 └──────────┬──────────────────────────────────────────┼──────────────┘
   counts[32][32][2]                           group_hit[4] (asynchronous)
            │                                          ▼
            │                           4 × tdc_model (95 ps bins, first hit)
            ├──► validation_logic (hit-pixel count ≥ threshold)   │
            ▼                                  │                  │
 ┌──────────────────── frame_readout ──────────▼──────────────────▼──┐
 │ frame timer (32 cycles) · frame buffer (2048 bits) · row sequencer │
 │ header {frame_id, valid, hit_pixels, tdc_fired, tdc_code[4]}       │
 └──────┬────────────────────────────────────────────────────────────┘
        ▼  hdr_valid/hdr, row_valid/row_addr/row_data[63:0], frame_suppressed
 config_regs ◄── cfg_we/cfg_addr/cfg_wdata (masks, run, val_en, threshold)
```

`dsipm_top` wires these together. The analog parts of the pixel are not
modelled. They are the SPADs, the quenching transistor and the inverter, and
their output enters as `spad_in[row][col]`. Also absent are the temperature
diode, the bias generation and the LVDS pads. Rows and columns are numbered 0
to 31, as in the chip's hit maps.

## The pixel

A pixel's four SPADs drive one node, so the pixel cannot tell how many of
them fired. It only sees pulses. `pixel_logic` counts those pulses in a 2-bit
counter that **saturates at 3**. Whether the real counter saturates or wraps
is not published.

The pulse is asynchronous to the system clock. This design samples it with a
two-flop synchroniser and counts rising edges on the clock. In silicon, the
counter could instead be clocked by the pulse itself. The consequences:

* A pulse is counted on the third clock edge after it rises.
* A pulse must stay high for at least two clock periods, and low for two
  periods before the next one. At 96 MHz that is about 21 ns. SPAD dead times
  are of that order or longer.
* If an edge reaches the counter in the same cycle as the frame boundary, it
  counts toward the new frame.

The mask bit (1 = masked) stops the counter and also removes the pixel from
the TDC trigger. Masks reset to 0 (all pixels live).

## Frames and the double-buffered hit map

This is the part whose timing matters most. With the assumed 96 MHz clock, a
frame is 32 cycles (333 ns, hence 3 MHz). `FRAME_CYCLES` sets the length.

```
cycle:        ... 30   31 | 0    1    2   ...  31 | 0 ...
frame_end:          0    1 | 0    0    0        1  | 0
pixels:       ── frame N ──┤── frame N+1 (counters restarted) ──┤
buffer:                    │ holds frame N                         │ frame N+1
rows out:                  │ hdr+row0  row1 row2 ... row31         │ hdr+row0 ...
TDCs:         measuring N  │ publish N, measure N+1                │
```

On the clock edge where `frame_end` is high, four things happen at once:

* `frame_readout` copies all 1024 counters into a 2048-bit frame buffer.
* Every pixel counter restarts.
* Each TDC publishes the first-hit time of frame N and starts timing frame N+1
  from that edge.
* `validation_logic` registers the number of hit pixels of frame N, and
  whether that number reaches the threshold.

In the 32 cycles that follow, the buffer is sent one row per cycle. A row is
64 bits: column c sits in bits [2c+1:2c]. `hdr_valid` marks the first row's
cycle, where `hdr` carries the frame header. The readout takes exactly one
frame, so frame N is read while frame N+1 is recorded and no frame is lost. An
assertion in `frame_readout` checks this, and elaboration fails if
`FRAME_CYCLES < ROWS`.

While `run` is 0, no frames are made and the counters are held at zero. The
first frame starts with the first clock after `run` is set. `frame_id` counts
frames from 0 after each start.

Header (`dsipm_pkg::frame_hdr_t`, packed, MSB first):

| field | bits | meaning |
|---|---|---|
| `frame_id` | 16 | frame number since `run` was set |
| `valid` | 1 | validation result |
| `hit_pixels` | 11 | pixels with a nonzero count |
| `tdc_fired` | 4 | TDC *g* saw a hit in the frame |
| `tdc_code` | 4 × 12 | first-hit time of quarter *g*, in 95 ps bins from the frame start |

## Time stamps: four TDCs for 1024 pixels

The chip has only four TDCs, so pixels must share them. How they are shared is
not published. Here each TDC serves one quarter of the array (16 × 16
pixels): g = 2·(row ≥ 16) + (col ≥ 16). `pixel_matrix` ORs the masked raw
pulses of a quarter without synchronising them, so the TDC sees the true
arrival time.

`tdc_model` is a **behavioural model**, not logic. The real TDC is a
mixed-signal circuit that has not been described. The model takes the
frame-boundary clock edge as time zero. It converts the first rising edge of
its input in the frame to floor(Δt / 95 ps) and saturates at 4095. It ignores
any later edges in that frame. A 12-bit code spans 389 ns, so one 333 ns frame
fits. A tracking event therefore gets one time stamp per quarter it touches,
which is the earliest pixel of the cluster in that quarter. That pixel may be
a dark count that fired earlier in the frame.

## Validation

The chip has validation logic for event discrimination, but its criterion has
not been published. `validation_logic` uses the simplest rule that the
measurements support. With a thin scintillator, a particle fires a cluster of
20–40 pixels, while dark counts and crosstalk fire one or two. So a frame is
*valid* when the number of pixels with a nonzero count reaches
`val_threshold`. The count is a 1024-input population count, computed
combinationally and registered at the frame boundary. When `val_en` is set,
invalid frames are not sent at all. Instead, `frame_suppressed` pulses once in
the cycle where their header would have appeared. With `val_en` clear, every
frame is sent and `hdr.valid` only labels it.

## Configuration

Writes use a synchronous bus (`cfg_we`, `cfg_addr[7:0]`, `cfg_wdata[31:0]`).
Reads are combinational on `cfg_rdata`. The published description says only
that the DAQ configures the chip, so this map is this design's own:

| address | register |
|---|---|
| 0x00–0x1F | mask of row r, bit c = column c. Stored in the pixels and read back from them |
| 0x20 | bit 0 `run`, bit 1 `val_en` |
| 0x21 | `val_threshold` (11 bits) |

Other addresses read as 0. All registers reset to 0.

## Files

| file | content |
|---|---|
| `rtl/dsipm_pkg.sv` | sizes, TDC bin, header type, address map |
| `rtl/pixel_logic.sv` | one pixel: synchroniser, mask, saturating counter |
| `rtl/pixel_matrix.sv` | 32 × 32 pixels, row-wise mask writes, quarter ORs |
| `rtl/tdc_model.sv` | behavioural TDC (simulation only) |
| `rtl/validation_logic.sv` | hit-pixel count and threshold |
| `rtl/frame_readout.sv` | frame timer, frame buffer, row sequencer, header, suppression |
| `rtl/config_regs.sv` | configuration registers |
| `rtl/dsipm_top.sv` | the chip's digital top |
| `tb/tb_*.sv` | one self-checking testbench per module, plus `tb_workload_clusters` for the three sensor configurations |

All modules use `timeunit 1ps`. Parameter defaults are the chip's sizes:
`ROWS = COLS = 32`, 2-bit counters, 4 TDCs, 95 ps bins. The only other
default is `FRAME_CYCLES = 32`, chosen for the assumed 96 MHz clock. The
address map limits the array to at most 32 × 32. The TDC and header widths are
fixed in `dsipm_pkg`.

After synthesis, the array holds 6 flip-flops per pixel (6144 in total), and
the frame buffer holds 2048.

## Simulating

Every testbench prints `TB_RESULT checks=N failures=M` and stops itself. For
example:

```
verilator --binary --timing --assert -Wno-fatal -Irtl -Itb \
    rtl/dsipm_pkg.sv tb/tb_dsipm_top.sv --top-module tb_dsipm_top
./obj_dir/Vtb_dsipm_top
```

* `tb_dsipm_top` runs the whole chip at its default size for 120 frames. The
  test acts as the analog front ends and the DAQ:
  * It sets two masks, a threshold and `run`.
  * In most frames it fires a 29-pixel disc-shaped cluster at picosecond
    times. It also fires one or two dark counts, sometimes a pixel with four
    pulses, and sometimes a masked pixel.
  * From the pulses it drove, it predicts every row, the header and the TDC
    codes of the frame, and checks them one frame later.
  * The second half of the run enables suppression.
  * It counts each mechanism and fails if one never happened: masking,
    saturation, each TDC firing, an empty TDC, accept, reject and suppression.
* `tb_workload_clusters` runs the chip in the three ways the sensor has been
  operated, each with suppression on and each for 60 frames:
  * bare silicon: a particle fires one pixel, and the threshold is 1;
  * under a 100 µm scintillator: a 21-pixel disc, threshold 5;
  * under a 200 µm scintillator: a 37-pixel disc, threshold 5.

  Besides the full data check, the test counts frames. With a scintillator,
  every particle frame must be sent and every dark-count-only frame must be
  suppressed. Bare, both kinds pass the 1-pixel cut, since single-pixel
  particles and dark counts look alike.
* `tb_pixel_logic`, `tb_pixel_matrix`, `tb_tdc_model`, `tb_validation_logic`,
  `tb_frame_readout` and `tb_config_regs` test one module each against values
  the test computes itself. This includes the 3-cycle counting latency and the
  32-cycle frame period.

Each simulation takes well under a second.

## How far to trust it

The numbers and functions that follow the published chip are:

* the array size;
* four SPADs per pixel, read as one pulse;
* the per-pixel mask and 2-bit counter;
* four shared TDCs with ~95 ps bins;
* full hit-map, frame-based readout at 3 MHz;
* validation for event selection.

Everything listed below is an assumption, and each may differ from the
silicon:

* the clock rate;
* synchronous counting;
* saturation;
* TDC sharing by quarter;
* first-hit-only TDC codes referenced to the frame start;
* the 12-bit code;
* the multiplicity criterion and frame suppression;
* double buffering;
* the row-per-cycle output format;
* the header;
* the configuration bus.

The TDC is a timing model and has no circuit. The readout's serialisation onto
LVDS links is not included.
