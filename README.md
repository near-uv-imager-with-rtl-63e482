# Photon-event centroiding readout for an MCP imaging detector

A microchannel-plate (MCP) image intensifier turns each ultraviolet photon
into a cloud of electrons. The electrons strike a phosphor screen and make a
small flash, and a lens images that flash onto a CMOS sensor. On the sensor
every photon appears as a faint Gaussian spot a few pixels across, on a noisy
background. A photon-counting camera therefore does not need the images
themselves. It needs, for each photon, where the spot's centre was (to better
than a pixel), in which frame, and how bright it was.

This RTL is the FPGA logic between the sensor and the rest of the payload. It
watches the pixel stream and finds every spot as the pixels go by. It
reduces each spot to a packet of 7 or 8 bytes, keeps the packets in SDRAM,
and later sends them to the host as a byte stream. A second mode stores
whole frames instead of events, for bright scenes where the camera is used
as an intensified video camera.

The design follows the readout of the near-UV imager described by Ambily et
al., "Near UV Imager with an MCP Based Photon Counting Detector": a 5-row
on-chip line store, a sliding 5x5 window, a threshold, tests for hot pixels
and multiple events, sub-pixel numerators and denominators computed during
detection and divided only before transmission, and an SDRAM address loop.
That description gives the flow and the packet contents but few widths,
encodings or handshakes. Where it is silent, this design makes its own
choices, and they are listed in [Departures and own choices](#departures-and-own-choices).

## Data flow

```
 sensor bus            one pixel per clock
 fv, lv, pix[9:0] ──► cmos_capture ──► row_array ──► window_5x5 ──► event_detector ──► event_buffer
                      (q, p, frame ID)  (5 x IMG_W)   (5x5 regs)     (+ subpixel_calc)   (16 records)
                            │                                            ▲                   │
                            └──────────► threshold_unit ─────────────────┘                   ▼
                            └───────────── frame pixels (frame-transfer mode) ─────────► event_store ◄──► SDRAM controller
                                                                                             │ read back, last first
                                                                                             ▼
                                       host bytes ◄── telemetry_tx ◄── fraction_unit (2 x serial_divider)
```

`centroid_top` wires these blocks together. Everything runs on one clock,
which is also the pixel clock. The sensor, the SDRAM controller, the clock
PLL and the physical host link are outside the module, and their signals
are ports.

## Finding a photon event

### Five rows on chip, a 5x5 window

Testing a pixel needs the pixels two rows above and below it and two columns
to either side. Fetching those from SDRAM for every pixel is far too slow.
So `row_array` keeps the most recent rows on chip. The current row is the
pixel arriving now. The four rows above it are held in one RAM of `IMG_W`
words, and each word packs the four older pixels of one column. For each
pixel the RAM word of its column is read, and the five-pixel column
`{p, p-1, p-2, p-3, p-4}` is passed on. The word is then written back shifted
by one row: the oldest value drops out and the new pixel goes in. The write
lands one clock after the read. Consecutive pixels use different columns, so
reads and writes never collide. At 1280 columns this costs 51,200 bits of
block RAM.

`window_5x5` shifts these columns into a 5x5 register array. When pixel
`(q, p)` arrives, the window holds columns `q-4..q` of rows `p-4..p`, so its
centre is pixel `(q-2, p-2)`. The window is used only when `q >= 4` and
`p >= 4`. Otherwise it would straddle the start of a row, or reach into the
previous frame, whose rows are still in the RAM. Pixels within two pixels of
the frame edge are therefore never event centres.

Naming follows the original flowchart: `q` counts pixels along a line (it
becomes the x coordinate `Xc`), and `p` counts lines (it becomes `Yc`).

### The decision

`event_detector` runs all of its tests on every window in parallel, in one
clock.

| test | rule | if it fails |
|---|---|---|
| local maximum | centre >= all 24 neighbours, and strictly > those earlier in raster order | not an event |
| threshold | centre > threshold | not an event |
| hot pixel | at least one of the 24 neighbours is above the threshold | dropped, `hot` pulse |
| multiple event | no outer-ring pixel is above the threshold and brighter than the inner-ring pixel between it and the centre | dropped, `multi` pulse |

The threshold is applied first, so "all surrounding pixels zero" in the
flowchart becomes "no neighbour above threshold". A spot made from a real
photon cloud lights its neighbours. A single bright pixel with a dark
surround is a hot or defective pixel. The multiple-event rule looks for the
intensity profile rising again towards the edge of the window. That means a
second peak, i.e. two photons whose clouds overlap. The source only says that
multiple events are flagged; this rule is this design's. The tie rule in the
local-maximum test makes a flat top of two equal pixels give exactly one
event, owned by the first of them in raster order.

An accepted event gets the next event ID of its frame (IDs restart at every
frame). It leaves as a raw record, `raw_event_t` in `centroid_pkg`.

### Sub-pixel centroid without a divider in the pipeline

The integer centroid is the position of the brightest pixel. The sub-pixel
correction is taken from its four direct neighbours:

```
Xc offset = (R - L) / S        Yc offset = (B - T) / S
```

Here `L, R, T, B` are the left, right, top and bottom neighbours, and `S` is
the sum of all 25 window pixels. The packet example of the source design
supports using the window sum: numerators 12 and 6 over a sum of 289 give
the fractions 0.04 and 0.02 shown there. Division by repeated subtraction
takes one clock per result bit, and the pipeline cannot wait for that. So
`subpixel_calc` delivers only `|R-L|`, `|B-T|`, one sign flag for each
(1 = the offset is negative, towards the left or the top) and `S`. The raw
record carries these, and the division is done only when the record is read
back for transmission.

## Packets

Raw record, as detected and as stored (83 bits, stored as six 16-bit SDRAM
words, MSB first, zero-padded):

| frame ID | event ID | Xc int | Xc num | Xc flag | Yc int | Yc num | Yc flag | intensity | window sum |
|---|---|---|---|---|---|---|---|---|---|
| 7 | 8 | 11 | 10 | 1 | 10 | 10 | 1 | 10 | 15 |

Final packet, produced by `fraction_unit`, MSB first and left-aligned, padded
to whole bytes:

| frame ID | event ID | Xc int | Xc frac | Xc flag | Yc int | Yc frac | Yc flag | intensity |
|---|---|---|---|---|---|---|---|---|
| 7 | 8 | 11 | FRAC_W | 1 | 10 | FRAC_W | 1 | 10 |

With `FRAC_W = 4` (the default) this is 56 bits, which is 7 bytes. With 6 or
8 fraction bits it is 8 bytes. The fraction is `floor(num * 2^FRAC_W / S)`,
which saturates at all ones; since `num < S` it never actually reaches that.
The frame and event ID widths (7 + 8) were chosen so that the packet fills
exactly 7 or 8 bytes. The field order comes from the source design; the
widths do not. `telemetry_tx` sends the packet most significant byte first,
with `tx_last` on the final byte.

Example: frame 5, event 1, `Xc = 7` with num 12 and flag 1, `Yc = 25` with
num 6 and flag 0, intensity 37, sum 289. This gives fractions 0/16 and 0/16
at 4 bits (0.042 and 0.021 are below 1/16), or 10/256 and 5/256 at 8 bits.

## Storage loop and modes

`event_store` runs the SDRAM address loop of the source flowchart:

* **Start.** While the address is not zero, read the record just below it,
  hand it to the transmit path and decrement the address. Records therefore
  come back **last in, first out**. When the address reaches zero, begin
  acquiring.
* **Acquire, centroiding mode.** Take raw events from `event_buffer`, write
  each as six words, and increment the address.
* **Acquire, frame-transfer mode.** Write every pixel as one word: the pixel
  is in bits 9:0, and bit 15 is set on the first pixel of a frame. Increment
  the address.

A one-clock `start` pulse ends acquisition (after the event being written)
and returns to Start, so everything stored is sent to the host. The `mode`
input is sampled when acquisition begins. Records are read back in the mode
they were stored in. Frames stored in frame-transfer mode therefore come
back in reverse pixel order, and the host must reverse them. Events found
while stored data is being read back are not kept.

`event_buffer` is a 16-record register FIFO that absorbs SDRAM stalls. Each
event needs six SDRAM writes, so a burst of closely spaced events, or a busy
SDRAM, can fill it. Further events are then lost and counted in
`overflow_count`. When the SDRAM itself is full (2^28 / 6 events, or 2^28
pixels), and when frame pixels arrive while the SDRAM is not ready, the data
is dropped and counted in `drop_count`. Frame-transfer mode has no buffer,
so it needs an SDRAM port that accepts one word per clock during the frame.

## Threshold

The best threshold lies at or a little above the image's mean signal level.
`threshold_unit` offers two sources:

* `thr_mode = 0`: the programmed value `thr_prog`;
* `thr_mode = 1`: the mean pixel value of the **previous** frame plus
  `thr_offset`, saturating at 1023.

The frame's sum and pixel count are accumulated as the pixels go by. At the
frame end a `serial_divider` finds the mean in 31 clocks, during vertical
blanking. Before the first frame has been measured, the programmed value is
used. The current frame's mean is not known until that frame has ended,
which is why the previous frame's mean is used.

## Interface and timing of `centroid_top`

| group | ports | notes |
|---|---|---|
| sensor | `fv`, `lv`, `pix_in[9:0]` | synchronous to `clk`; a pixel on every clock with both valids high |
| control | `mode` (`MODE_CENTROID`/`MODE_FRAME`), `start`, `thr_mode`, `thr_prog`, `thr_offset` | `start` is a one-clock pulse |
| SDRAM controller | `sdr_req`, `sdr_we`, `sdr_addr[27:0]`, `sdr_wdata[15:0]`, `sdr_ready`, `sdr_rvalid`, `sdr_rdata[15:0]` | a request is taken on a clock with `sdr_ready`; read data returns in order, any latency |
| host | `tx_valid`, `tx_ready`, `tx_data[7:0]`, `tx_last` | valid/ready byte stream |
| status | `frame_id`, `threshold`, `frame_mean`, `event_count`, `hot_count`, `multi_count`, `overflow_count`, `drop_count`, `stored`, `acquiring` | counters saturate at 16 bits |

* Throughput: one pixel per clock, with no stall towards the sensor.
* Latency: there is one register stage each in input sampling,
  `cmos_capture`, `row_array`, `window_5x5` and `event_detector`. The event
  centred on `(q-2, p-2)` is offered to `event_buffer` 4 clocks after the
  clock edge that samples pixel `(q, p)` from the sensor bus, and is readable
  from the buffer one clock later.
* Read-back: per event, six SDRAM reads, then `10 + FRAC_W + 2` clocks of
  division, then 7 (or 8) byte transfers.
* Reset: `rst_n` is active low and synchronous, and clears all control
  state. The line RAM and the FIFO storage are not cleared; they are never
  read before being written.

Parameters of `centroid_top`:

| parameter | default | meaning |
|---|---|---|
| `IMG_W` | 1280 | columns (line RAM depth); sensor array width |
| `IMG_H` | 1024 | rows; sensor array height (shorter frames also work) |
| `FRAC_W` | 4 | fraction bits; 6 or 8 for 8-byte packets |
| `FIFO_DEPTH` | 16 | on-chip event buffer (own choice) |
| `ADDR_W` | 28 | SDRAM word address: 2^28 16-bit words = 512 MB |

Pixel, coordinate and ID widths are fixed in `centroid_pkg`.

## Capacity and rate

* 1280 x 1024 frames (the flight sensor), 1280 x 800 (the prototype sensor)
  and 640 x 400 all fit without change.
* The flight sensor's 500 frames per second at full size is 655 Mpixel/s.
  At one pixel per clock, that would need a 655 MHz clock, far above what a
  Spartan-6 class FPGA reaches with this logic. At full frame size the design
  is limited to the pixel rate its clock allows. A windowed or sub-sampled
  sensor readout reduces the load; a multi-pixel-per-clock datapath is not
  provided.
* SDRAM: 2^28 words hold about 44.7 million events, or about 262 frames of
  1280 x 800 in frame-transfer mode.

## Departures and own choices

These follow the source design:

* the 5-row line store, the 5x5 window centred two rows and two columns
  back, and the threshold / local-maximum / hot-pixel / multiple-event flow;
* the numerator and denominator carried to the transmit stage, with division
  by repeated subtraction, at 4 bits by default and 6 or 8 bits as options;
* the packet contents and field order, and the 7- or 8-byte final packet;
* the SDRAM address loop: write and increment while acquiring; read, transmit
  and decrement at start;
* the frame-valid / line-valid handling, with the frame ID incremented per
  frame.

These are this design's own choices or interpretations:

* Both modes are in one bitstream, selected by a `mode` input. The original
  switches between two FPGA programs.
* The frame-valid and line-valid decisions act on rising edges.
* The dynamic threshold uses the previous frame's mean plus an offset.
* The multiple-event rule and the tie rule of the local maximum, as
  described above.
* The denominator is the sum of all 25 window pixels, and the sign-flag
  polarity.
* All field widths, the 16-bit SDRAM word and the six-word record, the SDRAM
  controller handshake, the 16-entry event buffer, and the byte-stream host
  interface.
* Border pixels are never event centres.
* Event IDs count only accepted events, restart each frame and wrap at 256.

Not covered: correction of the relay-lens distortion (left as future work
in the source), writing to the SD card, the sensor's configuration and
master clock, and the 3x3-window variant that preceded the 5x5 one.

## Files

`rtl/` holds one module or package per file:

| file | role |
|---|---|
| `centroid_pkg.sv` | widths, `raw_event_t`, `window_t`, `mode_e`, packet size functions |
| `cmos_capture.sv` | sensor bus, addresses, frame ID |
| `row_array.sv` | five-row line store |
| `window_5x5.sv` | sliding window |
| `threshold_unit.sv` | programmed or dynamic threshold |
| `event_detector.sv` | event decision and raw record |
| `subpixel_calc.sv` | numerators, flags, window sum |
| `event_buffer.sv` | on-chip event FIFO |
| `event_store.sv` | SDRAM address loop, both modes |
| `serial_divider.sv` | restoring divider |
| `fraction_unit.sv` | fractions and final packet |
| `telemetry_tx.sv` | byte serialiser |
| `centroid_top.sv` | the readout |

`tb/` holds one self-checking testbench per block (`tb_<module>.sv`), a
behavioural SDRAM (`sdram_model.sv`), and the end-to-end scenario
(`centroid_scenario.sv`). The scenario is run by three wrappers:
`tb_centroid_top` at 64 x 48 pixels, `tb_centroid_full` at the default
1280 x 1024, and `tb_centroid_prototype`, which feeds 1280 x 800 frames (the
prototype sensor's size) to the default design. The scenario generates noisy frames with a grid of spots, one
hot pixel and one overlapping pair. It runs two centroiding frames (one with
the programmed threshold, one with the dynamic threshold), then a dense frame
with the SDRAM held busy so that the event buffer overflows. It then reads
everything back and checks every packet, bit for bit, against values
computed from the generated image. Finally it stores a frame in
frame-transfer mode and checks every returned pixel word. Every testbench
ends with a line `TB_RESULT checks=N failures=M`.

Simulating with Verilator 5:

```
cd tb
verilator --binary --timing --assert -I../rtl ../rtl/centroid_pkg.sv ../rtl/*.sv \
    sdram_model.sv centroid_scenario.sv tb_centroid_full.sv --top tb_centroid_full
./obj_dir/Vtb_centroid_full
```

For a single block, list only the package, the block's files and its
testbench, e.g.
`verilator --binary --timing --assert -I../rtl ../rtl/centroid_pkg.sv ../rtl/serial_divider.sv ../rtl/fraction_unit.sv tb_fraction_unit.sv --top tb_fraction_unit`.
The full-size run takes about half a minute to build and ten seconds to
simulate.
