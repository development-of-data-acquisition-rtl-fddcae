# Photon-counting readout for an intensified CMOS detector

A UV photon-counting detector of this kind turns each photon into a small
splash of light. A photocathode converts the photon to an electron, a
microchannel plate (MCP) multiplies it, and a phosphor screen turns the charge
cloud into light. A relay lens images the screen onto an ordinary CMOS video
sensor (1280 × 800 pixels, 8-bit values here). Every frame then holds a few
isolated blobs a few pixels across. The position of a blob's centroid, found
to a fraction of a pixel, is the photon's position.

This RTL is the FPGA side of such a detector. It takes the sensor's raw
pixel stream and finds the photon events while the frame is read out. Nothing
is buffered per frame. For each event it computes an undivided centroid and
stores the result in SDRAM as it arrives. From there it sends each event as a
7-byte packet over an RS232 line, or writes it to an SD card. A second mode
skips centroiding: it stores whole frames in SDRAM, tagged with frame and row
numbers, and copies them to the SD card.

```
            cmos_capture ──► centroid_engine ──────────► sdram_packet_fifo ──► telemetry ──► uart_tx ──► RS232
 sensor ──►  (sync, x/y,     ├ line_buffer   (5 rows)      (SDRAM ring)        (2 dividers)   (8N1)
             frame id)       ├ pixel_window  (5×5)                                  └──────────────────► SD card
                             ├ event_detector                                          (log_to_sd)
                             └ centroid_calc
                         └─► frame_transfer (frame mode) ──► SDRAM ──► SD card
```

`detector_top` holds all of it. The SDRAM controller, the SD-card (SPI)
controller and the PLL that clocks the sensor are outside the design. Their
host-side signals are ports of the top.

## Finding events in a pixel stream

Pixels arrive one at a time, row by row. `line_buffer` keeps the last five
rows: one memory of `WIDTH` = 1280 words, each word holding the four older
pixels of that column. For every incoming pixel (x, y) it presents the
column of rows y−4 … y at x, one cycle later. `pixel_window` shifts these
columns into a 5 × 5 array. Every pixel therefore completes a window centred
at (x−2, y−2): the centre is the pixel whose 24 neighbours have all been
read. A window reaching past the frame edge (x < 4 or y < 4) is not
evaluated, so events within two pixels of the edge are missed.

`event_detector` judges each window in one cycle.

- **Threshold.** The local background is the lowest of the four corner
  pixels. It is raised to the register `thr_floor` if it is lower. With
  `thr_floor` = 0 the threshold is purely local. A floor near the mean noise
  level suppresses dark noise on a flat background.
- **Local maximum.** The centre must be above the threshold and the largest
  pixel of the window. Ties go to the pixel read first: the centre must be
  strictly greater than the 12 pixels read before it, and at least equal to
  the 12 read after it. A flat-topped blob therefore gives one event, not
  two.
- **Hot pixel.** The window is a hot pixel when the centre is the only pixel
  above the threshold. It is counted on `st_hot` and produces no packet.
- **Multiple event.** Two overlapping splashes lift one side of the window.
  The detector measures this as the difference between the highest and the
  lowest corner. When the difference exceeds `multi_thr` the event is flagged
  as multiple. With `reject_multi` set it is dropped instead. The difference
  itself travels with the event.

`centroid_calc` computes, in the same cycle as the detector, the parts of the
centroid that need no division:

| quantity | 3 × 3 (`SPAN`=3) | 5 × 5 (default) |
|---|---|---|
| integer X, Y | centre column, centre row | same |
| X numerator | rows above − rows below | 2·row₀ + row₁ − row₃ − 2·row₄ |
| Y numerator | columns left − columns right | 2·col₀ + col₁ − col₃ − 2·col₄ |
| denominator | sum of the 9 pixels | sum of the 25 pixels |

Worked example, with centre 37 at column 7, row 25:

```
 28 31 28
 34 37 32     X numerator = (28+31+28) − (34+35+30) = −12
 34 35 30     Y numerator = (28+34+34) − (28+32+30) =   6
              denominator = 289
```

Note the orientation. The X fraction is paired with the column integer, yet
it comes from a *row* difference; Y is the other way round. This follows the
published worked example exactly, and the testbenches check those numbers.
A user who wants the conventional pairing should swap the two numerators in
`centroid_calc`. The 2-weighting of the outer ring in 5 × 5 mode is a plain
first moment, and is this design's own choice. Raw pixel values are used,
with no background subtraction.

`centroid_engine` chains the four blocks. It numbers the accepted events
from 0 at each frame start and emits one 96-bit record per event, four
cycles after the pixel that completed the window. It never stalls, so the
pipeline keeps up with one pixel per clock.

## The event packet

The division happens after storage. The serial link is slow, so there is time
for `telemetry` to run two restoring dividers (`frac_divider`, one quotient
bit per clock, `FRAC_BITS`+1 cycles) in parallel on |numerator| / denominator.
The sign of each numerator becomes a flag bit: 1 means negative, as in the
example, where −12/289 carries X flag 1. A quotient of one or more saturates
to all ones. The packet is sent most significant byte first:

| bits (FRAC_BITS = 4) | field |
|---|---|
| 55 | multiple-event flag |
| 54:47 | frame ID |
| 46:39 | event ID within the frame |
| 38:28 | X integer (column) |
| 27:24 | X fraction |
| 23 | X flag (numerator < 0) |
| 22:13 | Y integer (row) |
| 12:9 | Y fraction |
| 8 | Y flag |
| 7:0 | central pixel intensity |

The packet is 48 + 2·`FRAC_BITS` bits plus the flag: 7 bytes with 4-bit
fractions, 8 bytes with 8-bit fractions. The worked example becomes X
fraction 12·16/289 → 0 and Y fraction 6·16/289 → 0 at 4 bits. At 8 bits
they are 10/256 (printed as 0.04) and 5/256 (0.02). The field order follows
the published packet. The field widths and the flag bit are this design's
choices. The full corner difference is kept only in the SDRAM record.

`uart_tx` sends 8N1 at `CLKS_PER_BIT` = 87 clocks per bit, which is
460.8 kbaud at 40 MHz. Bytes go back to back, so a packet takes 70 bit times
and the link carries about 6570 packets per second. With `log_to_sd` set,
the packet bytes go to the SD-card byte port instead of the UART.

## Storage in SDRAM

`sdram_packet_fifo` is a ring of `CAP` = 2²⁰ records in SDRAM. Each record
takes six 16-bit words, most significant first, from address `BASE`. A
four-record staging FIFO on chip absorbs the time the SDRAM port is busy.
Writes have priority over reads. The record ahead of the ring is read back
into an output register for `telemetry`. A record that finds both the
staging FIFO and the ring full is dropped, and `st_pkt_overflow` pulses.
Once the frame's events are stored, the next frame can be read out while
they drain over the link.

The SDRAM port is a simple host interface, as a controller core would offer.
`sdram_req` holds `req`, `we`, a 24-bit `addr` and `wdata`. The request stays
asserted until `sdram_rsp.ack` pulses, and read data arrives with the ack.
Latency is free.

## Frame-transfer mode

With `mode` = `MODE_FRAME` the centroiding pipeline is idle, and
`frame_transfer` owns the SDRAM and the SD-card port. Each pixel becomes one
16-bit word, `{frame_id[3:0], row[3:0], pixel[7:0]}`. The spare upper byte
lets a reader spot missing frames or broken rows. The words are written at
consecutive addresses from `BASE`, through an 8-word staging FIFO. A pixel
that finds the FIFO full is lost (`st_pix_overflow`). After frame-valid
falls and the FIFO has drained, the frame is copied to the SD card as bytes,
high byte first, and `st_frame_done` pulses. A frame that starts during the
copy is skipped (`st_frame_skip`). The mode input should be changed only
between frames.

## Clocking and throughput

Two clocks are involved. The sensor's pixel clock runs only the front of
`cmos_capture`. That front registers line-valid, frame-valid and the data on
each rising edge, counts columns and rows, and writes one entry per pixel
into an eight-entry clock-crossing FIFO (`async_fifo`). A frame start or
frame end also gets an entry. The FIFO uses Gray-coded pointers with
two-flop synchronisers. Everything after it runs on the system clock `clk`
(40 MHz in the intended system), which takes one entry per cycle. The
sensor cannot be stalled. The one rule is therefore that `clk` must be
faster than the pixel rate. An assertion reports a pixel lost in the
crossing.

- The centroid pipeline takes one pixel per `clk`. At 40 MHz that is ample
  for a full 1280 × 800 frame at 30 fps (30.7 Mpixel/s). The full-size
  testbench runs at a 23.8 MHz pixel clock.
- Frame transfer writes one SDRAM word per pixel. It issues single-word
  requests and leaves a cycle after each acknowledge, so it writes at most
  one word every two clocks: 20 Mwords/s at 40 MHz. A 24 MHz pixel clock
  in this mode needs a faster `clk` or a burst-capable SDRAM port.
  Otherwise pixels are lost and counted on `st_pix_overflow`.
- The RS232 link limits photon mode to about 6570 events/s sustained. The
  SDRAM ring absorbs bursts of up to 2²⁰ events.
- The event ID is 8 bits and wraps beyond 256 events in one frame. The frame
  ID is 8 bits in packets and 4 bits in frame words.

## Ports of `detector_top`

| port | dir | meaning |
|---|---|---|
| `clk`, `rst_n` | in | clock, asynchronous active-low reset |
| `cam_pclk`, `cam_fval`, `cam_lval`, `cam_data[7:0]` | in | sensor video output (active-high valids) |
| `mode` | in | `MODE_PHOTON` or `MODE_FRAME` |
| `thr_floor[7:0]` | in | lowest event threshold (ADU) |
| `multi_thr[7:0]` | in | corner difference above which an event is multiple |
| `reject_multi` | in | drop multiple events instead of flagging them |
| `log_to_sd` | in | photon packets to the SD card instead of RS232 |
| `sdram_req`, `sdram_rsp` | out/in | SDRAM controller host port (structs in `pc_pkg`) |
| `sd_valid`, `sd_data[7:0]`, `sd_ready` | out/out/in | byte stream to the SD-card controller |
| `uart_txd` | out | RS232 transmit |
| `st_event`, `st_hot`, `st_multi`, `st_multi_drop`, `st_pkt_overflow`, `st_pkt_sent`, `st_pix_overflow`, `st_frame_skip`, `st_frame_done` | out | one-cycle status pulses |

Parameters: `WIDTH` (line length, 1280), `SPAN` (5, or 3 for the 3 × 3
centroid), `FRAC_BITS` (4; 8 gives 8-byte packets), `CLKS_PER_BIT` (87),
`CAP` (ring size in records, 2²⁰). Shared widths and types are in
`rtl/pc_pkg.sv`.

## Where this departs from the published instrument

- The published instrument has two FPGA configurations, one per mode. Here
  both modes live in one design, selected by `mode`.
- The threshold combines the lowest-corner background with a programmable
  floor. The published hardware test used the mean noise level.
- The sensor's signals are captured on its own pixel clock and cross to
  the system clock through a FIFO.
- The window is centred two rows and two columns behind the newest pixel,
  and edge windows are skipped.
- The tie rule in the local-maximum test, the 5 × 5 weighting, the field
  widths, the one-bit multiple flag in the packet, the record layout, the
  SDRAM ring, the frame-word tag layout and the drop-on-overflow policies
  are all this design's own choices.
- The first-moment orientation (X from rows, Y from columns) follows the
  published example as printed. See above.
- The 460.8 kbaud rate was chosen to carry 6000 events/s in 7-byte packets.
- Not included: the SDRAM and SD-card controllers, the sensor's master-clock
  PLL and its I²C register setup, and host-side image reconstruction.

## Simulating

Each block has a self-checking testbench in `tb/`. Each one prints
`TB_RESULT checks=N failures=M`.

| testbench | what it checks |
|---|---|
| `tb_line_buffer` | columns against the worked example frame |
| `tb_pixel_window` | window contents, centre coordinates, edge rule |
| `tb_event_detector` | worked example, hot pixel, ties, multiple events, floor, 3000 random windows against a reference |
| `tb_centroid_calc` | −12 / 6 / 289 of the example, random 5 × 5 moments |
| `tb_centroid_engine` | the 22 × 22 example frame gives exactly its four events, then random frames against a reference finder |
| `tb_frac_divider` | quotients and latency (FRAC_BITS+1 cycles) |
| `tb_telemetry` | the example packet, random packets at 4 and 8 fraction bits |
| `tb_uart_tx` | framing, bit time, back-to-back bytes |
| `tb_sdram_packet_fifo` | order and content through a jittery SDRAM model, overflow |
| `tb_frame_transfer` | tagged words, skipped frames, lost pixels |
| `tb_cmos_capture` | coordinates, frame numbering, sof/eof |
| `tb_async_fifo` | order and completeness across two unrelated clocks, full and empty |
| `tb_detector_top` | end to end on 22 × 22 frames, every mechanism at least once |
| `tb_detector_full` | all parameters at their defaults: a 1280 × 800 photon frame at a 23.8 MHz pixel clock over RS232, then a 1280 × 800 frame (10 MHz pixel clock) through SDRAM to the SD card (about 30 s) |

`cmos_model`, `sdram_model` and `uart_rx_model` in `tb/` are behavioural
stand-ins for the sensor, the SDRAM with its controller, and the host's
serial port. `pc_ref.svh` is the reference event finder and packet builder.
`fig_image.svh` holds the 22 × 22 example frame.

With plain Verilator 5, from the directory holding `rtl/` and `tb/`:

```
verilator --binary --timing --assert --timescale 1ns/1ps -Wno-fatal \
    --top-module tb_detector_full -y rtl -y tb +libext+.sv -Irtl -Itb \
    rtl/pc_pkg.sv tb/tb_detector_full.sv
./obj_dir/Vtb_detector_full
```

Replace the top-module name to run any other testbench. The testbenches
reset or initialise everything they read, so they also pass with
`+verilator+rand+reset+2`.
