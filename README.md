# FPGA readout for an X-ray CMOS image sensor with onboard event extraction

A 2048 x 2048-pixel scientific CMOS sensor read out with 12-bit samples
produces about 6 MB per frame. At tens of frames per second that is far more
than a small satellite can store or send down. In X-ray photon-counting work,
though, almost every pixel of a frame holds nothing but its own offset and
noise; the information is in a few hundred small charge clouds, each a single
X-ray photon. This design reads the sensor, finds those photons in the FPGA
while the frame streams past, and sends only a short record per photon
(position, energy, time, shape). The raw frame is still available in a
separate mode, buffered in external DDR3, for calibration.

The RTL covers the FPGA logic of such a readout board: the pixel receiver, the
event extraction pipeline, a triple-redundant configuration store loaded from
an SPI FRAM, the interface to an AD7928 housekeeping ADC, an RS-422 command
interpreter and an SPI data line that packs events, housekeeping and frame
rows into packets. The sensor, the DDR3 controller, the FRAM and ADC chips and
the host are outside the FPGA; the top module brings their signals out.

## Operating modes

The mode register is set over the command line and is `IDLE` after reset.

| mode | value | what runs | data line carries |
|---|---|---|---|
| IDLE | 0 | receiver only | events still queued, nothing new |
| FRAME | 1 | raw pixels go to the DDR3 store (`ddr_wr_*`), `ddr_pwr_en` = 1 | one packet per image row, read back through `ddr_rd_*` |
| EVENT | 2 | extraction pipeline enabled, DDR3 supply off | one packet per X-ray event |
| HK | 3 | each completed ADC scan triggers a packet | housekeeping packets |

`ddr_pwr_en` is high only in frame mode, so the DDR3 can be unpowered while
the board is counting photons. The ADC scans and the configuration vote run
in every mode.

## The event extraction pipeline

```
 sensor --> pixel_receiver --> frame_subtractor --> line_buffers --> event_detector --> data_link
 (fval/lval/dval/data)   (x,y,addr)   |  ^ one-frame      (3x3 window)    (thresholds)     (event FIFO)
                                      v  | buffer (frame_ram)
```

The whole chain takes one pixel per clock, tolerates gaps in `s_dval` and
never stalls. That matters: the sensor cannot be paused, so everything
downstream of the receiver must keep pace or drop data, and the only place
where data can be dropped is the event FIFO at the very end.

### Removing the pixel offsets with one frame buffer

Each pixel has its own dark level, so a fixed threshold on raw values does not
work. The pipeline uses the difference of consecutive frames, N minus N-1.
Keeping two frames would cost two frame memories; one is enough. The buffer is
addressed by pixel index. When pixel k of frame N arrives, location k still
holds pixel k of frame N-1, while all locations before k have already been
overwritten with frame N. A single read-first access per pixel returns the old
value and stores the new one. `frame_subtractor` outputs `new - old` as a
signed 13-bit value two clocks after the pixel.

A difference is only meaningful once the buffer holds a complete frame. After
event mode is entered, the first frame that runs from its start-of-frame pixel
to its end-of-frame pixel only fills the buffer (`primed` then goes high);
leaving event mode clears that state. A photon that lands in frame N also
appears, negative, in the difference N+1 minus N. Only positive values are
compared against the thresholds, so it is counted once.

### Three rotating line buffers

A 3x3 window needs the current row and the two above it. Row y of the
differenced image is written into line buffer `y mod 3`. When a pixel (x, y)
arrives, column x of the other two buffers is read, and the three values form
one new column of the window. Which physical buffer holds the top, the middle
and the bottom row depends on `y mod 3`:

| y mod 3 | top row (y-2) | middle row (y-1) | bottom row (y, the new pixel) |
|---|---|---|---|
| 0 | buffer 1 | buffer 2 | buffer 0 |
| 1 | buffer 2 | buffer 0 | buffer 1 |
| 2 | buffer 0 | buffer 1 | buffer 2 |

Each column is shifted into a 3x3 register window. Once x >= 2 and y >= 2 the
window is complete and centred on pixel (x-1, y-1). The outermost rows and
columns of the frame are therefore never a window centre. Window element
`w[3*r+c]` is row r (0 = top) and column c (0 = left); `w[4]` is the centre.

### Event rules

For each window, `event_detector` applies:

1. **Primary pixel.** The centre must be strictly above the event threshold
   (configuration word 0). It must also be the window maximum: strictly
   greater than the four neighbours that precede it in raster order and at
   least equal to the four that follow. Because of that asymmetry, a flat-topped
   cloud gives one event, not two.
2. **Split pixels.** Every neighbour strictly above the split threshold
   (configuration word 1) sets bit k of an 8-bit pattern, where k counts the
   neighbours in raster order and skips the centre (bit 0 top-left, bit 7
   bottom-right).
3. **Label and energy.** With no split neighbour the event is a single-pixel
   event and its energy is the centre value. Otherwise it is a multi-pixel
   event, and the energy is the centre plus every split neighbour. The sum is
   16 bits wide, which is enough for nine full-scale 12-bit values.

The event record (`event_t` in `readout_pkg`) holds the 16-bit frame number
(the time stamp), x, y, the energy, the single/multi flag and the split
pattern. An X-ray event grade in the ASCA/SIS scheme is a function of that
pattern and is left to the ground. The extraction latency is fixed:
`ev_valid` rises after the fifth clock edge following the edge that accepts the
pixel below and to the right of the primary pixel.

## Configuration store

Sixteen 16-bit words hold the settings that must survive power cycles:

| word | meaning |
|---|---|
| 0 | event threshold, ADU (bits 11:0) |
| 1 | split threshold, ADU (bits 11:0) |
| 2..15 | sensor settings, output on `sensor_cfg[0..13]` |

After reset, `fram_interface` reads them from the FRAM at byte address 0 with
the serial-FRAM READ command (`0x03`, 24-bit address, then 2 x 16 bytes). The
bus is SPI mode 0, with SCLK = clk / (2 x `FRAM_SCLK_HALF`). Each word is
stored big-endian. A reload can be requested by command.

A store command writes the current voted words back to the same place, so
that settings changed over the command line survive a power cycle. The store
is a WREN transaction (`0x06`), then chip select high for a few clocks, then
a WRITE (`0x02`, 24-bit address, 2 x 16 bytes). The words are shifted out
straight from the vote, so they must not change during the store. The store
takes about 12 us at the default clock, while a following five-byte command
takes over 400 us to arrive at 115200 baud, so a command write cannot overlap
the store.

`tmr_config` keeps three copies of every word. Every read, and the `cfg`
outputs that drive the thresholds and sensor settings, are the bitwise 2-of-3
majority, so an upset in one copy never reaches the logic. A write (from the
FRAM load or a command) stores all three copies and so also repairs an upset
word. `cfg_mismatch` is high while any word has a disagreeing copy and
appears in the housekeeping status word. Copies are not scrubbed
automatically. The `upset_*` ports flip bits in one copy for testing; tie
`upset_en` low in use. When the FRAM load and a command write fall in the
same clock, the FRAM write wins.

## Housekeeping ADC

`adc_interface` runs the AD7928 continuously over its eight channels:
temperatures, board voltages and currents, as wired on the board. Each 16-bit
frame is driven with CS low and SCLK idling high. It sends the control word
WRITE=1, SEQ=0, ADD = next channel, PM = 11 (normal), SHADOW=0, RANGE=1,
CODING=1 (straight binary), while the part returns
`{0, ADD[2:0], DATA[11:0]}` for the previous conversion. Results are filed by
the address the ADC returns, so the first result after reset lands in the
right slot. `scan_done` pulses after every eighth result, and frames are
`ADC_CONV_GAP` clocks apart.

## Command line (RS-422)

The line runs UART 8N1, with `CLKS_PER_BIT` = 868 for 115200 baud at a
100 MHz clock. A command is five bytes; anything before a `0xC5` byte is
ignored.

```
0xC5  opcode  address  data[15:8]  data[7:0]
```

| opcode | action | reply data |
|---|---|---|
| 0x01 SET_MODE | mode <= data[1:0] | data echoed |
| 0x02 WRITE_CFG | word[address] <= data (all copies) | data echoed |
| 0x03 READ_CFG | — | voted word[address] |
| 0x04 RELOAD_FRAM | reload all words from FRAM | data echoed |
| 0x05 STORE_FRAM | write all voted words to FRAM | data echoed |

The reply has four bytes: `0x06` (ACK) or `0x15` (NAK, for an unknown opcode
or an address of 16 or more), then the opcode and two data bytes. A byte with
a framing error abandons the command in progress.

## Data line (SPI) and packets

The FPGA is the SPI master, in mode 0, with 16-bit words. CS goes low for each
word, and SCLK = clk / (2 x `SPI_SCLK_HALF`), which is 25 Mbit/s (about
3 MB/s) at 100 MHz. Every packet begins with the word `{0xA5, type}`.

| packet | type | words | contents after the header |
|---|---|---|---|
| event | 0x01 | 6 | frame number; `{5'b0, x}`; `{multi, 4'b0, y}`; energy; `{8'b0, pattern}` |
| frame row | 0x02 | COLS+2 | row number; COLS pixels as `{4'b0, pixel}` |
| housekeeping | 0x03 | 10 | 8 x `{0, channel[2:0], value[11:0]}`; status |

The housekeeping status word is
`{cfg_mismatch, cfg_loaded, fram_busy, primed, mode[1:0], 2'b00, channel_valid[7:0]}`.

Events are queued in a 64-deep FIFO (`EV_DEPTH`) the moment they leave the
pipeline. The link sends queued events first, then a pending housekeeping
packet, then, in frame mode, the next row from the DDR3 read stream. That
stream is a valid/ready interface, so rows are pulled only as fast as the link
drains them. An event that finds the FIFO full is dropped and counted in
`ev_dropped`. The counters `ev_sent`, `hk_sent`, `rows_sent`, `cmd_count` and
`frame_cnt` are brought out for status.

## Capacity at the default parameters

The figures below assume a 100 MHz clock, which is a choice of this design.

* **Pixel rate.** The pipeline takes 100 Mpixel/s. A full 2048 x 2048 frame at
  10 frames/s (0.1 s exposure) needs 41.9 Mpixel/s and fits. The sensor's
  fastest mode, 48 frames/s, needs 201 Mpixel/s and does not fit: a single
  pixel lane tops out at about 23 frames/s. Reaching 48 frames/s would need
  two pixels per clock through the whole chain.
* **Event rate.** An event packet is 12 bytes. The data line carries about
  250 k events/s, against hundreds per second in typical laboratory
  illumination. The FIFO absorbs 64 events that fall close together in one
  frame.
* **Frame mode.** A full frame is 2048 x 2050 words, about 8.4 MB on the data
  line, or roughly 2.7 s per frame. This is why frames are buffered in DDR3
  and sent at the line's pace.
* **Frame buffer size.** `frame_ram` holds one full frame, 2048 x 2048 x
  12 bit = 50.3 Mbit, about 6.3 MB. That is more than the roughly 2 MB of block
  RAM in the Kintex-7 parts such a board would use. As written, the memory
  holds the full sensor frame, and it would need an external memory or a
  reduced pixel width or window of interest to fit such a device. The RTL does
  not solve this.

## Where this RTL departs from, or goes beyond, the described system

* The sensor interface is a single raster stream (`s_fval`, `s_lval`,
  `s_dval`, `s_data`), not the sensor's multi-lane LVDS. Any deserialiser
  must put pixels in raster order.
* There is a single clock domain.
* The UART format, command set, packet layouts, FIFO depth, priorities,
  configuration map and FRAM address are choices of this design.
* The local-maximum rule and the split-pattern output follow common practice
  for X-ray CCD event grading. No ASCA grade is computed on board.
* The first full frame after entering event mode only primes the frame
  buffer. Frames that arrive outside event mode do not update it.
* Frame-mode data leave the FPGA as a write stream (`ddr_wr_*`) and return as
  a read stream (`ddr_rd_*`). The DDR3 controller between them is external
  and is not part of this RTL.
* The FRAM store writes all sixteen words at once. There is no
  per-word write, and the store does not read back to verify.

## Files

`rtl/`
: `readout_pkg` (types, constants, configuration map); `pixel_receiver`;
  `frame_ram`; `frame_subtractor`; `line_buffers`; `event_detector`;
  `event_extraction` (the three stages above it in one chain); `tmr_config`;
  `fram_interface`; `adc_interface`; `cmd_processor` with `uart_rx` and
  `uart_tx`; `data_link` with `sync_fifo` and `spi_word_tx`; and the top,
  `xray_readout_top`.

`tb/`
: One self-checking testbench per block (`tb_<block>`), each with its own
  reference model. There are behavioural models of the FRAM
  (`fram_model`: READ, WREN and WRITE)
  and the AD7928 (`ad7928_model`). `tb_readout_env.svh` is the system
  environment shared by the two top-level benches: sensor frame generator,
  DDR3 store, reference event extraction, SPI packet parser and UART host.

The system benches are:

* **`tb_xray_readout_top`** runs a 16 x 12 sensor with a short UART bit time
  and a 4-entry event FIFO. It makes every mechanism happen and counts each
  one: boot load from FRAM, housekeeping packets, frame-mode rows through the
  DDR3 model, frame-buffer priming, events checked against the reference,
  an injected upset outvoted and flagged, configuration writes and
  read-backs, FIFO overflow with dropped-event accounting, a FRAM store
  followed by a reload, and DDR3 power-down.
* **`tb_xray_readout_full`** runs the top with every parameter at its default:
  the 2048 x 2048 sensor, a 100 MHz clock and 115200 baud. It boots from the
  FRAM and sends housekeeping. It then writes one raw frame to the DDR3 model
  in frame mode. In event mode it streams three full frames with 40 clouds
  each; the first of these primes the buffer. It checks every event packet
  against the reference. Playing a whole frame back over
  the data line is left to `tb_workload_frame_mode`.
* **`tb_workload_lightcurve`** also runs at the defaults. It sends ten full
  frames in event mode with a transient. The first frame primes the buffer,
  and the other nine carry 0, 2, 8, 25, 60, 30, 10, 3 and 0 charge clouds,
  most of them split over several pixels. It checks each
  frame's events against the reference, requires the per-frame counts (the
  light curve) to match, and requires that no event is dropped. A
  60-event spike in one frame stays within the 64-entry FIFO, because the
  line drains it while the frame is still arriving.

* **`tb_workload_frame_mode`** runs frame mode at the defaults. It writes
  one full frame to the DDR3 model and checks every pixel. It then plays the
  frame back and checks the first 96 row packets of 2050 words as they leave
  on the data line, including their rate of about 65 clocks per word
  (3 MB/s). The rest of the frame, about 2.8 s of simulated time, is not
  waited for. The whole frame's readback is covered by the reduced bench.

## Simulating

Each testbench prints `TB_RESULT checks=<n> failures=<n>` and stops. A
watchdog ends it with a failure if it hangs. With Verilator 5:

```
verilator --binary --timing --assert -Wno-fatal \
    -y rtl -y tb +libext+.sv -Irtl -Itb \
    rtl/readout_pkg.sv tb/tb_event_detector.sv --top-module tb_event_detector
./obj_dir/Vtb_event_detector
```

Replace the bench name for any other block. The simulator has only two
states, so every testbench resets or initialises whatever it reads. The frame
memory is not reset: its content before priming is never used.

To change the sensor size, override `COLS` and `ROWS` on `xray_readout_top`.
The address widths follow from them. Thresholds and sensor settings are data
in the configuration store, not parameters.
