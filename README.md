# Readout logic for an MCP-intensified CMOS ultraviolet imager

This is the digital readout of a small wide-field ultraviolet imager. Such an imager is
meant for transient studies from balloons and CubeSats. In the detector, ultraviolet photons
hit a photocathode. A three-stage microchannel plate (MCP) amplifies the resulting electrons,
and a phosphor screen turns each electron cloud back into a spot of visible light. A lens then
images the screen onto an off-the-shelf 1-megapixel CMOS sensor.

The FPGA logic reads that sensor and works in one of two modes. You can switch between them
at run time.

* **Frame transfer** (integrating mode). One whole frame is stored in a frame buffer. While
  that frame is sent, the sensor is not read. Each pixel leaves as a 16-bit packet made of the
  8-bit pixel value, a 4-bit frame ID and a 4-bit row ID. The packets go to an RS232 serial
  line and/or to a storage port, where a micro SD card writer would sit.
* **Photon counting**. Frames are not stored. The pixel stream runs through a centroider. The
  centroider finds each phosphor splash and computes its position to 1/16 pixel. It emits an
  event record of x, y and a time stamp, and these records go out on the serial line.

The RTL follows the published description of the instrument where that description says
something. The description gives the two modes, the frame-then-send sequence, the packet
contents, an asynchronous RS232 link, a register port on the sensor, and the fact that each
photon event is centroided and logged with x, y and time. Everything below that level is this
design's own choice, and each choice is listed under "Departures and assumptions". That
includes the centroid algorithm, all handshakes and encodings, the clocking scheme and the
frame format.

## Block structure

```
             cam_pclk/href/vsync/data
                      |
                +-------------+   arm    +--------------------+   mem   +--------------+
                | cmos_capture|<---------| readout_controller |<------->| frame_buffer |
                +-------------+--------->|  (frame transfer)  |         +--------------+
                      | pixel stream     +--------------------+
                      |                     | 16-bit packets   \ storage port (store_*)
                      v                     v
                +-------------+      word_serializer(2)
                | centroider  |             |
                +-------------+             |
                      | 48-bit events       |
                 sync_fifo(16)              |
                      |                     |
               word_serializer(6)           |
                      \______ mode mux _____/
                                 |
                              uart_tx ---> uart_txd

  sccb_master: cfg_* requests ---> sccb_sioc / sccb_siod_o / sccb_siod_oe
```

| file | role |
|---|---|
| `rtl/wifi_pkg.sv` | shared types: `readout_mode_e`, `frame_packet_t`, `photon_event_t`, `PIX_W`, `FRAC_W` |
| `rtl/cmos_capture.sv` | synchronises the sensor's video port and turns it into a pixel stream with coordinates |
| `rtl/frame_buffer.sv` | one-frame dual-port RAM (1280 x 800 x 8 bits by default) |
| `rtl/readout_controller.sv` | frame transfer sequencer and packet builder |
| `rtl/centroider.sv` | 3x3 photon event detector and centroider |
| `rtl/sync_fifo.sv` | event queue; drops events when full and counts them |
| `rtl/word_serializer.sv` | splits packets or records into bytes, most significant byte first |
| `rtl/uart_tx.sv` | 8N1 asynchronous transmitter |
| `rtl/sccb_master.sv` | writes sensor registers over the two-wire camera control bus |
| `rtl/wifi_readout_top.sv` | top level: wiring, mode switch, counters |

## Clocking and the sensor interface

Everything runs on one system clock `clk` with an asynchronous active-low reset. The sensor
drives its own pixel clock (PCLK), a line-valid signal (HREF), a frame sync (VSYNC) and an
8-bit pixel bus. `cmos_capture` treats all of these as asynchronous inputs. It passes them
through two-flop synchronisers and detects the rising edge of PCLK in the system clock
domain. It samples HREF and the data bus on that edge. For this to work, **`clk` must run at
least four times faster than PCLK**.

A frame begins at a rising edge of VSYNC, but only while `arm` is high. It ends after
`V_ACTIVE` lines. This is how the frame transfer controller "stops reading the sensor": it
drops `arm` at the end of the frame, and later frames that the sensor keeps sending are
ignored.

Defaults assume a 96 MHz system clock, which is 8 times the board's 12 MHz oscillator.
`CLKS_PER_BIT = 833` gives 115200 baud and `SCCB_QUARTER = 240` gives a 100 kHz control bus.
The sensor's master clock (6–27 MHz) comes from a PLL outside this design.

## Frame transfer mode

`readout_controller` moves through IDLE → ARM → CAPTURE → (RD_ADDR → RD_DATA → SEND) per
pixel → DONE.

* In CAPTURE, each pixel is written to address `y * H_ACTIVE + x`.
* `eof` ends the capture, and `arm` drops at once.
* In the read-back, each word becomes the packet

  | bits | 15..12 | 11..8 | 7..0 |
  |---|---|---|---|
  | field | frame ID (frame number mod 16) | row ID (row number mod 16) | pixel |

  It is sent most significant byte first. The frame ID starts at 0 after reset.
* `uart_en` and `store_en` choose the outputs. When both are on, a packet is held until both
  outputs have taken it.
* A frame that has started is always finished. If `enable` falls while the controller is
  armed but the frame has not started, the controller returns to idle.

At 115200 baud one full frame takes about 178 s on the serial line. The storage port is not
slowed by the serial line: it takes a packet every three clocks.

## Photon counting mode: how the centroider works

This is the part most worth reading closely. The original design states only that "the
centroid of each photon event is calculated". The algorithm here is the simplest one that
does that.

1. **Window.** Two line buffers hold the previous two rows. Three column registers shift in
   the newest column, giving a 3x3 window. The window is centred on pixel (x-1, y-1) when
   pixel (x, y) arrives. Windows that would run over a frame edge are skipped.
2. **Detection.** The centre `c` is an event when `c > threshold` and `c` is a local maximum.
   The rule is `c` strictly greater than the four neighbours that come before it in raster
   order, and `c` not less than the four that come after it. This asymmetry makes a flat top
   of two equal pixels produce exactly one event, at the earlier pixel.
3. **Centroid.** Take `S` as the sum of the nine pixels, `Sx` as (right column − left column)
   and `Sy` as (bottom row − top row). Then

   `x_q = 16 * xc + trunc(16 * Sx / S)`, `y_q = 16 * yc + trunc(16 * Sy / S)`

   These are unsigned 12.4 fixed point, and the division truncates toward zero. No bias or
   background is subtracted, so a raised dark level pulls the centroid toward the window
   centre.
4. **Record.** `{x_q[15:0], y_q[15:0], timestamp[15:0]}` is 48 bits, sent as six bytes with
   the most significant byte first. The time stamp is the number of frames captured since
   reset, mod 2^16. One frame is the instrument's time resolution.

Pipeline latency: `ev_valid` rises three clocks after the clock edge that delivers the pixel
that completes the window. Events enter a 16-entry queue ahead of the serial line. When the
queue is full, a new event is dropped and `events_dropped` counts it. At 115200 baud the line
carries about 1920 events/s.

## Mode switching

`mode` is a request. `active_mode` follows it only when the running mode is at rest:

* the controller is idle;
* the capture block is between frames;
* the event queue is empty;
* both serializers and the transmitter are idle.

The serial line therefore never carries a mixture of frame packets and event records.

## Sensor register writes

`sccb_master` performs one 3-phase write per request on `cfg_valid/cfg_addr/cfg_data`:
start, device ID (0x60), register address, data, and stop. Each byte goes MSB first and is
followed by a don't-care bit during which the master releases SIO_D. SIO_D changes only while
SIO_C is low. The pad's open-drain driver is outside this design: drive the pad low when
`siod_oe & ~siod_o`. Reads are not supported.

## Departures and assumptions

* **Frame store.** The board stores frames in an external SDRAM. Here the store is a plain
  synchronous RAM array (`frame_buffer`). It has the same storage function but no SDRAM
  protocol.
* **Frame format.** 1280 x 800 is assumed for the "1 megapixel" sensor. A comparison table in
  the instrument description quotes 2K x 2K pixels for this imager. That conflicts with the
  sensor, and the sensor was followed.
* **Photon counting rate.** The instrument's stated time resolution is 30 ms. A full
  1280 x 800 frame in 30 ms needs 34 Mpixel/s. With the 4x oversampling at 96 MHz, this
  design reads at most 24 Mpixel/s (42.7 ms per frame). Reaching 30 ms needs a system clock
  of at least 137 MHz, or a windowed sensor readout.
* **Outside this design.** There is no micro SD card writer; the storage port is where one
  would attach. The PLL, the sensor, the intensifier and its high-voltage supply are also
  outside the design.
* **This design's own choices.** The following are not given by the original description:
  the serial format (8N1, 115200 baud), the byte order, the packet field order, the event
  record layout, the sync polarities, the event queue depth and drop policy, the mode-switch
  rule, and the control bus device ID and rate.

## Simulation

Each testbench prints `TB_RESULT checks=N failures=M`. Example with Verilator 5:

```
verilator --binary --timing --assert --top-module tb_wifi_readout_top \
  -y rtl -y tb +libext+.sv -Irtl rtl/wifi_pkg.sv tb/tb_wifi_readout_top.sv
./obj_dir/Vtb_wifi_readout_top +verilator+rand+reset+2
```

| testbench | what it checks |
|---|---|
| `tb_uart_tx` | bytes on the line, framing, exactly 10 bit times per byte |
| `tb_word_serializer` | byte order and no loss, with random back-pressure |
| `tb_frame_buffer` | contents, one-cycle latency, read-during-write |
| `tb_cmos_capture` | every pixel and coordinate; frames ignored while not armed |
| `tb_readout_controller` | 18 frames of packets on both outputs; ID wrap; arm low while sending |
| `tb_centroider` | events and centroids against a reference computed from the picture; latency |
| `tb_sccb_master` | decoded bus bytes, start/stop conditions, released bits, duration |
| `tb_wifi_readout_top` | 24 x 12 end to end: frame transfer, switch, photon counting, queue overflow, switch back, register write; checks that each of these mechanisms happened |
| `tb_wifi_full_size` | default parameters (1280 x 800): one full frame transfer to the storage port (1,024,000 packets checked), then one photon-counting frame with 24 events decoded from the serial line |

Testbench helpers: `tb/cmos_sensor_model.sv` is a behavioural model of the sensor's video
port, and `tb/uart_rx_model.sv` is a serial receiver. In the full-size test the serial output
of frame transfer is disabled, because one frame would take about three minutes of simulated
real time.

To change the frame size, set `H_ACTIVE`/`V_ACTIVE` on `wifi_readout_top`. The frame buffer
depth follows. To change the baud rate, set `CLKS_PER_BIT = f_clk / baud`.
