# A camera-to-Ethernet number-plate monitor on one FPGA

This design watches a road scene through a CMOS camera and finds the yellow number plate of a
vehicle in every frame. It shows the result on a VGA monitor and sends the same picture out over
Gigabit Ethernet as UDP packets, so a roadside radio unit can pass it on to nearby vehicles. The
processed picture has only three colours:

- the plate background is white;
- the plate characters are black;
- a red rectangle is drawn round the plate;
- everything else is black.

The design runs at one pixel per clock from sensor to network, with no frame buffer on the
processing path. It uses four clocks:

| Clock | Domain | Blocks |
|---|---|---|
| camera pixel clock | pixel | capture, demosaic, detection, frame-store write |
| 25 MHz | VGA | frame-store read, VGA raster, byte reduction, packet-queue write |
| 125 MHz | Ethernet | packet-queue read, packet generation, RGMII output |
| 50 MHz board clock | board | reset sequencing, I2C configuration of the sensor |

```
 sensor ─► ccd_capture ─► raw2rgb ─► detect ─► frame_store ─► vga_ctrl ─► VGA DAC
 (12-bit Bayer,            (2x2 →   (HSV,      (2 bits/pixel,   │
  FVAL/LVAL)               RGB)     runs,      dual clock)      ▼
                                    box)              data_reconstruct (1 byte/pixel)
                                                                │
             rgmii_tx ◄─ packet_gen ◄─ pingpong_buffer ◄────────┘
             (DDR, 4 bits)  (Eth/IP/UDP,  (2 dual-clock queues,
                             CRC-32)       1024 bytes each)
 i2c_ccd_config ─► sensor registers      reset_ctrl ─► one reset per clock domain
 seg7_display   ◄─ frame count
```

## From Bayer samples to an RGB picture

The sensor is set up to deliver 1280x960 samples per frame. Each sample is one colour of a
Bayer mosaic:

- even rows run R G R G …
- odd rows run G B G B …

`raw2rgb` turns every 2x2 block into one pixel:

- red = R
- blue = B
- green = (G1 + G2) / 2

This halves both dimensions, giving a 640x480 image.

A line buffer one raw row long (`line_buffer`, a circular RAM) returns the sample directly above
the incoming one. When the bottom-right sample (B) of a block arrives, the four samples are at
hand:

- the live sample (B);
- the tap (G1);
- the previous live sample (G2);
- the previous tap (R).

The RGB pixel leaves two clocks later. It is tagged with its half-resolution coordinates, so
later stages need no counters of their own.

The usual shift-register-with-taps arrangement keeps two rows. Using the live row as the
template's lower row needs only one.

## Finding the plate: yellow runs and a line-level state machine

`detect` is the core of the design. Each RGB pixel goes through `rgb2hsv`, a three-stage pipeline
with integer outputs:

- hue 0–359;
- saturation 0–255;
- value on 12 bits.

A pixel counts as **yellow** when all of these hold:

- 35 ≤ hue ≤ 75;
- saturation ≥ 90;
- value ≥ 1024.

Along each line a counter measures the runs of consecutive yellow pixels and remembers where each
run began. When a run ends:

- If it is longer than `RUN_THRESH` (32 pixels), the line is a **plate line**, and the run's left
  and right ends widen the line's extent.
- If it is shorter, it is **noise**: yellow clothing, signs or reflections. It is forgotten.

At the end of every line a three-state machine decides:

| State | On a plate line | On another line |
|---|---|---|
| SEARCH_TOP | this is the **upper line**: go to SEARCH_BOT | stay |
| SEARCH_BOT | move the **bottom line** here and widen left/right | count a gap; after `MAX_GAP` (24) gap lines in a row go to DONE |
| DONE | ignore | ignore |

The gap rule matters. The plate's characters cut the yellow runs into short pieces. A line
through the middle of the characters can therefore fail the run test even though it lies
inside the plate. Up to 23 such lines in a row are tolerated.

At the last pixel of the frame the rectangle (found, left, right, top, bottom) is latched, and the
search starts again.

The output class of each pixel uses the rectangle latched at the end of the *previous* frame:

- inside it: white if the pixel is yellow, black if not (the characters);
- in a 2-pixel frame just outside it: red;
- anywhere else: black.

A still or slowly moving plate is therefore drawn one frame late. This avoids storing a whole
frame before drawing.

The class leaves `detect` five clocks after its RGB pixel. Three pulses expose the mechanism:

- `ev_noise`: a short run was rejected;
- `ev_upper`: an upper line was found;
- `ev_bottom`: the bottom line moved.

## Display path

`frame_store` holds one frame of 2-bit classes (614,400 bits at 640x480). The detector writes it
in the pixel clock domain and the VGA controller reads it in its own. It is deliberately not
double-buffered: a moving rectangle can tear for one frame.

`vga_ctrl` sweeps the standard 640x480 raster at 60 Hz:

- 800 x 525 clocks per frame;
- front porch / sync / back porch of 16/96/48 clocks horizontally and 10/2/33 lines vertically;
- negative sync pulses.

It reads the class one clock ahead and maps it to 10-bit channels:

- white = all three channels at 0x3FF;
- red = red channel only;
- black = 0.

## Network path: one byte per pixel, two queues, one frame per payload

`data_reconstruct` reduces every active VGA pixel to one byte, the top 8 bits of the green
channel:

- white becomes 0xFF;
- black and red become 0x00.

It starts at the first pixel (0,0) after reset, so payloads are aligned to frames: a 640x480
picture is exactly 300 payloads of 1024 bytes.

`pingpong_buffer` holds two dual-clock FIFOs (`async_fifo`, gray-coded pointers with two-flop
synchronisers). Each holds exactly one payload. The writer fills one queue while `packet_gen`
empties the other.

- **Checksum on the fly.** While filling, the writer adds the payload up as 16-bit big-endian
  words in ones-complement arithmetic. The UDP checksum can then go into the header before the
  data is read.
- **Drops.** If the queue the writer is about to fill has not been emptied, the writer throws
  away the whole next payload and counts it on `ev_drop`. This can happen if the Ethernet side
  stalls. Payloads therefore always stay whole and in order.

`packet_gen` walks a byte counter through the frame and sends one byte per 125 MHz clock.

| Bytes | Content |
|---|---|
| 0–6, 7 | preamble 0x55, start delimiter 0xD5 |
| 8–13, 14–19 | destination MAC (broadcast), source MAC |
| 20–21 | type bytes 0x08, 0x88 |
| 22–41 | IPv4 header: 0x45, total length 1052, identification +1 per frame, TTL 0x80, protocol 0x11, header checksum, 192.168.1.2 → 192.168.1.10 |
| 42–49 | UDP header: ports 1234 → 1234, length 1032, checksum |
| 50–1073 | payload |
| 1074–1077 | FCS: CRC-32 of bytes 8–1073, sent low byte first |

Each frame is followed by 12 idle clocks.

Both checksums are computed when a frame starts:

- the IP checksum over the header words;
- the UDP checksum from the pseudo-header, the UDP header and the stored payload sum.

`crc32_d8` folds in one byte per clock, using the reflected polynomial 0xEDB88320.

`rgmii_tx` registers the byte stream and sends it through double-data-rate output cells
(`ddr_out`):

- the high nibble while the clock is high;
- the low nibble while the clock is low.

Both halves carry TX_EN on TX_CTL. The transmit clock is forwarded through a DDR cell fed with 1
and 0, so it lines up with the data.

**Note:** standard RGMII puts bits 3:0 on the rising edge. A stock PHY would see the two nibbles
of every byte swapped. Swap `d_hi` and `d_lo` in `rgmii_tx` to follow the standard instead.

## Board housekeeping

- **`reset_ctrl`.** The reset key starts a delay counter (1,000,000 board clocks, 20 ms). Half
  way through it releases the board-clock reset, so the sensor can be configured first. At the
  end it releases the other three domains, each through its own two-flop synchroniser.
- **`i2c_ccd_config`.** Writes five sensor registers over a 100 kHz open-drain I2C bus:
  - the shutter width from the `exposure` input;
  - row and column mode;
  - window height and width, chosen by `zoom`.

  Zoomed out, the sensor skips every other row and column of a 2560x1920 window. Zoomed in, it
  reads the centre 1280x960 window. In both cases it delivers 1280x960. The table is written
  again whenever `exposure` or `zoom` changes, and `done` is low while that happens. A missing
  acknowledge sets `ack_err`. The register numbers are those of a common 5-megapixel sensor. Edit
  the `word` table for another sensor.
- **`seg7_display`.** Shows the captured-frame count in hexadecimal on eight active-low digits.

## Top level and ports

`traffic_monitor_top` wires these blocks together. It takes the camera pixel clock, the 25 MHz
VGA clock, the 125 MHz Ethernet clock and the 50 MHz board clock from outside (a board would use
PLLs). It exposes:

- the camera bus;
- the I2C line drivers;
- the VGA DAC signals;
- the RGMII transmit pins;
- the seven-segment digits;
- observation outputs: the latched plate rectangle and the event pulses, each in the clock
  domain noted at its port.

Main parameters, with their defaults:

| Parameter | Default | Meaning |
|---|---|---|
| `RAW_W`, `RAW_H` | 1280, 960 | sensor frame; the image is half of each |
| `RUN_THRESH` | 32 | shortest yellow run that counts as a plate line is `RUN_THRESH + 1` |
| `MAX_GAP` | 24 | plate-less lines that end the bottom-line search |
| `PAYLOAD` | 1024 | UDP payload bytes; must be a power of two that divides the image |
| `RST_DELAY` | 1,000,000 | board clocks before the system starts |
| `I2C_CLK_DIV` | 125 | board clocks per quarter I2C bit |
| `H_FP`, `H_SYNC`, `H_BP`, `V_FP`, `V_SYNC`, `V_BP` | 16, 96, 48, 10, 2, 33 | VGA blanking |

The colour thresholds and the red-frame width are parameters of `detect`.

## Capacity

| Figure | Comes from | Result |
|---|---|---|
| 60 frames per second | the original work | sustained |
| 60 fps of 1280x960 needs 73.7 Mpixel/s | arithmetic | every pixel-domain stage takes one pixel per clock, so any camera pixel clock of at least that rate plus blanking works |
| one picture = 300 packets of 1090 byte times (frame plus gap), 19.6 MB/s at 60 fps | arithmetic | 16% of the 125 MB/s link |
| VGA raster: 59.5 Hz at 25 MHz | the VGA standard | drives a normal monitor |
| frame store: 614,400 bits, plus 16,384 bits of packet queues and a 15,360-bit line buffer | arithmetic | about 16% of the memory of a Cyclone IV E EP4CE115, the device of the board the original system used |

## Where this design departs from the original system

- **Frame store.** The original keeps frames in SDRAM behind a memory controller. Here a frame
  of 2-bit classes is held on chip. This keeps the store-and-regenerate role, but there is no
  SDRAM interface.
- **Outside the design.** The camera, the SDRAM chip, the Ethernet PHY and the PLLs are not
  part of it. Their signals are ports.
- **Unspecified details.** The original gives no detection thresholds, no gap rule and no timing
  for the rectangle. The HSV limits, `RUN_THRESH`, `MAX_GAP`, the red-frame width and the
  one-frame delay of the rectangle are this design's choices. So are:
  - the payload size;
  - the drop policy;
  - the MAC and IP addresses. The destination MAC defaults to broadcast; set `DST_MAC` of `packet_gen` to the receiving device's address, as a real installation would;
  - the byte format of the picture.
- **Frame table kept as given.** The frame bytes follow the original table literally: type bytes
  0x08 0x88, and nibble order on RGMII. Both differ from the usual standards; see above.
- **Line buffer.** One line-buffer tap is used instead of two.

## Simulation

Every block has a self-checking testbench in `tb/`, named `tb_<module>.sv`. Each prints
`TB_RESULT checks=N failures=M` and stops itself with a watchdog. With verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb rtl/tm_pkg.sv tb/tb_detect.sv \
          --top-module tb_detect -Mdir obj_detect
obj_detect/Vtb_detect
```

Two system testbenches drive the whole top. Both use a camera model (`tb/cam_model.sv`) that
paints:

- a yellow plate with dark character strokes;
- a small yellow blob that must be rejected as noise;
- a grey background.

**`tb_traffic_monitor_top`** runs at reduced sizes:

- 64x48 sensor frames;
- 64-byte payloads;
- short VGA blanking;
- a short reset delay and a fast I2C clock.

It checks:

- the configuration and its repeat after a zoom change;
- the exact plate rectangle;
- one whole VGA frame pixel by pixel;
- the seven-segment digits against the frame count;
- every Ethernet frame decoded from the RGMII pins: length, frame table bytes, IP checksum, FCS,
  and payload against the expected picture.

It also stops the Ethernet clock for a frame, to force payload drops. Each mechanism is counted:

- noise rejection;
- upper line;
- bottom line;
- packet sent;
- drop;
- reconfiguration.

Any mechanism that never happens counts as a failure. It runs in well under a second.

**`tb_traffic_monitor_full`** runs the top with every parameter at its default:

- 1280x960 frames;
- 640x480 VGA at standard timing;
- 1024-byte payloads;
- the 20 ms reset delay;
- 100 kHz I2C.

It checks the same things except the forced drop, on a plate at image columns 240–399 and rows
300–339. It takes about half a minute.
