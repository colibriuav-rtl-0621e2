# Event-camera and motor-command I/O for a neuromorphic drone SoC

A drone that steers from an event camera is only as quick as the link that gets the
events off the sensor. USB event cameras spend about 0.9 ms and hundreds of milliwatts
to watts on the host side just to move one full frame of events. The DVS132S event
camera avoids this: on a SAMPLE request it freezes its whole 132x104 pixel array into an
*event frame* and streams it over a synchronous address-event (SAER) port. Each clock
carries one byte with the ON/OFF events of a 2x2 pixel group. A completely filled frame
(13728 events) therefore crosses the port in 66x52 = 3432 clocks, 69 µs at 50 MHz.
That is fast enough to sample the scene 7200 times a second.

This RTL is the SoC side of that link, plus the PWM outputs that carry the motor
commands back out to the flight controller. It is a small peripheral that sits on the
SoC's APB bus, next to a RISC-V controller, a compute cluster and a spiking-network
accelerator. Those parts are not included here; the "Boundaries" section lists them.

```
                 +-------------------------- colibri_io_top ---------------------------+
 DVS132S  <------| saer_sample_o <-- sample_gen (SAMPLE every 6944 clk = 7.2 kHz)      |
 camera   ------>| saer_i ---------> saer_rx --write--> event_frame_buf (2 x 3432 B)    |
                 |                      |  busy -> sample_gen     ^ swap on frame end   |
 APB  <--------->| apb_regs <-- status/counters                   | read bank          |
 (controller)    |    |  \----------- frame reads ----------------+                    |
 irq_o <---------|    \-- period/duties --> pwm_gen ----------------------> pwm_o[3:0]  |----> flight
                 +----------------------------------------------------------------------+     controller
```

Everything runs on one clock (`clk_i`, 50 MHz on the platform) with an active-low
asynchronous reset `rst_ni`.

## The event frame on the wire

The camera sends two byte-wide streams side by side: an address and an event byte. The
published platform does not spell out the framing, so this design fixes one
(`colibri_pkg::saer_word_t`):

| field   | bits | meaning |
|---------|------|---------|
| `valid` | 1    | a word is present this clock |
| `is_y`  | 1    | 1: row word, `addr` is the row (0..51), `data` unused. 0: group word |
| `addr`  | 8    | row index (row word) or column-group index 0..65 (group word) |
| `data`  | 8    | event byte of the 2x2 group: bit 2p = ON, bit 2p+1 = OFF of pixel p (p = 0..3) |

A frame is sent in raster order. Each row starts with one row word, which is the
"auxiliary clock" that sets the row. Then come 66 group words. A full frame is thus
52 x 67 = 3484 words. The receiver counts the frame complete after the group word of
column 65 in row 51. A pixel is never marked both ON and OFF, so a byte holds at most
4 events.

`saer_rx` keeps the current row, writes each event byte to address `row*66 + column`
of the frame buffer, and adds its ON bits and OFF bits to two counters. It also counts
clocks from SAMPLE to the last word. At the end of the frame it pulses `frame_done_o`
and holds the frame's ON count, OFF count and readout time until the next frame ends.
It drops three kinds of word and pulses `err_o` for each:
- a word that arrives while no frame is open;
- a row or column address outside the array;
- a group word that comes before the frame's first row word.

## Timing of one frame

```
clock    0        1..2        3          4..70        ...   3486        3487
         SAMPLE   camera      row 0      groups 0..65       group 65,   frame_done, banks swap,
         pulse    latency     word       of row 0           row 51      irq_o set
```

The numbers are for the camera model used in the testbenches, which waits 2 clocks
after SAMPLE before it starts. In a real system the receiver only needs the words; it
does not depend on the latency. The SAMPLE period at 7.2 kHz is 6944 clocks, so a full
frame uses about half of each period. The processor can read the frame just completed
until the next frame completes, one period later (see the next section).

`sample_gen` drops a request that falls due while `saer_rx` is still busy. It pulses
`skip_o` instead (counted in `SKIP_CNT`), which keeps a frame from being cut short
when the period is programmed shorter than a readout. Requests stay on their
period grid.

## Double-buffered frame memory

`event_frame_buf` holds two banks of 3432 bytes. The receiver always writes the *fill*
bank. The processor reads the *read* bank, which holds the last complete frame.
`frame_done` swaps the two banks. As a result the processor has one full SAMPLE period
(6944 clocks at 7.2 kHz) to read a frame before the next one takes its place. The end-to-end testbench reads 1900 bytes per frame over APB while the
next frame is streaming in, and checks every byte. The RAM has a synchronous read with
one clock of latency. Only the bank pointer is reset; the memory contents are not.

## Processor view (APB)

`apb_regs` is an APB3 completer with a 16-bit address and 32-bit data. It never inserts
wait states: a frame-buffer read is started in the setup phase, so the byte is ready in
the access phase. Unmapped addresses and writes to read-only registers answer with
`pslverr`.

| address        | name        | access | content |
|----------------|-------------|--------|---------|
| 0x0000         | CTRL        | rw     | [0] SAMPLE timer enable, [1] PWM enable |
| 0x0004         | SAMPLE_PER  | rw     | SAMPLE period in clocks, reset value 6944 (7.2 kHz at 50 MHz) |
| 0x0008         | STATUS      | r/w1c  | [0] readout busy, [1] frame ready, [2] error (write 1 to clear 1 and 2), [3] read bank |
| 0x000C         | EV_COUNT    | r      | [15:0] ON events, [31:16] OFF events of the last frame |
| 0x0010         | FRAME_CNT   | r      | frames received |
| 0x0014         | SKIP_CNT    | r      | SAMPLE requests dropped while busy |
| 0x0018         | ERR_CNT     | r      | protocol errors |
| 0x001C         | FRAME_CYC   | r      | clocks from SAMPLE to the last word of the last frame |
| 0x0020         | PWM_PERIOD  | rw     | PWM period in clocks (20 bits) |
| 0x0040 + 4n    | PWM_DUTY[n] | rw     | high time of PWM channel n in clocks (n = 0..3) |
| 0x4000 + 4i    | FRAME[i]    | r      | event byte of group i = row*66 + column of the last frame (i = 0..3431) |

`irq_o` follows the frame-ready bit. A typical loop looks like this:
1. Wait for `irq_o`.
2. Read `EV_COUNT` and as much of `FRAME[]` as the algorithm needs.
3. Write 2 to `STATUS`.

## PWM outputs

`pwm_gen` drives four channels, one per motor of a quadrotor, from one shared period
counter. Channel n is high while the counter is below `PWM_DUTY[n]`. A duty of 0 keeps
it low, and a duty at or above the period keeps it high. The period and duties are
copied into shadow registers on the first clock of each period, so a new command never
cuts or stretches a pulse that is already running. The output follows the period
start in the same clock. Command latency is therefore at most one PWM period, and the
transmission itself takes a single 20 ns clock.

## Parameters

| module            | parameter | default | origin |
|-------------------|-----------|---------|--------|
| `saer_rx`         | `GX`, `GY` | 66, 52 | the camera's 132x104 pixels in 2x2 groups |
| `saer_rx`         | `CNT_W`   | 16      | own choice; holds 13728 events and 6944-clock frames |
| `event_frame_buf` | `DEPTH`, `W` | 3432, 8 | one byte per 2x2 group |
| `sample_gen`      | `PERIOD_W`| 16      | own choice; the period itself is a register, reset to 6944 |
| `pwm_gen`         | `N_CH`, `CNT_W` | 4, 20 | own choice; 20 bits reach 21 ms periods at 50 MHz |
| `apb_regs`        | `N_CH`, `ADDR_W`, `CNT_W` | 4, 16, 16 | own choice |

All sizes are the ones the platform uses. Nothing is scaled down.

## What follows the platform and what is this design's own

These points follow the platform:
- the 132x104 array, read as 66x52 bytes of 2x2-group ON/OFF events;
- one group per clock, so a full frame takes about 3432 clocks;
- SAMPLE-triggered frames at 7.2 kHz from a 50 MHz clock;
- control by the SoC controller over APB;
- motor commands sent as PWM to the flight controller, measured at 50 % duty.

These points are this design's own:
- the word format and event-bit layout above;
- the raster-order end-of-frame rule;
- skipping late SAMPLE requests;
- the double buffer;
- the register map;
- error handling;
- four PWM channels with shadow registers.

Departures and open points worth knowing:

- **Who drives the scan clock.** The camera streams its frame "following the X/Y scan
  clock". Here the camera presents one word per system clock, and the receiver never
  stalls it. A camera that needs the host to toggle a scan clock would need a small
  strobe generator in front of `saer_rx`.
- **Suppressed groups.** The sensor can suppress noise and redundant events before
  readout. This design assumes suppression only clears event bits and every group word
  is still sent. A camera that skips empty groups would never reach the end-of-frame
  word, and `saer_rx` would stay busy.
- **Readout time.** The published numbers disagree. They give 3432 clocks (0.069 ms) for
  one frame, and elsewhere a maximum of 139 µs to receive a frame. This design follows
  the first figure, one group per clock. The 139 µs is read as the 7.2 kHz period that
  bounds the readout. With the row words a frame takes 3484 clocks (69.7 µs).
- **Window size.** The network's input window is described as 300 ms holding 4350
  event frames, but 7.2 kHz over 300 ms is 2160 frames. This peripheral passes on
  single frames and does not accumulate a window. That happens in software outside
  this RTL.
- The frame goes to the processor through APB reads of a local buffer. The platform
  does not say how frames reach memory; a DMA path would be an addition.

## Boundaries

Everything else on the SoC comes from earlier designs and is not described in enough
detail to write. None of it is included here:
- the RISC-V fabric controller and its L2 memory and buses;
- the eight-core cluster with its 128 KiB shared L1;
- the spiking-network accelerator (SNE) and the ternary-network accelerator (CUTIE),
  with their separate compute clock;
- the frame-camera (CPI) interface;
- the power domains.

The top brings out the APB completer for the controller, the SAER pins and the PWM
pins.

## Files and simulation

`rtl/` holds the following files:
- `colibri_pkg.sv`: constants, SAER word type, register map;
- `sample_gen.sv`
- `saer_rx.sv`
- `event_frame_buf.sv`
- `pwm_gen.sv`
- `apb_regs.sv`
- `colibri_io_top.sv`

`tb/` has one self-checking testbench per module, `tb_<module>.sv`. It also holds a
behavioural camera model, `dvs132s_model.sv`, and the pattern functions,
`dvs_tb_pkg.sv`. The pattern gives each pixel no event, ON or OFF from an integer hash
of frame, row and column, or fills every pixel for a 13728-event frame. Each testbench
prints `TB_RESULT checks=N failures=M`.

`tb_colibri_io_top` runs the top at its default parameters. It covers:
- seven full-size frames at 7.2 kHz, including a fully populated one;
- byte-exact frame reads that overlap the next readout;
- skipped requests at a too-short period;
- a protocol error;
- 50 % PWM on all channels.

It takes well under a second.

```
verilator --binary --timing --assert -Wno-fatal --top-module tb_colibri_io_top \
  -Irtl -Itb -y rtl -y tb +libext+.sv \
  rtl/colibri_pkg.sv tb/dvs_tb_pkg.sv tb/tb_colibri_io_top.sv -o sim
./obj_dir/sim
```

The same command with another `tb_<module>` runs a unit testbench.

Lint notes:
- Verilator reports `SYNCASYNCNET` on `rst_ni`, because the protocol assertions use it
  in `disable iff` while the flops reset asynchronously. This is intended.
- `pwm_gen`'s `period_start_o` is left open in the top.
- `fb_rd_addr_o` of `apb_regs` is a slice of `paddr_i` by design.
