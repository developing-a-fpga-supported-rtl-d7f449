# A computer-free touchscreen drawing board in one FPGA

Classroom "smart boards" usually need a PC, with its software, licences and
maintenance, just to turn pen strokes into a projected image. This design does
the same job inside a single FPGA. A teacher writes on a small resistive touch
panel with a pen. The strokes appear on the panel's own colour LCD and, at the
same time, on a VGA monitor or projector for the class. Five buttons select
draw or erase, a normal or bold pen, red or blue ink, and clear the screen.
Six 7-segment digits show the raw X/Y reading of the pen.

The system follows a published description of an FPGA-based board built on a
Cyclone II EP2C70 with a 4.3-inch LCD touch module. That description gives the
block structure, the data flow and a few numbers: 12-bit touch readings, an
800 x 400 LCD with 24-bit colour, six 7-segment digits split three and three,
and the operating modes. It gives no protocols, timings or internal structure.
So most of what is below is this design's own engineering. Each file's header
says which parts follow the description and which are choices made here.

## Data flow

```
 touch panel + ADC                                         6 x 7-segment
        |  serial (4-wire)                                       ^
        v                                                        |
  adc_spi_ctrl --X/Y sample--> reg_mem_ctrl --coordinate reg--> seg7_ctrl
                                  |  ^
                    brush writes  |  | mode, clear
                                  v  |
                              frame_ram   <-- button_ctrl <-- 5 buttons
                     read port A |   | read port B
                                 v   v
                        glcd_ctrl     vga_ctrl --> ADV7123 DAC --> VGA socket
                 (glcd_spi + glcd_timing)
                         |
                         v
                 LCD on the touch module
```

`touch_board_top` is the "main control" module. It instantiates everything
above plus `delay_ctrl`, which holds the rest of the design in reset for 25 ms
after the reset button is released. Everything runs on one 40 MHz clock. That
clock is also the VGA and LCD pixel clock.

| file | role |
|---|---|
| `touch_pkg.sv` | canvas size, pixel codes, mode and sample structs, palette |
| `delay_ctrl.sv` | start-up delay |
| `adc_spi_ctrl.sv` | serial master that reads X and Y from the touch ADC |
| `reg_mem_ctrl.sv` | coordinate register, ADC-to-pixel mapping, brush painter, clear |
| `frame_ram.sv` | 800 x 400 x 2-bit picture memory, 1 write port and 2 read ports |
| `glcd_ctrl.sv` | LCD control: `glcd_spi.sv` (configuration) + `glcd_timing.sv` (video) |
| `vga_ctrl.sv` | 800 x 600 @ 60 Hz VGA output |
| `seg7_ctrl.sv` | hex display of X and Y |
| `button_ctrl.sv` | debouncing and decoding of the five buttons |
| `video_timing.sv`, `clk_enable.sv` | raster counter and pixel-rate enable shared by the two displays |

## From a touch to a pixel

This is the part of the design that carries the most behaviour.

**Sampling.** While the panel's pen-interrupt line is low, `adc_spi_ctrl`
runs two serial frames, X then Y. Each frame has 24 serial clocks:

- an 8-bit command, MSB first;
- one clock for the conversion;
- the 12-bit result, MSB first, sampled on rising edges 9 to 20;
- three padding clocks.

The serial clock is clk/32 = 1.25 MHz. A pair therefore takes
97 x 16 = 1552 clocks. After it, the block waits 40 000 clocks before it
looks at the pen again, so a held pen is sampled about once per
millisecond. This frame format and the command bytes 0x92/0xD2 are
assumptions modelled on common touch-screen ADCs.

**Mapping.** The touch module's coordinate system has X running *up* the
screen and Y running *across* it: (X=0,Y=0) is at the bottom left,
(X=FFF,Y=0) at the top left and (X=0,Y=FFF) at the bottom right. So
`reg_mem_ctrl` computes

    column = (Y * 800) >> 12        row = ((4095 - X) * 400) >> 12

There is no calibration. A real panel does not reach 0 and 4095 at its
edges, so strokes land slightly off, in proportion to the offset.

**Painting.** Each accepted sample writes a square brush centred on that
pixel, clipped at the canvas edges. The brush is 3 x 3 normally and 7 x 7
in bold mode. It writes one pixel per clock, so 9 or 49 clocks in all. The
pixel code written is red or blue ink, or background when erasing. A sample
that arrives while a brush or a clear is still in progress is not painted
(`drop` pulses), but it still updates the coordinate register. At the
default sampling rate this only happens during a clear.

**Clearing.** Clear writes background to all 320 000 pixels, one per clock
(8 ms). The memory has no reset, so a clear also runs once after start-up.
A clear requested during a brush waits for the brush to finish. `busy`
stays high from the request to the end of the clear.

**Modes.** These are the buttons, active low, debounced by sampling every
10 ms:

| key | action |
|---|---|
| 0 | draw |
| 1 | erase |
| 2 | toggle bold |
| 3 | toggle ink red/blue |
| 4 | clear |

"Draw bold" is key 0 then key 2. After reset the mode is draw, normal
brush, red ink.

## Picture memory and the two screens

`frame_ram` keeps one 2-bit code per canvas pixel:

| code | meaning | colour |
|---|---|---|
| 0 | background | white |
| 1 | red ink | FF0000 |
| 2 | blue ink | 0000FF |

Pixels are stored row-major (`addr = row*800 + col`). Reads are registered.
A read and a write to the same address in the same clock return the old
value.

Both screens read the memory all the time, each through its own read port.
Each has the same three-stage pipeline:

1. raster counter (`video_timing`);
2. address, then memory read;
3. palette, then output registers.

The sync, enable and colour pins therefore lag the raster counter by two
clocks and stay aligned with each other.

* **LCD** (`glcd_timing`): 800 x 400 visible pixels, 24-bit RGB, data-enable
  plus active-low HD/VD syncs. A line is 1056 clocks and a frame 445 lines,
  about 85 Hz at 40 MHz. These porches are placeholders: check them against
  the datasheet of the LCD driver actually used. `glcd_spi` first writes
  configuration words to the LCD driver over a 3-wire port (16-bit words,
  MSB first). Only then does `glcd_ctrl` release the video stream. **The
  default configuration words are placeholders (zeros).** The real register
  settings of the panel's driver must be supplied through the `INIT_WORDS`
  parameter.
* **VGA** (`vga_ctrl`): VESA 800 x 600 at 60 Hz (40 MHz, positive syncs).
  The canvas is shown 1:1 in rows 100 to 499, with black bars above and
  below. Colours are widened to the ADV7123's 10-bit inputs. `vga_sync_n`
  is held low, so there is no sync-on-green.

## Limits and departures

* **Memory on the original FPGA.** One copy of the picture is 640 000 bits.
  An FPGA tool implements the two read ports by keeping two copies. On an
  EP2C70 that needs about 314 M4K blocks at 2 bits wide, and the chip has
  250. To fit that device, share one read port between the two screens:
  run the clock at twice the pixel rate and give the screens alternate
  cycles. This is not done here. Larger devices, or a 1-bit picture,
  avoid the problem.
* **LCD size.** The canvas is 800 x 400, as stated for the panel. Commercial
  4.3-inch modules of this type are often 800 x 480. Changing `CANVAS_H` in
  `touch_pkg` and the LCD vertical porches adapts the design.
* **Not modelled:**
  - the external SDRAM/Flash/EEPROM path; the picture is kept only on
    chip, as in the described system;
  - saving or loading drawings;
  - power modes (mains or battery);
  - a PLL; the 40 MHz clock is assumed to come from outside.
* **Unknowns filled in with assumptions:** all serial protocols, command
  bytes, porch lengths, brush sizes, button assignment, debounce and delay
  times, digit order and polarity of the 7-segment display. Each is a
  parameter or a clearly marked constant.

## Simulating

Every block has a self-checking testbench in `tb/`. It prints
`TB_RESULT checks=N failures=M` and stops itself with a watchdog.
`tb/adc_model.sv` is a behavioural model of the touch ADC.
`tb/tb_check.svh` holds the check macro. With Verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb +libext+.sv \
    rtl/touch_pkg.sv tb/tb_touch_board_top.sv --top-module tb_touch_board_top -o sim
./obj_dir/sim
```

Replace the testbench name to run another one:

- `tb_delay_ctrl`
- `tb_adc_spi_ctrl`
- `tb_reg_mem_ctrl`
- `tb_frame_ram`
- `tb_glcd_spi`
- `tb_glcd_timing`
- `tb_glcd_ctrl`
- `tb_vga_ctrl`
- `tb_seg7_ctrl`

`tb_touch_board_top` runs the whole board at its default parameters, about
16 million clocks and roughly 15 s of simulation:

1. reset;
2. a pen touch held through the start-up clear, so early samples are
   dropped;
3. a blue bold dot;
4. a bold erase of the first dot;
5. a clear.

After each step it compares every pixel of a full VGA frame and a full LCD
frame with a picture computed independently in the testbench. It also checks
the 7-segment digits and counts that each mechanism occurred.

The block testbenches check exact cycle counts where the design defines
them:

- the delay length;
- the ADC frame (97 half serial clocks) and the sample period;
- one clock per brush pixel;
- 320 000 clocks per clear;
- line and frame periods and sync widths of both screens;
- the configuration time, N_WORDS x 34 x SPI_HALF clocks.

The design was also linted with Verilator `-Wall` and elaborated with
Yosys/slang. The remaining warnings are:

- unused status nets in the top;
- the assertion's use of the asynchronous reset.
