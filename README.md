# Timespot1 digital logic in SystemVerilog

Timespot1 measures the arrival time of particle hits in every pixel of a
55 um pitch sensor to about 50 ps. It does this with a Vernier time-to-digital
converter (TDC) per pixel: two ring oscillators whose periods differ by 50 ps
race each other, and the number of periods until they coincide gives the
time. The fine time is then combined with a coarse 40 MHz timestamp and
streamed off the chip. This code is the RTL of the chip's digital part:
- a 32 x 32 matrix with a Vernier TDC in every pixel;
- four readout trees (ROTs) of 256 pixels each;
- eight serial links at 1.28 Gb/s;
- an I2C-style slow control.

The analog blocks are not described as logic: the AFE (charge amplifier and discriminator), the bandgaps, the DACs and the LVDS drivers. Their digital pins are top-level ports.

## Structure (rtl/)

| file | function |
|---|---|
| ts1_pkg | widths and word types: 24-bit TDC frame, 40-bit hit word, pixel config byte |
| clock_div | 640 MHz to 160 MHz and 40 MHz, with phase counters |
| tdc_dco | **behavioural model** of the ring DCO: 4 fine stages (3 drive strengths each), 3 coarse cells |
| tdc_vernier_core | start and stop flops, coincidence circuit, cnt0/cnt1/ToT counters |
| tdc_ta_calc | TA = (cnt0-1)T0 - (cnt1-1)T1 in ps, 15 bits |
| tdc_calib | two-step DCO calibration and period measurement, < 4 us |
| tdc_tp_gen | test pulses: 7 phases of 3.125 ns, 32 widths of 6.25 ns |
| tdc_pixel | one pixel: DCOs, core, calibration, fixed-latency 24-bit serial output with DV at 160 Mb/s |
| rot_pixel_cache | per-pixel receiver: 23 bits + 9-bit timestamp, two cache entries, lost flag |
| rot_tree | combinational priority tree over 512 caches; adds the 8-bit address |
| rot_fifo | 32 x 40-bit FIFO |
| tx_protocol | header byte + 5 data bytes per word, idle byte otherwise |
| ddr_serializer | one byte per 160 MHz cycle, 2 bits per 640 MHz cycle (DDR) |
| rot | 256 caches, tree, 2 FIFOs, 2 links, stall and lost counters |
| timestamp_counter | 9-bit counter at 40 MHz, started by `ts_start` |
| i2c_target, ts1_config | slow-control bus target and register map |
| timespot1_top | full chip: 1024 pixels, 4 ROTs, 8 links |

## How the Vernier TDC works

- A hit sets the start flop, which lets DCO_0 run with period T0 (about 1.06 ns).
- At the next 40 MHz edge the stop flop starts DCO_1, with period T1 = T0 - 50 ps.
- DCO_1 gains 50 ps on DCO_0 every period. The coincidence circuit samples
  ck_0 with ck_1 and fires when DCO_1 has caught up; both oscillators then stop.
- With cnt0 and cnt1 the number of periods each ran, the hit came
  TA = (cnt0-1)T0 - (cnt1-1)T1 before the reference edge, to one 50 ps bin
  (the result is the lower bin edge).
- The conversion takes at most T0*T1/(T0-T1), about 21 ns.
- T0 and T1 vary from pixel to pixel, so each pixel measures its own periods
  (calibration) and stores them; the subtraction uses the stored values.

The oscillator (`tdc_dco`) is a timing model; everything around it is
synthesizable logic.

## Key behaviour

- **Measurement:**
  - A hit starts DCO_0. The next 40 MHz edge starts DCO_1.
  - When the faster DCO_1 catches up (coincidence), both stop.
  - TA is the time from the hit to that reference edge.
  - ToT counts DCO_0 periods while the hit is high.
- **Output:** after a fixed latency of 48 clk160 cycles, the pixel sends 24 bits MSB first.
  - In normal mode the frame is `{0, TA[14:0], ToT[7:0]}`.
  - In debug mode it is `{cnt0, cnt1, ToT}`.
  - The ROT keeps the low 23 bits, so in debug mode bit 7 of cnt0 is dropped. cnt0 is below 32 for a 25 ns window, so no information is lost.
- **Dead time:** about 310 to 340 ns per hit, which gives the rated 3 MHz per pixel.
- **Hit word (40 bits):** `{addr[7:0], TA[14:0], ToT[7:0], ts[8:0]}`. The timestamp is the counter value when DV rose. That is a fixed 12 or 13 clk40 cycles after the hit's reference cycle.
- **Link:**
  - Each word is sent as a header byte plus 5 bytes, which takes 6 clk160 cycles.
  - Each ROT can therefore carry 53.3 M words/s, about 208 kHz per pixel at uniform occupancy.
  - When both FIFOs are full, the tree stalls.
  - A pixel whose two caches are full loses its next hit, and the hit is counted in `lost_cnt`.
- **Calibration:**
  - Register 0x0002 bit 0 starts it in every pixel.
  - DCO_0 goes to the first coarse tap giving T0 <= 1.1 ns.
  - The fine code of DCO_1 then rises until T0 - T1 reaches the target (register 0x0003, default 50 ps).
  - Finally both periods are measured over 1.6 us and stored.

## Register map (16-bit address, 8-bit data; bus address 0x2A)

| address | content | reset |
|---|---|---|
| 0x0000 | header byte | 0xB5 |
| 0x0001 | idle byte | 0x3C |
| 0x0002 | bit 0: start calibration; bit 1: fire test pulse (self-clearing) | - |
| 0x0003 | resolution target, ps | 50 |
| 0x0004 | test-pulse phase 1..7 (0 is taken as 1) | 1 |
| 0x0005 | test-pulse width code w, width (w+1) x 6.25 ns | 0 |
| 0x0010-0x0017 | DAC codes | 0x80 |
| 0x1000+p | pixel p: bit 0 enable, bit 1 debug, bit 2 TDC test pulse, bit 3 AFE test pulse, bit 4 AFE power | 0x11 |

Bus protocol:
- Write: `S, 0x54, ptr_hi, ptr_lo, data..., P`.
- Read: a pointer write, then `Sr, 0x55, data..., P`.
- The pointer auto-increments.

## Paper versus own choices

**From the paper:**
- the pixel count and grouping;
- the DCO structure;
- the TA formula and word widths;
- debug mode;
- test-pulse phases and widths;
- the 160 Mb/s pixel link with DV;
- the 9-bit 40 MHz timestamp;
- two caches per pixel, the binary tree and two 32-word FIFOs;
- the header/idle protocol;
- DDR at 640 MHz;
- calibration in two steps under 4 us.

**This design's own choices:**
- the DCO delay values (behavioural model);
- the calibration algorithm details;
- the latency value;
- the 24th frame bit;
- the tree priority;
- the FIFO selection;
- the register map and bus address;
- the reset values of the header and idle bytes.

## Verification (tb/)

Every block has a self-checking testbench, `tb_<module>.sv`. Shared helpers:
- `link_rx_model` decodes a serial link.
- `i2c_master_model` drives the bus.

The end-to-end tests are:
- **`tb_timespot1_top`** (4 x 32 pixels). It counts these mechanisms, and each one must happen:
  - register access;
  - calibration;
  - the timestamp latency;
  - AFE hits;
  - debug mode;
  - TDC and AFE test pulses;
  - pixel disable;
  - header and idle changes;
  - stall;
  - lost hits.
- **`tb_timespot1_full`**: the full 1024-pixel chip with default parameters. It calibrates, hits every pixel in one cycle and checks all 1024 words and the link drain time.

## Simulating

    verilator --binary --timing --assert --top-module tb_rot rtl/ts1_pkg.sv -y rtl -y tb tb/tb_rot.sv
    obj_dir/Vtb_rot

Each testbench prints `TB_RESULT checks=N failures=M`. The top-level tests take
about 1.5 minutes (reduced size) and several minutes (full size).

## Not implemented

- The analog front end, bandgaps, DACs and LVDS drivers.
- DCO timing is a behavioural model. It is not synthesizable: the real oscillator is a custom cell.
