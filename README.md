# VT onboard FPGA front end: real-time calibration and frame selection

The Visible Telescope (VT) on the SVOM satellite images gamma-ray-burst fields
in two bands at once, blue (400–650 nm) and red (650–1000 nm). Its onboard
processing unit must turn each exposure into compact quick-look products for
a slow VHF downlink within a few minutes. That work is split between an FPGA
and a general-purpose processor. The FPGA handles everything that has to
happen per pixel and at readout speed:

* **calibration**: subtract the master dark, divide by the normalised master
  flat, add 512, store as a 16-bit integer;
* **de-interlacing**: the camera sends the two bands as alternating lines of
  one stream, and each band must end up in a frame of its own;
* **frame selection**: drop exposures taken while the platform was not
  steady, and exposures whose sky background is raised by stray Earth light.

The processor then only handles clean, single-band frames that passed the
checks (star lists for attitude, stacked finding charts, 1-bit images).

This repository holds synthesizable SystemVerilog for that FPGA front end. It
follows the published description of the VT onboard pipeline (H.-B. Cai,
Y.-L. Qiu et al., "SVOM/VT: Real-Time Onboard Data Processing"). That
description gives the arithmetic and the selection rules but not the
hardware structure, so widths, interfaces and the pipeline structure are
this implementation's own. The sections below say which parts are which.

## Data flow

```
 image header (stable seconds) -----------------------------+
                                                            v
 raw stream  --> band_deinterlacer --+--> image_quality_assessor --> qa_valid[b], qa[b]
 (1 pix/clk)     band of each line,  |     stability_check             (to processor)
                 row/col in its own  |     background_estimator x 2
                 band frame, address |
                                     +--> pixel_calibrator ----------> cal_valid, cal_pix,
 dark_pix[b], flat_pix[b] ---------------> (dark, flat, +512)           cal_band, cal_addr
 (per band, same clock as raw)             pipe_divider                 (to frame store)
```

`vopp_fpga_top` wires these blocks together. The LVDS receiver, the SDRAM
that holds master frames and calibrated frames, the SDRAM controller and
the processor bus are not included. Their signals are plain ports of the top.

## The pixel stream and de-interlacing (`band_deinterlacer`)

One exposure is `2*IMG_H` lines of `IMG_W` 16-bit pixels (2048 × 2048 per
band by default). Lines alternate between the bands, starting with blue.
`raw_sof` marks the exposure's first pixel, and pixels arrive one per clock
with `raw_valid`. There is no back-pressure.

The deinterlacer counts columns and interlaced lines. For each pixel it
produces a `pix_pos_t` record:

| field  | value                                                         |
|--------|---------------------------------------------------------------|
| `band` | interlaced line number mod 2 (`BAND_BLUE` = 0 first)          |
| `row`  | interlaced line / 2: the line inside its own band frame       |
| `col`  | column                                                        |
| `sof`  | first pixel of this band frame (row 0, col 0)                 |
| `eof`  | last pixel of this band frame                                 |
| `addr` | `band*IMG_W*IMG_H + row*IMG_W + col`: word address, band-major |

Writing `cal_pix` to `cal_addr` therefore leaves two ordinary single-band
frames in memory, blue first. A start marker that arrives before the
current exposure is complete restarts the counts and pulses `sync_err`.
Pixels that arrive outside an exposure are dropped.

Strict line alternation is this design's choice. The published description
only says that the FPGA identifies the band of each line. If the real link
carries a band tag per line, `band_c` in `band_deinterlacer.sv` is the one
place to change.

## Calibration arithmetic (`pixel_calibrator`, `pipe_divider`)

The master flat is stored normalised, with 32768 meaning a gain of 1.0. The
calibrated pixel is

```
cal = 512 + trunc( (raw - dark) * 32768 / flat )      clamped to 0 .. 65535
```

The order is the published one: dark subtraction first, then division by
the flat, then the +512 offset. The offset keeps the slightly negative
values of dark-subtracted sky (noise, over-subtracted hot pixels) inside an
unsigned 16-bit word.

Division is the only expensive step, and it must run at one pixel per
clock. It is built as follows:

1. **Stage 1** computes `raw - dark` as a sign and a 16-bit magnitude.
2. **`pipe_divider`** divides `magnitude << 15` (31 bits) by the 16-bit
   flat. The result is always clamped to 16 bits, and the offset is only
   512, so no more than 17 quotient bits can matter. The divider's first
   stage therefore checks whether the quotient fits in 17 bits
   (`num >> 17 < flat`; a zero flat also counts as overflow). It seeds the
   partial remainder with `num >> 17`. Then 17 identical stages each bring
   down one numerator bit, subtract the flat if it fits, and set one
   quotient bit. That is 17 subtractors of 17 bits instead of 31 stages of
   a full-width divider.
3. **Last stage** applies the sign, adds 512 and clamps:
   * above 65535 gives 65535 and `cal_sat`;
   * below 0 gives 0 and `cal_clip`;
   * a divider overflow saturates in the direction of the sign.

   A zero flat pixel (dead pixel) thus gives 65535 when `raw >= dark` and 0
   otherwise.

Worked values at flat = 32768 (gain 1.0): raw 1000, dark 100 → 1412;
raw = dark → 512; raw 50, dark 400 → 162. At flat = 16384 (pixel half as
sensitive) the signal doubles: raw 60000, dark 0 → 120512, which
saturates.

Rounding is truncation toward zero. The published description says only
that the result is "converted to integer". Clamping is also this design's
choice.

The top receives one dark and one flat pixel **per band** in the same clock
as the raw pixel. It applies the pair of the band it identified for the
line. This implements "the appropriate calibration coefficients for each
band". Fetching those pixels from SDRAM (for example into per-band line
buffers) is the job of a reader outside this design.

## Frame selection (`image_quality_assessor`)

### Platform stability (`stability_check`)

The attitude control system reports once a second whether the platform met
its stability requirement. The imaging software writes the number of stable
seconds into the image header. The header's count arrives on
`hdr_valid`/`hdr_stab_count` (8 bits, enough for the typical 50 s or 100 s
exposures). An exposure is **discarded if the count is below
`cfg.stab_thresh`**; a count equal to the threshold passes. One count
applies to both bands, because they come from the same exposure. The result
is sampled at each band frame's first pixel, so the next exposure's header
may arrive during the current readout.

### Background (`background_estimator`, one per band)

Stray Earth light raises the whole sky level when the satellite leaves
Earth's shadow, which degrades sensitivity. The background is measured in
**five windows** (`cfg.win_x/win_y` give the origins; each window is 64 ×
64, this design's size). Sigma clipping would be too costly, so bright
stars are kept out with a **fixed flux cut**: only raw pixels strictly below
`cfg.flux_cut` enter the sample. A pixel inside two overlapping windows
counts in both.

At the band frame's last pixel the five sums and counts, plus their totals,
are copied to a snapshot. The accumulators then start again on the next
frame. One restoring divider (one bit per clock) computes the six means.
The frame's background is the mean over all sampled pixels. It **passes if
that mean is at or below `cfg.bg_thresh`**. A frame in which no pixel fell
below the flux cut (sky brighter than the cut everywhere) fails. Mean as the
statistic and the empty-sample rule are this design's choices. The published
description says only that statistics are derived from the selected pixels.

The background is measured on **raw** pixels, not calibrated ones. The
published threshold is set with a margin for instrumental effects such as
dark current, which implies the measured level still contains it.

### Verdict

Stability is tested first, then background, as published. For each band
frame, `qa_valid[b]` pulses once with `qa[b]`:

| `qa[b].verdict`     | meaning                                      |
|---------------------|----------------------------------------------|
| `QA_REJ_STABILITY`  | header count below threshold: discard        |
| `QA_REJ_BACKGROUND` | stable, but background too high or no sample |
| `QA_ACCEPT`         | use this frame                               |

The background statistics (per-window means and counts, overall mean and
count) are always reported. A rejected frame is still calibrated and
written. The background verdict only exists after its last pixel, so the
processor is expected to skip frames by their verdict.

## Interface summary (`vopp_fpga_top`)

| port | dir | type | meaning |
|------|-----|------|---------|
| `clk`, `rst_n` | in | 1, 1 | pixel clock; synchronous active-low reset |
| `hdr_valid`, `hdr_stab_count` | in | 1, 8 | image header: stable seconds |
| `raw_valid`, `raw_sof`, `raw_pix` | in | 1, 1, 16 | interlaced raw stream |
| `dark_pix`, `flat_pix` | in | 2 × 16 each | per band, master dark / flat at the raw pixel's row and column |
| `cfg` | in | `qa_cfg_t` | `stab_thresh`, `flux_cut`, `bg_thresh`, `win_x[5]`, `win_y[5]` |
| `cal_valid`, `cal_pix`, `cal_band`, `cal_addr` | out | 1, 16, 1, 23 | calibrated pixel and its word address |
| `cal_sat`, `cal_clip` | out | 1, 1 | pixel clamped high / low |
| `sync_err` | out | 1 | start marker inside an exposure |
| `qa_valid`, `qa` | out | 2, 2 × `qa_result_t` | per-band verdict and statistics |

Types and constants are in `vt_pkg.sv`.

**Latencies.** A calibrated pixel appears 21 clocks after its raw pixel:
1 clock in the deinterlacer and 20 in the calibrator (= 17 quotient bits
+ 3). A band's verdict appears 110 clocks after that band's last raw pixel.
The divider needs 6 × 18 clocks, so band frames must be longer than about
110 pixels. Every stage takes one pixel per clock.

**Size.** After generic synthesis the top has about 2,000 flip-flop bits
outside the calibrator's divider pipeline, some 1,700 of them in the two
background estimators (sums, counts, snapshots). A further 3,000 bits sit in
the calibrator's pipeline registers, which the synthesis report lists as
memory: 18 stages each carrying the flat, the partial remainder, quotient
and numerator bits, and the 24-bit band/address tag. That is about 5,000
flip-flops in all, more than the 3,840 quoted for the flight FPGA, which
covers 78% of that unit with logic this design does not include. The
published figures are also hard to reconcile: a "million-gate" and a
"3-million-gate" part, named XC2V300, with 3,840 LUTs and flip-flops. The
pipeline could be slimmed, for example by regenerating the address at the
output instead of carrying it, but that has not been done.

## What is not here

* **Camera link (LVDS), SDRAM with error correction, SDRAM controller,
  processor bus.** They are named but not specified, so they appear here
  only as ports.
* **Master dark / flat generation.** The processor computes these: the
  median of six dark frames; and the median of six dark-subtracted LED
  flats, equalised for the two readout ports' gain ratio, normalised and
  scaled by 32768. This design consumes the results.
* **Attitude charts, finding charts (registration, window extraction,
  background-subtracted stacking, source extraction, three-aperture
  photometry) and 1-bit run-length-encoded images.** These are processor
  software.

## Simulation

Each block has a self-checking testbench in `tb/`. It compares against
values computed independently in the testbench, checks latencies, prints
`TB_RESULT checks=N failures=M` and stops itself with a watchdog.

| testbench | what it covers |
|-----------|----------------|
| `tb_band_deinterlacer` | band, row, column, address, sof/eof, drop before start, restart with `sync_err` (8 × 4 frames) |
| `tb_pixel_calibrator` | corner cases (gain 1, raw = dark, negative, zero / tiny flat) and 20,000 random pixels; latency 20 |
| `tb_stability_check` | threshold boundary, hold between headers, reset |
| `tb_background_estimator` | dark, bright and above-cut skies; window over the frame edge; pixels exactly at the cut; latency 109 |
| `tb_image_quality_assessor` | verdict priority; header arriving during readout; both bands |
| `tb_vopp_fpga_top` | end to end on 32 × 16 frames: five exposures, one cut short |
| `tb_vopp_fpga_full` | the same at the default 2048 × 2048: about 34 million checks, under 2 minutes |

The end-to-end tests count each mechanism (stability rejection, background
rejection, acceptance, flux-cut exclusion, saturation, clipping, sync error,
both bands) and fail if one never happens.

Any testbench runs with plain Verilator 5:

```
verilator --binary --timing --assert -y rtl -y tb -Irtl \
          rtl/vt_pkg.sv tb/tb_vopp_fpga_top.sv --top-module tb_vopp_fpga_top
./obj_dir/Vtb_vopp_fpga_top
```

`IMG_W`/`IMG_H` on the top set the frame size; the package constants
`WIN_SIZE`, `STAB_W` and `N_WIN` set the window size and field widths.
