# BurstLink display path in SystemVerilog

A mobile system that plays video normally moves every decoded frame through
DRAM twice. The video decoder writes the frame into a DRAM frame buffer. The
display controller then reads it back a chunk at a time and trickles it to the
panel at the rate the panel's pixel formatter consumes pixels. Because the
transfer is paced to the panel, the display controller, the eDP link and DRAM
stay awake for most of every frame window (16.7 ms at 60 Hz). The package
cannot reach its deepest sleep state during that time.

BurstLink removes both costs with two mechanisms:

* **Frame Buffer Bypass.** Suppose only the video plane is on screen and only
  one video application is running. Then nothing has to be composed with the
  decoded frame, so the decoder sends it straight into the display
  controller's (DC's) double buffer over the on-chip interconnect and DRAM is
  never touched. When the DC buffer is full, the decoder is clock-gated. When
  a half frees up, it is woken again.
* **Frame Bursting.** The DC sends a whole frame at the full eDP bandwidth
  (25.92 Gbps) instead of the panel's pixel rate (about 11.3 Gbps for 4K at
  60 Hz). The panel's timing controller (T-con) holds a *double* remote frame
  buffer (DRFB). The new frame lands in the back half while the pixel
  formatter keeps refreshing from the front half, and the halves swap at a
  refresh boundary. After the burst, the processor side can go to package
  state C9 for the rest of the window.

When neither applies, the design falls back to the conventional path. This
happens with several planes, several video applications, several displays, a
graphics interrupt, or a user-input interrupt during windowed playback. The
decoder then writes to DRAM, and the DC fetch engine reads the frame back.

This repository is the RTL of that display path. It covers the decoder's
output selector, the DC registers, the DC fetch engine and double buffer, and
the eDP transmitter and receiver at word level. It also covers the DRFB, the
pixel formatter, and a power-management sequencer that tracks the package
C-state.

## Block map

```
                       +-------------------------- processor ------------------------------+
 decoder core  vd_* -->| dest_selector --(bypass)--> buffer write mux --> dc_buffer --> edp_tx |--> edp_link_tx
                       |      |                         ^                    | full/empty        |
                       |      +--(DRAM)--> mem_wr_*     |                    v                   |
 mem_rd_*/mem_rsp_* <->|              dc_fetch ---------+               pmu_ctrl (C-state)    |
                       |  dc_csr: plane enables, displays, burst/PSR2 mode, window             |
                       +--------------------------------------------------------------------+
                       +----------------------------- panel ----------------------------------+
 edp_link_rx --------->| edp_rx --> drfb (front/back halves) --> pixel_formatter --> lcd_*      |
                       +--------------------------------------------------------------------+
```

The top `burstlink_top` leaves the eDP physical link open. `edp_link_tx` is an
output and `edp_link_rx` is an input. Wiring one to the other (as the
testbenches do) gives an ideal link. The decoder core, the DRAM with its
controller, the CPU's driver work and the LCD drivers are also outside the
RTL. They appear as ports.

| file | block |
|---|---|
| `rtl/burstlink_pkg.sv` | shared types: pixel, frame beat, region, link word, C-state |
| `rtl/dest_selector.sv` | decoder output router (bypass or DRAM), `single_video` flag |
| `rtl/dc_csr.sv` | DC registers, `video_plane_only`, `single_plane`, interrupt fallback |
| `rtl/dc_fetch.sv` | chunked DRAM reader for the conventional path |
| `rtl/dc_buffer.sv` | DC ping-pong buffer, `full` / `empty` |
| `rtl/edp_tx.sv` | link framing, paced or burst transmission |
| `rtl/edp_rx.sv` | header decoding, region addressing into the DRFB |
| `rtl/drfb.sv` | double remote frame buffer with tear-free swap |
| `rtl/pixel_formatter.sv` | raster read-out at panel rate, self-refresh |
| `rtl/pmu_ctrl.sv` | package C-state sequencer, decoder halt/wake, counters |
| `rtl/burstlink_top.sv` | everything above, wired together |

## Units and rates

The whole design runs on one clock. One clock cycle carries one 24-bit pixel
over the link, so the clock stands for the eDP word rate at 25.92 Gbps. Two
blocks have to be slower and use a fractional credit counter with
`RATE_NUM/RATE_DEN = 113/259` (11.3 / 25.92):

* the pixel formatter, which reads one pixel per credit;
* the transmitter in its paced (conventional) mode.

The counter gives 113 pixels in every 259 cycles, spread as evenly as
whole cycles allow. At the defaults (3840x2160) the two modes behave as follows:

* A burst takes 8,294,400 pixel cycles, about 7.7 ms at 25.92 Gbps.
* A paced frame takes about 19.0 M cycles, i.e. the whole 16.7 ms window.

Pixels are 24 bits. One DC buffer half holds one 512 KB chunk, which is
174,762 pixels. The DRFB holds 2 x 3840 x 2160 pixels, i.e. 2 x 24 MB.

## Frame Buffer Bypass in detail

`dc_csr` derives `video_plane_only`. It holds when exactly one display is
configured and either of these is true:

* only the video plane is enabled;
* PSR2 windowed video is active with the video plane on. The rest of the
  screen is then static in the panel and only the window is updated.

`dest_selector` computes `single_video` as `num_video_apps == 1`. The bypass
route is the AND of the two. The route is decided at a frame's first beat and
kept until its last beat, so a configuration change never splits a frame
between DC and DRAM. The DRAM route writes the frame at `fb_base` onwards,
one address per pixel.

In the top, the bypass stream and the fetch engine share the DC buffer's write
port. The fetch engine wins while a fetch is running. This can only happen
when the route changes between frames.

`dc_buffer` is a ping-pong pair of halves:

* A half closes when it holds a chunk's worth of pixels, or when the frame's
  last pixel arrives.
* It is freed when the transmitter has drained it.
* `full` means both halves are closed. The writer then sees `wr_ready = 0`.
* `empty` means at least one half is free. This is the "almost empty"
  condition that wakes the decoder.

## Frame Bursting and the link

`edp_tx` opens each update with a header word. The header carries:

* the region: x, y, width, height;
* a `burst` flag;
* a `selective` flag, set for a PSR2 window.

Pixel words follow. In burst mode there is one pixel every cycle and no gap
(an assertion checks this). In paced mode a pixel goes out only on a credit.
The top turns burst mode on when:

* the DC's burst bit is set, and
* the display is single-plane or video-plane-only.

This covers both bypassed video and single-plane graphics workloads fetched
from DRAM. `frame_sent` pulses with the last pixel.

`edp_rx` converts the header into a start address, `y * H_RES + x`. It
advances by one panel row (`H_RES`) at the end of each region line. This is
what lets a PSR2 window land at its offsets. The receiver writes the two
update types differently:

* A burst frame goes to the DRFB back half. Its last pixel raises
  `frame_done`.
* A paced update, full screen or window, is written into **both** halves.

The second rule is a choice of this design. It keeps the stored image
identical in both halves, so a small window update never has to wait for a
swap. A later swap then never brings back stale content.

`drfb` swaps only when two things hold: the pixel formatter has reached the
end of a refresh (`swap_req`), and a complete burst frame is waiting
(`frame_ready`). Frames are therefore never torn. A write to the back half
while a finished frame still waits raises `overrun`, which means the sender
outran the panel.

`pixel_formatter` scans the front half in raster order at the panel rate. It:

* raises `vsync` on the first read of each refresh;
* asks for a swap with the last pixel;
* counts refreshes;
* counts self-refreshes, i.e. refreshes that repeated the previous frame
  because no new one arrived.

Its `vsync` is the top's `window_start`: each panel refresh opens a frame
window.

## Power states

`pmu_ctrl` follows the package C-states of one frame window. The decoder clock
enable (`vd_clk_en`), `dram_active` and the DC/eDP power (`link_on`) are
functions of the state.

| state | meaning here | decoder clock | DRAM | link |
|---|---|---|---|---|
| C0 | window start, driver orchestration running | on if a frame is due | active | on |
| C7 | bypass: decoder feeds the DC buffer | on | self-refresh | on |
| C7' | bypass: DC buffer full, decoder halted | gated | self-refresh | on |
| C2 | conventional: DC fetching a chunk from DRAM | gated | active | on |
| C8 | conventional: DC buffer full, sending | gated | self-refresh | on |
| C9 | frame delivered, or no new frame in this window | gated | self-refresh | off unless a transfer is still running |

The transitions are as follows:

* At `window_start` the sequencer enters C0 if a frame is due, or C9 if not.
  The no-frame case is the 30 FPS-on-60 Hz window, in which the panel
  self-refreshes.
* When `orch_done` arrives, it goes to C7 on the bypass route, or otherwise
  waits for the decoder's frame into DRAM.
* On the bypass route it moves between C7 and C7' as the DC buffer fills and
  frees. Each return to C7 gives a `wakeup` pulse to the decoder.
* On the conventional route it moves between C2 and C8 as chunks are fetched.
* After the last pixel has left over the link, it goes to C9.

`residency` counts cycles per state, and `halt_count` and `wake_count` count
the C7' episodes. A transfer still running at the next window start
(possible with paced sends) is allowed to finish. Its `frame_sent` is not
taken as the end of the new window's frame.

The sequencer is written as a hardware FSM. In the original proposal this is
a change to power-management firmware.

## Registers (`dc_csr`)

| addr | name | bits |
|---|---|---|
| 0 | PLANE_EN | 0 background, 1 video, 2 graphics, 3 cursor |
| 1 | DISPLAYS | number of displays (4 bits) |
| 2 | MODE | 0 burst enable, 1 PSR2 windowed video |
| 3 | WIN_XY | window x [12:0], y [28:16] |
| 4 | WIN_WH | window width [12:0], height [28:16] |

Reset state: video plane only, one display, burst and PSR2 off.

The two interrupts act as follows:

* `gfx_irq` models a graphics plane appearing. It enables plane 2 and leaves
  PSR2.
* `user_irq` models touch or keyboard input. It leaves PSR2.

`update_region` is the window while PSR2 is active, and the full panel
otherwise.

## Where this design departs from, or adds to, the description it implements

* **Own choices where the description is silent.** These are the register
  map, the word-level link format, the per-frame latching of the route, the
  closing of a buffer half on a frame's last pixel, and the one-deep start
  queue in the fetch engine. Also the design's own: the DRFB write-both rule
  for paced and window updates, and vsync as the start of the frame window.
* **Not built.** The decoder and GPU cores, plane composition and scaling
  (the conventional DC functions the bypass avoids; no algorithm is given
  for them), the eDP PHY and packet layer, DRAM and its controller, and the
  LCD drivers.
* **The DRFB as an array.** On a real panel the DRFB is a DRAM on the panel's
  flexible circuit board. Here it is an array with one write port and one
  registered read port, so its own timing and refresh are not modelled.
* **Blanking.** The pixel formatter has no blanking intervals. A refresh is
  exactly `H_RES * V_RES` pixel slots.
* **Windowed updates.** In PSR2 mode the display counts as
  video-plane-only. With the burst bit set, each video window is therefore
  burst into the DRFB back half and swapped in like a full frame. This works
  because the last full-screen (paced) update wrote the background into both
  halves, and every window update rewrites the whole window. Scaling the
  video to the window is assumed to have happened upstream.

## Verification

Each block has a self-checking testbench in `tb/`. Each one compares the block
against a reference model written independently of the RTL, checks cycle
counts where a rate is defined, and ends with a `TB_RESULT checks=N
failures=M` line. A watchdog stops each run if it hangs.

| testbench | what it checks |
|---|---|
| `tb_dest_selector` | routing truth table, per-frame route latching, DRAM addresses, random back-pressure |
| `tb_dc_csr` | register read-back, `video_plane_only`/`single_plane` for random configurations, interrupt fallback, region selection |
| `tb_dc_buffer` | data order against a queue model, full/empty against a half-occupancy model, early close on frame end |
| `tb_dc_fetch` | addresses and data from a DRAM model, no chunk request without a free half, frame markers |
| `tb_edp_tx` | header contents, a burst of N pixels in N cycles, paced pixels never ahead of the 113/259 credit, link-off freeze |
| `tb_edp_rx` | region addressing for random windows, write-both rule, `frame_done`/`update_done`, error on orphan pixels |
| `tb_drfb` | read-back, swap only on a complete frame, overrun, write-both |
| `tb_pixel_formatter` | raster order, rate, vsync/swap timing, self-refresh count |
| `tb_pmu_ctrl` | both state sequences, wakeup pulses, enables per state, residency totals |
| `tb_burstlink_top` | end to end at 16x8 pixels and 32-pixel buffer halves, listed below |
| `tb_burstlink_full` | end to end at the default 3840x2160 size, listed below |

`tb_burstlink_top` runs five phases on a 16x8 panel with 32-pixel buffer
halves:

* bypass with bursting;
* bypass without bursting;
* the conventional DRAM path, after a second video application is reported;
* PSR2 windowed video, then fallback on a user interrupt;
* a graphics interrupt.

It compares every pixel on the LCD output with the frame that should be
displayed, skipping refreshes whose image is not yet defined or is being
overwritten by a paced update. It also counts each mechanism and fails if any
of them never happened. The counted mechanisms are: bypass, DRAM fallback,
burst, paced send, decoder halt, wakeup, DRFB swap, self-refresh, PSR2 window
update, and graphics-interrupt fallback. It also requires that C2, C7', C8
and C9 were all visited, and that a user interrupt left PSR2.

`tb_burstlink_full` uses the top with all defaults. It delivers one bypassed,
burst 4K frame and checks all 8,294,400 displayed pixels. It checks the following:

* the burst took between N and 1.01 N cycles for N pixels, where a paced
  frame would take about 2.3 N;
* the refresh period is `N * 259 / 113` cycles;
* no DRAM traffic occurred;
* every decoder halt was matched by a wakeup;
* C9 was reached after the burst, and C9 residency exceeds C7 residency. The run takes about a minute
and a few GB of memory.

`tb_workloads` runs the evaluated workload classes on a 32x18 panel. The
classes are planar streaming (the same at every resolution apart from size)
and single-plane graphics. Each run is 10 frame windows from reset, and
windows 3 to 10 are measured. Typical output:

| run | frames | C0 | C2 | C7 | C7' | C8 | C9 | C9 share | DRAM wr / rd per frame |
|---|---|---|---|---|---|---|---|---|---|
| BurstLink, 60 FPS | 8 | 48 | 0 | 5128 | 8 | 0 | 5378 | 0.51 | 0 / 0 |
| BurstLink, 30 FPS | 4 | 48 | 0 | 2540 | 4 | 0 | 7970 | 0.75 | 0 / 0 |
| conventional, 60 FPS | 8 | 4656 | 3193 | 0 | 0 | 2713 | 0 | 0.00 | 576 / 574 |
| conventional, 30 FPS | 4 | 2328 | 1620 | 0 | 0 | 1357 | 5257 | 0.50 | 576 / 576 |
| single-plane graphics, burst | 8 | 4656 | 5408 | 0 | 0 | 0 | 498 | 0.05 | 576 / 576 |

The 60 FPS BurstLink share follows from the rates: a burst occupies
113/259 of the window, which leaves about 56% idle. The test requires 45% to
60%. In the graphics run, the producer writes the frame into DRAM in the same
window (C0). The burst then keeps DRAM open for about one frame time (C2),
and C9 is what remains. How large the energy saving is depends on power per
state, which is outside the RTL.

To simulate a block with Verilator 5:

```
verilator --binary --timing --assert -Irtl -Wno-fatal --top-module tb_dc_buffer \
    rtl/burstlink_pkg.sv rtl/dc_buffer.sv tb/tb_dc_buffer.sv
./obj_dir/Vtb_dc_buffer
```

For the top, list the package first and then every file in `rtl/`. Most
testbenches override the size parameters (for example `H_RES`, `V_RES`,
`BANK_WORDS`) to keep runs short. The RTL defaults are the 4K sizes above.

## What the default configuration holds

The defaults describe a 3840x2160, 24-bit, 60 Hz panel. A larger panel needs
new `H_RES`/`V_RES` and a larger DRFB, for example 5K (5120x2880, about
88 MB for two buffers). The pixel rate must also stay below the 25.92 Gbps
link rate:

| panel | pixel rate | fits the link |
|---|---|---|
| 4K at 60 Hz | 11.9 Gbps (the published estimate is about 11.3, which `RATE_NUM` uses) | yes |
| 4K at 120 Hz | 23.9 Gbps | yes |
| 4K at 144 Hz | 28.7 Gbps | no |

At 4K and 144 Hz, Frame Bursting has nothing left to gain, although the
bypass still saves DRAM traffic. VR panels of up to 1440x1600 per eye fit
the defaults, even with both eyes side by side.

## Changing the design

* **Another panel.** Set `H_RES` and `V_RES` on the top. The DRFB address
  width follows.
* **Another refresh rate or link.** Set `RATE_NUM/RATE_DEN` to the ratio of
  pixel rate to link rate. For example, 4K at 120 Hz needs 22.6/25.92. A
  ratio of 1 or more means the link can no longer burst faster than the panel
  reads.
* **Another chunk size.** Set `BANK_WORDS` (pixels per DC buffer half).
