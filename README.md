# A capsule that knows where it is: RTL for raw-image localization in video capsule endoscopy

A video capsule spends most of its battery on two things: lighting and reading out the image
sensor, and radioing every frame to a receiver worn on the body. For a small-bowel study, though,
everything the capsule sees before the small intestine (the esophagus and the stomach) is of no
use. A capsule that could tell where it is could stay almost dark and silent until it gets there.
It would take a frame only every few seconds and transmit nothing. Once it arrives, it would switch
to the normal frame rate and start transmitting.

This RTL implements the on-chip part of such a capsule. It follows the paper *Smart Video Capsule
Endoscopy: Raw Image-Based Localization for Enhanced GI Tract Investigation* (Bause, Werner,
Palomero Bernardo, Bringmann). The paper's two central ideas are:

1. **Classify the raw Bayer mosaic.** The sensor delivers a 320 x 320 RGGB mosaic, one colour per
   pixel. A small CNN (about 63 k parameters, 8-bit) classifies that mosaic directly as esophagus,
   stomach, small intestine or colon. No demosaicing happens on the capsule.
2. **Smooth the noisy per-frame labels with an HMM.** The organs are the hidden states of a hidden
   Markov model and the CNN labels are its observations. A Viterbi decoder runs over a sliding
   window of the most recent labels, in fixed point, with additions only. It decides when the
   capsule has entered the small intestine. A run of frames full of bubbles or debris, shorter
   than the window, then cannot start the transmission.

The RTL contains the frame pipeline around the CNN. That is the sensor controller, the shared
memory and its interconnect, the HMM decoder, and the sequencer that turns its decision into a
frame rate and the radio's on/off. The CNN accelerator, the RISC-V core, the sensor and the radio
are outside it; see [What is outside the RTL](#what-is-outside-the-rtl).

## Structure

```
                 SPI                       TCDM masters                     L2: 4 banks x 96 KiB
 image sensor <------> naneyec_ctrl ---- m1 --+                             (word-interleaved)
                                              |      +-----------+       +--------+
 RISC-V core (outside) ---------------- m0 ---+----->| tcdm_xbar |------>| sram_sp| x4
 CNN accelerator (outside) ------------ m2 ---+      +-----------+       +--------+  each with its own clk_gate
          ^  gated clock, start/done          |
          |                   vce_sequencer - m3 (reads the class scores)
          |  clk_gate <-- acc_clk_en --/ |  \
          |     |                        |   \-- tx_start / tx_done --> radio (outside)
          |  sram_sp 136 KiB             v
          |  (accelerator's own)   viterbi_decoder  (4-state HMM, window 1..50)
```

| Module | Role |
|---|---|
| `vce_pkg` | organ encoding (0 esophagus, 1 stomach, 2 small intestine, 3 colon), TCDM request/response structs, memory sizes |
| `naneyec_ctrl` | configures the sensor, reads a frame over SPI and stores it in L2 as packed bytes, without the core |
| `tcdm_xbar` | 4 masters to 4 L2 banks, round-robin per bank |
| `sram_sp` | single-port SRAM bank (L2 banks, accelerator SRAM) |
| `clk_gate` | latch-based clock gate: one for the accelerator and its SRAM, one per L2 bank |
| `viterbi_decoder` | quantized sliding-window Viterbi decoder |
| `vce_sequencer` | frame timer, per-frame pipeline, search/screening modes |
| `vce_soc_top` | wires it all together; the outside parts attach through ports |

## The decision: sliding-window Viterbi in fixed point

This is the part that needs the most care, and the part most worth understanding before changing
anything.

**Costs instead of probabilities.** Every probability of the HMM is stored as an unsigned cost
`c = round(-log(p) * scale)` of `COST_W` (8) bits. A product of probabilities becomes a sum of
costs, and "most likely" becomes "cheapest". The decoder therefore needs only adders and
comparators. There are 36 costs:

* `init[s]`: the capsule starts in organ `s`.
* `trans[p][s]`: it moves from organ `p` to organ `s` between two frames.
* `emit[s][o]`: the CNN says `o` while the capsule is in `s`.

They are written through `tbl_we/tbl_sel/tbl_idx/tbl_wdata`:

* `sel 0`: `init[idx[1:0]]`
* `sel 1`: `trans[idx[3:2]][idx[1:0]]`
* `sel 2`: `emit[idx[3:2]][idx[1:0]]`

All costs reset to zero. The scale and the quantization of the trained model are up to the user.
The paper does not publish its HMM parameters.

**Recursion.** For the newest `n` labels `o_0 .. o_{n-1}`, with `n = min(labels so far, win_size)`:

```
d_0(s) = init(s) + emit(s, o_0)
d_t(s) = min_p [ d_{t-1}(p) + trans(p, s) ] + emit(s, o_t)      bp_t(s) = the minimising p
path(n-1) = argmin_s d_{n-1}(s);   path(t-1) = bp_t(path(t))
```

The decoder reports two organs of the cheapest path:

* `first_state = path(0)`, the organ at the oldest frame of the window. The sequencer decides on
  this one.
* `out_state = path(n-1)`, the organ at the newest frame. It is the quickest estimate, available
  at the top as `vit_newest`.

The whole path can be read through `path_idx/path_state`, with index 0 the oldest frame. Ties go
to the lower state index, both in the minimum over `p` and in the final choice.

**Why the oldest frame.** The small intestine counts as reached only when the decoded window lies
in it from its first frame on. A run of misleading labels shorter than the window then cannot
trigger the switch. The price is a delay of about one window, measured in frames, whatever the
frame rate. The paper's delays behave this way: for one study at window 10, the delay was 12,
24, 48 and 96 s at 1, 0.5, 0.25 and 0.125 fps, i.e. 12 frames each time. At window 20 it was
22 frames. The paper does not say which frame it decides on; the oldest one reproduces this
behaviour and the newest one does not (see `tb_hmm_grid`).

**Why a window, and what it costs.** Every new label triggers a fresh decode of the last
`win_size` labels, starting again from `init`. The metrics therefore never grow beyond
`2 * WIN_MAX` maximal costs. The metrics are `COST_W + clog2(2*WIN_MAX+1) + 1` = 16 bits wide, so
no normalisation is needed. A longer window is more robust against runs of bad frames but reacts
later, by one frame per extra frame of window. The paper's grid search covers windows of 10 to 50 and rates of 0.125 to 2 fps. It
recommends 20 frames at 0.25 fps (about 90 % less energy than an ordinary capsule before the small
intestine) and 30 to 40 frames at 0.5 fps when more energy is available. `WIN_MAX` is 50, the
largest window evaluated, and `win_size` chooses the window at run time (clamped to 1..50).

**Example model** (used by the tests):

* Transitions: staying costs 0, moving on by one organ costs 60, anything else costs 255.
* Emissions: a matching label costs 1, a wrong one costs 40.

With this model, one stray "small intestine" label in the stomach costs 40 on the stomach path.
Switching would cost 61, so even the newest frame stays "stomach". Two such labels in a row cost
80 on the stomach path against 62 for switching, so the newest frame moves to the small
intestine. The oldest frame moves only later. Take a window of `W` frames holding `W-k` stomach
labels and then `k` small-intestine labels. A path that is in the small intestine throughout
pays 40 for each stomach label, plus 30 for starting outside the esophagus. A path that switches
pays 60 once. The first is cheaper once `39 * (W-k) < 60`, i.e. when at most one stomach label is
left. A 10-frame window therefore switches at the 9th small-intestine label.

**Timing.** The decoder computes one state per cycle. `out_valid` comes `3 + 4*(n-1) + n` cycles
after the label is accepted: 249 cycles for a full window of 50, or 12.5 us at 20 MHz. `obs_ready`
is low during a decode. The paper runs this step as C code on the core (0.02 ms per frame). Here it
is a small hardware unit with the same arithmetic.

## The frame pipeline: search and screening

`vce_sequencer` is the capsule's policy. The paper's firmware implements it; here it is an FSM. A
down-counter produces one frame tick every `period_low` cycles in **search** mode and every
`period_high` cycles in **screening** mode. For example, at 20 MHz, 80,000,000 cycles give
0.25 fps and 10,000,000 cycles give 2 fps.

Search mode, per tick:

```
cam_start -> (frame in L2) cam_done -> acc_start -> acc_done
          -> read result_addr: four signed bytes, class c in byte c -> arg-max
          -> label into viterbi_decoder -> result
```

If the decided organ (the oldest frame of the window) is the small intestine, the sequencer
latches `si_reached` and restarts the timer
with `period_high`. From then on every tick runs `cam_start -> cam_done -> tx_start -> tx_done`:
the frame is sent, and no inference runs any more. A tick that arrives while a frame is still in
flight is dropped and counted in `skipped`. The frame rate thus saturates at what capture plus
transmission allow, and ticks do not queue up.

`acc_clk_en` is high only in the inference state. The accelerator and its 136 KiB SRAM are
therefore clocked only from `acc_start` until `acc_done` has been seen.

## The sensor controller

The sensor is a 1 mm² NanEyeC with 320 x 320 pixels, RGGB, up to 58 fps. `naneyec_ctrl` takes the
core out of image capture entirely: it sends the sensor's configuration, clocks the frame out, and
writes it to L2 as packed unsigned bytes. Pixel `i` of the mosaic goes to byte `base_addr + i`,
four pixels per 32-bit word, little-endian. The stored image is the raw mosaic, which is what the
CNN classifies.

The paper names only "the camera's generic SPI protocol". The framing used here is therefore this
design's own:

* SPI mode 0, MSB first, SCLK = clk / (2 x `CLK_DIV`).
* Each transfer starts with a 16-bit header. Bit 15 = 1 marks a configuration write; the
  `CFG_WORDS` shadow registers follow on MOSI. Bit 15 = 0 marks a frame read; the sensor then
  shifts 320 x 320 pixels of `PIX_BITS` (10) bits on MISO.
* Each pixel keeps its 8 most significant bits.

Adapting the controller to the real sensor's interface means changing this framing. The packing
and memory side can stay as they are.

A frame read takes `(16 + 102,400 x 10) x 4` = 4,096,064 cycles at `CLK_DIV = 2`. That is 205 ms at
20 MHz, or 10 ms at 400 MHz. The paper measured 12.8 ms per captured frame, which this
readout would reach at about 320 MHz. One packed word may wait for a memory grant. If the next word
completes first, it is dropped and the sticky `overflow` flag is set. With round-robin arbitration
among four masters and a 40-cycle pixel time, this cannot happen in this SoC.

## Memory and interconnect

* L2 is 384 KiB, the chip's size, organised as four banks of 24,576 32-bit words.
* The banks are word-interleaved: byte address bits [3:2] select the bank.
* All four masters use the same address map, with L2 from address 0. Address bits above the
  memory size are ignored.
* The handshake follows the PULP TCDM convention:
  * `req` with `addr/we/be/wdata` is held until `gnt`, which comes in the same cycle when the bank
    is free;
  * `rvalid` with `rdata` follows one cycle later, for writes too.
* Each bank has its own round-robin arbiter, so a waiting master is served within three cycles.
* Each bank has its own clock gate. The crossbar's bank select of the current cycle opens it, so
  a bank's clock ticks only in the cycles in which it is accessed. The gate's latch follows the
  select while the clock is low and holds it while the clock is high. The select therefore only
  has to be valid at the rising edge, like any synchronous input; it comes from the masters'
  registers through the arbiter. Read data stays valid on the bank's
  output until the next access, so the one-cycle read latency is unchanged.

The accelerator's dedicated 136 KiB SRAM (34,816 words) sits behind the clock gate. Its port
leaves the top unchanged. The bank count, the interleaving and the arbitration policy are choices
of this design; the paper gives only the total sizes and names the TCDM interconnect.

## What is outside the RTL

These parts are reached through ports of `vce_soc_top`:

| Part | Why it is not here | Ports |
|---|---|---|
| RISC-V core (PULPissimo) | third-party processor | `host_req/host_rsp` (TCDM master 0); the settings below are plain inputs that its registers would drive |
| UltraTrail CNN accelerator (64 MACs) | comes from earlier work; the paper does not describe its datapath or the CNN's layers | `acc_clk` (gated), `acc_start/acc_done`, `acc_req/acc_rsp` (TCDM master 2), `acc_sram_*` |
| image sensor | off-chip | `spi_*` |
| radio, LEDs, clock generation | analog / off-chip | `tx_start/tx_done` |

The accelerator is expected to leave its four class scores at `result_addr`, as signed 8-bit
values with class `c` in byte `c`. Nothing limits its run time.

## Where this RTL departs from, or goes beyond, the paper

* The Viterbi decoding and the frame-rate policy run in firmware in the paper. Here both are
  hardware, with the arithmetic the paper describes: fixed point, additions only, a window.
* The following are this design's own choices:
  * the cost encoding and the tie rules;
  * the window start-up: with fewer labels than the window, all labels so far are used;
  * the one-way switch to screening, with no inference afterwards;
  * the score format and the dropping of late ticks.
* The paper does not give the rate after detection. The tests use 2 fps, the rate of the baseline
  capsule.
* The SPI framing, the 10-bit pixel depth, the bank organisation and the address map are assumed.
* The HMM costs are loaded at run time. The paper's trained values are not published.
* The paper does not say which frame of the decoded window makes the decision. Here it is the
  oldest one, because that reproduces the paper's delays, which grow with the window. With the
  example costs the lag is `W-1` frames; the paper's study shows about `W+2`.
* Besides the accelerator, the clock gating covers the L2 banks. The core's own gating is
  outside this RTL.

## Verification

Every module has a self-checking testbench in `tb/`. Each ends with
`TB_RESULT checks=N failures=M`:

| Testbench | Checks against |
|---|---|
| `tb_sram_sp` | a shadow copy under random byte-masked traffic; one-cycle latency |
| `tb_clk_gate` | pulse counts and the absence of glitches when the enable changes while the clock is high |
| `tb_tcdm_xbar` | a shadow memory updated in grant order, with four masters; fairness: no request waits 4 cycles or more |
| `tb_viterbi_decoder` | a reference Viterbi (full lattice plus traceback) on random models at windows 1, 3, 10, 20, 50 and 63 (clamped); full paths; the latency formula; on the GI-tract model: outlier suppression, two-label detection of the newest frame, and the worked example above for the oldest frame (a 3-label run ignored, switch at the 9th label) |
| `tb_naneyec_ctrl` | a sensor model: configuration words, every stored byte, the transfer times, overflow when the memory stops granting |
| `tb_vce_sequencer` | periods in both modes, the arg-max including ties, the mode switch, no inference after it, the accelerator clock window, skipped ticks |
| `tb_vce_soc_top` | end to end with 16 x 16 frames (see below) |
| `tb_vce_soc_full` | the same at the top's default parameters (320 x 320 frames); about 75 s of simulation |
| `tb_hmm_grid` | the window-size x frame-rate grid on the decoder (see below) |

The end-to-end benches share `vce_soc_bench`. They use the following behavioural stand-ins, all in
`tb/`:

* `naneyec_model`, the sensor, which tags each frame with its scene;
* `acc_model`, the accelerator, which reads the frame and writes scores;
* a radio model;
* a core port that keeps reading and writing a scratch area.

The scripted passage is:

1. esophagus, stomach, stomach;
2. one misleading small-intestine frame;
3. three stomach frames;
4. small intestine.

The HMM window is 4 frames, to keep the passage short. The bench checks:

* the stored frame bytes;
* that detection happens exactly at frame 10, once the window holds three small-intestine
  frames (`39 * 1 < 60`, see above), and that the misleading frame does not trigger it;
* that no inference runs afterwards;
* transmissions and skipped ticks;
* that the accelerator clock never ticks while it is idle;
* that bank 0's clock ticks exactly once per access to that bank;
* the core-port data.

It counts each mechanism (capture, inference, decode, suppressed outlier, mode switch,
transmission, skipped tick, core-port stall, gated accelerator clock, gated L2 bank clock) and
fails if one never happens.

`tb_hmm_grid` repeats the hyperparameter study on the decoder alone. A synthetic passage is
generated with `$urandom`: 20 esophagus, 800 stomach and 1000 small-intestine frames, recorded at
2 fps. It has label noise:

* false stomach labels in the esophagus;
* false small-intestine bursts of 1-2 frames in the stomach;
* colon bursts in the small intestine.

The passage is subsampled to 2, 1, 0.5, 0.25 and 0.125 fps and decoded with windows 10 to 50.
Feeding stops at the first small-intestine decision, as it does in the sequencer. Every decoder
output is compared with a reference Viterbi, for both the oldest and the newest frame. The bench
prints the detection delay for each of the 25 points:

| window | 2 fps | 1 fps | 0.5 fps | 0.25 fps | 0.125 fps |
|---|---|---|---|---|---|
| 10 | 4 s | 8 s | 16 s | 34 s | 70 s |
| 20 | 9 s | 18 s | 36 s | 74 s | 150 s |
| 50 | 24 s | 48 s | 96 s | 194 s | 390 s |

It checks that a longer window or a lower frame rate always delays the detection more, as in
the paper. No point detects early here, because the bench's noise bursts are short. The paper's
real studies do produce early detections at high frame rates and small windows. Deciding on the
newest frame instead makes the delay independent of the window. On this passage at 2 fps, the
first 2-label burst in the stomach would then start the transmission 382 s early.

The bench also prints the energy spent before the capsule reaches the small intestine. It uses
the paper's per-frame figures: 390.64 uJ to capture, 5.31 uJ for the CNN and the HMM, and 250 uJ
to transmit. Idle power is left out. A capsule that captures and sends every 2-fps frame spends
525 mJ on this passage. Analysing every 2-fps frame on the capsule costs 325 mJ. At 0.25 fps it
costs 41 mJ, and detection is 74 s late with window 20. The energy does not depend on the window
here, because nothing is detected early. That is the paper's trade-off: a lower rate saves
energy, and a longer window adds delay.

What the tests do not cover is the real sensor's and the real accelerator's interfaces. Those are
modelled after this design's own assumptions.

Running a test with Verilator 5:

```
verilator --binary --timing --assert -Wno-fatal --top-module tb_vce_soc_top \
  -y rtl -y tb +libext+.sv -Irtl rtl/vce_pkg.sv tb/tb_vce_soc_top.sv
./obj_dir/Vtb_vce_soc_top
```

Substitute any other testbench name. Verilator has two-state simulation: the testbenches reset or
write everything they read.

## Changing it

* **Sizes.** `vce_soc_top` parameters:
  * `IMG_W/IMG_H`, `PIX_BITS`, `CAM_CFG_WORDS`, `SPI_CLK_DIV` (sensor);
  * `L2_BANK_WORDS`, `ACC_SRAM_WORDS` (memories);
  * `COST_W`, `WIN_MAX` (HMM).

  The frame must fit in L2 at `img_base`, and `IMG_W*IMG_H` must be a multiple of 4.
* **Run-time settings.** `period_low/period_high` (cycles per frame in each mode), `vit_win_size`,
  the HMM cost tables, `img_base`, `result_addr`. Configure the sensor (`cam_cfg_*`) before raising
  `enable`: a configuration request that collides with a capture is served as the configuration.
* **Another sensor interface.** Replace the SPI part of `naneyec_ctrl`. Its memory side (pending
  word, TCDM master) is independent of it.
