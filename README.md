# Digital back-end of a 64-channel mixed-signal front-end for high-capacitance gaseous detectors

Gaseous detectors such as GEM, MicroMEGAS and MWPC chambers look to the
electronics like a current pulse in parallel with a large capacitance, from tens
to hundreds of pF. The chip this RTL belongs to reads 64 such electrodes. Each
channel has an analogue front-end: a regulated common-gate pre-amplifier with 8
gain settings, then two shapers. A fast CR-RC shaper (about 60 ns peaking) is used
for timing, and a slow complex-pole shaper (about 170 ns) for charge. Each shaper
has a leading-edge discriminator. Behind them the channel has a mixed-signal
back-end that turns every hit into a digital record: channel number, time stamp
and charge. All of it runs from one 200 MHz clock.

This repository holds the **digital part of that back-end** as synthesizable
SystemVerilog. It also holds a behavioural model of the analogue TDC banks, so
the logic can be simulated against realistic analogue timing. The analogue
circuits themselves (pre-amplifier, shapers, baseline holder, discriminators,
DACs, the TAC and S&H capacitors, pads) are not here. The top module brings
their signals out as ports.

## How a hit becomes a time stamp

Time is measured in two parts:

* **T-coarse**: a global 16-bit counter advanced by the 200 MHz clock
  (`coarse_counter`). Every channel sees it.
* **T-fine**: the time between the discriminator edge and the *next* rising
  clock edge, at most 5 ns. A Time-to-Amplitude Converter (TAC) measures it: a
  25 uA current discharges a 0.5 pF capacitor for exactly that interval.

T-fine is digitised with the Wilkinson method:

1. The TAC voltage is copied onto a 2 pF capacitor C_TDC. The switch stays
   closed for 20 clocks so that the on-resistance has settled.
2. C_TDC is recharged with a current 32 times smaller than the TAC current.
3. A 10-bit counter counts clock cycles until a comparator reports that C_TDC
   is back at its reference.

C_TDC is 4 times larger than C_TAC and the current is 32 times smaller, so the
rundown lasts 128 times the TAC time. One count is therefore 5 ns / 128 = 39 ps.
An edge that comes d ns before the clock edge gives the code floor(128·d / 5 ns).
The time of the edge is `coarse·5 ns − fine·5 ns/128`.

A conversion takes `fine + 24` clocks in this RTL. That is 1 clock of
capture-to-start, 20 of transfer, `fine+1` of rundown and 2 of reset. Hits come
at random times, so each TDC has **four** TACs and uses them in round-robin
order. A hit that arrives while a conversion is running goes to the next free
TAC. A hit that arrives while all four are occupied is dropped, and the channel
pulses `evt_lost`.

## The two TDCs of a channel, and the two charge modes

Each channel has two TDC banks, each with its own Wilkinson ADC:

| bank | buffers | used for |
|------|---------|----------|
| T (timing) | 4 TACs | time of the leading edge |
| E (energy) | 4 TACs and 4 Sample-and-Hold cells | charge |

Each channel is configured for one of two charge-measurement modes:

* **ToT (time over threshold)**: the E bank's TAC times the *trailing* edge of
  the discriminator. The pulse length, trailing minus leading time stamp, gives
  the charge, but not linearly: it needs a calibration curve.
* **S&H (sample and hold)**: from the leading edge on, an S&H cell follows the
  slow shaper output and keeps its peak for `sh_window` clocks. The cell is then
  held, and the E bank's Wilkinson ADC converts the peak. The resulting code is
  linear in charge.

Each edge has its own branch selection. `lead_sel` picks the fast or slow
discriminator for the leading edge (which also starts the S&H window).
`trail_sel` picks the fast or slow discriminator for the ToT trailing edge. By
default both use the fast branch.

### Slot pairing: the part that needs care

The T bank and the E bank each have four buffers. This design ties them
together: **buffer k of the T bank and buffer k of the E bank always hold the
same event** (called *slot k* below). `channel_ctrl` keeps three ring pointers
over the slots:

* `wr_ptr`: the slot that the next leading edge will take. A slot is allocated
  only if it is free; otherwise the hit is dropped.
* `e_ptr`: the oldest slot still waiting for its E-side capture. That capture is
  the trailing edge in ToT mode, or the end of the window in S&H mode.
* `rd_ptr`: the oldest slot. Once both TDC controllers report `done` for it, the
  record is offered on `evt/evt_valid/evt_ready`. When the record is taken, the
  slot is freed.

A slot therefore stays occupied from the leading edge until the record has left
the channel. Back-pressure from the readout fills the four slots, and new hits
are then dropped: the same drop rule as for busy TACs. The conversion order
inside each TDC controller is the round-robin slot order, so records leave a
channel in arrival order.

The analogue banks need to know which buffer the next start belongs to, so the
channel drives `arm` (one-hot) for each bank. The TAC start signal `trig` is
high from the discriminator edge until the clock edge that samples it. That is
the interval the TAC integrates. In a real chip this pulse is made by a
dedicated latch cell. Here it is the combinational `edge & ~edge_q` of the
sampled discriminator.

## Module map

| file | role |
|------|------|
| `rtl/fe_pkg.sv` | constants (64 channels, 4 buffers, 16/10-bit codes, 20-clock transfer), configuration words, event record, TDC switch bundle |
| `rtl/coarse_counter.sv` | 16-bit T-coarse counter |
| `rtl/tdc_ctrl.sv` | one TDC: latches T-coarse per buffer; FSM IDLE → XFER (S2, 20 clk) → RUNDOWN (S3, count) → RESET; results held until released |
| `rtl/channel_ctrl.sv` | one channel: edge selection and detection, slot allocation and drop, ToT/S&H sequencing, two `tdc_ctrl`, record output |
| `rtl/readout_arbiter.sv` | round-robin merge of the 64 channel records into a 16-deep FIFO, one record per clock |
| `rtl/config_regs.sv` | 64 channel words and one global word, written and read through an address/data port |
| `rtl/test_pulse_ctrl.sv` | calibration trigger: internal (a `tp_fire` command stretched to `tp_len` clocks) or external, gated by each channel's `tp_en` |
| `rtl/fe_asic_top.sv` | top: everything above; analogue signals as ports |
| `rtl/tac_adc_model.sv` | **behavioural model only** (not synthesizable): TACs, S&H cells, C_TDC and comparator of one bank |

### Configuration words

The channel word is `fe_pkg::ch_cfg_t` (45 bits), LSB-aligned on `cfg_wdata`, at
addresses 0..63. Its fields, MSB first:

* `gain[2:0]`: gain switches s1..s3, 8 settings.
* `bias1[5:0]`, `bias2[4:0]`, `bias3[5:0]`: pre-amplifier bias DAC codes.
* `vth_t[5:0]`, `vth_e[5:0]`: thresholds of the timing and energy
  discriminators.
* `qmode`: 0 for ToT, 1 for S&H.
* `lead_sel`, `trail_sel`: 0 for the fast branch, 1 for the slow branch.
* `sh_window[7:0]`: S&H window length in clocks.
* `tp_en`, `ch_en`: test-pulse enable and channel enable.

The global word is `glb_cfg_t`, at address 64. Its fields:

* `disc_vb1`, `disc_vb2`: discriminator bias codes.
* `vhyst`: hysteresis code.
* `tp_amp`: test-pulse amplitude code.
* `tp_src`: 0 for the internal trigger, 1 for the external one.
* `tp_len`: internal test-pulse length in clocks.

Both words come out of the top unchanged (`ch_cfg`, `glb_cfg`) for the analogue
blocks. After reset every channel is disabled, in ToT mode, with both edges on
the fast branch and an 8-clock window.

### Event record

`fe_pkg::event_t` is 59 bits wide:

* `ch_id[5:0]`: channel number.
* `qmode`: the mode the event was taken in.
* `time_s`: `{coarse[15:0], fine[9:0]}` of the leading edge.
* `energy`: `{coarse[15:0], fine[9:0]}`. Its meaning depends on the mode:
  * ToT: the trailing-edge time stamp.
  * S&H: `fine` is the ADC code of the held peak, and `coarse` is the T-coarse
    value when the cell was held. That is `sh_window + 1` clocks after the
    leading-edge capture.

### Timing summary

All clocks are 5 ns.

| quantity | value |
|---|---|
| edge sampled → T-coarse latched | same clock edge |
| capture → result `done` (one TDC) | `fine + 24` clocks |
| S2 (transfer) high | 20 clocks |
| reset of buffer and C_TDC | 2 clocks |
| record accepted by arbiter → visible on `out_valid` | 1 clock |
| readout throughput | 1 record per clock |

## What comes from the chip description and what was chosen here

Taken from the description of the chip:

* 64 channels.
* 200 MHz clock.
* 16-bit global T-coarse counter.
* 4 TACs per TDC, used round robin, with hits dropped when all four are busy.
* 20-clock transfer.
* 10-bit Wilkinson ADC and the 128× interpolation, with its current and
  capacitor ratios.
* Reset of both capacitors after the conversion.
* ToT and S&H modes, with fast/slow selection of both edges.
* 4 S&H cells sharing the E-bank ADC with the TACs.
* A configurable S&H window started by a discriminator.
* The widths of the gain, bias, discriminator and test-pulse codes.
* Internal or external test-pulse trigger with per-channel enable.

Chosen here, because the description is silent:

* The slot pairing of T and E buffers, and the in-order release.
* Slots staying busy until their record is read.
* Single flip-flop edge sampling, with no metastability cells.
* The 2-clock reset and saturation of the fine count at 1023.
* S&H hold one clock after the window ends.
* The layout of the event record and the configuration words, and their reset
  values.
* The address/data configuration port, standing in for the undocumented
  FPGA/LVDS protocol.
* The 6-bit width of the two threshold codes. One gain code serves both
  branches' gain stages, and Bias3 is set per channel.
* The round-robin readout arbiter and its 16-deep FIFO.
* The test-pulse length field.
* The S&H transfer slope (1 code per mV) in the behavioural model.

The description says two different things about when a TAC is cleared: "while"
C_TDC converts, and also once the conversion is complete. This RTL clears the
TAC after the conversion.

Known limitations:

* In ToT mode a slot waits for its trailing edge indefinitely. If the trailing
  edge is taken from a branch whose discriminator never fires for that hit, the
  channel loses one of its four slots until reset.
* Nothing in the RTL models the analogue performance (dynamic range, noise,
  jitter, linearity).

## Verification

Every block has a self-checking testbench in `tb/`. Each prints
`TB_RESULT checks=N failures=M` and carries a watchdog.

| testbench | checks |
|---|---|
| `coarse_counter_tb` | reset, increment, hold, wrap at 65536 |
| `tdc_ctrl_tb` | latched coarse and fine codes against a comparator that answers after N clocks; 20-clock S2; `fine + 24` latency; round-robin order; saturation; reset pulses; release |
| `channel_ctrl_tb` | both modes, slow-branch selection, S&H peak inside and outside the window, drop of a fifth hit, in-order delivery under back-pressure, disabled channel |
| `readout_arbiter_tb` | rotation order, one record per clock, per-channel order and completeness with a stalling consumer |
| `config_regs_tb` | write/read of all 65 words, reset values |
| `test_pulse_ctrl_tb` | pulse length, source selection, gating |
| `tac_adc_model_tb` | 128× rundown, S&H peak hold, resets |
| `fe_asic_top_tb` | whole chip at full size |

`fe_asic_top_tb` runs the whole chip at its default size, 64 channels, with the
behavioural bank on both branches of every channel. It runs these phases:

1. All 64 channels are hit together: half in ToT mode, half in S&H mode, and one
   with slow-branch edges.
2. One channel gets six quick hits: four are stored and two are dropped.
3. An internal test pulse is sent.
4. An external test pulse is sent.

The consumer stalls at random, and for a while long enough to fill the readout
FIFO. Every record is compared bit for bit with one predicted from the stimulus
times. The testbench counts how often each mechanism occurred (ToT, S&H, slow
lead, drop, readout contention, FIFO full, back-pressure, internal and external
test pulse) and fails if any of them never did.

To run a testbench with Verilator 5:

    verilator --binary --timing --assert -Irtl rtl/fe_pkg.sv rtl/*.sv \
        tb/fe_asic_top_tb.sv --top-module fe_asic_top_tb -Mdir obj
    obj/Vfe_asic_top_tb

Put `rtl/fe_pkg.sv` first and list it once. The other testbenches build the same
way with their own top module. `fe_asic_top_tb` takes a few minutes to compile,
because it has 128 instances of the timed behavioural model. It then simulates in
well under a second.

## Changing the design

* **Channel count**: `fe_asic_top #(.N_CH(n))`. The configuration address
  widens automatically, and the channel ID field is `fe_pkg::CH_ID_W`.
* **Buffers per TDC, code widths, transfer length**: set them in `fe_pkg`
  (`N_BUFFERS`, `COARSE_W`, `FINE_W`, `XFER_CYCLES`). `tdc_ctrl` and
  `channel_ctrl` take `N_BUF`, `XFER_CYCLES` and `RESET_CYCLES` as parameters.
* **Readout depth**: `FIFO_DEPTH` on the top or on `readout_arbiter`.
