# A 100 ps TDC from four 400 ps samplers (Kintex-7, HGND readout)

A Kintex-7 input serializer (ISERDESE2) in oversample mode looks at a pin four
times per 1.6 ns clock period, so it can tell when an edge arrived only to the
nearest 400 ps. This design gets 100 ps bins without any delay line in the
fabric and without any undocumented trick: every discriminator signal is fed to
**four** such samplers, each behind its own input delay (IDELAY), so that the
four sampling grids are staggered by about 0, 100, 200 and 300 ps. Each line
then reports the edge as a whole number of 400 ps samples, and **the sum of the
four numbers is the edge time in 100 ps units**. The same is done for the
falling edge, and the difference of the two sums is the time over threshold
(ToT), which the detector uses as its amplitude.

The RTL here is the logic of one readout FPGA of the High Granular Neutron
Detector (HGND) of the BM@N experiment: 7 I/O banks × 12 channels = 84 TDC
channels, each with leading-edge time and ToT, plus the per-bank clock phase
alignment and the calibration pulser control. The FPGA primitives themselves
(IBUFDS, IDELAYE2, ISERDESE2, OSERDESE2, MMCME2, BUFIO/BUFG) are not in the RTL;
they meet the logic at the ports of the top module, and the testbenches replace
them by behavioural models.

The design follows the published description of this TDC ("Development of a
100 ps TDC based on a Kintex 7 FPGA for the High Granular Neutron
Time-of-Flight detector for the BM@N experiment"), called "the paper" below.
That text gives the method, the clocking, the tap values and the sizes; the
logic details are this implementation's own, and the section on departures
lists where the two differ.

## Why the sum of four coarse times is a fine time

Let an edge arrive at time `t`. Line `i` is delayed by `d_i` and sampled at
`k·400 ps`; it first sees the new level at sample

    k_i = ceil((t + d_i) / 400 ps)

If the `d_i` are `0, 100, 200, 300 ps` (mod 400), the four values `k_i` step up
one after the other as `t` moves through a 400 ps sample: `t` advances by
100 ps, exactly one of the `k_i` grows by one. Their sum `Σ k_i` therefore grows
by one every 100 ps. The paper's description of the four patterns says the same
thing: with the edge less than 100 ps before a sampling clock edge only one line
has seen it, between 100 and 200 ps two lines, and so on.

The IDELAY tap is 38.8 ps (the IDELAYCTRL reference of 402.7 MHz, which the
board's PLL can make from 125 MHz). The taps used are

| line | taps | delay     | delay mod 400 ps | whole samples removed in logic |
|------|------|-----------|------------------|--------------------------------|
| 0    | 0    | 0 ps      | 0 ps             | shift 1                        |
| 1    | 13   | 504.4 ps  | 104.4 ps         | shift 0                        |
| 2    | 5    | 194 ps    | 194 ps           | shift 1                        |
| 3    | 18   | 698.4 ps  | 298.4 ps         | shift 0                        |

Lines 1 and 3 are one whole sample later than the others after their IDELAY.
Rather than subtract 400 ps from them, the logic delays lines 0 and 2 by one
sample (`tdc_pkg::LINE_SHIFT = {1,0,1,0}`), so all four lines sit inside the
same 400 ps window. A constant offset in all four line times only adds a
constant to the sum, which calibration removes anyway. The residual errors of
the taps (4.4 ps, 6 ps, 1.6 ps) and the 38.8 ps granularity are what make the
bins unequal; the differential non-linearity is measured by calibration (below)
and corrected in software.

A channel uses two differential inputs. The true (O) and complement (OB) outputs
of each input buffer give the four lines; the OB lines arrive inverted and are
flipped back in `tdc_bank` by `INV_MASK`. The default pairing puts lines 0 and 2
(0 and 194 ps) on the first input and lines 1 and 3 (104 and 298 ps) on the
second, so each pair holds a 200 ps step, with lines 2 and 3 on OB outputs.
Which pin goes where is a board matter; change `INV_MASK` to match the wiring.

## Data path of one channel

```
 tdc_q[l] 4b @625 MHz ─ tdc_gearbox ─ tdc_line_align ─ tdc_edge_detect ─┐
        (×4 lines)      8b @312.5 MHz   shift[l] samples  rise/fall,     ├─ tdc_hit_builder ─ hit
                                                          {coarse,pos}   ┘   sum, ToT, veto
```

* **`tdc_gearbox`** joins two 4-sample ISERDESE2 words into one 8-sample vector
  at 312.5 MHz (`clk_div`), so the rest of the logic runs at half the serializer
  clock. A vector covers 3.2 ns; bit 0 is the earliest sample. `clk_int`
  (625 MHz) and `clk_div` must come from one MMCM with aligned rising edges.
* **`tdc_line_align`** delays the sample stream by `shift` whole samples (the
  table above), using a 16-sample window of the last two vectors.
* **`tdc_edge_detect`** finds, in the 9-sample window of the vector plus the
  last sample of the previous one, the first 0→1 step (rising edge) and the
  last 1→0 step (falling edge). An edge time is `{coarse, pos}` in 400 ps units,
  where `pos` (0..7) is the first sample at the new level. Extra steps inside
  one vector (a glitch shorter than 3.2 ns) are merged into one pulse.
* **`tdc_hit_builder`** collects the four line edges of one pulse.

### The hit builder

States: `IDLE → COLLECT → (hit) → VETO → IDLE`.

* The first rising edge on any line opens a hit. All four lines must show a
  rising edge within `EDGE_WIN = 3` vectors, and all four a falling edge
  within `MAX_TOT_CYC = 1024` vectors (3.3 µs). If not, the hit is dropped and
  `err_miss` pulses. A glitch seen by only some lines ends up there.
* Leading time = Σ rise_i, ToT = Σ fall_i − Σ rise_i, both in 100 ps units.
  The sums are formed as `4·t_0 + Σ (t_i − t_0)`, relative to line 0, with
  sign-extended differences, so a coarse-counter wrap inside a hit does not
  matter.
* After a hit the channel ignores new rising edges for `VETO_CYC = 10` vectors
  (32 ns) after the falling edge. This is the paper's guard against comparator
  oscillation after the signal falls. Each ignored rising edge pulses `vetoed`.

The time carried in a hit is `t_lead` = Σ of line times, `COARSE_W+5` bits:
bits `[4:0]` hold the sum of the four 3-bit positions and can exceed 31, so
**`t_lead` is a 100 ps count, not a `{coarse, fine}` bit field**.
For coarse time `c` and positions `p_i`, `t_lead = 32·c + Σ(p_i + shift_i)`.
Relative to the coarse counter there is a fixed pipeline offset of three
vectors (96 counts: gearbox, aligner and edge register). It is the same for
every hit and every channel.

Limits that follow from this structure (this design's, not measured in
hardware):

* A pulse must be long enough for every line to see it, i.e. more than one
  400 ps sample. The testbenches use pulses from 2 ns to 200 ns.
* Two pulses on one channel must be at least the veto (32 ns) plus a few
  vectors apart. Pulses in that window are counted in `vetoed` and dropped.
  Pulses longer than 3.3 µs are dropped as incomplete.

## Bank: coarse time, phase alignment and merge

`tdc_bank` holds 12 channels, with the things they share.

**Coarse counter (`coarse_counter`).** It counts 3.2 ns periods of `clk_div`.
All MMCMs take the 125 MHz White Rabbit clock, so all banks and boards count at
the same rate. A time-sync level from the White Rabbit side (`time_sync`, on
`clk_sys`) is synchronised into each bank. Its rising edge clears the counter.
The counter is 0 three `clk_div` cycles after the sync level rises.

**BUFIO-to-BUFG phase alignment (`phase_align`).** This is the least obvious
part of the design. The ISERDESE2 of a bank are clocked from BUFIO, the local
I/O clock network. The fabric logic that reads their words runs on BUFG clocks
from the same MMCM. Nothing fixes the phase between the two networks, so a
word could be taken while it is changing. The remedy is a loopback in each
bank. An OSERDESE2 on the BUFG clock sends a fixed 4-bit word
(`PATTERN = 4'b0011`), and an ISERDESE2 on the BUFIO clock receives it. The
MMCM's dynamic phase shift moves the BUFG phase:

1. For each of `SCAN_STEPS = 112` steps, wait `SETTLE_CYC = 16` cycles, then
   compare the received word with the pattern for `CHECK_CYC = 64` cycles.
   Record pass if all compare equal. Then step the phase up by one.
   With a 1.25 GHz VCO (an assumption), one MMCM fine step is 1/56 of the
   800 ps VCO period, 14.3 ps. So 112 steps cover one 1.6 ns serializer period,
   and the scan ends where it began.
2. Treat the 112 results as a circle and find the longest run of passes.
   This is the stable range between the two unstable ranges.
3. Step the phase back down to the middle of that run. Raise `locked`, or
   `fail` if no step passed (`win_start`, `win_len` report the window).

Each step is one MMCM PSEN pulse with PSINCDEC giving the direction. The next
step waits for PSDONE; an assertion checks this handshake. The ports
`pa_tx`, `pa_rx`, `pa_ps_*` of the top go to the OSERDESE2, the ISERDESE2 and
the bank's MMCM. Everything in the bank runs on that bank's `clk_div`.
A full scan takes about 112 × 80 cycles plus the steps, some 30 µs.

**Merge (`hit_arbiter`, `sync_fifo`).** Each channel writes its hits into its
own 8-deep FIFO. A round-robin arbiter, starting after the channel served last,
moves one hit per cycle to a valid/ready output and adds the channel number.
A hit that finds its FIFO full is dropped and counted in `hit_lost`. At the
expected HGND load (below 100 kHz per channel, 1.2 Mhit/s per bank) the merge,
which can move 312.5 Mhit/s, is nearly idle. The FIFOs only matter when the
readout stalls.

The hit record (`tdc_pkg::hit_t`, 57 bits) is `{ch[3:0], t_lead[36:0], tot[15:0]}`.

## Calibration

For calibration the board's crosspoint switch (LVCP22) connects every TDC
input to a pulse generator in the FPGA. The generator is an MMCM on a
31.25 MHz output. Its source is either the White Rabbit clock, for pulses
synchronous to the TDC, or a free-running oscillator, for asynchronous pulses.
Its phase can be moved in 12.5 ps steps.

* `pulser_logic` shapes the pulses: while enabled, 5 periods high out of 32
  (160 ns every 1.024 µs), close to the 150 ns of a minimum-ionising signal.
* `cal_ctrl` holds the settings (`sel_async`, `xpoint_cal`, `pulser_en`).
  It steps the pulser MMCM phase by a commanded number of steps in either
  direction and keeps the signed sum in `cal_phase`.

Two measurements use this. The **synchronous time scan** moves the pulser
phase in 12.5 ps steps and records the 100 ps code at each step; each bin's
edges and width can be read off. The **code density test** uses the
asynchronous source; pulses then fall evenly in time, and a bin's width is
`100 ps · M · N_bin / N_total` for `M` bins and `N_total` pulses. Both give
the bin widths (about 20 ps RMS in the paper's prototype). The correction is
applied in software to the `t_lead` codes; there is no correction table in
the RTL. The paper plans to move it into the FPGA later.

## Top module `hgnd_tdc_fpga`

Parameters: `NBANK = 7`, `NCH = 12`, `SCAN_STEPS = 112`, `CHECK_CYC = 64`.

| port group | clock | meaning |
|---|---|---|
| `clk_int[b]`, `clk_div[b]`, `rst_div[b]` | – | 625 / 312.5 MHz clocks of bank `b`, reset synchronous to `clk_div[b]` |
| `clk_sys`, `rst_sys`, `time_sync` | 125 MHz | White Rabbit clock; `time_sync` level clears all coarse counters |
| `clk_pls`, `rst_pls`, `pulse_out` | 31.25 MHz | pulser clock and the calibration pulse to the crosspoint |
| `tdc_q[b][c][l]` | `clk_int[b]` | ISERDESE2 word of line `l`, bit 0 earliest |
| `idelay_tap[b][c][l]` | constant | IDELAY tap value per line (0, 13, 5, 18) |
| `pa_*[b]` | `clk_div[b]` | phase alignment: start, pattern out/in, MMCM PSEN/PSINCDEC/PSDONE, locked, fail, stable window found |
| `hit_valid/ready/data[b]`, `hit_lost[b]` | `clk_div[b]` | one hit stream per bank |
| `err_miss[b]`, `vetoed[b]` | `clk_div[b]` | per-channel strobes: incomplete hit dropped, pulse inside veto |
| `cal_cmd_*`, `cal_*` | `clk_sys` | calibration command (settings + phase steps) and its outputs |

The seven hit streams are where the readout connects. The prototype used
IPbus over Ethernet; here the streams are plain ports. The bring-up order is:
reset, `pa_start` in every bank and wait for `pa_locked`, then `time_sync`.
The hit times of different banks have the same offset only after the sync.

## Where this design departs from the paper

* **Minimum pulse and dead time.** The paper's TDC logic had a 6.4 ns
  minimum pulse and a 9.6 ns dead time, plus a 32 ns veto after the falling
  edge. This hit builder merges edges per 3.2 ns vector and applies the same
  32 ns veto. Its minimum pulse is one sample of every line, and its dead time
  is the pulse plus the veto plus a few vectors. The exact original algorithm
  is not known, so its limits are not reproduced.
* **Choices the paper leaves open:**
  * the hit builder's window and timeout, and its rule for dropping hits;
  * the phase-alignment pattern, step count, check length and the
    longest-run rule;
  * the FIFO depth and the round-robin merge;
  * the pulser period and width, and the calibration command interface;
  * the 32-bit coarse counter and its sync input;
  * the hit record layout;
  * the bit order (bit 0 = earliest sample);
  * the line-to-pin mapping (`INV_MASK`).
* **Direction of the whole-sample correction.** Lines 0 and 2 are delayed by
  one sample; the paper subtracts 400 ps from lines 1 and 3. The two
  differ only by a constant.
* **Not in the RTL:**
  * the vendor primitives and the IDELAYCTRL;
  * the White Rabbit node;
  * the IPbus/Ethernet readout;
  * the crosspoint switch;
  * the calibration analysis (bin-width and DNL correction), which is software.

## Testbenches and how far they go

Every testbench prints `TB_RESULT checks=N failures=M` and stops itself, or is
stopped by its watchdog.

* `tb_tdc_gearbox`, `tb_tdc_line_align`, `tb_tdc_edge_detect`: random words
  against a reference model.
* `tb_tdc_hit_builder`: random four-line edge sets against the sum rule. The
  coarse counter is only 6 bits wide there, so hits often straddle a wrap.
  Also covered: a line that never rises, a pulse that never falls (timeout),
  and pulses inside the veto.
* `tb_tdc_channel` models the front end: pulse edge times in 0.1 ps, the four
  IDELAY delays, and 400 ps sampling. For 250 random pulses it checks:
  * `t_lead` against an independent sum with a fixed 96-count offset;
  * ToT exactly;
  * that the code follows the true time to within one bin;
  * that ringing inside the veto is ignored;
  * that glitches seen by only some lines are dropped.
* `tb_phase_align`: an MMCM/loopback model with a known stable window, also one
  that wraps around the end of the scan. It checks the final phase is the
  window middle and checks the handshake.
* `tb_hit_arbiter`, `tb_coarse_counter`, `tb_pulser_logic`, `tb_cal_ctrl`:
  ordering, fairness and overflow counting; sync timing; pulse timing;
  step counting.
* `tb_tdc_bank` (with `tdc_bank_env` and `mmcm_ps_model`): one bank, 12
  channels, with the front-end model including inverted lines.
* `tb_hgnd_tdc_fpga` runs the full 84-channel FPGA:
  * phase lock in all seven banks, each with a different stable window;
  * time sync;
  * random detector pulses on all channels with readout back-pressure,
    ringing and glitches;
  * a calibration run: crosspoint switched, pulser on, 40 phase steps, with
    every calibration hit checked;
  * a forced FIFO overflow, with the lost count checked.

  Every hit must match an expected pulse at the same offset in every bank.

* `tb_tdc_scans` runs the calibration and resolution measurements on two
  channel cores:
  * the synchronous time scan: 256 steps of 12.5 ps over 3.2 ns;
  * a code density test with 2000 random-phase pulses, using the bin-width
    formula above;
  * a two-channel delay scan, −3..3 ns in 10 ps steps.

  With ideal sampling, the bin widths come out as the taps predict:
  101.6, 104.4, 89.6 and 104.4 ps, a 6 ps RMS spread. The delay scan gives a
  41 ps RMS error for the channel pair, the quantisation limit
  100 ps/√6 = 40.8 ps. Hardware adds tap-delay errors and jitter on top. The
  prototype measured about 20 ps RMS bin-width spread and a 59 ps pair RMS.

Nothing has been run on hardware. The model assumes ideal 400 ps sampling
with no jitter or metastability, so bin-width spread and resolution are not
simulated.

## Simulating

With Verilator 5 (`--timing`), from this directory:

```
verilator --binary --timing --assert -Wno-fatal -y rtl -y tb \
    rtl/tdc_pkg.sv tb/tb_hgnd_tdc_fpga.sv --top-module tb_hgnd_tdc_fpga
./obj_dir/Vtb_hgnd_tdc_fpga
```

Replace the testbench name to run any other one. The package must come first.
The full-FPGA run simulates 66 µs; it compiles in about a minute and runs in
seconds.
Sizes are parameters: `NBANK`/`NCH` on the top, `NCH` and the phase-scan
parameters on `tdc_bank`, `CW` on the channel blocks. The tap table and line
shifts are in `tdc_pkg`; if you change the IDELAY taps, change `LINE_SHIFT` to
match.
