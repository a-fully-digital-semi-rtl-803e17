# Semi-rotational frequency detection for a reference-less bang-bang CDR

A clock-and-data-recovery (CDR) loop built around a bang-bang phase detector
(BBPD) can only pull in a small frequency error. A receiver with no reference
clock therefore needs a frequency detector to bring its VCO close to the data
rate first. The classic rotational frequency detector (RFD) needs quadrature
clocks or 4x oversampling to tell in which quarter of the unit interval (UI)
the clock sits. The semi-rotational frequency detector (SRFD) gets that
information from the BBPD decisions the CDR already makes, with no extra
samplers. It is plain synchronous logic.

This RTL implements the digital part of such a 10 Gb/s receiver: the
demultiplexer after the samplers, the BBPD, the type 2 dispersion-based SRFD
in its coarse and fine modes, the second-order loop filter with its VCO-track
path, and the clock-generator logic that sequences frequency acquisition and
drives the VCO capacitor banks. The analog parts stay outside as ports: the
equaliser, the samplers, the VCO and the phase interpolator.

## The idea: two BBPDs with different thresholds

The signal passes through a lossy channel. There, the zero crossing before a
bit moves with the bits before it. If the two previous bits D0 and D1 are
equal, the signal starts from further away and crosses later. If they differ,
it crosses earlier. A BBPD decision taken at such an edge therefore has one of
two UP/DN thresholds, depending on `D0 xor D1`:

| D0 xor D1 | group | decisions |
|-----------|-------|-----------|
| 1 (D0 != D1) | 1 | UP1 / DN1 |
| 0 (D0 == D1) | 2 | UP2 / DN2 |

Draw the edge-sampling phase as a point on a circle, with one turn per UI.
Each group's threshold is then a line through the centre, and the two lines
are rotated a little against each other. Together they cut the circle into
four states. A single decision fixes only one half-plane. Two successive
decisions from different groups fix the state:

| group-1 decision | group-2 decision | state |
|---|---|---|
| DN1 | DN2 | S1 (top) |
| DN1 | UP2 | S0 (right) |
| UP1 | UP2 | S3 (bottom) |
| UP1 | DN2 | S2 (left) |

With a frequency error, the sampling phase drifts around the circle, and the
states follow it: S1 -> S0 -> S3 -> S2 one way, or the reverse the other way.
Each new state is scored against the previous one: +1 for a clockwise step,
-1 for a counter-clockwise step, 0 for no change. An integrate-and-dump filter
sums the scores. A negative total means the VCO is slower than the data and
gives UP_F. A positive total means it is faster and gives DN_F.

**Type 2.** An edge may give no decision (no data transition), and a pair of
slots may give no state (one side empty, or both from the same group). The
type 2 variant used here does not repeat a missing decision. It does repeat
the last state. So a slot without an estimate scores 0 and does not break the
chain.

**Sign convention.** Which way the states turn for a given frequency error
depends on which group's threshold comes later. That is a property of the
channel. This RTL scores clockwise +1. That convention locks when the crossing
comes later after equal bits, as it does for a low-pass channel. With the
opposite ISI polarity the score sign in `srfd_rot_detect` must be inverted.
Some published drawings of the algorithm use that opposite sign.

## Sampling and data format

The samplers use a 2.5 GHz clock with eight phases 0.5 UI apart (phi0..phi7).
They run at quarter rate: four bits per clock. Data is taken at phi0, phi2,
phi4 and phi6, and edges only at phi1 and phi5. That makes six samplers and
one edge sample every 2 UI. `retimer_demux` captures the six samples on one
clock edge and packs eight clocks into a 48-bit `word_t` for the 312.5 MHz core:

* `data[31:0]`: data bits in time order, `data[0]` oldest;
* `edge_s[15:0]`: edge `j` lies between `data[2j]` and `data[2j+1]`; even `j`
  are phi1 edges, odd `j` are phi5 edges.

The two bits before edge `j` are `data[2j-1]` and `data[2j]`. For a phi1 edge
that is D6 of the previous clock and D0. For a phi5 edge it is D2 and D4.
`bbpd` hands the data on with the previous word's last bit prepended
(`dat[0]`), so the classifier sees both bits for every edge.

The divide-by-8 counter in `retimer_demux` produces `clk_core`, the clock of
all other logic.

## Coarse and fine mode

`srfd` runs two detectors side by side on the same classified decisions:

* **Coarse** uses all 16 edges of a word (phi1 and phi5, 2 UI apart). The
  phase moves half as far between slots, so the capture range is about twice
  as wide.
* **Fine** uses only the 8 phi1 edges (4 UI apart). Any phase mismatch
  between phi1 and phi5 would shift the coarse detector's zero. The fine
  detector is free of that offset.

Each detector is `srfd_state_est`, then `srfd_rot_detect`, then
`integrate_dump`. The state estimator processes the 16 (or 8) slots of a word
in one clock as an unrolled chain. It carries the last slot and the last state
into the next clock. The integrate-and-dump period is 128 core clocks
(409.6 ns): 2048 edge slots in coarse mode, 1024 in fine mode. `long_period`
stretches it to 2^22 clocks (13.4 ms) for open-loop measurement.
`srfd_result_c/f` expose the totals.

## Frequency acquisition sequence

`freq_acq_ctrl` steps through the following; the source of UP_F/DN_F is
chosen by two muxes (coarse/fine select, then acquisition finish):

| step | what happens | UP_F/DN_F source | code moved | duration |
|------|--------------|------------------|------------|----------|
| 1 | DLF reset and held; VCO codes to 6'b100000 / 8'b10000000 | none | - | 1 clock |
| 2 | coarse tuning | coarse SRFD | 6-bit coarse | 128 results = 52.4 us |
| 3 | fine tuning | fine SRFD | 8-bit fine | 512 results = 209.7 us |
| 4 | DLF runs, phase lock; acquisition finish = 1 | VCO-track path | 8-bit fine | until restart |

Each UP_F/DN_F result moves the selected code by one step (`vco_ctrl`); a
higher code means a higher frequency. From the middle code, 128 coarse results
can reach any of the 64 coarse codes, and 512 fine results any of the 256
fine codes. Acquisition therefore takes (128 + 512) x 128 + 3 core clocks,
262.2 us, whatever the initial error. At the end of step 2 the coarse code
dithers around the best code. The fine bank must span a few coarse steps to
absorb that. The end-to-end test assumes five.

`ctle_en` turns the equaliser on `CTLE_DELAY` clocks (100 us) after step 4
begins. The equaliser is kept off during acquisition because the SRFD needs
the channel's ISI to tell the two groups apart.

## Phase loop and VCO-track path

`bbpd` is an Alexander detector. An edge with a data transition around it
gives UP when the edge sample equals the later bit (the clock is late) and DN
when it equals the earlier bit. The net vote of a word (−16..16) drives `dlf`:

    integ     <- integ + vote * 2^KI_SH                 (saturating, 16 bits)
    phase_acc <- phase_acc + vote * 2^KP_SH + integ     (17 bits, wraps)
    phase_code = phase_acc[16:10]                       (7-bit rotator position)

A rising `phase_code` must move the sampling clock earlier. `integ` is the
frequency offset the loop is absorbing; 1024 corresponds to one rotator step
per core clock, about 980 ppm.

Once the phase is locked, the VCO may drift with temperature or supply. A
large `integ` means the rotator has to keep turning, which hurts jitter.
`vco_track` looks at `integ` every 31250 clocks (100 us). Above +`THRESH` it
sends one UP_F to the fine code, below −`THRESH` one DN_F. The VCO thus
follows slow drifts without the phase loop letting go.

## Modules

| file | role |
|------|------|
| `srfd_pkg.sv` | `samp_t`, `word_t`, `pd_t`, `pstate_t`, `updn_t` and word sizes |
| `retimer_demux.sv` | retimer register, 6:48 demux, clk_s/8 core clock |
| `bbpd.sv` | 16 bang-bang decisions and net vote per word, 1 clock latency |
| `srfd_classifier.sv` | D0 xor D1 split into groups 1 and 2 (combinational) |
| `srfd_state_est.sv` | type 2 state estimation over N_SLOTS slots per clock |
| `srfd_rot_detect.sv` | rotation score sum (combinational) |
| `integrate_dump.sv` | integrate-and-dump, UP_F/DN_F sign, optional long period |
| `srfd.sv` | classifier plus coarse and fine detectors |
| `dlf.sv` | 2nd-order loop filter and rotator code |
| `vco_track.sv` | 100 us threshold check of the integral register |
| `freq_acq_ctrl.sv` | steps 1–4 and CTLE enable |
| `vco_ctrl.sv` | coarse/fine VCO code registers |
| `srfd_cdr_top.sv` | everything wired together, with the source muxes |

Every default parameter carries the value the design uses: a 128-clock
integrate-and-dump period, 2^7 coarse and 2^9 fine results, a 31250-clock
track period, 6- and 8-bit VCO codes with start codes 32 and 128, and a
2^22-clock long period.

## Where this RTL chooses for itself

The following are not fixed by the algorithm description and were chosen here:

* the word bit order, the retimer as one register, the clock division;
* the BBPD polarity (it does not change the SRFD: swapping UP and DN maps
  each state onto the opposite one, so the direction of rotation stays the same);
* the rotation sign, which is discussed above, and a score of 0 for a jump to
  the opposite state;
* no UP_F/DN_F when the integrated total is exactly 0;
* linear one-step-per-result code search; the VCO-track path moves the fine code;
* loop-filter gains (alpha = 32, beta = 1 in units of 2^-10 rotator steps),
  widths and the 7-bit rotator resolution;
* the VCO-track threshold (256, about 250 ppm) and using `integ` as its input;
* the 128-clock period (409.6 ns) standing in for 410 ns, so acquisition takes
  262.2 us rather than 262.5 us;
* `CTLE_DELAY`, and clearing each detector as its step begins;
* one clock for all logic: the clock-generator logic (controller and VCO
  codes) runs on the receiver core clock;
* how the phase code reaches the interpolator. The rotator's own code
  format is not modelled: `phase_code` is the wrapped rotator position.

## Simulating

Each block has a self-checking testbench in `tb/` that prints
`TB_RESULT checks=N failures=M`. For example, with Verilator 5:

    verilator --binary --timing --assert rtl/srfd_pkg.sv tb/tb_srfd.sv \
        -y rtl -y tb --top-module tb_srfd
    ./obj_dir/Vtb_srfd

`tb_srfd_cdr_top` runs the whole design at its default parameters against a
behavioural model of everything analog, in about 25 s. The model has a random
10 Gb/s NRZ source, an ISI crossing shift of ±0.12 UI, ±0.03 UI of jitter, six
samplers, a linear VCO (4.68–5.53 GHz over the coarse code, fine range 5
coarse steps) and a phase interpolator. The test goes through acquisition
from +2.2 % (≈ 24 ppm left), phase lock, a +800 ppm and then −800 ppm VCO drift
removed by the track path, and re-acquisition at 9.6 and 11.0 Gb/s after
`restart`. It counts every mechanism and fails if one never occurs.

`tb_srfd_openloop` sweeps the frequency error with the VCO codes ignored. It
reads the coarse and fine SRFD totals, the way the open-loop detector is
characterised, and checks the sign of each. With the model above, 48
periods per point give:

| frequency error (VCO − data) | −30 % | −20 % | −15 % | −10 % | −5 % | −0.5 % | +0.5 % | +5 % | +10 % | +15 % | +20 % | +30 % |
|---|---|---|---|---|---|---|---|---|---|---|---|---|
| coarse total | +177 | 0 | −450 | −791 | −883 | −1702 | +1732 | +706 | +1185 | +1402 | +559 | +289 |
| fine total | +89 | 0 | +293 | −114 | −537 | −1206 | +1145 | +693 | +357 | −124 | −270 | −302 |

The coarse mode has the right sign from −15 % to +20 %. The fine mode, which
sees edges half as often, has it from −10 % to +10 %. At −20 % the clock
period is exactly 5 UI, so the sampling phase repeats every clock and
nothing rotates.

## Limits

* The SRFD's behaviour at a given frequency error depends on the channel. The
  model in the testbenches has one fixed ISI shift. Loss-dependent gain,
  offset and detection range are not reproduced.
* The analog blocks, the transmitter and any test logic are not part of this RTL.
* The 16-slot state-estimation chain is a long combinational path (16 stages
  of small logic) at 312.5 MHz. A pipelined version would split it across clocks.
