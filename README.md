# A digital-based potentiostat around a floating-inverter DIGOTA

A chronoamperometric potentiostat has to hold the reference electrode of an
electrochemical cell at a fixed potential and report the current the cell's
working electrode draws. The design here does both with almost no analog
circuitry. It uses a *digital operational transconductance amplifier*
(DIGOTA) built from a floating-inverter (FI) input stage. Its output stage is
never biased: it is either off or pushes a fixed current packet of one clock
period into the counter electrode. The loop closes through the cell, so the
amplifier alone decides, clock by clock, whether the cell needs a packet of
`ip` (pull-up) or `in` (pull-down). The streams of these decisions, `outP`
and `outN`, are the measurement. Over a window of `M` clock periods, if
`p` and `n` are the numbers of periods in which each stream was active, the
faradaic current is

    i_f = (p * ip - n * in) / M                                    (1)

One LSB is one packet per window, `ip / M`. Nothing needs an ADC, a
transimpedance resistor or a biased amplifier. The silicon this describes ran
from a 0.3 V supply at 1.65 nW with a 50 kHz clock and read currents from
about 0.6 nA to 650 nA. It was paired with a mesoporous platinum
microelectrode for glucose sensing.

This repository holds SystemVerilog for the parts of that system that are
logic:
- the sampling flip-flops and the decode network of the amplifier;
- a counter for `p` and `n`;
- an estimator that evaluates (1).

It also holds behavioural models of the analog parts, so that the whole loop
can be simulated with Verilator:
- the FI input stage, the common-mode compensator and the buffers;
- the trimmable output stage;
- the cell (testbench only).

## The loop

```
            +-------------------------------- FI-DIGOTA (fi_digota) ----------------------------+
            |                                                                                    |
 Vref ----->| vinp   fi_input_stage_model     sync_logic_network         output_stage_model      |
            |        FI stage M1-M4,   vd1 -> DFF1 -vq1-+-> voutP (M5) -->  +ip while voutP low   |--> iout --> CE
 RE ------->| vinn   C1/C2, buffers    vd2 -> DFF2 -vq2-+-> voutN (M6) -->  -in while voutN high  |
            |            ^ i_cm                         |                   cal_p, cal_n (8 bit)  |
            |        cm_compensator_model <--- Mx gate / My gate                                  |
            |        (Vcmp, Mx, My, M7-M10, Ca, Cb)                                               |
            +----------------------------------------------------------------------------------+
                                              |  outP / outN streams
                                              v
                                  pulse_counter  (p, n over M periods)
                                              v
                                  faradaic_estimator  (p*ip - n*in)/M
```

`db_potentiostat` is the top: the amplifier with Vref on its + input and the
reference electrode on its − input, plus the counter and the estimator. The
cell is outside the top. The top takes `vre` in and gives `iout` out as `real`
ports, so a cell model, a resistor model or a real-number source can be
connected.

## The four states of the amplifier

Everything the amplifier does comes from the pair `(vq1, vq2)`. These are the
two buffer outputs `vd1`, `vd2`, sampled on the rising edge of `clk`.

| (vq1, vq2) | `dff_state_e`  | meaning                           | drive                                  |
|------------|----------------|-----------------------------------|----------------------------------------|
| (0,0)      | `ST_BOTH_LOW`  | input sign not yet known          | Mx on: Vcmp → Vdd, FI nodes ramp **up**   |
| (1,1)      | `ST_BOTH_HIGH` | input sign not yet known          | My on: Vcmp → 0, FI nodes ramp **down**  |
| (0,1)      | `ST_POSITIVE`  | vd = v+ − v− > 0 (RE below Vref)  | voutP low: M5 sources `ip`               |
| (1,0)      | `ST_NEGATIVE`  | vd < 0 (RE above Vref)            | voutN high: M6 sinks `in`                |

The decoding in `sync_logic_network` is four gates:

    voutp_n   = vq1 | ~vq2      // low only in (0,1)
    voutn     = vq1 & ~vq2      // high only in (1,0)
    mx_gate_n = vq1 | vq2       // low only in (0,0)
    my_gate   = vq1 & vq2       // high only in (1,1)

In the two mixed states neither Mx nor My conducts. The Vcmp node then
floats and keeps its value, so the nodes go on ramping the same way. This is
what lets the slower node catch up and end the mixed state. Assertions in the
module check that M5 and M6 are never on together, and that Mx and My are
never on together.

## Voltage to time, and why the amplifier oscillates

This is the least obvious part of the design, and the one that depends most on
the analog model.

The two FI output nodes `vib1` and `vib2` sit on small capacitances `Cfi`.
The common-mode network feeds them a current `Icm`. The current charges them
while Vcmp is high, because the capacitor Cb, precharged to Vdd, supplies
the stage through M8. It discharges them while Vcmp is low, because Ca,
precharged to ground, takes over through M9. The differential input adds
`± gm·vd/2`:

    Cfi · dvib1/dt = s·Icm − gm·vd/2 − (vib1 − Vdd/2)/ro
    Cfi · dvib2/dt = s·Icm + gm·vd/2 − (vib2 − Vdd/2)/ro          s = +1 (Vcmp high), −1 (low)

With `vd = 0` both nodes ramp together. Both buffers switch in the same
period, so the state jumps from (0,0) straight to (1,1) and back. This is the
self-oscillation, and it drives no output current. With `vd > 0`, `vib2` rises
faster and `vib1` falls faster. The buffers therefore switch at different
times, and for the periods in between the flops read (0,1), which turns on the
pull-up. The time difference is proportional to `vd`, and the flops round it
to whole clock periods. That rounding is the quantisation noise of the design.
The loop around the cell shapes it out of the signal band. The reverse holds
for `vd < 0`.

With the default values (Table II of the source: gm = 61 nS, ro = 89 GΩ,
Cfi = 1.9 fF, Icm = 0.8 pA at Vdd = 0.4 V), a few microvolts of input already
give whole periods of drive. The open-loop test shows:

| vd      | (0,0) | (1,1) | (0,1) | (1,0) | periods |
|---------|-------|-------|-------|-------|---------|
| 0       | 250   | 250   | 0     | 0     | 500     |
| +2 µV   | 500   | 500   | 1000  | 0     | 2000    |
| +8 µV   | 167   | 166   | 1667  | 0     | 2000    |
| −8 µV   | 167   | 166   | 0     | 1667  | 2000    |

**What this model does not reproduce.** The model has:
- no buffer delay;
- no buffer hysteresis;
- no charge sharing with Ca and Cb.

Because of this, a ramp reverses one clock period after it crosses the
threshold. The model's self-oscillation period is therefore about two clock
periods, 40 µs at 50 kHz. The measured circuit's period is 103 µs. The
loop's function does not depend on this period, but its noise spectrum and
its quantisation step per oscillation do. The model is a functional
stand-in, not a noise model.

## Reading the current

`pulse_counter` opens a window on `start`. Each of the next `window_len` (M)
rising edges adds one to `p` if `voutp_n` is low, and one to `n` if `voutn`
is high. On the M-th edge `done` pulses, and `p_count`, `n_count` and
`m_count` take the totals. They hold until the next window ends. Both counts
are counts of clock periods, not of edges.

The counters are 18 bits wide. They hold a 5 s window at 50 kHz
(M = 250,000). The 20 ms window (M = 977), enough for a settled estimate, is
1/256 of that.

`faradaic_estimator` takes `p`, `n`, `M` and the two output currents, given
as integer codes `ip_code` and `in_code` in any unit. It returns
`(p·ip − n·in)/M` in the same unit, truncated toward zero. The numerator is
formed in 51 bits. Its magnitude is then divided by a restoring divider that
produces one quotient bit per clock, and the sign is put back. `valid` pulses
51 edges after the estimator's start edge. In the top, the estimator starts
on the edge after `acq_done`, so `if_valid` follows `acq_done` by 52 clocks.
With fA codes, 32 bits cover the largest output current (255 × 10.16 nA).

The source designs the amplifier only. It records `outP`/`outN` on an
oscilloscope and evaluates (1) in software. Putting the counter and the
divider next to the amplifier is a choice made here.

In closed loop the amplifier dithers, so a window usually contains both
`p` and `n` pulses, even for a positive current. Only the difference, as in
(1), is meaningful.

## Output-stage calibration

The pull-up and the pull-down strengths are set separately by the two 8-bit
words `cal_p` and `cal_n`. The model treats the words as binary weighted:
`ip = cal_p · IP_UNIT` and `in = cal_n · IN_UNIT`. The default unit current
is 8.1 nA, the source's Ion at 0.4 V. The largest current the loop can
hold is `ip`: the pull-up on in every period. Choose `cal_p` so that `ip`
exceeds the expected current. The resolution is `ip/M`, so a larger `cal_p`
widens the range at the cost of a coarser LSB.

Both currents are constant while on. The source describes them as nearly
constant. The weighting of the bits is not given there.

## Timing and interface conventions

- `clk` is the sampling clock (50 kHz in the source). All logic is on its
  rising edge. The flops have an asynchronous active-low reset `rst_n` that
  clears them to (0,0). The reset is this design's addition.
- `tick` advances the analog models by `TSTEP` seconds (default 1 µs) per
  rising edge. The testbenches use 20 ticks per clock period. Drive `tick`
  and `clk` from the same timebase, and make `TSTEP` equal to the tick period.
- The input stage starts with both nodes 10 mV below threshold; the CM
  compensator starts with Vcmp high.
- `iout` is positive out of the amplifier into the counter electrode.
- Signals that cross into the logic (`vd1`, `vd2`) are sampled directly, as
  in the source. There is no synchroniser.

## What was checked

Every module has a self-checking testbench that prints
`TB_RESULT checks=N failures=M`.

| testbench                 | what it shows |
|---------------------------|---------------|
| `tb_sync_logic_network`   | sampling on edges only; the four-state table above; reset |
| `tb_fi_input_stage_model` | ramp slopes ≈ ±Icm/Cfi; crossing order for ±vd; rails |
| `tb_cm_compensator_model` | Mx sets and My clears Vcmp at once; Vcmp holds while both are off; i_cm follows Vcmp |
| `tb_output_stage_model`   | iout for random calibration words and all drive combinations |
| `tb_fi_digota`            | open loop: self-oscillation at vd = 0, only outP for vd > 0, only outN for vd < 0, gain |
| `tb_pulse_counter`        | window of exactly M edges; p, n against a reference; start while busy ignored |
| `tb_faradaic_estimator`   | (1) against 64-bit arithmetic; latency 51; full-scale and signed cases |
| `tb_db_potentiostat`      | closed loop at 0, +2, −3 and +40 nA; every mechanism above occurs; estimate within 2 % |
| `tb_db_potentiostat_full` | defaults, one 5 s window (M = 250,000) at 5 nA: estimate within 0.2 % |
| `tb_workloads`            | the source's measured currents, see below |

`tb_workloads` replays the operating points of the source's measurements
with a Randles cell (Rp = 220 MΩ, Cp = 7 nF):
- the six multi-die means, 1.18–502.28 nA;
- 600 pA and 650 nA, the ends of the ferrocyanide range;
- the glucose currents, 2.4–4.4 nA, with `ip` = 4.89 nA and `in` = 10.16 nA.

With 20 ms windows the estimates agree within 1 %, except at 600 pA, which
is 30 LSB and comes out within 3 LSB. With 5 s windows they agree to better
than 0.01 %. Because charge is conserved, the error of a window is bounded by
the change of charge on the cell capacitance during it. This is why long
windows converge so tightly.

## Where this departs from the source

- **Analog parts are models.** The FI stage, the CM network, the buffers and
  the output stage are behavioural models with `real` ports. They are not
  synthesizable. Only `sync_logic_network`, `pulse_counter` and
  `faradaic_estimator` are logic.
- The model's self-oscillation period is about 2 clock periods, not 103 µs
  (see above).
- The only values the source lists are for 0.4 V. The models have no
  supply dependence beyond their parameters, and the 0.3 V and 0.5 V points
  cannot be reproduced from what it gives.
- Binary weighting of the calibration words, the buffer threshold of Vdd/2,
  the ro return to Vdd/2 and constant Icm are choices made here.
- The source's text is inconsistent about which output device "sinks" and
  which "sources". The design follows its loop description and Eq. (1): the
  pull-up M5 sources `ip` into the counter electrode.
- The counting and division of (1) were software in the source and are logic
  here.
- The source's comparison table quotes a 600 pA–50 µA range, but its text
  quotes 600 pA–650 nA. With 8-bit words and the 8.1 nA unit, the model
  reaches 2.07 µA, so the 50 µA end is not covered.

## Simulating

All files are plain SystemVerilog-2017. Compile the package first, then let
Verilator find the rest by module name:

```
verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb +libext+.sv \
    rtl/digota_pkg.sv tb/tb_db_potentiostat.sv --top-module tb_db_potentiostat
./obj_dir/Vtb_db_potentiostat
```

Replace the testbench name to run any other. The closed-loop runs simulate
about 3 s of circuit time per second. The 5 s acquisition takes under 2 s.

To model another operating point, override the parameters of
`db_potentiostat`:
- `VDD`, `GM`, `RO`, `CFI` and `VTH` for the input stage and `ICM` for the
  CM compensator;
- `IP_UNIT` and `IN_UNIT` for the output stage;
- `TSTEP` for the model step.

`tb/potentiostat_bench.sv` shows a top wired to a cell model, with a task
that runs one acquisition.

## Files

- `rtl/digota_pkg.sv`: widths, the state enum, the drive struct
- `rtl/sync_logic_network.sv`: DFF1/DFF2 and the decode gates (logic)
- `rtl/fi_input_stage_model.sv`: FI stage M1-M4, C1/C2, buffers (behavioural)
- `rtl/cm_compensator_model.sv`: Vcmp keeper Mx/My, M7-M10, Ca, Cb (behavioural)
- `rtl/output_stage_model.sv`: trimmable M5/M6 (behavioural)
- `rtl/fi_digota.sv`: the amplifier
- `rtl/pulse_counter.sv`: p and n over a window (logic)
- `rtl/faradaic_estimator.sv`: Eq. (1) (logic)
- `rtl/db_potentiostat.sv`: top
- `tb/echem_cell_model.sv`: Randles cell model
- `tb/potentiostat_bench.sv`: closed-loop harness
- `tb/tb_*.sv`: testbenches
