# Picosecond skew alignment of FPGA serial transceivers with a carry-chain TDC

Multi-gigabit transceivers in an FPGA (for example the GTH channels of a
Kintex UltraScale device) each divide their serial clock down to a parallel
clock with a divider of their own. After every power-up or reset these
dividers start in an arbitrary state, so channels fed from the same reference
clock and running at the same rate still come up with a random skew between
them. Applications that need several phase-locked pulse trains, such as the
optical source of a quantum key distribution transmitter at 2.5 Gb/s, cannot
live with that.

The design in this repository removes the skew in a closed loop. Every
transceiver has a phase interpolator (PI) in its clock path that can move the
channel's clocks in steps of about 3.125 ps. One channel is the **master**;
its parallel clock is the reference. For each other channel (a **slave**), a
time-to-digital converter (TDC) built from the FPGA's carry chain measures
where the slave's clock edge falls relative to the master clock, and the
slave's PI is stepped, one minimal step at a time, until the measured skew
equals a preset target within a tolerance. Because each slave can have its
own target, the same loop also sets arbitrary, reproducible offsets between
channels. The whole procedure runs again after every reset.

The approach follows the paper "A 3.8 ps RMS time synchronization implemented
in a 20 nm FPGA" (Xie, Li, Shen, Liao, Peng). This RTL is an independent
implementation of the system that paper describes; where the paper is silent
the choices made here are listed below.

```
             slave_clk[0..6]                        clk_master (master parallel clock)
                  |                                        |
             +---------+   sel_clk   +-------------+  hit  |   +-----+   +---------+   +-----------+
             | clk_mux |------------>| hit_divider |------>+-->| tdl |-->| sampler |-->|  encoder  |--+
             +---------+             +-------------+           +-----+   +---------+   +-----------+  |
                  ^ sel                                             \______________ tdc _________/     | code,
                  |                                                                                   | valid
             +------------------------------------------------------------------------------------+  |
             |                         sync_controller                                            |<-+
             +------------------------------------------------------------------------------------+
                  | pi_step[6:0], pi_dir  -> PI controllers of the slave transceivers
```

## Measuring skew with one TDC

The transceivers are not part of this RTL; their parallel clocks come in as
`clk_master` and `slave_clk[N_SL-1:0]`. All of them run at the same
frequency: a 6.4 ns period (156.25 MHz) in the configuration shown.

**Slave side.** `clk_mux` picks one slave clock. `hit_divider` runs a
modulo-8 counter on that clock and produces a square wave, `hit`, four cycles
high and four low, from a flip-flop. Each rising edge of `hit` therefore
follows a rising edge of the slave clock by a fixed clock-to-output delay:
the hit carries the slave's phase but arrives only once every eight periods.
The low half-period gives the delay line time to empty, so each hit edge
enters an empty line.

**Master side.** `hit` runs down `tdl`, a chain of 160 carry cells of about
40.7 ps each (6.5 ns in total, just longer than one clock period). On every
rising edge of `clk_master`, `tdl_sampler` copies the 160 tap states into
flip-flops. A hit edge that entered the line *t* ps before the clock edge has
set roughly the first *t* / 40.7 taps, so the sample is a thermometer code
whose length is the time from the slave-derived edge to the master edge.
Because the line covers a full period, every possible phase lands inside it
and no coarse counter is needed.

**Encoder.** Clock skew across the sampling flip-flops makes real samples
imperfect: a zero may appear inside the run of ones with a stray one just
past the edge ("bubbles"). `tdc_encoder` therefore counts the ones instead of
searching for the first zero; a bubble moves a one from below the edge to just
above it and leaves the count unchanged. The count is formed in two pipeline
stages (16-tap partial counts, then their sum). A sample holds a rising hit
edge when its count is non-zero and the previous sample's count was zero;
only such samples raise `valid`. `code` is then the edge position in bins.
Falling edges are ignored.

Consequences worth knowing:

* The code is a phase within one period. An edge less than one cell before
  the clock edge is not yet in the line; it is reported one clock later as a
  code near 157 (a full period further). Skews near 0 and near one period
  therefore alias to each other, and targets should stay well inside the
  range (the tests use 15 to 100 bins).
* The result appears on the second clock edge after the sampling edge, one
  result every eight clocks.
* Delaying a slave makes its hit arrive later, which *shortens* the time to
  the next master edge: a larger PI delay gives a smaller code.

## The alignment loop

`sync_controller` runs on the master clock. After reset it visits the
enabled slaves in index order. For each slave:

1. **Select.** Set the mux, wait `SETTLE_CYC` (64) cycles so that runt pulses
   from the switch and old samples have left the pipeline.
2. **Measure.** Add up 2^`AVG_LOG2` = 64 TDC codes. The sum is the average
   code as a fixed-point number with six fraction bits, in units of one bin.
3. **Decide.** Compare with the slave's `target` (same format).
   * |average - target| <= `tol`: the slave is `locked`; go to the next one.
   * otherwise, if `MAX_STEPS` (4096) steps have already been spent: mark it
     `failed` and go on.
   * otherwise pulse `pi_step[slave]` for one cycle with `pi_dir` = 1 (delay
     the slave) when the average is too large and 0 (advance it) when it is
     too small, wait `PI_WAIT_CYC` (16) cycles and measure again.
4. After the last slave, raise `done` and stay there until the next reset.

Each decision moves the slave by a single minimal PI step, as in the paper.
A full period of correction is 6400 / 3.125 = 2048 steps, well inside the
step limit. One step costs about 16 + 64 x 8 = 530 clocks (3.4 us), so a
slave that starts 100 ps off locks in about 0.1 ms.

### Why averaging gives resolution finer than a bin

A single code only tells which 40.7 ps bin the edge fell in. The average of
many codes is finer only because the edge position jitters from sample to
sample. With timing noise comparable to a bin the average code is close to
*t* / 40.7 - 0.5 and changes smoothly as the PI moves the slave in 3.125 ps
steps. The loop then settles where the average crosses the target, to a
fraction of a bin. Without noise the average would sit on an integer and the
loop would lock anywhere inside a 40.7 ps bin (or hunt between two bins if
the target is a half-integer). The paper does not say how its 40.7 ps TDC
reaches a 3.8 ps RMS result; averaging, and the jitter it relies on, are
this design's reading.

With 64 codes per decision the scatter of the average is at most 0.5/8 =
0.06 bin (2.5 ps). The tolerance must be wider than half a PI step (0.04 bin)
or the loop can never land inside it; the tests use `tol` = 8/64 bin (5 ps).
With 16 codes per decision the system test saw lock errors of up to 28 ps.

### Setting targets

`target[i]` and `tol` are unsigned numbers of bins with `AVG_LOG2` fraction
bits: a target of 75 bins is `75 << 6`. To aim at a skew *d* ps between the
slave's hit edge and the following master edge, use about
(*d* / 40.7 - 0.5) x 64, or better calibrate the bin width of the real line
(for instance by a code-density test with a hit unrelated to the clock). The
delay from the slave clock pin through the divider flip-flop and the routing
into the line is a constant offset; it cancels between slaves that share the
path and has to be calibrated out when an absolute skew matters.

## Modules

| file | what it is | clock / latency |
|---|---|---|
| `rtl/tsync_pkg.sv` | shared constants (channel count, taps, bin size, waits) and the controller state type | - |
| `rtl/clk_mux.sv` | N-to-1 clock multiplexer, constant 0 for out-of-range selects | combinational |
| `rtl/hit_divider.sv` | modulo-DIV counter, registered 50 % duty output | selected slave clock |
| `rtl/tdl.sv` | **behavioural model** of the 160-cell carry chain | delays only |
| `rtl/tdl_sampler.sv` | 160 flip-flops, no reset | master clock, 1 cycle |
| `rtl/tdc_encoder.sv` | ones counter, rising-edge detection | master clock, 2 cycles |
| `rtl/tdc.sv` | `tdl` + `tdl_sampler` + `tdc_encoder` | valid 2 edges after sampling |
| `rtl/sync_controller.sv` | the alignment state machine | master clock |
| `rtl/tsync_top.sv` | the system; reset synchroniser | master clock |

Top-level ports of `tsync_top`: `clk_master`, `slave_clk[N_SL]`, `rst_n`
(asynchronous, active low, released on the master clock), `ch_en[N_SL]`,
`target[N_SL]`, `tol`; outputs `pi_step[N_SL]`, `pi_dir`, `sel`,
`locked[N_SL]`, `failed[N_SL]`, `done`, `skew_avg` (latest average) and the
raw `tdc_code`/`tdc_valid` for monitoring.

`pi_step`/`pi_dir` are a neutral request format: one pulse per minimal step.
A real build maps them onto the transceiver's PI control ports (on UltraScale
GTH, the TX phase-interpolator PPM controller); that mapping depends on the
transceiver configuration and is not included. The request is issued in the
master clock domain.

Parameters (defaults in brackets): `N_SL` [7], `TAPS` [160], `TAP_PS` [40.7,
model only], `HIT_DIV` [8], `AVG_LOG2` [6], `SETTLE_CYC` [64], `PI_WAIT_CYC`
[16], `MAX_STEPS` [4096].

## What is modelled, not built

* **The carry chain.** The delay line is an FPGA primitive placed in one
  column, not logic that can be written portably. `tdl.sv` models it with 160
  equal delays of 40.7 ps. The measured line is far from uniform (bins from
  about 13 to 92 ps, wider where it crosses clock regions); a real build
  instantiates CARRY8 cells with fixed placement and should calibrate the bin
  widths. Synthesis of `tdl.sv` gives wires, not a delay line.
* **The transceivers.** Phase interpolator, clock divider and PI controller
  are inside the vendor's transceiver macro. `tb/gth_channel_model.sv`
  stands in for one channel in simulation: a 6.4 ns clock whose phase is
  drawn at random on reset, moves 3.125 ps per PI step and carries +/-20 ps
  uniform jitter per edge (the jitter level is a modelling choice).

## Choices not taken from the paper

The block structure, the 160-tap carry-chain TDC, the master/slave roles, the
clock mux and divider, the preset target with a tolerance, single minimal PI
steps and the rerun after every reset follow the paper. The following are
this design's own:

* the ones-counting encoder and the zero-then-non-zero rule for the edge
  sample (the paper only asks for an encoder that suppresses bubbles);
* a divide ratio of 8 for the hit;
* averaging 64 codes per decision and the fixed-point target format;
* settle and PI wait times, the step limit with a `failed` flag, the
  channel-enable mask, and visiting the slaves one after another in index
  order;
* the sign rule (average above target: delay the slave); the error is not
  taken modulo the clock period;
* a single sampling rank, as drawn, with no extra metastability rank;
* a two-flop reset synchroniser in the top level;
* no compensation of the line's non-uniform bins; the paper's improvements
  through several chains or subdividing the carry8 cell are not built.

## Simulation

All files use `timescale 1ps/10fs`. With Verilator 5:

```
verilator --binary --timing -Wno-fatal --top-module tb_tsync_full \
    rtl/tsync_pkg.sv -y rtl -y tb tb/tb_tsync_full.sv
./obj_dir/Vtb_tsync_full
```

Replace `tb_tsync_full` with any testbench below. Every bench checks its
block against values it works out itself. It ends with
`TB_RESULT checks=N failures=M` and has a watchdog.

| testbench | what it shows |
|---|---|
| `tb_clk_mux` | every select value with random inputs, out-of-range select |
| `tb_hit_divider` | period, duty cycle and edge timing for DIV = 8 and 4 |
| `tb_tdl` | tap *k* switches at (*k*+1) x 40.7 ps, for both edges |
| `tb_tdl_sampler` | capture on the rising edge only |
| `tb_tdc_encoder` | 300 edges at random positions, most with a bubble pair; one result each, correct value and latency |
| `tb_tdc` | hit edges placed at known times before the clock give code = floor(*t*/40.7) with the right latency; an uncorrelated hit gives one code per edge spread over the line |
| `tb_sync_controller` | loop against a numeric plant: steps up, steps down, gives up at the step limit, skips a disabled slave, locks within tolerance |
| `tb_tsync_top` | whole system, 3 slaves, reduced waits: lock from both sides, give-up, skipped slave, rerun after reset; counts each of these |
| `tb_tsync_full` | whole system at default parameters, 7 slaves with targets 15, 25, ..., 75 bins, three resets |
| `tb_code_density` | code-density test of the converter: 20 000 hits unrelated to the clock; bin widths, DNL, INL |
| `tb_two_channel_sync` | default system with one slave aimed at 306.5 ps, 25 resets; mean, spread and span of the final skew |

In `tb_tsync_full` every slave locked in every run. Over the 21 locks the
error of the true skew against its lock point was 4.6 ps RMS, 8 ps at most.
The paper reports 3.8 ps RMS and a 20 ps span on hardware. In
`tb_two_channel_sync`, one slave aimed at 306.5 ps and re-aligned after 25
resets ended at a mean of 305.8 ps with 5.0 ps standard deviation and a
16.4 ps span. The paper's hardware figures for the same kind of test are
306.5 ps mean, 3.8 ps RMS and a 20 ps span. The agreement depends on the
jitter assumed in the channel model, so take it as a check of the loop, not
as a prediction for silicon. `tb_code_density` finds 156 whole bins of
40.70 ps average with DNL below 0.01 LSB. The hardware line's DNL reaches
1.3 LSB, which this uniform model cannot show. Each of these simulations
takes under a minute.
