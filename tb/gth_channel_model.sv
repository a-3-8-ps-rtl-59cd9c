// gth_channel_model -- behavioural stand-in for one transceiver channel's
// clocking, for simulation only.
//
// The real channel derives its parallel clock from the shared reference
// through a phase interpolator and a clock divider; the divider starts in a
// random state after every reset, so the parallel clock comes up with a
// random phase. This model produces a PERIOD_PS clock whose rising edges sit
// at k*PERIOD_PS + phase (+ jitter): `phase` is drawn uniformly from
// [PH_LO, PH_HI] ps on every rising edge of `rst`, and each PI step request,
// sampled on `step_clk`, moves it by STEP_PS (pi_dir = 1: later). Each edge
// carries independent jitter uniform over +/-JIT_PS, which stands for the
// clock and delay-line noise of the real circuit.
`timescale 1ps / 10fs
module gth_channel_model #(
  parameter real PERIOD_PS = 6400.0,
  parameter real STEP_PS   = 3.125,
  parameter int  PH_LO     = 0,
  parameter int  PH_HI     = 6399,
  parameter int  JIT_PS    = 20
) (
  input  logic rst,
  input  logic step_clk,
  input  logic pi_step,
  input  logic pi_dir,
  output logic pclk,
  output real  phase
);
  real next_t;

  initial begin
    pclk  = 1'b0;
    phase = real'(PH_LO);
    forever begin
      real jit;
      jit    = (JIT_PS > 0) ? real'(int'($urandom % (200 * JIT_PS + 1)) - 100 * JIT_PS) / 100.0 : 0.0;
      next_t = ($floor(($realtime - phase) / PERIOD_PS) + 1.0) * PERIOD_PS + phase + jit;
      if (next_t <= $realtime + 1.0) next_t += PERIOD_PS;
      #(next_t - $realtime);
      pclk = 1'b1;
      #(PERIOD_PS / 2.0);
      pclk = 1'b0;
    end
  end

  always @(posedge rst) phase = real'(PH_LO + int'($urandom % (PH_HI - PH_LO + 1)));

  always @(posedge step_clk) if (pi_step) phase += pi_dir ? STEP_PS : -STEP_PS;
endmodule
