// tsync_pkg -- constants and types shared by the multichannel transceiver
// clock-synchronization design.
//
// The system holds eight transceiver channels: one master, whose parallel
// clock samples the time-to-digital converter (TDC), and seven slaves whose
// phase interpolators are steered until each slave's parallel clock sits at a
// preset skew from the master clock. The channel count, the 160-tap delay
// line and the 6.4 ns parallel-clock period follow the paper; the hit
// division ratio, the averaging depth and the controller's wait times are this
// design's own choices (the paper does not give them).
`timescale 1ps / 10fs
package tsync_pkg;

  // Eight GTH channels, one of them the master.
  localparam int unsigned N_GTH    = 8;
  localparam int unsigned N_SLAVES = N_GTH - 1;

  // Tapped delay line: 160 carry8 cells, one tap per cell, ~40.7 ps each.
  localparam int unsigned TDL_TAPS   = 160;
  localparam real         TAP_PS     = 40.7;
  // Parallel clock period of the master (TDC sampling clock).
  localparam real         CLK_PS     = 6400.0;
  // Minimal phase-interpolator step.
  localparam real         PI_STEP_PS = 3.125;

  // Own choices.
  localparam int unsigned HIT_DIV     = 8;     // hit period in slave clock cycles
  localparam int unsigned AVG_LOG2    = 6;     // 64 TDC codes averaged per decision
  localparam int unsigned SETTLE_CYC  = 64;    // wait after a mux switch
  localparam int unsigned PI_WAIT_CYC = 16;    // wait after a PI step
  localparam int unsigned MAX_STEPS   = 4096;  // give-up limit per channel

  // Width of a tap count (0..TDL_TAPS).
  function automatic int unsigned code_width(int unsigned taps);
    return $clog2(taps + 1);
  endfunction

  // Controller states.
  typedef enum logic [2:0] {
    ST_IDLE,     // waiting after reset
    ST_SELECT,   // point the clock mux at the current slave
    ST_SETTLE,   // let the hit from the newly selected clock settle
    ST_MEASURE,  // accumulate 2**AVG_LOG2 TDC codes
    ST_DECIDE,   // compare average with target, step PI or lock
    ST_PI_WAIT,  // let the PI step take effect
    ST_NEXT,     // move on to the next slave
    ST_DONE      // all slaves processed
  } sync_state_e;

endpackage
