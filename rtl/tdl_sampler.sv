// tdl_sampler -- the column of flip-flops that freezes the delay line.
//
// One D flip-flop per tap, all clocked by the master channel's parallel
// clock (the TDC reference clock). On each rising edge the state of the
// whole line is copied to q; that copy is the raw thermometer code the
// encoder works on. The flip-flops have no reset, as in the FPGA fabric,
// because the encoder ignores the first samples after reset. A single rank
// follows the figure of the paper; a real build may add a second rank
// against metastability at the cost of one cycle of latency.
//
// Interface: clk, d[TAPS-1:0] from the line, q[TAPS-1:0]. Latency 1 cycle.
`timescale 1ps / 10fs
module tdl_sampler #(
  parameter int unsigned TAPS = tsync_pkg::TDL_TAPS
) (
  input  logic            clk,
  input  logic [TAPS-1:0] d,
  output logic [TAPS-1:0] q
);
  always_ff @(posedge clk) q <= d;
endmodule
