// tdl -- behavioural model of the carry-chain tapped delay line.
//
// BEHAVIOURAL MODEL, not synthesizable logic. In the FPGA the line is 160
// carry8 primitives cascaded through the slices of one column, chosen so
// that the total delay just exceeds the 6.4 ns sampling-clock period; the
// carry output of each carry8 is one tap. Here each cell is a continuous
// assignment with a fixed delay of TAP_PS picoseconds, so tap i follows the
// hit input (i+1)*TAP_PS later. A rising hit edge thus turns the taps to
// ones from tap 0 upwards: the state of the line, captured at a clock edge,
// is a thermometer code whose length is the time since the edge.
//
// The 160 cells and the 40.7 ps average delay are the paper's figures. The
// measured line is non-uniform (wider bins where the chain crosses clock
// regions); this model keeps every cell equal.
//
// Interface: hit (input event), taps[TAPS-1:0] (tap 0 nearest the input).
`timescale 1ps / 10fs
module tdl #(
  parameter int unsigned TAPS   = tsync_pkg::TDL_TAPS,
  parameter real         TAP_PS = tsync_pkg::TAP_PS
) (
  input  logic            hit,
  output logic [TAPS-1:0] taps
);
  assign #(TAP_PS) taps[0] = hit;
  for (genvar i = 1; i < TAPS; i++) begin : g_cell
    assign #(TAP_PS) taps[i] = taps[i-1];
  end
endmodule
