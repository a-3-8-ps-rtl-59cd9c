// clk_mux -- selects one slave channel's parallel clock for the TDC.
//
// All slave parallel clocks enter one multiplexer and only the one picked by
// `sel` reaches the hit divider, so a single TDC serves every slave in turn.
// In the FPGA this is a clock multiplexer; here it is a plain combinational
// mux. A select value past the last slave gives a constant low output.
// Switching `sel` can produce a runt pulse; the controller therefore waits a
// settle time after every switch before it trusts a measurement.
//
// Interface: clk_in[N] slave clocks, sel, clk_out. No clock of its own,
// zero latency.
`timescale 1ps / 10fs
module clk_mux #(
  parameter int unsigned N  = tsync_pkg::N_SLAVES,
  parameter int unsigned SW = (N > 1) ? $clog2(N) : 1
) (
  input  logic [N-1:0]  clk_in,
  input  logic [SW-1:0] sel,
  output logic          clk_out
);
  always_comb begin
    clk_out = 1'b0;
    for (int unsigned i = 0; i < N; i++)
      if (sel == SW'(i)) clk_out = clk_in[i];
  end
endmodule
