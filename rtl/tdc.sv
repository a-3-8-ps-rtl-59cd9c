// tdc -- carry-chain time-to-digital converter.
//
// The hit signal runs down the tapped delay line (tdl); the master parallel
// clock freezes the line in a column of flip-flops (tdl_sampler); the
// encoder (tdc_encoder) turns the frozen thermometer code into the number of
// taps the hit's rising edge had travelled. With the paper's 160 carry8 taps
// of ~40.7 ps the line spans slightly more than the 6.4 ns clock period, so
// every phase of the hit relative to the clock falls inside it. No coarse
// counter is needed: hit and clock run at related frequencies and only the
// phase inside one period is of interest.
//
// Interface: clk (master parallel clock), rst_n (synchronous), hit,
// code/valid (one result per hit rising edge). Latency: valid is set on the
// second clock edge after the edge that sampled the line.
`timescale 1ps / 10fs
module tdc #(
  parameter int unsigned TAPS   = tsync_pkg::TDL_TAPS,
  parameter real         TAP_PS = tsync_pkg::TAP_PS,
  parameter int unsigned CW     = tsync_pkg::code_width(TAPS)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          hit,
  output logic [CW-1:0] code,
  output logic          valid
);
  logic [TAPS-1:0] taps, sampled;

  tdl #(.TAPS(TAPS), .TAP_PS(TAP_PS)) u_tdl (
    .hit (hit),
    .taps(taps)
  );

  tdl_sampler #(.TAPS(TAPS)) u_sampler (
    .clk(clk),
    .d  (taps),
    .q  (sampled)
  );

  tdc_encoder #(.TAPS(TAPS), .CW(CW)) u_encoder (
    .clk  (clk),
    .rst_n(rst_n),
    .therm(sampled),
    .code (code),
    .valid(valid)
  );
endmodule
