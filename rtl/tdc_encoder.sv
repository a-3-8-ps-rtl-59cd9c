// tdc_encoder -- thermometer-to-binary encoder with bubble suppression.
//
// The sampled line should read as a run of ones from tap 0 up to the
// position reached by the hit edge, then zeros. Unequal clock arrival at the
// flip-flops breaks this into a code with "bubbles" (isolated zeros inside
// the ones, or ones just past the edge). The encoder counts the ones instead
// of looking for the first zero: a bubble moves a one from below the edge
// to just above it and leaves the count unchanged, so the count is the
// edge position in taps. The paper asks for a bubble-removing encoder but
// does not name the method; the ones counter is this design's choice.
//
// The count is made in two pipeline stages: GROUP-tap partial counts, then
// their sum. A sample holds the hit's rising edge when its count is above
// zero and the count of the sample before was zero (the hit is low for many
// clock periods between events, so the line is empty before each edge).
// Such a sample is reported with `valid`; `code` is then the number of taps
// the edge travelled before the sampling edge, i.e. the time from the hit's
// rising edge to the master clock edge in bins.
//
// Interface: clk, rst_n (synchronous, active low), therm[TAPS-1:0],
// code, valid. Timing: code/valid are set on the second clock edge after the one that
// takes in the sample.
`timescale 1ps / 10fs
module tdc_encoder #(
  parameter int unsigned TAPS  = tsync_pkg::TDL_TAPS,
  parameter int unsigned GROUP = 16,
  parameter int unsigned CW    = tsync_pkg::code_width(TAPS)
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic [TAPS-1:0] therm,
  output logic [CW-1:0]   code,
  output logic            valid
);
  localparam int unsigned NG = (TAPS + GROUP - 1) / GROUP;
  localparam int unsigned GW = $clog2(GROUP + 1);

  logic [NG-1:0][GW-1:0] part;
  logic [CW-1:0]         sum;
  logic [CW-1:0]         prev;

  // Stage 1: per-group ones count.
  always_ff @(posedge clk) begin
    for (int unsigned g = 0; g < NG; g++) begin
      automatic logic [GW-1:0] c = '0;
      for (int unsigned b = 0; b < GROUP; b++)
        if (g * GROUP + b < TAPS) c += GW'(therm[g * GROUP + b]);
      part[g] <= c;
    end
  end

  // Stage 2: total count and rising-edge detection.
  always_comb begin
    sum = '0;
    for (int unsigned g = 0; g < NG; g++) sum += CW'(part[g]);
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      code  <= '0;
      prev  <= CW'(TAPS);   // treat the line as full so the first sample is not taken as an edge
      valid <= 1'b0;
    end else begin
      code  <= sum;
      prev  <= sum;
      valid <= (sum != '0) && (prev == '0);
    end
  end
endmodule
