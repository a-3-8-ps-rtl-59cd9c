// hit_divider -- divides the selected slave clock into the TDC hit signal.
//
// A modulo-DIV counter runs on the selected slave clock. The registered
// output is high for the first DIV/2 counts and low for the rest, so the hit
// is a square wave of period DIV slave cycles whose rising edge always leaves
// a flip-flop on a rising edge of the slave clock. Its phase relative to the
// master clock therefore equals the slave-to-master clock skew plus a
// constant clock-to-output delay, which is what the TDC measures. Dividing
// the clock, rather than feeding it straight in, gives the TDC a single
// edge per delay-line length and room between hits. The ratio DIV is this
// design's choice; the paper only says the clock is divided.
//
// Interface: clk (selected slave clock), rst_n (asynchronous, active low),
// hit. Timing: hit rises one clock after the counter wraps.
`timescale 1ps / 10fs
module hit_divider #(
  parameter int unsigned DIV = tsync_pkg::HIT_DIV   // even, >= 2
) (
  input  logic clk,
  input  logic rst_n,
  output logic hit
);
  localparam int unsigned CW = (DIV > 2) ? $clog2(DIV) : 1;

  logic [CW-1:0] cnt, cnt_next;

  always_comb cnt_next = (cnt == CW'(DIV - 1)) ? '0 : cnt + 1'b1;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cnt <= CW'(DIV - 1);
      hit <= 1'b0;
    end else begin
      cnt <= cnt_next;
      hit <= (cnt_next < CW'(DIV / 2));
    end
  end

  initial assert (DIV >= 2 && DIV % 2 == 0) else $error("hit_divider: DIV must be even and >= 2");
endmodule
