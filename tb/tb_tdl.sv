// tb_tdl -- checks the delay-line model: after a rising hit edge at time t0,
// tap i must turn high at t0 + (i+1)*TAP_PS, so halfway between two tap
// times exactly the expected number of taps read one, and they form an
// unbroken thermometer code from tap 0. The falling edge is checked the same
// way. Both the default line and a short one are checked.
`timescale 1ps / 10fs
module tb_tdl;
  localparam int  TAPS   = 160;
  localparam real TAP_PS = 40.7;
  logic hit = 1'b0;
  logic [TAPS-1:0] taps;
  logic [7:0]      taps_s;
  int checks = 0, failures = 0;

  tdl dut (.hit(hit), .taps(taps));
  tdl #(.TAPS(8), .TAP_PS(100.0)) dut_s (.hit(hit), .taps(taps_s));

  initial begin
    #100_000_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [TAPS-1:0] therm(int n);
    logic [TAPS-1:0] v = '0;
    for (int i = 0; i < n && i < TAPS; i++) v[i] = 1'b1;
    return v;
  endfunction

  initial begin
    realtime t0;
    #10000;   // longer than the line: the power-up state has flushed out
    checks++;
    if (taps !== '0) begin failures++; $display("line not empty at start"); end
    t0  = $realtime;
    hit = 1'b1;
    for (int k = 0; k <= TAPS; k++) begin
      #(t0 + k * TAP_PS + TAP_PS / 2 - $realtime);
      checks++;
      if (taps !== therm(k)) begin
        failures++;
        $display("rise: at %0d.5 taps expected %0d ones, got %b", k, k, taps);
      end
    end
    #10000;
    t0  = $realtime;
    hit = 1'b0;
    for (int k = 0; k <= TAPS; k++) begin
      #(t0 + k * TAP_PS + TAP_PS / 2 - $realtime);
      checks++;
      if (taps !== ~therm(k)) begin
        failures++;
        $display("fall: at %0d.5 taps expected %0d zeros, got %b", k, k, taps);
      end
    end
    // Short line, 100 ps cells: 3.5 cells after an edge, 3 taps have moved.
    #10000;
    hit = 1'b1;
    #350.0;
    checks++;
    if (taps_s !== 8'b0000_0111) begin failures++; $display("short line rise: %b", taps_s); end
    #10000;
    hit = 1'b0;
    #350.0;
    checks++;
    if (taps_s !== 8'b1111_1000) begin failures++; $display("short line fall: %b", taps_s); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
