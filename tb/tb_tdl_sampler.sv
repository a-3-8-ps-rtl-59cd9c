// tb_tdl_sampler -- checks that the flip-flop column copies the full
// 160-bit line state on every rising clock edge and holds it in between.
// Random data change twice per period, before and after the falling edge;
// each output is compared with the value the bench stored at the preceding
// rising edge.
`timescale 1ps / 10fs
module tb_tdl_sampler;
  localparam int TAPS = 160;
  logic clk = 1'b0;
  logic [TAPS-1:0] d, q, exp_q;
  int checks = 0, failures = 0;

  tdl_sampler dut (.clk(clk), .d(d), .q(q));

  always #3200 clk = ~clk;

  function automatic logic [TAPS-1:0] rnd();
    logic [TAPS-1:0] v;
    for (int i = 0; i < TAPS; i += 32) v[i +: 32] = $urandom;
    return v;
  endfunction

  initial begin
    #100_000_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    d = rnd();
    for (int c = 0; c < 100; c++) begin
      @(posedge clk);
      exp_q = d;
      #1000;
      checks++;
      if (q !== exp_q) begin failures++; $display("cycle %0d: q differs from sampled d", c); end
      d = rnd();   // changes between edges must not reach q
      #1000;
      checks++;
      if (q !== exp_q) begin failures++; $display("cycle %0d: q changed between edges", c); end
      #2000;       // past the falling edge
      checks++;
      if (q !== exp_q) begin failures++; $display("cycle %0d: q changed at the falling edge", c); end
      d = rnd();   // the value the next rising edge must take
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
