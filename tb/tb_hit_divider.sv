// tb_hit_divider -- checks the hit generator against a reference model.
// After reset the output must be a square wave of period DIV clock cycles,
// high for DIV/2 of them, and it may change only right after a rising clock
// edge. Two instances (DIV = 8 and DIV = 4) are checked for 200 cycles; the
// bench also counts the rising edges and checks their spacing.
`timescale 1ps / 10fs
module tb_hit_divider;
  logic clk = 1'b0, rst_n = 1'b0;
  logic hit8, hit4;
  int checks = 0, failures = 0;

  hit_divider #(.DIV(8)) dut8 (.clk(clk), .rst_n(rst_n), .hit(hit8));
  hit_divider #(.DIV(4)) dut4 (.clk(clk), .rst_n(rst_n), .hit(hit4));

  always #3200 clk = ~clk;

  initial begin
    #100_000_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input logic got, input logic exp, input string what, input int cyc);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("%s: cycle %0d got %b expected %b", what, cyc, got, exp);
    end
  endtask

  initial begin
    int rises8 = 0, last_rise8 = -1;
    logic prev8 = 1'b0;
    repeat (3) @(posedge clk);
    check(hit8, 1'b0, "reset8", -1);
    check(hit4, 1'b0, "reset4", -1);
    @(negedge clk) rst_n = 1'b1;
    for (int c = 0; c < 200; c++) begin
      @(posedge clk);
      #100;   // just after the edge: output already updated
      // Cycle c after reset release: high for the first half of each period.
      check(hit8, ((c % 8) < 4), "div8", c);
      check(hit4, ((c % 4) < 2), "div4", c);
      if (hit8 && !prev8) begin
        if (last_rise8 >= 0) check(1'b1, (c - last_rise8) == 8, "rise spacing", c);
        last_rise8 = c;
        rises8++;
      end
      prev8 = hit8;
      #3000;  // mid-period: no change away from the edge
      check(hit8, ((c % 8) < 4), "div8 stable", c);
    end
    check(1'b1, rises8 == 25, "rise count", 200);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
