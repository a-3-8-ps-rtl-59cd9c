// tb_tdc -- end-to-end check of the time-to-digital converter (delay-line
// model, sampling flip-flops, encoder). A hit edge is placed at a known time
// `delta` before a rising edge of the 6.4 ns sampling clock; the expected
// code is floor(delta / 40.7 ps), the number of cells the edge crossed. The
// result must arrive on the second clock edge after that sampling edge. Random
// delays over the whole clock period are used (those within 1 ps of a cell
// boundary are skipped). A second part runs a free oscillator uncorrelated
// with the clock into the converter, as in a code-density test, and checks
// that every event gives one code and that the codes spread over the line.
`timescale 1ps / 10fs
module tb_tdc;
  localparam real TAP_PS = 40.7;
  localparam real CLK_PS = 6400.0;
  logic clk = 1'b0, rst_n = 1'b0, hit = 1'b0;
  logic [7:0] code;
  logic       valid;
  int checks = 0, failures = 0;
  int cyc = 0;

  tdc dut (.clk(clk), .rst_n(rst_n), .hit(hit), .code(code), .valid(valid));

  always #(CLK_PS / 2) clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    #1_000_000_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int hist_lo = 0, hist_hi = 0, n_dens = 0, n_valid_dens = 0;
    repeat (4) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;
    repeat (4) @(posedge clk);
    for (int t = 0; t < 200; t++) begin
      real delta, frac;
      int exp_code, exp_late, edge_cyc, got_cyc;
      bit got;
      do begin
        delta = 20.0 + ($urandom % 636000) / 100.0;   // 20 .. 6380 ps
        if (t < 4) delta = 20.0 + t * 5.0;           // edges inside the first cell
        frac  = delta / TAP_PS - $floor(delta / TAP_PS);
      end while (frac * TAP_PS < 1.0 || (1.0 - frac) * TAP_PS < 1.0);
      exp_code = int'($floor(delta / TAP_PS));
      exp_late = 0;
      // An edge that has not reached the first cell yet is seen one clock
      // later, a full period further down the line.
      if (exp_code == 0) begin
        exp_code = int'($floor((delta + CLK_PS) / TAP_PS));
        exp_late = 1;
      end
      // Place the hit edge delta before the next rising clock edge.
      @(posedge clk);
      #(CLK_PS - delta);
      hit = 1'b1;
      @(posedge clk);
      #1;
      edge_cyc = cyc;
      got = 1'b0;
      got_cyc = -1;
      for (int w = 0; w < 6; w++) begin
        if (w > 0) begin
          @(posedge clk);
          #1;
        end
        if (valid && !got) begin
          got = 1'b1;
          got_cyc = cyc;
          checks++;
          if (int'(code) != exp_code) begin
            failures++;
            $display("delta %0.2f ps: code %0d expected %0d", delta, code, exp_code);
          end
        end
        if (w == 2) hit = 1'b0;
      end
      checks++;
      if (!got || got_cyc != edge_cyc + 2 + exp_late) begin
        failures++;
        $display("delta %0.2f ps: valid at cycle %0d, expected %0d", delta, got_cyc, edge_cyc + 2 + exp_late);
      end
      repeat (3) @(posedge clk);
    end
    // Code-density style run: hit period unrelated to the clock.
    fork
      begin
        for (int e = 0; e < 400; e++) begin
          #(4 * CLK_PS + 1234.567);
          hit = 1'b1;
          n_dens++;
          #(4 * CLK_PS + 1234.567);
          hit = 1'b0;
        end
      end
      begin
        forever begin
          @(posedge clk);
          #1;
          if (valid) begin
            n_valid_dens++;
            if (code < 80) hist_lo++; else hist_hi++;
          end
        end
      end
    join_any
    disable fork;
    repeat (6) @(posedge clk);
    checks++;
    if (n_valid_dens != n_dens) begin
      failures++;
      $display("density run: %0d events, %0d codes", n_dens, n_valid_dens);
    end
    checks++;
    if (hist_lo < 100 || hist_hi < 100) begin
      failures++;
      $display("density run: codes not spread (%0d low, %0d high)", hist_lo, hist_hi);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
