// tb_code_density -- code-density test of the time-to-digital converter at
// its default size (160 cells of 40.7 ps, 6.4 ns clock). A hit source whose
// period (8 clock periods + 1234.567 ps) is unrelated to the clock places
// its rising edges evenly over all phases of the clock period. Each event
// must give exactly one code. The number of events per code, scaled by
// 6400 ps / events, is the width of that bin. With equal cells every bin up
// to the one that closes the period must be 40.7 ps wide, so the bench
// checks the average bin width, the largest differential non-linearity
// (width / 40.7 - 1) and the largest integral non-linearity (running sum of
// the DNL), and that no code beyond the period appears.
`timescale 1ps / 10fs
module tb_code_density;
  localparam real TAP_PS = 40.7;
  localparam real CLK_PS = 6400.0;
  localparam int  EVENTS = 20000;
  localparam int  TAPS   = 160;

  logic clk = 1'b0, rst_n = 1'b0, hit = 1'b0;
  logic [7:0] code;
  logic       valid;
  int hist [TAPS + 1];
  int n_codes = 0;
  int checks = 0, failures = 0;

  tdc dut (.clk(clk), .rst_n(rst_n), .hit(hit), .code(code), .valid(valid));

  always #(CLK_PS / 2.0) clk = ~clk;

  always @(posedge clk) if (rst_n && valid) begin
    hist[code]++;
    n_codes++;
  end

  initial begin
    #2_000_000_000_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    real w, dnl, inl, max_dnl, max_inl, sum_w;
    int  last, n_bins;
    for (int k = 0; k <= TAPS; k++) hist[k] = 0;
    repeat (4) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;
    repeat (4) @(posedge clk);
    for (int e = 0; e < EVENTS; e++) begin
      #(4.0 * CLK_PS + 617.2835);
      hit = 1'b1;
      #(4.0 * CLK_PS + 617.2835);
      hit = 1'b0;
    end
    repeat (8) @(posedge clk);

    checks++;
    if (n_codes != EVENTS) begin
      failures++;
      $display("%0d events gave %0d codes", EVENTS, n_codes);
    end
    // Bins 1 .. last-1 are whole cells; the last code that occurs is a
    // partial bin where the line passes the end of the period.
    last = 0;
    for (int k = 0; k <= TAPS; k++) if (hist[k] != 0) last = k;
    checks++;
    if (last != int'($floor(CLK_PS / TAP_PS)) + 1) begin
      failures++;
      $display("highest code %0d, expected %0d", last, int'($floor(CLK_PS / TAP_PS)) + 1);
    end
    checks++;
    if (hist[0] != 0) begin failures++; $display("code 0 reported %0d times", hist[0]); end
    max_dnl = 0.0; max_inl = 0.0; inl = 0.0; sum_w = 0.0; n_bins = 0;
    for (int k = 1; k < last - 1; k++) begin
      w     = real'(hist[k]) * CLK_PS / real'(n_codes);
      dnl   = w / TAP_PS - 1.0;
      inl  += dnl;
      sum_w += w;
      n_bins++;
      if (dnl > max_dnl) max_dnl = dnl;
      if (-dnl > max_dnl) max_dnl = -dnl;
      if (inl > max_inl) max_inl = inl;
      if (-inl > max_inl) max_inl = -inl;
    end
    $display("code density: %0d bins, average bin %0.2f ps, max |DNL| %0.3f LSB, max |INL| %0.3f LSB",
             n_bins, sum_w / n_bins, max_dnl, max_inl);
    checks++;
    if (sum_w / n_bins < TAP_PS - 0.4 || sum_w / n_bins > TAP_PS + 0.4) begin
      failures++;
      $display("average bin width off");
    end
    checks++;
    if (max_dnl > 0.1) begin failures++; $display("DNL too large for equal cells"); end
    checks++;
    if (max_inl > 0.5) begin failures++; $display("INL too large for equal cells"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
