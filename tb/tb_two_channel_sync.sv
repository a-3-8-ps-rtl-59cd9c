// tb_two_channel_sync -- repeatability of the alignment between two
// channels, the system at its default parameters with one slave enabled.
// The slave is aimed at a skew of 306.5 ps between its hit edge and the next
// master clock edge: target = (306.5 / 40.7 - 0.5) x 64 = 450. The system is
// reset 25 times; each reset gives the slave a new random phase within
// +/-150 ps of that point and the loop must lock it again. The bench
// collects the final true skew of every run and checks its mean (within
// 5 ps of 306.5 ps), its standard deviation (below 8 ps) and its span (below
// 40 ps). The other six slave clock inputs are held low and disabled.
`timescale 1ps / 10fs
module tb_two_channel_sync;
  localparam int  N    = 7;
  localparam int  AW   = 14;
  localparam real P    = 6400.0;
  localparam real SKEW = 306.5;
  localparam int  RUNS = 25;

  logic clk_master = 1'b0, rst_n = 1'b1, gth_rst = 1'b0;
  logic [N-1:0] slave_clk, pi_step, locked, failed;
  logic [N-1:0] ch_en = N'(1);
  logic [N-1:0][AW-1:0] target;
  logic [AW-1:0] tol = AW'(8);
  logic [AW-1:0] skew_avg;
  logic [2:0]    sel;
  logic          pi_dir, done, tdc_valid;
  logic [7:0]    tdc_code;
  real           phase0;
  int checks = 0, failures = 0;

  initial #1 rst_n = 1'b0;   // asynchronous reset acts before the first clock
  always #(P / 2.0) clk_master = ~clk_master;

  assign target[0] = AW'(450);
  for (genvar i = 1; i < N; i++) begin : g_off
    assign target[i]    = '0;
    assign slave_clk[i] = 1'b0;
  end

  // Master edges at k*P + P/2: lock point phase = P/2 - SKEW = 2893.5 ps.
  gth_channel_model #(.PH_LO(2744), .PH_HI(3044)) u_slave (
    .rst(gth_rst), .step_clk(clk_master), .pi_step(pi_step[0]), .pi_dir(pi_dir),
    .pclk(slave_clk[0]), .phase(phase0));

  tsync_top dut (
    .clk_master(clk_master), .slave_clk(slave_clk), .rst_n(rst_n), .ch_en(ch_en),
    .target(target), .tol(tol), .pi_step(pi_step), .pi_dir(pi_dir), .sel(sel),
    .locked(locked), .failed(failed), .done(done), .skew_avg(skew_avg),
    .tdc_code(tdc_code), .tdc_valid(tdc_valid)
  );

  initial begin
    #200_000_000_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    real s, sum, sum2, lo, hi, mean, sd;
    sum = 0.0; sum2 = 0.0; lo = 1.0e9; hi = -1.0e9;
    for (int r = 0; r < RUNS; r++) begin
      rst_n = 1'b0;
      gth_rst = 1'b1;
      repeat (4) @(posedge clk_master);
      gth_rst = 1'b0;
      repeat (2) @(posedge clk_master);
      @(negedge clk_master) rst_n = 1'b1;
      wait (done);
      @(posedge clk_master);
      checks++;
      if (!locked[0] || failed[0] || locked[N-1:1] != '0) begin
        failures++;
        $display("run %0d: locked %b failed %b", r, locked, failed);
      end
      s = P / 2.0 - phase0;
      sum  += s;
      sum2 += s * s;
      if (s < lo) lo = s;
      if (s > hi) hi = s;
    end
    mean = sum / RUNS;
    sd   = $sqrt(sum2 / RUNS - mean * mean);
    $display("two-channel alignment over %0d resets: mean %0.1f ps, std %0.2f ps, span %0.1f ps",
             RUNS, mean, sd, hi - lo);
    checks++;
    if (mean < SKEW - 5.0 || mean > SKEW + 5.0) begin failures++; $display("mean off target"); end
    checks++;
    if (sd > 8.0) begin failures++; $display("spread too large"); end
    checks++;
    if (hi - lo > 40.0) begin failures++; $display("span too large"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
