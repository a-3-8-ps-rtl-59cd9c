// tb_tsync_full -- the synchronization system at its default size: seven
// slave channels, the 160-tap converter, 64-code averages and the default
// waits and step limit. Every slave gets its own target skew (15, 25, ...,
// 75 bins, i.e. arbitrary offsets between channels) and comes out of each
// reset with a random phase within +/-100 ps of its lock point. The system is
// reset three times; after each alignment every slave must be locked, none
// failed, and its true skew must lie within the tolerance (0.125 bin) plus
// three standard deviations of the average plus one PI step of the target.
// The bench prints the spread of the final skews over all runs.
`timescale 1ps / 10fs
module tb_tsync_full;
  localparam int  N    = 7;
  localparam int  AVG  = 6;
  localparam int  CW   = 8;
  localparam int  AW   = CW + AVG;
  localparam real P    = 6400.0;
  localparam real BIN  = 40.7;
  localparam int  RUNS = 3;

  logic clk_master = 1'b0, rst_n = 1'b1, gth_rst = 1'b0;
  initial #1 rst_n = 1'b0;   // a falling edge: the asynchronous reset acts before the first clock
  logic [N-1:0] slave_clk, pi_step, locked, failed;
  logic [N-1:0] ch_en = '1;
  logic [N-1:0][AW-1:0] target;
  logic [AW-1:0] tol = AW'(8);
  logic [AW-1:0] skew_avg;
  logic [2:0]    sel;
  logic          pi_dir, done, tdc_valid;
  logic [CW-1:0] tdc_code;
  real           phase [N];
  int checks = 0, failures = 0;

  always #(P / 2.0) clk_master = ~clk_master;

  function automatic real wrap(real t);
    return t - P * $floor(t / P);
  endfunction
  // Master edges at k*P + P/2; the average code is delta/BIN - 0.5.
  function automatic real lock_phase_of(int t_bins);
    return wrap(P / 2.0 - (real'(t_bins) + 0.5) * BIN);
  endfunction

  for (genvar i = 0; i < N; i++) begin : g_slave
    localparam int T  = 15 + 10 * i;
    localparam int LP = int'(P / 2.0 - (real'(T) + 0.5) * BIN);
    assign target[i] = AW'(T << AVG);
    gth_channel_model #(.PH_LO(LP - 100), .PH_HI(LP + 100)) u_gth (
      .rst(gth_rst), .step_clk(clk_master), .pi_step(pi_step[i]), .pi_dir(pi_dir),
      .pclk(slave_clk[i]), .phase(phase[i]));
  end

  tsync_top dut (
    .clk_master(clk_master), .slave_clk(slave_clk), .rst_n(rst_n), .ch_en(ch_en),
    .target(target), .tol(tol), .pi_step(pi_step), .pi_dir(pi_dir), .sel(sel),
    .locked(locked), .failed(failed), .done(done), .skew_avg(skew_avg),
    .tdc_code(tdc_code), .tdc_valid(tdc_valid)
  );

  int n_steps = 0;
  always @(posedge clk_master) if (pi_step != '0) n_steps++;

  initial begin
    #200_000_000_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    real sum = 0.0, sum2 = 0.0, emax = 0.0;
    int  n = 0;
    for (int r = 0; r < RUNS; r++) begin
      rst_n = 1'b0;
      gth_rst = 1'b1;
      repeat (4) @(posedge clk_master);
      gth_rst = 1'b0;
      repeat (2) @(posedge clk_master);
      @(negedge clk_master) rst_n = 1'b1;
      wait (done);
      @(posedge clk_master);
      for (int i = 0; i < N; i++) begin
        real err;
        err = phase[i] - lock_phase_of(15 + 10 * i);
        checks++;
        if (!locked[i] || failed[i]) begin
          failures++;
          $display("run %0d slave %0d: locked %b failed %b", r, i, locked[i], failed[i]);
        end
        checks++;
        if (err > 0.45 * BIN || err < -0.45 * BIN) begin
          failures++;
          $display("run %0d slave %0d: %0.1f ps from its lock point", r, i, err);
        end
        sum  += err;
        sum2 += err * err;
        if (err > emax) emax = err;
        if (-err > emax) emax = -err;
        n++;
      end
      $display("run %0d done at %0.1f ns, %0d PI steps so far", r, $realtime / 1000.0, n_steps);
    end
    $display("final skew error over %0d locks: mean %0.2f ps, rms %0.2f ps, max |err| %0.1f ps",
             n, sum / n, $sqrt(sum2 / n), emax);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
