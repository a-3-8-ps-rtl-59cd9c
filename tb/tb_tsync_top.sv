// tb_tsync_top -- end-to-end test of the synchronization system at reduced
// size (3 slaves, a 64-step limit, short waits; full 160-tap converter).
// One master and three slave channel models supply the clocks; the slaves
// come out of every reset with a random phase and obey the PI step
// requests. Run 1 aligns slave 0 (starting below its target) and slave 1
// (starting above it) and gives slave 2 a start too far away to reach in
// 64 steps, so it must end failed. Run 2, after a second reset, draws new
// phases and disables slave 2. The bench checks the result flags and
// measures each locked slave's true skew against its target; it counts
// every mechanism of the design (mux switches, TDC results, PI steps in
// both directions, locks, give-ups, skipped slaves, reruns after reset) and
// fails any that never happened.
`timescale 1ps / 10fs
module tb_tsync_top;
  localparam int  N     = 3;
  localparam int  AVG   = 6;
  localparam int  CW    = 8;
  localparam int  AW    = CW + AVG;
  localparam real P     = 6400.0;
  localparam real BIN   = 40.7;
  localparam int  MAXST = 64;

  logic clk_master = 1'b0, rst_n = 1'b1, gth_rst = 1'b0;
  initial #1 rst_n = 1'b0;   // a falling edge: the asynchronous reset acts before the first clock
  logic [N-1:0] slave_clk, pi_step, locked, failed, ch_en;
  logic [N-1:0][AW-1:0] target;
  logic [AW-1:0] tol, skew_avg;
  logic [1:0]    sel;
  logic          pi_dir, done, tdc_valid;
  logic [CW-1:0] tdc_code;
  real           phase [N];
  int checks = 0, failures = 0;

  always #(P / 2.0) clk_master = ~clk_master;

  // The master clock rises at k*P + P/2. Slave i's lock point is the phase
  // at which the average code equals target i: the code averages to
  // delta/BIN - 0.5, where delta = (P/2 - phase) mod P is the time from the
  // slave's edge to the next master edge.
  function automatic real wrap(real t);
    return t - P * $floor(t / P);
  endfunction
  function automatic real lock_phase(int i);
    return wrap(P / 2.0 - (real'(target[i]) / real'(1 << AVG) + 0.5) * BIN);
  endfunction

  gth_channel_model #(.PH_LO(160), .PH_HI(280)) u_s0 (
    .rst(gth_rst), .step_clk(clk_master), .pi_step(pi_step[0]), .pi_dir(pi_dir),
    .pclk(slave_clk[0]), .phase(phase[0]));
  gth_channel_model #(.PH_LO(1500), .PH_HI(1600)) u_s1 (
    .rst(gth_rst), .step_clk(clk_master), .pi_step(pi_step[1]), .pi_dir(pi_dir),
    .pclk(slave_clk[1]), .phase(phase[1]));
  gth_channel_model #(.PH_LO(4700), .PH_HI(4800)) u_s2 (
    .rst(gth_rst), .step_clk(clk_master), .pi_step(pi_step[2]), .pi_dir(pi_dir),
    .pclk(slave_clk[2]), .phase(phase[2]));

  tsync_top #(
    .N_SL(N), .AVG_LOG2(AVG), .SETTLE_CYC(16), .PI_WAIT_CYC(4), .MAX_STEPS(MAXST)
  ) dut (
    .clk_master(clk_master), .slave_clk(slave_clk), .rst_n(rst_n), .ch_en(ch_en),
    .target(target), .tol(tol), .pi_step(pi_step), .pi_dir(pi_dir), .sel(sel),
    .locked(locked), .failed(failed), .done(done), .skew_avg(skew_avg),
    .tdc_code(tdc_code), .tdc_valid(tdc_valid)
  );

  // Mechanism counters.
  int n_switch = 0, n_tdc = 0, n_delay = 0, n_adv = 0, n_lock = 0, n_fail = 0;
  int n_skip = 0, n_rerun = 0;
  logic [1:0] sel_q = '0;
  logic [N-1:0] locked_q = '0, failed_q = '0;
  always @(posedge clk_master) begin
    if (sel != sel_q) n_switch++;
    sel_q <= sel;
    if (tdc_valid) n_tdc++;
    if (pi_step != '0) begin
      if (pi_dir) n_delay++; else n_adv++;
    end
    for (int i = 0; i < N; i++) begin
      if (locked[i] && !locked_q[i]) n_lock++;
      if (failed[i] && !failed_q[i]) n_fail++;
    end
    locked_q <= locked;
    failed_q <= failed;
  end

  initial begin
    #20_000_000_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic expect_bit(input logic got, input logic exp, input string what);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("%s: got %b expected %b", what, got, exp);
    end
  endtask

  task automatic check_lock(input int i);
    real err_ps;
    err_ps = phase[i] - lock_phase(i);
    checks++;
    // Tolerance 0.125 bin, plus three standard deviations of a 64-code
    // average (0.19 bin) and one PI step (0.08 bin).
    if (err_ps > 0.45 * BIN || err_ps < -0.45 * BIN) begin
      failures++;
      $display("slave %0d: locked %0.1f ps from its lock point", i, err_ps);
    end
    $display("slave %0d: skew to master %0.1f ps, target %0.1f ps, error %0.1f ps",
             i, wrap(P / 2.0 - phase[i]), wrap(P / 2.0 - lock_phase(i)), err_ps);
  endtask

  task automatic run(input logic [N-1:0] en);
    ch_en = en;
    rst_n = 1'b0;
    gth_rst = 1'b1;
    repeat (4) @(posedge clk_master);
    gth_rst = 1'b0;
    repeat (2) @(posedge clk_master);
    @(negedge clk_master) rst_n = 1'b1;
    wait (done);
    n_rerun++;
    @(posedge clk_master);
  endtask

  initial begin
    tol       = AW'(8);              // 0.125 bin
    target[0] = AW'(75 << AVG);        // lock phase 3200 - 75.5*40.7 = 127 ps, start above it
    target[1] = AW'(38 << AVG);        // lock phase 1633 ps, start below it
    target[2] = AW'(100 << AVG);       // lock phase 5510 ps, start > 64 steps away

    run(3'b111);
    expect_bit(locked[0], 1'b1, "run1 slave0 locked");
    expect_bit(locked[1], 1'b1, "run1 slave1 locked");
    expect_bit(failed[2], 1'b1, "run1 slave2 gave up");
    expect_bit(locked[2], 1'b0, "run1 slave2 not locked");
    check_lock(0);
    check_lock(1);

    run(3'b011);
    expect_bit(locked[0], 1'b1, "run2 slave0 locked");
    expect_bit(locked[1], 1'b1, "run2 slave1 locked");
    expect_bit(locked[2] | failed[2], 1'b0, "run2 slave2 skipped");
    if (!locked[2] && !failed[2]) n_skip++;
    check_lock(0);
    check_lock(1);

    $display("mux switches %0d, TDC results %0d, PI delay steps %0d, PI advance steps %0d",
             n_switch, n_tdc, n_delay, n_adv);
    $display("locks %0d, give-ups %0d, skipped %0d, runs %0d", n_lock, n_fail, n_skip, n_rerun);
    checks++; if (n_switch == 0) begin failures++; $display("no mux switch"); end
    checks++; if (n_tdc    == 0) begin failures++; $display("no TDC result"); end
    checks++; if (n_delay  == 0) begin failures++; $display("no delaying PI step"); end
    checks++; if (n_adv    == 0) begin failures++; $display("no advancing PI step"); end
    checks++; if (n_lock   == 0) begin failures++; $display("no lock"); end
    checks++; if (n_fail   == 0) begin failures++; $display("no give-up"); end
    checks++; if (n_skip   == 0) begin failures++; $display("no skipped slave"); end
    checks++; if (n_rerun  <  2) begin failures++; $display("no rerun after reset"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
