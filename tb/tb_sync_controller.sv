// tb_sync_controller -- checks the alignment loop against a numeric plant.
// The bench replaces the transceivers and the TDC with a model: each slave
// has a true skew in ps; once every 8 clocks it returns the code
// floor((skew + noise) / 40.7) of the selected slave, with noise uniform
// over +/-20 ps, and a PI step request moves that slave's skew by -/+3.125 ps
// (pi_dir = 1 delays the slave, which shortens the measured time).
// Three slaves are used, with short waits and a 300-step limit:
//   slave 0 starts 5.5 bins below its target (loop must step up),
//   slave 1 starts 5 bins above its target (loop must step down),
//   slave 2 starts 30 bins away (beyond 300 steps, must end failed).
// A second run with slave 1 disabled must leave it untouched. Checked: the
// locked/failed/done flags, that steps go only to the selected slave and in
// the direction the true skew calls for, and that a locked slave's true skew
// is within the tolerance of its target (allowing the 0.5-bin offset of the
// floor average, the scatter of a 64-code average and one PI step).
`timescale 1ps / 10fs
module tb_sync_controller;
  localparam int  N     = 3;
  localparam int  AVG   = 6;
  localparam int  CW    = 8;
  localparam int  AW    = CW + AVG;
  localparam real BIN   = 40.7;
  localparam real STEP  = 3.125;
  localparam int  MAXST = 300;

  logic clk = 1'b0, rst_n = 1'b0;
  logic [CW-1:0] code = '0;
  logic          code_valid = 1'b0;
  logic [N-1:0]  ch_en;
  logic [N-1:0][AW-1:0] target;
  logic [AW-1:0] tol;
  logic [1:0]    sel;
  logic [N-1:0]  pi_step, locked, failed;
  logic          pi_dir, done;
  logic [AW-1:0] skew_avg;

  real skew [N];
  int  n_steps [N];
  int  n_up = 0, n_down = 0;
  int checks = 0, failures = 0;

  sync_controller #(
    .N_SL(N), .CW(CW), .AVG_LOG2(AVG), .SETTLE_CYC(10), .PI_WAIT_CYC(4), .MAX_STEPS(MAXST)
  ) dut (
    .clk(clk), .rst_n(rst_n), .code(code), .code_valid(code_valid), .ch_en(ch_en),
    .target(target), .tol(tol), .sel(sel), .pi_step(pi_step), .pi_dir(pi_dir),
    .locked(locked), .failed(failed), .done(done), .skew_avg(skew_avg)
  );

  always #3200 clk = ~clk;

  initial begin
    #10_000_000_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Plant: measurement every 8 cycles, PI steps applied immediately.
  int div_cnt = 0;
  always @(posedge clk) begin
    code_valid <= 1'b0;
    div_cnt <= (div_cnt + 1) % 8;
    if (div_cnt == 0 && sel < N) begin
      real noise;
      noise      = (real'($urandom % 4001) / 100.0) - 20.0;
      code       <= CW'(int'($floor((skew[sel] + noise) / BIN)));
      code_valid <= 1'b1;
    end
    for (int i = 0; i < N; i++) if (pi_step[i] && rst_n) begin
      real t_bins;
      t_bins = real'(target[i]) / real'(1 << AVG) + 0.5;
      n_steps[i]++;
      // A step when the true skew is clearly off must point the right way.
      checks++;
      if (i != int'(sel)) begin
        failures++;
        $display("step for slave %0d while slave %0d selected", i, sel);
      end else if ((skew[i] / BIN > t_bins + 1.0 && !pi_dir) ||
                   (skew[i] / BIN < t_bins - 1.0 && pi_dir)) begin
        failures++;
        $display("slave %0d: wrong step direction at skew %0.1f ps", i, skew[i]);
      end
      if (pi_dir) begin skew[i] -= STEP; n_down++; end
      else        begin skew[i] += STEP; n_up++;   end
    end
  end

  task automatic expect_bit(input logic got, input logic exp, input string what);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("%s: got %b expected %b", what, got, exp);
    end
  endtask

  task automatic run(input logic [N-1:0] en);
    for (int i = 0; i < N; i++) n_steps[i] = 0;
    ch_en = en;
    rst_n = 1'b0;
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;
    wait (done);
    @(posedge clk);
  endtask

  initial begin
    tol       = AW'(8);                 // 0.125 bin
    target[0] = AW'((60 << AVG) + 32);  // 60.5 bins
    target[1] = AW'(40 << AVG);         // 40 bins
    target[2] = AW'(100 << AVG);        // 100 bins
    skew[0]   = 55.0 * BIN;
    skew[1]   = 45.5 * BIN;
    skew[2]   = 70.0 * BIN;

    run(3'b111);
    expect_bit(locked[0], 1'b1, "run1 slave0 locked");
    expect_bit(locked[1], 1'b1, "run1 slave1 locked");
    expect_bit(failed[2], 1'b1, "run1 slave2 failed");
    expect_bit(locked[2], 1'b0, "run1 slave2 not locked");
    checks++;
    if (n_steps[2] != MAXST) begin
      failures++;
      $display("slave2 got %0d steps, limit %0d", n_steps[2], MAXST);
    end
    for (int i = 0; i < 2; i++) begin
      real err_bins;
      err_bins = skew[i] / BIN - 0.5 - real'(target[i]) / real'(1 << AVG);
      checks++;
      // tolerance 0.125 + 3 sigma of a 64-code average (0.19) + one step (0.08)
      if (err_bins > 0.45 || err_bins < -0.45) begin
        failures++;
        $display("slave %0d locked %0.3f bins from target", i, err_bins);
      end
      $display("slave %0d: %0d steps, final error %0.3f bins", i, n_steps[i], err_bins);
    end
    checks++;
    if (n_up == 0 || n_down == 0) begin
      failures++;
      $display("steps up %0d, down %0d: both directions expected", n_up, n_down);
    end

    // Second run: slave 1 disabled, slave 0 moved away again.
    skew[0] = 50.0 * BIN;
    skew[2] = 99.0 * BIN;
    run(3'b101);
    expect_bit(locked[0], 1'b1, "run2 slave0 locked");
    expect_bit(locked[1], 1'b0, "run2 slave1 untouched");
    expect_bit(failed[1], 1'b0, "run2 slave1 not failed");
    expect_bit(locked[2], 1'b1, "run2 slave2 locked");
    checks++;
    if (n_steps[1] != 0) begin failures++; $display("disabled slave stepped"); end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
