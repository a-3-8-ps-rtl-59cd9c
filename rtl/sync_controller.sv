// sync_controller -- closed-loop alignment of the slave channels.
//
// After reset the controller visits the enabled slave channels one by one.
// For each it points the clock mux at that slave, waits SETTLE_CYC cycles,
// then averages 2**AVG_LOG2 TDC codes (one arrives per hit rising edge).
// The average, kept as a fixed-point number of TDC bins with AVG_LOG2
// fraction bits, is compared with the slave's preset target. If the error is
// within +/-tol the slave is locked and the next one is taken. Otherwise one
// minimal phase-interpolator step is requested for that slave and, after
// PI_WAIT_CYC cycles, a fresh average is taken. A slave that needs more than
// MAX_STEPS steps is marked failed and left as it is. When every slave has
// been visited `done` rises; the whole sequence runs again after each reset.
//
// The loop itself (preset target, TDC measurement, minimal PI steps until
// the error is within a tolerance, rerun at every reset) follows the paper.
// Averaging, the wait times, the step limit, the channel-enable mask and the
// step interface are this design's choices.
//
// Sign convention: `code` is the time from the slave-derived hit edge to the
// master clock edge. Delaying a slave's clock makes its code smaller, so a
// positive error (measured > target) requests pi_dir = 1 ("delay the slave")
// and a negative one pi_dir = 0 ("advance the slave"). Targets should keep
// clear of both ends of the line, where the measurement wraps around.
//
// Interface (all on clk, the master parallel clock; rst_n synchronous):
//   code/code_valid  TDC result
//   ch_en            slaves to align
//   target[i], tol   fixed-point, AVG_LOG2 fraction bits, in TDC bins
//   sel              clock-mux select
//   pi_step[i]       one-cycle request for one PI step of slave i
//   pi_dir           direction of that step, valid with pi_step
//   locked, failed   per-slave result; done when all are visited
//   skew_avg         the latest average (same format as target)
`timescale 1ps / 10fs
module sync_controller #(
  parameter int unsigned N_SL        = tsync_pkg::N_SLAVES,
  parameter int unsigned CW          = tsync_pkg::code_width(tsync_pkg::TDL_TAPS),
  parameter int unsigned AVG_LOG2    = tsync_pkg::AVG_LOG2,
  parameter int unsigned SETTLE_CYC  = tsync_pkg::SETTLE_CYC,
  parameter int unsigned PI_WAIT_CYC = tsync_pkg::PI_WAIT_CYC,
  parameter int unsigned MAX_STEPS   = tsync_pkg::MAX_STEPS,
  parameter int unsigned SW          = (N_SL > 1) ? $clog2(N_SL) : 1,
  parameter int unsigned AW          = CW + AVG_LOG2
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic [CW-1:0]             code,
  input  logic                      code_valid,
  input  logic [N_SL-1:0]           ch_en,
  input  logic [N_SL-1:0][AW-1:0]   target,
  input  logic [AW-1:0]             tol,
  output logic [SW-1:0]             sel,
  output logic [N_SL-1:0]           pi_step,
  output logic                      pi_dir,
  output logic [N_SL-1:0]           locked,
  output logic [N_SL-1:0]           failed,
  output logic                      done,
  output logic [AW-1:0]             skew_avg
);
  localparam int unsigned WAIT_MAX = (SETTLE_CYC > PI_WAIT_CYC) ? SETTLE_CYC : PI_WAIT_CYC;
  localparam int unsigned WW       = $clog2(WAIT_MAX + 1);
  localparam int unsigned NW       = AVG_LOG2 + 1;
  localparam int unsigned STW      = $clog2(MAX_STEPS + 1);
  localparam int unsigned CHW      = $clog2(N_SL + 1);

  tsync_pkg::sync_state_e state;
  logic [CHW-1:0]     ch;
  logic [WW-1:0]      wait_cnt;
  logic [NW-1:0]      n_meas;
  logic [AW-1:0]      acc;
  logic [STW-1:0]     steps;

  // Signed error of the latest average against the current target.
  logic signed [AW:0] err;
  logic [AW:0]        err_abs;
  always_comb begin
    err     = $signed({1'b0, acc}) - $signed({1'b0, target[ch[SW-1:0]]});
    err_abs = err[AW] ? (~err + 1'b1) : err;
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state    <= tsync_pkg::ST_IDLE;
      ch       <= '0;
      sel      <= '0;
      wait_cnt <= '0;
      n_meas   <= '0;
      acc      <= '0;
      steps    <= '0;
      pi_step  <= '0;
      pi_dir   <= 1'b0;
      locked   <= '0;
      failed   <= '0;
      done     <= 1'b0;
      skew_avg <= '0;
    end else begin
      pi_step <= '0;
      unique case (state)
        tsync_pkg::ST_IDLE: begin
          ch    <= '0;
          state <= tsync_pkg::ST_SELECT;
        end
        tsync_pkg::ST_SELECT: begin
          if (!ch_en[ch[SW-1:0]]) begin
            state <= tsync_pkg::ST_NEXT;
          end else begin
            sel      <= ch[SW-1:0];
            steps    <= '0;
            wait_cnt <= WW'(SETTLE_CYC);
            state    <= tsync_pkg::ST_SETTLE;
          end
        end
        tsync_pkg::ST_SETTLE, tsync_pkg::ST_PI_WAIT: begin
          if (wait_cnt != '0) begin
            wait_cnt <= wait_cnt - 1'b1;
          end else begin
            acc    <= '0;
            n_meas <= '0;
            state  <= tsync_pkg::ST_MEASURE;
          end
        end
        tsync_pkg::ST_MEASURE: begin
          if (n_meas == NW'(1 << AVG_LOG2)) begin
            skew_avg <= acc;
            state    <= tsync_pkg::ST_DECIDE;
          end else if (code_valid) begin
            acc    <= acc + AW'(code);
            n_meas <= n_meas + 1'b1;
          end
        end
        tsync_pkg::ST_DECIDE: begin
          if (err_abs <= {1'b0, tol}) begin
            locked[ch[SW-1:0]] <= 1'b1;
            state              <= tsync_pkg::ST_NEXT;
          end else if (steps == STW'(MAX_STEPS)) begin
            failed[ch[SW-1:0]] <= 1'b1;
            state              <= tsync_pkg::ST_NEXT;
          end else begin
            pi_step[ch[SW-1:0]] <= 1'b1;
            pi_dir              <= ~err[AW];   // measured too large: delay the slave
            steps               <= steps + 1'b1;
            wait_cnt            <= WW'(PI_WAIT_CYC);
            state               <= tsync_pkg::ST_PI_WAIT;
          end
        end
        tsync_pkg::ST_NEXT: begin
          if (ch == CHW'(N_SL - 1)) begin
            state <= tsync_pkg::ST_DONE;
          end else begin
            ch    <= ch + 1'b1;
            state <= tsync_pkg::ST_SELECT;
          end
        end
        tsync_pkg::ST_DONE: done <= 1'b1;
        default: state <= tsync_pkg::ST_IDLE;
      endcase
    end
  end

  // At most one slave is stepped at a time, and only while deciding.
  assert property (@(posedge clk) disable iff (!rst_n) $onehot0(pi_step));
  assert property (@(posedge clk) disable iff (!rst_n) (pi_step != '0) |-> state == tsync_pkg::ST_PI_WAIT);
  assert property (@(posedge clk) disable iff (!rst_n) (locked & failed) == '0);
endmodule
