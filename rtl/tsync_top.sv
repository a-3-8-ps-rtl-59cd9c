// tsync_top -- TDC-based skew alignment of multichannel serial transceivers.
//
// The transceiver channels themselves (phase interpolator, clock divider and
// PI controller of each GTH) are hard macros outside this module; their
// parallel clocks come in and their PI step requests go out. Inside:
//   clk_mux          picks the parallel clock of one slave channel,
//   hit_divider      divides it into a low-rate hit whose rising edge is tied
//                    to a rising edge of that slave clock,
//   tdc              measures the hit edge against the master parallel clock
//                    with a 160-tap carry-chain delay line,
//   sync_controller  steps the slave's phase interpolator until the measured
//                    skew equals the preset target within a tolerance.
// Everything but the hit divider runs on the master parallel clock; the
// divider runs on the selected slave clock. rst_n is asynchronous; it is
// synchronised to the master clock here, and the alignment is repeated after
// every reset, as each reset of the transceivers brings a new random skew.
//
// The structure follows the paper's system diagram; the reset synchroniser
// and the port formats are this design's choices.
//
// The synchroniser's flip-flops are reset asynchronously while their output
// serves as a synchronous reset for the blocks on the master clock; a lint
// tool may flag that mix on the synchroniser net. It is the intended
// structure (asynchronous assertion, synchronous release).
//
// Ports: clk_master (master parallel clock), slave_clk[N_SL], rst_n,
// ch_en, target[N_SL] and tol (TDC bins, AVG_LOG2 fraction bits), pi_step,
// pi_dir (to the slaves' PI controllers), sel, locked, failed, done,
// skew_avg, tdc_code/tdc_valid (raw measurements, for monitoring).
`timescale 1ps / 10fs
module tsync_top #(
  parameter int unsigned N_SL        = tsync_pkg::N_SLAVES,
  parameter int unsigned TAPS        = tsync_pkg::TDL_TAPS,
  parameter real         TAP_PS      = tsync_pkg::TAP_PS,
  parameter int unsigned HIT_DIV     = tsync_pkg::HIT_DIV,
  parameter int unsigned AVG_LOG2    = tsync_pkg::AVG_LOG2,
  parameter int unsigned SETTLE_CYC  = tsync_pkg::SETTLE_CYC,
  parameter int unsigned PI_WAIT_CYC = tsync_pkg::PI_WAIT_CYC,
  parameter int unsigned MAX_STEPS   = tsync_pkg::MAX_STEPS,
  parameter int unsigned CW          = tsync_pkg::code_width(TAPS),
  parameter int unsigned AW          = CW + AVG_LOG2,
  parameter int unsigned SW          = (N_SL > 1) ? $clog2(N_SL) : 1
) (
  input  logic                    clk_master,
  input  logic [N_SL-1:0]         slave_clk,
  input  logic                    rst_n,
  input  logic [N_SL-1:0]         ch_en,
  input  logic [N_SL-1:0][AW-1:0] target,
  input  logic [AW-1:0]           tol,
  output logic [N_SL-1:0]         pi_step,
  output logic                    pi_dir,
  output logic [SW-1:0]           sel,
  output logic [N_SL-1:0]         locked,
  output logic [N_SL-1:0]         failed,
  output logic                    done,
  output logic [AW-1:0]           skew_avg,
  output logic [CW-1:0]           tdc_code,
  output logic                    tdc_valid
);
  // Reset synchroniser: asynchronous assert, release on the master clock.
  logic [1:0] rst_sync;
  logic       rst_m_n;
  always_ff @(posedge clk_master or negedge rst_n) begin
    if (!rst_n) rst_sync <= '0;
    else        rst_sync <= {rst_sync[0], 1'b1};
  end
  assign rst_m_n = rst_sync[1];

  logic sel_clk;
  logic hit;

  clk_mux #(.N(N_SL), .SW(SW)) u_mux (
    .clk_in (slave_clk),
    .sel    (sel),
    .clk_out(sel_clk)
  );

  hit_divider #(.DIV(HIT_DIV)) u_div (
    .clk  (sel_clk),
    .rst_n(rst_m_n),
    .hit  (hit)
  );

  tdc #(.TAPS(TAPS), .TAP_PS(TAP_PS), .CW(CW)) u_tdc (
    .clk  (clk_master),
    .rst_n(rst_m_n),
    .hit  (hit),
    .code (tdc_code),
    .valid(tdc_valid)
  );

  sync_controller #(
    .N_SL(N_SL), .CW(CW), .AVG_LOG2(AVG_LOG2), .SETTLE_CYC(SETTLE_CYC),
    .PI_WAIT_CYC(PI_WAIT_CYC), .MAX_STEPS(MAX_STEPS), .SW(SW), .AW(AW)
  ) u_ctrl (
    .clk       (clk_master),
    .rst_n     (rst_m_n),
    .code      (tdc_code),
    .code_valid(tdc_valid),
    .ch_en     (ch_en),
    .target    (target),
    .tol       (tol),
    .sel       (sel),
    .pi_step   (pi_step),
    .pi_dir    (pi_dir),
    .locked    (locked),
    .failed    (failed),
    .done      (done),
    .skew_avg  (skew_avg)
  );
endmodule
