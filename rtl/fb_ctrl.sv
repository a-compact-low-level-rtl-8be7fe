// fb_ctrl: pulse-to-pulse amplitude and phase feedback ("Feedback Control
// Algorithm" of the platform).
//
// The klystron forward signal is measured during every RF pulse, reduced to
// one amplitude and one phase, compared with the user's set values, and a new
// drive amplitude/phase is turned into an I/Q pair that scales the next
// pulse. The chain and its order follow the platform's feedback flow chart:
// moving average on I/Q -> window average -> amplitude/phase -> tolerance test
// and new set values -> I/Q conversion -> modulation (done in pulse_mod).
//
// How it works: moving_avg and window_avg are restarted by trig. The window
// result goes through iq_to_polar (ITER+2 clocks) into fb_update (2 clocks).
// polar_to_iq converts the current drive every clock; its output is latched
// into corr_i/corr_q on trig, so the I/Q applied to the DAC never changes
// inside a pulse and each pulse uses the correction from the previous one.
//
// Interface: kf_i/kf_q/kf_valid (klystron forward baseband, one sample per
// clock), trig (pulse start), cfg; corr_i/corr_q (drive I/Q for the next
// pulse), meas_amp/meas_phs (last measurement), drive_amp/drive_phs, in_tol,
// upd_valid, changed, update_count.
// Timing: a measurement finishes about 20 clocks after the window ends; it is
// used from the next trig on.
module fb_ctrl
  import llrf_pkg::*;
#(
  parameter int unsigned W       = 16,
  parameter int unsigned MA_LOG2 = 4
) (
  input  logic                clk,
  input  logic                rst_n,
  input  llrf_cfg_t           cfg,
  input  logic                trig,
  input  logic signed [W-1:0] kf_i,
  input  logic signed [W-1:0] kf_q,
  input  logic                kf_valid,
  output logic signed [W-1:0] corr_i,
  output logic signed [W-1:0] corr_q,
  output logic [W:0]          meas_amp,
  output logic signed [15:0]  meas_phs,
  output logic [15:0]         drive_amp,
  output logic signed [15:0]  drive_phs,
  output logic                in_tol,
  output logic                upd_valid,
  output logic                changed,
  output logic [31:0]         update_count
);
  logic signed [W-1:0] ma_i, ma_q, wa_i, wa_q, p_i, p_q;
  logic                ma_valid, wa_done, pol_valid, rect_valid;
  logic [W:0]          pol_mag;
  logic signed [15:0]  pol_phs;

  moving_avg #(.W(W), .LEN_LOG2(MA_LOG2)) u_ma (
    .clk, .rst_n, .clear(trig),
    .in_i(kf_i), .in_q(kf_q), .in_valid(kf_valid),
    .out_i(ma_i), .out_q(ma_q), .out_valid(ma_valid)
  );

  window_avg #(.W(W)) u_wa (
    .clk, .rst_n, .start(trig),
    .win_start(cfg.win_start), .win_log2(cfg.win_log2),
    .in_i(ma_i), .in_q(ma_q), .in_valid(ma_valid),
    .avg_i(wa_i), .avg_q(wa_q), .done(wa_done)
  );

  iq_to_polar #(.W(W)) u_pol (
    .clk, .rst_n, .i_in(wa_i), .q_in(wa_q), .in_valid(wa_done),
    .mag(pol_mag), .phase(pol_phs), .out_valid(pol_valid)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      meas_amp <= '0;
      meas_phs <= '0;
    end else if (pol_valid) begin
      meas_amp <= pol_mag;
      meas_phs <= pol_phs;
    end
  end

  fb_update u_upd (
    .clk, .rst_n, .cfg,
    .meas_amp(17'(pol_mag)), .meas_phs(pol_phs), .meas_valid(pol_valid),
    .drive_amp, .drive_phs, .in_tol, .upd_valid, .changed, .update_count
  );

  polar_to_iq #(.W(W)) u_rect (
    .clk, .rst_n, .mag(W'(drive_amp)), .phase(drive_phs), .in_valid(1'b1),
    .i_out(p_i), .q_out(p_q), .out_valid(rect_valid)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      corr_i <= '0;
      corr_q <= '0;
    end else if (trig && rect_valid) begin
      corr_i <= p_i;
      corr_q <= p_q;
    end
  end
endmodule
