// fb_update: the decision and correction step of the pulse-to-pulse loop.
//
// Once per pulse it receives the window-averaged amplitude and phase of the
// klystron forward signal and compares them with the user set values. If both
// errors are below their tolerances the drive is left alone, so the loop adds
// no jitter once the field is where it should be (as the platform describes).
// Otherwise the drive amplitude and phase each move by gain * error and are
// clamped to the user's upper and lower limits. The integral form of the
// update, the Q8.8 gains and applying the limits to the drive are this
// design's choices; the set value / correction gain / upper limit / lower limit
// parameter set per quantity is the platform's.
//
// How it works: stage 1 registers the errors (the phase error is a 16-bit
// wrapping difference, i.e. taken the short way round the circle) and the
// tolerance test. Stage 2 adds (gain * error) >>> 8, clamps and registers the
// new drive. While cfg.fb_enable is low the drive follows amp_init/phs_init.
//
// Interface: meas_amp (unsigned 17 bits), meas_phs (binary angle), meas_valid;
// cfg (llrf_cfg_t); drive_amp (unsigned 16), drive_phs (signed binary angle),
// in_tol (last decision), upd_valid (one clock, a new drive is present),
// changed (that drive differs from the previous one), update_count.
// Timing: upd_valid two clocks after meas_valid.
module fb_update
  import llrf_pkg::*;
(
  input  logic               clk,
  input  logic               rst_n,
  input  llrf_cfg_t          cfg,
  input  logic [16:0]        meas_amp,
  input  logic signed [15:0] meas_phs,
  input  logic               meas_valid,
  output logic [15:0]        drive_amp,
  output logic signed [15:0] drive_phs,
  output logic               in_tol,
  output logic               upd_valid,
  output logic               changed,
  output logic [31:0]        update_count
);
  logic signed [17:0] amp_err;
  logic signed [15:0] phs_err;
  logic               s1_valid, s1_tol;

  logic signed [17:0] amp_err_c;
  logic signed [15:0] phs_err_c;
  logic        [17:0] amp_abs;
  logic        [15:0] phs_abs;

  always_comb begin
    amp_err_c = signed'({2'b00, cfg.amp_set}) - signed'({1'b0, meas_amp});
    phs_err_c = signed'(cfg.phs_set) - meas_phs;            // wraps mod 360 deg
    amp_abs   = amp_err_c[17] ? 18'(-amp_err_c) : 18'(amp_err_c);
    phs_abs   = phs_err_c[15] ? 16'(-phs_err_c) : 16'(phs_err_c);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      amp_err <= '0; phs_err <= '0; s1_valid <= 1'b0; s1_tol <= 1'b0;
    end else begin
      s1_valid <= meas_valid && cfg.fb_enable;
      if (meas_valid) begin
        amp_err <= amp_err_c;
        phs_err <= phs_err_c;
        s1_tol  <= (amp_abs < 18'(cfg.amp_tol)) && (phs_abs < cfg.phs_tol);
      end
    end
  end

  // stage 2: correction and limits
  logic signed [33:0] amp_prod, phs_prod;
  logic signed [26:0] amp_new, phs_new;
  logic        [15:0] amp_clamped;
  logic signed [15:0] phs_clamped;

  always_comb begin
    amp_prod = signed'({1'b0, cfg.amp_gain}) * 34'(amp_err);
    phs_prod = signed'({1'b0, cfg.phs_gain}) * 34'(phs_err);
    amp_new  = signed'({11'b0, drive_amp}) + 27'(amp_prod >>> GAIN_FRAC);
    phs_new  = 27'(drive_phs) + 27'(phs_prod >>> GAIN_FRAC);
    if (amp_new > signed'({11'b0, cfg.amp_upper}))      amp_clamped = cfg.amp_upper;
    else if (amp_new < signed'({11'b0, cfg.amp_lower})) amp_clamped = cfg.amp_lower;
    else                                                amp_clamped = 16'(amp_new);
    if (phs_new > 27'(signed'(cfg.phs_upper)))          phs_clamped = signed'(cfg.phs_upper);
    else if (phs_new < 27'(signed'(cfg.phs_lower)))     phs_clamped = signed'(cfg.phs_lower);
    else                                                phs_clamped = 16'(phs_new);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      drive_amp <= '0; drive_phs <= '0; in_tol <= 1'b0;
      upd_valid <= 1'b0; changed <= 1'b0; update_count <= '0;
    end else begin
      upd_valid <= 1'b0;
      if (!cfg.fb_enable) begin
        drive_amp <= cfg.amp_init;
        drive_phs <= signed'(cfg.phs_init);
        in_tol    <= 1'b0;
        changed   <= 1'b0;
      end else if (s1_valid) begin
        upd_valid <= 1'b1;
        in_tol    <= s1_tol;
        if (s1_tol) begin
          changed <= 1'b0;
        end else begin
          changed      <= (amp_clamped != drive_amp) || (phs_clamped != drive_phs);
          drive_amp    <= amp_clamped;
          drive_phs    <= phs_clamped;
          update_count <= update_count + 32'd1;
        end
      end
    end
  end
endmodule
