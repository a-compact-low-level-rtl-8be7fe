// tb_fb_ctrl: closed-loop test of the pulse-to-pulse feedback.
// A behavioural plant stands in for DAC datapath, klystron and ADC datapath:
// during each pulse the klystron forward I/Q is the drive I/Q scaled by 1/40
// and rotated by +30 degrees (rounded to integers). Starting from a drive
// of 8000 at 0 degrees, the loop must bring the measured amplitude and phase
// to the set values (300, -45 deg) within tolerance and then stop changing
// the drive. Checked per pulse: the measurement equals the plant's response
// to the drive of that pulse, the drive I/Q never changes inside a pulse,
// corr_i/corr_q match drive_amp/drive_phs, and both the update and the hold
// branch occur.
module tb_fb_ctrl;
  import llrf_pkg::*;
  logic clk = 0, rst_n = 0;
  llrf_cfg_t cfg;
  logic trig;
  logic signed [15:0] kf_i, kf_q, corr_i, corr_q;
  logic kf_valid;
  logic [16:0] meas_amp;
  logic signed [15:0] meas_phs, drive_phs;
  logic [15:0] drive_amp;
  logic in_tol, upd_valid, changed;
  logic [31:0] update_count;
  int checks = 0, failures = 0, n_hold = 0, n_upd = 0;
  real pi = 3.14159265358979;
  localparam int PERIOD = 400, PLEN = 200;

  fb_ctrl dut (.*);

  always #5 clk = ~clk;

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int wrap16(int d);
    d = d & 16'hFFFF;
    return (d > 32767) ? d - 65536 : d;
  endfunction

  // plant: 1/40 gain, +30 degrees
  always_comb begin
    real ci, cq, c, s;
    ci = real'(corr_i); cq = real'(corr_q);
    c = $cos(pi/6.0) / 40.0; s = $sin(pi/6.0) / 40.0;
    kf_i = 16'(int'(ci*c - cq*s));
    kf_q = 16'(int'(ci*s + cq*c));
  end

  initial begin
    logic signed [15:0] ci0, cq0;
    int exp_amp, exp_phs, da, dp;
    real m;
    cfg = '0;
    cfg.win_start = 16'd60; cfg.win_log2 = 4'd6;
    cfg.amp_init = 16'd8000; cfg.phs_init = 16'd0;
    cfg.amp_set = 16'd300; cfg.amp_gain = 16'd5120; cfg.amp_tol = 16'd3;
    cfg.amp_lower = 16'd1000; cfg.amp_upper = 16'd30000;
    cfg.phs_set = 16'(-8192); cfg.phs_gain = 16'd128; cfg.phs_tol = 16'd60;
    cfg.phs_lower = 16'h8000; cfg.phs_upper = 16'h7FFF;
    trig = 0; kf_valid = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (30) @(negedge clk);
    cfg.fb_enable = 1;
    repeat (30) @(negedge clk);
    for (int p = 0; p < 40; p++) begin
      logic [15:0] da0; logic signed [15:0] dp0;
      da0 = drive_amp; dp0 = drive_phs;
      trig = 1;
      @(negedge clk);
      trig = 0;
      ci0 = corr_i; cq0 = corr_q;
      // corr must reflect the drive latched at the trigger
      checks++;
      m = $sqrt(real'(ci0)*real'(ci0) + real'(cq0)*real'(cq0));
      da = int'(m) - int'(da0);
      dp = wrap16(int'($atan2(real'(cq0), real'(ci0)) / (2.0*pi) * 65536.0) - int'(dp0));
      if (da > 4 || da < -4 || dp > 8 || dp < -8) begin
        failures++; $display("p=%0d corr %0d/%0d vs drive %0d/%0d", p, ci0, cq0, da0, dp0);
      end
      for (int n = 0; n < PERIOD; n++) begin
        kf_valid = 1;
        if (corr_i != ci0 || corr_q != cq0) begin
          checks++; failures++; $display("p=%0d corr changed inside the pulse", p);
        end
        @(negedge clk);
      end
      // measurement of this pulse: plant response to this pulse's drive
      exp_amp = int'(real'(da0) / 40.0);
      exp_phs = wrap16(int'(dp0) + 5461);
      checks++;
      da = int'(meas_amp) - exp_amp;
      dp = wrap16(int'(meas_phs) - exp_phs);
      if (da > 3 || da < -3 || dp > 60 || dp < -60) begin
        failures++; $display("p=%0d meas %0d/%0d exp %0d/%0d", p, meas_amp, meas_phs, exp_amp, exp_phs);
      end
      if (in_tol) n_hold++; else n_upd++;
      if (p >= 36) begin
        checks++;
        if (!in_tol) begin failures++; $display("p=%0d not converged: %0d/%0d", p, meas_amp, meas_phs); end
      end
    end
    checks++;
    if (n_hold == 0 || n_upd == 0) begin failures++; $display("hold=%0d update=%0d", n_hold, n_upd); end
    $display("updates=%0d holds=%0d final meas %0d/%0d drive %0d/%0d", n_upd, n_hold, meas_amp, meas_phs, drive_amp, drive_phs);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
