// tb_fb_update: self-checking test of the feedback decision and update step.
// With feedback off the drive must follow the initial values. With it on,
// 400 random measurements (random set values, gains, limits, tolerances)
// are applied one at a time; an integer reference computes the tolerance
// decision, drive += floor(gain * error / 256) with the phase error taken
// modulo 360 degrees, and the clamping to the limits. upd_valid must come
// exactly 2 clocks after meas_valid. The hold (in tolerance) and clamp
// branches are each required to occur.
module tb_fb_update;
  import llrf_pkg::*;
  logic clk = 0, rst_n = 0;
  llrf_cfg_t cfg;
  logic [16:0] meas_amp;
  logic signed [15:0] meas_phs;
  logic meas_valid;
  logic [15:0] drive_amp;
  logic signed [15:0] drive_phs;
  logic in_tol, upd_valid, changed;
  logic [31:0] update_count;
  int checks = 0, failures = 0;
  int n_hold = 0, n_clamp = 0, n_upd = 0;

  fb_update dut (.*);

  always #5 clk = ~clk;

  initial begin
    #500000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int wrap16(int d);
    d = d & 16'hFFFF;
    return (d > 32767) ? d - 65536 : d;
  endfunction
  function automatic int fdiv256(longint s);
    return int'((s >= 0) ? s / 256 : -((-s + 255) / 256));
  endfunction

  initial begin
    int ea, ep, exp_amp, exp_phs, a_err, p_err, cnt_before;
    bit tol;
    cfg = '0; meas_amp = 0; meas_phs = 0; meas_valid = 0;
    cfg.amp_init = 16'd12345; cfg.phs_init = 16'hF000;
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (3) @(negedge clk);
    checks++;
    if (drive_amp != 16'd12345 || drive_phs != 16'shF000) begin
      failures++; $display("init not loaded: %0d %0d", drive_amp, drive_phs);
    end
    cfg.fb_enable = 1;
    ea = 12345; ep = wrap16('hF000);
    for (int n = 0; n < 400; n++) begin
      int lat;
      cfg.amp_set   = 16'($urandom % 1000);
      cfg.amp_gain  = 16'($urandom % 12000);
      cfg.amp_lower = 16'($urandom % 8000);
      cfg.amp_upper = 16'(24000 + $urandom % 8000);
      cfg.amp_tol   = 16'($urandom % 60);
      cfg.phs_set   = 16'($urandom);
      cfg.phs_gain  = 16'($urandom % 512);
      cfg.phs_lower = 16'(-(20000 + $urandom % 8000));
      cfg.phs_upper = 16'(20000 + $urandom % 8000);
      cfg.phs_tol   = 16'($urandom % 2000);
      if (n % 7 == 0) begin
        // near the set point: exercise the hold branch
        meas_amp = 17'(int'(cfg.amp_set) + int'($urandom % 3) - 1);
        meas_phs = 16'(int'(cfg.phs_set) + 1);
        cfg.amp_tol = 16'd5; cfg.phs_tol = 16'd5;
      end else begin
        meas_amp = 17'($urandom % 1100);
        meas_phs = 16'($urandom);
      end
      a_err = int'(cfg.amp_set) - int'(meas_amp);
      p_err = wrap16(int'(cfg.phs_set) - int'(meas_phs));
      tol = ((a_err < 0 ? -a_err : a_err) < int'(cfg.amp_tol)) &&
            ((p_err < 0 ? -p_err : p_err) < int'(cfg.phs_tol));
      exp_amp = ea; exp_phs = ep;
      if (!tol) begin
        int ra, rp;
        ra = ea + fdiv256(longint'(cfg.amp_gain) * a_err);
        rp = ep + fdiv256(longint'(cfg.phs_gain) * p_err);
        exp_amp = ra; exp_phs = rp;
        if (ra > int'(cfg.amp_upper)) exp_amp = int'(cfg.amp_upper);
        if (ra < int'(cfg.amp_lower)) exp_amp = int'(cfg.amp_lower);
        if (rp > int'($signed(cfg.phs_upper))) exp_phs = int'($signed(cfg.phs_upper));
        if (rp < int'($signed(cfg.phs_lower))) exp_phs = int'($signed(cfg.phs_lower));
        if (exp_amp != ra || exp_phs != rp) n_clamp++;
        n_upd++;
      end else n_hold++;
      cnt_before = int'(update_count);
      @(negedge clk) meas_valid = 1;
      @(negedge clk) meas_valid = 0;
      lat = 1;
      while (!upd_valid && lat < 10) begin @(negedge clk); lat++; end
      checks++;
      if (lat != 2 || in_tol != tol || int'(drive_amp) != exp_amp || int'(drive_phs) != exp_phs) begin
        failures++;
        if (failures < 10)
          $display("n=%0d lat=%0d tol %0d/%0d amp %0d exp %0d phs %0d exp %0d", n, lat, in_tol, tol,
                   drive_amp, exp_amp, drive_phs, exp_phs);
      end
      checks++;
      if (int'(update_count) != cnt_before + (tol ? 0 : 1)) begin
        failures++; $display("n=%0d update_count %0d", n, update_count);
      end
      ea = exp_amp; ep = exp_phs;
      repeat (2) @(negedge clk);
    end
    checks++;
    if (n_hold == 0 || n_clamp == 0 || n_upd == 0) begin
      failures++; $display("coverage hold=%0d clamp=%0d upd=%0d", n_hold, n_clamp, n_upd);
    end
    $display("hold=%0d clamp=%0d update=%0d", n_hold, n_clamp, n_upd);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
