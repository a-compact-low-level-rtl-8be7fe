// tb_llrf_top: end-to-end test of the LLRF programmable logic in a closed
// loop with the behavioural RF chain (rf_chain_model: 1/40 gain, +30 deg,
// 20-clock delay, cavity detuned by +2.08 MHz). The RTL parameters are the
// defaults; the pulse period is shortened through its register to 2500
// clocks so that many pulses fit in a short run. Phases of the test:
//   1. default square wave, feedback on: the loop must converge to the set
//      amplitude/phase and then hold; each pulse's DAC amplitude must equal
//      the drive read back after the previous pulse;
//   2. custom waveform from the waveform memory: every DAC sample must equal
//      waveform * drive;
//   3. an upper amplitude limit below the needed drive: the drive must clamp;
//   4. the reflection captured by the DMA must land in the DDR model word
//      for word; the reflection phase slope after the pulse must give the
//      2.08 MHz detuning (delta_omega = d(phi)/dt);
//   5. a period shorter than the capture: the DMA overflow flag must set and
//      clear on a STATUS write;
//   6. DMA source switched to the klystron forward magnitude/phase: every
//      word must match sqrt(I^2+Q^2) and atan2(Q, I) of the forward samples,
//      18 clocks earlier (the converter's pipeline latency);
//   7. DMA source switched to the reflection magnitude/phase: the words must
//      match likewise, and the phase words after the pulse, read back from
//      memory as software would, must give the 2.08 MHz detuning;
//   8. the cavity detuned to 7.5 MHz (the dual-cell case): the same estimate
//      must give 7.5 MHz;
//   9. a 1229-sample (5 us) square pulse, the longest targeted flat top: the
//      DAC gate must last 1229 samples at a constant drive.
// Each mechanism is counted and must occur at least once.
module tb_llrf_top;
  import llrf_pkg::*;
  localparam int PERIOD = 2500, PLEN = 300, DMA_LEN = 1024;
  localparam logic [31:0] DMA_BASE = 32'h0001_0000;

  logic clk = 0, rst_n = 0;
  iq_t adc_kf_i, adc_kf_q, adc_refl_i, adc_refl_q, dac_i, dac_q;
  logic adc_kf_valid = 1, adc_refl_valid = 1, dac_valid;
  axil_req_t s_axil_reg_req, s_axil_wave_req;
  axil_rsp_t s_axil_reg_rsp, s_axil_wave_rsp;
  axi_w_req_t m_axi_dma_req;
  axi_w_rsp_t m_axi_dma_rsp;
  logic signed [15:0] refl_phase;
  logic [16:0] refl_mag;
  logic refl_phase_valid, pulse_trig;

  int checks = 0, failures = 0;
  int n_update = 0, n_hold = 0, n_clamp = 0, n_square = 0, n_custom = 0;
  int n_dma = 0, n_overflow = 0, n_tune = 0, n_kf_cap = 0, n_refl_cap = 0, n_long = 0;

  llrf_top dut (.*);
  axil_master_bfm reg_bus  (.clk, .req(s_axil_reg_req),  .rsp(s_axil_reg_rsp));
  axil_master_bfm wave_bus (.clk, .req(s_axil_wave_req), .rsp(s_axil_wave_rsp));
  axi_mem_model #(.READY_PCT(70)) ddr (.clk, .req(m_axi_dma_req), .rsp(m_axi_dma_rsp));
  rf_chain_model rf (.clk, .dac_i, .dac_q, .dac_valid, .kf_i(adc_kf_i), .kf_q(adc_kf_q),
                     .refl_i(adc_refl_i), .refl_q(adc_refl_q));

  always #2 clk = ~clk;

  initial begin
    #20000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ------------------------------------------------------------ recorders
  int cyc_since = 0;
  int dac_n = 0;
  int dac_rec_i [PERIOD], dac_rec_q [PERIOD];
  int phs_rec [PERIOD];
  logic [31:0] refl_rec [$];
  int rec_left = 0;
  logic dma_en_q = 0;
  // klystron forward history, for the magnitude/phase capture mode
  int cyc_abs = 0, trig_abs = 0;
  int kf_hi [8192], kf_hq [8192], rf_hi [8192], rf_hq [8192];
  always @(posedge clk) begin
    kf_hi[cyc_abs % 8192] = int'(adc_kf_i);
    kf_hq[cyc_abs % 8192] = int'(adc_kf_q);
    rf_hi[cyc_abs % 8192] = int'(adc_refl_i);
    rf_hq[cyc_abs % 8192] = int'(adc_refl_q);
    if (pulse_trig) trig_abs = cyc_abs;
    cyc_abs++;
    if (pulse_trig) begin cyc_since = 0; dac_n = 0; end
    else if (cyc_since < PERIOD - 1) cyc_since++;
    if (dac_valid) begin dac_rec_i[dac_n] = int'(dac_i); dac_rec_q[dac_n] = int'(dac_q); dac_n++; end
    phs_rec[cyc_since] = int'(refl_phase);
    // reference copy of the reflection stream the DMA should store
    if (rec_left > 0) begin refl_rec.push_back({adc_refl_q, adc_refl_i}); rec_left--; end
    if (pulse_trig && dma_en_q && !dut.u_dma.busy) begin refl_rec.delete(); rec_left = DMA_LEN; end
  end

  task automatic wr(logic [7:0] a, logic [31:0] d); reg_bus.write(16'(a), d); endtask
  task automatic rd(logic [7:0] a, output logic [31:0] d); reg_bus.read(16'(a), d); endtask

  task automatic wait_trig();
    do @(posedge clk); while (!pulse_trig);
  endtask

  // Compares the DMA buffer of the last capture with sqrt(I^2+Q^2) and
  // atan2(Q, I) of the recorded input samples (reflection or klystron
  // forward). The pipeline offset is searched once and then every word is
  // held to it; phase is checked where the magnitude exceeds 50.
  task automatic polar_capture(input bit refl, output int bad, output int best_off);
    int t0;
    real best_err;
    real two_pi;
    two_pi = 6.28318530717959;
    t0 = trig_abs;
    best_off = -1; best_err = 1.0e30;
    for (int off = 10; off < 30; off++) begin
      real e;
      e = 0.0;
      for (int k = 100; k < 200; k++) begin
        logic [31:0] w;
        real ei, eq;
        w  = ddr.mem[DMA_BASE + 4*k];
        ei = real'(refl ? rf_hi[(t0 + 1 + k - off) % 8192] : kf_hi[(t0 + 1 + k - off) % 8192]);
        eq = real'(refl ? rf_hq[(t0 + 1 + k - off) % 8192] : kf_hq[(t0 + 1 + k - off) % 8192]);
        e += fabs(real'(w[15:0]) - $sqrt(ei*ei + eq*eq));
      end
      if (e < best_err) begin best_err = e; best_off = off; end
    end
    $display("%s capture: pipeline offset %0d", refl ? "reflection" : "klystron forward", best_off);
    bad = 0;
    for (int k = 0; k < DMA_LEN; k++) begin
      logic [31:0] w;
      real ei, eq, m, ph;
      int dph, n;
      w  = ddr.mem[DMA_BASE + 4*k];
      n  = (t0 + 1 + k - best_off) % 8192;
      ei = real'(refl ? rf_hi[n] : kf_hi[n]);
      eq = real'(refl ? rf_hq[n] : kf_hq[n]);
      m  = $sqrt(ei*ei + eq*eq);
      ph = $atan2(eq, ei) / two_pi * 65536.0;
      dph = wrap16(int'(w[31:16]) - int'(ph));
      if (fabs(real'(w[15:0]) - m) > 3.0 || (m > 50.0 && (dph > 16 || dph < -16))) begin
        if (bad < 4) $display("  word %0d: %h, expected mag %0.1f phase %0.1f", k, w, m, ph);
        bad++;
      end
    end
  endtask

  // Detuning in Hz from the least-squares slope of the unwrapped phase words
  // of the captured reflection, 100 to 220 samples after the pulse end.
  function automatic real mem_detuning();
    real sx, sy, sxx, sxy, nn, slope;
    int acc, prev;
    sx = 0; sy = 0; sxx = 0; sxy = 0; nn = 0;
    prev = int'(ddr.mem[DMA_BASE + 4*(PLEN + 100)] >> 16);
    acc = prev;
    for (int k = PLEN + 100; k < PLEN + 220; k++) begin
      int ph;
      ph = int'(ddr.mem[DMA_BASE + 4*k] >> 16);
      acc += wrap16(ph - prev); prev = ph;
      sx += k; sy += acc; sxx += real'(k)*k; sxy += real'(k)*acc; nn += 1;
    end
    slope = (nn*sxy - sx*sy) / (nn*sxx - sx*sx);
    return slope / 65536.0 * 245.76e6;
  endfunction

  function automatic int wrap16(int d);
    d = d & 32'hFFFF;
    return (d > 32767) ? d - 65536 : d;
  endfunction

  int wave_i [PLEN], wave_q [PLEN];

  function automatic real fabs(real x);
    return (x < 0.0) ? -x : x;
  endfunction

  initial begin
    logic [31:0] d, drive_prev, st;
    int exp_mag, got_mag, dp;
    real pi;
    pi = 3.14159265358979;
    repeat (5) @(posedge clk);
    rst_n = 1;
    repeat (5) @(posedge clk);

    // waveform: 20-sample linear rise to 0.9 full scale with a 20 degree tilt
    for (int n = 0; n < PLEN; n++) begin
      real amp, ph;
      amp = 29491.0 * ((n < 20) ? real'(n + 1) / 20.0 : 1.0);
      ph  = (20.0 * real'(n) / real'(PLEN) - 10.0) * pi / 180.0;
      wave_i[n] = int'(amp * $cos(ph));
      wave_q[n] = int'(amp * $sin(ph));
      wave_bus.write(16'(n * 4), {16'(wave_q[n]), 16'(wave_i[n])});
    end

    wr(R_PERIOD, PERIOD);
    wr(R_PULSE_LEN, PLEN);
    wr(R_WIN, {12'd0, 4'd7, 16'd100});
    wr(R_AMP_SET, 400);  wr(R_AMP_GAIN, 5120); wr(R_AMP_TOL, 3);
    wr(R_AMP_LIM, {16'd30000, 16'd1000}); wr(R_AMP_INIT, 8000);
    wr(R_PHS_SET, 0);    wr(R_PHS_GAIN, 128);  wr(R_PHS_TOL, 60);
    wr(R_PHS_LIM, {16'h7FFF, 16'h8000}); wr(R_PHS_INIT, 0);
    wr(R_DMA_BASE, DMA_BASE); wr(R_DMA_LEN, DMA_LEN);
    dma_en_q = 1;
    wr(R_CTRL, 32'b1101);   // run, dma, square wave, feedback

    // ---------------------------------------------- 1. square wave, feedback
    drive_prev = {16'd0, 16'd8000};
    for (int p = 0; p < 25; p++) begin
      wait_trig();
      repeat (PLEN + 400) @(posedge clk);
      // DAC amplitude in this pulse = drive known before it (square wave 32767/32768)
      checks++;
      got_mag = int'($sqrt(real'(dac_rec_i[150])**2 + real'(dac_rec_q[150])**2));
      exp_mag = int'(real'(drive_prev[15:0]) * 32767.0 / 32768.0);
      if (dac_n != PLEN || got_mag - exp_mag > 4 || exp_mag - got_mag > 4) begin
        failures++; $display("p=%0d dac samples %0d amplitude %0d exp %0d", p, dac_n, got_mag, exp_mag);
      end
      n_square++;
      rd(R_STATUS, st);
      rd(R_DRIVE, d);
      if (d != drive_prev) n_update++; else if (st[0]) n_hold++;
      drive_prev = d;
    end
    rd(R_MEAS, d);
    checks++;
    if (d > 403 || d < 397) begin failures++; $display("amplitude did not converge: %0d", d); end
    rd(R_MEAS_PHS, d);
    checks++;
    if (wrap16(int'(d[15:0])) > 60 || wrap16(int'(d[15:0])) < -60) begin
      failures++; $display("phase did not converge: %0d", wrap16(int'(d[15:0])));
    end
    rd(R_STATUS, st);
    checks++;
    if (!st[0]) begin failures++; $display("not in tolerance after convergence"); end
    rd(R_DRIVE, d);
    checks++;
    // drive phase must cancel the chain's +30 degrees
    dp = wrap16(int'(d[31:16]) + 5461);
    if (dp > 120 || dp < -120) begin failures++; $display("drive phase %0d", wrap16(int'(d[31:16]))); end

    // ---------------------------------------------- 4. DMA and frequency offset
    repeat (DMA_LEN) @(posedge clk);   // let the capture of the last pulse drain
    begin
      bit ok;
      ok = 1;
      checks++;
      if (refl_rec.size() != DMA_LEN) begin ok = 0; $display("recorded %0d", refl_rec.size()); end
      for (int k = 0; k < DMA_LEN && ok; k++)
        if (!ddr.mem.exists(DMA_BASE + 4*k) || ddr.mem[DMA_BASE + 4*k] != refl_rec[k]) begin
          ok = 0; $display("DMA word %0d wrong: %h exp %h (recorded %0d)", k, ddr.mem[DMA_BASE + 4*k], refl_rec[k], refl_rec.size());
        end
      if (!ok) failures++; else n_dma++;
      checks++;
      if (ddr.errors != 0) begin failures++; $display("AXI4 rule errors %0d", ddr.errors); end
    end
    begin
      // least-squares slope of the unwrapped reflection phase after the pulse
      real sx, sy, sxx, sxy, nn, slope, df;
      int acc, prev;
      sx = 0; sy = 0; sxx = 0; sxy = 0; nn = 0;
      acc = phs_rec[PLEN + 80]; prev = acc;
      for (int k = PLEN + 80; k < PLEN + 200; k++) begin
        acc += wrap16(phs_rec[k] - prev); prev = phs_rec[k];
        sx += k; sy += acc; sxx += real'(k)*k; sxy += real'(k)*acc; nn += 1;
      end
      slope = (nn*sxy - sx*sy) / (nn*sxx - sx*sx);
      df = slope / 65536.0 * 245.76e6;
      $display("reflection phase slope %0.2f LSB/sample -> detuning %0.4f MHz", slope, df / 1e6);
      checks++;
      if (df < 2.0e6 || df > 2.16e6) begin failures++; $display("detuning estimate off"); end
      else n_tune++;
    end

    // ---------------------------------------------- 2. custom waveform
    wr(R_CTRL, 32'b1111);
    wait_trig();   // this pulse may still be the square wave
    repeat (PLEN + 400) @(posedge clk);
    rd(R_DRIVE, drive_prev);
    for (int p = 0; p < 3; p++) begin
      int bad;
      real ci, cq, a, ph;
      bad = 0;
      wait_trig();
      repeat (PLEN + 400) @(posedge clk);
      a  = real'(drive_prev[15:0]);
      ph = real'($signed(drive_prev[31:16])) * 2.0 * pi / 65536.0;
      ci = a * $cos(ph); cq = a * $sin(ph);
      for (int n = 0; n < PLEN; n++) begin
        real ei, eq;
        ei = (real'(wave_i[n]) * ci - real'(wave_q[n]) * cq) / 32768.0;
        eq = (real'(wave_i[n]) * cq + real'(wave_q[n]) * ci) / 32768.0;
        if (fabs(real'(dac_rec_i[n]) - ei) > 5.0 || fabs(real'(dac_rec_q[n]) - eq) > 5.0) begin
          if (bad < 4) $display("  n=%0d dac (%0d,%0d) exp (%0.1f,%0.1f)", n, dac_rec_i[n], dac_rec_q[n], ei, eq);
          bad++;
        end
      end
      checks++;
      if (bad != 0 || dac_n != PLEN) begin failures++; $display("custom pulse %0d: %0d samples off", p, bad); end
      else n_custom++;
      rd(R_DRIVE, drive_prev);
    end

    // ---------------------------------------------- 3. clamp at the upper limit
    wr(R_AMP_LIM, {16'd12000, 16'd1000});
    wr(R_AMP_SET, 700);
    for (int p = 0; p < 6; p++) begin wait_trig(); repeat (PLEN + 400) @(posedge clk); end
    rd(R_DRIVE, d);
    checks++;
    if (d[15:0] != 16'd12000) begin failures++; $display("drive not clamped: %0d", d[15:0]); end
    else n_clamp++;

    // ---------------------------------------------- 5. DMA overflow
    rd(R_STATUS, st);
    checks++;
    if (st[1]) begin failures++; $display("overflow before it should"); end
    wr(R_PERIOD, 900);
    for (int p = 0; p < 4; p++) wait_trig();
    rd(R_STATUS, st);
    checks++;
    if (!st[1]) begin failures++; $display("no overflow with period < capture"); end
    else n_overflow++;
    wr(R_CTRL, 32'b0000);
    repeat (3000) @(posedge clk);
    wr(R_STATUS, 0);
    rd(R_STATUS, st);
    checks++;
    if (st[1]) begin failures++; $display("overflow not cleared"); end

    // ---------------------------------------------- 6. klystron forward capture
    // feedback off: drive 8000, so the forward signal is about 200 in amplitude
    wr(R_PERIOD, PERIOD);
    wr(R_CTRL, 32'b11100);   // run, dma, klystron forward magnitude/phase
    wait_trig();
    wait_trig();
    repeat (DMA_LEN + 400) @(posedge clk);
    begin
      int bad, off;
      polar_capture(1'b0, bad, off);
      checks++;
      if (off != 18 || bad != 0) begin failures++; $display("klystron forward capture: %0d words wrong", bad); end
      else n_kf_cap++;
    end

    // ---------------------------------------------- 7. reflection magnitude/phase capture
    // software-style frequency estimate from the phase words in memory
    wr(R_AMP_INIT, 30000);
    wr(R_CTRL, 32'b101100);  // run, dma, cavity reflection magnitude/phase
    wait_trig();
    wait_trig();
    repeat (DMA_LEN + 400) @(posedge clk);
    begin
      int bad, off;
      real df;
      polar_capture(1'b1, bad, off);
      df = mem_detuning();
      $display("detuning from the captured reflection phase: %0.4f MHz", df / 1e6);
      checks++;
      if (off != 18 || bad != 0 || df < 2.0e6 || df > 2.16e6) begin
        failures++; $display("reflection polar capture: %0d words wrong", bad);
      end else n_refl_cap++;
    end

    // ---------------------------------------------- 8. dual-cell detuning, 7.5 MHz
    rf.detune_hz = 7.5e6;
    wait_trig();
    wait_trig();
    repeat (DMA_LEN + 400) @(posedge clk);
    begin
      real df;
      df = mem_detuning();
      $display("7.5 MHz cavity: detuning from the captured phase %0.4f MHz", df / 1e6);
      checks++;
      if (df < 7.3e6 || df > 7.7e6) begin failures++; $display("7.5 MHz detuning not recovered"); end
      else n_tune++;
    end

    // ---------------------------------------------- 9. 5 us flat top (1229 samples)
    wr(R_PULSE_LEN, 1229);
    wr(R_CTRL, 32'b1000);    // run, square wave, no DMA
    wait_trig();
    wait_trig();
    repeat (1300) @(posedge clk);
    begin
      int bad;
      bad = 0;
      for (int n = 0; n < 1229; n++)
        if (dac_rec_i[n] != dac_rec_i[0] || dac_rec_q[n] != dac_rec_q[0]) bad++;
      checks++;
      if (dac_n != 1229 || bad != 0 || dac_rec_i[0] == 0) begin
        failures++; $display("5 us pulse: %0d samples, %0d differ", dac_n, bad);
      end else n_long++;
    end
    wr(R_CTRL, 32'b00000);

    rd(R_PULSES, d);
    checks++;
    if (d < 42) begin failures++; $display("pulse counter %0d", d); end
    rd(R_UPDATES, d);
    checks++;
    // counts corrections only (pulses out of tolerance)
    if (d < n_update || d > 48) begin failures++; $display("update counter %0d", d); end
    rd(R_DMAS, d);
    checks++;
    if (d < 30) begin failures++; $display("DMA counter %0d", d); end

    checks++;
    if (reg_bus.errors + wave_bus.errors != 0) begin failures++; $display("AXI4-Lite rule errors"); end

    $display("mechanisms: update=%0d hold=%0d clamp=%0d square=%0d custom=%0d dma=%0d overflow=%0d tuning=%0d kf_capture=%0d refl_polar_capture=%0d long_pulse=%0d",
             n_update, n_hold, n_clamp, n_square, n_custom, n_dma, n_overflow, n_tune, n_kf_cap, n_refl_cap, n_long);
    checks++;
    if (n_update == 0 || n_hold == 0 || n_clamp == 0 || n_square == 0 || n_custom == 0 ||
        n_dma == 0 || n_overflow == 0 || n_tune == 0 || n_kf_cap == 0 || n_refl_cap == 0 || n_long == 0) begin
      failures++; $display("a mechanism never occurred");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
