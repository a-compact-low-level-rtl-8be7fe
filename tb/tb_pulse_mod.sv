// tb_pulse_mod: self-checking test of the pulse modulator.
// Drives gated pulses with random custom waveforms and random drive I/Q, and
// pulses with the default square wave. The waveform sample belonging to a
// gate clock is presented one clock later (as the memory delivers it). The
// reference computes round(wave * corr / 2**15) as a complex product with
// saturation, and zero outside the gate, and checks it 2 clocks after the
// gate clock, including the rising and falling gate edges.
module tb_pulse_mod;
  logic clk = 0, rst_n = 0;
  logic rf_on, use_custom, dac_on;
  logic signed [15:0] wave_i, wave_q, corr_i, corr_q, dac_i, dac_q;
  int checks = 0, failures = 0;
  int q_i [$], q_q [$];
  bit q_on [$];

  pulse_mod dut (.*);

  always #5 clk = ~clk;

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int satr(longint v);
    longint r = (v + 16384) >>> 15;
    if (r > 32767) return 32767;
    if (r < -32768) return -32768;
    return int'(r);
  endfunction

  initial begin
    bit on_prev = 0;
    int n_sat = 0;
    rf_on = 0; use_custom = 0; wave_i = 0; wave_q = 0; corr_i = 0; corr_q = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int p = 0; p < 12; p++) begin
      use_custom = (p % 3 != 0);
      corr_i = 16'($urandom); corr_q = 16'($urandom);
      if (p == 1) begin corr_i = 16'sh8000; corr_q = 16'sh8000; end
      for (int n = 0; n < 80; n++) begin
        int ei, eq, wi, wq;
        @(negedge clk);
        // sample presented now belongs to the previous gate clock
        wave_i = 16'($urandom); wave_q = 16'($urandom);
        if (p == 1) begin wave_i = 16'sh8000; wave_q = 16'sh7FFF; end
        wi = use_custom ? int'(wave_i) : 32767;
        wq = use_custom ? int'(wave_q) : 0;
        ei = satr(longint'(wi) * corr_i - longint'(wq) * corr_q);
        eq = satr(longint'(wi) * corr_q + longint'(wq) * corr_i);
        if (ei == 32767 || ei == -32768) n_sat++;
        q_on.push_back(on_prev);
        q_i.push_back(on_prev ? ei : 0);
        q_q.push_back(on_prev ? eq : 0);
        rf_on = (n >= 10 && n < 60);
        on_prev = rf_on;
      end
    end
    checks++;
    if (n_sat == 0) begin failures++; $display("saturation never exercised"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // the product for the sample presented at clock t appears after the next edge
  always @(negedge clk) begin
    if (q_on.size() > 1) begin
      bit eon; int ei, eq;
      eon = q_on.pop_front(); ei = q_i.pop_front(); eq = q_q.pop_front();
      checks++;
      if (dac_on != eon || int'(dac_i) != ei || int'(dac_q) != eq) begin
        failures++;
        if (failures < 10) $display("dac %0d/%0d on=%0d exp %0d/%0d on=%0d", dac_i, dac_q, dac_on, ei, eq, eon);
      end
    end
  end
endmodule
