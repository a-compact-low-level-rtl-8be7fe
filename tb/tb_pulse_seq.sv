// tb_pulse_seq: self-checking test of the pulse timing.
// Short setting (period 100, pulse 30): trig must come every 100 clocks, the
// gate must be high for exactly 30 clocks starting with trig, idx must count
// 0..29 inside the gate, and pulse_count must count triggers; stopping run
// must stop the pulses. Then the defaults: 4,096,000 clocks between triggers
// (60 Hz at 245.76 MHz) and a 492-sample (2 us) gate.
module tb_pulse_seq;
  import llrf_pkg::*;
  logic clk = 0, rst_n = 0, run = 0;
  logic [31:0] period;
  logic [15:0] pulse_len;
  logic trig, rf_on;
  logic [15:0] idx;
  logic [31:0] pulse_count;
  int checks = 0, failures = 0;

  pulse_seq dut (.*);

  always #2 clk = ~clk;

  initial begin
    #40000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic measure(int exp_period, int exp_len, int npulses);
    int t = 0, last_trig = -1, on_len = 0, ntrig = 0;
    logic [31:0] pc0;
    pc0 = pulse_count;
    while (ntrig < npulses + 1) begin
      @(negedge clk);
      if (trig) begin
        if (last_trig >= 0) begin
          checks++;
          if (t - last_trig != exp_period) begin failures++; $display("period %0d exp %0d", t - last_trig, exp_period); end
          checks++;
          if (on_len != exp_len) begin failures++; $display("gate %0d exp %0d", on_len, exp_len); end
        end
        checks++;
        if (!rf_on || idx != 0) begin failures++; $display("trig without gate start"); end
        last_trig = t; on_len = 0; ntrig++;
      end
      if (rf_on) begin
        if (idx != 16'(on_len)) begin checks++; failures++; $display("idx %0d exp %0d", idx, on_len); end
        on_len++;
      end
      t++;
    end
    checks++;
    if (pulse_count != pc0 + 32'(ntrig)) begin failures++; $display("pulse_count %0d", pulse_count); end
  endtask

  initial begin
    period = 100; pulse_len = 30;
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (5) @(negedge clk);
    checks++;
    if (trig || rf_on) begin failures++; $display("pulses while stopped"); end
    run = 1;
    measure(100, 30, 5);
    @(negedge clk) run = 0;
    repeat (300) begin
      @(negedge clk);
      if (trig || rf_on) begin checks++; failures++; $display("pulse after stop"); break; end
    end
    period = DEF_PERIOD; pulse_len = DEF_PULSE_LEN;
    checks++;
    if (DEF_PERIOD * 60 != 245_760_000) begin failures++; $display("default period is not 60 Hz"); end
    @(negedge clk) run = 1;
    measure(4_096_000, 492, 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
