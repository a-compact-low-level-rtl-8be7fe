// tb_llrf_full: full-size run of llrf_top with no parameter override and the
// register reset values for the pulse timing: 4,096,000 clocks per period
// (60 Hz at 245.76 MHz), 492-sample (2 us) pulses, a 128-sample averaging
// window from sample 200 and a 2048-sample reflection capture. Software only
// enables the sequencer, feedback and DMA and sets set values and gains.
// Over three pulses the test checks the 60 Hz trigger spacing, the 2 us DAC
// gate, the last 2048-sample DMA capture against the reflection stream, and
// that every pulse's feedback update moves the measured amplitude towards
// its set value. The RF chain is the behavioural rf_chain_model.
module tb_llrf_full;
  import llrf_pkg::*;
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

  llrf_top dut (.*);
  axil_master_bfm reg_bus  (.clk, .req(s_axil_reg_req),  .rsp(s_axil_reg_rsp));
  axil_master_bfm wave_bus (.clk, .req(s_axil_wave_req), .rsp(s_axil_wave_rsp));
  axi_mem_model #(.READY_PCT(50)) ddr (.clk, .req(m_axi_dma_req), .rsp(m_axi_dma_rsp));
  rf_chain_model rf (.clk, .dac_i, .dac_q, .dac_valid, .kf_i(adc_kf_i), .kf_q(adc_kf_q),
                     .refl_i(adc_refl_i), .refl_q(adc_refl_q));

  always #2 clk = ~clk;

  initial begin
    #80000000;   // 20 M clocks
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // trigger spacing, DAC gate length and the reference reflection stream
  longint cyc = 0, last_trig = -1;
  int gate = 0, gate_len [$], spacing [$];
  logic [31:0] refl_rec [$];
  int rec_left = 0;
  always @(posedge clk) if (rst_n) begin
    cyc++;
    if (dac_valid) gate++;
    else if (gate != 0) begin gate_len.push_back(gate); gate = 0; end
    if (rec_left > 0) begin refl_rec.push_back({adc_refl_q, adc_refl_i}); rec_left--; end
    if (pulse_trig) begin
      if (last_trig >= 0) spacing.push_back(int'(cyc - last_trig));
      last_trig = cyc;
      refl_rec.delete(); rec_left = 2048;   // each capture overwrites the last
    end
  end

  initial begin
    logic [31:0] d, st;
    int err_prev, err;
    repeat (5) @(posedge clk);
    rst_n = 1;
    repeat (5) @(posedge clk);
    reg_bus.read(16'(R_PERIOD), d);
    checks++;
    if (d != 32'd4_096_000) begin failures++; $display("period reset value %0d", d); end
    reg_bus.write(16'(R_AMP_SET), 400);
    reg_bus.write(16'(R_AMP_GAIN), 5120);
    reg_bus.write(16'(R_AMP_TOL), 3);
    reg_bus.write(16'(R_PHS_GAIN), 128);
    reg_bus.write(16'(R_PHS_TOL), 60);
    reg_bus.write(16'(R_DMA_BASE), 32'h0008_0000);
    reg_bus.write(16'(R_CTRL), 32'b1101);
    err_prev = 400;
    for (int p = 0; p < 3; p++) begin
      do @(posedge clk); while (!pulse_trig);
      repeat (3000) @(posedge clk);
      reg_bus.read(16'(R_MEAS), d);
      err = 400 - int'(d);
      if (err < 0) err = -err;
      $display("pulse %0d: measured amplitude %0d", p, d);
      checks++;
      if (err >= err_prev && err > 3) begin failures++; $display("amplitude error did not shrink"); end
      err_prev = err;
    end
    reg_bus.write(16'(R_CTRL), 32'b0000);
    repeat (1000) @(posedge clk);

    checks++;
    if (spacing.size() != 2 || spacing[0] != 4_096_000 || spacing[1] != 4_096_000) begin
      failures++; $display("trigger spacing wrong (%0d entries)", spacing.size());
    end
    checks++;
    if (gate_len.size() != 3) begin failures++; $display("%0d DAC gates", gate_len.size()); end
    foreach (gate_len[k]) begin
      checks++;
      if (gate_len[k] != 492) begin failures++; $display("gate %0d is %0d samples", k, gate_len[k]); end
    end
    begin
      int bad;
      bad = 0;
      for (int k = 0; k < 2048; k++)
        if (!ddr.mem.exists(32'h0008_0000 + 4*k) || ddr.mem[32'h0008_0000 + 4*k] != refl_rec[k]) bad++;
      checks++;
      if (bad != 0 || refl_rec.size() != 2048) begin failures++; $display("%0d DMA words wrong", bad); end
    end
    reg_bus.read(16'(R_DMAS), d);
    checks++;
    if (d != 3) begin failures++; $display("%0d captures", d); end
    reg_bus.read(16'(R_STATUS), st);
    checks++;
    if (st[1]) begin failures++; $display("DMA overflow"); end
    checks++;
    if (ddr.errors != 0 || reg_bus.errors != 0) begin failures++; $display("bus rule errors"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
