// llrf_top: programmable-logic part of a compact RFSoC low-level RF
// controller for a C-band (5.712 GHz) compact electron linac.
//
// The RF converters sample the klystron forward and cavity reflection signals
// directly; the vendor's converter datapaths mix them to baseband and
// decimate them to 245.76 MSPS I/Q, which is what this module receives, one
// sample per clock. On the output side it produces the baseband drive pulse
// that the DAC datapath interpolates and up-converts. In between:
//   * pulse_seq   times the RF pulses (default 2 us at 60 Hz);
//   * wave_bram + pulse_mod build each pulse from the user's waveform (or a
//     square wave) times the drive I/Q;
//   * fb_ctrl     measures the klystron forward signal during each pulse and
//     corrects the drive amplitude and phase for the next pulse;
//   * dma_s2mm    writes one stream per pulse to DDR, selected by CTRL[5:4]:
//     the cavity reflection I/Q, the per-sample magnitude and phase of the
//     klystron forward signal (for the software pulse-shape correction), or
//     the magnitude and phase of the cavity reflection (frequency tuning);
//   * iq_to_polar gives the cavity reflection phase per sample, from whose
//     slope after the pulse software derives the resonance offset
//     (delta_omega = d(phi)/dt) and retunes the converter NCOs;
//   * axil_regs   holds the user parameters and status.
// The block structure follows the platform's block diagram; the register map,
// bus widths and the cycle-level timing are this design's choices.
//
// Interface: one clock (245.76 MHz) and an active-low asynchronous reset;
// adc_kf_* / adc_refl_* baseband inputs with valid; dac_* baseband output
// with dac_valid (high inside the pulse); two AXI4-Lite slaves (registers,
// waveform memory) and one AXI4 write master (DMA) as plain structs;
// refl_phase stream; pulse_trig (start of each pulse period).
// Timing: dac_* follow the internal pulse trigger by 3 clocks.
module llrf_top
  import llrf_pkg::*;
#(
  parameter int unsigned WAVE_DEPTH = 2048,
  parameter int unsigned MA_LOG2    = 4,
  parameter int unsigned DMA_BURST  = 16,
  parameter int unsigned DMA_FIFO   = 32
) (
  input  logic               clk,
  input  logic               rst_n,
  // baseband from the ADC datapaths
  input  iq_t                adc_kf_i,
  input  iq_t                adc_kf_q,
  input  logic               adc_kf_valid,
  input  iq_t                adc_refl_i,
  input  iq_t                adc_refl_q,
  input  logic               adc_refl_valid,
  // baseband to the DAC datapath
  output iq_t                dac_i,
  output iq_t                dac_q,
  output logic               dac_valid,
  // processing-system buses
  input  axil_req_t          s_axil_reg_req,
  output axil_rsp_t          s_axil_reg_rsp,
  input  axil_req_t          s_axil_wave_req,
  output axil_rsp_t          s_axil_wave_rsp,
  output axi_w_req_t         m_axi_dma_req,
  input  axi_w_rsp_t         m_axi_dma_rsp,
  // cavity reflection phase, one value per input sample
  output logic signed [15:0] refl_phase,
  output logic [16:0]        refl_mag,
  output logic               refl_phase_valid,
  output logic               pulse_trig
);
  localparam int unsigned WA = $clog2(WAVE_DEPTH);

  llrf_cfg_t    cfg;
  llrf_status_t status;
  logic         clr_status;

  logic         trig, rf_on;
  logic [15:0]  idx;
  logic [31:0]  pulse_count;

  iq_t          wave_i, wave_q, corr_i, corr_q;
  logic [16:0]  meas_amp;
  logic signed [15:0] meas_phs, drive_phs;
  logic [15:0]  drive_amp;
  logic         in_tol, upd_valid, changed;
  logic [31:0]  update_count, dma_count;
  logic         dma_overflow, dma_busy;
  logic [16:0]  kf_mag;
  logic signed [15:0] kf_phs;
  logic         kf_pol_valid;
  iq_t          dma_i, dma_q;
  logic         dma_valid;

  axil_regs u_regs (
    .clk, .rst_n, .s_axil_req(s_axil_reg_req), .s_axil_rsp(s_axil_reg_rsp),
    .cfg, .clr_status, .status
  );

  pulse_seq u_seq (
    .clk, .rst_n, .run(cfg.run), .period(cfg.period), .pulse_len(cfg.pulse_len),
    .trig, .rf_on, .idx, .pulse_count
  );

  wave_bram #(.DEPTH(WAVE_DEPTH)) u_wave (
    .clk, .rst_n, .s_axil_req(s_axil_wave_req), .s_axil_rsp(s_axil_wave_rsp),
    .rd_addr(idx[WA-1:0]), .rd_i(wave_i), .rd_q(wave_q)
  );

  fb_ctrl #(.MA_LOG2(MA_LOG2)) u_fb (
    .clk, .rst_n, .cfg, .trig,
    .kf_i(adc_kf_i), .kf_q(adc_kf_q), .kf_valid(adc_kf_valid),
    .corr_i, .corr_q, .meas_amp, .meas_phs, .drive_amp, .drive_phs,
    .in_tol, .upd_valid, .changed, .update_count
  );

  pulse_mod u_mod (
    .clk, .rst_n, .rf_on, .use_custom(cfg.use_custom),
    .wave_i, .wave_q, .corr_i, .corr_q,
    .dac_i, .dac_q, .dac_on(dac_valid)
  );

  dma_s2mm #(.BURST(DMA_BURST), .FIFO_DEPTH(DMA_FIFO)) u_dma (
    .clk, .rst_n, .trig, .enable(cfg.dma_enable), .base(cfg.dma_base), .len(cfg.dma_len),
    .in_i(dma_i), .in_q(dma_q), .in_valid(dma_valid),
    .m_axi_req(m_axi_dma_req), .m_axi_rsp(m_axi_dma_rsp),
    .clr_overflow(clr_status), .overflow(dma_overflow), .busy(dma_busy),
    .done_count(dma_count)
  );

  iq_to_polar u_refl_phase (
    .clk, .rst_n, .i_in(adc_refl_i), .q_in(adc_refl_q), .in_valid(adc_refl_valid),
    .mag(refl_mag), .phase(refl_phase), .out_valid(refl_phase_valid)
  );

  // per-sample magnitude and phase of the klystron forward signal
  iq_to_polar u_kf_polar (
    .clk, .rst_n, .i_in(adc_kf_i), .q_in(adc_kf_q), .in_valid(adc_kf_valid),
    .mag(kf_mag), .phase(kf_phs), .out_valid(kf_pol_valid)
  );

  // DMA source: a 16-bit input's magnitude is below 46341, so bit 16 of a
  // magnitude is always zero and the low 16 bits carry it unsigned
  always_comb begin
    case (cfg.dma_src)
      DMA_KF_POLAR: begin
        dma_i     = kf_mag[15:0];
        dma_q     = kf_phs;
        dma_valid = kf_pol_valid;
      end
      DMA_REFL_POLAR: begin
        dma_i     = refl_mag[15:0];
        dma_q     = refl_phase;
        dma_valid = refl_phase_valid;
      end
      default: begin
        dma_i     = adc_refl_i;
        dma_q     = adc_refl_q;
        dma_valid = adc_refl_valid;
      end
    endcase
  end

  always_comb begin
    status              = '0;
    status.in_tol       = in_tol;
    status.dma_overflow = dma_overflow;
    status.meas_amp     = meas_amp;
    status.meas_phs     = meas_phs;
    status.drive_amp    = drive_amp;
    status.drive_phs    = drive_phs;
    status.pulse_count  = pulse_count;
    status.update_count = update_count;
    status.dma_count    = dma_count;
  end

  assign pulse_trig = trig;
endmodule
