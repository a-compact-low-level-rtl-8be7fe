// axil_regs: AXI4-Lite register file for the user parameters.
//
// Software loads the controller's parameters through registers: for amplitude
// and for phase a set value, a correction gain, an upper and a lower limit
// (the platform's parameter list), plus this design's own tolerances, initial
// drive, averaging window, pulse timing and DMA setup. Status registers give
// the last measurement, the drive in use and event counters. The map is in
// llrf_pkg (R_* constants); all registers are 32 bits wide at word addresses.
//
// How it works: axil_slave turns bus transfers into one-clock strobes; writes
// honour the byte strobes; reads are decoded combinationally and returned one
// clock later by axil_slave. Unmapped addresses read as zero and ignore
// writes. Reset values: sequencer stopped, feedback off, square wave, 60 Hz /
// 2 us timing, window of 128 samples from sample 200, drive 8000 at 0 deg,
// limits wide open, gains and tolerances zero, DMA of 2048 samples at 0.
//
// Interface: s_axil_req/rsp; cfg (llrf_cfg_t) to the datapath; status
// (llrf_status_t) from it; clr_status pulses when STATUS is written.
module axil_regs
  import llrf_pkg::*;
(
  input  logic         clk,
  input  logic         rst_n,
  input  axil_req_t    s_axil_req,
  output axil_rsp_t    s_axil_rsp,
  output llrf_cfg_t    cfg,
  output logic         clr_status,
  input  llrf_status_t status
);
  logic        wr_en, rd_en;
  logic [15:0] wr_addr, rd_addr;
  logic [31:0] wr_data, rd_data;
  logic [3:0]  wr_strb;

  axil_slave u_bus (
    .clk, .rst_n, .req(s_axil_req), .rsp(s_axil_rsp),
    .wr_en, .wr_addr, .wr_data, .wr_strb,
    .rd_en, .rd_addr, .rd_data
  );

  // Register images in bus layout
  logic [31:0] r_ctrl, r_period, r_plen, r_win, r_amp_set, r_amp_gain, r_amp_lim,
               r_amp_tol, r_amp_init, r_phs_set, r_phs_gain, r_phs_lim, r_phs_tol,
               r_phs_init, r_dma_base, r_dma_len;

  function automatic logic [31:0] merge(input logic [31:0] old, input logic [31:0] d,
                                        input logic [3:0] strb);
    logic [31:0] r;
    for (int b = 0; b < 4; b++) r[8*b +: 8] = strb[b] ? d[8*b +: 8] : old[8*b +: 8];
    return r;
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      r_ctrl     <= 32'h0;
      r_period   <= DEF_PERIOD;
      r_plen     <= DEF_PULSE_LEN;
      r_win      <= {12'h0, 4'd7, 16'd200};
      r_amp_set  <= 32'd0;
      r_amp_gain <= 32'd0;
      r_amp_lim  <= {16'd32767, 16'd0};
      r_amp_tol  <= 32'd0;
      r_amp_init <= 32'd8000;
      r_phs_set  <= 32'd0;
      r_phs_gain <= 32'd0;
      r_phs_lim  <= {16'h7FFF, 16'h8000};
      r_phs_tol  <= 32'd0;
      r_phs_init <= 32'd0;
      r_dma_base <= 32'd0;
      r_dma_len  <= 32'd2048;
    end else if (wr_en) begin
      case (wr_addr[7:0])
        R_CTRL:      r_ctrl     <= merge(r_ctrl,     wr_data, wr_strb);
        R_PERIOD:    r_period   <= merge(r_period,   wr_data, wr_strb);
        R_PULSE_LEN: r_plen     <= merge(r_plen,     wr_data, wr_strb);
        R_WIN:       r_win      <= merge(r_win,      wr_data, wr_strb);
        R_AMP_SET:   r_amp_set  <= merge(r_amp_set,  wr_data, wr_strb);
        R_AMP_GAIN:  r_amp_gain <= merge(r_amp_gain, wr_data, wr_strb);
        R_AMP_LIM:   r_amp_lim  <= merge(r_amp_lim,  wr_data, wr_strb);
        R_AMP_TOL:   r_amp_tol  <= merge(r_amp_tol,  wr_data, wr_strb);
        R_AMP_INIT:  r_amp_init <= merge(r_amp_init, wr_data, wr_strb);
        R_PHS_SET:   r_phs_set  <= merge(r_phs_set,  wr_data, wr_strb);
        R_PHS_GAIN:  r_phs_gain <= merge(r_phs_gain, wr_data, wr_strb);
        R_PHS_LIM:   r_phs_lim  <= merge(r_phs_lim,  wr_data, wr_strb);
        R_PHS_TOL:   r_phs_tol  <= merge(r_phs_tol,  wr_data, wr_strb);
        R_PHS_INIT:  r_phs_init <= merge(r_phs_init, wr_data, wr_strb);
        R_DMA_BASE:  r_dma_base <= merge(r_dma_base, wr_data, wr_strb);
        R_DMA_LEN:   r_dma_len  <= merge(r_dma_len,  wr_data, wr_strb);
        default: ;
      endcase
    end
  end

  // writing any value to STATUS clears its sticky flags
  assign clr_status = wr_en && (wr_addr[7:0] == R_STATUS);

  always_comb begin
    cfg            = '0;
    cfg.fb_enable  = r_ctrl[0];
    cfg.use_custom = r_ctrl[1];
    cfg.dma_enable = r_ctrl[2];
    cfg.run        = r_ctrl[3];
    cfg.dma_src    = r_ctrl[5:4];
    cfg.period     = r_period;
    cfg.pulse_len  = r_plen[15:0];
    cfg.win_start  = r_win[15:0];
    cfg.win_log2   = r_win[19:16];
    cfg.amp_set    = r_amp_set[15:0];
    cfg.amp_gain   = r_amp_gain[15:0];
    cfg.amp_lower  = r_amp_lim[15:0];
    cfg.amp_upper  = r_amp_lim[31:16];
    cfg.amp_tol    = r_amp_tol[15:0];
    cfg.amp_init   = r_amp_init[15:0];
    cfg.phs_set    = r_phs_set[15:0];
    cfg.phs_gain   = r_phs_gain[15:0];
    cfg.phs_lower  = r_phs_lim[15:0];
    cfg.phs_upper  = r_phs_lim[31:16];
    cfg.phs_tol    = r_phs_tol[15:0];
    cfg.phs_init   = r_phs_init[15:0];
    cfg.dma_base   = r_dma_base;
    cfg.dma_len    = r_dma_len[15:0];
  end

  always_comb begin
    case (rd_addr[7:0])
      R_CTRL:      rd_data = r_ctrl;
      R_PERIOD:    rd_data = r_period;
      R_PULSE_LEN: rd_data = r_plen;
      R_WIN:       rd_data = r_win;
      R_AMP_SET:   rd_data = r_amp_set;
      R_AMP_GAIN:  rd_data = r_amp_gain;
      R_AMP_LIM:   rd_data = r_amp_lim;
      R_AMP_TOL:   rd_data = r_amp_tol;
      R_AMP_INIT:  rd_data = r_amp_init;
      R_PHS_SET:   rd_data = r_phs_set;
      R_PHS_GAIN:  rd_data = r_phs_gain;
      R_PHS_LIM:   rd_data = r_phs_lim;
      R_PHS_TOL:   rd_data = r_phs_tol;
      R_PHS_INIT:  rd_data = r_phs_init;
      R_DMA_BASE:  rd_data = r_dma_base;
      R_DMA_LEN:   rd_data = r_dma_len;
      R_STATUS:    rd_data = {30'd0, status.dma_overflow, status.in_tol};
      R_MEAS:      rd_data = {15'd0, status.meas_amp};
      R_MEAS_PHS:  rd_data = {16'd0, status.meas_phs};
      R_DRIVE:     rd_data = {status.drive_phs, status.drive_amp};
      R_PULSES:    rd_data = status.pulse_count;
      R_UPDATES:   rd_data = status.update_count;
      R_DMAS:      rd_data = status.dma_count;
      default:     rd_data = 32'd0;
    endcase
  end
endmodule
