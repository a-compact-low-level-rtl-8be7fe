// llrf_pkg: types and constants shared by the programmable-logic part of the
// compact RFSoC low-level RF (LLRF) controller.
//
// The PL runs on one clock at the baseband data rate of the RF data converter
// datapaths (245.76 MSPS after 10x decimation on the ADC side and before 24x
// interpolation on the DAC side), one I/Q sample per clock. I and Q are 16-bit
// two's complement; a DAC baseband amplitude of about 32000 is close to full
// scale. Phases are 16-bit binary angles (65536 = 360 degrees).
//
// The AXI4-Lite and AXI4 write-channel structs model the buses between the
// PL and the processing system. The register map is this design's own: the
// user parameters (set values, correction gains, upper and lower limits for
// amplitude and phase) follow the list of user parameters of the platform, the
// rest (tolerances, window, timing, DMA setup) are choices of this design.
package llrf_pkg;

  localparam int unsigned IQ_W    = 16;
  localparam int unsigned PHASE_W = 16;

  // Default timing: 245.76e6 samples/s / 60 Hz = 4,096,000 clocks per pulse
  // period; a 2 us pulse is 491.52 samples, rounded up to 492.
  localparam int unsigned DEF_PERIOD    = 4_096_000;
  localparam int unsigned DEF_PULSE_LEN = 492;

  // Fixed-point formats
  localparam int unsigned GAIN_FRAC = 8;   // correction gains are unsigned Q8.8

  // CORDIC micro-rotation angles: entry k is round(atan(2**-k) / (2*pi) * 2**20),
  // a 20-bit binary angle (2**20 = one full turn).
  function automatic logic [19:0] cordic_atan(input int unsigned k);
    case (k)
      0:  return 20'd131072;
      1:  return 20'd77376;
      2:  return 20'd40884;
      3:  return 20'd20753;
      4:  return 20'd10417;
      5:  return 20'd5213;
      6:  return 20'd2607;
      7:  return 20'd1304;
      8:  return 20'd652;
      9:  return 20'd326;
      10: return 20'd163;
      11: return 20'd81;
      12: return 20'd41;
      13: return 20'd20;
      14: return 20'd10;
      15: return 20'd5;
      16: return 20'd3;
      17: return 20'd1;
      18: return 20'd1;
      default: return 20'd0;
    endcase
  endfunction

  typedef logic signed [IQ_W-1:0] iq_t;

  typedef struct packed {
    iq_t q;
    iq_t i;
  } iq_pair_t;

  // ---------------------------------------------------------------- AXI4-Lite
  typedef struct packed {
    logic [15:0] awaddr;
    logic        awvalid;
    logic [31:0] wdata;
    logic [3:0]  wstrb;
    logic        wvalid;
    logic        bready;
    logic [15:0] araddr;
    logic        arvalid;
    logic        rready;
  } axil_req_t;

  typedef struct packed {
    logic        awready;
    logic        wready;
    logic [1:0]  bresp;
    logic        bvalid;
    logic        arready;
    logic [31:0] rdata;
    logic [1:0]  rresp;
    logic        rvalid;
  } axil_rsp_t;

  // ------------------------------------- AXI4 write (master), 128-bit data
  typedef struct packed {
    logic [31:0] awaddr;
    logic [7:0]  awlen;
    logic [2:0]  awsize;
    logic [1:0]  awburst;
    logic        awvalid;
    logic [127:0] wdata;
    logic [15:0] wstrb;
    logic        wlast;
    logic        wvalid;
    logic        bready;
  } axi_w_req_t;

  typedef struct packed {
    logic        awready;
    logic        wready;
    logic [1:0]  bresp;
    logic        bvalid;
  } axi_w_rsp_t;

  // ------------------------------------------------------------ configuration
  typedef struct packed {
    logic        run;            // pulse sequencer running
    logic        fb_enable;      // run the pulse-to-pulse loop
    logic        use_custom;     // 1: waveform memory, 0: default square wave
    logic        dma_enable;     // capture a stream to DDR each pulse
    logic [1:0]  dma_src;        // DMA stream: DMA_REFL_IQ, DMA_KF_POLAR or DMA_REFL_POLAR
    logic [31:0] period;         // clocks per pulse period
    logic [15:0] pulse_len;      // samples per RF pulse
    logic [15:0] win_start;      // averaging window start, samples after trigger
    logic [3:0]  win_log2;       // averaging window length = 2**win_log2
    logic [15:0] amp_set;        // desired measured amplitude
    logic [15:0] amp_gain;       // Q8.8 correction gain
    logic [15:0] amp_upper;      // drive amplitude limits
    logic [15:0] amp_lower;
    logic [15:0] amp_tol;        // tolerance on |amplitude error|
    logic [15:0] amp_init;       // drive amplitude loaded when feedback is off
    logic [15:0] phs_set;        // desired measured phase (binary angle)
    logic [15:0] phs_gain;       // Q8.8 correction gain
    logic [15:0] phs_upper;      // drive phase limits (signed binary angle)
    logic [15:0] phs_lower;
    logic [15:0] phs_tol;        // tolerance on |phase error|
    logic [15:0] phs_init;       // drive phase loaded when feedback is off
    logic [31:0] dma_base;       // DDR byte address of the capture buffer
    logic [15:0] dma_len;        // samples captured per pulse
  } llrf_cfg_t;

  typedef struct packed {
    logic        in_tol;
    logic        dma_overflow;
    logic [16:0] meas_amp;
    logic [15:0] meas_phs;
    logic [15:0] drive_amp;
    logic [15:0] drive_phs;
    logic [31:0] pulse_count;
    logic [31:0] update_count;
    logic [31:0] dma_count;
  } llrf_status_t;

  // DMA stream select (CTRL[5:4])
  localparam logic [1:0] DMA_REFL_IQ    = 2'd0;  // {Q, I} of the cavity reflection
  localparam logic [1:0] DMA_KF_POLAR   = 2'd1;  // {phase, magnitude} of the klystron forward
  localparam logic [1:0] DMA_REFL_POLAR = 2'd2;  // {phase, magnitude} of the cavity reflection

  // Register map (byte addresses)
  localparam logic [7:0] R_CTRL      = 8'h00;  // [0] fb_enable [1] use_custom [2] dma_enable [3] run [5:4] dma_src
  localparam logic [7:0] R_PERIOD    = 8'h04;
  localparam logic [7:0] R_PULSE_LEN = 8'h08;
  localparam logic [7:0] R_WIN       = 8'h0C;  // [15:0] start, [19:16] log2 length
  localparam logic [7:0] R_AMP_SET   = 8'h10;
  localparam logic [7:0] R_AMP_GAIN  = 8'h14;
  localparam logic [7:0] R_AMP_LIM   = 8'h18;  // [15:0] lower, [31:16] upper
  localparam logic [7:0] R_AMP_TOL   = 8'h1C;
  localparam logic [7:0] R_AMP_INIT  = 8'h20;
  localparam logic [7:0] R_PHS_SET   = 8'h24;
  localparam logic [7:0] R_PHS_GAIN  = 8'h28;
  localparam logic [7:0] R_PHS_LIM   = 8'h2C;  // [15:0] lower, [31:16] upper
  localparam logic [7:0] R_PHS_TOL   = 8'h30;
  localparam logic [7:0] R_PHS_INIT  = 8'h34;
  localparam logic [7:0] R_DMA_BASE  = 8'h38;
  localparam logic [7:0] R_DMA_LEN   = 8'h3C;
  localparam logic [7:0] R_STATUS    = 8'h80;  // [0] in_tol [1] dma_overflow
  localparam logic [7:0] R_MEAS      = 8'h84;  // [16:0] amplitude
  localparam logic [7:0] R_MEAS_PHS  = 8'h88;
  localparam logic [7:0] R_DRIVE     = 8'h8C;  // [15:0] amp, [31:16] phase
  localparam logic [7:0] R_PULSES    = 8'h90;
  localparam logic [7:0] R_UPDATES   = 8'h94;
  localparam logic [7:0] R_DMAS      = 8'h98;

endpackage
