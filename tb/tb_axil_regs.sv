// tb_axil_regs: self-checking test of the register file.
// Checks the reset values (60 Hz / 2 us timing), writes random values to every
// configuration register and checks both the bus read-back and the decoded
// cfg fields, checks a byte-strobed write, the status registers (driven with
// random values), that unmapped addresses read zero, and that writing STATUS
// pulses clr_status for one clock.
module tb_axil_regs;
  import llrf_pkg::*;
  logic clk = 0, rst_n = 0;
  axil_req_t req;
  axil_rsp_t rsp;
  llrf_cfg_t cfg;
  logic clr_status;
  llrf_status_t status;
  int checks = 0, failures = 0, n_clr = 0;

  axil_regs dut (.clk, .rst_n, .s_axil_req(req), .s_axil_rsp(rsp), .cfg, .clr_status, .status);
  axil_master_bfm bfm (.clk, .req, .rsp);

  always #5 clk = ~clk;
  always @(posedge clk) if (clr_status) n_clr++;

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic expect32(string what, logic [31:0] got, logic [31:0] exp);
    checks++;
    if (got !== exp) begin failures++; $display("%s: %h expected %h", what, got, exp); end
  endtask

  initial begin
    logic [31:0] v [16];
    logic [31:0] d;
    status = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    expect32("reset period", cfg.period, 32'(DEF_PERIOD));
    expect32("reset pulse_len", 32'(cfg.pulse_len), 32'(DEF_PULSE_LEN));
    expect32("reset run", 32'(cfg.run), 0);
    for (int r = 0; r < 16; r++) begin
      v[r] = $urandom;
      bfm.write(16'(r * 4), v[r]);
    end
    for (int r = 0; r < 16; r++) begin
      bfm.read(16'(r * 4), d);
      expect32($sformatf("readback %0h", r * 4), d, v[r]);
    end
    expect32("fb_enable",  32'(cfg.fb_enable),  32'(v[0][0]));
    expect32("use_custom", 32'(cfg.use_custom), 32'(v[0][1]));
    expect32("dma_enable", 32'(cfg.dma_enable), 32'(v[0][2]));
    expect32("run",        32'(cfg.run),        32'(v[0][3]));
    expect32("dma_src",    32'(cfg.dma_src),    32'(v[0][5:4]));
    expect32("period",     cfg.period,          v[1]);
    expect32("pulse_len",  32'(cfg.pulse_len),  32'(v[2][15:0]));
    expect32("win_start",  32'(cfg.win_start),  32'(v[3][15:0]));
    expect32("win_log2",   32'(cfg.win_log2),   32'(v[3][19:16]));
    expect32("amp_set",    32'(cfg.amp_set),    32'(v[4][15:0]));
    expect32("amp_gain",   32'(cfg.amp_gain),   32'(v[5][15:0]));
    expect32("amp_lower",  32'(cfg.amp_lower),  32'(v[6][15:0]));
    expect32("amp_upper",  32'(cfg.amp_upper),  32'(v[6][31:16]));
    expect32("amp_tol",    32'(cfg.amp_tol),    32'(v[7][15:0]));
    expect32("amp_init",   32'(cfg.amp_init),   32'(v[8][15:0]));
    expect32("phs_set",    32'(cfg.phs_set),    32'(v[9][15:0]));
    expect32("phs_gain",   32'(cfg.phs_gain),   32'(v[10][15:0]));
    expect32("phs_lower",  32'(cfg.phs_lower),  32'(v[11][15:0]));
    expect32("phs_upper",  32'(cfg.phs_upper),  32'(v[11][31:16]));
    expect32("phs_tol",    32'(cfg.phs_tol),    32'(v[12][15:0]));
    expect32("phs_init",   32'(cfg.phs_init),   32'(v[13][15:0]));
    expect32("dma_base",   cfg.dma_base,        v[14]);
    expect32("dma_len",    32'(cfg.dma_len),    32'(v[15][15:0]));
    // byte strobes: replace byte 2 of PERIOD only
    bfm.write(16'(R_PERIOD), 32'h00AB0000, 4'b0100);
    expect32("strobed period", cfg.period, {v[1][31:24], 8'hAB, v[1][15:0]});
    // status
    status.in_tol = 1; status.dma_overflow = 1;
    status.meas_amp = 17'($urandom); status.meas_phs = 16'($urandom);
    status.drive_amp = 16'($urandom); status.drive_phs = 16'($urandom);
    status.pulse_count = $urandom; status.update_count = $urandom; status.dma_count = $urandom;
    bfm.read(16'(R_STATUS), d);   expect32("status", d, 32'h3);
    bfm.read(16'(R_MEAS), d);     expect32("meas", d, {15'd0, status.meas_amp});
    bfm.read(16'(R_MEAS_PHS), d); expect32("meas_phs", d, {16'd0, status.meas_phs});
    bfm.read(16'(R_DRIVE), d);    expect32("drive", d, {status.drive_phs, status.drive_amp});
    bfm.read(16'(R_PULSES), d);   expect32("pulses", d, status.pulse_count);
    bfm.read(16'(R_UPDATES), d);  expect32("updates", d, status.update_count);
    bfm.read(16'(R_DMAS), d);     expect32("dmas", d, status.dma_count);
    bfm.read(16'h00F0, d);        expect32("unmapped", d, 0);
    expect32("no clr yet", n_clr, 0);
    bfm.write(16'(R_STATUS), 32'h1);
    repeat (2) @(posedge clk);
    expect32("clr_status pulses", n_clr, 1);
    expect32("bus protocol", bfm.errors, 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
