// axi_mem_model: behavioural AXI4 write slave standing in for the DDR memory
// of the processing system. Accepts one burst at a time with random ready
// stalls (READY_PCT percent of clocks ready) and stores every 32-bit lane of a
// 128-bit beat whose four strobes are set in an associative array by byte
// address. Checks the burst rules the DMA must follow: INCR bursts of 16-byte
// beats, at most 16 beats, wlast exactly on the last beat, no 4 KB crossing,
// and the write address held stable while awvalid waits.
module axi_mem_model
  import llrf_pkg::*;
#(
  parameter int READY_PCT = 70
) (
  input  logic       clk,
  input  axi_w_req_t req,
  output axi_w_rsp_t rsp
);
  logic [31:0] mem [int unsigned];
  int errors = 0, bursts = 0, beats = 0;
  logic        in_burst = 0, bvalid = 0, awready = 0, wready = 0;
  logic [31:0] addr = 0;
  int          left = 0;
  logic        aw_wait = 0;
  logic [31:0] aw_q = 0;

  always_comb begin
    rsp         = '0;
    rsp.awready = awready;
    rsp.wready  = wready;
    rsp.bvalid  = bvalid;
  end

  always @(negedge clk) begin
    awready <= !in_burst && !bvalid && (($urandom % 100) < READY_PCT);
    wready  <= in_burst && (($urandom % 100) < READY_PCT);
  end

  // AW stability is checked from the 8th clock on (the master's state before
  // its reset has taken effect is arbitrary)
  int warm = 0;
  always @(posedge clk) begin
    if (warm < 8) warm++;
    if (warm >= 8 && aw_wait && (!req.awvalid || req.awaddr != aw_q)) begin
      errors++; $display("AXI4: AW changed while waiting");
    end
    aw_wait <= req.awvalid && !awready;
    aw_q    <= req.awaddr;
    if (req.awvalid && awready) begin
      if (req.awburst != 2'b01 || req.awsize != 3'd4 || req.awlen > 8'd15) begin
        errors++; $display("AXI4: bad burst len=%0d size=%0d burst=%0d", req.awlen, req.awsize, req.awburst);
      end
      if ((req.awaddr >> 12) != ((req.awaddr + 16 * (int'(req.awlen) + 1) - 1) >> 12)) begin
        errors++; $display("AXI4: burst crosses 4 KB at %h", req.awaddr);
      end
      in_burst <= 1; addr <= req.awaddr; left <= int'(req.awlen) + 1;
      bursts++;
    end
    if (req.wvalid && wready) begin
      for (int k = 0; k < 4; k++)
        if (req.wstrb[4*k +: 4] == 4'hF) mem[addr + 4*k] = req.wdata[32*k +: 32];
      beats++;
      if (req.wlast != (left == 1)) begin errors++; $display("AXI4: wlast wrong, %0d beats left", left); end
      addr <= addr + 16;
      left <= left - 1;
      if (left == 1) begin in_burst <= 0; bvalid <= 1; end
    end
    if (bvalid && req.bready) bvalid <= 0;
  end
endmodule
