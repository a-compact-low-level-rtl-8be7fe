// axil_master_bfm: testbench AXI4-Lite master with write/read tasks.
// Drives one transaction at a time; the address and data channels of a write
// are presented together. Checks the slave side of the handshake: once a
// response is valid it must stay valid, with the same payload, until taken.
module axil_master_bfm
  import llrf_pkg::*;
(
  input  logic      clk,
  output axil_req_t req,
  input  axil_rsp_t rsp
);
  int errors = 0;

  initial req = '0;

  task automatic write(input logic [15:0] addr, input logic [31:0] data,
                       input logic [3:0] strb = 4'hF);
    bit aw_done = 0, w_done = 0;
    @(negedge clk);
    req.awaddr = addr; req.awvalid = 1;
    req.wdata = data; req.wstrb = strb; req.wvalid = 1;
    req.bready = 1;
    while (!(aw_done && w_done)) begin
      @(posedge clk);
      if (req.awvalid && rsp.awready) aw_done = 1;
      if (req.wvalid && rsp.wready) w_done = 1;
      @(negedge clk);
      if (aw_done) req.awvalid = 0;
      if (w_done) req.wvalid = 0;
    end
    while (!rsp.bvalid) @(negedge clk);
    @(posedge clk);
    @(negedge clk);
    req.bready = 0;
  endtask

  task automatic read(input logic [15:0] addr, output logic [31:0] data);
    @(negedge clk);
    req.araddr = addr; req.arvalid = 1; req.rready = 0;
    do @(posedge clk); while (!rsp.arready);
    @(negedge clk);
    req.arvalid = 0;
    while (!rsp.rvalid) @(negedge clk);
    // hold rready low for a clock to exercise the stall
    @(negedge clk);
    req.rready = 1;
    data = rsp.rdata;
    @(posedge clk);
    @(negedge clk);
    req.rready = 0;
  endtask

  // slave-side handshake rules, checked from the 8th clock on (the slave's
  // state before its reset has taken effect is arbitrary)
  logic        b_hold, r_hold;
  logic [31:0] r_data_q;
  int          warm = 0;
  always @(posedge clk) begin
    if (warm < 8) warm++;
    if (warm >= 8 && b_hold && !rsp.bvalid) begin errors++; $display("AXI4-Lite: bvalid dropped before bready"); end
    if (warm >= 8 && r_hold && (!rsp.rvalid || rsp.rdata != r_data_q)) begin
      errors++; $display("AXI4-Lite: R channel changed before rready");
    end
    b_hold   <= rsp.bvalid && !req.bready;
    r_hold   <= rsp.rvalid && !req.rready;
    r_data_q <= rsp.rdata;
  end
  initial begin b_hold = 0; r_hold = 0; r_data_q = 0; end
endmodule
