// axil_slave: AXI4-Lite slave front end that turns bus transactions into
// single-clock register-bus strobes. Shared by the register file and the
// waveform memory, the two AXI4-Lite targets the processing system writes
// (user parameters and user pulse waveform).
//
// How it works: the write address and write data channels are accepted
// independently and held; once both are in, wr_en pulses for one clock with
// wr_addr/wr_data/wr_strb, and the response (OKAY) is offered on B until
// bready. A read address is accepted when no read is pending; rd_en pulses
// for one clock with rd_addr, the target returns rd_data on the next clock,
// and it is held on R until rready. One write and one read may be in flight
// at a time. The handshake and the one-clock read latency of the target are
// this design's choices.
//
// Interface: req/rsp (llrf_pkg AXI4-Lite structs); wr_en, wr_addr, wr_data,
// wr_strb; rd_en, rd_addr, rd_data.
module axil_slave
  import llrf_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  axil_req_t   req,
  output axil_rsp_t   rsp,
  output logic        wr_en,
  output logic [15:0] wr_addr,
  output logic [31:0] wr_data,
  output logic [3:0]  wr_strb,
  output logic        rd_en,
  output logic [15:0] rd_addr,
  input  logic [31:0] rd_data
);
  logic        aw_got, w_got, bvalid;
  logic [15:0] aw_q;
  logic [31:0] w_q;
  logic [3:0]  s_q;
  logic        rd_pend, rvalid;
  logic [31:0] rdata;

  always_comb begin
    rsp         = '0;
    rsp.awready = !aw_got && !bvalid;
    rsp.wready  = !w_got && !bvalid;
    rsp.bvalid  = bvalid;
    rsp.bresp   = 2'b00;
    rsp.arready = !rd_pend && !rvalid;
    rsp.rvalid  = rvalid;
    rsp.rdata   = rdata;
    rsp.rresp   = 2'b00;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      aw_got <= 1'b0; w_got <= 1'b0; bvalid <= 1'b0;
      aw_q <= '0; w_q <= '0; s_q <= '0;
      wr_en <= 1'b0; wr_addr <= '0; wr_data <= '0; wr_strb <= '0;
    end else begin
      wr_en <= 1'b0;
      if (req.awvalid && rsp.awready) begin
        aw_got <= 1'b1;
        aw_q   <= req.awaddr;
      end
      if (req.wvalid && rsp.wready) begin
        w_got <= 1'b1;
        w_q   <= req.wdata;
        s_q   <= req.wstrb;
      end
      if (aw_got && w_got) begin
        wr_en   <= 1'b1;
        wr_addr <= aw_q;
        wr_data <= w_q;
        wr_strb <= s_q;
        aw_got  <= 1'b0;
        w_got   <= 1'b0;
        bvalid  <= 1'b1;
      end
      if (bvalid && req.bready) bvalid <= 1'b0;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_en <= 1'b0; rd_addr <= '0; rd_pend <= 1'b0; rvalid <= 1'b0; rdata <= '0;
    end else begin
      rd_en <= 1'b0;
      if (req.arvalid && rsp.arready) begin
        rd_en   <= 1'b1;
        rd_addr <= req.araddr;
        rd_pend <= 1'b1;
      end
      if (rd_pend && !rd_en) begin
        rdata   <= rd_data;
        rvalid  <= 1'b1;
        rd_pend <= 1'b0;
      end
      if (rvalid && req.rready) rvalid <= 1'b0;
    end
  end
endmodule
