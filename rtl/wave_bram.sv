// wave_bram: on-chip memory for the user's baseband pulse waveform.
//
// Software loads a custom pulse shape sample by sample over AXI4-Lite; during
// each RF pulse the modulator reads it back one sample per clock. This is the
// platform's block RAM for custom pulse shapes; its depth (2048 samples,
// 8.3 us at 245.76 MSPS, enough for the 1-5 us flat tops targeted) and the
// word layout are this design's choices.
//
// How it works: a simple dual-port memory of DEPTH 32-bit words, each word
// {Q[31:16], I[15:0]} as Q1.15 fractions (32767 = 1.0). Port A belongs to the
// AXI4-Lite bus (write with byte strobes, read-back); port B is the pulse read
// port with one clock latency. The memory is not reset; software loads it
// before selecting the custom waveform.
//
// Interface: s_axil_req/rsp (byte address = 4 * sample index); rd_addr,
// rd_i/rd_q (registered, valid one clock after rd_addr).
module wave_bram
  import llrf_pkg::*;
#(
  parameter int unsigned DEPTH = 2048,
  parameter int unsigned AW    = $clog2(DEPTH)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  axil_req_t     s_axil_req,
  output axil_rsp_t     s_axil_rsp,
  input  logic [AW-1:0] rd_addr,
  output iq_t           rd_i,
  output iq_t           rd_q
);
  logic        wr_en, rd_en;
  logic [15:0] wr_addr, h_addr;
  logic [31:0] wr_data, h_data;
  logic [3:0]  wr_strb;

  axil_slave u_bus (
    .clk, .rst_n, .req(s_axil_req), .rsp(s_axil_rsp),
    .wr_en, .wr_addr, .wr_data, .wr_strb,
    .rd_en, .rd_addr(h_addr), .rd_data(h_data)
  );

  logic [31:0] mem [DEPTH];
  logic [31:0] b_q;

  // port A: bus side
  always_ff @(posedge clk) begin
    if (wr_en) begin
      for (int b = 0; b < 4; b++)
        if (wr_strb[b]) mem[wr_addr[AW+1:2]][8*b +: 8] <= wr_data[8*b +: 8];
    end
    if (rd_en) h_data <= mem[h_addr[AW+1:2]];
  end

  // port B: pulse read side
  always_ff @(posedge clk) begin
    b_q <= mem[rd_addr];
  end

  assign rd_i = signed'(b_q[15:0]);
  assign rd_q = signed'(b_q[31:16]);
endmodule
