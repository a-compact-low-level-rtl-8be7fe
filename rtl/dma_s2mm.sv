// dma_s2mm: stream-to-memory-mapped DMA for the cavity reflection signal.
//
// The cavity reflection is the only signal that carries the field inside the
// structure (there are no cavity probes). Its baseband I/Q stream is captured
// from every pulse trigger and written to DDR memory of the processing system
// over AXI4, where software reads it, e.g. to compute the resonance offset
// from the phase slope after the RF pulse. (The top can also feed it the
// klystron forward magnitude/phase, which the pulse-shape correction in
// software needs; this module only sees a 32-bit sample stream.) Streaming
// to memory-mapped conversion is the platform's; bus width, burst length and
// FIFO depth are this design's choices.
//
// How it works: on trig (with enable) a capture of len samples starts at
// byte address base. Samples are 32-bit words {Q, I}; four are packed into
// one 128-bit beat (sample n at byte base + 4n, little-endian), a last,
// partial beat carries byte strobes for its valid samples only. Beats go
// through a FIFO of FIFO_DEPTH entries. The bus side issues INCR bursts of
// BURST beats (256 bytes) whenever that many are waiting, and a shorter final
// burst when the capture has ended, waiting for each write response before
// the next burst. A 128-bit beat per clock is four times the sample rate, so
// the bus keeps up even with frequent stalls. base is assumed aligned to
// 16*BURST bytes, so no burst crosses a 4 KB boundary.
// A beat that finds the FIFO full, or a trigger that arrives before the
// previous capture has drained, is dropped and sets the sticky overflow flag
// (cleared by clr_overflow). done_count counts completed captures.
//
// Interface: trig, enable, base, len; in_i/in_q/in_valid; m_axi_req/rsp
// (AXI4 write channels, 128-bit data); overflow, clr_overflow, busy,
// done_count.
// Timing: takes one sample per clock with no back-pressure on the stream.
module dma_s2mm
  import llrf_pkg::*;
#(
  parameter int unsigned BURST      = 16,
  parameter int unsigned FIFO_DEPTH = 32
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        trig,
  input  logic        enable,
  input  logic [31:0] base,
  input  logic [15:0] len,
  input  iq_t         in_i,
  input  iq_t         in_q,
  input  logic        in_valid,
  output axi_w_req_t  m_axi_req,
  input  axi_w_rsp_t  m_axi_rsp,
  input  logic        clr_overflow,
  output logic        overflow,
  output logic        busy,
  output logic [31:0] done_count
);
  localparam int unsigned PW = $clog2(FIFO_DEPTH);
  localparam int unsigned BW = $clog2(BURST) + 1;

  typedef enum logic [1:0] {S_IDLE, S_AW, S_W, S_B} state_t;
  state_t state;

  typedef struct packed {
    logic [15:0]  strb;
    logic [127:0] data;
  } beat_t;

  beat_t         fifo [FIFO_DEPTH];
  logic [PW-1:0] wptr, rptr;
  logic [PW:0]   count;
  logic [15:0]   cap_left;
  logic [31:0]   addr;
  logic [BW-1:0] beats, beats_left;
  logic          take, push, pop, full, start_ok, last_burst, flush;
  beat_t         pack, pack_nxt;
  logic [1:0]    slot;

  always_comb begin
    full     = (count == (PW+1)'(FIFO_DEPTH));
    start_ok = (cap_left == 16'd0) && (count == '0) && (state == S_IDLE);
    take     = (cap_left != 16'd0) && in_valid && !trig;
    // the beat is complete after its fourth sample or the capture's last one
    flush    = take && ((slot == 2'd3) || (cap_left == 16'd1));
    push     = flush && !full;
    pop      = (state == S_W) && m_axi_rsp.wready;
    pack_nxt = pack;
    pack_nxt.data[32*slot +: 32] = {in_q, in_i};
    pack_nxt.strb[4*slot +: 4]   = 4'hF;
  end

  // capture side
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cap_left <= '0; wptr <= '0; overflow <= 1'b0; pack <= '0; slot <= '0;
    end else begin
      if (clr_overflow) overflow <= 1'b0;
      if (trig && enable) begin
        if (start_ok) begin
          cap_left <= len;
          pack     <= '0;
          slot     <= '0;
        end else begin
          overflow <= 1'b1;
        end
      end else if (take) begin
        cap_left <= cap_left - 16'd1;
        if (flush) begin
          pack <= '0;
          slot <= '0;
          if (full) overflow <= 1'b1;
        end else begin
          pack <= pack_nxt;
          slot <= slot + 2'd1;
        end
      end
      if (push) begin
        fifo[wptr] <= pack_nxt;
        wptr       <= wptr + PW'(1);
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) count <= '0;
    else        count <= count + (PW+1)'(push) - (PW+1)'(pop);
  end

  // bus side
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE; rptr <= '0; addr <= '0; beats <= '0; beats_left <= '0;
      done_count <= '0; last_burst <= 1'b0;
    end else begin
      if (trig && enable && start_ok) addr <= base;
      case (state)
        S_IDLE: begin
          if (count >= (PW+1)'(BURST)) begin
            beats      <= BW'(BURST);
            beats_left <= BW'(BURST);
            last_burst <= (cap_left == 16'd0) && (count == (PW+1)'(BURST));
            state      <= S_AW;
          end else if (cap_left == 16'd0 && count != '0) begin
            beats      <= BW'(count);
            beats_left <= BW'(count);
            last_burst <= 1'b1;
            state      <= S_AW;
          end
        end
        S_AW: if (m_axi_rsp.awready) state <= S_W;
        S_W: if (m_axi_rsp.wready) begin
          rptr       <= rptr + PW'(1);
          beats_left <= beats_left - BW'(1);
          if (beats_left == BW'(1)) state <= S_B;
        end
        S_B: if (m_axi_rsp.bvalid) begin
          addr  <= addr + 32'(beats) * 32'd16;
          state <= S_IDLE;
          if (last_burst) done_count <= done_count + 32'd1;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  always_comb begin
    m_axi_req         = '0;
    m_axi_req.awaddr  = addr;
    m_axi_req.awlen   = 8'(beats - BW'(1));
    m_axi_req.awsize  = 3'd4;          // 16 bytes per beat
    m_axi_req.awburst = 2'b01;         // INCR
    m_axi_req.awvalid = (state == S_AW);
    m_axi_req.wdata   = fifo[rptr].data;
    m_axi_req.wstrb   = fifo[rptr].strb;
    m_axi_req.wlast   = (state == S_W) && (beats_left == BW'(1));
    m_axi_req.wvalid  = (state == S_W);
    m_axi_req.bready  = (state == S_B);
  end

  assign busy = (cap_left != 16'd0) || (count != '0) || (state != S_IDLE);
endmodule
