// tb_dma_s2mm: self-checking test of the cavity reflection DMA.
// A behavioural DDR slave (axi_mem_model, 70% ready) takes the bursts.
// Three captures of different lengths (including a short final burst) from a
// random sample stream must land word for word as {Q, I} at base + 4*n, with
// done_count counting them and the slave's burst-rule checks clean. Then the
// slave is slowed to 1% ready so the FIFO fills: overflow must set, a trigger
// during the busy capture must also be refused, and clr_overflow must clear
// the flag once the capture has drained.
module tb_dma_s2mm;
  import llrf_pkg::*;
  logic clk = 0, rst_n = 0;
  logic trig, enable, clr_overflow, overflow, busy, in_valid;
  logic [31:0] base, done_count;
  logic [15:0] len;
  iq_t in_i, in_q;
  axi_w_req_t m_axi_req;
  axi_w_rsp_t m_axi_rsp, rsp_fast, rsp_slow;
  bit slow = 0;
  int checks = 0, failures = 0;

  dma_s2mm dut (.*);
  axi_mem_model #(.READY_PCT(70)) ddr_fast (.clk, .req(slow ? '0 : m_axi_req), .rsp(rsp_fast));
  axi_mem_model #(.READY_PCT(1))  ddr_slow (.clk, .req(slow ? m_axi_req : '0), .rsp(rsp_slow));
  assign m_axi_rsp = slow ? rsp_slow : rsp_fast;

  always #5 clk = ~clk;

  initial begin
    #5000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // random stream, one sample per clock
  always @(negedge clk) begin
    in_i <= 16'($urandom); in_q <= 16'($urandom); in_valid <= 1;
  end

  // reference record: the samples on the clock edges after an accepted trigger
  logic [31:0] exp_w [$];
  int rec_left = 0;
  always @(posedge clk) begin
    if (rec_left > 0 && in_valid) begin
      exp_w.push_back({in_q, in_i});
      rec_left--;
    end
    if (trig && enable && !busy) rec_left = int'(len);
  end

  task automatic capture(logic [31:0] b, int n);
    logic [31:0] dc0;
    dc0 = done_count;
    exp_w.delete();
    @(negedge clk);
    base = b; len = 16'(n); trig = 1;
    @(negedge clk);
    trig = 0;
    while (busy) @(negedge clk);
    checks++;
    if (done_count != dc0 + 1) begin failures++; $display("done_count %0d", done_count); end
    for (int k = 0; k < n; k++) begin
      checks++;
      if (exp_w.size() != n || !ddr_fast.mem.exists(b + 4*k) || ddr_fast.mem[b + 4*k] != exp_w[k]) begin
        failures++;
        if (failures < 10) $display("word %0d at %h wrong", k, b + 4*k);
      end
    end
  endtask

  initial begin
    trig = 0; enable = 1; clr_overflow = 0; base = 0; len = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    capture(32'h0000_1000, 100);
    capture(32'h0002_0000, 2048);
    capture(32'h0000_0F00, 17);
    checks++;
    if (ddr_fast.mem.exists(32'h0F00 + 4*17)) begin failures++; $display("wrote past the end of the capture"); end
    checks++;
    if (overflow) begin failures++; $display("overflow with a fast slave"); end
    checks++;
    if (ddr_fast.errors != 0) begin failures++; $display("burst rule errors %0d", ddr_fast.errors); end
    // slow slave: FIFO overflows
    slow = 1;
    @(negedge clk);
    base = 32'h0010_0000; len = 16'd2000; trig = 1;
    @(negedge clk) trig = 0;
    repeat (1000) @(negedge clk);
    checks++;
    if (!overflow) begin failures++; $display("no overflow with a slow slave"); end
    clr_overflow = 1;
    @(negedge clk) clr_overflow = 0;
    // a trigger while busy is refused and flagged
    trig = 1;
    @(negedge clk) trig = 0;
    checks++;
    if (!overflow || !busy) begin failures++; $display("trigger while busy not flagged"); end
    while (busy) @(negedge clk);
    clr_overflow = 1;
    @(negedge clk) clr_overflow = 0;
    checks++;
    if (overflow) begin failures++; $display("overflow not cleared"); end
    checks++;
    if (ddr_slow.errors != 0) begin failures++; $display("burst rule errors (slow) %0d", ddr_slow.errors); end
    $display("bursts %0d fast, %0d slow", ddr_fast.bursts, ddr_slow.bursts);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
