// tb_window_avg: self-checking test of the per-pulse window average.
// Runs 12 "pulses": each starts with a start strobe, then random I/Q with
// random in_valid gaps. The window offset and log2 length are random (the
// last two pulses use lengths above MAX_LOG2 = 10 and a restart during the
// window). The reference sums the valid samples counted from the start and
// checks avg = floor(sum / 2**L) and that done comes exactly one clock after
// the last window sample, and only once.
module tb_window_avg;
  logic clk = 0, rst_n = 0, start = 0;
  logic [15:0] win_start;
  logic [3:0]  win_log2;
  logic signed [15:0] in_i, in_q, avg_i, avg_q;
  logic in_valid, done;
  int checks = 0, failures = 0;

  window_avg dut (.*);

  always #5 clk = ~clk;

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic longint fdiv(longint s, int l);
    longint d = longint'(1) << l;
    return (s >= 0) ? s / d : -((-s + d - 1) / d);
  endfunction

  task automatic run_pulse(int ws, int l, bit restart);
    longint si = 0, sq = 0;
    int cnt = 0, leff, done_seen = 0, nsamp;
    bit expect_done = 0;
    leff = (l > 10) ? 10 : l;
    @(negedge clk);
    start = 1; win_start = 16'(ws); win_log2 = 4'(l); in_valid = 0;
    @(negedge clk);
    start = 0;
    nsamp = ws + (1 << leff) + 40;
    for (int n = 0; n < nsamp + 400; n++) begin
      // check done for the previous clock's sample
      if (done) begin
        checks++;
        done_seen++;
        if (!expect_done || int'(avg_i) != int'(fdiv(si, leff)) || int'(avg_q) != int'(fdiv(sq, leff))) begin
          failures++;
          $display("ws=%0d l=%0d avg %0d/%0d exp %0d/%0d expect_done=%0d", ws, l, avg_i, avg_q,
                   fdiv(si, leff), fdiv(sq, leff), expect_done);
        end
      end else if (expect_done) begin
        checks++; failures++;
        $display("ws=%0d l=%0d done missing", ws, l);
      end
      expect_done = 0;
      if (restart && cnt == ws + 3) begin
        // restart in the middle of the window: the partial sum is dropped
        start = 1; in_valid = 0;
        @(negedge clk);
        start = 0;
        cnt = 0; si = 0; sq = 0; restart = 0;
      end
      in_valid = ($urandom % 5 != 0);
      in_i = 16'($urandom); in_q = 16'($urandom);
      if (in_valid) begin
        if (cnt >= ws && cnt < ws + (1 << leff)) begin
          si += longint'(in_i); sq += longint'(in_q);
          if (cnt == ws + (1 << leff) - 1) expect_done = 1;
        end
        cnt++;
      end
      @(negedge clk);
    end
    in_valid = 0;
    checks++;
    if (done_seen != 1) begin failures++; $display("ws=%0d l=%0d done seen %0d times", ws, l, done_seen); end
  endtask

  initial begin
    in_i = 0; in_q = 0; in_valid = 0; win_start = 0; win_log2 = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    run_pulse(0, 0, 0);
    run_pulse(200, 7, 0);
    for (int p = 0; p < 8; p++) run_pulse($urandom % 300, 1 + $urandom % 10, 0);
    run_pulse(5, 12, 0);
    run_pulse(50, 5, 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
