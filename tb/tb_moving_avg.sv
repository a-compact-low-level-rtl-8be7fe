// tb_moving_avg: self-checking test of the 16-sample boxcar average.
// Feeds random I/Q with random gaps in in_valid and a clear in the middle.
// A reference model keeps the last 16 accepted samples (zeros after a clear)
// and checks each output against floor(sum / 16) one clock after its input.
module tb_moving_avg;
  logic clk = 0, rst_n = 0, clear = 0;
  logic signed [15:0] in_i, in_q, out_i, out_q;
  logic in_valid, out_valid;
  int checks = 0, failures = 0;
  int hist_i [16], hist_q [16];
  int exp_i, exp_q;
  logic exp_v;

  moving_avg dut (.*);

  always #5 clk = ~clk;

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int fdiv16(int s);
    return (s >= 0) ? s / 16 : -((-s + 15) / 16);
  endfunction

  initial begin
    in_i = 0; in_q = 0; in_valid = 0;
    foreach (hist_i[k]) begin hist_i[k] = 0; hist_q[k] = 0; end
    exp_v = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 3000; n++) begin
      @(negedge clk);
      // check the output produced by the previous input
      if (exp_v) begin
        checks++;
        if (!out_valid || int'(out_i) != exp_i || int'(out_q) != exp_q) begin
          failures++;
          if (failures < 10) $display("n=%0d out %0d/%0d exp %0d/%0d v=%0d", n, out_i, out_q, exp_i, exp_q, out_valid);
        end
      end else if (out_valid) begin
        checks++; failures++;
        $display("n=%0d unexpected out_valid", n);
      end
      clear    = (n == 1500);
      in_valid = !clear && ($urandom % 4 != 0);
      in_i     = 16'($urandom);
      in_q     = 16'($urandom);
      exp_v    = in_valid;
      if (clear) foreach (hist_i[k]) begin hist_i[k] = 0; hist_q[k] = 0; end
      if (in_valid) begin
        int si, sq;
        for (int k = 15; k > 0; k--) begin hist_i[k] = hist_i[k-1]; hist_q[k] = hist_q[k-1]; end
        hist_i[0] = int'(in_i); hist_q[0] = int'(in_q);
        si = 0; sq = 0;
        foreach (hist_i[k]) begin si += hist_i[k]; sq += hist_q[k]; end
        exp_i = fdiv16(si); exp_q = fdiv16(sq);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
