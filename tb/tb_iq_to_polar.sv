// tb_iq_to_polar: self-checking test of the vectoring CORDIC.
// Streams 600 I/Q samples (axis points, full-scale corners, random values and,
// for every third sample, weak random values of magnitude below about 180)
// one per clock and compares magnitude (+-3 LSB) and phase (+-6 LSB wherever
// the magnitude is 16 or more) with sqrt and atan2 computed in real arithmetic. Also checks the latency of ITER+2 = 18 clocks and that
// the pipeline takes one sample per clock.
module tb_iq_to_polar;
  localparam int N = 600;
  logic clk = 0, rst_n = 0;
  logic signed [15:0] i_in, q_in;
  logic in_valid;
  logic [16:0] mag;
  logic signed [15:0] phase;
  logic out_valid;
  int checks = 0, failures = 0;
  int exp_mag [N];
  int exp_phs [N];
  int n_out = 0, cyc = 0, first_in = -1, first_out = -1;

  iq_to_polar dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    #200000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int wrapd(int d);
    d = d % 65536;
    if (d > 32767) d -= 65536;
    if (d < -32768) d += 65536;
    return d;
  endfunction

  always @(posedge clk) begin
    if (rst_n && out_valid) begin
      int dm, dp;
      if (first_out < 0) first_out = cyc;
      dm = int'(mag) - exp_mag[n_out];
      dp = wrapd(int'(phase) - exp_phs[n_out]);
      checks++;
      if (dm > 3 || dm < -3 || (exp_mag[n_out] >= 16 && (dp > 6 || dp < -6))) begin
        failures++;
        if (failures < 10) $display("mismatch #%0d mag %0d exp %0d phase %0d exp %0d", n_out, mag, exp_mag[n_out], phase, exp_phs[n_out]);
      end
      n_out++;
    end
  end

  initial begin
    real re, im, pi;
    pi = 3.14159265358979;
    i_in = 0; q_in = 0; in_valid = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (2) @(posedge clk);
    for (int n = 0; n < N; n++) begin
      int a, b;
      case (n)
        0: begin a = 1000; b = 0; end
        1: begin a = 0; b = 1000; end
        2: begin a = -1000; b = 0; end
        3: begin a = 0; b = -1000; end
        4: begin a = 32767; b = 32767; end
        5: begin a = -32768; b = -32768; end
        6: begin a = -32768; b = 32767; end
        7: begin a = 752; b = -186; end
        default:
          if (n % 3 == 0) begin   // weak signals: magnitudes below about 180
            a = $signed($urandom) >>> 25; b = $signed($urandom) >>> 25;
          end else begin
            a = $signed($urandom) >>> 16; b = $signed($urandom) >>> 16;
          end
      endcase
      re = a; im = b;
      exp_mag[n] = int'($sqrt(re*re + im*im));
      exp_phs[n] = wrapd(int'($atan2(im, re) / (2.0*pi) * 65536.0));
      @(negedge clk);
      i_in = 16'(a); q_in = 16'(b); in_valid = 1;
      if (first_in < 0) first_in = cyc;
    end
    @(negedge clk) in_valid = 0;
    repeat (30) @(posedge clk);
    checks++;
    if (n_out != N) begin failures++; $display("got %0d outputs, expected %0d", n_out, N); end
    checks++;
    if (first_out - first_in != 18) begin failures++; $display("latency %0d, expected 18", first_out - first_in); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
