// tb_polar_to_iq: self-checking test of the rotation CORDIC.
// Streams 600 amplitude/phase pairs (the four axes, full scale, random values)
// one per clock and compares I/Q with amp*cos and amp*sin computed in real
// arithmetic (tolerance 3 LSB). Checks the ITER+3 = 19 clock latency.
module tb_polar_to_iq;
  localparam int N = 600;
  logic clk = 0, rst_n = 0;
  logic [15:0] mag;
  logic signed [15:0] phase;
  logic in_valid;
  logic signed [15:0] i_out, q_out;
  logic out_valid;
  int checks = 0, failures = 0;
  int exp_i [N];
  int exp_q [N];
  int n_out = 0, cyc = 0, first_in = -1, first_out = -1;

  polar_to_iq dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    #200000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) begin
    if (rst_n && out_valid) begin
      int di, dq;
      if (first_out < 0) first_out = cyc;
      di = int'(i_out) - exp_i[n_out];
      dq = int'(q_out) - exp_q[n_out];
      checks++;
      if (di > 3 || di < -3 || dq > 3 || dq < -3) begin
        failures++;
        if (failures < 10) $display("mismatch #%0d i %0d exp %0d q %0d exp %0d", n_out, i_out, exp_i[n_out], q_out, exp_q[n_out]);
      end
      n_out++;
    end
  end

  initial begin
    real pi, a, p;
    pi = 3.14159265358979;
    mag = 0; phase = 0; in_valid = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (2) @(posedge clk);
    for (int n = 0; n < N; n++) begin
      int m, ph;
      case (n)
        0: begin m = 10000; ph = 0; end
        1: begin m = 10000; ph = 16384; end
        2: begin m = 10000; ph = -32768; end
        3: begin m = 10000; ph = -16384; end
        4: begin m = 32767; ph = 8192; end
        5: begin m = 32767; ph = 24576; end
        default: begin m = $urandom % 32768; ph = $signed(16'($urandom)); end
      endcase
      a = m; p = real'(ph) * 2.0 * pi / 65536.0;
      exp_i[n] = int'(a * $cos(p));
      exp_q[n] = int'(a * $sin(p));
      @(negedge clk);
      mag = 16'(m); phase = 16'(ph); in_valid = 1;
      if (first_in < 0) first_in = cyc;
    end
    @(negedge clk) in_valid = 0;
    repeat (30) @(posedge clk);
    checks++;
    if (n_out != N) begin failures++; $display("got %0d outputs, expected %0d", n_out, N); end
    checks++;
    if (first_out - first_in != 19) begin failures++; $display("latency %0d, expected 19", first_out - first_in); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
