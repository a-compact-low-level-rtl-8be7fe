// window_avg: average of an I/Q stream over a window of each RF pulse.
//
// After smoothing, the feedback loop reduces each pulse to one I/Q value by
// averaging over a window on the flat top of the pulse; that one value is then
// converted to amplitude and phase. Averaging I/Q before the conversion (the
// order of the platform's flow chart) avoids averaging a phase that wraps.
// Placing the window by a start offset and a power-of-two length is this
// design's choice; the offset absorbs the loop delay from DAC to ADC.
//
// How it works: start (the pulse trigger) clears a sample counter and the two
// accumulators. Valid samples with win_start <= count < win_start + 2**L are
// added, L = min(win_log2, MAX_LOG2). When the last window sample has been
// added, avg_i/avg_q = sum >>> L are registered and done pulses for one clock.
// A new start before the window ends discards the partial sum.
//
// Interface: start, win_start (samples after start), win_log2; in_i/in_q
// signed W bits with in_valid; avg_i/avg_q and done.
// Timing: done is high one clock after the last window sample is taken.
module window_avg #(
  parameter int unsigned W        = 16,
  parameter int unsigned MAX_LOG2 = 10
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                start,
  input  logic [15:0]         win_start,
  input  logic [3:0]          win_log2,
  input  logic signed [W-1:0] in_i,
  input  logic signed [W-1:0] in_q,
  input  logic                in_valid,
  output logic signed [W-1:0] avg_i,
  output logic signed [W-1:0] avg_q,
  output logic                done
);
  localparam int unsigned SW = W + MAX_LOG2;

  logic [16:0]          cnt;
  logic                 armed;
  logic signed [SW-1:0] acc_i, acc_q;
  logic [3:0]           l_eff;
  logic [16:0]          win_end;
  logic                 in_win, last;
  logic signed [SW-1:0] tot_i, tot_q;

  always_comb begin
    l_eff   = (win_log2 > 4'(MAX_LOG2)) ? 4'(MAX_LOG2) : win_log2;
    win_end = 17'(win_start) + (17'(1) << l_eff);
    in_win  = armed && in_valid && (cnt >= 17'(win_start)) && (cnt < win_end);
    last    = in_win && (cnt == win_end - 17'd1);
    tot_i   = acc_i + SW'(in_i);
    tot_q   = acc_q + SW'(in_q);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cnt <= '0; armed <= 1'b0;
      acc_i <= '0; acc_q <= '0;
      avg_i <= '0; avg_q <= '0; done <= 1'b0;
    end else begin
      done <= 1'b0;
      if (start) begin
        cnt   <= '0;
        armed <= 1'b1;
        acc_i <= '0;
        acc_q <= '0;
      end else if (armed && in_valid) begin
        cnt <= cnt + 17'd1;
        if (in_win) begin
          acc_i <= tot_i;
          acc_q <= tot_q;
        end
        if (last) begin
          armed <= 1'b0;
          avg_i <= W'(tot_i >>> l_eff);
          avg_q <= W'(tot_q >>> l_eff);
          done  <= 1'b1;
        end
      end
    end
  end
endmodule
