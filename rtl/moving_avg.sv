// moving_avg: boxcar moving average of an I/Q stream.
//
// The feedback loop first smooths the klystron forward signal "with a moving
// average over a certain number of samples"; the length is this design's
// choice, 2**LEN_LOG2 samples (16 by default), so the division is a shift.
//
// How it works: a delay line of 2**LEN_LOG2 samples per component and a
// running sum that adds the new sample and subtracts the one leaving the
// window. The delay line and the sums are cleared by clear (pulse trigger),
// so each pulse starts from zero and the first 2**LEN_LOG2-1 outputs of a
// pulse ramp up from it.
//
// Interface: in_i/in_q signed W bits with in_valid (samples are only taken
// when in_valid is high); out_i/out_q = sum >>> LEN_LOG2 (arithmetic, rounds
// towards minus infinity) with out_valid.
// Timing: one clock latency, one sample per clock.
module moving_avg #(
  parameter int unsigned W        = 16,
  parameter int unsigned LEN_LOG2 = 4
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                clear,
  input  logic signed [W-1:0] in_i,
  input  logic signed [W-1:0] in_q,
  input  logic                in_valid,
  output logic signed [W-1:0] out_i,
  output logic signed [W-1:0] out_q,
  output logic                out_valid
);
  localparam int unsigned LEN = 1 << LEN_LOG2;
  localparam int unsigned SW  = W + LEN_LOG2;

  logic signed [W-1:0]  dl_i [LEN];
  logic signed [W-1:0]  dl_q [LEN];
  logic signed [SW-1:0] sum_i, sum_q;
  logic signed [SW-1:0] nxt_i, nxt_q;

  always_comb begin
    nxt_i = sum_i + SW'(in_i) - SW'(dl_i[LEN-1]);
    nxt_q = sum_q + SW'(in_q) - SW'(dl_q[LEN-1]);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int n = 0; n < LEN; n++) begin
        dl_i[n] <= '0;
        dl_q[n] <= '0;
      end
      sum_i <= '0; sum_q <= '0;
      out_i <= '0; out_q <= '0; out_valid <= 1'b0;
    end else if (clear) begin
      for (int n = 0; n < LEN; n++) begin
        dl_i[n] <= '0;
        dl_q[n] <= '0;
      end
      sum_i <= '0; sum_q <= '0;
      out_valid <= 1'b0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) begin
        dl_i[0] <= in_i;
        dl_q[0] <= in_q;
        for (int n = 1; n < LEN; n++) begin
          dl_i[n] <= dl_i[n-1];
          dl_q[n] <= dl_q[n-1];
        end
        sum_i <= nxt_i;
        sum_q <= nxt_q;
        out_i <= W'(nxt_i >>> LEN_LOG2);
        out_q <= W'(nxt_q >>> LEN_LOG2);
      end
    end
  end
endmodule
