// pulse_mod: pulse waveform modulation.
//
// Builds the baseband drive pulse that the DAC datapath interpolates and
// up-converts: the pulse shape (the user's waveform from wave_bram, or the
// default square wave) is modulated with the drive I/Q computed by the
// feedback. Modulation as a complex multiply with the waveform read as a
// Q1.15 fraction is this design's reading of "the waveform is modulated with
// the updated IQ"; the square-wave default is the platform's.
//
// How it works: rf_on and the waveform-memory address leave pulse_seq on the
// same clock and the memory answers one clock later, so rf_on is delayed one
// clock here to line up with wave_i/wave_q. With use_custom low the waveform
// is (32767, 0) while the gate is on. The product
//   dac = wave * corr / 2**15   (complex, rounded, saturated to W bits)
// is registered; outside the gate the output is zero.
//
// Interface: rf_on, use_custom, wave_i/wave_q (one clock after the address),
// corr_i/corr_q; dac_i/dac_q, dac_on.
// Timing: dac_i/dac_q follow rf_on by 2 clocks.
module pulse_mod #(
  parameter int unsigned W = 16
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                rf_on,
  input  logic                use_custom,
  input  logic signed [W-1:0] wave_i,
  input  logic signed [W-1:0] wave_q,
  input  logic signed [W-1:0] corr_i,
  input  logic signed [W-1:0] corr_q,
  output logic signed [W-1:0] dac_i,
  output logic signed [W-1:0] dac_q,
  output logic                dac_on
);
  localparam int unsigned PW = 2*W + 1;

  logic                on_d;
  logic signed [W-1:0] wi, wq;
  logic signed [PW-1:0] pi, pq;

  function automatic logic signed [W-1:0] sat(input logic signed [PW-1:0] v);
    logic signed [PW-1:0] r;
    r = (v + PW'(1 << (W-2))) >>> (W-1);
    if (r > PW'((1 << (W-1)) - 1)) return W'((1 << (W-1)) - 1);
    else if (r < -PW'(1 << (W-1))) return W'(1 << (W-1));
    else                           return W'(r);
  endfunction

  always_comb begin
    wi = use_custom ? wave_i : W'((1 << (W-1)) - 1);
    wq = use_custom ? wave_q : '0;
    pi = PW'(wi) * PW'(corr_i) - PW'(wq) * PW'(corr_q);
    pq = PW'(wi) * PW'(corr_q) + PW'(wq) * PW'(corr_i);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      on_d <= 1'b0; dac_i <= '0; dac_q <= '0; dac_on <= 1'b0;
    end else begin
      on_d   <= rf_on;
      dac_on <= on_d;
      if (on_d) begin
        dac_i <= sat(pi);
        dac_q <= sat(pq);
      end else begin
        dac_i <= '0;
        dac_q <= '0;
      end
    end
  end
endmodule
