// pulse_seq: RF pulse timing.
//
// Generates the pulse train of the accelerator: one RF pulse of pulse_len
// samples every period clocks. With the defaults in the register file this is
// a 2 us pulse (492 samples at 245.76 MSPS) at 60 Hz (4,096,000 clocks), the
// pulse pattern the platform was tested with. An internal free-running
// sequencer (rather than an external timing trigger) is this design's choice.
//
// How it works: a counter runs from 0 to period-1 while run is high. trig is
// high on count 0 and starts a pulse; rf_on is high for counts below
// pulse_len; idx is the sample index inside the pulse and addresses the
// waveform memory. Lowering run stops the counter at 0 with the gate off.
//
// Interface: run, period (>= 2), pulse_len; trig, rf_on, idx, pulse_count.
// Timing: trig, rf_on and idx are registered and change together.
module pulse_seq (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        run,
  input  logic [31:0] period,
  input  logic [15:0] pulse_len,
  output logic        trig,
  output logic        rf_on,
  output logic [15:0] idx,
  output logic [31:0] pulse_count
);
  logic [31:0] cnt;
  logic [31:0] nxt;

  always_comb begin
    if (!run || cnt + 32'd1 >= period) nxt = '0;
    else                              nxt = cnt + 32'd1;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cnt <= '0; trig <= 1'b0; rf_on <= 1'b0; idx <= '0; pulse_count <= '0;
    end else begin
      if (run) cnt <= nxt;
      else     cnt <= '0;
      trig  <= run && (cnt == 32'd0);
      rf_on <= run && (cnt < 32'(pulse_len));
      idx   <= 16'(cnt);
      if (run && cnt == 32'd0) pulse_count <= pulse_count + 32'd1;
    end
  end
endmodule
