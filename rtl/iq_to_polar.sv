// iq_to_polar: I/Q to magnitude and phase, one sample per clock.
//
// The controller needs amplitude and phase twice: for the window-averaged
// klystron forward signal inside the pulse-to-pulse feedback, and for every
// sample of the cavity reflection, whose phase slope after the RF pulse is the
// offset between the RF frequency and the cavity resonance. Both follow the
// platform's flow charts; the method is this design's choice: a fully
// pipelined vectoring CORDIC.
//
// How it works: stage 0 folds the left half plane onto the right one (negate
// I and Q, start the angle at 180 degrees). Each of ITER stages then rotates
// the vector by +-atan(2**-k) towards the I axis and accumulates the angle in
// a 20-bit binary angle. The last stage scales the residual I by 1/K
// (K = 1.64676, the CORDIC gain) with the constant 39797/2**16 and rounds the
// angle to 16 bits.
//
// Interface: i_in/q_in signed W bits with in_valid; mag (W+1 bits, unsigned,
// same units as the input) and phase (16-bit binary angle, 65536 = 360 deg,
// two's complement so that 0x8000 = -180 deg) with out_valid.
// Timing: latency ITER+2 clocks, throughput one sample per clock, no stall.
module iq_to_polar
  import llrf_pkg::*;
#(
  parameter int unsigned W    = 16,
  parameter int unsigned ITER = 16
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic signed [W-1:0] i_in,
  input  logic signed [W-1:0] q_in,
  input  logic                in_valid,
  output logic        [W:0]   mag,
  output logic signed [15:0]  phase,
  output logic                out_valid
);
  localparam int unsigned G  = 8;       // guard bits below the input LSB
  localparam int unsigned XW = W + 3 + G;   // sign, CORDIC gain growth, guard bits
  localparam int unsigned AW = 20;      // internal angle width

  logic signed [XW-1:0] x [ITER+1];
  logic signed [XW-1:0] y [ITER+1];
  logic        [AW-1:0] z [ITER+1];
  logic                 v [ITER+1];

  // stage 0: fold into the right half plane, G guard bits below the LSB
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      x[0] <= '0; y[0] <= '0; z[0] <= '0; v[0] <= 1'b0;
    end else begin
      v[0] <= in_valid;
      if (i_in < 0) begin
        x[0] <= -(XW'(i_in) <<< G);
        y[0] <= -(XW'(q_in) <<< G);
        z[0] <= AW'(1) << (AW-1);
      end else begin
        x[0] <= XW'(i_in) <<< G;
        y[0] <= XW'(q_in) <<< G;
        z[0] <= '0;
      end
    end
  end

  for (genvar k = 0; k < ITER; k++) begin : g_stage
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        x[k+1] <= '0; y[k+1] <= '0; z[k+1] <= '0; v[k+1] <= 1'b0;
      end else begin
        v[k+1] <= v[k];
        if (y[k] >= 0) begin
          x[k+1] <= x[k] + (y[k] >>> k);
          y[k+1] <= y[k] - (x[k] >>> k);
          z[k+1] <= z[k] + cordic_atan(k);
        end else begin
          x[k+1] <= x[k] - (y[k] >>> k);
          y[k+1] <= y[k] + (x[k] >>> k);
          z[k+1] <= z[k] - cordic_atan(k);
        end
      end
    end
  end

  // final stage: remove the CORDIC gain and the guard bits, round the angle
  logic [XW+16-1:0] scaled;
  logic [AW-1:0]    z_round;
  always_comb begin
    scaled  = (XW+16)'(unsigned'(x[ITER])) * (XW+16)'(39797);
    z_round = z[ITER] + AW'(1 << (AW-17));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      mag <= '0; phase <= '0; out_valid <= 1'b0;
    end else begin
      out_valid <= v[ITER];
      mag       <= (W+1)'((scaled + ((XW+16)'(1) << (15+G))) >> (16+G));
      phase     <= signed'(z_round[AW-1 -: 16]);
    end
  end
endmodule
