// polar_to_iq: amplitude and phase to an I/Q pair, one value per clock.
//
// The pulse-to-pulse feedback computes its new drive as an amplitude and a
// phase and must hand the pulse modulator an I/Q pair. The platform's flow
// chart names this conversion; the method is this design's choice: a
// pipelined rotation-mode CORDIC.
//
// How it works: the amplitude is pre-scaled by 1/K (19898/2**15, K = 1.64676
// the CORDIC gain) so that the rotations bring it back to its own size.
// Stage 0 folds phases in the left half plane by 180 degrees (negating the
// start vector). Each of ITER stages rotates by +-atan(2**-k) to drive the
// residual angle (20-bit binary angle) to zero. The output drops the two guard
// bits with rounding and saturates to W bits.
//
// Interface: mag unsigned W bits (0..2**(W-1)-1), phase 16-bit binary angle
// (65536 = 360 deg), in_valid; i_out/q_out signed W bits with out_valid.
// Timing: latency ITER+3 clocks, one value per clock.
module polar_to_iq
  import llrf_pkg::*;
#(
  parameter int unsigned W    = 16,
  parameter int unsigned ITER = 16
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic        [W-1:0] mag,
  input  logic signed [15:0]  phase,
  input  logic                in_valid,
  output logic signed [W-1:0] i_out,
  output logic signed [W-1:0] q_out,
  output logic                out_valid
);
  localparam int unsigned XW = W + 4;
  localparam int unsigned AW = 20;

  // pre-scale stage
  logic        [W+15:0] prod;
  logic signed [XW-1:0] x_pre;
  logic        [AW-1:0] z_pre;
  logic                 v_pre;

  assign prod = (W+16)'(mag) * (W+16)'(19898);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      x_pre <= '0; z_pre <= '0; v_pre <= 1'b0;
    end else begin
      v_pre <= in_valid;
      x_pre <= XW'((prod + (W+16)'(1 << 12)) >> 13);   // mag/K with 2 guard bits
      z_pre <= {phase, 4'b0000};
    end
  end

  logic signed [XW-1:0] x [ITER+1];
  logic signed [XW-1:0] y [ITER+1];
  logic signed [AW-1:0] z [ITER+1];
  logic                 v [ITER+1];

  // stage 0: fold phases in (90, 270) degrees by 180 degrees
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      x[0] <= '0; y[0] <= '0; z[0] <= '0; v[0] <= 1'b0;
    end else begin
      v[0] <= v_pre;
      y[0] <= '0;
      if (z_pre[AW-1] != z_pre[AW-2]) begin
        x[0] <= -x_pre;
        z[0] <= signed'(z_pre - (AW'(1) << (AW-1)));
      end else begin
        x[0] <= x_pre;
        z[0] <= signed'(z_pre);
      end
    end
  end

  for (genvar k = 0; k < ITER; k++) begin : g_stage
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        x[k+1] <= '0; y[k+1] <= '0; z[k+1] <= '0; v[k+1] <= 1'b0;
      end else begin
        v[k+1] <= v[k];
        if (z[k] >= 0) begin
          x[k+1] <= x[k] - (y[k] >>> k);
          y[k+1] <= y[k] + (x[k] >>> k);
          z[k+1] <= z[k] - signed'(cordic_atan(k));
        end else begin
          x[k+1] <= x[k] + (y[k] >>> k);
          y[k+1] <= y[k] - (x[k] >>> k);
          z[k+1] <= z[k] + signed'(cordic_atan(k));
        end
      end
    end
  end

  function automatic logic signed [W-1:0] sat_round(input logic signed [XW-1:0] v_in);
    logic signed [XW-1:0] r;
    r = (v_in + XW'(2)) >>> 2;
    if (r > XW'((1 << (W-1)) - 1))       return W'((1 << (W-1)) - 1);
    else if (r < -XW'(1 << (W-1)))       return W'(1 << (W-1));
    else                                 return W'(r);
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      i_out <= '0; q_out <= '0; out_valid <= 1'b0;
    end else begin
      out_valid <= v[ITER];
      i_out     <= sat_round(x[ITER]);
      q_out     <= sat_round(y[ITER]);
    end
  end
endmodule
