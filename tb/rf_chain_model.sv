// rf_chain_model: behavioural stand-in for everything between the baseband
// DAC output and the baseband ADC inputs: DAC datapath, amplifier/klystron,
// directional couplers, the accelerating cavity, ADC datapaths. It is not
// hardware; it lets a testbench close the loop at baseband, one sample per
// clock (245.76 MSPS).
//   forward   F[n]   = GAIN * exp(j*PHASE_DEG) * dac[n - DELAY]
//   klystron forward = F[n] (+ up to +-NOISE LSB of uniform noise)
//   cavity    V[n+1] = A * exp(j*dw*T) * V[n] + (1 - A) * 2 * F[n]
//   reflection       = F[n] - V[n]
// with A = exp(-1/TAU_SAMPLES) and dw*T = 2*pi*DETUNE_HZ / 245.76 MHz. After
// the RF pulse ends the reflection is the cavity's own decaying field, whose
// phase turns by dw*T per sample: the signature the frequency tuning uses.
// Runtime knobs: drift_deg_per_sample adds a linear phase ramp inside each
// pulse (a klystron-like drift); detune_hz (starts at DETUNE_HZ) changes the
// cavity detuning.
module rf_chain_model
  import llrf_pkg::*;
#(
  parameter int  DELAY       = 20,
  parameter real GAIN        = 0.025,
  parameter real PHASE_DEG   = 30.0,
  parameter real DETUNE_HZ   = 2.08e6,
  parameter real TAU_SAMPLES = 120.0,
  parameter int  NOISE       = 1
) (
  input  logic clk,
  input  iq_t  dac_i,
  input  iq_t  dac_q,
  input  logic dac_valid,
  output iq_t  kf_i,
  output iq_t  kf_q,
  output iq_t  refl_i,
  output iq_t  refl_q
);
  localparam real PI = 3.14159265358979;
  real di [DELAY];
  real dq [DELAY];
  real vi = 0.0, vq = 0.0;
  real drift_deg_per_sample = 0.0;
  real detune_hz = DETUNE_HZ;
  int  in_pulse = 0;

  function automatic iq_t sat(real v);
    if (v > 32767.0) return 16'sh7FFF;
    if (v < -32768.0) return 16'sh8000;
    return iq_t'($rtoi(v >= 0.0 ? v + 0.5 : v - 0.5));
  endfunction

  function automatic real nz();
    if (NOISE == 0) return 0.0;
    return real'(int'($urandom % (2*NOISE + 1)) - NOISE);
  endfunction

  initial begin
    for (int k = 0; k < DELAY; k++) begin di[k] = 0.0; dq[k] = 0.0; end
    kf_i = 0; kf_q = 0; refl_i = 0; refl_q = 0;
  end

  always @(posedge clk) begin
    real xi, xq, fi, fq, ph, a, w, ni, nq;
    xi = di[DELAY-1]; xq = dq[DELAY-1];
    for (int k = DELAY-1; k > 0; k--) begin di[k] = di[k-1]; dq[k] = dq[k-1]; end
    di[0] = dac_valid ? real'(dac_i) : 0.0;
    dq[0] = dac_valid ? real'(dac_q) : 0.0;
    in_pulse = (xi != 0.0 || xq != 0.0) ? in_pulse + 1 : 0;
    ph = (PHASE_DEG + drift_deg_per_sample * real'(in_pulse)) * PI / 180.0;
    fi = GAIN * (xi * $cos(ph) - xq * $sin(ph));
    fq = GAIN * (xi * $sin(ph) + xq * $cos(ph));
    a  = $exp(-1.0 / TAU_SAMPLES);
    w  = 2.0 * PI * detune_hz / 245.76e6;
    ni = a * ($cos(w) * vi - $sin(w) * vq) + (1.0 - a) * 2.0 * fi;
    nq = a * ($sin(w) * vi + $cos(w) * vq) + (1.0 - a) * 2.0 * fq;
    kf_i   <= sat(fi + nz());
    kf_q   <= sat(fq + nz());
    refl_i <= sat(fi - vi);
    refl_q <= sat(fq - vq);
    vi = ni; vq = nq;
  end
endmodule
