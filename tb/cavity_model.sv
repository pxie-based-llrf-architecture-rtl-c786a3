// Behavioural model (not synthesizable) of the analog side of the test
// bench, for closed-loop simulation of the LLRF system: reference source,
// I/Q modulator, resonant cavity with pickup, tuner with stepper motor, and
// the 14-bit ADC that samples reference, pickup, incident and reflected
// signals at the system clock.
//
// Everything is modelled as complex envelopes around the carrier. The
// modulator turns the DAC codes into the incident wave
//     Vi = G_MOD * (dac_i + j*dac_q)/8192 * exp(j*PSI_MOD)
// The cavity is a first-order resonator with filling time TAU_US:
//     dV/dt = (K_CAV*Vi - V)/tau + j*2*pi*df*V
// with detuning df = DETUNE_HZ - HZ_PER_STEP*position (position counts the
// tuner steps the DUT issues), and the pickup sees V*exp(j*PSI_CAV), so the
// incident-to-pickup phase is PSI_CAV on resonance. The coupler is taken as
// critically coupled, so the reflected wave is Vr = V - K_CAV*Vi: zero on
// resonance in steady state, growing with detuning. Each ADC sample is the
// real part of envelope * exp(j*theta*n) with theta = 2*pi*F_RF/F_S,
// quantised to 14 bits, plus +-NOISE LSB of uniform noise.
module cavity_model #(
  parameter real F_RF_MHZ    = 80.0,
  parameter real F_S_MHZ     = 50.0,
  parameter real REF_AMP     = 0.9,
  parameter real G_MOD       = 0.8,
  parameter real PSI_MOD     = 0.5,        // rad, modulator + cable phase
  parameter real K_CAV       = 1.0,
  parameter real TAU_US      = 6.0,
  parameter real PSI_CAV_DEG = -108.0,
  parameter real HZ_PER_STEP = 200.0,
  parameter int  NOISE       = 2
) (
  input  logic               clk,
  input  logic               rst_n,       // tuner steps are counted only out of reset
  input  logic signed [13:0] dac_i,
  input  logic signed [13:0] dac_q,
  input  logic               step,
  input  logic               dir,
  input  real                detune_hz,   // external perturbation
  output logic signed [13:0] adc_ref,
  output logic signed [13:0] adc_vo,
  output logic signed [13:0] adc_vi,
  output logic signed [13:0] adc_vr,
  output real                vi_amp,      // true incident amplitude
  output real                vr_amp,      // true reflected amplitude
  output real                vo_amp,      // true pickup amplitude (ADC full scale = 1)
  output real                vo_phase,    // true pickup phase, rad
  output real                df_hz,       // present detuning
  output int                 tuner_pos
);
  localparam real PI  = 3.14159265358979323846;
  localparam real DT  = 1.0e-6 / F_S_MHZ;
  real vr = 0.0, vim = 0.0;      // cavity envelope
  real th = 0.0;
  logic step_d = 1'b0;
  initial tuner_pos = 0;

  function automatic logic signed [13:0] q14(real v);
    real s;
    s = $floor(v * 8191.0 + 0.5) + real'($urandom_range(0, 2 * NOISE)) - real'(NOISE);
    if (s > 8191.0) s = 8191.0;
    if (s < -8192.0) s = -8192.0;
    return 14'($rtoi(s));
  endfunction

  always @(posedge clk) begin
    real ir, ii, a, w, nr, ni, pr, pi_, rr, ri;
    // incident wave
    a   = G_MOD / 8192.0;
    ir  = a * (real'(dac_i) * $cos(PSI_MOD) - real'(dac_q) * $sin(PSI_MOD));
    ii  = a * (real'(dac_i) * $sin(PSI_MOD) + real'(dac_q) * $cos(PSI_MOD));
    // tuner
    step_d <= step && rst_n;
    if (rst_n && step && !step_d) tuner_pos = dir ? tuner_pos - 1 : tuner_pos + 1;
    df_hz = detune_hz - HZ_PER_STEP * real'(tuner_pos);
    // cavity
    w   = 2.0 * PI * df_hz * DT;
    nr  = vr  + DT / (TAU_US * 1.0e-6) * (K_CAV * ir - vr)  - w * vim;
    ni  = vim + DT / (TAU_US * 1.0e-6) * (K_CAV * ii - vim) + w * vr;
    vr  = nr;
    vim = ni;
    pr  = vr * $cos(PSI_CAV_DEG * PI / 180.0) - vim * $sin(PSI_CAV_DEG * PI / 180.0);
    pi_ = vr * $sin(PSI_CAV_DEG * PI / 180.0) + vim * $cos(PSI_CAV_DEG * PI / 180.0);
    vo_amp   = $sqrt(pr * pr + pi_ * pi_);
    vo_phase = $atan2(pi_, pr);
    rr  = vr  - K_CAV * ir;
    ri  = vim - K_CAV * ii;
    vi_amp   = $sqrt(ir * ir + ii * ii);
    vr_amp   = $sqrt(rr * rr + ri * ri);
    // sampling
    th = th + 2.0 * PI * (F_RF_MHZ / F_S_MHZ - $floor(F_RF_MHZ / F_S_MHZ));
    if (th > 2.0 * PI) th = th - 2.0 * PI;
    adc_ref <= q14(REF_AMP * $cos(th));
    adc_vo  <= q14(pr * $cos(th) - pi_ * $sin(th));
    adc_vi  <= q14(ir * $cos(th) - ii * $sin(th));
    adc_vr  <= q14(rr * $cos(th) - ri * $sin(th));
  end
endmodule
