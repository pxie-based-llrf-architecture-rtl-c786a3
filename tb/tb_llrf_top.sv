// End-to-end testbench of llrf_top at its default parameters, in closed loop
// with the behavioural cavity model (modulator, 80 MHz cavity with a 6 us
// filling time and -108 degree on-resonance phase, stepper tuner, 14-bit
// ADC at 50 MS/s).
//
// Sequence: (1) amplitude loop settles to an I/Q setpoint; (2) a 60 degree
// phase step of the setpoint; (3) a large amplitude step that saturates the
// PID; (4) a +3 kHz detuning applied to the cavity is removed by the
// frequency tuning loop through the stepper tuner, then (5) a -3 kHz
// detuning, moving the tuner the other way; (6) a control rate faster than
// the controller can process (ctrl_div = 2) overflows the stream FIFO and
// stalls the controller, after which the loop recovers; (7) RF off drives
// the DACs to zero. The monitored incident and reflected amplitudes must
// follow the model, and the reflected wave must shrink once the tuner has
// brought the cavity back to resonance. After each settling phase the measured field must be
// within 1 % in amplitude and 1 degree in phase of the setpoint (the
// stability targets quoted for heavy-ion LLRF), the true cavity field must
// match, and the residual detuning must be within two tuner steps. Each
// mechanism is counted and a mechanism that never occurs counts a failure.
module tb_llrf_top;
  import llrf_pkg::*;
  localparam real PI = 3.14159265358979323846;
  localparam real PSI_MOD = 0.5, REF = 0.9, GM = 0.8, KC = 1.0;

  logic clk = 0, rst_n = 0;
  adc_t adc_ref, adc_vo, adc_vi, adc_vr;
  llrf_cfg_t cfg;
  dac_t dac_i, dac_q;
  logic dac_update, step, dir;
  logic signed [31:0] position;
  llrf_status_t status;
  real detune = 0.0, vo_amp, vo_phase, df_hz, vi_amp, vr_amp;
  int tuner_pos;
  int checks = 0, failures = 0;
  // mechanism counters
  int n_settle = 0, n_phase = 0, n_sat = 0, n_tune_up = 0, n_tune_down = 0;
  int n_refl_drop = 0;
  int n_overflow = 0, n_stall = 0, n_rf_off = 0, n_steps_fwd = 0, n_steps_back = 0;
  longint cyc = 0;
  logic step_d = 0;

  llrf_top dut (.clk, .rst_n, .adc_ref, .adc_vo, .adc_vi, .adc_vr, .cfg, .dac_i, .dac_q, .dac_update,
    .step, .dir, .position, .status);

  cavity_model #(.REF_AMP(REF), .G_MOD(GM), .PSI_MOD(PSI_MOD), .K_CAV(KC)) plant (
    .clk, .rst_n, .dac_i, .dac_q, .step, .dir, .detune_hz(detune), .adc_ref, .adc_vo, .adc_vi,
    .adc_vr, .vi_amp, .vr_amp, .vo_amp, .vo_phase, .df_hz, .tuner_pos);

  always #10 clk = ~clk;

  always @(posedge clk) begin
    cyc <= cyc + 1;
    step_d <= step && rst_n;
    if (status.sat_i || status.sat_q) n_sat++;
    if (status.ctrl_stall) n_stall++;
    if (rst_n && step && !step_d) begin
      if (dir) n_steps_back++; else n_steps_fwd++;
    end
  end

  function automatic real fabs(real v); return (v < 0.0) ? -v : v; endfunction
  function automatic real wrap_pi(real v);
    while (v > PI) v -= 2.0 * PI;
    while (v < -PI) v += 2.0 * PI;
    return v;
  endfunction

  // setpoint as amplitude (fraction of 2^17) and phase in degrees
  task automatic set_sp(real a, real deg);
    cfg.sp_i = iq_t'($rtoi(a * 131072.0 * $cos(deg * PI / 180.0)));
    cfg.sp_q = iq_t'($rtoi(a * 131072.0 * $sin(deg * PI / 180.0)));
  endtask

  task automatic check_field(string tag, real a, real deg);
    real ma, mp, ta, tp;
    ma = $sqrt(real'(status.meas_i) ** 2 + real'(status.meas_q) ** 2) / 131072.0;
    mp = $atan2(real'(status.meas_q), real'(status.meas_i));
    // true field: meas = R*K*G*exp(j*(psi_mod+psi_cav)) * I'/Q', compensated back
    ta = vo_amp / (KC * GM);
    tp = wrap_pi(vo_phase - PSI_MOD - (-108.0 * PI / 180.0));
    checks += 4;
    if (fabs(ma - a) > 0.01 * a) begin failures++; $display("%s: measured amplitude %f vs %f", tag, ma, a); end
    if (fabs(wrap_pi(mp - deg * PI / 180.0)) > PI / 180.0) begin failures++; $display("%s: measured phase %f deg vs %f", tag, mp * 180.0 / PI, deg); end
    if (fabs(ta - a) > 0.02 * a) begin failures++; $display("%s: cavity amplitude %f vs %f", tag, ta, a); end
    if (fabs(wrap_pi(tp - deg * PI / 180.0)) > 2.0 * PI / 180.0) begin failures++; $display("%s: cavity phase %f deg vs %f", tag, tp * 180.0 / PI, deg); end
    // monitored incident and reflected amplitudes against the model
    checks += 2;
    if (fabs(real'(status.amp_vi) / 131072.0 - REF * vi_amp) > 0.005) begin
      failures++; $display("%s: incident amplitude %f vs %f", tag, real'(status.amp_vi) / 131072.0, REF * vi_amp);
    end
    if (fabs(real'(status.amp_vr) / 131072.0 - REF * vr_amp) > 0.005) begin
      failures++; $display("%s: reflected amplitude %f vs %f", tag, real'(status.amp_vr) / 131072.0, REF * vr_amp);
    end
    // the monitored control signal is what the DAC shows (14-bit rounding)
    checks++;
    if (cfg.rf_on && (((status.ctrl.i + 8) >>> 4) - dac_i > 1 || ((status.ctrl.i + 8) >>> 4) - dac_i < -1)) begin
      failures++; $display("%s: monitored I' %0d vs DAC %0d", tag, status.ctrl.i, dac_i);
    end
    $display("[%0d] %s: amp %f (cavity %f) phase %f deg (cavity %f) df %f Hz refl %f", cyc, tag, ma, ta, mp * 180.0 / PI, tp * 180.0 / PI, df_hz,
             real'(status.amp_vr) / 131072.0);
  endtask

  initial begin
    repeat (8000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    real g;
    int pos0;
    // calibration: undo the loop gain R*K*G and the modulator + cavity phase
    g = 1.0 / (REF * KC * GM);
    cfg = '0;
    cfg.ctrl_div = 16'd250;                     // 200 kHz control rate
    cfg.comp_c = coef_t'($rtoi(g * $cos(-(PSI_MOD - 108.0 * PI / 180.0)) * 16384.0));
    cfg.comp_s = coef_t'($rtoi(g * $sin(-(PSI_MOD - 108.0 * PI / 180.0)) * 16384.0));
    cfg.kp = coef_t'(40960);                    // 10.0
    cfg.ki = coef_t'(819);                      // 0.2
    cfg.kd = coef_t'(0);
    cfg.tune_sp = deg_to_phase(-108.0);
    cfg.tune_kp = coef_t'(-65536);              // -16.0
    cfg.tune_ki = coef_t'(-4);                  // -0.001
    cfg.tune_en = 1'b0;
    cfg.rf_on = 1'b1;
    set_sp(0.5, 0.0);
    repeat (5) @(posedge clk);
    rst_n = 1;

    // (1) amplitude loop settles
    repeat (300000) @(posedge clk);
    check_field("settle", 0.5, 0.0);
    n_settle++;
    // (2) phase step
    set_sp(0.5, 60.0);
    repeat (300000) @(posedge clk);
    check_field("phase step", 0.5, 60.0);
    n_phase++;
    // (3) large amplitude step: PID saturates
    begin
      int s0;
      s0 = n_sat;
      set_sp(0.8, 60.0);
      repeat (300000) @(posedge clk);
      check_field("large step", 0.8, 60.0);
      checks++;
      if (n_sat == s0) begin failures++; $display("no saturation on the large step"); end
    end
    set_sp(0.5, 0.0);
    repeat (300000) @(posedge clk);
    check_field("back", 0.5, 0.0);
    // (4) +3 kHz detuning, tuning loop on
    cfg.tune_en = 1'b1;
    detune = 3000.0;
    pos0 = tuner_pos;
    begin
      amp_t r_det;
      repeat (5000) @(posedge clk);
      r_det = status.amp_vr;
      repeat (1495000) @(posedge clk);
      check_field("detuned +3 kHz, tuned", 0.5, 0.0);
      checks++;
      $display("reflected amplitude detuned %f, tuned %f", real'(r_det) / 131072.0, real'(status.amp_vr) / 131072.0);
      if (status.amp_vr >= r_det / 2) failures++; else n_refl_drop++;
    end
    checks += 2;
    if (fabs(df_hz) > 400.0) begin failures++; $display("residual detuning %f Hz", df_hz); end
    if (tuner_pos == pos0) failures++; else n_tune_up++;
    // (5) -3 kHz
    detune = -3000.0;
    pos0 = tuner_pos;
    repeat (1500000) @(posedge clk);
    check_field("detuned -3 kHz, tuned", 0.5, 0.0);
    checks += 3;
    if (fabs(df_hz) > 400.0) begin failures++; $display("residual detuning %f Hz", df_hz); end
    if (tuner_pos == pos0) failures++; else n_tune_down++;
    if (position != 32'(tuner_pos)) begin failures++; $display("position %0d tuner %0d", position, tuner_pos); end
    // (6) control rate faster than the controller: overflow and stall
    begin
      logic [15:0] o0;
      o0 = status.acq_overflow;
      cfg.ctrl_div = 16'd2;
      repeat (2000) @(posedge clk);
      cfg.ctrl_div = 16'd250;
      checks++;
      if (status.acq_overflow == o0) failures++; else n_overflow++;
      repeat (300000) @(posedge clk);
      check_field("after overflow", 0.5, 0.0);
    end
    // (7) RF off
    cfg.rf_on = 1'b0;
    repeat (2000) @(posedge clk);
    checks += 2;
    if (dac_i != 0 || dac_q != 0) failures++; else n_rf_off++;
    if (vo_amp > 0.01) begin failures++; $display("cavity still driven: %f", vo_amp); end

    // every mechanism must have happened
    checks += 11;
    if (n_refl_drop == 0) failures++;
    if (n_settle == 0) failures++;
    if (n_phase == 0) failures++;
    if (n_sat == 0) failures++;
    if (n_tune_up == 0) failures++;
    if (n_tune_down == 0) failures++;
    if (n_overflow == 0) failures++;
    if (n_stall == 0) failures++;
    if (n_rf_off == 0) failures++;
    if (n_steps_fwd == 0) failures++;
    if (n_steps_back == 0) failures++;
    $display("mechanisms: settle=%0d phase_step=%0d pid_sat_cycles=%0d tune_up=%0d tune_down=%0d overflow=%0d stall_cycles=%0d rf_off=%0d steps_fwd=%0d steps_back=%0d refl_drop=%0d",
             n_settle, n_phase, n_sat, n_tune_up, n_tune_down, n_overflow, n_stall, n_rf_off, n_steps_fwd, n_steps_back, n_refl_drop);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
