// Shared widths, fixed-point conventions and stream word types of the LLRF
// digital system.
//
// All logic runs on one clock, the ADC sample clock (50 MHz for the 50 MS/s
// acquisition card). ADC and DAC samples are 14-bit two's complement, as the
// acquisition and generation adapter modules of the test bench are 14-bit.
// Baseband I/Q values are 18-bit two's complement where 2^17 stands for a
// full-scale cavity signal multiplied by a full-scale reference. Phases are
// binary angles: 16 bits, 2^16 = 360 degrees, so a phase difference wraps
// for free. These widths are this design's choice; the sample rate and the
// converter resolutions are those of the test bench.
package llrf_pkg;

  localparam int ADC_W = 14;   // acquisition converter resolution
  localparam int DAC_W = 14;   // generation converter resolution
  localparam int IQ_W  = 18;   // baseband I/Q width
  localparam int PH_W  = 16;   // binary angle width, 2^PH_W = 360 degrees
  localparam int K_W   = 18;   // controller gain / coefficient width

  typedef logic signed [ADC_W-1:0] adc_t;
  typedef logic signed [DAC_W-1:0] dac_t;
  typedef logic signed [IQ_W-1:0]  iq_t;
  typedef logic        [IQ_W-1:0]  amp_t;
  typedef logic signed [PH_W-1:0]  phase_t;
  typedef logic signed [K_W-1:0]   coef_t;

  // Word the acquisition FPGA streams to the controller once per control sample.
  typedef struct packed {
    iq_t    i;       // in-phase component of the cavity output
    iq_t    q;       // quadrature component of the cavity output
    amp_t   amp;     // sqrt(I^2 + Q^2)
    phase_t phase;   // atan2(Q, I) of the cavity output
    phase_t dphi;    // phase(cavity output) - phase(incident signal)
  } acq_word_t;

  // Word the controller streams to the generation FPGA.
  typedef struct packed {
    iq_t i;          // corrected I'
    iq_t q;          // corrected Q'
  } ctrl_word_t;

  // Run-time settings of the whole system (written by the supervising host).
  typedef struct packed {
    logic [15:0] ctrl_div;   // control sample period in clock cycles
    iq_t    sp_i;            // I setpoint
    iq_t    sp_q;            // Q setpoint
    coef_t  comp_c;          // compensation g*cos(alpha), 2^14 = 1.0
    coef_t  comp_s;          // compensation g*sin(alpha), 2^14 = 1.0
    coef_t  kp;              // I/Q PID gains, 2^12 = 1.0
    coef_t  ki;
    coef_t  kd;
    phase_t tune_sp;         // resonance phase setpoint (binary angle)
    coef_t  tune_kp;         // tuning PI gains, 2^12 = 1.0
    coef_t  tune_ki;
    logic   tune_en;         // frequency tuning loop enable
    logic   rf_on;           // DAC drive enable
  } llrf_cfg_t;

  // Monitoring outputs (what the host displays).
  typedef struct packed {
    acq_word_t   live;           // latest detector results
    amp_t        amp_vi;         // latest amplitude of the incident wave
    amp_t        amp_vr;         // latest amplitude of the reflected wave
    iq_t         meas_i;         // compensated I at the last control sample
    iq_t         meas_q;
    logic signed [IQ_W:0] err_i; // I error at the last control sample
    logic signed [IQ_W:0] err_q;
    ctrl_word_t  ctrl;           // last corrected I'/Q' sent to the DAC side
    logic        sat_i;          // I PID output saturated
    logic        sat_q;
    phase_t      tune_err;       // mean resonance phase error
    phase_t      tune_rate;      // step-rate command
    logic [15:0] acq_overflow;   // control samples dropped at a full stream FIFO
    logic        ctrl_stall;     // controller waiting on a full output FIFO
  } llrf_status_t;

  // Degrees to binary angle, for parameters.
  function automatic phase_t deg_to_phase(real deg);
    return phase_t'($rtoi(deg * (2.0 ** PH_W) / 360.0 + (deg >= 0.0 ? 0.5 : -0.5)));
  endfunction

endpackage
