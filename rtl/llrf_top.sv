// LLRF digital system, all-FPGA configuration.
//
// The system keeps the field of an 80 MHz accelerating cavity at a set
// amplitude and phase (fast I/Q loop) and keeps the cavity on resonance with
// stepper-motor tuners (slow frequency loop). Its inputs are four ADC
// channels, all sampled at the 50 MHz system clock: the RF reference, the
// cavity pickup V_o, and the incident and reflected waves V_i and V_r. Its outputs are the corrected
// baseband components I' and Q' for the analog I/Q modulator (two DAC
// channels) and a step/direction pulse train for the tuner motor driver.
//
//   adc -> acq_fpga --stream FIFO--> iq_loop_ctrl --stream FIFO--> dac_driver -> dac
//                                        | dphi
//                                   tuning_ctrl -> stepper_pulse_gen -> step/dir
//
// acq_fpga demodulates and detects at the full sample rate and emits one word
// per control sample (cfg.ctrl_div cycles). The first stream FIFO stands for
// the card-to-card stream (peer-to-peer or DMA) and the controller's input
// FIFO; the second for the stream to the generation card and the
// controller's output FIFO. The frequency loop's PI is driven from the same
// stream. Everything runs in one clock domain here; splitting the
// processing across cards, as the paper does, only moves the FIFOs onto
// a transport. All settings come in through cfg and all monitoring leaves
// through status. The reflected wave is only measured for monitoring
// (status.amp_vr), like the incident amplitude (status.amp_vi). The two
// slow power-level inputs of the paper's test bench (P_i, P_r) are read by
// a separate slow DAQ card and do not enter this logic.
module llrf_top
  import llrf_pkg::*;
#(
  parameter real F_RF_MHZ      = 80.0,
  parameter real F_S_MHZ       = 50.0,
  parameter int  LPF_LEN       = 10,
  parameter int  FIFO_DEPTH    = 16,
  parameter int  TUNE_DEC_LOG2 = 5,
  parameter int  STEP_ACC_W    = 28,
  parameter int  STEP_PULSE    = 250
) (
  input  logic               clk,
  input  logic               rst_n,
  input  adc_t               adc_ref,
  input  adc_t               adc_vo,
  input  adc_t               adc_vi,
  input  adc_t               adc_vr,
  input  llrf_cfg_t          cfg,
  output dac_t               dac_i,
  output dac_t               dac_q,
  output logic               dac_update,
  output logic               step,
  output logic               dir,
  output logic signed [31:0] position,
  output llrf_status_t       status
);
  localparam int AW = $bits(acq_word_t);
  localparam int CW = $bits(ctrl_word_t);

  logic        a_wr, a_full, a_rd, a_empty;
  acq_word_t   a_wdata, a_rdata;
  logic        c_wr, c_full, c_rd, c_empty;
  ctrl_word_t  c_wdata, c_rdata;
  logic        dphi_v, rate_v, acq_strobe;
  phase_t      dphi, rate;
  logic [$clog2(FIFO_DEPTH):0] a_cnt, c_cnt;

  acq_fpga #(.F_RF_MHZ(F_RF_MHZ), .F_S_MHZ(F_S_MHZ), .LPF_LEN(LPF_LEN)) u_acq (
    .clk, .rst_n, .adc_ref, .adc_vo, .adc_vi, .adc_vr, .ctrl_div(cfg.ctrl_div),
    .wr_en(a_wr), .wr_data(a_wdata), .full(a_full),
    .live(status.live), .amp_vi(status.amp_vi), .amp_vr(status.amp_vr), .overflow_cnt(status.acq_overflow), .strobe(acq_strobe)
  );

  sync_fifo #(.W(AW), .DEPTH(FIFO_DEPTH)) u_fifo_in (
    .clk, .rst_n, .wr_en(a_wr), .wr_data(a_wdata), .full(a_full),
    .rd_en(a_rd), .rd_data(a_rdata), .empty(a_empty), .count(a_cnt)
  );

  iq_loop_ctrl u_ctrl (
    .clk, .rst_n,
    .in_empty(a_empty), .in_data(a_rdata), .in_rd(a_rd),
    .out_full(c_full), .out_wr(c_wr), .out_data(c_wdata),
    .sp_i(cfg.sp_i), .sp_q(cfg.sp_q), .comp_c(cfg.comp_c), .comp_s(cfg.comp_s),
    .kp(cfg.kp), .ki(cfg.ki), .kd(cfg.kd),
    .dphi_valid(dphi_v), .dphi,
    .meas_i(status.meas_i), .meas_q(status.meas_q), .err_i(status.err_i), .err_q(status.err_q),
    .sat_i(status.sat_i), .sat_q(status.sat_q), .stall(status.ctrl_stall)
  );

  sync_fifo #(.W(CW), .DEPTH(FIFO_DEPTH)) u_fifo_out (
    .clk, .rst_n, .wr_en(c_wr), .wr_data(c_wdata), .full(c_full),
    .rd_en(c_rd), .rd_data(c_rdata), .empty(c_empty), .count(c_cnt)
  );

  dac_driver u_dac (
    .clk, .rst_n, .rf_on(cfg.rf_on), .in_empty(c_empty), .in_data(c_rdata), .in_rd(c_rd),
    .dac_i, .dac_q, .update(dac_update)
  );

  tuning_ctrl #(.DEC_LOG2(TUNE_DEC_LOG2)) u_tune (
    .clk, .rst_n, .tune_en(cfg.tune_en), .dphi_valid(dphi_v), .dphi,
    .setpoint(cfg.tune_sp), .kp(cfg.tune_kp), .ki(cfg.tune_ki),
    .rate, .rate_valid(rate_v), .avg_err(status.tune_err)
  );
  assign status.tune_rate = rate;

  // control signals for monitoring: last word sent to the DAC side
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)    status.ctrl <= '0;
    else if (c_wr) status.ctrl <= c_wdata;
  end

  stepper_pulse_gen #(.ACC_W(STEP_ACC_W), .PULSE_CYC(STEP_PULSE)) u_step (
    .clk, .rst_n, .rate, .step, .dir, .position
  );
endmodule
