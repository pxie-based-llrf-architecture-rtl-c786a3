// Amplitude and phase feedback controller: the signal processing and control
// structure between the input and the output stream FIFOs.
//
// For every acq_word_t taken from the input FIFO:
//   1. iq_comp rotates and scales the measured (I, Q) by the cable-phase /
//      loss coefficient (comp_c, comp_s);
//   2. two pid_ctrl instances form error = setpoint - measurement for I and
//      for Q separately and compute the PID actions;
//   3. two lag_filter instances (the lag network G(z) = 0.002/(z - 0.998))
//      shape each action into the corrected components I' and Q';
//   4. the pair (I', Q') is written to the output FIFO for the generation
//      card.
// The same gains serve both channels. The chain holds one sample at a time:
// a word is popped only when the output FIFO has room and the previous
// sample has left, so a full output FIFO stalls the controller (and, behind
// it, fills the input FIFO). The dphi field is passed to the tuning loop
// (dphi_valid) at each pop. The order of operations is the paper's; the
// single-sample flow control and the shared gains are this design's.
//
// Timing: pop in cycle t, compensation t+1, PID t+2, lag output and push
// t+3; the next pop can happen at t+4. Each control sample takes 4 cycles.
module iq_loop_ctrl
  import llrf_pkg::*;
(
  input  logic       clk,
  input  logic       rst_n,
  // input FIFO
  input  logic       in_empty,
  input  acq_word_t  in_data,
  output logic       in_rd,
  // output FIFO
  input  logic       out_full,
  output logic       out_wr,
  output ctrl_word_t out_data,
  // settings
  input  iq_t        sp_i,
  input  iq_t        sp_q,
  input  coef_t      comp_c,
  input  coef_t      comp_s,
  input  coef_t      kp,
  input  coef_t      ki,
  input  coef_t      kd,
  // to the tuning loop
  output logic       dphi_valid,
  output phase_t     dphi,
  // monitoring
  output iq_t        meas_i,
  output iq_t        meas_q,
  output logic signed [IQ_W:0] err_i,
  output logic signed [IQ_W:0] err_q,
  output logic       sat_i,
  output logic       sat_q,
  output logic       stall
);
  logic busy;
  logic comp_v, pid_v_i, pid_v_q, lag_v_i, lag_v_q;
  iq_t  u_i, u_q, y_i, y_q;

  assign stall = !in_empty && (busy || out_full);
  assign in_rd = !in_empty && !busy && !out_full;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy       <= 1'b0;
      dphi_valid <= 1'b0;
      dphi       <= '0;
    end else begin
      dphi_valid <= in_rd;
      if (in_rd) begin
        busy <= 1'b1;
        dphi <= in_data.dphi;
      end else if (out_wr) begin
        busy <= 1'b0;
      end
    end
  end

  iq_comp u_comp (
    .clk, .rst_n, .in_valid(in_rd), .i_in(in_data.i), .q_in(in_data.q),
    .c(comp_c), .s(comp_s), .out_valid(comp_v), .i_out(meas_i), .q_out(meas_q)
  );

  pid_ctrl #(.DW(IQ_W)) u_pid_i (
    .clk, .rst_n, .en(comp_v), .setpoint(sp_i), .meas(meas_i), .kp, .ki, .kd,
    .out_valid(pid_v_i), .err(err_i), .u(u_i), .sat(sat_i)
  );
  pid_ctrl #(.DW(IQ_W)) u_pid_q (
    .clk, .rst_n, .en(comp_v), .setpoint(sp_q), .meas(meas_q), .kp, .ki, .kd,
    .out_valid(pid_v_q), .err(err_q), .u(u_q), .sat(sat_q)
  );

  lag_filter u_lag_i (.clk, .rst_n, .en(pid_v_i), .x(u_i), .out_valid(lag_v_i), .y(y_i));
  lag_filter u_lag_q (.clk, .rst_n, .en(pid_v_q), .x(u_q), .out_valid(lag_v_q), .y(y_q));

  assign out_wr     = lag_v_i && lag_v_q;
  assign out_data.i = y_i;
  assign out_data.q = y_q;
endmodule
