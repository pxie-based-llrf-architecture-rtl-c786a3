// Frequency tuning loop controller (the slow loop).
//
// The acquisition card measures dphi = phase(cavity output) - phase(incident
// signal) at every control sample. When the cavity is on resonance this
// difference equals a fixed value (setpoint; about -108 degrees for the test
// cavity); detuning moves it away. For each control sample the wrapped
// error dphi - setpoint is accumulated; every 2^DEC_LOG2 samples their mean
// is handed to a PI controller (pid_ctrl with kd = 0 and a wrapping error)
// whose output is the signed step-rate command for the tuner stepper
// motors. With tune_en low the rate is zero, the accumulator is cleared and
// the PI is not clocked, so it restarts from its last integral state. The
// paper gives the measurement, the setpoint and the PI controller; the
// averaging decimator is this design's choice to slow the loop down to
// motor speeds. The sign relating phase error to motor direction depends on
// the mechanics and is set by the sign of the gains.
//
// Timing: rate updates one cycle after every 2^DEC_LOG2-th dphi_valid.
module tuning_ctrl
  import llrf_pkg::*;
#(
  parameter int DEC_LOG2 = 5
) (
  input  logic   clk,
  input  logic   rst_n,
  input  logic   tune_en,
  input  logic   dphi_valid,
  input  phase_t dphi,
  input  phase_t setpoint,
  input  coef_t  kp,
  input  coef_t  ki,
  output phase_t rate,
  output logic   rate_valid,
  output phase_t avg_err
);
  localparam int SW = PH_W + DEC_LOG2 + 1;

  logic signed [SW-1:0]   acc;
  logic [DEC_LOG2-1:0]    cnt;
  logic                   pi_en;
  phase_t                 e, u;
  logic signed [PH_W:0]   pid_err;
  logic                   pid_sat;
  logic                   pid_v;

  assign e = dphi - setpoint;   // modulo 360 degrees

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      acc     <= '0;
      cnt     <= '0;
      pi_en   <= 1'b0;
      avg_err <= '0;
    end else begin
      pi_en <= 1'b0;
      if (!tune_en) begin
        acc <= '0;
        cnt <= '0;
      end else if (dphi_valid) begin
        cnt <= cnt + 1'b1;
        if (cnt == {DEC_LOG2{1'b1}}) begin
          avg_err <= phase_t'((acc + SW'(e)) >>> DEC_LOG2);
          acc     <= '0;
          pi_en   <= 1'b1;
        end else begin
          acc <= acc + SW'(e);
        end
      end
    end
  end

  // setpoint 0, measurement = mean error: e_pid = -(dphi - setpoint)
  pid_ctrl #(.DW(PH_W), .WRAP(1'b1)) u_pi (
    .clk, .rst_n, .en(pi_en), .setpoint('0), .meas(avg_err), .kp, .ki, .kd('0),
    .out_valid(pid_v), .err(pid_err), .u, .sat(pid_sat)
  );

  assign rate       = tune_en ? u : '0;
  assign rate_valid = pid_v;
endmodule
