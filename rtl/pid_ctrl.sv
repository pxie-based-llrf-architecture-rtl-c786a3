// Discrete PID controller acting on one channel (I, Q, or the tuning phase).
//
// On each sample strobe (en) it forms the error e = setpoint - measurement
// (the sign convention of the controller figure: setpoint "+", measurement
// "-") and computes
//     u = ( kp*e + sum(ki*e) + kd*(e - e_prev) ) >>> GAIN_FRAC
// saturated to DW bits. The integral term is clamped to the range of the
// output (scaled by 2^GAIN_FRAC), so it cannot wind up while the output is
// saturated. With WRAP = 1 the error is taken modulo 2^DW, which makes a
// binary-angle error take the short way round the circle; the tuning loop
// uses this with kd = 0 as its PI controller. The paper gives the PID/PI
// role; the parallel form, the fixed-point format and the anti-windup
// clamp are this design's.
//
// Timing: u and sat are registered; out_valid follows en by one cycle.
module pid_ctrl
  import llrf_pkg::*;
#(
  parameter int DW        = 18,
  parameter int GAIN_FRAC = 12,
  parameter bit WRAP      = 1'b0
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 en,
  input  logic signed [DW-1:0] setpoint,
  input  logic signed [DW-1:0] meas,
  input  coef_t                kp,
  input  coef_t                ki,
  input  coef_t                kd,
  output logic                 out_valid,
  output logic signed [DW:0]   err,
  output logic signed [DW-1:0] u,
  output logic                 sat
);
  localparam int EW = DW + 1;
  localparam int AW = DW + GAIN_FRAC + 4;
  localparam logic signed [AW-1:0] IMAX = AW'((2 ** (DW - 1)) - 1) <<< GAIN_FRAC;
  localparam logic signed [AW-1:0] IMIN = -(AW'(2 ** (DW - 1)) <<< GAIN_FRAC);
  localparam logic signed [AW-1:0] UMAX = AW'((2 ** (DW - 1)) - 1);
  localparam logic signed [AW-1:0] UMIN = -AW'(2 ** (DW - 1));

  logic signed [EW-1:0] e, e_prev;
  logic signed [AW-1:0] integ, integ_next, p_term, d_term, sum, u_full;

  always_comb begin
    if (WRAP) e = EW'($signed(setpoint - meas));   // modulo 2^DW, sign-extended
    else      e = EW'(setpoint) - EW'(meas);
    p_term     = AW'(kp) * AW'(e);
    d_term     = AW'(kd) * (AW'(e) - AW'(e_prev));
    integ_next = integ + AW'(ki) * AW'(e);
    if (integ_next > IMAX)      integ_next = IMAX;
    else if (integ_next < IMIN) integ_next = IMIN;
    sum    = p_term + integ_next + d_term;
    u_full = sum >>> GAIN_FRAC;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      e_prev    <= '0;
      integ     <= '0;
      u         <= '0;
      err       <= '0;
      sat       <= 1'b0;
      out_valid <= 1'b0;
    end else begin
      out_valid <= en;
      if (en) begin
        e_prev <= e;
        integ  <= integ_next;
        err    <= e;
        if (u_full > UMAX) begin
          u   <= DW'(UMAX);
          sat <= 1'b1;
        end else if (u_full < UMIN) begin
          u   <= DW'(UMIN);
          sat <= 1'b1;
        end else begin
          u   <= DW'(u_full);
          sat <= 1'b0;
        end
      end
    end
  end
endmodule
