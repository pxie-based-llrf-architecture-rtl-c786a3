// Step/direction pulse train generator for the tuner stepper motor driver.
//
// A phase accumulator of ACC_W bits adds |rate| every clock; each carry out
// of the accumulator starts one step pulse, so the step frequency is
// |rate| * f_clk / 2^ACC_W (at 50 MHz and ACC_W = 28, one rate unit is
// 0.186 Hz and a 16-bit rate reaches about 6.1 kHz). A step pulse is high
// for PULSE_CYC clocks; carries that arrive while a pulse is high are held
// back by the pulse timer, which bounds the rate at f_clk / (2*PULSE_CYC).
// dir is the sign of rate and only changes between pulses. position counts
// issued steps up (dir = 0) or down (dir = 1). Both motors of the test bench
// are driven from the same train through one driver. The paper gives only
// "pulse train output for the stepper motors"; the accumulator scheme,
// pulse width and position counter are this design's.
//
// Timing: step rises one cycle after the carry.
module stepper_pulse_gen
  import llrf_pkg::*;
#(
  parameter int ACC_W     = 28,
  parameter int PULSE_CYC = 250
) (
  input  logic               clk,
  input  logic               rst_n,
  input  phase_t             rate,
  output logic               step,
  output logic               dir,
  output logic signed [31:0] position
);
  logic [ACC_W-1:0]           acc;
  logic [ACC_W:0]             sum;
  logic [PH_W-1:0]            mag;
  logic                       pend;
  logic [$clog2(2*PULSE_CYC+1)-1:0] tmr;

  assign mag = rate[PH_W-1] ? PH_W'(-rate) : PH_W'(rate);
  assign sum = {1'b0, acc} + (ACC_W+1)'(mag);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      acc      <= '0;
      pend     <= 1'b0;
      tmr      <= '0;
      step     <= 1'b0;
      dir      <= 1'b0;
      position <= '0;
    end else begin
      acc <= sum[ACC_W-1:0];
      if (sum[ACC_W]) pend <= 1'b1;
      if (tmr != 0) begin
        tmr <= tmr - 1'b1;
        if (tmr == ($bits(tmr))'(PULSE_CYC + 1)) step <= 1'b0;
      end else if (pend || sum[ACC_W]) begin
        // new pulse: direction taken now and held for the pulse
        pend     <= 1'b0;
        step     <= 1'b1;
        dir      <= rate[PH_W-1];
        tmr      <= ($bits(tmr))'(2 * PULSE_CYC);
        position <= rate[PH_W-1] ? position - 1 : position + 1;
      end
    end
  end
endmodule
