// Direct I/Q demodulator of one sampled RF channel against the sampled
// reference (the front half of the acquisition FPGA).
//
// The RF samples rf[n] = A*cos(theta*n + phi) and the reference samples
// ref[n] = R*cos(theta*n) are both taken by the 50 MS/s ADC, so the 80 MHz
// carrier appears as its -20 MHz alias. The reference drives the I mixer
// directly and, through a 90-degree shifter (quad_shift), the Q mixer:
//     rf*ref   = A*R/2 * ( cos(phi) + cos(2*theta*n + phi))
//     rf*ref90 = A*R/2 * (-sin(phi) + sin(2*theta*n + phi))
// A moving-average low-pass filter (boxcar_lpf) removes the 2*theta terms
// and scales by 2; the Q path is negated so that
//     I = A*R*cos(phi),  Q = A*R*sin(phi)
// with full-scale A*R = 1 mapped to 2^(IQ_W-1) (saturated one code below).
// The mixer/shifter/filter structure follows the paper's demodulation
// figure; the filter type and the fixed-point scaling are this design's.
//
// Interface: one sample pair per in_valid (every clock in the system).
// Timing: i/q are valid 4 cycles after the in_valid of the newest sample
// that entered the filter (shifter 1, mixer 1, filter 2).
module iq_demod
  import llrf_pkg::*;
#(
  parameter real F_RF_MHZ = 80.0,
  parameter real F_S_MHZ  = 50.0,
  parameter int  LPF_LEN  = 10
) (
  input  logic clk,
  input  logic rst_n,
  input  logic in_valid,
  input  adc_t rf,
  input  adc_t ref_in,
  output logic out_valid,
  output iq_t  i,
  output iq_t  q
);
  localparam int QS_W = ADC_W + 2;
  localparam int PR_W = ADC_W + QS_W;
  // product full scale is 2^(2*ADC_W-2); I full scale is 2^(IQ_W-1)
  localparam int SHIFT = (2 * ADC_W - 2) - (IQ_W - 1);

  logic                   qs_valid;
  logic signed [QS_W-1:0] ref90;
  adc_t                   rf_d, ref_d;
  logic                   mix_valid;
  logic signed [PR_W-1:0] prod_i, prod_q;
  logic                   vi, vq;

  quad_shift #(.IN_W(ADC_W), .OUT_W(QS_W), .F_RF_MHZ(F_RF_MHZ), .F_S_MHZ(F_S_MHZ)) u_qs (
    .clk, .rst_n, .in_valid, .x(ref_in), .out_valid(qs_valid), .y(ref90)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rf_d      <= '0;
      ref_d     <= '0;
      prod_i    <= '0;
      prod_q    <= '0;
      mix_valid <= 1'b0;
    end else begin
      if (in_valid) begin
        rf_d  <= rf;
        ref_d <= ref_in;
      end
      mix_valid <= qs_valid;
      if (qs_valid) begin
        prod_i <= PR_W'(rf_d) * PR_W'(ref_d);
        prod_q <= -(PR_W'(rf_d) * PR_W'(ref90));
      end
    end
  end

  boxcar_lpf #(.IN_W(PR_W), .OUT_W(IQ_W), .LEN(LPF_LEN), .GAIN(2.0), .POST_SHIFT(SHIFT)) u_lpf_i (
    .clk, .rst_n, .in_valid(mix_valid), .x(prod_i), .out_valid(vi), .y(i)
  );
  boxcar_lpf #(.IN_W(PR_W), .OUT_W(IQ_W), .LEN(LPF_LEN), .GAIN(2.0), .POST_SHIFT(SHIFT)) u_lpf_q (
    .clk, .rst_n, .in_valid(mix_valid), .x(prod_q), .out_valid(vq), .y(q)
  );

  assign out_valid = vi & vq;
endmodule
