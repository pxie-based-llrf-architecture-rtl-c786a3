// 90-degree phase shifter for the sampled reference signal.
//
// The reference is a single tone whose phase advances by a fixed angle theta
// per sample: theta = 2*pi*frac(F_RF/F_S). For an 80 MHz tone sampled at
// 50 MS/s theta is 216 degrees, i.e. the tone appears at -20 MHz (the
// undersampling alias with its spectral inversion). For x[n] = cos(theta*n)
// the identity
//     sin(theta*n) = (x[n-1] - cos(theta)*x[n]) / sin(theta)
// gives the quadrature copy from two consecutive samples, so the shifter is a
// two-tap FIR with coefficients derived from F_RF and F_S at elaboration time.
// Any amplitude and phase of the input tone are kept; only the 90 degree
// rotation is added. theta must not be 0 or 180 degrees.
//
// The block named "90 degrees" in the demodulator is the paper's; the two-tap
// realisation is this design's choice.
//
// Timing: one register stage. y is valid the cycle after in_valid and is the
// shifted version of the sample presented with that in_valid.
module quad_shift #(
  parameter int  IN_W      = 14,
  parameter int  OUT_W     = 16,
  parameter real F_RF_MHZ  = 80.0,
  parameter real F_S_MHZ   = 50.0,
  parameter int  COEF_FRAC = 14
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    in_valid,
  input  logic signed [IN_W-1:0]  x,
  output logic                    out_valid,
  output logic signed [OUT_W-1:0] y
);
  localparam real PI    = 3.14159265358979323846;
  localparam real RATIO = F_RF_MHZ / F_S_MHZ;
  localparam real THETA = 2.0 * PI * (RATIO - $floor(RATIO));
  localparam int  C_CUR  = $rtoi((-$cos(THETA) / $sin(THETA)) * (2.0 ** COEF_FRAC) + ((-$cos(THETA) / $sin(THETA)) >= 0.0 ? 0.5 : -0.5));
  localparam int  C_PREV = $rtoi((1.0 / $sin(THETA)) * (2.0 ** COEF_FRAC) + ((1.0 / $sin(THETA)) >= 0.0 ? 0.5 : -0.5));
  localparam int  P_W    = IN_W + COEF_FRAC + 4;

  logic signed [IN_W-1:0] x_prev;
  logic signed [P_W-1:0]  acc;

  always_comb begin
    acc = P_W'(C_CUR) * P_W'(x) + P_W'(C_PREV) * P_W'(x_prev);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      x_prev    <= '0;
      y         <= '0;
      out_valid <= 1'b0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) begin
        x_prev <= x;
        y      <= OUT_W'((acc + P_W'(2 ** (COEF_FRAC - 1))) >>> COEF_FRAC);
      end
    end
  end
endmodule
