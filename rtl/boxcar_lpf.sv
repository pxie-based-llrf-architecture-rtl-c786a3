// Low-pass filter that follows each mixer of the I/Q demodulator.
//
// A moving average over LEN samples: a running sum is updated with the newest
// sample minus the one leaving the window, then scaled by GAIN/LEN with a
// fixed-point reciprocal and saturated to OUT_W bits:
//     y = sat( (sum * RECIP) >>> (16 + POST_SHIFT) ),  RECIP = round(2^16*GAIN/LEN)
// A moving average has zeros at every multiple of F_S/LEN. With 50 MS/s and
// the 80 MHz tone aliased to -20 MHz the unwanted mixer product sits at
// 40 MHz -> -10 MHz = F_S/5, so any LEN that is a multiple of 5 removes it
// exactly. The paper names this block "LBF" and gives nothing more; the
// moving average is this design's choice.
//
// Timing: the sum is registered on in_valid; y is registered from it one
// cycle later, so y is valid two cycles after the in_valid of the newest
// sample it contains.
module boxcar_lpf #(
  parameter int  IN_W       = 32,
  parameter int  OUT_W      = 18,
  parameter int  LEN        = 10,
  parameter real GAIN       = 1.0,
  parameter int  POST_SHIFT = 0
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    in_valid,
  input  logic signed [IN_W-1:0]  x,
  output logic                    out_valid,
  output logic signed [OUT_W-1:0] y
);
  localparam int SUM_W = IN_W + $clog2(LEN) + 1;
  localparam int RECIP = $rtoi(GAIN * 65536.0 / LEN + 0.5);
  localparam int PROD_W = SUM_W + 20;
  localparam logic signed [PROD_W-1:0] MAXV = PROD_W'((2 ** (OUT_W - 1)) - 1);
  localparam logic signed [PROD_W-1:0] MINV = -PROD_W'(2 ** (OUT_W - 1));

  logic signed [IN_W-1:0]  win [LEN];
  logic signed [SUM_W-1:0] sum;
  logic                    sum_valid;
  logic signed [PROD_W-1:0] scaled;

  always_comb scaled = (PROD_W'(sum) * PROD_W'(RECIP)) >>> (16 + POST_SHIFT);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int k = 0; k < LEN; k++) win[k] <= '0;
      sum       <= '0;
      sum_valid <= 1'b0;
      y         <= '0;
      out_valid <= 1'b0;
    end else begin
      sum_valid <= in_valid;
      if (in_valid) begin
        win[0] <= x;
        for (int k = 1; k < LEN; k++) win[k] <= win[k-1];
        sum <= sum + SUM_W'(x) - SUM_W'(win[LEN-1]);
      end
      out_valid <= sum_valid;
      if (sum_valid) begin
        if (scaled > MAXV)      y <= OUT_W'(MAXV);
        else if (scaled < MINV) y <= OUT_W'(MINV);
        else                    y <= OUT_W'(scaled);
      end
    end
  end
endmodule
