// First-order lag network G(z) = B / (z - A), applied to one control channel.
//
// The paper's compensator is H_lag(z) = 0.002 / (z - 0.998): a pole close to
// z = 1 that slows the plant seen by the feedback loop so that a loop with a
// long sample period can still control it. In time domain
//     y[n+1] = A*y[n] + B*x[n]
// The state keeps FRAC fractional bits so that small inputs still move it.
// A = round(POLE * 2^FRAC) and B = 2^FRAC - A, which is 524 for the default
// FRAC = 18 and equals round(0.002 * 2^FRAC); choosing B this way makes the
// DC gain exactly 1 as it is for the paper's coefficients. POLE is a
// parameter, so the pole can be moved as the paper suggests for other loop
// bandwidths.
//
// Timing: on each en the state is updated with x; y is the state (the
// z^-1 of the transfer function), so y changes one cycle after en and
// reflects inputs up to the previous strobe. out_valid pulses with it.
module lag_filter
  import llrf_pkg::*;
#(
  parameter real POLE = 0.998,
  parameter int  FRAC = 18
) (
  input  logic clk,
  input  logic rst_n,
  input  logic en,
  input  iq_t  x,
  output logic out_valid,
  output iq_t  y
);
  localparam int SW = IQ_W + FRAC + 1;
  localparam int PW = SW + FRAC + 2;
  localparam longint A = longint'($rtoi(POLE * (2.0 ** FRAC) + 0.5));
  localparam longint B = (longint'(1) <<< FRAC) - A;
  localparam logic signed [SW-1:0] SMAX = SW'((2 ** (IQ_W - 1)) - 1) <<< FRAC;
  localparam logic signed [SW-1:0] SMIN = -(SW'(2 ** (IQ_W - 1)) <<< FRAC);

  logic signed [SW-1:0] st;
  logic signed [PW-1:0] nxt;

  always_comb nxt = ((PW'(A) * PW'(st)) >>> FRAC) + PW'(B) * PW'(x);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st        <= '0;
      out_valid <= 1'b0;
    end else begin
      out_valid <= en;
      if (en) begin
        if (nxt > PW'(SMAX))      st <= SMAX;
        else if (nxt < PW'(SMIN)) st <= SMIN;
        else                      st <= SW'(nxt);
      end
    end
  end

  assign y = iq_t'(st >>> FRAC);
endmodule
