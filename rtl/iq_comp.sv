// Phase and amplitude compensation of the measured I/Q vector.
//
// The measured vector is multiplied by the complex coefficient c + j*s,
// where c = g*cos(alpha) and s = g*sin(alpha):
//     I_out = c*I - s*Q,   Q_out = s*I + c*Q
// alpha removes the phase the cables add between the cavity and the
// converters, and g undoes the cavity and line losses, so the corrected
// vector is expressed in the axes of the modulator's I'/Q' inputs. The
// paper states both corrections; the complex-multiply form and the
// coefficient format (signed, COEF_FRAC fractional bits, so g up to about 8
// with the defaults) are this design's. Results saturate to IQ_W bits.
//
// Timing: one register stage, out_valid follows in_valid by one cycle.
module iq_comp
  import llrf_pkg::*;
#(
  parameter int COEF_FRAC = 14
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  in_valid,
  input  iq_t   i_in,
  input  iq_t   q_in,
  input  coef_t c,
  input  coef_t s,
  output logic  out_valid,
  output iq_t   i_out,
  output iq_t   q_out
);
  localparam int PW = IQ_W + K_W + 1;
  localparam logic signed [PW-1:0] MAXV = PW'((2 ** (IQ_W - 1)) - 1);
  localparam logic signed [PW-1:0] MINV = -PW'(2 ** (IQ_W - 1));

  logic signed [PW-1:0] ri, rq;

  function automatic iq_t sat(logic signed [PW-1:0] v);
    if (v > MAXV) return iq_t'(MAXV);
    if (v < MINV) return iq_t'(MINV);
    return iq_t'(v);
  endfunction

  always_comb begin
    ri = (PW'(c) * PW'(i_in) - PW'(s) * PW'(q_in) + PW'(2 ** (COEF_FRAC - 1))) >>> COEF_FRAC;
    rq = (PW'(s) * PW'(i_in) + PW'(c) * PW'(q_in) + PW'(2 ** (COEF_FRAC - 1))) >>> COEF_FRAC;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      i_out     <= '0;
      q_out     <= '0;
      out_valid <= 1'b0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) begin
        i_out <= sat(ri);
        q_out <= sat(rq);
      end
    end
  end
endmodule
