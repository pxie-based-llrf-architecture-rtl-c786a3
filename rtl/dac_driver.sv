// Generation FPGA output stage: corrected I'/Q' to the two DAC channels that
// drive the baseband inputs of the analog I/Q modulator.
//
// Whenever the stream FIFO holds a word it is popped and both components are
// rounded from IQ_W to DAC_W bits (dropping the IQ_W - DAC_W least
// significant bits, round half up) with saturation. The DAC registers hold
// the last value between control samples (zero-order hold). With rf_on low
// both outputs are forced to zero, which removes the drive from the
// modulator. The paper gives the role of this card; rounding, hold and the
// rf_on gate are this design's.
//
// Timing: pop in cycle t, new DAC codes and the update pulse in t+1.
module dac_driver
  import llrf_pkg::*;
(
  input  logic       clk,
  input  logic       rst_n,
  input  logic       rf_on,
  input  logic       in_empty,
  input  ctrl_word_t in_data,
  output logic       in_rd,
  output dac_t       dac_i,
  output dac_t       dac_q,
  output logic       update
);
  localparam int SH = IQ_W - DAC_W;
  localparam logic signed [IQ_W:0] MAXV = (IQ_W+1)'((2 ** (DAC_W - 1)) - 1);

  function automatic dac_t to_dac(iq_t v);
    logic signed [IQ_W:0] r;
    r = ((IQ_W+1)'(v) + (IQ_W+1)'(2 ** (SH - 1))) >>> SH;
    if (r > MAXV) return dac_t'(MAXV);
    return dac_t'(r);
  endfunction

  assign in_rd = !in_empty;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      dac_i  <= '0;
      dac_q  <= '0;
      update <= 1'b0;
    end else begin
      update <= in_rd;
      if (!rf_on) begin
        dac_i <= '0;
        dac_q <= '0;
      end else if (in_rd) begin
        dac_i <= to_dac(in_data.i);
        dac_q <= to_dac(in_data.q);
      end
    end
  end
endmodule
