// Acquisition FPGA: detection of the cavity field and of the incident and
// reflected waves.
//
// Four ADC channels are sampled at the system clock: the reference from
// the RF generator, the cavity pickup signal V_o, and the incident and
// reflected signals V_i and V_r from the bidirectional coupler at the cavity
// input. Three I/Q demodulators (iq_demod) measure V_o, V_i and V_r against
// the reference. The cavity output vector goes to a
// CORDIC phase detector and an amplitude detector; the incident vector goes
// to a second phase detector, and the difference phase(V_o) - phase(V_i) is
// the detuning measure used by the frequency tuning loop (it is about -108
// degrees when the test cavity is on resonance). The amplitudes of V_i and
// V_r are measured for monitoring only (amp_vi, amp_vr, same scale as the
// cavity amplitude): with the cavity amplitude they give the input-to-output
// power gain and the reflected power, which is lowest on resonance.
//
// A programmable divider (ctrl_div, in clock cycles, 0 counts as 1) sets the
// control sample rate: at each of its strobes one acq_word_t (I, Q, A, phase,
// dphi) is written to the outgoing stream FIFO. Each field is the latest
// result of its detector (their latencies differ by a few clock cycles).
// If the FIFO is full the word is dropped and the 16-bit saturating
// overflow counter is incremented. The structure follows the paper's
// demodulation figure and its split of work between the cards; the
// divider, the word format, the overflow policy and the use of V_r for
// monitoring only (the paper lists it as an input without saying how it is
// processed) are this design's.
module acq_fpga
  import llrf_pkg::*;
#(
  parameter real F_RF_MHZ = 80.0,
  parameter real F_S_MHZ  = 50.0,
  parameter int  LPF_LEN  = 10
) (
  input  logic        clk,
  input  logic        rst_n,
  input  adc_t        adc_ref,
  input  adc_t        adc_vo,
  input  adc_t        adc_vi,
  input  adc_t        adc_vr,
  input  logic [15:0] ctrl_div,
  // stream out
  output logic        wr_en,
  output acq_word_t   wr_data,
  input  logic        full,
  // monitoring
  output acq_word_t   live,
  output amp_t        amp_vi,
  output amp_t        amp_vr,
  output logic [15:0] overflow_cnt,
  output logic        strobe
);
  logic   vo_v, vi_v, vr_v, ph_o_v, ph_i_v, amp_v, amp_i_v, amp_r_v;
  iq_t    vo_i, vo_q, vi_i, vi_q, vr_i, vr_q;
  phase_t ph_o, ph_i;
  amp_t   amp_o, amp_i, amp_r;
  logic [15:0] div_cnt;

  iq_demod #(.F_RF_MHZ(F_RF_MHZ), .F_S_MHZ(F_S_MHZ), .LPF_LEN(LPF_LEN)) u_dem_o (
    .clk, .rst_n, .in_valid(1'b1), .rf(adc_vo), .ref_in(adc_ref),
    .out_valid(vo_v), .i(vo_i), .q(vo_q)
  );
  iq_demod #(.F_RF_MHZ(F_RF_MHZ), .F_S_MHZ(F_S_MHZ), .LPF_LEN(LPF_LEN)) u_dem_i (
    .clk, .rst_n, .in_valid(1'b1), .rf(adc_vi), .ref_in(adc_ref),
    .out_valid(vi_v), .i(vi_i), .q(vi_q)
  );
  iq_demod #(.F_RF_MHZ(F_RF_MHZ), .F_S_MHZ(F_S_MHZ), .LPF_LEN(LPF_LEN)) u_dem_r (
    .clk, .rst_n, .in_valid(1'b1), .rf(adc_vr), .ref_in(adc_ref),
    .out_valid(vr_v), .i(vr_i), .q(vr_q)
  );
  cordic_phase u_ph_o (.clk, .rst_n, .in_valid(vo_v), .i(vo_i), .q(vo_q), .out_valid(ph_o_v), .phase(ph_o));
  cordic_phase u_ph_i (.clk, .rst_n, .in_valid(vi_v), .i(vi_i), .q(vi_q), .out_valid(ph_i_v), .phase(ph_i));
  amp_calc     u_amp  (.clk, .rst_n, .in_valid(vo_v), .i(vo_i), .q(vo_q), .out_valid(amp_v), .amp(amp_o));
  amp_calc     u_amp_i (.clk, .rst_n, .in_valid(vi_v), .i(vi_i), .q(vi_q), .out_valid(amp_i_v), .amp(amp_i));
  amp_calc     u_amp_r (.clk, .rst_n, .in_valid(vr_v), .i(vr_i), .q(vr_q), .out_valid(amp_r_v), .amp(amp_r));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      live   <= '0;
      amp_vi <= '0;
      amp_vr <= '0;
    end else begin
      if (amp_i_v) amp_vi <= amp_i;
      if (amp_r_v) amp_vr <= amp_r;
      if (vo_v) begin
        live.i <= vo_i;
        live.q <= vo_q;
      end
      if (amp_v)  live.amp   <= amp_o;
      if (ph_o_v) live.phase <= ph_o;
      if (ph_o_v && ph_i_v) live.dphi <= ph_o - ph_i;
    end
  end

  assign strobe  = (div_cnt == 16'd0);
  assign wr_en   = strobe && !full;
  assign wr_data = live;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      div_cnt      <= '0;
      overflow_cnt <= '0;
    end else begin
      if (div_cnt + 16'd1 >= ctrl_div) div_cnt <= '0;
      else                             div_cnt <= div_cnt + 16'd1;
      if (strobe && full && overflow_cnt != 16'hFFFF) overflow_cnt <= overflow_cnt + 16'd1;
    end
  end
endmodule
