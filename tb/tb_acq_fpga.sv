// Testbench for acq_fpga: sampled 80 MHz cavity-output and incident signals
// and reflected-wave signals with known amplitude and phase (50 MS/s, real arithmetic here) are fed
// with the reference. Each stream word must carry I = A*R*cos(phi_o),
// Q = A*R*sin(phi_o), amp = A*R, phase = phi_o and dphi = phi_o - phi_i
// (0.5 % / 0.1 degree tolerances), the monitored incident and reflected
// amplitudes must be Ai*R and Ar*R (0.5 %), words must come every ctrl_div cycles,
// and while the stream is full no word is written and the overflow counter
// counts the dropped ones.
module tb_acq_fpga;
  import llrf_pkg::*;
  logic clk = 0, rst_n = 0, wr_en, full = 0, strobe;
  adc_t adc_ref, adc_vo, adc_vi, adc_vr;
  amp_t amp_vi, amp_vr;
  acq_word_t wr_data, live;
  logic [15:0] overflow_cnt, ctrl_div = 16'd50;
  int checks = 0, failures = 0;
  localparam real PI = 3.14159265358979323846;
  real R = 0.9, Ao = 0.6, po = 0.4, Ai = 0.8, pi_ = -1.5, Ar = 0.25, pr = 2.0;
  longint n = 0;
  int last_wr = -1, cyc = 0, words = 0, settle = 200;

  function automatic real fabs(real v); return (v < 0.0) ? -v : v; endfunction
  function automatic real wrapd(real d);
    while (d > 32768.0) d -= 65536.0;
    while (d < -32768.0) d += 65536.0;
    return d;
  endfunction

  acq_fpga dut (.clk, .rst_n, .adc_ref, .adc_vo, .adc_vi, .adc_vr, .ctrl_div, .wr_en, .wr_data, .full,
    .live, .amp_vi, .amp_vr, .overflow_cnt, .strobe);
  always #10 clk = ~clk;

  always @(negedge clk) begin
    real t;
    t = 2.0 * PI * 1.6 * real'(n);
    adc_ref <= adc_t'($rtoi($floor(8191.0 * R  * $cos(t) + 0.5)));
    adc_vo  <= adc_t'($rtoi($floor(8191.0 * Ao * $cos(t + po) + 0.5)));
    adc_vi  <= adc_t'($rtoi($floor(8191.0 * Ai * $cos(t + pi_) + 0.5)));
    adc_vr  <= adc_t'($rtoi($floor(8191.0 * Ar * $cos(t + pr) + 0.5)));
    n <= n + 1;
  end

  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (rst_n && wr_en) begin
      words++;
      if (full) failures++;
      if (last_wr >= 0) begin
        checks++;
        if (cyc - last_wr != int'(ctrl_div)) begin failures++; $display("period %0d", cyc - last_wr); end
      end
      last_wr = cyc;
      if (cyc > settle) begin
        checks += 5;
        if (fabs(real'(wr_data.i) - Ao * R * $cos(po) * 131072.0) > 0.005 * 131072.0) begin failures++; $display("I %0d", wr_data.i); end
        if (fabs(real'(wr_data.q) - Ao * R * $sin(po) * 131072.0) > 0.005 * 131072.0) begin failures++; $display("Q %0d", wr_data.q); end
        if (fabs(real'(wr_data.amp) - Ao * R * 131072.0) > 0.005 * 131072.0) begin failures++; $display("A %0d", wr_data.amp); end
        if (fabs(wrapd(real'(wr_data.phase) - po / (2.0 * PI) * 65536.0)) > 20.0) begin failures++; $display("ph %0d", wr_data.phase); end
        checks += 2;
        if (fabs(real'(amp_vi) - Ai * R * 131072.0) > 0.005 * 131072.0) begin failures++; $display("Ai %0d", amp_vi); end
        if (fabs(real'(amp_vr) - Ar * R * 131072.0) > 0.005 * 131072.0) begin failures++; $display("Ar %0d", amp_vr); end
        if (fabs(wrapd(real'(wr_data.dphi) - (po - pi_) / (2.0 * PI) * 65536.0)) > 20.0) begin failures++; $display("dphi %0d", wr_data.dphi); end
      end
    end
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int w0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (1500) @(posedge clk);
    // new operating point, crossing the +-180 degree boundary for dphi
    po = 2.8; pi_ = -2.9; Ao = 0.3; Ar = 0.7; Ai = 0.5;
    settle = cyc + 100;   // detector pipeline and filter settle
    repeat (1500) @(posedge clk);
    // full stream: writes stop, overflow counts 10 dropped words
    @(negedge clk);
    full = 1; w0 = words;
    repeat (500) @(posedge clk);
    @(negedge clk);
    full = 0;
    last_wr = -1;
    checks += 2;
    if (words != w0) failures++;
    if (overflow_cnt != 16'd10) begin failures++; $display("overflow %0d", overflow_cnt); end
    repeat (500) @(posedge clk);
    checks++;
    if (words < 60) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
