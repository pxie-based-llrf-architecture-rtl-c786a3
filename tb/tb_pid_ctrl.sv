// Testbench for pid_ctrl: random setpoints, measurements and gains drive the
// controller at irregular strobes; a behavioural model (integer arithmetic
// written out here: error, P, clamped integral, D on the error difference,
// arithmetic shift by 12, saturation) predicts u, err and sat one cycle
// after each strobe. A second instance with WRAP = 1 and 16-bit data checks
// that a binary-angle error takes the short way round.
module tb_pid_ctrl;
  import llrf_pkg::*;
  logic clk = 0, rst_n = 0, en = 0, out_valid, sat;
  iq_t sp, meas, u;
  logic signed [18:0] err;
  coef_t kp, ki, kd;
  int checks = 0, failures = 0;
  longint m_int = 0, m_eprev = 0;
  // wrap instance
  logic w_en = 0, w_valid, w_sat;
  phase_t w_sp, w_meas, w_u;
  logic signed [16:0] w_err;
  int sat_seen = 0;

  pid_ctrl #(.DW(18)) dut (.clk, .rst_n, .en, .setpoint(sp), .meas, .kp, .ki, .kd,
    .out_valid, .err, .u, .sat);
  pid_ctrl #(.DW(16), .WRAP(1'b1)) dutw (.clk, .rst_n, .en(w_en), .setpoint(w_sp), .meas(w_meas),
    .kp(coef_t'(4096)), .ki(coef_t'(0)), .kd(coef_t'(0)), .out_valid(w_valid), .err(w_err), .u(w_u), .sat(w_sat));
  always #10 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    longint e, p, d, uf, eu;
    bit es;
    sp = '0; meas = '0; kp = '0; ki = '0; kd = '0; w_sp = '0; w_meas = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 3000; n++) begin
      @(negedge clk);
      if (n % 500 == 0) begin
        kp = coef_t'($urandom_range(0, 20000));
        ki = coef_t'($urandom_range(0, 3000));
        kd = coef_t'($urandom_range(0, 8000));
      end
      sp   = iq_t'($signed($urandom_range(0, 160000)) - 80000);
      meas = iq_t'($signed($urandom_range(0, 160000)) - 80000);
      if (n % 500 > 400) meas = sp - 20;     // small errors: integral unwinds
      en = 1;
      e  = longint'(sp) - longint'(meas);
      p  = longint'(kp) * e;
      d  = longint'(kd) * (e - m_eprev);
      m_int = m_int + longint'(ki) * e;
      if (m_int > (longint'(131071) <<< 12)) m_int = longint'(131071) <<< 12;
      if (m_int < -(longint'(131072) <<< 12)) m_int = -(longint'(131072) <<< 12);
      uf = (p + m_int + d) >>> 12;
      es = 0; eu = uf;
      if (uf > 131071) begin eu = 131071; es = 1; end
      if (uf < -131072) begin eu = -131072; es = 1; end
      m_eprev = e;
      @(posedge clk); #1;
      en = 0;
      checks += 4;
      if (!out_valid) failures++;
      if (longint'(err) != e) begin failures++; $display("err %0d vs %0d", err, e); end
      if (longint'(u) != eu) begin failures++; $display("n=%0d u %0d vs %0d", n, u, eu); end
      if (sat != es) failures++;
      if (sat) sat_seen++;
      repeat ($urandom_range(0, 2)) @(posedge clk);
    end
    checks++;
    if (sat_seen == 0) failures++;
    // wrap: setpoint +170 deg, measurement -170 deg -> error -20 deg
    @(negedge clk);
    w_sp = deg_to_phase(170.0); w_meas = deg_to_phase(-170.0); w_en = 1;
    @(posedge clk); #1; w_en = 0;
    checks += 2;
    if (w_err != 17'(deg_to_phase(-20.0)) && w_err != 17'(deg_to_phase(-20.0) + 1) && w_err != 17'(deg_to_phase(-20.0) - 1)) begin
      failures++; $display("wrap err %0d", w_err);
    end
    if (w_u != phase_t'(w_err)) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
