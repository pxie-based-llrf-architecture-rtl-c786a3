// Testbench for tuning_ctrl (DEC_LOG2 = 5): streams phase-difference samples
// around the -108 degree resonance setpoint with a known offset plus a
// zero-mean dither; checks that the mean error over each block of 32 is
// reported, that the PI output equals -(kp*e + k*ki*e)/4096 after the k-th
// block (integer model here), that the error wraps correctly across +-180
// degrees, and that tune_en = 0 forces the rate to zero.
module tb_tuning_ctrl;
  import llrf_pkg::*;
  logic clk = 0, rst_n = 0, tune_en = 0, dphi_valid = 0, rate_valid;
  phase_t dphi, setpoint, rate, avg_err;
  coef_t kp, ki;
  int checks = 0, failures = 0;

  tuning_ctrl dut (.clk, .rst_n, .tune_en, .dphi_valid, .dphi, .setpoint, .kp, .ki, .rate, .rate_valid, .avg_err);
  always #10 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // one block of 32 samples with mean offset off
  task automatic block(int off);
    for (int k = 0; k < 32; k++) begin
      @(negedge clk);
      dphi = setpoint + phase_t'(off) + phase_t'((k % 2 == 0) ? 37 : -37);
      dphi_valid = 1;
      @(negedge clk);
      dphi_valid = 0;
      repeat (2) @(negedge clk);
    end
    repeat (3) @(posedge clk);
    #1;
  endtask

  initial begin
    longint integ;
    dphi = '0; kp = coef_t'(4096); ki = coef_t'(1024);
    setpoint = deg_to_phase(-108.0);
    repeat (3) @(posedge clk);
    rst_n = 1;
    // disabled: no rate
    block(500);
    checks++;
    if (rate != 0) failures++;
    tune_en = 1;
    integ = 0;
    for (int b = 0; b < 6; b++) begin
      block(500);
      integ += 1024 * (-500);
      checks += 2;
      if (avg_err != 500) begin failures++; $display("avg_err %0d", avg_err); end
      if (longint'(rate) != ((4096 * (-500) + integ) >>> 12)) begin
        failures++; $display("rate %0d vs %0d", rate, (4096 * (-500) + integ) >>> 12);
      end
    end
    // wrap: setpoint +175 deg, measurements -175 deg -> error +10 deg
    tune_en = 0;
    @(negedge clk);
    tune_en = 1;
    setpoint = deg_to_phase(175.0);
    kp = coef_t'(4096); ki = coef_t'(0);
    block(int'(deg_to_phase(10.0)));
    checks++;
    if (avg_err < deg_to_phase(10.0) - 1 || avg_err > deg_to_phase(10.0) + 1) begin
      failures++; $display("wrap avg_err %0d", avg_err);
    end
    // disable again
    @(negedge clk); tune_en = 0; #1;
    checks++;
    if (rate != 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
