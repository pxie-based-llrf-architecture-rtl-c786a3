// Testbench for lag_filter: checks the paper's H(z) = 0.002/(z - 0.998)
// three ways. (1) Sample by sample against a double-precision model of the
// difference equation y[n+1] = A*y[n] + B*x[n] with the 18-bit fixed-point
// coefficients A = 261620/2^18 (0.998) and B = 524/2^18 (0.002); tolerance
// 3 LSB for the truncation of the state. (2) The step response: after 500
// samples (one time constant) the output is 1 - e^-1 = 63.2 % of the step.
// (3) The DC gain: after a long step the output equals the input.
module tb_lag_filter;
  import llrf_pkg::*;
  logic clk = 0, rst_n = 0, en = 0, out_valid;
  iq_t x, y;
  int checks = 0, failures = 0;
  real ym = 0.0;

  lag_filter dut (.clk, .rst_n, .en, .x, .out_valid, .y);
  always #10 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic sample(iq_t v);
    @(negedge clk);
    x = v; en = 1;
    ym = (261620.0 * ym) / 262144.0 + (524.0 * real'(v)) / 262144.0;
    @(posedge clk); #1;
    en = 0;
    checks += 2;
    if (!out_valid) failures++;
    if (real'(y) - ym > 2.0 || real'(y) - ym < -3.0) begin
      failures++; $display("y=%0d model=%f", y, ym);
    end
    @(negedge clk);
  endtask

  initial begin
    x = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // (2) step of 100000 from rest
    for (int n = 0; n < 500; n++) sample(100000);
    checks++;
    if (y < 63100 || y > 63300) begin failures++; $display("tau: y=%0d", y); end
    for (int n = 0; n < 9500; n++) sample(100000);
    checks++;
    if (y < 99990 || y > 100000) begin failures++; $display("dc: y=%0d", y); end
    // (1) random input
    for (int n = 0; n < 3000; n++) sample(iq_t'($signed($urandom_range(0, 200000)) - 100000));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
