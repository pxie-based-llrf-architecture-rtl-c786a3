// Workload testbench: the filling time that the lag network gives the
// plant, measured in clock cycles at two control sample rates.
//
// With G(z) = 0.002/(z - 0.998), a step reaches 1 - 1/e of its final value
// after about 1/(1 - 0.998) = 500 control samples. The time this takes
// therefore depends only on the control sample period. Two lag_filter
// instances (default parameters) are strobed every 150 clocks (333 kHz) and
// every 2500 clocks (the 20 kHz rate of a loop closed through a real-time
// CPU). The same input step is applied to both. The time at which each
// output first reaches 63.2 % of the step is compared with the exact sample
// count for the built coefficients. It must also match the expected filling
// time: 1.5 ms (the value reported for the slowed plant) and 25 ms.
// Both must be within 2 %.
module tb_lag_filling_time;
  import llrf_pkg::*;
  localparam int  DIV_FAST = 150;
  localparam int  DIV_SLOW = 2500;
  localparam real T_CLK_US = 0.02;       // 50 MHz
  localparam real STEP     = 100000.0;

  logic clk = 0, rst_n = 0;
  logic en_f, en_s;
  iq_t  x = '0, y_f, y_s;
  int   cnt_f = 0, cnt_s = 0;
  longint cyc = 0, t0 = -1, hit_f = -1, hit_s = -1;
  int checks = 0, failures = 0;

  function automatic real fabs(real v); return (v < 0.0) ? -v : v; endfunction

  lag_filter u_fast (.clk, .rst_n, .en(en_f), .x, .out_valid(), .y(y_f));
  lag_filter u_slow (.clk, .rst_n, .en(en_s), .x, .out_valid(), .y(y_s));

  assign en_f = rst_n && (cnt_f == 0);
  assign en_s = rst_n && (cnt_s == 0);

  always #10 clk = ~clk;

  always @(posedge clk) begin
    if (rst_n) begin
      cyc   <= cyc + 1;
      cnt_f <= (cnt_f == DIV_FAST - 1) ? 0 : cnt_f + 1;
      cnt_s <= (cnt_s == DIV_SLOW - 1) ? 0 : cnt_s + 1;
      if (t0 >= 0 && hit_f < 0 && real'(y_f) >= 0.632121 * STEP) hit_f <= cyc - t0;
      if (t0 >= 0 && hit_s < 0 && real'(y_s) >= 0.632121 * STEP) hit_s <= cyc - t0;
    end
  end

  initial begin
    repeat (4000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    real a, n63, t_f, t_s;
    // samples to reach 1 - 1/e with the built pole A = round(0.998 * 2^18) / 2^18
    a   = real'(longint'($rtoi(0.998 * 262144.0 + 0.5))) / 262144.0;
    n63 = $ln(1.0 / 2.718281828459045) / $ln(a);
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (10) @(posedge clk);
    @(negedge clk);
    x  = iq_t'($rtoi(STEP));
    t0 = cyc;
    wait (hit_f >= 0 && hit_s >= 0);
    @(posedge clk);
    t_f = real'(hit_f) * T_CLK_US;
    t_s = real'(hit_s) * T_CLK_US;
    $display("63%% time: %0.1f us at %0d clocks per sample (%0.1f samples, expected %0.1f)",
             t_f, DIV_FAST, real'(hit_f) / DIV_FAST, n63);
    $display("63%% time: %0.1f us at %0d clocks per sample (%0.1f samples, expected %0.1f)",
             t_s, DIV_SLOW, real'(hit_s) / DIV_SLOW, n63);
    checks += 4;
    if (fabs(real'(hit_f) / DIV_FAST - n63) > 2.0) failures++;
    if (fabs(real'(hit_s) / DIV_SLOW - n63) > 2.0) failures++;
    if (fabs(t_f - 1500.0) > 0.02 * 1500.0) begin failures++; $display("fast filling time %f us", t_f); end
    if (fabs(t_s - 25000.0) > 0.02 * 25000.0) begin failures++; $display("slow filling time %f us", t_s); end
    // final value: unit DC gain
    repeat (8000 * DIV_FAST) @(posedge clk);
    checks++;
    if (fabs(real'(y_f) - STEP) > 2.0) begin failures++; $display("final value %0d", y_f); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
