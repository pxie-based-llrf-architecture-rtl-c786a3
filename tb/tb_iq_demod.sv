// Testbench for iq_demod: an 80 MHz cavity signal of amplitude A and phase
// phi and the reference are sampled at 50 MS/s (real arithmetic here); after
// the filter settles, I and Q must equal A*R*cos(phi) and A*R*sin(phi) in
// units of 2^17, within 0.5 %. Several amplitude/phase pairs, including all
// four quadrants, are tried. Also checks the output latency: a change of
// input appears fully after 4 + LPF_LEN cycles.
module tb_iq_demod;
  import llrf_pkg::*;
  logic clk = 0, rst_n = 0, out_valid;
  adc_t rf, ref_s;
  iq_t  i, q;
  int checks = 0, failures = 0;
  function automatic real fabs(real v); return (v < 0.0) ? -v : v; endfunction
  localparam real PI = 3.14159265358979323846;
  real A = 0.5, R = 0.9, phi = 0.3;
  longint n = 0;

  iq_demod dut (.clk, .rst_n, .in_valid(1'b1), .rf, .ref_in(ref_s), .out_valid, .i, .q);
  always #10 clk = ~clk;

  always @(negedge clk) begin
    real t;
    t = 2.0 * PI * 1.6 * real'(n);
    rf    <= adc_t'($rtoi($floor(8191.0 * A * $cos(t + phi) + 0.5)));
    ref_s <= adc_t'($rtoi($floor(8191.0 * R * $cos(t) + 0.5)));
    n <= n + 1;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check_point(real a, real p);
    real ei, eq;
    A = a; phi = p;
    repeat (40) @(posedge clk);
    #1;
    ei = a * R * $cos(p) * 131072.0;
    eq = a * R * $sin(p) * 131072.0;
    checks += 3;
    if (!out_valid) failures++;
    if (fabs(real'(i) - ei) > 0.005 * 131072.0) begin failures++; $display("I=%0d exp %f", i, ei); end
    if (fabs(real'(q) - eq) > 0.005 * 131072.0) begin failures++; $display("Q=%0d exp %f", q, eq); end
  endtask

  initial begin
    rf = '0; ref_s = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    check_point(0.5, 0.3);
    check_point(0.8, 2.0);
    check_point(0.3, -2.5);
    check_point(0.95, -0.9);
    check_point(0.1, 1.5708);
    // latency: step the amplitude, output must be final after 4 + 10 cycles
    begin
      iq_t i_before;
      @(negedge clk);
      i_before = i;
      A = 0.2; phi = 0.0;
      repeat (3) @(posedge clk); #1;
      checks++;
      if (i != i_before) begin failures++; $display("output moved too early"); end
      repeat (12) @(posedge clk); #1;
      checks++;
      if (fabs(real'(i) - 0.2 * R * 131072.0) > 0.005 * 131072.0) begin
        failures++; $display("not settled after latency: %0d", i);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
