// Workload testbench: the I/Q demodulator under the sampling plans of the
// undersampling analysis, each at its own elaboration-time parameters:
//   A. 80 MHz at 50 MS/s (the acquisition card's rate; alias at -20 MHz,
//      mixer image at F_S/5, filter length 10);
//   B. 80 MHz at 4*80/(2m-1) MS/s with m = 4, i.e. 45.714 MS/s, the plan that
//      puts the alias at F_S/4 (270 degrees per sample; image at F_S/2,
//      filter length 4);
//   C. 80 MHz oversampled at 250 MS/s (115.2 degrees per sample; image at
//      90 MHz = 9*F_S/25, filter length 25).
// For each plan a tone of known amplitude and phase is sampled with the
// plan's own phase step and I/Q must come out as A*R*cos(phi), A*R*sin(phi)
// within 0.5 % of full scale at several operating points.
module tb_sampling_plans;
  import llrf_pkg::*;
  localparam real PI = 3.14159265358979323846;
  localparam real FS_B = 4.0 * 80.0 / 7.0;
  logic clk = 0, rst_n = 0;
  adc_t rf [3], rs [3];
  iq_t i [3], q [3];
  logic v [3];
  int checks = 0, failures = 0;
  real A = 0.5, R = 0.9, phi = 0.3;
  real fs [3] = '{50.0, FS_B, 250.0};
  longint n = 0;

  function automatic real fabs(real x); return (x < 0.0) ? -x : x; endfunction

  iq_demod #(.F_RF_MHZ(80.0), .F_S_MHZ(50.0),  .LPF_LEN(10)) u_a (.clk, .rst_n, .in_valid(1'b1), .rf(rf[0]), .ref_in(rs[0]), .out_valid(v[0]), .i(i[0]), .q(q[0]));
  iq_demod #(.F_RF_MHZ(80.0), .F_S_MHZ(FS_B),  .LPF_LEN(4))  u_b (.clk, .rst_n, .in_valid(1'b1), .rf(rf[1]), .ref_in(rs[1]), .out_valid(v[1]), .i(i[1]), .q(q[1]));
  iq_demod #(.F_RF_MHZ(80.0), .F_S_MHZ(250.0), .LPF_LEN(25)) u_c (.clk, .rst_n, .in_valid(1'b1), .rf(rf[2]), .ref_in(rs[2]), .out_valid(v[2]), .i(i[2]), .q(q[2]));

  always #10 clk = ~clk;

  always @(negedge clk) begin
    for (int k = 0; k < 3; k++) begin
      real t;
      t = 2.0 * PI * (80.0 / fs[k]) * real'(n);
      rf[k] <= adc_t'($rtoi($floor(8191.0 * A * $cos(t + phi) + 0.5)));
      rs[k] <= adc_t'($rtoi($floor(8191.0 * R * $cos(t) + 0.5)));
    end
    n <= n + 1;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic point(real a, real p);
    A = a; phi = p;
    repeat (60) @(posedge clk);
    #1;
    for (int k = 0; k < 3; k++) begin
      checks += 3;
      if (!v[k]) failures++;
      if (fabs(real'(i[k]) - a * R * $cos(p) * 131072.0) > 0.005 * 131072.0) begin
        failures++; $display("plan %0d: I=%0d exp %f", k, i[k], a * R * $cos(p) * 131072.0);
      end
      if (fabs(real'(q[k]) - a * R * $sin(p) * 131072.0) > 0.005 * 131072.0) begin
        failures++; $display("plan %0d: Q=%0d exp %f", k, q[k], a * R * $sin(p) * 131072.0);
      end
    end
  endtask

  initial begin
    for (int k = 0; k < 3; k++) begin rf[k] = '0; rs[k] = '0; end
    repeat (3) @(posedge clk);
    rst_n = 1;
    point(0.5, 0.3);
    point(0.8, 2.2);
    point(0.25, -2.0);
    point(0.9, -0.7);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
