// Testbench for stepper_pulse_gen (ACC_W reduced to 16 and PULSE_CYC to 10 to
// keep runs short): for several rate commands the number of steps in a
// window must equal the accumulator carries |rate|*cycles/2^ACC_W (+-1),
// each pulse must be exactly PULSE_CYC cycles wide, dir must follow the sign
// of the rate, position must count the pulses with sign, and rate 0 must
// produce no pulses.
module tb_stepper_pulse_gen;
  import llrf_pkg::*;
  localparam int ACC_W = 16, PULSE = 10;
  logic clk = 0, rst_n = 0, step, dir;
  phase_t rate;
  logic signed [31:0] position;
  int checks = 0, failures = 0;
  int pulses = 0, width = 0, bad_width = 0;
  logic step_d = 0;

  stepper_pulse_gen #(.ACC_W(ACC_W), .PULSE_CYC(PULSE)) dut (.clk, .rst_n, .rate, .step, .dir, .position);
  always #10 clk = ~clk;

  always @(posedge clk) begin
    step_d <= step;
    if (step) width <= width + 1;
    if (step && !step_d) pulses <= pulses + 1;
    if (!step && step_d) begin
      if (width != PULSE) bad_width <= bad_width + 1;
      width <= 0;
    end
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run(int r, int cycles);
    int p0, exp_n;
    logic signed [31:0] pos0;
    @(negedge clk);
    rate = phase_t'(r);
    p0 = pulses; pos0 = position;
    repeat (cycles) @(posedge clk);
    @(negedge clk);
    exp_n = (r < 0 ? -r : r) * cycles / (2 ** ACC_W);
    checks += 2;
    if (pulses - p0 < exp_n - 1 || pulses - p0 > exp_n + 1) begin
      failures++; $display("rate %0d: %0d pulses, expected %0d", r, pulses - p0, exp_n);
    end
    if (r != 0) begin
      checks++;
      if (dir != (r < 0)) failures++;
    end
    if ((position - pos0) != (r < 0 ? -(pulses - p0) : (pulses - p0))) begin
      // a pulse started in the previous window may be counted by the other counter
      if ((position - pos0) - (r < 0 ? -(pulses - p0) : (pulses - p0)) > 1 ||
          (position - pos0) - (r < 0 ? -(pulses - p0) : (pulses - p0)) < -1) begin
        failures++; $display("position moved %0d for %0d pulses", position - pos0, pulses - p0);
      end
    end
  endtask

  initial begin
    rate = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    run(0, 20000);
    run(1000, 50000);
    run(-1000, 50000);
    run(3000, 40000);
    run(-2500, 40000);
    run(0, 20000);
    checks += 2;
    if (bad_width != 0) begin failures++; $display("%0d pulses of wrong width", bad_width); end
    if (pulses == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
