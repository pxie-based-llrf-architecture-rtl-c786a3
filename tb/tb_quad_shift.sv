// Testbench for quad_shift: feeds cos(theta*n + phi) for the 80 MHz / 50 MS/s
// case and checks that the output equals sin(theta*n + phi) * amplitude,
// computed here with real arithmetic, within 3 LSB; also checks the
// one-cycle latency.
module tb_quad_shift;
  logic clk = 0, rst_n = 0, in_valid = 0, out_valid;
  logic signed [13:0] x;
  logic signed [15:0] y;
  int checks = 0, failures = 0;
  function automatic real fabs(real v); return (v < 0.0) ? -v : v; endfunction
  localparam real PI = 3.14159265358979323846;
  real theta = 2.0 * PI * 0.6, amp = 6000.0, phi = 0.7;

  quad_shift dut (.clk, .rst_n, .in_valid, .x, .out_valid, .y);
  always #10 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    real expv;
    x = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 400; n++) begin
      x = 14'($rtoi($floor(amp * $cos(theta * n + phi) + 0.5)));
      in_valid = 1;
      @(posedge clk); #1;
      in_valid = 0;
      if (!out_valid) begin failures++; $display("no out_valid at n=%0d", n); end
      if (n > 0) begin
        expv = amp * $sin(theta * n + phi);
        checks++;
        if (fabs(real'(y) - expv) > 3.0) begin
          failures++;
          $display("n=%0d y=%0d exp=%f", n, y, expv);
        end
      end
      @(negedge clk);
      // one idle cycle: out_valid must drop
      @(posedge clk); #1;
      checks++;
      if (out_valid) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
