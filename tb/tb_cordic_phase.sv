// Testbench for cordic_phase: random vectors in all four quadrants, one per
// clock; each output is compared with atan2(Q, I) computed in real
// arithmetic (tolerance 2 LSB of the 16-bit binary angle, wrap-aware) and
// must arrive exactly ITER + 1 = 17 cycles after its input.
module tb_cordic_phase;
  import llrf_pkg::*;
  logic clk = 0, rst_n = 0, in_valid = 0, out_valid;
  iq_t i, q;
  phase_t phase;
  int checks = 0, failures = 0;
  localparam real PI = 3.14159265358979323846;
  real expq [$];
  int  tin  [$];
  int  cyc = 0;

  cordic_phase dut (.clk, .rst_n, .in_valid, .i, .q, .out_valid, .phase);
  always #10 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) begin
    if (rst_n && out_valid) begin
      real e, d;
      int t0;
      e  = expq.pop_front();
      t0 = tin.pop_front();
      d  = real'(phase) - e;
      while (d > 32768.0) d -= 65536.0;
      while (d < -32768.0) d += 65536.0;
      checks += 2;
      if (d > 2.0 || d < -2.0) begin failures++; $display("phase=%0d exp=%f", phase, e); end
      if (cyc - t0 != 17) begin failures++; $display("latency %0d", cyc - t0); end
    end
  end

  initial begin
    i = '0; q = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 2000; n++) begin
      @(negedge clk);
      if (n % 3 == 2) begin in_valid = 0; continue; end
      i = iq_t'($signed($urandom_range(0, 200000)) - 100000);
      q = iq_t'($signed($urandom_range(0, 200000)) - 100000);
      if (n < 4) begin i = (n == 0) ? 1000 : -1000; q = (n == 1) ? 0 : (n == 3 ? -500 : 0); end
      in_valid = 1;
      expq.push_back($atan2(real'(q), real'(i)) / (2.0 * PI) * 65536.0);
      tin.push_back(cyc);
    end
    @(negedge clk); in_valid = 0;
    repeat (30) @(posedge clk);
    checks++;
    if (expq.size() != 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
